// channel_eq - pilot-based channel estimation, equalisation and residual phase measurement.
//
// Channel estimation (upper path of the equalisation figure): during each pilot block the
// symbols are multiplied by the conjugate of the known pilot x_p and accumulated; at the last
// pilot symbol the sum is scaled by 1/N_p, giving H (Eq. 2), and its inverse
// 1/H = conj(H)/|H|^2 is formed (one divider) and registered. Every symbol is multiplied by
// the current 1/H: y[n] = x[n] / H. The new inverse is used from the symbol after the last
// pilot, so the pilots of a block are still corrected with the previous estimate.
//
// Residual phase (lower path): while `is_residual` is high the corrected pilots y[n] are
// multiplied by conj(x_p) and accumulated; at the end of the block the sum is inverted and
// its angle taken, which is minus the angle of the sum, because the magnitude does not
// change the angle. `dphi` (full turn = 2^16) is the phase correction the residual rotation
// calls for, and `dphi_valid` pulses once.
//
// Timing: one symbol in, one out; output registered one cycle after `in_valid`, with the
// flags passed alongside. At reset 1/H = 1.
//
// Following the paper: Eq. (2), the accumulator with scale, the (.)^-1 and the multiplier on
// the data path, the residual path through accumulator, scale, (.)^-1 and angle. This
// design's own: fixed-point formats, the 1/|H|^2 division, the inverse-gain clamp and the
// CORDIC angle.
module channel_eq
  import benchlink_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  iq_t                in,
  input  logic               is_frame,
  input  logic               is_pilot,
  input  logic               is_residual,
  input  logic [3:0]         pilot_idx,
  input  logic               frame_end_in,
  output logic               out_valid,
  output iq_t                out,
  output logic               out_data,     // payload data symbol (is_frame and not a pilot)
  output logic               frame_end,
  output iq_t                h_est,
  output logic               dphi_valid,
  output logic signed [15:0] dphi
);
  localparam int NP_LOG = $clog2(PILOT_LEN);

  iq_t                xp;
  logic signed [47:0] acc_re, acc_im, acc_re_n, acc_im_n;
  logic signed [47:0] res_re, res_im, res_re_n, res_im_n;
  logic signed [23:0] inv_re, inv_im;          // 1/H, Q9.14
  logic signed [47:0] y_re, y_im;
  iq_t                y;
  logic signed [23:0] h_re, h_im;              // H, Q9.14
  logic        [47:0] mag2;
  logic        [47:0] recip;
  logic signed [47:0] ninv_re, ninv_im;
  logic               last_pilot;

  assign xp         = pilot_sym(pilot_idx);
  assign last_pilot = is_pilot && (pilot_idx == 4'(PILOT_LEN - 1));

  always_comb begin
    // data path: y = x * (1/H)
    y_re = 48'(in.i) * 48'(inv_re) - 48'(in.q) * 48'(inv_im);
    y_im = 48'(in.i) * 48'(inv_im) + 48'(in.q) * 48'(inv_re);
    y.i  = sat16((y_re + 48'sd8192) >>> FRAC);
    y.q  = sat16((y_im + 48'sd8192) >>> FRAC);

    // channel estimation accumulator, cleared at pilot 0
    acc_re_n = ((pilot_idx == 0) ? 48'sd0 : acc_re) + 48'(cmul_conj_re(in, xp));
    acc_im_n = ((pilot_idx == 0) ? 48'sd0 : acc_im) + 48'(cmul_conj_im(in, xp));

    // scale 1/N_p (and the Q14 of x_p): H in Q14
    h_re = 24'((acc_re_n + (48'sd1 <<< (FRAC + NP_LOG - 1))) >>> (FRAC + NP_LOG));
    h_im = 24'((acc_im_n + (48'sd1 <<< (FRAC + NP_LOG - 1))) >>> (FRAC + NP_LOG));

    // inverse: conj(H) / |H|^2; recip = 2^44 / |H|^2 is 1/|H|^2 in Q16
    mag2  = 48'(48'(h_re) * 48'(h_re) + 48'(h_im) * 48'(h_im));
    recip = (mag2 < 48'd64) ? 48'(1) << 38 : (48'(1) << 44) / mag2;
    ninv_re = (48'(h_re) * $signed(recip)) >>> 16;
    ninv_im = -((48'(h_im) * $signed(recip)) >>> 16);

    // residual phase accumulator on corrected pilots
    res_re_n = ((pilot_idx == 0) ? 48'sd0 : res_re) + 48'(cmul_conj_re(y, xp));
    res_im_n = ((pilot_idx == 0) ? 48'sd0 : res_im) + 48'(cmul_conj_im(y, xp));
  end

  function automatic logic signed [23:0] clamp24(logic signed [47:0] v);
    if (v > 48'sd8388607)       return 24'sd8388607;
    else if (v < -48'sd8388608) return -24'sd8388608;
    else                        return v[23:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re     <= '0;
      acc_im     <= '0;
      res_re     <= '0;
      res_im     <= '0;
      inv_re     <= 24'(ONE);
      inv_im     <= '0;
      h_est      <= '{i: 16'(ONE), q: 16'sd0};
      out        <= '0;
      out_valid  <= 1'b0;
      out_data   <= 1'b0;
      frame_end  <= 1'b0;
      dphi_valid <= 1'b0;
      dphi       <= '0;
    end else begin
      out_valid  <= in_valid;
      dphi_valid <= 1'b0;
      frame_end  <= in_valid && frame_end_in;
      if (in_valid) begin
        out      <= y;
        out_data <= is_frame && !is_pilot;
        if (is_pilot) begin
          acc_re <= acc_re_n;
          acc_im <= acc_im_n;
          if (last_pilot) begin
            inv_re  <= clamp24(ninv_re);
            inv_im  <= clamp24(ninv_im);
            h_est.i <= sat16(48'(h_re));
            h_est.q <= sat16(48'(h_im));
          end
        end
        if (is_residual) begin
          res_re <= res_re_n;
          res_im <= res_im_n;
          if (last_pilot) begin
            // angle of the inverse = angle of the conjugate
            dphi       <= cordic_angle(32'(res_re_n >>> 8), 32'(-(res_im_n >>> 8)));
            dphi_valid <= 1'b1;
          end
        end
      end
    end
  end

endmodule
