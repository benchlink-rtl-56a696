// cfo_estimator - autocorrelation-based coarse carrier frequency offset estimator.
//
// Implements C[n] = sum_{k=n-M+1..n} x[k] x*[k-M] and P[n] = sum_{k=n-M+1..n} |x[k]|^2 as
// exact running sums (each new term added, the term M samples old subtracted), over a
// 2M-sample delay line. The decision metric rho[n] = |C[n]|/P[n] is compared with the
// programmable threshold without a divider: |C|^2 * 256^2 > (thr * P)^2. The same test is
// also made against the energy Q[n] of the delayed window x[k-M]; by Cauchy-Schwarz
// |C| <= max(P, Q), so the metric cannot exceed 1. With P alone, as the paper writes it, rho
// grows without bound when a burst ends (x[k] is noise while x[k-M] is still signal) and the
// estimator fired falsely at the end of every burst. While rho is above
// the threshold the largest |C| and its C are tracked; once |C| has not grown for HOLD
// samples, or rho falls below the threshold, the peak is taken: `est_valid` pulses for one
// cycle with `est_angle`, the angle of C_peak (full turn = 2^16). The delay between the two
// copies is M, so the normalised CFO is est_angle / (2^16 * M) cycles per symbol. After an
// estimate the detector ignores HOLDOFF samples (the rest of the frame), so periodic payload
// content cannot retrigger it.
//
// Following the paper: Eq. (1), rho[n] = |C[n]|/P[n], a programmable threshold and the phase
// of the peak of C. This design's own: the second energy test, M = 128 (the preamble length, because the training
// sequence repeats the preamble), the peak-hold rule, the hold-off and the fixed-point widths.
module cfo_estimator
  import benchlink_pkg::*;
#(
  parameter int M       = PREAMBLE_LEN,
  parameter int HOLD    = 8,
  parameter int HOLDOFF = SUBFRAMES * SUBFRAME_LEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  iq_t                in,
  input  logic [7:0]         thresh,
  output logic               above,       // rho[n] above the threshold
  output logic               est_valid,
  output logic signed [15:0] est_angle
);
  iq_t dl [2*M];                            // dl[j] = x[n-1-j]

  logic signed [47:0] c_re, c_im, p_sum, q_sum;
  logic signed [47:0] c_re_n, c_im_n, p_n, q_n;
  iq_t                x_m, x_2m;            // x[n-M], x[n-2M]

  assign x_m  = dl[M-1];
  assign x_2m = dl[2*M-1];

  always_comb begin
    c_re_n = c_re + 48'(cmul_conj_re(in, x_m)) - 48'(cmul_conj_re(x_m, x_2m));
    c_im_n = c_im + 48'(cmul_conj_im(in, x_m)) - 48'(cmul_conj_im(x_m, x_2m));
    p_n    = p_sum + 48'(cmul_conj_re(in, in)) - 48'(cmul_conj_re(x_m, x_m));
    q_n    = q_sum + 48'(cmul_conj_re(x_m, x_m)) - 48'(cmul_conj_re(x_2m, x_2m));
  end

  // threshold test on the registered sums
  logic signed [31:0]  cr_s, ci_s;
  logic        [31:0]  p_s, q_s, e_s;
  logic        [71:0]  mag2, lhs, rhs;

  assign cr_s = 32'(c_re >>> 12);
  assign ci_s = 32'(c_im >>> 12);
  assign p_s  = 32'(p_sum >>> 12);
  assign q_s  = 32'(q_sum >>> 12);
  assign e_s  = (p_s > q_s) ? p_s : q_s;
  assign mag2 = 72'(64'($signed(cr_s) * $signed(cr_s))) + 72'(64'($signed(ci_s) * $signed(ci_s)));
  assign lhs  = mag2 << 16;
  assign rhs  = 72'(e_s * 40'(thresh)) * 72'(e_s * 40'(thresh));
  assign above = (p_s != 0) && (lhs > rhs);

  typedef enum logic [1:0] {S_SEARCH, S_TRACK, S_HOLDOFF} state_t;
  state_t             state;
  logic [71:0]        pk_mag2;
  logic signed [31:0] pk_re, pk_im;
  logic [$clog2(HOLDOFF+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 2*M; j++) dl[j] <= '0;
      c_re      <= '0;
      c_im      <= '0;
      p_sum     <= '0;
      q_sum     <= '0;
      state     <= S_SEARCH;
      pk_mag2   <= '0;
      pk_re     <= '0;
      pk_im     <= '0;
      cnt       <= '0;
      est_valid <= 1'b0;
      est_angle <= '0;
    end else begin
      est_valid <= 1'b0;
      if (in_valid) begin
        dl[0] <= in;
        for (int j = 1; j < 2*M; j++) dl[j] <= dl[j-1];
        c_re  <= c_re_n;
        c_im  <= c_im_n;
        p_sum <= p_n;
        q_sum <= q_n;
        case (state)
          S_SEARCH: if (above) begin
            state   <= S_TRACK;
            pk_mag2 <= mag2;
            pk_re   <= cr_s;
            pk_im   <= ci_s;
            cnt     <= '0;
          end
          S_TRACK: begin
            if (above && mag2 > pk_mag2) begin
              pk_mag2 <= mag2;
              pk_re   <= cr_s;
              pk_im   <= ci_s;
              cnt     <= '0;
            end else if (!above || int'(cnt) == HOLD - 1) begin
              est_valid <= 1'b1;
              est_angle <= cordic_angle(pk_re, pk_im);
              state     <= S_HOLDOFF;
              cnt       <= '0;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          default: begin
            cnt <= cnt + 1'b1;
            if (int'(cnt) == HOLDOFF - 1) state <= S_SEARCH;
          end
        endcase
      end
    end
  end

endmodule
