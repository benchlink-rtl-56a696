// pulse_shaper - upsampling by l and SRRC pulse-shaping FIR of the transmitter.
//
// The symbol stream is upsampled by the integer factor l (zero insertion) and filtered by a
// square-root raised-cosine FIR. It is computed in polyphase form: on each output sample
// strobe with phase p (0..l-1) the output is sum_k h[p + k*l] * s[m-k] over the last
// ceil(NTAPS/l) symbols s. At phase 0 the next symbol is taken from `sym_in` and `sym_req`
// pulses in the same cycle. `strobe` comes from the DAC side, one per output sample; the
// sample appears on `out` one cycle after the strobe with `out_valid`.
//
// Following the paper: upsampling by an integer l followed by an SRRC FIR. This design's
// own: l = 4, roll-off 0.5, 6-symbol span (25 taps, see benchlink_pkg), Q1.15 taps and
// saturation to 16 bits.
module pulse_shaper
  import benchlink_pkg::*;
#(
  parameter int L     = SRRC_L,
  parameter int NTAPS = SRRC_NTAPS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic strobe,
  input  iq_t  sym_in,
  output logic sym_req,
  output iq_t  out,
  output logic out_valid
);
  localparam int NS = (NTAPS + L - 1) / L;

  iq_t                    hist [NS];
  iq_t                    hist_n [NS];
  logic [$clog2(L)-1:0]   ph;
  logic signed [47:0]     acc_i, acc_q;

  assign sym_req = strobe && (ph == '0);

  always_comb begin
    for (int k = 0; k < NS; k++) hist_n[k] = hist[k];
    if (ph == '0) begin
      hist_n[0] = sym_in;
      for (int k = 1; k < NS; k++) hist_n[k] = hist[k-1];
    end
    acc_i = '0;
    acc_q = '0;
    for (int k = 0; k < NS; k++) begin
      if (int'(ph) + k * L < NTAPS) begin
        acc_i = acc_i + 48'(hist_n[k].i) * 48'(SRRC_TAPS[int'(ph) + k * L]);
        acc_q = acc_q + 48'(hist_n[k].q) * 48'(SRRC_TAPS[int'(ph) + k * L]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NS; k++) hist[k] <= '0;
      ph        <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= strobe;
      if (strobe) begin
        hist <= hist_n;
        ph   <= (int'(ph) == L - 1) ? '0 : ph + 1'b1;
        out.i <= sat16((acc_i + 48'sd16384) >>> 15);
        out.q <= sat16((acc_q + 48'sd16384) >>> 15);
      end
    end
  end

endmodule
