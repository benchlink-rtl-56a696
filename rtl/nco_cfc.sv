// nco_cfc - numerically controlled oscillator and carrier frequency compensator.
//
// A 32-bit phase accumulator advances by `inc` on each valid sample; the sample is rotated
// by minus the accumulated phase, y[n] = x[n] e^{-j phi[n]}, with a CORDIC rotator (top 16
// phase bits, full turn = 2^16). A positive `inc` therefore removes a positive frequency
// offset: the oscillator runs at -df_est. `inc` is a full turn in 2^32 units per sample and is
// loaded by the estimator; the phase is continuous across a change of `inc`. Output is
// registered, one cycle after `in_valid`.
//
// Following the paper: an NCO driven by the estimate and a compensator that rotates the
// samples at -df_est. This design's own: the CORDIC rotator and the widths.
module nco_cfc
  import benchlink_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  iq_t                in,
  input  logic signed [31:0] inc,
  output logic               out_valid,
  output iq_t                out
);
  logic [31:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out   <= cordic_rotate(in, -$signed(phase[31:16]));
        phase <= phase + inc;
      end
    end
  end

endmodule
