// rx_cfo - coarse CFO estimation and correction stage of the receiver.
//
// The estimator sees the symbols as they arrive; the compensator sees them DELAY symbols
// later, so that the estimate taken at the end of the training sequence (up to HOLD symbols
// after its peak) is applied from the first payload symbol of the same frame. On each
// estimate the NCO increment becomes angle(C_peak) * 2^16 / M, which is 2*pi*df_est per
// symbol, and the compensator rotates by -2*pi*df_est*n. `cfo_angle` holds the last estimate.
// Output is registered.
//
// Following the paper: estimate from the preamble autocorrelation, drive an NCO at -df_est
// and rotate the samples. This design's own: the alignment delay and holding the estimate
// until the next frame.
module rx_cfo
  import benchlink_pkg::*;
#(
  parameter int M       = PREAMBLE_LEN,
  parameter int DELAY   = 32,
  parameter int HOLD    = 8,
  parameter int HOLDOFF = SUBFRAMES * SUBFRAME_LEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  iq_t                in,
  input  logic [7:0]         thresh,
  output logic               out_valid,
  output iq_t                out,
  output logic               est_valid,
  output logic signed [15:0] cfo_angle
);
  localparam int SH = 16 - $clog2(M);

  logic               est_v;
  logic signed [15:0] est_a;
  logic signed [31:0] inc;
  iq_t                dl [DELAY];

  cfo_estimator #(.M(M), .HOLD(HOLD), .HOLDOFF(HOLDOFF)) u_est (
    .clk, .rst_n, .in_valid, .in, .thresh, .above(), .est_valid(est_v), .est_angle(est_a)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inc       <= '0;
      cfo_angle <= '0;
      for (int j = 0; j < DELAY; j++) dl[j] <= '0;
    end else begin
      if (est_v) begin
        inc       <= 32'(est_a) <<< SH;
        cfo_angle <= est_a;
      end
      if (in_valid) begin
        dl[0] <= in;
        for (int j = 1; j < DELAY; j++) dl[j] <= dl[j-1];
      end
    end
  end

  assign est_valid = est_v;

  nco_cfc u_cfc (
    .clk, .rst_n, .in_valid, .in(dl[DELAY-1]), .inc, .out_valid, .out
  );

endmodule
