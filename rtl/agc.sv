// agc - automatic gain control ahead of the receive filter.
//
// Each valid sample is scaled by the gain g (Q4.12, 1.0 = 4096): y = x*g. A square-law
// estimator measures the output power p = (yi^2 + yq^2) in 2^-14 units of full scale, and an
// accumulating loop integrates the error: g += (ref - p) * 2^-mu (in gain LSBs), clamped to
// [1/16, 16). The loop settles where the mean output power equals `ref`. Output is registered:
// `out_valid` follows `in_valid` by one cycle.
//
// Following the paper: a square-law power estimator and an accumulation-based loop. This
// design's own: the gain format, the clamp, the step size and the update on every sample.
module agc
  import benchlink_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  iq_t         in,
  input  logic [15:0] ref_pwr,
  input  logic [3:0]  mu,
  output logic        out_valid,
  output iq_t         out,
  output logic [15:0] gain
);
  localparam logic [31:0] G_MIN = 32'd256 << 16;
  localparam logic [31:0] G_MAX = 32'd65535 << 16;
  localparam logic [31:0] G_ONE = 32'd4096 << 16;

  logic [31:0]        gacc;      // gain with 16 extra fraction bits
  iq_t                y;
  logic signed [47:0] pi_, pq_;
  logic signed [47:0] pwr, err, gnext;

  assign gain = gacc[31:16];

  always_comb begin
    pi_   = 48'(in.i) * 48'($signed({1'b0, gain}));
    pq_   = 48'(in.q) * 48'($signed({1'b0, gain}));
    y.i   = sat16((pi_ + 48'sd2048) >>> 12);
    y.q   = sat16((pq_ + 48'sd2048) >>> 12);
    pwr   = (48'(y.i) * 48'(y.i) + 48'(y.q) * 48'(y.q)) >>> 14;
    err   = 48'($signed({1'b0, ref_pwr})) - pwr;
    gnext = 48'($signed({1'b0, gacc})) + ((err <<< 16) >>> mu);
    if (gnext < 48'($signed({1'b0, G_MIN}))) gnext = 48'($signed({1'b0, G_MIN}));
    if (gnext > 48'($signed({1'b0, G_MAX}))) gnext = 48'($signed({1'b0, G_MAX}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gacc      <= G_ONE;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out  <= y;
        gacc <= gnext[31:0];
      end
    end
  end

endmodule
