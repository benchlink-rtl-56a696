// gcs_correlator - preamble correlator, normaliser and comparator of the frame detector.
//
// An N-tap FIR matched filter slides over the CFO-corrected symbols: MF[n] = sum_k a[k]
// x[n-N+1+k], where a is the +-1 Golay preamble, so the filter needs only adders. Its output
// peaks when the last preamble symbol enters. The peak magnitude is normalised by the mean
// magnitude of the N symbols in the window (the |.|/avg(|.|) block of the frame-detection
// figure): `detect` is raised when |MF| * 256 > thresh * sum|x| with sum|x| > 0, i.e. when
// |MF| / (N avg|x|) exceeds thresh/256 (1.0 for a clean preamble). Magnitudes use the
// approximation max(|re|,|im|) + min(|re|,|im|)/2. No detection is made until N symbols have
// been seen after reset, because a partly filled window correlates with itself. The symbol
// is passed on registered, with `detect` in the same cycle as the symbol that completes the
// preamble.
//
// Following the paper: a matched FIR correlator on the Golay preamble, magnitude over average
// magnitude, and a threshold comparator. This design's own: the magnitude approximation,
// the running sum, the start-up blanking and the widths.
module gcs_correlator
  import benchlink_pkg::*;
#(
  parameter int N = PREAMBLE_LEN
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  iq_t        in,
  input  logic [7:0] thresh,
  output logic       out_valid,
  output iq_t        out,
  output logic       detect
);
  iq_t dl [N];          // dl[j] = x[n-j] after the shift
  iq_t dl_n [N];

  logic signed [31:0] mf_i, mf_q;
  logic        [31:0] mf_mag, msum, msum_n;
  logic        [47:0] lhs, rhs;
  logic [$clog2(N):0] fill;     // symbols seen since reset, saturating at N

  function automatic logic [31:0] mag32(logic signed [31:0] re, logic signed [31:0] im);
    logic [31:0] a, b;
    a = re[31] ? 32'(-re) : 32'(re);
    b = im[31] ? 32'(-im) : 32'(im);
    return (a > b) ? a + (b >> 1) : b + (a >> 1);
  endfunction

  always_comb begin
    dl_n[0] = in;
    for (int j = 1; j < N; j++) dl_n[j] = dl[j-1];
    mf_i = '0;
    mf_q = '0;
    for (int j = 0; j < N; j++) begin
      if (PREAMBLE_BITS[N-1-j]) begin
        mf_i = mf_i + 32'(dl_n[j].i);
        mf_q = mf_q + 32'(dl_n[j].q);
      end else begin
        mf_i = mf_i - 32'(dl_n[j].i);
        mf_q = mf_q - 32'(dl_n[j].q);
      end
    end
    mf_mag = mag32(mf_i, mf_q);
    msum_n = msum + 32'(mag_approx(in)) - 32'(mag_approx(dl[N-1]));
    lhs    = 48'(mf_mag) << 8;
    rhs    = 48'(msum_n) * 48'(thresh);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) dl[j] <= '0;
      msum      <= '0;
      fill      <= '0;
      out       <= '0;
      out_valid <= 1'b0;
      detect    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dl     <= dl_n;
        msum   <= msum_n;
        out    <= in;
        if (32'(fill) < N) fill <= fill + 1'b1;
        detect <= (msum_n != 0) && (lhs > rhs) && (32'(fill) >= N - 1);
      end else begin
        detect <= 1'b0;
      end
    end
  end

endmodule
