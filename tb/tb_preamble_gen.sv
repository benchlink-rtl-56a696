// tb_preamble_gen - checks the 128-symbol preamble (also sent again as training sequence).
//
// The preamble must be BPSK (+-1.0 in Q1.14 on I, zero on Q). Its two 64-symbol halves must
// be a Golay complementary pair, because the 128 sequence is built as [a64 b64]; this is
// checked from the generator output by computing the summed aperiodic autocorrelation of
// the halves. The full sequence's periodic-free autocorrelation sidelobes must stay well
// below the peak of 128, which is what the receiver's correlator relies on.
//
// The Golay preamble follows the paper; its construction is this design's own.
`timescale 1ns/1ps
module tb_preamble_gen;
  import benchlink_pkg::*;
  logic [6:0] idx;
  iq_t        sym;
  int checks = 0, failures = 0;
  int p [128];

  preamble_gen dut (.idx, .sym);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, mx;
    for (int k = 0; k < 128; k++) begin
      idx = 7'(k);
      #1;
      check((sym.i == 16384 || sym.i == -16384) && sym.q == 0, $sformatf("BPSK symbol %0d", k));
      p[k] = sym.i > 0 ? 1 : -1;
    end
    for (int s = 1; s < 64; s++) begin
      r = 0;
      for (int k = 0; k + s < 64; k++) r += p[k] * p[k+s] + p[64+k] * p[64+k+s];
      check(r == 0, $sformatf("halves complementary at shift %0d", s));
    end
    mx = 0;
    for (int s = 1; s < 128; s++) begin
      r = 0;
      for (int k = 0; k + s < 128; k++) r += p[k] * p[k+s];
      if (r < 0) r = -r;
      if (r > mx) mx = r;
    end
    check(mx <= 64, $sformatf("autocorrelation sidelobe %0d <= 64 (peak 128)", mx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
