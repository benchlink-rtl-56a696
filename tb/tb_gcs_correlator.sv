// tb_gcs_correlator - checks the Golay matched filter, the magnitude normaliser and the
// threshold comparator.
//
// The input is random QPSK with the 128-symbol preamble inserted, at a large and at a small
// amplitude (the normalisation must make detection independent of the level). A reference
// model computed here (correlation with the +-1 preamble, magnitude approximation
// max + min/2, window magnitude sum, no decision before the window is full) must agree with `detect` on every sample; detect must
// fire on the last preamble symbol and nowhere in random data; `out` must equal the input.
//
// The Golay matched filter and normalised threshold follow the paper; the magnitude
// approximation in the model is this design's own.
`timescale 1ns/1ps
module tb_gcs_correlator;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid, out_valid, detect;
  iq_t        in, out;
  int checks = 0, failures = 0;

  gcs_correlator dut (.clk, .rst_n, .in_valid, .in, .thresh(8'd154), .out_valid, .out, .detect);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iq_t xs [$], outs [$];
  bit  dets [$];
  always @(posedge clk) if (rst_n && out_valid) begin outs.push_back(out); dets.push_back(detect); end

  task automatic send(iq_t s);
    @(posedge clk);
    while ($urandom_range(4) == 0) begin in_valid <= 0; @(posedge clk); end
    in_valid <= 1; in <= s; xs.push_back(s);
  endtask

  function automatic longint amag(longint re, longint im);
    longint a = re < 0 ? -re : re, b = im < 0 ? -im : im;
    return a > b ? a + b / 2 : b + a / 2;
  endfunction

  task automatic run(int amp, bit with_pre);
    int n_det = 0, mism = 0, det_at = -1, pre_end;
    rst_n = 0; xs.delete(); outs.delete(); dets.delete(); in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++)
      send('{i: 16'($urandom_range(1) ? amp : -amp), q: 16'($urandom_range(1) ? amp : -amp)});
    if (with_pre)
      for (int k = 0; k < 128; k++)
        send('{i: 16'(PREAMBLE_BITS[k] ? amp : -amp), q: 16'(0)});
    pre_end = xs.size() - 1;
    for (int k = 0; k < 2000; k++)
      send('{i: 16'($urandom_range(1) ? amp : -amp), q: 16'($urandom_range(1) ? amp : -amp)});
    @(posedge clk);
    in_valid <= 0;
    repeat (3) @(posedge clk);
    check(outs.size() == xs.size(), "one output per input");
    for (int n = 0; n < outs.size(); n++) begin
      longint mi = 0, mq = 0, ms = 0;
      bit e;
      for (int k = 0; k < 128; k++) begin
        int j = n - 127 + k;
        if (j >= 0) begin
          mi += PREAMBLE_BITS[k] ? xs[j].i : -xs[j].i;
          mq += PREAMBLE_BITS[k] ? xs[j].q : -xs[j].q;
          ms += amag(xs[j].i, xs[j].q);
        end
      end
      e = (n >= 127) && (ms != 0) && (amag(mi, mq) * 256 > 154 * ms);
      if (e != dets[n] || outs[n] != xs[n]) mism++;
      if (dets[n]) begin n_det++; det_at = n; end
    end
    check(mism == 0, $sformatf("amp %0d: %0d samples differ from the model", amp, mism));
    if (with_pre) begin
      check(n_det == 1 && det_at == pre_end, $sformatf("amp %0d: detect at %0d (expected %0d), %0d detects",
                                                       amp, det_at, pre_end, n_det));
    end else begin
      check(n_det == 0, "no detect on random data");
    end
  endtask

  initial begin
    in_valid = 0; in = '0;
    run(8000, 1);
    run(300, 1);
    run(8000, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
