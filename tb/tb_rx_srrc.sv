// tb_rx_srrc - checks the RX SRRC matched filter with decimation by 4, and the tap set.
//
// The tap set must be symmetric, have unit energy and, convolved with itself (TX filter
// followed by RX filter), give a raised-cosine pulse with zero inter-symbol interference at
// multiples of 4 samples. The filter output is compared with a direct convolution computed
// here, for decimation phases 0 and 2, with a random input-valid pattern.
//
// A matched SRRC filter follows the paper; taps and decimation phase are this design's own.
`timescale 1ns/1ps
module tb_rx_srrc;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid, out_valid;
  iq_t        in, out;
  logic [1:0] phase;
  int checks = 0, failures = 0;

  rx_srrc dut (.clk, .rst_n, .in_valid, .in, .phase, .out_valid, .out);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iq_t xs [$], outs [$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid) xs.push_back(in);
    if (out_valid) outs.push_back(out);
    in_valid <= ($urandom_range(2) != 0);
    in <= '{i: 16'($urandom_range(20000) - 10000), q: 16'($urandom_range(20000) - 10000)};
  end

  function automatic int ref_out(int n, bit q);
    longint acc = 0;
    for (int j = 0; j < 25; j++)
      if (n - j >= 0) acc += longint'(q ? xs[n - j].q : xs[n - j].i) * SRRC_TAPS[j];
    acc = (acc + 16384) >>> 15;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic run(int ph);
    int bad = 0, m = 0;
    rst_n = 0; xs.delete(); outs.delete(); in_valid = 0; phase = 2'(ph);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4000) @(posedge clk);
    for (int n = ph; n < xs.size() && m < outs.size(); n += 4) begin
      if (outs[m].i != 16'(ref_out(n, 0)) || outs[m].q != 16'(ref_out(n, 1))) bad++;
      m++;
    end
    check(m > 500 && outs.size() - m <= 1, $sformatf("phase %0d: %0d outputs", ph, outs.size()));
    check(bad == 0, $sformatf("phase %0d: %0d outputs differ", ph, bad));
  endtask

  initial begin
    longint e, r, pk;
    in_valid = 0; in = '0; phase = 0;
    e = 0;
    for (int j = 0; j < 25; j++) begin
      e += longint'(SRRC_TAPS[j]) * SRRC_TAPS[j];
      check(SRRC_TAPS[j] == SRRC_TAPS[24 - j], $sformatf("tap %0d symmetric", j));
    end
    check(e > 1063000000 && e < 1084000000, $sformatf("unit energy (%0d vs 2^30)", e));
    pk = e;
    for (int k = 1; k <= 6; k++) begin
      r = 0;
      for (int j = 0; j + 4 * k < 25; j++) r += longint'(SRRC_TAPS[j]) * SRRC_TAPS[j + 4 * k];
      if (r < 0) r = -r;
      check(r * 50 < pk, $sformatf("raised-cosine ISI at %0d symbols below 2%%", k));
    end
    run(0);
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
