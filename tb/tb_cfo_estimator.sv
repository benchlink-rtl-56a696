// tb_cfo_estimator - checks the autocorrelation CFO estimator.
//
// A burst of random QPSK, the 128-symbol preamble sent twice (preamble + training), then
// random payload is rotated by a known carrier offset f (cycles per sample) with a little
// noise. The estimate must come exactly once per burst and equal f * 128 * 2^16 (the phase
// advance over the 128-sample lag) within 1.5 degrees. Random data alone, and the end of a
// burst followed by silence, must never give an estimate.
//
// The estimator follows Eq. (1) of the paper (lag = preamble length); offsets, noise and
// tolerances are this testbench's own.
`timescale 1ns/1ps
module tb_cfo_estimator;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               in_valid, above, est_valid;
  iq_t                in;
  logic signed [15:0] est_angle;
  int checks = 0, failures = 0;

  cfo_estimator dut (.clk, .rst_n, .in_valid, .in, .thresh(8'd205), .above, .est_valid,
                     .est_angle);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_est = 0, last_angle = 0;
  always @(posedge clk) if (rst_n && est_valid) begin n_est++; last_angle = est_angle; end

  // send one sample (with a random idle cycle now and then)
  task automatic send(real re, real im, real f, int n);
    real c, s;
    c = $cos(6.283185307 * f * n); s = $sin(6.283185307 * f * n);
    @(posedge clk);
    while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
    in_valid <= 1;
    in.i <= 16'($rtoi(re * c - im * s) + int'($urandom_range(200)) - 100);
    in.q <= 16'($rtoi(re * s + im * c) + int'($urandom_range(200)) - 100);
  endtask

  task automatic burst(real f, int pre, bit with_preamble, int payload);
    int n = 0;
    real a = 6000.0;
    for (int k = 0; k < pre; k++, n++)
      send($urandom_range(1) ? a : -a, $urandom_range(1) ? a : -a, f, n);
    if (with_preamble)
      for (int k = 0; k < 256; k++, n++) send(preamble_sym(7'(k % 128)).i * 0.5, 0.0, f, n);
    for (int k = 0; k < payload; k++, n++)
      send($urandom_range(1) ? a : -a, $urandom_range(1) ? a : -a, f, n);
    for (int k = 0; k < 400; k++) send(0.0, 0.0, 0.0, 0);
    @(posedge clk);
    in_valid <= 0;
    repeat (10) @(posedge clk);
  endtask

  task automatic run(real f);
    int exp_a, err;
    rst_n = 0; n_est = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    burst(f, 300, 1, 2048);
    exp_a = $rtoi(f * 128.0 * 65536.0);
    err = last_angle - exp_a;
    check(n_est == 1, $sformatf("f=%f: %0d estimates", f, n_est));
    check(err < 273 && err > -273, $sformatf("f=%f: angle %0d expected %0d", f, last_angle, exp_a));
  endtask

  initial begin
    in_valid = 0; in = '0;
    run(2.0e-4);
    run(-1.0e-3);
    run(3.0e-3);
    run(0.0);
    rst_n = 0; n_est = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    burst(5.0e-4, 6000, 0, 0);
    check(n_est == 0, "no estimate on random data and burst end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
