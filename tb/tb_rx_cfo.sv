// tb_rx_cfo - checks the coarse CFO correction path (estimator, delay line and NCO).
//
// A burst (random QPSK, preamble twice, 2048 random payload symbols) is rotated by a known
// offset. The k-th output must be the (k-32)-th input (32-sample delay line). After the
// estimate, the phase of out * conj(sent symbol) must stay constant over the payload: its
// drift from the start to the end of the payload must be under 3 degrees, where the
// uncorrected drift would be f * 2048 turns.
//
// Estimate-then-rotate at -df_est follows the paper; the delay line is this design's own.
`timescale 1ns/1ps
module tb_rx_cfo;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               in_valid, out_valid, est_valid;
  iq_t                in, out;
  logic signed [15:0] cfo_angle;
  int checks = 0, failures = 0;

  rx_cfo dut (.clk, .rst_n, .in_valid, .in, .thresh(8'd205), .out_valid, .out, .est_valid,
              .cfo_angle);

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

  real sre [$], sim [$];     // symbols before the channel rotation
  iq_t outs [$];
  int  n_est = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) outs.push_back(out);
    if (rst_n && est_valid) n_est++;
  end

  task automatic send(real re, real im, real f);
    real c, s;
    int n = sre.size();
    c = $cos(6.283185307 * f * n); s = $sin(6.283185307 * f * n);
    sre.push_back(re); sim.push_back(im);
    @(posedge clk);
    while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
    in_valid <= 1;
    in.i <= 16'($rtoi(re * c - im * s));
    in.q <= 16'($rtoi(re * s + im * c));
  endtask

  // mean angle (in turns) of out[k+32] * conj(sent[k]) over k = k0..k0+49
  function automatic real mean_angle(int k0);
    real ar = 0.0, ai = 0.0;
    for (int k = k0; k < k0 + 50; k++) begin
      ar += outs[k + 32].i * sre[k] + outs[k + 32].q * sim[k];
      ai += outs[k + 32].q * sre[k] - outs[k + 32].i * sim[k];
    end
    return $atan2(ai, ar) / 6.283185307;
  endfunction

  task automatic run(real f);
    real a = 6000.0, d;
    rst_n = 0; outs.delete(); sre.delete(); sim.delete(); n_est = 0; in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) send($urandom_range(1) ? a : -a, $urandom_range(1) ? a : -a, f);
    for (int k = 0; k < 256; k++) send(preamble_sym(7'(k % 128)).i * 0.5, 0.0, f);
    for (int k = 0; k < 2048; k++) send($urandom_range(1) ? a : -a, $urandom_range(1) ? a : -a, f);
    for (int k = 0; k < 40; k++) send(0.0, 0.0, 0.0);
    @(posedge clk);
    in_valid <= 0;
    repeat (5) @(posedge clk);
    check(n_est == 1, $sformatf("f=%f: one estimate", f));
    check(outs.size() == sre.size(), "one output per input");
    d = mean_angle(2500) - mean_angle(560);
    if (d > 0.5) d -= 1.0;
    if (d < -0.5) d += 1.0;
    check(d < 3.0 / 360.0 && d > -3.0 / 360.0,
          $sformatf("f=%f: payload phase drift %0.2f deg", f, d * 360.0));
    check(outs[0] == '0 && outs[31] == '0, "delay line starts empty");
  endtask

  initial begin
    in_valid = 0; in = '0;
    run(5.0e-4);
    run(-1.5e-3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
