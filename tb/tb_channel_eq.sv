// tb_channel_eq - checks pilot-based channel estimation, equalisation and the residual
// phase measurement.
//
// The channel is a complex gain H (0.7 at 40 degrees here, 1.3 at -100 degrees in a second
// run) and, from the second pilot block on, an extra rotation of theta. The testbench drives
// the frame flags itself: pilot block, 100 data symbols, pilot block marked is_residual,
// 100 data symbols. Expected results, computed here in floating point: h_est = H after the
// first block; data after each block equalised back to the sent symbol; pilots of the first
// block passed unchanged (1/H = 1 from reset); dphi = -theta after the second block.
//
// The estimate H follows the paper's pilot correlation; the channel values and tolerances
// are this testbench's own.
`timescale 1ns/1ps
module tb_channel_eq;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               in_valid, is_frame, is_pilot, is_residual, frame_end_in;
  logic               out_valid, out_data, frame_end, dphi_valid;
  logic [3:0]         pilot_idx;
  iq_t                in, out, h_est;
  logic signed [15:0] dphi;
  int checks = 0, failures = 0;

  channel_eq dut (.clk, .rst_n, .in_valid, .in, .is_frame, .is_pilot, .is_residual, .pilot_idx,
    .frame_end_in, .out_valid, .out, .out_data, .frame_end, .h_est, .dphi_valid, .dphi);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iq_t outs [$];
  bit  odat [$], oend [$];
  int  n_dphi = 0, last_dphi = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin outs.push_back(out); odat.push_back(out_data); oend.push_back(frame_end); end
    if (dphi_valid) begin n_dphi++; last_dphi = dphi; end
  end

  real gr, gi;    // current channel gain
  iq_t sent [$];
  task automatic send(iq_t s, bit pil, bit res, int pidx, bit last);
    real re, im;
    re = s.i * gr - s.q * gi;
    im = s.i * gi + s.q * gr;
    sent.push_back(s);
    @(posedge clk);
    while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
    in_valid <= 1; in <= '{i: 16'($rtoi(re)), q: 16'($rtoi(im))};
    is_frame <= 1; is_pilot <= pil; is_residual <= res; pilot_idx <= 4'(pidx);
    frame_end_in <= last;
  endtask

  function automatic iq_t rnd_sym();
    int l [4] = '{-3, -1, 1, 3};
    return '{i: 16'(l[$urandom_range(3)] * 5181), q: 16'(l[$urandom_range(3)] * 5181)};
  endfunction

  function automatic bit near(iq_t a, iq_t b, int tol);
    return (int'(a.i) - int'(b.i) <= tol) && (int'(b.i) - int'(a.i) <= tol) &&
           (int'(a.q) - int'(b.q) <= tol) && (int'(b.q) - int'(a.q) <= tol);
  endfunction

  task automatic run(real mag, real deg, real theta_deg);
    real th, hr, hi;
    int bad1 = 0, bad2 = 0, bad0 = 0, flagbad = 0, e;
    rst_n = 0; outs.delete(); odat.delete(); oend.delete(); sent.delete(); n_dphi = 0;
    in_valid = 0; is_frame = 0; is_pilot = 0; is_residual = 0; frame_end_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    hr = mag * $cos(deg * 3.14159265 / 180.0); hi = mag * $sin(deg * 3.14159265 / 180.0);
    gr = hr; gi = hi;
    for (int k = 0; k < 16; k++) send(pilot_sym(4'(k)), 1, 0, k, 0);
    for (int k = 0; k < 100; k++) send(rnd_sym(), 0, 0, 0, 0);
    th = theta_deg * 3.14159265 / 180.0;
    gr = hr * $cos(th) - hi * $sin(th); gi = hr * $sin(th) + hi * $cos(th);
    for (int k = 0; k < 16; k++) send(pilot_sym(4'(k)), 1, 1, k, 0);
    for (int k = 0; k < 100; k++) send(rnd_sym(), 0, 0, 0, k == 99);
    @(posedge clk);
    in_valid <= 0; is_frame <= 0; frame_end_in <= 0;
    repeat (3) @(posedge clk);
    check(outs.size() == 232, "one output per input");
    // first pilot block passes with 1/H = 1: out = H * x_p
    for (int k = 0; k < 16; k++)
      if (!near(outs[k], '{i: 16'($rtoi(sent[k].i * hr - sent[k].q * hi)),
                           q: 16'($rtoi(sent[k].i * hi + sent[k].q * hr))}, 1)) bad0++;
    check(bad0 == 0, "first pilots pass unchanged");
    for (int k = 16; k < 116; k++) if (!near(outs[k], sent[k], 120)) bad1++;
    check(bad1 == 0, $sformatf("H %0.1f/%0.0f: %0d data errors after block 1", mag, deg, bad1));
    for (int k = 132; k < 232; k++) if (!near(outs[k], sent[k], 120)) bad2++;
    check(bad2 == 0, $sformatf("H %0.1f/%0.0f: %0d data errors after block 2", mag, deg, bad2));
    e = last_dphi + $rtoi(theta_deg * 65536.0 / 360.0);
    check(n_dphi == 1 && e < 90 && e > -90,
          $sformatf("dphi %0d expected %0d", last_dphi, -$rtoi(theta_deg * 65536.0 / 360.0)));
    for (int k = 0; k < 232; k++)
      if (odat[k] != ((k >= 16 && k < 116) || k >= 132) || oend[k] != (k == 231)) flagbad++;
    check(flagbad == 0, "out_data and frame_end flags");
    // h_est now holds the second block's estimate: H * e^{j theta}
    check(near(h_est, '{i: 16'($rtoi(gr * 16384.0)), q: 16'($rtoi(gi * 16384.0))}, 40),
          $sformatf("h_est %0d,%0d expected %0.0f,%0.0f", h_est.i, h_est.q, gr * 16384.0, gi * 16384.0));
  endtask

  initial begin
    in_valid = 0; in = '0; is_frame = 0; is_pilot = 0; is_residual = 0; pilot_idx = 0;
    frame_end_in = 0;
    run(0.7, 40.0, 5.0);
    run(1.3, -100.0, -12.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
