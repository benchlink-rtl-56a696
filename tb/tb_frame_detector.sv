// tb_frame_detector - checks the frame detection subsystem end to end: correlator,
// normalised comparator and synchroniser.
//
// Symbol stream: random QPSK, then preamble and training (the Golay sequence twice), then
// 2048 payload symbols, then random QPSK, repeated for two frames with different lambda_p
// and levels. The first flagged payload output must be payload symbol 0 (checked by value),
// exactly 2048 symbols must be flagged, 8*16*lambda_p of them pilots, and the frame counter
// must count both frames. Random data alone must give no frame.
//
// The correlator-plus-synchroniser structure and the frame layout follow the paper; the
// stimulus is this testbench's own.
`timescale 1ns/1ps
module tb_frame_detector;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, out_valid, is_frame, is_pilot, is_residual, frame_end, detect;
  iq_t         in, out;
  logic [3:0]  lambda_p, pilot_idx;
  logic [15:0] frames_rx;
  int checks = 0, failures = 0;

  frame_detector dut (.clk, .rst_n, .in_valid, .in, .lambda_p, .thresh(8'd154), .out_valid,
    .out, .is_frame, .is_pilot, .is_residual, .pilot_idx, .frame_end, .detect, .frames_rx);

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

  iq_t outs [$];
  bit  fl [$], pl [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    outs.push_back(out); fl.push_back(is_frame); pl.push_back(is_pilot);
  end

  iq_t xs [$];
  task automatic send(iq_t s);
    @(posedge clk);
    while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
    in_valid <= 1; in <= s; xs.push_back(s);
  endtask
  task automatic rnd(int n, int a);
    for (int k = 0; k < n; k++)
      send('{i: 16'($urandom_range(1) ? a : -a), q: 16'($urandom_range(1) ? a : -a)});
  endtask

  task automatic frame(int lam, int a);
    int p0, nf = 0, np = 0, first = -1;
    outs.delete(); fl.delete(); pl.delete(); xs.delete();
    lambda_p = 4'(lam);
    rnd(400, a);
    for (int k = 0; k < 256; k++) send('{i: 16'(PREAMBLE_BITS[k % 128] ? a : -a), q: 16'(0)});
    p0 = xs.size();
    rnd(2048, a);
    rnd(300, a);
    @(posedge clk);
    in_valid <= 0;
    repeat (4) @(posedge clk);
    foreach (fl[n]) if (fl[n]) begin nf++; if (first < 0) first = n; if (pl[n]) np++; end
    check(nf == 2048, $sformatf("lambda %0d: %0d payload symbols", lam, nf));
    check(np == 8 * 16 * lam, $sformatf("lambda %0d: %0d pilots", lam, np));
    check(first >= 0 && outs[first] == xs[p0], $sformatf("lambda %0d: payload aligned", lam));
  endtask

  initial begin
    in_valid = 0; in = '0; lambda_p = 4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(4, 8000);
    frame(2, 1500);
    check(frames_rx == 2, "two frames counted");
    outs.delete(); fl.delete(); pl.delete();
    rnd(8000, 6000);
    repeat (4) @(posedge clk);
    check(frames_rx == 2, "no frame in random data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
