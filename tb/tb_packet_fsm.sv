// tb_packet_fsm - checks the packetization control FSM of the TX frame builder.
//
// For lambda_p = 1, 2, 4, 6, 8 (and 0 and 12, which clamp to 1 and 8) a frame is run with a
// random advance strobe. The testbench records the selected source of every symbol and
// compares it with a frame layout built independently here: 128 preamble, 128 training, then
// 8 subframes of lambda_p x (16 pilots + data), where the 256 - 16*lambda_p data symbols are
// spread over the segments with the first (D mod lambda_p) segments one symbol longer.
//
// The 128/128/8x256 frame and 16-symbol pilots follow the paper; the split of data among
// segments is this design's own.
`timescale 1ns/1ps
module tb_packet_fsm;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, adv, app_pre, app_trn, app_pil, app_dat, busy, fstart, fdone;
  logic [8:0] idx;
  logic [3:0] seg, lambda_p;
  logic [2:0] sub;
  int checks = 0, failures = 0;

  packet_fsm dut (.clk, .rst_n, .start, .adv, .lambda_p, .app_preamble(app_pre),
    .app_training(app_trn), .app_pilots(app_pil), .app_data(app_dat), .idx, .seg, .sub,
    .busy, .frame_start(fstart), .frame_done(fdone));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected layout: 0 preamble, 1 training, 2 pilot, 3 data; plus index within the part
  int exp_kind [$], exp_idx [$];
  task automatic build(int lam);
    int d, base, extra, len;
    exp_kind.delete(); exp_idx.delete();
    for (int k = 0; k < 128; k++) begin exp_kind.push_back(0); exp_idx.push_back(k); end
    for (int k = 0; k < 128; k++) begin exp_kind.push_back(1); exp_idx.push_back(k); end
    d = 256 - 16 * lam; base = d / lam; extra = d % lam;
    for (int s = 0; s < 8; s++)
      for (int g = 0; g < lam; g++) begin
        for (int k = 0; k < 16; k++) begin exp_kind.push_back(2); exp_idx.push_back(k); end
        len = base + (g < extra ? 1 : 0);
        for (int k = 0; k < len; k++) begin exp_kind.push_back(3); exp_idx.push_back(k); end
      end
  endtask

  // All stimulus is applied and all outputs are sampled at the falling edge.
  task automatic run_frame(int lam_in, int lam);
    int n = 0, kind, n_done = 0;
    bit bad = 0, acc;
    build(lam);
    @(negedge clk);
    lambda_p = 4'(lam_in);
    start = 1;
    do begin
      adv = ($urandom_range(2) == 0);
      acc = adv && !busy;
      @(negedge clk);
    end while (!acc);
    start = 0;
    while (busy) begin
      kind = app_pre && !app_trn ? 0 : app_trn ? 1 : app_pil ? 2 : app_dat ? 3 : 9;
      if (n < exp_kind.size()) begin
        if (kind != exp_kind[n] || int'(idx) != exp_idx[n]) bad = 1;
      end else bad = 1;
      adv = ($urandom_range(2) == 0);
      if (adv) n++;
      @(negedge clk);
      if (fdone) n_done++;
    end
    adv = 0;
    check(!bad, $sformatf("layout lambda_p=%0d", lam_in));
    check(n == 2304, $sformatf("frame length %0d (lambda_p=%0d)", n, lam_in));
    check(n_done == 1, "one frame_done pulse");
    check(!busy && !app_pre && !app_pil && !app_dat, "idle after frame");
  endtask

  initial begin
    start = 0; adv = 0; lambda_p = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    adv = 1;
    repeat (5) @(negedge clk);
    check(!busy, "stays idle without start");
    adv = 0;
    run_frame(1, 1);
    run_frame(2, 2);
    run_frame(4, 4);
    run_frame(6, 6);
    run_frame(8, 8);
    run_frame(0, 1);
    run_frame(12, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
