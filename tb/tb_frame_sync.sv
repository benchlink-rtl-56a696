// tb_frame_sync - checks the frame synchroniser's flags.
//
// Every input symbol carries its own index in the I part, and the correlator peaks are
// driven directly. A frame is a pair of peaks 128 symbols apart; the symbol after the second
// peak must be payload symbol 0. For each payload symbol the testbench checks is_frame,
// is_pilot, pilot_idx and is_residual against the layout computed here for lambda_p, and
// frame_end on the last of the 2048 symbols. Also checked: a false peak before the real
// pair is overridden, a single peak or a pair 127 apart gives no frame, and lambda_p 4 and 6.
//
// The pilot layout for lambda_p follows the paper's pilot table; the two-peak rule tested is
// this design's own.
`timescale 1ns/1ps
module tb_frame_sync;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, detect, out_valid, is_frame, is_pilot, is_residual, frame_end;
  iq_t         in, out;
  logic [3:0]  lambda_p, pilot_idx;
  logic [15:0] frames_rx;
  int checks = 0, failures = 0;

  frame_sync dut (.clk, .rst_n, .in_valid, .in, .detect, .lambda_p, .out_valid, .out,
    .is_frame, .is_pilot, .is_residual, .pilot_idx, .frame_end, .frames_rx);

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

  typedef struct packed { logic [15:0] v; logic f, p, r, e; logic [3:0] pi; } rec_t;
  rec_t recs [$];
  always @(posedge clk) if (rst_n && out_valid)
    recs.push_back('{v: out.i, f: is_frame, p: is_pilot, r: is_residual, e: frame_end, pi: pilot_idx});

  // send symbols 0..len-1, with peaks at the listed indices
  task automatic stream(int len, int peaks [$]);
    for (int n = 0; n < len; n++) begin
      @(posedge clk);
      while ($urandom_range(3) == 0) begin in_valid <= 0; detect <= 0; @(posedge clk); end
      in_valid <= 1;
      in <= '{i: 16'(n), q: 16'(0)};
      detect <= 0;
      foreach (peaks[k]) if (peaks[k] == n) detect <= 1;
    end
    @(posedge clk);
    in_valid <= 0; detect <= 0;
    repeat (3) @(posedge clk);
  endtask

  task automatic run(string name, int lam, int peaks [$], int p0, int nframes);
    int d, base, extra, len, j, bad = 0, nf = 0;
    rst_n = 0; recs.delete(); lambda_p = 4'(lam);
    repeat (2) @(posedge clk);
    rst_n = 1;
    stream(3000, peaks);
    foreach (recs[n]) if (recs[n].f) nf++;
    check(frames_rx == 16'(nframes), $sformatf("%s: %0d frames", name, frames_rx));
    if (nframes == 0) begin
      check(nf == 0, $sformatf("%s: no payload flags", name));
      return;
    end
    check(nf == 2048, $sformatf("%s: %0d payload symbols flagged", name, nf));
    d = 256 - 16 * lam; base = d / lam; extra = d % lam; j = 0;
    for (int s = 0; s < 8; s++)
      for (int g = 0; g < lam; g++) begin
        len = base + (g < extra ? 1 : 0);
        for (int k = 0; k < 16 + len; k++, j++) begin
          rec_t r;
          r = recs[p0 + j];
          if (r.v != 16'(p0 + j) || !r.f || r.p != (k < 16) ||
              (k < 16 && (r.pi != 4'(k) || r.r != (s != 0 || g != 0))) ||
              (k >= 16 && r.r) || r.e != (j == 2047)) bad++;
        end
      end
    check(bad == 0, $sformatf("%s: %0d flag errors", name, bad));
    check(!recs[p0 - 1].f && !recs[p0 + 2048].f, $sformatf("%s: frame boundaries", name));
  endtask

  initial begin
    in_valid = 0; in = '0; detect = 0; lambda_p = 4;
    run("lambda 4", 4, '{300, 428}, 429, 1);
    run("lambda 6", 6, '{200, 328}, 329, 1);
    run("false early peak", 4, '{250, 300, 428}, 429, 1);
    run("single peak", 4, '{300}, 0, 0);
    run("peaks 127 apart", 4, '{300, 427}, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
