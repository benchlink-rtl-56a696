// tb_tx_fifo - checks the asynchronous TX FIFO and its SR-latch flow control.
//
// Write and read clocks are unrelated (7 ns and 5 ns). Part 1 streams 400 random words with
// random TVALID and random reads and checks order. Part 2 fills a 16-deep FIFO without
// reading: TREADY must drop when it is full, stay low (drain high) while it is partly read,
// and come back only after it is empty. The fill level seen by the reader is checked.
//
// The asynchronous FIFO and SR-latch flow control follow the paper; the depth is this
// design's own.
`timescale 1ns/1ps
module tb_tx_fifo;
  localparam int DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #7 wclk = ~wclk;
  always #5 rclk = ~rclk;
  logic [63:0] s_tdata, rd_data;
  logic        s_tvalid, s_tready, rd_en, empty, drain;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;

  tx_fifo #(.W(64), .DEPTH(DEPTH)) dut (.wclk, .wrst_n, .s_tdata, .s_tvalid, .s_tready,
    .rclk, .rrst_n, .rd_en, .rd_data, .empty, .level, .drain);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] q [$];
  int n_wr = 0, n_rd = 0, target = 400, rd_pct = 60;
  always @(posedge wclk) begin
    if (wrst_n) begin
      if (s_tvalid && s_tready) begin q.push_back(s_tdata); n_wr++; s_tvalid <= 0; end
      if ((!s_tvalid || s_tready) && n_wr + (s_tvalid && s_tready) < target
          && $urandom_range(99) < 70) begin
        s_tdata <= {$urandom, $urandom}; s_tvalid <= 1;
      end
    end
  end
  always @(posedge rclk) begin
    rd_en <= 0;
    if (rrst_n && !empty && !rd_en && $urandom_range(99) < rd_pct) begin
      rd_en <= 1;
      check(q.size() > 0 && rd_data == q[0], "read order");
      if (q.size() > 0) void'(q.pop_front());
      n_rd++;
    end
  end

  initial begin
    s_tvalid = 0; s_tdata = 0; rd_en = 0;
    #30 wrst_n = 1; rrst_n = 1;
    wait (n_rd == target);
    check(1, "stream done");
    // part 2: fill without reading
    rd_pct = 0;
    repeat (10) @(posedge rclk);
    target = n_wr + 100;
    repeat (200) @(posedge wclk);
    check(n_wr == target - 100 + DEPTH, $sformatf("fills to depth (%0d)", n_wr - (target - 100)));
    check(!s_tready, "TREADY low when full");
    check(level == DEPTH, "level = depth");
    check(drain, "drain flag while latch reset");
    rd_pct = 100;
    wait (q.size() == DEPTH / 2);
    rd_pct = 0;
    repeat (40) @(posedge wclk);
    check(!s_tready, "TREADY stays low while partly full");
    check(level == DEPTH / 2, "level after partial read");
    rd_pct = 100;
    wait (empty);
    rd_pct = 0;
    repeat (8) @(posedge wclk);
    check(s_tready || n_wr > target - 100 + DEPTH, "TREADY back after empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
