// tb_rx_packer - checks packing of demapped bits into 64-bit AXI4-Stream words.
//
// Random bit groups of 2, 3, 4 and 6 bits (one frame's worth: 2*(16-lambda_p)*bits words)
// are packed; the words read out must equal the bit stream assembled here (group 0 at bit 0),
// and exactly the last word of each frame must carry TLAST. TREADY is random. A second part
// holds TREADY low with a small FIFO and checks that the dropped words are counted.
//
// 64-bit AXI4-Stream words follow the paper; bit order and TLAST are this design's own.
`timescale 1ns/1ps
module tb_rx_packer;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, frame_end, m_tvalid, m_tready, m_tlast;
  logic [5:0]  bits;
  mod_t        modulation;
  logic [63:0] m_tdata;
  logic [15:0] overflow;
  int checks = 0, failures = 0;

  rx_packer #(.DEPTH(16)) dut (.clk, .rst_n, .in_valid, .bits, .modulation, .frame_end,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast, .overflow);

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

  logic [63:0] got [$];
  bit          lst [$];
  int          ready_pct = 70;
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin got.push_back(m_tdata); lst.push_back(m_tlast); end
    m_tready <= ($urandom_range(99) < ready_pct);
  end

  task automatic frame(mod_t m, int lam, output logic [63:0] words [$]);
    int nb, nsym, bitpos = 0;
    logic [5:0] b;
    nb = (m == MOD_4QAM) ? 2 : (m == MOD_8QAM) ? 3 : (m == MOD_16QAM) ? 4 : 6;
    nsym = 8 * (256 - 16 * lam);
    words.delete();
    for (int k = 0; k < 2 * (16 - lam) * nb; k++) words.push_back('0);
    modulation <= m;
    for (int s = 0; s < nsym; s++) begin
      b = 6'($urandom);
      for (int j = 0; j < nb; j++) begin
        words[bitpos / 64][bitpos % 64] = b[j];
        bitpos++;
      end
      @(posedge clk);
      while ($urandom_range(1) == 0) begin in_valid <= 0; frame_end <= 0; @(posedge clk); end
      in_valid <= 1; bits <= b; frame_end <= (s == nsym - 1);
    end
    @(posedge clk);
    in_valid <= 0; frame_end <= 0;
  endtask

  initial begin
    logic [63:0] exp_w [$], w [$];
    int bad = 0, nl = 0;
    in_valid = 0; bits = 0; frame_end = 0; modulation = MOD_4QAM; m_tready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(MOD_4QAM, 1, w);  exp_w = {exp_w, w};
    frame(MOD_8QAM, 6, w);  exp_w = {exp_w, w};
    frame(MOD_16QAM, 4, w); exp_w = {exp_w, w};
    frame(MOD_64QAM, 8, w); exp_w = {exp_w, w};
    repeat (200) @(posedge clk);
    check(got.size() == exp_w.size(), $sformatf("%0d words (expected %0d)", got.size(), exp_w.size()));
    foreach (got[k]) if (k < exp_w.size() && got[k] != exp_w[k]) bad++;
    check(bad == 0, $sformatf("%0d word mismatches", bad));
    foreach (lst[k]) if (lst[k]) nl++;
    check(nl == 4, "four TLAST");
    check(lst.size() == 60 + 60 + 96 + 96 && lst[59] && lst[119] && lst[215] && lst[311],
          "TLAST on the last word of each frame");
    check(overflow == 0, "no overflow with TREADY toggling");
    // back-pressure: FIFO of 16 words, TREADY low for a whole 4QAM lambda_p=1 frame (60 words)
    ready_pct = 0;
    repeat (3) @(posedge clk);
    got.delete(); lst.delete();
    frame(MOD_4QAM, 1, w);
    repeat (20) @(posedge clk);
    check(overflow == 16'(60 - 16), $sformatf("overflow counts dropped words (%0d)", overflow));
    ready_pct = 100;
    repeat (40) @(posedge clk);
    check(got.size() == 16, "the 16 stored words are delivered");
    bad = 0;
    foreach (got[k]) if (got[k] != w[k]) bad++;
    check(bad == 0, "stored words are the oldest ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
