// tb_axil_regs - checks the AXI4-Lite register file: reset values, writes with byte strobes,
// read-back, the read-only status registers, unmapped addresses and holding a response
// while the master is not ready.
//
// That lambda_p is set over AXI-Lite follows the paper; the register map tested is this
// design's own.
`timescale 1ns/1ps
module tb_axil_regs;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready, awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg;
  stat_t       stat;
  int checks = 0, failures = 0;

  axil_regs dut (.clk, .rst_n, .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid),
    .s_axi_awready(awready), .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid),
    .s_axi_wready(wready), .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .cfg, .stat);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s);
    @(posedge clk);
    awaddr <= a; wdata <= d; wstrb <= s; awvalid <= 1; wvalid <= 1; bready <= 0;
    do @(posedge clk); while (!awready);
    awvalid <= 0; wvalid <= 0;
    repeat (3) @(posedge clk);
    check(bvalid && bresp == 2'b00, "BVALID held until BREADY");
    bready <= 1;
    @(posedge clk);
    bready <= 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    araddr <= a; arvalid <= 1; rready <= 0;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    repeat (2) @(posedge clk);
    check(rvalid, "RVALID held until RREADY");
    d = rdata;
    rready <= 1;
    @(posedge clk);
    rready <= 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] r;
  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0;
    stat = '{cfo_angle: 16'h1234, resid_phase: 16'hFF80, frames_tx: 16'd7, frames_rx: 16'd6,
             rx_overflow: 16'd2, agc_gain: 16'd4100};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(cfg.lambda_p == 4'd4 && cfg.modulation == MOD_16QAM, "reset lambda_p/modulation");
    check(cfg.det_thresh == 8'd154 && cfg.cfo_thresh == 8'd205, "reset thresholds");
    check(cfg.agc_ref == 16'd4096 && cfg.agc_mu == 4'd8 && cfg.tx_thresh == 0, "reset AGC/TX");
    wr(8'h00, 32'h0000_0036, 4'hF);
    check(cfg.lambda_p == 4'd6 && cfg.modulation == MOD_64QAM, "CTRL write");
    rd(8'h00, r);
    check(r == 32'h36, "CTRL read back");
    wr(8'h08, 32'h0000_C8AA, 4'h2);          // only byte 1 written
    check(cfg.det_thresh == 8'd154 && cfg.cfo_thresh == 8'hC8, "byte strobe");
    wr(8'h04, 32'd77, 4'hF);
    check(cfg.tx_thresh == 16'd77, "TXTHR");
    wr(8'h0C, 32'h000A_1000, 4'hF);
    check(cfg.agc_mu == 4'd10 && cfg.agc_ref == 16'h1000, "AGC register");
    wr(8'h10, 32'd2, 4'hF);
    check(cfg.rx_phase == 2'd2, "RXPH");
    rd(8'h14, r);  check(r == 32'h1234, "CFO status");
    rd(8'h18, r);  check(r == 32'hFF80, "residual status");
    rd(8'h1C, r);  check(r == {16'd6, 16'd7}, "frame counters");
    rd(8'h20, r);  check(r == {16'd4100, 16'd2}, "overflow and gain");
    rd(8'h40, r);  check(r == 32'hDEAD_BEEF, "unmapped address");
    wr(8'h14, 32'hFFFF_FFFF, 4'hF);          // read-only: ignored
    rd(8'h14, r);  check(r == 32'h1234, "status is read only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
