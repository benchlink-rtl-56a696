// axil_regs - AXI4-Lite control and status registers of the BenchLink programmable logic.
//
// The ARM processing system programs the link through this register file: the number of
// pilot repetitions per subframe (lambda_p), the modulation, the FIFO threshold that starts a
// frame and the receiver's thresholds, and it reads back the coarse CFO estimate, the last
// residual phase offset and frame counters. That lambda_p is set over AXI-Lite is from the
// paper; the register map, widths and reset values are this design's own.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL   [3:0] lambda_p (reset 4)  [5:4] modulation (reset 16QAM)
//   0x04 TXTHR  [15:0] FIFO words that start a frame, 0 = one frame of payload (reset 0)
//   0x08 RXTHR  [7:0] frame-detection threshold  [15:8] CFO threshold, in 1/256 (reset 154, 205)
//   0x0C AGC    [15:0] target power  [19:16] loop step exponent (reset 4096, 8)
//   0x10 RXPH   [1:0] decimation phase (reset 0)
//   0x14 CFO    [15:0] angle of C_peak, read only
//   0x18 RESID  [15:0] residual phase offset, read only
//   0x1C FRAMES [15:0] frames sent  [31:16] frames received, read only
//   0x20 RXOVF  [15:0] RX words dropped  [31:16] AGC gain, read only
// Timing: a write is accepted when address and data are both valid (one cycle later BVALID);
// a read returns RDATA one cycle after ARVALID. Responses are always OKAY.
module axil_regs
  import benchlink_pkg::*;
#(
  parameter int ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output cfg_t              cfg,
  input  stat_t             stat
);

  logic [31:0] regs [5];
  logic        wr_go, rd_go;

  assign wr_go         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_bresp   = 2'b00;
  assign rd_go         = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_go;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs[0] <= {26'd0, MOD_16QAM, 4'd4};
      regs[1] <= 32'd0;
      regs[2] <= {16'd0, 8'd205, 8'd154};
      regs[3] <= {12'd0, 4'd8, 16'd4096};
      regs[4] <= 32'd0;
      s_axi_bvalid <= 1'b0;
    end else begin
      if (wr_go) begin
        if (s_axi_awaddr[ADDR_W-1:2] < 5) begin
          for (int b = 0; b < 4; b++)
            if (s_axi_wstrb[b]) regs[3'(s_axi_awaddr[ADDR_W-1:2])][8*b +: 8] <= s_axi_wdata[8*b +: 8];
        end
        s_axi_bvalid <= 1'b1;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (rd_go) begin
      s_axi_rvalid <= 1'b1;
      case (s_axi_araddr[ADDR_W-1:2])
        0, 1, 2, 3, 4: s_axi_rdata <= regs[3'(s_axi_araddr[ADDR_W-1:2])];
        5:       s_axi_rdata <= {16'd0, stat.cfo_angle};
        6:       s_axi_rdata <= {16'd0, stat.resid_phase};
        7:       s_axi_rdata <= {stat.frames_rx, stat.frames_tx};
        8:       s_axi_rdata <= {stat.agc_gain, stat.rx_overflow};
        default: s_axi_rdata <= 32'hDEAD_BEEF;
      endcase
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  always_comb begin
    cfg.lambda_p   = regs[0][3:0];
    cfg.modulation = mod_t'(regs[0][5:4]);
    cfg.tx_thresh  = regs[1][15:0];
    cfg.det_thresh = regs[2][7:0];
    cfg.cfo_thresh = regs[2][15:8];
    cfg.agc_ref    = regs[3][15:0];
    cfg.agc_mu     = regs[3][19:16];
    cfg.rx_phase   = regs[4][1:0];
  end

  // AXI-Lite: a response stays valid until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
