// benchlink_top - programmable-logic part of the BenchLink link: TX and RX PHY chains with
// AXI-Lite control.
//
// Transmit chain: AXI4-Stream payload words (AXI clock) -> asynchronous FIFO with SR-latch
// TREADY -> frame builder (preamble, training, lambda_p pilot repetitions per subframe, QAM
// data) -> x4 SRRC pulse shaper -> TX I/Q samples, one per `tx_strobe`.
// Receive chain: RX I/Q samples (`rx_valid`) -> AGC -> SRRC matched filter and decimation ->
// coarse CFO estimation and correction -> frame detection -> pilot-based channel equalisation
// and residual phase measurement -> QAM demapper -> 64-bit words on the RX AXI4-Stream.
// The ARM processing system sets lambda_p, the modulation and the thresholds over AXI-Lite
// (register map in axil_regs) and reads back the CFO estimate, residual phase and counters.
//
// The AD9361 interface IP and the RF front end are outside this module: the TX and RX sample
// ports connect to them. Everything runs on `clk` except the write side of the TX FIFO,
// which runs on `s_axis_aclk`. Both ends of a link must be programmed with the same
// lambda_p and modulation; the receiver takes them when it is between frames.
//
// Following the paper: the chain order of the transceiver figure, AXI-Lite control of
// lambda_p, AXI4-Stream data in 64-bit words. This design's own: the sample-strobe interface
// to the converters, the shared TX/RX configuration and the clocking.
module benchlink_top
  import benchlink_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite control (clk domain)
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // TX payload, AXI4-Stream slave (s_axis_aclk domain)
  input  logic        s_axis_aclk,
  input  logic        s_axis_aresetn,
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // RX payload, AXI4-Stream master (clk domain)
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // TX baseband samples to the RF interface
  input  logic        tx_strobe,
  output logic [15:0] tx_i,
  output logic [15:0] tx_q,
  output logic        tx_valid,
  // RX baseband samples from the RF interface
  input  logic        rx_valid,
  input  logic [15:0] rx_i,
  input  logic [15:0] rx_q,
  // link status
  output logic        rx_frame,        // a received frame's payload is passing
  output logic        resid_valid      // a residual phase measurement was taken
);
  localparam int FIFO_DEPTH = 512;

  cfg_t  cfg;
  stat_t stat;

  axil_regs u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .cfg, .stat
  );

  // ---------------- transmitter ----------------
  logic [WORD_W-1:0]             f_data;
  logic                          f_empty, f_drain, f_rd;
  logic [$clog2(FIFO_DEPTH):0]   f_level;
  logic                          sym_req;
  iq_t                           tx_sym, tx_samp;
  logic [15:0]                   frames_tx;

  tx_fifo #(.W(WORD_W), .DEPTH(FIFO_DEPTH)) u_txfifo (
    .wclk(s_axis_aclk), .wrst_n(s_axis_aresetn),
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .rclk(clk), .rrst_n(rst_n), .rd_en(f_rd), .rd_data(f_data), .empty(f_empty),
    .level(f_level), .drain(f_drain)
  );

  tx_framer #(.LEVEL_W($clog2(FIFO_DEPTH) + 1)) u_framer (
    .clk, .rst_n, .lambda_p(cfg.lambda_p), .modulation(cfg.modulation), .thresh(cfg.tx_thresh),
    .fifo_data(f_data), .fifo_empty(f_empty), .fifo_level(f_level), .fifo_drain(f_drain),
    .fifo_rd(f_rd), .sym_req, .sym(tx_sym), .frame_start(), .frame_done(), .busy(),
    .frames_sent(frames_tx)
  );

  pulse_shaper u_shaper (
    .clk, .rst_n, .strobe(tx_strobe), .sym_in(tx_sym), .sym_req, .out(tx_samp),
    .out_valid(tx_valid)
  );

  assign tx_i = tx_samp.i;
  assign tx_q = tx_samp.q;

  // ---------------- receiver ----------------
  iq_t                rx_in, agc_out, mf_out, cfo_out, fd_out, eq_out;
  logic               agc_v, mf_v, cfo_v, fd_v, eq_v;
  logic [15:0]        agc_gain, frames_rx, rx_ovf;
  logic signed [15:0] cfo_angle, dphi;
  logic               fd_frame, fd_pilot, fd_resid, fd_end, eq_data, eq_end, dphi_v;
  logic [3:0]         fd_pidx;
  logic [5:0]         dbits;
  mod_t               rx_mod;
  logic [15:0]        resid_q;

  assign rx_in = '{i: rx_i, q: rx_q};

  agc u_agc (
    .clk, .rst_n, .in_valid(rx_valid), .in(rx_in), .ref_pwr(cfg.agc_ref), .mu(cfg.agc_mu),
    .out_valid(agc_v), .out(agc_out), .gain(agc_gain)
  );

  rx_srrc u_mf (
    .clk, .rst_n, .in_valid(agc_v), .in(agc_out), .phase(cfg.rx_phase),
    .out_valid(mf_v), .out(mf_out)
  );

  rx_cfo u_cfo (
    .clk, .rst_n, .in_valid(mf_v), .in(mf_out), .thresh(cfg.cfo_thresh),
    .out_valid(cfo_v), .out(cfo_out), .est_valid(), .cfo_angle
  );

  frame_detector u_fd (
    .clk, .rst_n, .in_valid(cfo_v), .in(cfo_out), .lambda_p(cfg.lambda_p),
    .thresh(cfg.det_thresh), .out_valid(fd_v), .out(fd_out), .is_frame(fd_frame),
    .is_pilot(fd_pilot), .is_residual(fd_resid), .pilot_idx(fd_pidx), .frame_end(fd_end),
    .detect(), .frames_rx
  );

  channel_eq u_eq (
    .clk, .rst_n, .in_valid(fd_v), .in(fd_out), .is_frame(fd_frame), .is_pilot(fd_pilot),
    .is_residual(fd_resid), .pilot_idx(fd_pidx), .frame_end_in(fd_end),
    .out_valid(eq_v), .out(eq_out), .out_data(eq_data), .frame_end(eq_end), .h_est(),
    .dphi_valid(dphi_v), .dphi
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_mod  <= MOD_16QAM;
      resid_q <= '0;
    end else begin
      if (!fd_frame && !eq_data) rx_mod <= cfg.modulation;
      if (dphi_v) resid_q <= dphi;
    end
  end

  qam_demapper u_demap (.modulation(rx_mod), .sym(eq_out), .bits(dbits));

  rx_packer u_pack (
    .clk, .rst_n, .in_valid(eq_v && eq_data), .bits(dbits), .modulation(rx_mod),
    .frame_end(eq_end), .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid),
    .m_tready(m_axis_tready), .m_tlast(m_axis_tlast), .overflow(rx_ovf)
  );

  assign rx_frame    = fd_frame;
  assign resid_valid = dphi_v;

  always_comb begin
    stat.cfo_angle   = cfo_angle;
    stat.resid_phase = resid_q;
    stat.frames_tx   = frames_tx;
    stat.frames_rx   = frames_rx;
    stat.rx_overflow = rx_ovf;
    stat.agc_gain    = agc_gain;
  end

endmodule
