// tb_benchlink_top - end-to-end test of the BenchLink PHY at its default parameters.
//
// The transmitter's sample output is looped back into the receiver through a channel model:
// a carrier frequency offset of 2e-4 cycles per sample with a 30 degree initial phase, a gain
// of 0.7, uniform noise of +-48 LSB and a 3-sample delay (so the receiver's decimation phase
// must be 3). Random 64-bit payload words are pushed into the AXI4-Stream slave in the AXI
// clock domain and the words on the RX AXI4-Stream master are compared with them in order; a
// zero word at the end of a frame is the frame builder's zero fill and is counted as padding.
//
// Phases: 16QAM/lambda_p=4 (reset values), 64QAM/8, 8QAM/6, 4QAM/1, then 16QAM/2 with a
// burst larger than the FIFO so that TREADY drops and the FIFO drains into a zero-filled
// frame, finished by lowering the start threshold over AXI-Lite. Each mechanism (coarse CFO
// estimate, residual-phase measurement, modulation and lambda_p switch, FIFO full with
// TREADY low, zero fill, RX back-pressure, threshold start) is counted and must occur. The
// CFO estimate is checked against the channel's offset.
//
// The frame format, lambda_p values and modulations exercised are the paper's; the channel
// model and traffic pattern are this testbench's own.
`timescale 1ns/1ps
module tb_benchlink_top;
  import benchlink_pkg::*;

  localparam real   DF_SAMPLE = 2.0e-4;
  localparam real   PH0       = 30.0 / 360.0;
  localparam real   CH_GAIN   = 0.7;
  localparam int    NOISE     = 48;
  localparam real   PI        = 3.14159265358979;

  logic clk = 0, aclk = 0, rst_n = 0, arst_n = 0;
  always #5 clk = ~clk;
  always #7 aclk = ~aclk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic [63:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;
  logic        tx_strobe, tx_valid, rx_valid;
  logic [15:0] tx_i, tx_q, rx_i, rx_q;
  logic        rx_frame, resid_valid;

  benchlink_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .s_axis_aclk(aclk), .s_axis_aresetn(arst_n), .s_axis_tdata(s_tdata),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast),
    .tx_strobe, .tx_i, .tx_q, .tx_valid, .rx_valid, .rx_i, .rx_q, .rx_frame, .resid_valid
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- AXI-Lite master ----------------
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk);
    awaddr <= a; wdata <= d; awvalid <= 1; wvalid <= 1; bready <= 1;
    do @(posedge clk); while (!(awready && wvalid));
    awvalid <= 0; wvalid <= 0;
    while (!bvalid) @(posedge clk);
    @(posedge clk);
    bready <= 0;
  endtask
  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    araddr <= a; arvalid <= 1; rready <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(posedge clk);
    rready <= 0;
  endtask

  // ---------------- TX sample strobe: one sample every 2 clocks ----------------
  always_ff @(posedge clk) tx_strobe <= rst_n ? ~tx_strobe : 1'b0;

  // ---------------- channel ----------------
  real    dly_i [3], dly_q [3];
  longint nsamp = 0;
  function automatic logic [15:0] sat(real v);
    if (v > 32767.0) return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'($rtoi(v));
  endfunction
  always @(posedge clk) begin
    rx_valid <= 1'b0;
    if (!rst_n) begin
      for (int k = 0; k < 3; k++) begin dly_i[k] = 0.0; dly_q[k] = 0.0; end
    end else if (tx_valid) begin
      real ph, xi, xq, yi, yq;
      int  ni, nq;
      ni = int'($urandom_range(2*NOISE)) - NOISE;
      nq = int'($urandom_range(2*NOISE)) - NOISE;
      ph = 2.0 * PI * (DF_SAMPLE * $itor(nsamp) + PH0);
      xi = $itor($signed(tx_i));
      xq = $itor($signed(tx_q));
      yi = CH_GAIN * (xi * $cos(ph) - xq * $sin(ph)) + $itor(ni);
      yq = CH_GAIN * (xi * $sin(ph) + xq * $cos(ph)) + $itor(nq);
      rx_i <= sat(dly_i[2]);
      rx_q <= sat(dly_q[2]);
      rx_valid <= 1'b1;
      dly_i[2] = dly_i[1]; dly_i[1] = dly_i[0]; dly_i[0] = yi;
      dly_q[2] = dly_q[1]; dly_q[1] = dly_q[0]; dly_q[0] = yq;
      nsamp++;
    end
  end

  // ---------------- payload source (AXI clock) ----------------
  logic [63:0] sent [$];
  int          to_send = 0;
  int          full_events = 0;
  int          gap_pct = 30;
  always @(posedge aclk) begin
    if (!arst_n) begin
      s_tvalid <= 0;
      s_tdata  <= '0;
    end else begin
      if (s_tvalid && s_tready) begin
        sent.push_back(s_tdata);
        s_tvalid <= 0;
      end
      if (s_tvalid && !s_tready) full_events++;
      if ((!s_tvalid || s_tready) && to_send > 0 && $urandom_range(99) >= gap_pct) begin
        s_tdata  <= {$urandom, $urandom};
        s_tvalid <= 1;
        to_send  = to_send - 1;
      end
    end
  end

  // ---------------- RX sink ----------------
  int rx_words = 0, pad_words = 0, rx_last = 0, bp_events = 0, mism = 0;
  always @(posedge clk) begin
    m_tready <= ($urandom_range(99) >= 30);
    if (m_tvalid && !m_tready) bp_events++;
    if (m_tvalid && m_tready) begin
      rx_words++;
      if (m_tlast) rx_last++;
      if (sent.size() > 0 && m_tdata == sent[0]) begin
        void'(sent.pop_front());
        checks++;
      end else if (m_tdata == 64'd0) begin
        pad_words++;
      end else begin
        mism++;
        check(0, $sformatf("rx word %0d: got %h expected %h", rx_words, m_tdata,
                           sent.size() ? sent[0] : 64'hX));
        if (sent.size() > 0) void'(sent.pop_front());
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int resid_cnt = 0, cfo_est_cnt = 0;
  always @(posedge clk) begin
    if (resid_valid) resid_cnt++;

    if (dut.u_cfo.est_valid) cfo_est_cnt++;
  end

  // watchdog
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_drained(int max_cycles);
    int n = 0;
    while ((sent.size() != 0 || to_send != 0) && n < max_cycles) begin
      @(posedge clk);
      n++;
    end
    check(sent.size() == 0, $sformatf("%0d words not received", sent.size()));
    sent.delete();
    repeat (2000) @(posedge clk);
  endtask

  task automatic run_phase(int lam, mod_t m, int frames);
    int words;
    axil_write(8'h00, {26'd0, m, 4'(lam)});
    words = int'(frame_words(4'(lam), m)) * frames;
    $display("phase: lambda_p=%0d mod=%s frames=%0d words=%0d", lam, m.name(), frames, words);
    to_send = words;
    wait_drained(200_000 * frames);
  endtask

  logic [31:0] r;
  int          mode_switches = 0, thr_starts = 0;
  int          exp_angle;
  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1; arst_n = 1;
    repeat (5) @(posedge clk);

    axil_read(8'h00, r);
    check(r[5:0] == {MOD_16QAM, 4'd4}, $sformatf("CTRL reset value %h", r));
    axil_write(8'h10, 32'd3);                 // decimation phase for the 3-sample delay
    axil_read(8'h10, r);
    check(r[1:0] == 2'd3, "RXPH readback");

    run_phase(4, MOD_16QAM, 3);
    axil_read(8'h14, r);
    exp_angle = int'(DF_SAMPLE * SRRC_L * PREAMBLE_LEN * 65536.0);
    $display("CFO estimate %0d, expected %0d", $signed(r[15:0]), exp_angle);
    check($signed(r[15:0]) > exp_angle - 400 && $signed(r[15:0]) < exp_angle + 400,
          "coarse CFO estimate");

    run_phase(8, MOD_64QAM, 2);  mode_switches++;
    run_phase(6, MOD_8QAM, 2);   mode_switches++;
    run_phase(1, MOD_4QAM, 2);   mode_switches++;

    // overflow burst: more than the FIFO holds, sent without gaps
    gap_pct = 0;
    axil_write(8'h00, {26'd0, MOD_16QAM, 4'd2});
    to_send = 600;
    mode_switches++;
    while (to_send != 0) @(posedge clk);
    repeat (100_000) @(posedge clk);
    axil_write(8'h04, 32'd1);                 // start on any data: flush the remainder
    thr_starts++;
    wait_drained(400_000);
    repeat (200_000) @(posedge clk);           // let the zero-filled frame finish

    axil_read(8'h1C, r);
    $display("frames sent %0d received %0d", r[15:0], r[31:16]);
    check(r[15:0] == r[31:16], "frames sent == frames received");
    check(r[15:0] == 16'(3 + 2 + 2 + 2 + 6), "frame count");
    axil_read(8'h18, r);
    $display("last residual phase %0d (full turn 65536)", $signed(r[15:0]));
    check($signed(r[15:0]) > -2000 && $signed(r[15:0]) < 2000, "residual phase small");

    $display("mechanisms: cfo_est=%0d resid=%0d full=%0d pad=%0d backpressure=%0d switches=%0d thr=%0d tlast=%0d mism=%0d",
             cfo_est_cnt, resid_cnt, full_events, pad_words, bp_events, mode_switches,
             thr_starts, rx_last, mism);
    check(cfo_est_cnt > 0, "coarse CFO estimate happened");
    check(resid_cnt > 0, "residual phase measured");
    check(full_events > 0, "FIFO full / TREADY low happened");
    check(pad_words > 0, "zero fill happened");
    check(bp_events > 0, "RX back-pressure happened");
    check(mode_switches > 0 && thr_starts > 0, "mode switch / threshold start");
    check(rx_last == 3 + 2 + 2 + 2 + 6, "one TLAST per received frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
