// tx_fifo - asynchronous TX payload FIFO with SR-latch flow control (dynamic frame assembly).
//
// Payload words arrive from the ARM processing system on an AXI4-Stream slave in the AXI
// clock domain and are read by the frame builder in the PHY clock domain. A word is pushed
// only when TVALID and TREADY are both high. TREADY comes from an SR latch with a unit delay,
// as drawn in the frame-assembly figure: the latch is set when the FIFO is empty and reset when
// it is full, so once the FIFO fills it refuses data until the frame builder has drained it.
// While the latch is reset the read side sees `drain`, which lets the frame builder send the
// remainder even if it is below the start threshold.
//
// The asynchronous FIFO and the set/reset roles of empty/full follow the paper. The clock
// crossing uses Gray-coded pointers with two-flop synchronisers (standard practice, not
// described in the paper); the depth is assumed. Reads are first-word-fall-through: rd_data
// shows the oldest word whenever `empty` is low, and rd_en removes it.
module tx_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 512
) (
  // write side: AXI4-Stream slave (AXI clock domain)
  input  logic                   wclk,
  input  logic                   wrst_n,
  input  logic [W-1:0]           s_tdata,
  input  logic                   s_tvalid,
  output logic                   s_tready,
  // read side (PHY clock domain)
  input  logic                   rclk,
  input  logic                   rrst_n,
  input  logic                   rd_en,
  output logic [W-1:0]           rd_data,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] level,
  output logic                   drain
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic        full_w, empty_w, ready_q, push;
  logic        drain_r1, drain_r2;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int k = AW - 1; k >= 0; k--) b[k] = b[k+1] ^ g[k];
    return b;
  endfunction

  // ---------------- write domain ----------------
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  assign full_w  = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty_w = (wgray == rgray_w2);

  // SR latch (set = empty, reset = full) followed by a unit delay.
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n)      ready_q <= 1'b1;
    else if (empty_w) ready_q <= 1'b1;
    else if (full_w)  ready_q <= 1'b0;
  end

  assign s_tready = ready_q && !full_w;
  assign push     = s_tvalid && s_tready;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else if (push) begin
      wbin  <= wbin + 1'b1;
      wgray <= bin2gray(wbin + 1'b1);
    end
  end

  always_ff @(posedge wclk) begin
    if (push) mem[wbin[AW-1:0]] <= s_tdata;
  end

  // ---------------- read domain ----------------
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      drain_r1 <= 1'b0;
      drain_r2 <= 1'b0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      drain_r1 <= !ready_q;
      drain_r2 <= drain_r1;
    end
  end

  assign empty   = (rgray == wgray_r2);
  assign level   = gray2bin(wgray_r2) - rbin;
  assign rd_data = mem[rbin[AW-1:0]];
  assign drain   = drain_r2;

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else if (rd_en && !empty) begin
      rbin  <= rbin + 1'b1;
      rgray <= bin2gray(rbin + 1'b1);
    end
  end

  a_no_push_when_full: assert property (@(posedge wclk) disable iff (!wrst_n) push |-> !full_w);

endmodule
