// rx_packer - packs demapped payload bits into 64-bit words on the RX AXI4-Stream master.
//
// Each data symbol adds its 2/3/4/6 bits above those already held (bit 0 first, matching the
// transmitter's gearbox). Every completed 64-bit word goes into an output FIFO; the last
// word of a frame carries TLAST (a frame holds a whole number of words; any bits left at
// frame end are sent zero-padded). The FIFO decouples the receiver, which cannot stall, from
// back-pressure on TREADY; words that find it full are dropped and counted in `overflow`.
//
// Following the paper: a byte stream sent to the ARM processing system over AXI4-Stream, in
// Uint64 words. This design's own: bit order, TLAST per frame, the FIFO and drop policy.
module rx_packer
  import benchlink_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,     // data symbol
  input  logic [5:0]        bits,
  input  mod_t              modulation,
  input  logic              frame_end,    // with the last data symbol of a frame
  output logic [WORD_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output logic [15:0]       overflow
);
  logic [127:0] sr, sr_n;
  logic [7:0]   cnt, cnt_n;
  logic [2:0]   nb;
  logic         push, full, empty;
  logic [64:0]  wdata, rdata;

  assign nb = 3'(bits_per_sym(modulation));

  always_comb begin
    sr_n      = sr;
    cnt_n     = cnt;
    push      = 1'b0;
    wdata     = '0;
    if (in_valid) begin
      sr_n  = sr | ((128'(bits) & ((128'd1 << nb) - 1'b1)) << cnt);
      cnt_n = cnt + 8'(nb);
    end
    if (cnt_n >= 8'(WORD_W)) begin
      push  = 1'b1;
      wdata = {frame_end && (cnt_n == 8'(WORD_W)), sr_n[63:0]};
      sr_n  = sr_n >> WORD_W;
      cnt_n = cnt_n - 8'(WORD_W);
    end else if (frame_end && cnt_n != 0) begin
      push  = 1'b1;
      wdata = {1'b1, sr_n[63:0]};
      sr_n  = '0;
      cnt_n = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr       <= '0;
      cnt      <= '0;
      overflow <= '0;
    end else begin
      sr  <= sr_n;
      cnt <= cnt_n;
      if (push && full) overflow <= overflow + 1'b1;
    end
  end

  sync_fifo #(.W(65), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(push), .wr_data(wdata), .rd_en(m_tready),
    .rd_data(rdata), .empty, .full
  );

  assign m_tvalid = !empty;
  assign m_tdata  = rdata[63:0];
  assign m_tlast  = rdata[64];

endmodule
