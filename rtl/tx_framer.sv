// tx_framer - dynamic frame assembly: builds BenchLink frames from FIFO payload words.
//
// Structure (frame-assembly figure): the packetization control FSM selects, for each symbol,
// the preamble/training generator, the pilot table x_p or payload data through a multiplexer.
// Payload data is taken from the TX FIFO as 64-bit words, cut into 2/3/4/6-bit groups by a
// gearbox (bit 0 first; a group may straddle two words) and mapped to QAM symbols.
//
// A frame starts when the FIFO holds at least the configured threshold of words (0 selects
// exactly one frame of payload, 2*(16-lambda_p)*bits words), or when the FIFO is draining
// (its AXI TREADY latch is reset) and not empty. If the FIFO runs dry inside a frame the
// remaining data symbols carry zero bits. Modulation and lambda_p are captured at frame start.
//
// Timing: the downstream pulse shaper pulses `sym_req` when it consumes `sym`; on that pulse
// `sym` is replaced by the next symbol in the following cycle (sym is always the symbol the
// shaper will take next). Outside frames `sym` is zero.
//
// Following the paper: FIFO threshold start, Moore FSM, pilot LUT, MUX, preamble and training
// prepended, modulation configurable. This design's own: the gearbox, bit order, zero fill,
// and the drain start rule that keeps the SR-latch flow control from stalling.
module tx_framer
  import benchlink_pkg::*;
#(
  parameter int LEVEL_W = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [3:0]         lambda_p,
  input  mod_t               modulation,
  input  logic [15:0]        thresh,
  // FIFO read side
  input  logic [WORD_W-1:0]  fifo_data,
  input  logic               fifo_empty,
  input  logic [LEVEL_W-1:0] fifo_level,
  input  logic               fifo_drain,
  output logic               fifo_rd,
  // symbol output
  input  logic               sym_req,
  output iq_t                sym,
  output logic               frame_start,
  output logic               frame_done,
  output logic               busy,
  output logic [15:0]        frames_sent
);

  logic       app_pre, app_pil, app_dat;
  logic [8:0] idx;
  logic       start;
  mod_t       mod_q;
  logic [15:0] thr_eff;

  assign thr_eff = (thresh == 16'd0) ? frame_words(clamp_lambda(lambda_p), modulation) : thresh;
  assign start   = ((32'(fifo_level) >= 32'(thr_eff)) || (fifo_drain && !fifo_empty));

  packet_fsm u_fsm (
    .clk, .rst_n, .start, .adv(sym_req), .lambda_p,
    .app_preamble(app_pre), .app_training(), .app_pilots(app_pil), .app_data(app_dat),
    .idx, .seg(), .sub(), .busy, .frame_start, .frame_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           mod_q <= MOD_4QAM;
    else if (sym_req && !busy) mod_q <= modulation;
  end

  // ---------------- gearbox ----------------
  logic [127:0] gb_sr, merged;
  logic [7:0]   gb_cnt;
  logic [2:0]   nb;
  logic [5:0]   gbits;
  logic         need_word;

  assign nb        = 3'(bits_per_sym(mod_q));
  assign need_word = (gb_cnt < 8'(nb));
  assign merged    = gb_sr | ((fifo_empty ? 128'd0 : {64'd0, fifo_data}) << gb_cnt);
  assign gbits     = need_word ? merged[5:0] : gb_sr[5:0];
  assign fifo_rd   = sym_req && app_dat && need_word && !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gb_sr  <= '0;
      gb_cnt <= '0;
    end else if (sym_req) begin
      if (!app_dat && !app_pil) begin            // outside the payload: start empty
        gb_sr  <= '0;
        gb_cnt <= '0;
      end else if (app_dat) begin
        if (need_word) begin
          gb_sr  <= merged >> nb;
          gb_cnt <= gb_cnt + 8'(WORD_W) - 8'(nb);
        end else begin
          gb_sr  <= gb_sr >> nb;
          gb_cnt <= gb_cnt - 8'(nb);
        end
      end
    end
  end

  // ---------------- symbol sources and MUX ----------------
  iq_t s_pre, s_pil, s_dat;
  logic [5:0] mbits;

  always_comb begin
    mbits = gbits;
    for (int k = 0; k < 6; k++) if (k >= int'(nb)) mbits[k] = 1'b0;
  end

  preamble_gen u_pre (.idx(idx[6:0]), .sym(s_pre));
  pilot_lut    u_pil (.idx(idx[3:0]), .sym(s_pil));
  qam_mapper   u_map (.modulation(mod_q), .bits(mbits), .sym(s_dat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym <= '0;
    end else if (sym_req) begin
      if (app_pre)      sym <= s_pre;
      else if (app_pil) sym <= s_pil;
      else if (app_dat) sym <= s_dat;
      else              sym <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          frames_sent <= '0;
    else if (frame_done) frames_sent <= frames_sent + 1'b1;
  end

endmodule
