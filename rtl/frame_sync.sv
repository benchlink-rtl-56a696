// frame_sync - frame synchroniser: turns correlator peaks into frame and pilot flags.
//
// SEARCH waits for a correlator peak. The preamble and the training sequence carry the same
// Golay sequence, so a real frame gives a second peak exactly TRAINING_LEN symbols after the
// first; CONFIRM checks for it and drops back to SEARCH if it is missing. A peak that comes
// earlier than that restarts the count from itself, so a false peak (for example while the AGC
// is still settling at the start of a burst) cannot hide the real preamble. After the second
// peak the next symbol is payload symbol 0. During the payload (eight subframes) `is_frame` is
// high, `is_pilot` marks the 16 pilot symbols at the start of each of the lambda_p segments of
// a subframe and `pilot_idx` is the symbol's index in the pilot sequence. `is_residual` marks
// every pilot block except the first of the frame: a channel estimate from an earlier block
// exists then, so the residual phase can be measured on it. Flags are registered together
// with the pass-through symbol `out`; `frame_end` marks the last payload symbol.
//
// Following the paper: frame detection followed by a synchroniser that asserts is_PILOT from
// the configured lambda_p, and the is_FRAME / is_RESIDUAL flags. This design's own: the
// two-peak confirmation, the segment layout (benchlink_pkg) and the rule for is_RESIDUAL.
module frame_sync
  import benchlink_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  iq_t         in,
  input  logic        detect,
  input  logic [3:0]  lambda_p,
  output logic        out_valid,
  output iq_t         out,
  output logic        is_frame,
  output logic        is_pilot,
  output logic        is_residual,
  output logic [3:0]  pilot_idx,
  output logic        frame_end,
  output logic [15:0] frames_rx
);
  typedef enum logic [1:0] {S_SEARCH, S_CONFIRM, S_PILOT, S_DATA} state_t;
  state_t     state;
  logic [8:0] idx;
  logic [3:0] seg, lam;
  logic [2:0] sub;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_SEARCH;
      idx         <= '0;
      seg         <= '0;
      sub         <= '0;
      lam         <= 4'd1;
      out         <= '0;
      out_valid   <= 1'b0;
      is_frame    <= 1'b0;
      is_pilot    <= 1'b0;
      is_residual <= 1'b0;
      pilot_idx   <= '0;
      frame_end   <= 1'b0;
      frames_rx   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out         <= in;
        is_frame    <= 1'b0;
        is_pilot    <= 1'b0;
        is_residual <= 1'b0;
        frame_end   <= 1'b0;
        pilot_idx   <= idx[3:0];
        case (state)
          S_SEARCH: if (detect) begin
            state <= S_CONFIRM;
            idx   <= 9'd1;
          end
          S_CONFIRM: begin
            idx <= idx + 1'b1;
            if (detect && idx != 9'(TRAINING_LEN)) begin
              idx <= 9'd1;                      // a later peak replaces the first one
            end else if (idx == 9'(TRAINING_LEN)) begin
              if (detect) begin
                state     <= S_PILOT;
                idx       <= '0;
                seg       <= '0;
                sub       <= '0;
                lam       <= clamp_lambda(lambda_p);
                frames_rx <= frames_rx + 1'b1;
              end else begin
                state <= S_SEARCH;
              end
            end
          end
          S_PILOT: begin
            is_frame    <= 1'b1;
            is_pilot    <= 1'b1;
            is_residual <= (seg != 0) || (sub != 0);
            idx         <= idx + 1'b1;
            if (idx == 9'(PILOT_LEN - 1)) begin
              state <= S_DATA;
              idx   <= '0;
            end
          end
          default: begin   // S_DATA
            is_frame <= 1'b1;
            idx      <= idx + 1'b1;
            if (idx == seg_data_len(lam, seg) - 1'b1) begin
              idx <= '0;
              if (seg == lam - 1'b1) begin
                seg <= '0;
                if (sub == 3'(SUBFRAMES - 1)) begin
                  state     <= S_SEARCH;
                  frame_end <= 1'b1;
                end else begin
                  sub   <= sub + 1'b1;
                  state <= S_PILOT;
                end
              end else begin
                seg   <= seg + 1'b1;
                state <= S_PILOT;
              end
            end
          end
        endcase
      end else begin
        frame_end <= 1'b0;
      end
    end
  end

endmodule
