// packet_fsm - packetization control FSM of the TX frame builder (a Moore machine).
//
// It walks through one frame: preamble (128 symbols), training sequence (128), then eight
// subframes; each subframe is lambda_p segments of a 16-symbol pilot followed by that
// segment's data symbols. Its outputs, the Append Preamble / Append Pilots / Append Data
// selects of the frame-assembly figure and the symbol index, depend only on the state
// registers. The machine advances one symbol on each `adv` strobe. From IDLE it enters the
// preamble on an `adv` while `start` is high, and it returns to IDLE after the last data
// symbol. lambda_p is captured when a frame starts, so a new value takes effect at the next
// frame.
//
// Following the paper: a Moore machine driven by Start Transmit and lambda_p that selects
// preamble, pilots or data. This design's own: separate preamble and training states, the
// segment layout (see benchlink_pkg) and the clamping of lambda_p to 1..8.
module packet_fsm
  import benchlink_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,        // Start Transmit
  input  logic       adv,          // one symbol is taken
  input  logic [3:0] lambda_p,
  output logic       app_preamble, // preamble or training symbol selected
  output logic       app_training, // training part of the preamble block
  output logic       app_pilots,
  output logic       app_data,
  output logic [8:0] idx,          // symbol index within the current phase
  output logic [3:0] seg,          // segment (pilot repetition) within the subframe
  output logic [2:0] sub,          // subframe within the frame
  output logic       busy,
  output logic       frame_start,  // registered pulse: frame entered
  output logic       frame_done    // registered pulse: frame left
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_TRAIN, S_PILOT, S_DATA} state_t;
  state_t     state;
  logic [3:0] lam;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      idx         <= '0;
      seg         <= '0;
      sub         <= '0;
      lam         <= 4'd1;
      frame_start <= 1'b0;
      frame_done  <= 1'b0;
    end else begin
      frame_start <= 1'b0;
      frame_done  <= 1'b0;
      if (adv) begin
        case (state)
          S_IDLE: if (start) begin
            state       <= S_PRE;
            idx         <= '0;
            seg         <= '0;
            sub         <= '0;
            lam         <= clamp_lambda(lambda_p);
            frame_start <= 1'b1;
          end
          S_PRE: begin
            idx <= idx + 1'b1;
            if (idx == 9'(PREAMBLE_LEN - 1)) begin
              state <= S_TRAIN;
              idx   <= '0;
            end
          end
          S_TRAIN: begin
            idx <= idx + 1'b1;
            if (idx == 9'(TRAINING_LEN - 1)) begin
              state <= S_PILOT;
              idx   <= '0;
            end
          end
          S_PILOT: begin
            idx <= idx + 1'b1;
            if (idx == 9'(PILOT_LEN - 1)) begin
              state <= S_DATA;
              idx   <= '0;
            end
          end
          S_DATA: begin
            idx <= idx + 1'b1;
            if (idx == seg_data_len(lam, seg) - 1'b1) begin
              idx <= '0;
              if (seg == lam - 1'b1) begin
                seg <= '0;
                if (sub == 3'(SUBFRAMES - 1)) begin
                  state      <= S_IDLE;
                  frame_done <= 1'b1;
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
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // Moore outputs
  assign app_preamble = (state == S_PRE) || (state == S_TRAIN);
  assign app_training = (state == S_TRAIN);
  assign app_pilots   = (state == S_PILOT);
  assign app_data     = (state == S_DATA);
  assign busy         = (state != S_IDLE);

endmodule
