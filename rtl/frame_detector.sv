// frame_detector - frame detection subsystem: preamble correlator, normalised comparator and
// frame synchroniser in series (the frame-detection figure).
//
// Input x[n] is the CFO-corrected symbol stream; output y[n] is the same stream delayed by
// two cycles, aligned with the is_frame / is_pilot / is_residual flags of frame_sync. The
// structure is the paper's; the parts are described in gcs_correlator and frame_sync.
module frame_detector
  import benchlink_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  iq_t         in,
  input  logic [3:0]  lambda_p,
  input  logic [7:0]  thresh,
  output logic        out_valid,
  output iq_t         out,
  output logic        is_frame,
  output logic        is_pilot,
  output logic        is_residual,
  output logic [3:0]  pilot_idx,
  output logic        frame_end,
  output logic        detect,
  output logic [15:0] frames_rx
);
  logic c_valid;
  iq_t  c_out;

  gcs_correlator u_corr (
    .clk, .rst_n, .in_valid, .in, .thresh,
    .out_valid(c_valid), .out(c_out), .detect
  );

  frame_sync u_sync (
    .clk, .rst_n, .in_valid(c_valid), .in(c_out), .detect, .lambda_p,
    .out_valid, .out, .is_frame, .is_pilot, .is_residual, .pilot_idx, .frame_end, .frames_rx
  );

endmodule
