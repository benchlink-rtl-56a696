// preamble_gen - preamble and training sequence symbols (Append Preamble).
//
// Returns symbol `idx` (0..127) of the 128-symbol preamble, combinationally. The preamble is
// the length-128 Golay sequence a128 = [a64 b64], that is the two halves of a length-64 Golay
// complementary pair, sent as BPSK at full scale (Q is always zero). The training sequence
// that follows it is the same 128 symbols again: the receiver's coarse CFO estimator
// correlates the training block against the preamble 128 symbols earlier, and the frame
// detector sees the Golay peak twice.
// Following the paper: Golay complementary sequences in a 128-symbol preamble and a 128-symbol
// training sequence. This design's choice: the exact sequence, BPSK, and reusing it for the
// training sequence.
module preamble_gen
  import benchlink_pkg::*;
(
  input  logic [6:0] idx,
  output iq_t        sym
);
  assign sym = preamble_sym(idx);
endmodule
