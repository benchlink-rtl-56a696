// pilot_lut - lookup table of the known pilot sequence x_p.
//
// Returns pilot symbol `idx` (0..15) combinationally. The paper states that pilots come from
// a lookup table, are known to both ends and are 16 symbols long (16 pilot symbols per
// repetition in the pilot table). The sequence itself is this design's choice: QPSK symbols
// (a[k] + j b[k])/sqrt(2) built from a length-16 Golay complementary pair (a, b), which has a
// flat spectrum and constant modulus, so |x_p[k]|^2 = 1 for every k.
module pilot_lut
  import benchlink_pkg::*;
(
  input  logic [3:0] idx,
  output iq_t        sym
);
  assign sym = pilot_sym(idx);
endmodule
