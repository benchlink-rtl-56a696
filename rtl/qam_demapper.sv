// qam_demapper - hard-decision demapper for 4QAM, 8QAM, 16QAM and 64QAM symbols.
//
// Combinational inverse of qam_mapper: on each axis the amplitude is compared with the
// decision thresholds halfway between constellation levels, the resulting level index is
// Gray coded, and the I bits are placed below the Q bits. Unused upper bits are zero.
// The paper says only that corrected symbols are demodulated into a byte stream; hard
// decisions and the bit layout (which mirrors the mapper) are this design's choice.
module qam_demapper
  import benchlink_pkg::*;
(
  input  mod_t       modulation,
  input  iq_t        sym,
  output logic [5:0] bits
);

  // level index (0..2^n-1) of amplitude v for levels (2k-(2^n-1))*unit, then Gray code
  function automatic logic [2:0] decide(logic signed [15:0] v, int n, int unit);
    logic [2:0] k;
    k = '0;
    for (int t = 1; t < (1 << n); t++)
      if (int'(v) > (2 * t - (1 << n)) * unit) k = 3'(t);
    return k ^ (k >> 1);
  endfunction

  logic [2:0] gi, gq;

  always_comb begin
    bits = '0;
    gi   = '0;
    gq   = '0;
    case (modulation)
      MOD_4QAM: begin
        gi = decide(sym.i, 1, UNIT_4);
        gq = decide(sym.q, 1, UNIT_4);
        bits = {4'd0, gq[0], gi[0]};
      end
      MOD_8QAM: begin
        gi = decide(sym.i, 2, UNIT_8);
        gq = decide(sym.q, 1, UNIT_8);
        bits = {3'd0, gq[0], gi[1:0]};
      end
      MOD_16QAM: begin
        gi = decide(sym.i, 2, UNIT_16);
        gq = decide(sym.q, 2, UNIT_16);
        bits = {2'd0, gq[1:0], gi[1:0]};
      end
      default: begin
        gi = decide(sym.i, 3, UNIT_64);
        gq = decide(sym.q, 3, UNIT_64);
        bits = {gq, gi};
      end
    endcase
  end

endmodule
