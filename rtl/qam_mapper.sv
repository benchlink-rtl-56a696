// qam_mapper - maps 2, 3, 4 or 6 payload bits to a 4QAM, 8QAM, 16QAM or 64QAM symbol.
//
// Combinational. The low half of the bits selects the in-phase level and the rest the
// quadrature level; each axis is Gray coded (bits 00,01,11,10 -> -3,-1,+1,+3 for two bits).
// 8QAM is a 4x2 rectangular constellation: two bits for I (four levels) and one for Q.
// Constellations are scaled to unit average power in Q1.14. The paper names the four
// modulations; the constellations, bit order and scaling are this design's choice.
module qam_mapper
  import benchlink_pkg::*;
(
  input  mod_t       modulation,
  input  logic [5:0] bits,
  output iq_t        sym
);

  // Gray-coded level index -> signed amplitude (2*idx - (2^n - 1)) * unit
  function automatic logic signed [15:0] level(logic [2:0] g, int n, int unit);
    logic [2:0] b;
    b[2] = g[2];
    b[1] = g[1] ^ ((n == 3) ? g[2] : 1'b0);
    b[0] = g[0] ^ b[1];
    if (n == 1) b = {2'b00, g[0]};
    else if (n == 2) b = {1'b0, g[1], g[1] ^ g[0]};
    return 16'((2 * int'(b) - ((1 << n) - 1)) * unit);
  endfunction

  always_comb begin
    case (modulation)
      MOD_4QAM: begin
        sym.i = level({2'b00, bits[0]}, 1, UNIT_4);
        sym.q = level({2'b00, bits[1]}, 1, UNIT_4);
      end
      MOD_8QAM: begin
        sym.i = level({1'b0, bits[1:0]}, 2, UNIT_8);
        sym.q = level({2'b00, bits[2]}, 1, UNIT_8);
      end
      MOD_16QAM: begin
        sym.i = level({1'b0, bits[1:0]}, 2, UNIT_16);
        sym.q = level({1'b0, bits[3:2]}, 2, UNIT_16);
      end
      default: begin
        sym.i = level(bits[2:0], 3, UNIT_64);
        sym.q = level(bits[5:3], 3, UNIT_64);
      end
    endcase
  end

endmodule
