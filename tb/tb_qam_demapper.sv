// tb_qam_demapper - checks the hard-decision demapper on ideal and perturbed symbols.
//
// For every modulation and bit pattern the ideal constellation point is built here from the
// Gray code table, a random perturbation of less than half the level spacing is added, and
// the demapper must return the original bits. Points beyond the outer levels must saturate
// to the outer decision.
//
// The four modulations follow the paper; the constellations are this design's own.
`timescale 1ns/1ps
module tb_qam_demapper;
  import benchlink_pkg::*;
  mod_t       m;
  iq_t        sym;
  logic [5:0] bits;
  int checks = 0, failures = 0;

  qam_demapper dut (.modulation(m), .sym(sym), .bits(bits));

  function automatic int amp(int g, int n, int unit);
    for (int k = 0; k < (1 << n); k++)
      if ((k ^ (k >> 1)) == g) return (2 * k - ((1 << n) - 1)) * unit;
    return 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ni, nq, unit, di, dq;
    for (int mi = 0; mi < 4; mi++) begin
      m = mod_t'(mi);
      case (m)
        MOD_4QAM:  begin ni = 1; nq = 1; unit = UNIT_4;  end
        MOD_8QAM:  begin ni = 2; nq = 1; unit = UNIT_8;  end
        MOD_16QAM: begin ni = 2; nq = 2; unit = UNIT_16; end
        default:   begin ni = 3; nq = 3; unit = UNIT_64; end
      endcase
      for (int rep = 0; rep < 8; rep++) begin
        for (int b = 0; b < (1 << (ni + nq)); b++) begin
          di = int'($urandom_range(unit * 9 / 5)) - unit * 9 / 10;
          dq = int'($urandom_range(unit * 9 / 5)) - unit * 9 / 10;
          sym.i = 16'(amp(b & ((1 << ni) - 1), ni, unit) + di);
          sym.q = 16'(amp(b >> ni, nq, unit) + dq);
          #1;
          checks++;
          if (bits != 6'(b)) begin
            failures++;
            if (failures < 10) $display("FAIL mod %0d: sent %b got %b", mi, 6'(b), bits);
          end
        end
      end
      // far outside the constellation: outermost levels
      sym.i = 16'sd30000; sym.q = -16'sd30000;
      #1;
      checks++;
      if ((int'(bits) & ((1 << ni) - 1)) != (((1 << ni) - 1) ^ (((1 << ni) - 1) >> 1))) begin
        failures++;
        $display("FAIL mod %0d saturation, bits %b", mi, bits);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
