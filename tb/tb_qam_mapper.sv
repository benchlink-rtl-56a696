// tb_qam_mapper - exhaustive check of the QAM mapper against the constellation definition.
//
// For every modulation and every bit pattern the expected I and Q amplitudes are computed
// here from the Gray code table (levels -(2^n-1)..(2^n-1) in steps of 2, times the unit
// amplitude) and compared with the mapper's output.
//
// The four modulations follow the paper; the constellations are this design's own.
`timescale 1ns/1ps
module tb_qam_mapper;
  import benchlink_pkg::*;
  mod_t       m;
  logic [5:0] bits;
  iq_t        sym;
  int checks = 0, failures = 0;

  qam_mapper dut (.modulation(m), .bits(bits), .sym(sym));

  // amplitude for a Gray-coded group: position of g in the Gray sequence
  function automatic int amp(int g, int n, int unit);
    for (int k = 0; k < (1 << n); k++)
      if ((k ^ (k >> 1)) == g) return (2 * k - ((1 << n) - 1)) * unit;
    return 0;
  endfunction

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ni, nq, unit, ei, eq;
    for (int mi = 0; mi < 4; mi++) begin
      m = mod_t'(mi);
      case (m)
        MOD_4QAM:  begin ni = 1; nq = 1; unit = UNIT_4;  end
        MOD_8QAM:  begin ni = 2; nq = 1; unit = UNIT_8;  end
        MOD_16QAM: begin ni = 2; nq = 2; unit = UNIT_16; end
        default:   begin ni = 3; nq = 3; unit = UNIT_64; end
      endcase
      for (int b = 0; b < (1 << (ni + nq)); b++) begin
        bits = 6'(b);
        #1;
        ei = amp(b & ((1 << ni) - 1), ni, unit);
        eq = amp(b >> ni, nq, unit);
        checks++;
        if (int'(sym.i) != ei || int'(sym.q) != eq) begin
          failures++;
          $display("FAIL mod %0d bits %b: got (%0d,%0d) expected (%0d,%0d)", mi, bits,
                   sym.i, sym.q, ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
