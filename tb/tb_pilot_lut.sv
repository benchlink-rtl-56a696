// tb_pilot_lut - checks the 16-symbol pilot table.
//
// Every pilot must be a QPSK point of amplitude 1/sqrt(2) (unit power) and the in-phase and
// quadrature sequences must form a Golay complementary pair: the sum of their aperiodic
// autocorrelations is zero at every non-zero shift (the property the paper uses the GCS
// pilots for). The check is computed here from the LUT output only.
//
// Pilots from a lookup table follow the paper; the Golay pilot content is this design's own.
`timescale 1ns/1ps
module tb_pilot_lut;
  import benchlink_pkg::*;
  logic [3:0] idx;
  iq_t        sym;
  int checks = 0, failures = 0;
  int a [16], b [16];

  pilot_lut dut (.idx, .sym);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, e;
    for (int k = 0; k < 16; k++) begin
      idx = 4'(k);
      #1;
      check((sym.i == 11585 || sym.i == -11585) && (sym.q == 11585 || sym.q == -11585),
            $sformatf("pilot %0d is a unit-power QPSK point", k));
      a[k] = sym.i > 0 ? 1 : -1;
      b[k] = sym.q > 0 ? 1 : -1;
    end
    e = 0;
    for (int k = 0; k < 16; k++) e += a[k] * a[k] + b[k] * b[k];
    check(e == 32, "energy");
    for (int s = 1; s < 16; s++) begin
      r = 0;
      for (int k = 0; k + s < 16; k++) r += a[k] * a[k+s] + b[k] * b[k+s];
      check(r == 0, $sformatf("complementary autocorrelation at shift %0d = %0d", s, r));
    end
    // the pilot must not be a constant sequence (it also has to carry timing information)
    r = 0;
    for (int k = 0; k < 16; k++) r += a[k];
    check(r != 16 && r != -16, "pilot is not constant");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
