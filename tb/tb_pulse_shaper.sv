// tb_pulse_shaper - checks the TX polyphase SRRC interpolator (4 samples per symbol).
//
// Symbols are offered like the frame builder does (a new symbol the cycle after each symbol
// request) and the sample strobe is random. Every output sample is compared with a direct
// convolution of the zero-stuffed symbol stream with the 25 taps, computed here. The
// request rate (one per 4 strobes) and a unit impulse response are checked as well.
//
// Upsampling and an SRRC FIR follow the paper; l = 4 and the taps are this design's own.
`timescale 1ns/1ps
module tb_pulse_shaper;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic strobe, sym_req, out_valid;
  iq_t  sym_in, out;
  int checks = 0, failures = 0;

  pulse_shaper dut (.clk, .rst_n, .strobe, .sym_in, .sym_req, .out, .out_valid);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iq_t syms [$];      // symbols in the order taken
  iq_t outs [$];
  int  n_strobe = 0, n_req = 0;
  bit  impulse = 0;
  int  sent = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (strobe) n_strobe++;
      if (sym_req) begin
        n_req++;
        syms.push_back(sym_in);
        sent++;
        if (impulse) sym_in <= (sent == 10) ? '{i: 16'sd16384, q: -16'sd16384} : '0;
        else sym_in <= '{i: 16'($urandom_range(16000) - 8000), q: 16'($urandom_range(16000) - 8000)};
      end
      if (out_valid) outs.push_back(out);
      strobe <= ($urandom_range(1) == 0);
    end
  end

  function automatic int ref_out(int n, bit q);
    longint acc = 0;
    for (int j = 0; j < 25; j++)
      if (n - j >= 0 && (n - j) % 4 == 0 && (n - j) / 4 < syms.size())
        acc += longint'(q ? syms[(n - j) / 4].q : syms[(n - j) / 4].i) * SRRC_TAPS[j];
    acc = (acc + 16384) >>> 15;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic compare(string name);
    int bad = 0;
    for (int n = 0; n < outs.size(); n++)
      if (outs[n].i != 16'(ref_out(n, 0)) || outs[n].q != 16'(ref_out(n, 1))) begin
        bad++;
        if (bad < 4) $display("%s n=%0d got %0d exp %0d", name, n, outs[n].i, ref_out(n, 0));
      end
    check(bad == 0, $sformatf("%s: %0d of %0d samples differ", name, bad, outs.size()));
  endtask

  initial begin
    strobe = 0; sym_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (8000) @(posedge clk);
    @(posedge clk);
    check(n_req == (n_strobe + 3) / 4, $sformatf("one request per 4 strobes (%0d/%0d)", n_req, n_strobe));
    check(outs.size() > 3000, "output samples produced");
    compare("random");
    // impulse: reset and send one symbol
    rst_n = 0; syms.delete(); outs.delete(); sent = 0; impulse = 1; sym_in = '0;
    n_req = 0; n_strobe = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    compare("impulse");
    // the impulse response is the tap set scaled by 0.5
    for (int j = 0; j < 25; j++)
      check(outs.size() > 40 + j && outs[40 + j].i == 16'((SRRC_TAPS[j] * 16384 + 16384) >>> 15),
            $sformatf("impulse tap %0d", j));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
