// tb_nco_cfc - checks the NCO and complex frequency corrector.
//
// Random input samples are multiplied by exp(-j*2*pi*phase/2^32), where the phase advances by
// `inc` after each valid sample. The expected output is computed here in floating point from
// the upper 16 phase bits; every output must be within 6 LSB on I and Q. Increments of both
// signs are used, including one that wraps the phase many times.
//
// The NCO at -df_est follows the paper; the tolerance and increments are this testbench's own.
`timescale 1ns/1ps
module tb_nco_cfc;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               in_valid, out_valid;
  iq_t                in, out;
  logic signed [31:0] inc;
  int checks = 0, failures = 0;

  nco_cfc dut (.clk, .rst_n, .in_valid, .in, .inc, .out_valid, .out);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iq_t ins [$], outs [$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid) ins.push_back(in);
    if (out_valid) outs.push_back(out);
    in_valid <= ($urandom_range(3) != 0);
    in <= '{i: 16'($urandom_range(40000) - 20000), q: 16'($urandom_range(40000) - 20000)};
  end

  task automatic run(int unsigned incv);
    int bad = 0, worst = 0;
    logic [31:0] ph;
    rst_n = 0; ins.delete(); outs.delete(); inc = incv; in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (6000) @(posedge clk);
    ph = 0;
    for (int n = 0; n < outs.size(); n++) begin
      real th, ei, eq;
      int di, dq;
      th = -6.283185307179586 * real'(ph[31:16]) / 65536.0;
      ei = ins[n].i * $cos(th) - ins[n].q * $sin(th);
      eq = ins[n].i * $sin(th) + ins[n].q * $cos(th);
      di = int'(outs[n].i) - $rtoi(ei);
      dq = int'(outs[n].q) - $rtoi(eq);
      if (di < 0) di = -di;
      if (dq < 0) dq = -dq;
      if (di > worst) worst = di;
      if (dq > worst) worst = dq;
      if (di > 6 || dq > 6) bad++;
      ph += incv;
    end
    check(outs.size() > 4000, "outputs produced");
    check(bad == 0, $sformatf("inc=%0d: %0d samples off (worst %0d LSB)", int'(incv), bad, worst));
  endtask

  initial begin
    in_valid = 0; in = '0; inc = 0;
    run(32'd0);
    run(32'd3435973);          // 8e-4 cycles per sample
    run(-32'sd8589935);        // -2e-3 cycles per sample
    run(32'd1234567891);       // fast, wraps often
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
