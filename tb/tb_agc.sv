// tb_agc - checks the automatic gain control loop.
//
// Constant-envelope input with random phase is applied at two amplitudes. After settling,
// the gain must be within 2% of the value that gives the target power (computed here from
// the amplitude) and the output power within 4% of the target. Zero input must drive the
// gain to its upper clamp, and a zero target to its lower clamp.
//
// The paper gives only the square-law detector and accumulating loop; the settling
// targets and amplitudes here are this testbench's own.
`timescale 1ns/1ps
module tb_agc;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, out_valid;
  iq_t         in, out;
  logic [15:0] ref_pwr, gain;
  logic [3:0]  mu;
  int checks = 0, failures = 0;
  real amp = 2000.0;

  agc dut (.clk, .rst_n, .in_valid, .in, .ref_pwr, .mu, .out_valid, .out, .gain);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real pacc = 0.0;
  int  pn = 0;
  always @(posedge clk) begin
    real th;
    th = 6.283185307 * real'($urandom_range(9999)) / 10000.0;
    in_valid <= ($urandom_range(1) == 0);
    in.i <= 16'($rtoi(amp * $cos(th)));
    in.q <= 16'($rtoi(amp * $sin(th)));
    if (out_valid) begin
      pacc += (real'(out.i) * out.i + real'(out.q) * out.q) / 16384.0;
      pn++;
    end
  end

  task automatic settle_and_check(real a);
    real g_exp, p;
    amp = a;
    repeat (40000) @(posedge clk);
    pacc = 0; pn = 0;
    repeat (4000) @(posedge clk);
    p = pacc / pn;
    g_exp = $sqrt(real'(ref_pwr) * 16384.0) / a * 4096.0;
    check((real'(gain) - g_exp) < 0.02 * g_exp && (g_exp - real'(gain)) < 0.02 * g_exp,
          $sformatf("amp %0.0f: gain %0d expected %0.0f", a, gain, g_exp));
    check((p - real'(ref_pwr)) < 0.04 * real'(ref_pwr) && (real'(ref_pwr) - p) < 0.04 * real'(ref_pwr),
          $sformatf("amp %0.0f: output power %0.1f target %0d", a, p, ref_pwr));
  endtask

  initial begin
    in_valid = 0; in = '0; ref_pwr = 4096; mu = 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(gain == 16'd4096, "gain resets to 1.0");
    settle_and_check(2000.0);
    settle_and_check(9000.0);
    ref_pwr = 8192;
    settle_and_check(9000.0);
    amp = 0.0;
    repeat (60000) @(posedge clk);
    check(gain == 16'hFFFF, "zero input: gain at upper clamp");
    amp = 9000.0; ref_pwr = 0;
    repeat (60000) @(posedge clk);
    check(gain == 16'd256, "zero target: gain at lower clamp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
