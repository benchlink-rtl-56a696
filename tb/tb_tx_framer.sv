// tb_tx_framer - checks frame assembly: start rule, preamble/training/pilot/data MUX,
// the bit gearbox, the QAM mapping of payload bits and zero fill.
//
// A FIFO model (first-word-fall-through queue) feeds the framer and the shaper's symbol
// request is emulated every 4 cycles. The expected frame is built here independently: the
// layout from lambda_p, the payload bit stream (word 0 first, bit 0 first, zeros after the
// last word) cut into 2/3/4/6-bit groups and mapped with a Gray-decoding reference mapper.
// Cases: 16QAM lambda_p=4 (no start with one word short), 8QAM lambda_p=6 (groups straddle
// words), 64QAM lambda_p=8 with a 5-word threshold (zero fill), and 4QAM lambda_p=1 started
// by the drain flag.
//
// Threshold start, pilot LUT and MUX follow the paper; the gearbox and zero fill are this
// design's own.
`timescale 1ns/1ps
module tb_tx_framer;
  import benchlink_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0]  lambda_p;
  mod_t        modulation;
  logic [15:0] thresh;
  logic [63:0] fifo_data;
  logic        fifo_empty, fifo_drain, fifo_rd, sym_req, fstart, fdone, busy;
  logic [9:0]  fifo_level;
  logic [15:0] frames_sent;
  iq_t         sym;
  int checks = 0, failures = 0;

  tx_framer #(.LEVEL_W(10)) dut (.clk, .rst_n, .lambda_p, .modulation, .thresh, .fifo_data,
    .fifo_empty, .fifo_level, .fifo_drain, .fifo_rd, .sym_req, .sym, .frame_start(fstart),
    .frame_done(fdone), .busy, .frames_sent);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO model
  logic [63:0] q [$];
  int popped = 0;
  always_comb begin
    fifo_empty = (q.size() == 0);
    fifo_data  = fifo_empty ? 64'd0 : q[0];
    fifo_level = 10'(q.size());
  end
  always @(posedge clk) if (fifo_rd && q.size() > 0) begin void'(q.pop_front()); popped++; end

  // symbol request every 4 cycles, record the symbol registered on each request
  int cyc = 0;
  always @(posedge clk) begin cyc++; sym_req <= rst_n && (cyc % 4 == 0); end
  iq_t rec [$];
  logic rec_on = 0, req_d = 0;
  always @(posedge clk) begin
    req_d <= sym_req;
    if (fstart) rec_on <= 1;
    if (req_d && rec_on) rec.push_back(sym);
  end

  // reference mapper: Gray code per axis -> level index -> amplitude
  function automatic int axis(int g, int n, int unit);
    int b = g;
    for (int s = 1; s < n; s++) b ^= (g >> s);
    return (2 * b - ((1 << n) - 1)) * unit;
  endfunction
  function automatic iq_t ref_map(mod_t m, int bits);
    iq_t s;
    case (m)
      MOD_4QAM:  begin s.i = 16'(axis(bits & 1, 1, 11585)); s.q = 16'(axis((bits >> 1) & 1, 1, 11585)); end
      MOD_8QAM:  begin s.i = 16'(axis(bits & 3, 2, 6689));  s.q = 16'(axis((bits >> 2) & 1, 1, 6689)); end
      MOD_16QAM: begin s.i = 16'(axis(bits & 3, 2, 5181));  s.q = 16'(axis((bits >> 2) & 3, 2, 5181)); end
      default:   begin s.i = 16'(axis(bits & 7, 3, 2528));  s.q = 16'(axis((bits >> 3) & 7, 3, 2528)); end
    endcase
    return s;
  endfunction

  // Build the expected frame from the words that will be sent.
  iq_t exp_sym [$];
  task automatic build(int lam, mod_t m, logic [63:0] words [$]);
    int d, base, extra, len, nb, bitpos, v;
    exp_sym.delete();
    nb = (m == MOD_4QAM) ? 2 : (m == MOD_8QAM) ? 3 : (m == MOD_16QAM) ? 4 : 6;
    for (int k = 0; k < 256; k++) exp_sym.push_back(preamble_sym(7'(k % 128)));
    d = 256 - 16 * lam; base = d / lam; extra = d % lam; bitpos = 0;
    for (int s = 0; s < 8; s++)
      for (int g = 0; g < lam; g++) begin
        for (int k = 0; k < 16; k++) exp_sym.push_back(pilot_sym(4'(k)));
        len = base + (g < extra ? 1 : 0);
        for (int k = 0; k < len; k++) begin
          v = 0;
          for (int b = 0; b < nb; b++) begin
            int w = (bitpos + b) / 64;
            if (w < words.size() && words[w][(bitpos + b) % 64]) v |= (1 << b);
          end
          bitpos += nb;
          exp_sym.push_back(ref_map(m, v));
        end
      end
  endtask

  task automatic run_case(string name, int lam, mod_t m, int thr, int nwords, int short_by,
                          bit use_drain);
    logic [63:0] words [$];
    int bad = 0;
    for (int k = 0; k < nwords; k++) words.push_back({$urandom, $urandom});
    build(lam, m, words);
    lambda_p = 4'(lam); modulation = m; thresh = 16'(thr); fifo_drain = 0;
    rec.delete(); rec_on = 0; popped = 0;
    for (int k = 0; k < nwords - short_by; k++) q.push_back(words[k]);
    repeat (3000) @(posedge clk);
    if (short_by > 0 || use_drain) begin
      check(!busy, {name, ": idle below threshold"});
      for (int k = nwords - short_by; k < nwords; k++) q.push_back(words[k]);
      if (use_drain) fifo_drain = 1;
    end
    wait (fdone);
    @(posedge clk);
    fifo_drain = 0;
    repeat (20) @(posedge clk);
    check(rec.size() >= 2304, $sformatf("%s: %0d symbols recorded", name, rec.size()));
    for (int k = 0; k < 2304 && k < rec.size(); k++)
      if (rec[k] != exp_sym[k]) begin
        bad++;
        if (bad < 4) $display("%s sym %0d got %0d,%0d exp %0d,%0d", name, k, rec[k].i, rec[k].q,
                              exp_sym[k].i, exp_sym[k].q);
      end
    check(bad == 0, $sformatf("%s: %0d symbol mismatches", name, bad));
    check(popped == nwords && q.size() == 0, $sformatf("%s: %0d words taken", name, popped));
    check(rec.size() > 2304 && rec[2304] == '0, $sformatf("%s: zero output after frame", name));
  endtask

  initial begin
    lambda_p = 4; modulation = MOD_16QAM; thresh = 0; fifo_drain = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case("16QAM l4", 4, MOD_16QAM, 0, 96, 1, 0);
    check(frames_sent == 1, "frame counter 1");
    run_case("8QAM l6", 6, MOD_8QAM, 0, 60, 0, 0);
    run_case("64QAM l8 zero fill", 8, MOD_64QAM, 5, 5, 0, 0);
    run_case("4QAM l1 drain", 1, MOD_4QAM, 0, 3, 3, 1);
    check(frames_sent == 4, "frame counter 4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
