// rx_srrc - SRRC matched filter and decimation to one sample per symbol (receiver).
//
// Every input sample enters a 25-tap delay line; once every l samples, at the sample whose
// count modulo l equals `phase`, the full FIR sum_j h[j] x[n-j] is computed and emitted with
// `out_valid` one cycle later. The taps are the transmitter's (the SRRC is symmetric), so the
// cascade is a raised-cosine pulse with gain 1.0 at the symbol instants. `phase` picks the
// symbol instant; it is set over AXI-Lite for the link's sample delay.
//
// Following the paper: an SRRC filter matched to the transmit pulse. This design's own: the
// decimation and the programmable sampling phase; the paper describes no symbol-timing
// recovery, so none is built.
module rx_srrc
  import benchlink_pkg::*;
#(
  parameter int L     = SRRC_L,
  parameter int NTAPS = SRRC_NTAPS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  iq_t                  in,
  input  logic [$clog2(L)-1:0] phase,
  output logic                 out_valid,
  output iq_t                  out
);
  iq_t                  dl [NTAPS];
  iq_t                  dl_n [NTAPS];
  logic [$clog2(L)-1:0] cnt;
  logic signed [47:0]   acc_i, acc_q;

  always_comb begin
    dl_n[0] = in;
    for (int j = 1; j < NTAPS; j++) dl_n[j] = dl[j-1];
    acc_i = '0;
    acc_q = '0;
    for (int j = 0; j < NTAPS; j++) begin
      acc_i = acc_i + 48'(dl_n[j].i) * 48'(SRRC_TAPS[j]);
      acc_q = acc_q + 48'(dl_n[j].q) * 48'(SRRC_TAPS[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NTAPS; j++) dl[j] <= '0;
      cnt       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        dl  <= dl_n;
        cnt <= (int'(cnt) == L - 1) ? '0 : cnt + 1'b1;
        if (cnt == phase) begin
          out.i     <= sat16((acc_i + 48'sd16384) >>> 15);
          out.q     <= sat16((acc_q + 48'sd16384) >>> 15);
          out_valid <= 1'b1;
        end
      end
    end
  end

endmodule
