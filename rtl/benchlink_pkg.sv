// benchlink_pkg - types, frame constants and shared arithmetic of the BenchLink PHY.
//
// Frame layout (from the frame-structure figure and the pilot table): a 128-symbol preamble,
// a 128-symbol training sequence and a 2048-symbol data frame made of eight 256-symbol
// subframes. Each subframe carries lambda_p repetitions of a 16-symbol pilot sequence, so it
// holds 16*lambda_p pilot symbols and 256-16*lambda_p data symbols. Each repetition is a
// pilot followed by its share of the data symbols; when the data symbols do not divide evenly
// by lambda_p (lambda_p = 6) the first (D mod lambda_p) segments carry one extra symbol.
// That split, the sequences themselves and all fixed-point formats are this design's choice.
//
// Number formats: complex samples and symbols are 16-bit signed I/Q with 14 fraction bits
// (1.0 = 16384). Phases are binary angles: a full turn is 2^16 (16-bit) or 2^20 (CORDIC
// internal).
// Following the paper: the 128/128/2048-symbol frame, 256-symbol subframes, 16-symbol pilot
// repetitions and Golay sequences. This design's own: Q1.14, the sequences, SRRC taps, CORDIC.
package benchlink_pkg;

  localparam int IQ_W          = 16;
  localparam int FRAC          = 14;
  localparam int ONE           = 1 << FRAC;

  localparam int PREAMBLE_LEN  = 128;   // Fig. 2
  localparam int TRAINING_LEN  = 128;   // Fig. 2
  localparam int SUBFRAME_LEN  = 256;   // Fig. 2, Table I
  localparam int SUBFRAMES     = 8;     // 2048 / 256, Fig. 2
  localparam int PILOT_LEN     = 16;    // Table I: 16 pilot symbols per repetition
  localparam int MAX_LAMBDA    = 8;     // largest lambda_p evaluated (Sec. V)
  localparam int WORD_W        = 64;    // Uint64 AXI4-Stream words (Fig. 1)

  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  typedef enum logic [1:0] {
    MOD_4QAM  = 2'd0,
    MOD_8QAM  = 2'd1,
    MOD_16QAM = 2'd2,
    MOD_64QAM = 2'd3
  } mod_t;

  // Control registers written over AXI-Lite.
  typedef struct packed {
    logic [3:0]  lambda_p;     // pilot repetitions per subframe (1..8)
    mod_t        modulation;
    logic [15:0] tx_thresh;    // FIFO words that start a frame; 0 = one frame of payload
    logic [7:0]  det_thresh;   // frame detector threshold on |MF|/sum|x|, 1/256 units
    logic [7:0]  cfo_thresh;   // coarse CFO threshold on rho[n], 1/256 units
    logic [15:0] agc_ref;      // AGC target power, 2^-14 units of full scale
    logic [3:0]  agc_mu;       // AGC loop step = 2^-agc_mu
    logic [1:0]  rx_phase;     // RX decimation phase (which of the l samples is the symbol)
  } cfg_t;

  // Status registers read over AXI-Lite.
  typedef struct packed {
    logic [15:0] cfo_angle;    // angle of C_peak (full turn = 2^16)
    logic [15:0] resid_phase;  // last residual phase offset delta-phi
    logic [15:0] frames_tx;
    logic [15:0] frames_rx;
    logic [15:0] rx_overflow;
    logic [15:0] agc_gain;
  } stat_t;

  // Symbol amplitudes for unit average power, Q1.14.
  localparam int AMP_PILOT = 11585;  // 1/sqrt(2), QPSK pilot
  localparam int AMP_PRE   = 16384;  // BPSK preamble/training
  localparam int UNIT_4    = 11585;  // 1/sqrt(2)
  localparam int UNIT_8    = 6689;   // 1/sqrt(6), 4x2 rectangular 8QAM
  localparam int UNIT_16   = 5181;   // 1/sqrt(10)
  localparam int UNIT_64   = 2528;   // 1/sqrt(42)

  function automatic int unsigned bits_per_sym(mod_t m);
    case (m)
      MOD_4QAM:  return 2;
      MOD_8QAM:  return 3;
      MOD_16QAM: return 4;
      default:   return 6;
    endcase
  endfunction

  function automatic logic [3:0] clamp_lambda(logic [3:0] l);
    if (l == 4'd0)              return 4'd1;
    else if (l > 4'(MAX_LAMBDA)) return 4'(MAX_LAMBDA);
    else                        return l;
  endfunction

  // Data symbols in one subframe: 256 - 16*lambda_p (Table I).
  function automatic logic [8:0] data_per_subframe(logic [3:0] lam);
    return 9'(SUBFRAME_LEN - PILOT_LEN * int'(lam));
  endfunction

  // Data symbols in segment seg (0..lambda_p-1) of a subframe.
  function automatic logic [8:0] seg_data_len(logic [3:0] lam, logic [3:0] seg);
    logic [8:0] d, base, rem;
    d    = data_per_subframe(lam);
    base = d / 9'(lam);
    rem  = d % 9'(lam);
    return base + ((9'(seg) < rem) ? 9'd1 : 9'd0);
  endfunction

  // 64-bit payload words carried by one frame: 8*(256-16*lambda_p)*bits/64.
  function automatic logic [15:0] frame_words(logic [3:0] lam, mod_t m);
    return 16'((SUBFRAMES * int'(data_per_subframe(lam)) * int'(bits_per_sym(m))) / WORD_W);
  endfunction

  // Golay complementary pair by the doubling rule a' = [a b], b' = [a -b], starting from
  // a = b = [+1]. Bit k is element k, 1 = +1 and 0 = -1. n must be a power of two <= 128.
  function automatic logic [127:0] golay_a(int n);
    logic [127:0] a, b, an, bn;
    a = 128'd1; b = 128'd1;
    for (int len = 1; len < n; len = len * 2) begin
      an = a; bn = a;
      for (int k = 0; k < len; k++) begin
        an[len + k] = b[k];
        bn[len + k] = ~b[k];
      end
      a = an; b = bn;
    end
    return a;
  endfunction

  function automatic logic [127:0] golay_b(int n);
    logic [127:0] a, b, an, bn;
    a = 128'd1; b = 128'd1;
    for (int len = 1; len < n; len = len * 2) begin
      an = a; bn = a;
      for (int k = 0; k < len; k++) begin
        an[len + k] = b[k];
        bn[len + k] = ~b[k];
      end
      a = an; b = bn;
    end
    return b;
  endfunction

  localparam logic [127:0] PREAMBLE_BITS = golay_a(PREAMBLE_LEN);
  localparam logic [15:0]  PILOT_I_BITS  = 16'(golay_a(PILOT_LEN));
  localparam logic [15:0]  PILOT_Q_BITS  = 16'(golay_b(PILOT_LEN));

  // Pilot symbol k: (a16[k] + j b16[k]) / sqrt(2).
  function automatic iq_t pilot_sym(logic [3:0] k);
    iq_t s;
    s.i = PILOT_I_BITS[k] ? 16'(AMP_PILOT) : -16'(AMP_PILOT);
    s.q = PILOT_Q_BITS[k] ? 16'(AMP_PILOT) : -16'(AMP_PILOT);
    return s;
  endfunction

  // Preamble (and training) symbol k: BPSK a128[k].
  function automatic iq_t preamble_sym(logic [6:0] k);
    iq_t s;
    s.i = PREAMBLE_BITS[k] ? 16'(AMP_PRE) : -16'(AMP_PRE);
    s.q = '0;
    return s;
  endfunction

  // Square-root raised-cosine taps, l = 4 samples per symbol, roll-off 0.5, span 6 symbols:
  // h[n] = srrc((n-12)/4) scaled to unit energy and rounded to Q1.15. TX and RX filters
  // together give a raised-cosine response of gain 1.0 at the symbol instants.
  localparam int SRRC_L     = 4;
  localparam int SRRC_NTAPS = 25;
  localparam int SRRC_TAPS [SRRC_NTAPS] = '{
      50,  -270,  -246,   253,   695,   253, -1229, -2570, -1739,  2570,  9482, 15969, 18626,
   15969,  9482,  2570, -1739, -2570, -1229,   253,   695,   253,  -246,  -270,    50};

  function automatic logic signed [15:0] sat16(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sd32767;
    else if (v < -48'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  // CORDIC arctangent table, atan(2^-i) with a full turn = 2^20.
  localparam int CORDIC_N = 16;
  localparam int ATAN_TAB [CORDIC_N] = '{131072, 77376, 40884, 20753, 10417, 5213, 2607, 1304,
                                         652, 326, 163, 81, 41, 20, 10, 5};

  // Angle of x + jy in a full turn of 2^16 (vectoring CORDIC).
  function automatic logic signed [15:0] cordic_angle(logic signed [31:0] x_in,
                                                      logic signed [31:0] y_in);
    logic signed [33:0] x, y, xn;
    logic signed [20:0] z;
    x = 34'(x_in); y = 34'(y_in); z = '0;
    if (x < 0) begin           // rotate by pi into the right half plane
      x = -x; y = -y; z = 21'sd524288;
    end
    for (int k = 0; k < CORDIC_N; k++) begin
      if (y > 0) begin
        xn = x + (y >>> k); y = y - (x >>> k); z = z + 21'(ATAN_TAB[k]);
      end else begin
        xn = x - (y >>> k); y = y + (x >>> k); z = z - 21'(ATAN_TAB[k]);
      end
      x = xn;
    end
    return z[19:4] + 16'(z[3]);
  endfunction

  // Rotate a sample by angle ph (full turn = 2^16), gain-corrected (rotation CORDIC).
  function automatic iq_t cordic_rotate(iq_t s, logic signed [15:0] ph);
    logic signed [23:0] x, y, xn;
    logic signed [20:0] z;
    logic signed [47:0] px, py;
    iq_t r;
    x = 24'(s.i) <<< 4; y = 24'(s.q) <<< 4; z = 21'(ph) <<< 4;
    if (z > 21'sd262144 || z < -21'sd262144) begin   // |angle| > pi/2: pre-rotate by pi
      x = -x; y = -y; z = z + 21'sd524288;            // wraps modulo a full turn
      z = 21'(z[19:0]) - ((z[19]) ? 21'sd1048576 : 21'sd0);
    end
    for (int k = 0; k < CORDIC_N; k++) begin
      if (z >= 0) begin
        xn = x - (y >>> k); y = y + (x >>> k); z = z - 21'(ATAN_TAB[k]);
      end else begin
        xn = x + (y >>> k); y = y - (x >>> k); z = z + 21'(ATAN_TAB[k]);
      end
      x = xn;
    end
    px = 48'(x) * 48'sd19898;   // 1/K = 0.60725 in Q15
    py = 48'(y) * 48'sd19898;
    r.i = sat16((px + 48'sd262144) >>> 19);
    r.q = sat16((py + 48'sd262144) >>> 19);
    return r;
  endfunction

  // Complex multiply a * conj(b), full precision.
  function automatic logic signed [32:0] cmul_conj_re(iq_t a, iq_t b);
    return 33'(a.i * b.i) + 33'(a.q * b.q);
  endfunction
  function automatic logic signed [32:0] cmul_conj_im(iq_t a, iq_t b);
    return 33'(a.q * b.i) - 33'(a.i * b.q);
  endfunction

  // |z| approximated as max(|re|,|im|) + min(|re|,|im|)/2.
  function automatic logic [16:0] mag_approx(iq_t s);
    logic [16:0] a, b;
    a = s.i[15] ? 17'(-s.i) : 17'(s.i);
    b = s.q[15] ? 17'(-s.q) : 17'(s.q);
    return (a > b) ? a + (b >> 1) : b + (a >> 1);
  endfunction

endpackage
