// ga_pkg - types, widths and table generators shared by the parallel genetic
// algorithm (GA).
//
// The fitness of a chromosome x = px || qx (two m/2-bit variables, px in the
// upper half) is y = gamma(alpha(px) + beta(qx)), where alpha, beta and gamma
// are look-up tables. This package holds the three benchmark functions as table
// generators, so that the ROM contents are computed at elaboration time/start of
// simulation instead of being read from files:
//   F1: f(x)   = x^3 - 15x^2 + 50  (alpha = 0, beta = f(qx), gamma = identity;
//                qx is a signed two's complement number)
//   F2: f(x,y) = 8x - 4y + 1020    (alpha = 8px, beta = -4qx + 1020,
//                gamma = identity; px, qx unsigned)
//   F3: f(x,y) = sqrt(x^2 + y^2)   (alpha = px^2, beta = qx^2, gamma = floor
//                sqrt; px, qx signed)
// The word widths c (alpha/beta outputs), d (sum) and a (fitness) are not given
// numerically in the source description; they are chosen here per function so
// that no value overflows: see c_width(). All three are signed.
//
// The gamma ROM is addressed by the GW most significant bits of delta, where
// GW = min(d, GAMMA_AW_MAX): its resolution is a table parameter, like the
// range and precision of the other tables. Each entry holds gamma evaluated at
// the lower edge of its bucket. For F2 at m = 20 the table is exact.
//
// Seeds: every LFSR needs its own non-zero 32-bit start value; lfsr_seed()
// derives one from a (kind, index, sub-index) label by an integer hash.
package ga_pkg;

  typedef enum logic [1:0] {FIT_F1 = 2'd0, FIT_F2 = 2'd1, FIT_F3 = 2'd2} fitness_e;

  // Which of the three tables of the fitness function module.
  typedef enum logic [1:0] {ROM_ALPHA = 2'd0, ROM_BETA = 2'd1, ROM_GAMMA = 2'd2} rom_e;

  // Selection goal, SMMAXMIN: 0 keeps the fitter-by-maximum, 1 by minimum.
  typedef enum logic {SEL_MAX = 1'b0, SEL_MIN = 1'b1} maxmin_e;

  // LFSR labels used to derive distinct seeds.
  typedef enum int {
    SEED_SM1 = 1, SEED_SM2 = 2, SEED_CMPQ1 = 3, SEED_CMPQ2 = 4, SEED_MM = 5, SEED_RX = 6
  } seed_kind_e;

  localparam int LFSR_W       = 32;
  localparam int GAMMA_AW_MAX = 16;  // largest gamma ROM address width
  localparam int SYNC_W       = 2;   // SyncM counter and constant width
  localparam logic [SYNC_W-1:0] SYNC_VAL = 2'd2;  // two ROM delays -> period 3

  // Width c of alpha(px) and beta(qx) for half-chromosome width h.
  function automatic int c_width(fitness_e f, int h);
    case (f)
      FIT_F1:  return 3 * h;      // |x^3 - 15x^2 + 50| < 2^(3h-2) for h >= 6
      FIT_F2:  return h + 5;      // 8px and 1020 - 4qx
      default: return 2 * h + 1;  // px^2 <= 2^(2h-2)
    endcase
  endfunction

  // Width d of delta = alpha + beta.
  function automatic int d_width(fitness_e f, int h);
    return c_width(f, h) + 1;
  endfunction

  // Width a of the fitness y: equal to d (gamma never widens).
  function automatic int a_width(fitness_e f, int h);
    return d_width(f, h);
  endfunction

  // Address width of the gamma table.
  function automatic int gamma_aw(fitness_e f, int h);
    return (d_width(f, h) < GAMMA_AW_MAX) ? d_width(f, h) : GAMMA_AW_MAX;
  endfunction

  // Sign-extend the low w bits of v.
  function automatic longint sext(longint v, int w);
    longint m;
    m = longint'(1) << (w - 1);
    v = v & ((longint'(1) << w) - 1);
    return (v ^ m) - m;
  endfunction

  // Floor of the square root of a non-negative value.
  function automatic longint isqrt(longint v);
    longint r;
    if (v <= 0) return 0;
    r = 0;
    for (int b = 31; b >= 0; b--) begin
      longint t;
      t = r | (longint'(1) << b);
      if (t * t <= v) r = t;
    end
    return r;
  endfunction

  // The variable held in the h-bit field 'addr': signed for F1 and F3,
  // unsigned for F2.
  function automatic longint var_value(fitness_e f, longint addr, int h);
    return (f == FIT_F2) ? addr : sext(addr, h);
  endfunction

  function automatic longint alpha_fn(fitness_e f, longint p);
    case (f)
      FIT_F1:  return 0;
      FIT_F2:  return 8 * p;
      default: return p * p;
    endcase
  endfunction

  function automatic longint beta_fn(fitness_e f, longint q);
    case (f)
      FIT_F1:  return q * q * q - 15 * q * q + 50;
      FIT_F2:  return 1020 - 4 * q;
      default: return q * q;
    endcase
  endfunction

  function automatic longint gamma_fn(fitness_e f, longint dl);
    case (f)
      FIT_F3:  return isqrt(dl);
      default: return dl;
    endcase
  endfunction

  // Content of entry 'addr' of table 'which' for function f, half width h.
  function automatic longint rom_entry(fitness_e f, rom_e which, longint addr, int h);
    int sh;
    case (which)
      ROM_ALPHA: return alpha_fn(f, var_value(f, addr, h));
      ROM_BETA:  return beta_fn(f, var_value(f, addr, h));
      default: begin
        sh = d_width(f, h) - gamma_aw(f, h);
        return gamma_fn(f, sext(addr, gamma_aw(f, h)) << sh);
      end
    endcase
  endfunction

  // Reference fitness of a whole chromosome, as the hardware computes it.
  function automatic longint fitness_ref(fitness_e f, longint x, int h);
    longint p, q, dl;
    int sh;
    p  = (x >> h) & ((longint'(1) << h) - 1);
    q  = x & ((longint'(1) << h) - 1);
    dl = rom_entry(f, ROM_ALPHA, p, h) + rom_entry(f, ROM_BETA, q, h);
    sh = d_width(f, h) - gamma_aw(f, h);
    return gamma_fn(f, (dl >>> sh) << sh);
  endfunction

  // Distinct non-zero seed for LFSR (kind, j, l).
  function automatic logic [LFSR_W-1:0] lfsr_seed(int kind, int j, int l);
    logic [31:0] s;
    s = 32'h9E37_79B9 * (kind * 4099 + j * 131 + l * 7 + 1);
    s = s ^ (s >> 16);
    s = s * 32'h85EB_CA6B;
    s = s ^ (s >> 13);
    if (s == '0) s = 32'h1;
    return s;
  endfunction

  // One step of the 32-bit Fibonacci LFSR, taps from r^32 + r^22 + r^2 + 1.
  function automatic logic [LFSR_W-1:0] lfsr_next(logic [LFSR_W-1:0] s);
    return {s[LFSR_W-2:0], s[31] ^ s[21] ^ s[1]};
  endfunction

endpackage
