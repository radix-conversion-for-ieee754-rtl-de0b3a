// radix_pkg: formats, constants, types and elaboration-time helpers shared by
// the binary64 <-> decimal64 radix conversion unit.
//
// A binary number is handled as 2^E * m with an integer significand m of P2
// bits; a decimal number as 10^F * n with an integer significand n of at most
// P10 digits, held in binary (the significand coding of the binary integer
// decimal encoding). The format sizes are those of binary64 and decimal64,
// the formats the conversion scheme is worked out for. The exponent ranges,
// the fixed-point log constants and the bias of the power-of-five exponent are
// choices of this design, derived from those formats (see each constant).
//
// The functions at the bottom run only at elaboration time: they compute the
// threshold tables of the two exponent units and the bias constant 5^-BIAS5
// with exact big-integer arithmetic, so no table is stored as data.
package radix_pkg;

  // ---------------------------------------------------------------- formats
  localparam int P2    = 53;   // binary64 precision
  localparam int P10   = 16;   // decimal64 precision (digits)
  // kappa = ceil(log2(10^P10 - 1)): width of a decimal significand written
  // as a normalised binary number (decimal-to-binary direction)
  localparam int KAPPA = 54;
  localparam int MW    = 54;   // width of every significand port

  // Binary exponent range of 2^E*m, subnormals normalised first:
  // E from -1074-52 to 1023-52. 2098 values; the table is halved to 1049
  // entries of 64 bits (8392 bytes).
  localparam int EMIN_B = -1126;
  localparam int EMAX_B = 971;
  // Decimal exponent range of 10^F*n for decimal64 (q from -398 to 369).
  localparam int FMIN_D = -398;
  localparam int FMAX_D = 369;

  localparam int EW = 16;      // signed width of every exponent port
  localparam int TW = 64;      // width of one threshold table entry

  // floor(log10(2) * 2^32) and floor(log2(10) * 2^32). With LAMBDA_E = 32 the
  // product-and-shift gives floor(x*log10 2) exactly for |x| <= 1200 and
  // floor(x*log2 10) exactly for |x| <= 500 (checked exhaustively).
  localparam int              LAMBDA_E = 32;
  localparam logic [31:0]     LOG10_2_FX = 32'h4D10_4D42;
  localparam logic [35:0]     LOG2_10_FX = 36'h3_5269_E12F;

  // Power-of-five exponents are made non-negative by adding BIAS5:
  // B = -F + BIAS5 (binary to decimal) or B = F + BIAS5 (decimal to binary).
  localparam int BIAS5 = -FMIN_D;

  // ------------------------------------------------------------------ types
  typedef enum logic {DIR_B2D = 1'b0, DIR_D2B = 1'b1} dir_e;
  // The three rounding directions named for the conversion.
  typedef enum logic [1:0] {
    RM_NEAREST_EVEN = 2'd0,   // to nearest, ties to even
    RM_DOWN         = 2'd1,   // toward minus infinity
    RM_UP           = 2'd2    // toward plus infinity
  } rm_e;

  // Everything a conversion carries alongside the power of five: the
  // direction, the sign and rounding direction, the input significand, the
  // power of two still to apply to significand * 5^(+-F), and the exponent of
  // the result.
  typedef struct packed {
    dir_e                 dir;
    logic                 sign;
    rm_e                  rm;
    logic [MW-1:0]        mant;
    logic signed [EW-1:0] extra;   // b2d: E - F, d2b: F - E
    logic signed [EW-1:0] oexp;    // b2d: F,     d2b: E
  } conv_side_t;

  // ----------------------------------------------- elaboration-time helpers
  localparam int BIGW = 2048;  // big-integer width for table generation
  typedef logic [BIGW-1:0] big_t;

  // Number of significant bits of a big integer (0 for 0).
  function automatic int big_bitlen(input big_t v);
    int n;
    n = 0;
    for (int i = 0; i < BIGW; i++) if (v[i]) n = i + 1;
    return n;
  endfunction

  // 5^e for e >= 0.
  function automatic big_t big_pow5(input int e);
    big_t r;
    r = big_t'(1);
    for (int i = 0; i < e; i++) r = r * big_t'(5);
    return r;
  endfunction

  // ceil(5^a * 2^t), given p5 = 5^|a|, for a value below 2^TW.
  function automatic logic [TW-1:0] ceil_pow5_pow2(input big_t p5, input bit a_neg,
                                                   input int t);
    big_t num, den, q, r;
    if (!a_neg) begin
      if (t >= 0) return TW'(p5 << t);
      den = big_t'(1) << (-t);
      q = p5 / den;
      r = p5 % den;
    end else begin
      num = big_t'(1) << t;   // t >= 0 for every table entry
      q = num / p5;
      r = num % p5;
    end
    return TW'(q) + TW'(r != '0);
  endfunction

  // Exact floor(x * log10 2) and floor(x * log2 10) as the hardware does it.
  function automatic int floor_x_log10_2(input int x);
    longint p;
    p = longint'(x) * longint'({1'b0, LOG10_2_FX});
    return int'(p >>> LAMBDA_E);
  endfunction

  function automatic int floor_x_log2_10(input int x);
    longint p;
    p = longint'(x) * longint'({1'b0, LOG2_10_FX});
    return int'(p >>> LAMBDA_E);
  endfunction

  // Binary-to-decimal thresholds, one per even exponent E' (halved table).
  // With m' = m * 2^(E mod 2) in [2^(P2-1), 2^(P2+1)) and G' = E' + P2 - 1,
  // floor(log10(2^E*m)) = floor(G' log10 2) + gamma, gamma = (m' >= T),
  // T = ceil(10^(k+1) * 2^(-E')), k = floor(G' log10 2).
  localparam int NB2D = (EMAX_B - EMIN_B) / 2 + 1;
  typedef logic [NB2D-1:0][TW-1:0] b2d_tab_t;

  function automatic b2d_tab_t gen_b2d_table();
    b2d_tab_t tab;
    big_t     p5;
    int       e_cur, e, ep;
    ep    = EMIN_B - (((EMIN_B % 2) + 2) % 2);
    e_cur = floor_x_log10_2(ep + P2 - 1) + 1;
    p5    = big_pow5(e_cur < 0 ? -e_cur : e_cur);
    for (int i = 0; i < NB2D; i++) begin
      ep = EMIN_B - (((EMIN_B % 2) + 2) % 2) + 2 * i;
      e  = floor_x_log10_2(ep + P2 - 1) + 1;
      while (e_cur < e) begin       // e only grows with i
        if (e_cur < 0) p5 = p5 / big_t'(5);
        else           p5 = p5 * big_t'(5);
        e_cur++;
      end
      // 10^e * 2^-E' = 5^e * 2^(e-E')
      tab[i] = ceil_pow5_pow2(p5, e < 0, e - ep);
    end
    return tab;
  endfunction

  // Decimal-to-binary thresholds, one per decimal exponent F. With n' the
  // significand shifted to KAPPA bits, floor(log2(10^F*n')) = j + KAPPA - 1
  // + gamma, gamma = (n' >= T), T = ceil(2^(KAPPA+j) / 10^F), j = floor(F log2 10).
  localparam int ND2B = FMAX_D - FMIN_D + 1;
  typedef logic [ND2B-1:0][TW-1:0] d2b_tab_t;

  function automatic d2b_tab_t gen_d2b_table();
    d2b_tab_t tab;
    big_t     p5;
    int       f, j;
    p5 = big_pow5(-FMIN_D);
    for (int i = 0; i < ND2B; i++) begin
      f = FMIN_D + i;
      j = floor_x_log2_10(f);
      // 2^(KAPPA+j) * 10^-F = 5^-F * 2^(KAPPA+j-F)
      tab[i] = ceil_pow5_pow2(p5, f > 0, KAPPA + j - f);
      if (f < 0) p5 = p5 / big_t'(5);
      else       p5 = p5 * big_t'(5);
    end
    return tab;
  endfunction

  // 5^-BIAS5 as a P-bit significand c in [2^(P-1), 2^P), rounded down, and
  // its exponent: 5^-BIAS5 ~ c * 2^bias5_exp(P).
  function automatic big_t bias5_mant(input int p);
    big_t d;
    int   l;
    d = big_pow5(BIAS5);
    l = big_bitlen(d);
    return (big_t'(1) << (p - 1 + l)) / d;
  endfunction

  function automatic int bias5_exp(input int p);
    return -(p - 1 + big_bitlen(big_pow5(BIAS5)));
  endfunction

endpackage
