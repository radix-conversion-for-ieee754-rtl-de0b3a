// ref_pkg: exact big-integer reference arithmetic for the testbenches.
//
// Everything here is computed from the definitions (powers of two, five and
// ten as wide integers, exact comparisons and exact rational rounding),
// never from the tables or the fixed-point constants of the design.
package ref_pkg;

  localparam int RW = 2600;
  typedef logic [RW-1:0] rbig_t;

  // powers of five up to 5^P5MAX, filled on first use
  localparam int P5MAX = 900;
  rbig_t p5_cache[P5MAX+1];
  bit    p5_ready = 1'b0;

  function automatic rbig_t r_pow5(input int e);
    if (!p5_ready) begin
      p5_cache[0] = rbig_t'(1);
      for (int i = 1; i <= P5MAX; i++) p5_cache[i] = p5_cache[i-1] * rbig_t'(5);
      p5_ready = 1'b1;
    end
    return p5_cache[e];
  endfunction

  function automatic rbig_t r_pow10(input int e);
    return r_pow5(e) << e;
  endfunction

  // true when 2^e * m >= 10^j (m > 0)
  function automatic bit ge_b_pow10(input int e, input longint unsigned m, input int j);
    rbig_t l, r;
    l = rbig_t'(m);
    r = rbig_t'(1);
    if (e >= 0) l = l << e; else r = r << (-e);
    if (j >= 0) r = r * r_pow10(j); else l = l * r_pow10(-j);
    return l >= r;
  endfunction

  // true when 10^f * n >= 2^j (n > 0)
  function automatic bit ge_d_pow2(input int f, input longint unsigned n, input int j);
    rbig_t l, r;
    l = rbig_t'(n);
    r = rbig_t'(1);
    if (f >= 0) l = l * r_pow10(f); else r = r * r_pow10(-f);
    if (j >= 0) r = r << j; else l = l << (-j);
    return l >= r;
  endfunction

  // floor(log10(2^e * m)), exact
  function automatic int flog10_b(input int e, input longint unsigned m);
    int j;
    j = int'($floor((real'(e) + $ln(real'(m)) / $ln(2.0)) * ($ln(2.0) / $ln(10.0))));
    while (!ge_b_pow10(e, m, j)) j--;
    while (ge_b_pow10(e, m, j + 1)) j++;
    return j;
  endfunction

  // floor(log2(10^f * n)), exact
  function automatic int flog2_d(input int f, input longint unsigned n);
    int j;
    j = int'($floor(real'(f) * $ln(10.0) / $ln(2.0) + $ln(real'(n)) / $ln(2.0)));
    while (!ge_d_pow2(f, n, j)) j--;
    while (ge_d_pow2(f, n, j + 1)) j++;
    return j;
  endfunction

  // Round num/den to an integer: rm 0 nearest-even, 1 toward -inf, 2 toward
  // +inf, for a number of sign neg.
  function automatic longint unsigned round_q(input rbig_t num, input rbig_t den,
                                              input bit neg, input int rm);
    rbig_t q, r;
    bit up;
    q = num / den;
    r = num % den;
    case (rm)
      0:       up = (r << 1) > den || ((r << 1) == den && q[0]);
      1:       up = neg && r != '0;
      default: up = !neg && r != '0;
    endcase
    return longint'(q[63:0]) + longint'(up);
  endfunction

  // binary 2^e*m (m normalised, p2 = 53) to decimal 10^f*n with 16 digits
  function automatic void ref_b2d(input int e, input longint unsigned m, input bit neg,
                                  input int rm, output int f, output longint unsigned n);
    rbig_t num, den;
    f = flog10_b(e, m) - 15;
    num = rbig_t'(m);
    den = rbig_t'(1);
    if (e >= 0) num = num << e; else den = den << (-e);
    if (f >= 0) den = den * r_pow10(f); else num = num * r_pow10(-f);
    n = round_q(num, den, neg, rm);
    if (n == 64'd10_000_000_000_000_000) begin
      n = 64'd1_000_000_000_000_000;
      f = f + 1;
    end
  endfunction

  // decimal 10^f*n (n > 0) to binary 2^e*m with 53 bits
  function automatic void ref_d2b(input int f, input longint unsigned n, input bit neg,
                                  input int rm, output int e, output longint unsigned m);
    rbig_t num, den;
    e = flog2_d(f, n) - 52;
    num = rbig_t'(n);
    den = rbig_t'(1);
    if (f >= 0) num = num * r_pow10(f); else den = den * r_pow10(-f);
    if (e >= 0) den = den << e; else num = num << (-e);
    m = round_q(num, den, neg, rm);
    if (m == (64'd1 << 53)) begin
      m = 64'd1 << 52;
      e = e + 1;
    end
  endfunction

endpackage
