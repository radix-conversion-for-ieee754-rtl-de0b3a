// pow5_lut: the small exact table of powers of five, 5^q for 0 <= q < 2^QBITS.
//
// This is the "get 5^q" box of the power-of-five scheme: B is cut into
// QBITS-bit digits q_i and each digit selects one entry. Every entry is a
// floating-point number with a P-bit significand normalised to
// [2^(P-1), 2^P) and a binary exponent:
//     5^q = out_mant * 2^out_exp.
// With the default P = 128 and QBITS = 4 every entry is exact (5^15 has 35
// bits); only when 5^q is wider than P bits is it truncated. The entries are
// computed at elaboration time from their definition; in hardware the block
// is a 2^QBITS-word ROM. It is combinational.
module pow5_lut
  import radix_pkg::*;
#(
  parameter int P     = 128,   // working precision p
  parameter int QBITS = 4,     // table index size
  parameter int XW    = 32     // exponent width
) (
  input  logic [QBITS-1:0]     q,
  output logic [P-1:0]         out_mant,
  output logic signed [XW-1:0] out_exp
);

  localparam int N = 1 << QBITS;
  typedef logic [N-1:0][P-1:0]  mant_tab_t;
  typedef logic [N-1:0][XW-1:0] exp_tab_t;

  function automatic mant_tab_t gen_mant();
    mant_tab_t t;
    big_t      v;
    int        l;
    for (int i = 0; i < N; i++) begin
      v = big_pow5(i);
      l = big_bitlen(v);
      t[i] = (l <= P) ? P'(v << (P - l)) : P'(v >> (l - P));
    end
    return t;
  endfunction

  function automatic exp_tab_t gen_exp();
    exp_tab_t t;
    for (int i = 0; i < N; i++) t[i] = XW'(big_bitlen(big_pow5(i)) - P);
    return t;
  endfunction

  localparam mant_tab_t MANT = gen_mant();
  localparam exp_tab_t  EXPS = gen_exp();

  assign out_mant = MANT[q];
  assign out_exp  = EXPS[q];

endmodule
