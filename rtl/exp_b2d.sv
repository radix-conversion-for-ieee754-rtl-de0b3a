// exp_b2d: decimal exponent of a binary number, without a logarithm.
//
// For x = 2^E * m, m a normalised P2-bit integer, it returns
//     F = floor(log10(x)) - P10 + 1,
// the exponent that puts the decimal significand x / 10^F into the decade
// [10^(P10-1), 10^P10). The paper's loop-less scheme is followed:
//   * the lowest exponent bit is folded into the significand,
//     E' = E - (E mod 2), m' = m * 2^(E mod 2), so m' / 2^(P2-1) lies in
//     [1, 4) and floor(log10) of it is 0; this halves the table;
//   * floor(G' * log10 2), G' = E' + P2 - 1, is a multiplication by the
//     constant floor(log10(2) * 2^32) followed by an arithmetic right shift
//     by 32;
//   * the correction gamma in {0, 1} is m' >= m*(E'), read from a table of
//     one threshold per even exponent (1049 entries of 64 bits for binary64).
// The threshold table is computed at elaboration time (radix_pkg) from
// m*(E') = ceil(10^(k+1) * 2^-E'), k = floor(G' log10 2), with exact big-
// integer arithmetic; it is a ROM in hardware.
//
// Interface: in_valid/in_exp/in_mant are sampled on the rising clock edge;
// out_valid/out_f appear one cycle later (latency 1, one conversion per
// cycle). in_mant must have bit P2-1 set and in_exp must lie in
// [EMIN_B, EMAX_B]; the assertion below checks both. Registering the output
// and the reset of the valid bit are this design's choices.
module exp_b2d
  import radix_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [EW-1:0] in_exp,    // E
  input  logic [P2-1:0]        in_mant,   // m, normalised
  output logic                 out_valid,
  output logic signed [EW-1:0] out_f      // F
);

  localparam b2d_tab_t TAB = gen_b2d_table();

  logic                 odd;
  logic signed [EW-1:0] e_even, g_even;
  logic [P2:0]          m_sh;
  logic [$clog2(NB2D)-1:0] idx;
  logic signed [EW+33:0] prod;
  logic signed [EW-1:0] k;
  logic                 gamma;
  logic signed [EW-1:0] f_next;

  always_comb begin
    odd    = in_exp[0];                        // E mod 2 (two's complement)
    e_even = in_exp - EW'(odd);
    m_sh   = odd ? {in_mant, 1'b0} : {1'b0, in_mant};
    g_even = e_even + EW'(P2 - 1);
    // floor(G' log10 2): multiply by the constant, shift right by LAMBDA_E
    prod   = (EW+34)'(g_even) * $signed({2'b00, LOG10_2_FX});
    k      = EW'(prod >>> LAMBDA_E);
    idx    = $bits(idx)'((e_even - EW'(EMIN_B)) >>> 1);
    gamma  = (TW'(m_sh) >= TAB[idx]);
    // F = floor(G' log10 2) + floor(log10 m'') + 1 - P10 + gamma, log10 m'' < 1
    f_next = k + EW'(1 - P10) + EW'(gamma);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_f     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_f <= f_next;
    end
  end

  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (in_mant[P2-1] && in_exp >= EW'(EMIN_B) && in_exp <= EW'(EMAX_B)))
    else $error("exp_b2d: input out of range");

endmodule
