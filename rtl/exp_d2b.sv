// exp_d2b: binary exponent of a decimal number, without a logarithm.
//
// For x = 10^F * n, n a non-zero integer below 10^P10, it returns
//     E = floor(log2(x)) - P2 + 1,
// the exponent that puts the binary significand x / 2^E into the binade
// [2^(P2-1), 2^P2). The scheme mirrors exp_b2d with the bases exchanged and
// with the extra step the decimal direction needs: the decimal significand
// is first written as a binary floating-point number of KAPPA bits,
// n = 2^-s * n', by a left shift s that sets bit KAPPA-1 of n'. Then
// floor(log2 n') = KAPPA-1 for every input, so a single table suffices:
//     floor(log2 x) = floor(F log2 10) + KAPPA - 1 - s + gamma,
// with floor(F log2 10) a multiplication by floor(log2(10) * 2^32) and an
// arithmetic shift by 32, and gamma = (n' >= m*(F)), one threshold per
// decimal exponent (768 entries of 64 bits for decimal64), computed at
// elaboration time as m*(F) = ceil(2^(KAPPA + floor(F log2 10)) / 10^F).
//
// Interface: in_valid/in_f/in_mant are sampled on the rising clock edge;
// out_valid/out_e appear one cycle later (latency 1, one per cycle). in_mant
// must be non-zero and below 10^P10, in_f within [FMIN_D, FMAX_D]. The
// registered output, the reset and the leading-zero counter are this
// design's choices.
module exp_d2b
  import radix_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [EW-1:0] in_f,      // F
  input  logic [KAPPA-1:0]     in_mant,   // n
  output logic                 out_valid,
  output logic signed [EW-1:0] out_e      // E
);

  localparam d2b_tab_t TAB = gen_d2b_table();

  logic [$clog2(KAPPA)-1:0] lz;
  logic [KAPPA-1:0]         n_norm;
  logic signed [EW+36:0]    prod;
  logic signed [EW-1:0]     j;
  logic [$clog2(ND2B)-1:0]  idx;
  logic                     gamma;
  logic signed [EW-1:0]     e_next;

  always_comb begin
    // leading-zero count: the shift that normalises n to KAPPA bits
    lz = '0;
    for (int i = 0; i < KAPPA; i++)
      if (in_mant[i]) lz = $bits(lz)'(KAPPA - 1 - i);
    n_norm = in_mant << lz;
    prod   = (EW+37)'(in_f) * $signed({1'b0, LOG2_10_FX});
    j      = EW'(prod >>> LAMBDA_E);
    idx    = $bits(idx)'(in_f - EW'(FMIN_D));
    gamma  = (TW'(n_norm) >= TAB[idx]);
    e_next = j + EW'(KAPPA - P2) - EW'(lz) + EW'(gamma);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_e     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_e <= e_next;
    end
  end

  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (in_mant != '0 && in_f >= EW'(FMIN_D) && in_f <= EW'(FMAX_D)))
    else $error("exp_d2b: input out of range");

endmodule
