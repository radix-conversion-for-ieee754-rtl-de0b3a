// radix_converter: pipelined binary64 <-> decimal64 radix conversion with
// integer arithmetic only.
//
// A conversion in either direction is done in two steps: first the exponent
// of the result, exactly, from a multiplication by a constant, a shift and a
// table lookup; then the significand of the result, as the input significand
// times a power of five times a power of two, rounded:
//     binary to decimal (in_dir = DIR_B2D): x = 2^E * m  ->  10^F * n,
//         F by exp_b2d,   n = round(m * 5^-F * 2^(E-F))
//     decimal to binary (in_dir = DIR_D2B): x = 10^F * n ->  2^E * m,
//         E by exp_d2b,   m = round(n * 5^F * 2^(F-E))
// Both directions share one power-of-five unit. Its exponent must be
// natural, so it computes 5^B with B = -F + BIAS5 or F + BIAS5 (BIAS5 = 398)
// and the result is multiplied by a stored constant 5^-BIAS5, as the paper
// suggests for exponent ranges that include negative values.
//
// Pipeline (one conversion accepted every cycle, latency 14 cycles):
//   1     exponent units (exp_b2d, exp_d2b)
//   2-11  pow5_unit (table lookups, squarings, products), B computed at its
//         input
//   12    multiplication by the constant 5^-BIAS5 (norm_mul)
//   13-14 mant_scale_round (significand product, shift, rounding)
// The sign, direction, rounding direction, significand and exponents travel
// in a delay line next to the power-of-five unit.
//
// Interface: binary inputs give in_exp = E in [-1126, 971] and in_mant = m
// with bit 52 set (subnormals are normalised by the caller); decimal inputs
// give in_exp = F in [-398, 369] and 0 < in_mant < 10^16. Outputs are in the
// same form for the other radix: out_mant is normalised (decimal: 16 digits;
// binary: bit 52 set) and out_exp is not clamped to the target format's
// range; overflow, underflow, zeros, infinities, NaNs and the packing into
// interchange encodings are left to surrounding logic. The paper describes
// the conversion of (exponent, significand) pairs and none of these; the
// pipeline, the interface and the shared unit are this design's choices.
module radix_converter
  import radix_pkg::*;
#(
  parameter int P     = 128,   // working precision of the power of five
  parameter int QBITS = 4,     // table index size of pow5_lut
  parameter int K     = 2,     // B = 2^(K*QBITS) q_K + ... + q_0
  localparam int XW   = 32,
  localparam int BW   = QBITS * (K + 1),
  localparam int LAT  = 1 + (K * QBITS + K) + 1 + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  dir_e                 in_dir,
  input  logic                 in_sign,
  input  rm_e                  in_rm,
  input  logic signed [EW-1:0] in_exp,
  input  logic [MW-1:0]        in_mant,
  output logic                 out_valid,
  output dir_e                 out_dir,
  output logic                 out_sign,
  output logic signed [EW-1:0] out_exp,
  output logic [MW-1:0]        out_mant
);

  localparam int PLAT = K * QBITS + K;   // pow5_unit latency

  // ------------------------------------------------- stage 1: the exponent
  logic                 b2d_valid, d2b_valid;
  logic signed [EW-1:0] f_out, e_out;

  exp_b2d u_exp_b2d (
    .clk, .rst_n,
    .in_valid (in_valid && in_dir == DIR_B2D),
    .in_exp   (in_exp),
    .in_mant  (in_mant[P2-1:0]),
    .out_valid(b2d_valid),
    .out_f    (f_out));

  exp_d2b u_exp_d2b (
    .clk, .rst_n,
    .in_valid (in_valid && in_dir == DIR_D2B),
    .in_f     (in_exp),
    .in_mant  (in_mant[KAPPA-1:0]),
    .out_valid(d2b_valid),
    .out_e    (e_out));

  logic                 s1_valid;
  dir_e                 s1_dir;
  logic                 s1_sign;
  rm_e                  s1_rm;
  logic signed [EW-1:0] s1_exp;
  logic [MW-1:0]        s1_mant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_dir   <= DIR_B2D;
      s1_sign  <= 1'b0;
      s1_rm    <= RM_NEAREST_EVEN;
      s1_exp   <= '0;
      s1_mant  <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_dir   <= in_dir;
      s1_sign  <= in_sign;
      s1_rm    <= in_rm;
      s1_exp   <= in_exp;
      s1_mant  <= in_mant;
    end
  end

  // ------------------------- power-of-five exponent and the side information
  logic signed [EW-1:0] b_signed;
  logic [BW-1:0]        b_nat;
  conv_side_t           side1;

  always_comb begin
    side1.dir  = s1_dir;
    side1.sign = s1_sign;
    side1.rm   = s1_rm;
    side1.mant = s1_mant;
    if (s1_dir == DIR_B2D) begin
      b_signed   = -f_out + EW'(BIAS5);          // 5^-F
      side1.extra = s1_exp - f_out;               // 2^(E-F)
      side1.oexp  = f_out;
    end else begin
      b_signed   = s1_exp + EW'(BIAS5);          // 5^F
      side1.extra = s1_exp - e_out;               // 2^(F-E)
      side1.oexp  = e_out;
    end
    b_nat = BW'(b_signed);
  end

  // ------------------------------------------------ stages 2-11: 5^B
  logic                 p5_valid;
  logic [P-1:0]         p5_mant;
  logic signed [XW-1:0] p5_exp;

  pow5_unit #(.P(P), .QBITS(QBITS), .K(K), .XW(XW)) u_pow5 (
    .clk, .rst_n,
    .in_valid (s1_valid),
    .in_b     (b_nat),
    .out_valid(p5_valid),
    .out_mant (p5_mant),
    .out_exp  (p5_exp));

  conv_side_t side_pipe [PLAT+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= PLAT; i++) side_pipe[i] <= '0;
    end else begin
      side_pipe[0] <= side1;
      for (int i = 1; i <= PLAT; i++) side_pipe[i] <= side_pipe[i-1];
    end
  end

  // ------------------------------ stage 12: times the constant 5^-BIAS5
  localparam logic [P-1:0] C_MANT = P'(bias5_mant(P));
  localparam int           C_EXP  = bias5_exp(P);

  logic [P-1:0]         sc_m;
  logic signed [XW-1:0] sc_x;
  logic                 s12_valid;
  logic [P-1:0]         s12_m;
  logic signed [XW-1:0] s12_x;

  norm_mul #(.P(P), .XW(XW)) u_bias (
    .a(p5_mant), .ax(p5_exp), .b(C_MANT), .bx(XW'(C_EXP)), .y(sc_m), .yx(sc_x));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s12_valid <= 1'b0;
      s12_m     <= '0;
      s12_x     <= '0;
    end else begin
      s12_valid <= p5_valid;
      s12_m     <= sc_m;
      s12_x     <= sc_x;
    end
  end

  // ---------------------------------- stages 13-14: significand, rounding
  mant_scale_round #(.P(P), .XW(XW)) u_round (
    .clk, .rst_n,
    .in_valid (s12_valid),
    .in_side  (side_pipe[PLAT]),
    .in_pm    (s12_m),
    .in_px    (s12_x),
    .out_valid,
    .out_sign,
    .out_dir,
    .out_exp,
    .out_mant);

  a_b_natural: assert property (@(posedge clk) disable iff (!rst_n)
      s1_valid |-> (b_signed >= 0 && b_signed < (1 << BW)))
    else $error("radix_converter: power-of-five exponent out of range");

endmodule
