// mant_scale_round: the output significand from the power of five, and its
// rounding.
//
// Once the output exponent is known, the output significand before rounding
// is
//     binary to decimal:  n* = m * 5^-F * 2^(E-F)
//     decimal to binary:  m* = n * 5^F  * 2^(F-E)
// The power of five arrives as a P-bit floating-point value pm * 2^px (a
// slight underestimate); this block multiplies the input significand by pm
// (stage 1, registered), applies the power of two 2^(px + extra) as a right
// shift that splits the product into an integer part and a fraction, and
// rounds the integer part in the requested direction (stage 2, registered).
// The paper states that the significand is rounded in the current rounding
// mode (to nearest, down or up); how is this design's own choice:
//   * nearest rounds ties to even, down and up are directed roundings that
//     take the sign into account;
//   * because the power of five is a slight underestimate, a result that is
//     exactly an integer (1.0 converted to decimal, for instance) or exactly
//     half-way between two integers arrives a tiny bit below that point.
//     The value is therefore raised by just under 2^-SNAP and the bits below
//     weight 2^-SNAP are ignored: every value within 2^-SNAP below an integer
//     or a half-way point is rounded as if it were exactly that point. With
//     P = 128 the accumulated error is below 2^-68 of a unit in the last
//     place and the window is 2^-62. A genuinely inexact value that close
//     to such a point would be rounded as if exact;
//   * when rounding carries out of the significand range (10^P10 for
//     decimal, 2^P2 for binary) the result becomes 10^(P10-1) or 2^(P2-1)
//     and the exponent is incremented.
// Latency 2 cycles, one result per cycle.
module mant_scale_round
  import radix_pkg::*;
#(
  parameter int P    = 128,
  parameter int XW   = 32,
  parameter int SNAP = 62    // P - 66: error margin of the fraction
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  conv_side_t           in_side,
  input  logic [P-1:0]         in_pm,   // 5^(+-F) ~ in_pm * 2^in_px
  input  logic signed [XW-1:0] in_px,
  output logic                 out_valid,
  output logic                 out_sign,
  output dir_e                 out_dir,
  output logic signed [EW-1:0] out_exp,
  output logic [MW-1:0]        out_mant
);

  localparam int PW  = MW + P;       // product width
  localparam int FRW = PW;           // fraction bits kept: the whole product
  localparam logic [MW:0] DEC_TOP = (MW+1)'(64'd10_000_000_000_000_000);
  localparam logic [MW:0] DEC_LOW = (MW+1)'(64'd1_000_000_000_000_000);
  localparam logic [MW:0] BIN_TOP = (MW+1)'(1) << P2;
  localparam logic [MW:0] BIN_LOW = (MW+1)'(1) << (P2 - 1);

  // ---------------------------------------------------------------- stage 1
  logic                 s1_valid;
  conv_side_t           s1_side;
  logic [PW-1:0]        s1_prod;
  logic signed [XW-1:0] s1_tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_side  <= '0;
      s1_prod  <= '0;
      s1_tx    <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_side  <= in_side;
      s1_prod  <= PW'(in_side.mant) * PW'(in_pm);
      s1_tx    <= in_px + XW'(in_side.extra);
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic [XW-1:0]       rs;
  logic [PW+FRW-1:0]   aligned;
  logic [MW+FRW:0]     fixed;
  logic [MW:0]         ipart, rounded;
  logic [FRW-1:0]      frac;
  logic                rbit, sticky, up;
  logic signed [EW-1:0] exp_adj;
  logic [MW:0]         top, low;

  always_comb begin
    rs      = XW'(-s1_tx);                       // value = prod * 2^-rs
    aligned = {s1_prod, FRW'(0)} >> rs;
    // Lift the underestimate by just under the window 2^-SNAP: an exact
    // integer or exact half-way value then lies in [exact, exact + 2^-SNAP)
    // and shows no bit of weight 2^-SNAP or more besides its own.
    fixed   = (MW+FRW+1)'(aligned[FRW+MW:0]) + ((MW+FRW+1)'(1) << (FRW - SNAP)) - 1'b1;
    ipart   = fixed[FRW +: MW+1];
    frac    = fixed[FRW-1:0];
    rbit    = frac[FRW-1];
    sticky  = |frac[FRW-2:FRW-SNAP];             // bits below the window ignored
    unique case (s1_side.rm)
      RM_NEAREST_EVEN: up = rbit & (sticky | ipart[0]);
      RM_DOWN:         up = s1_side.sign & (rbit | sticky);
      RM_UP:           up = ~s1_side.sign & (rbit | sticky);
      default:         up = 1'b0;
    endcase
    rounded = ipart + (MW+1)'(up);
    top     = (s1_side.dir == DIR_B2D) ? DEC_TOP : BIN_TOP;
    low     = (s1_side.dir == DIR_B2D) ? DEC_LOW : BIN_LOW;
    exp_adj = s1_side.oexp;
    if (rounded == top) begin
      rounded = low;
      exp_adj = exp_adj + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sign  <= 1'b0;
      out_dir   <= DIR_B2D;
      out_exp   <= '0;
      out_mant  <= '0;
    end else begin
      out_valid <= s1_valid;
      out_sign  <= s1_side.sign;
      out_dir   <= s1_side.dir;
      out_exp   <= exp_adj;
      out_mant  <= rounded[MW-1:0];
    end
  end

  a_shift_range: assert property (@(posedge clk) disable iff (!rst_n)
      s1_valid |-> (s1_tx <= 0 && -s1_tx <= FRW && ipart <= top))
    else $error("mant_scale_round: significand out of range");

endmodule
