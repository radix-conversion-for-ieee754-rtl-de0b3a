// norm_mul: one multiplication step of the power-of-five computation.
//
// Both operands are floating-point numbers a * 2^ax and b * 2^bx with P-bit
// significands in [2^(P-1), 2^P). The exact 2P-bit product is cut to its
// upper P bits (the last lambda = P bits are thrown away, floor), and if its
// leading bit is then 0 the result is shifted left by one, a zero entering
// at the bottom, so that it is normalised again. The exponent follows:
//     y * 2^yx <= (a * 2^ax) * (b * 2^bx),  yx = ax + bx + P - shift.
// The relative error of one step is below 2^(-P+2). Squaring is this block
// with both operands equal. It is combinational.
//
// The paper keeps the scale of the result in a separate count of the shifts
// (sigma) and of the dropped bits; carrying an explicit exponent with every
// value is this design's equivalent bookkeeping. lambda equals P here because
// only then does a product of two numbers of [2^(P-1), 2^P) return to that
// range after dropping lambda bits.
module norm_mul #(
  parameter int P  = 128,
  parameter int XW = 32
) (
  input  logic [P-1:0]         a,
  input  logic signed [XW-1:0] ax,
  input  logic [P-1:0]         b,
  input  logic signed [XW-1:0] bx,
  output logic [P-1:0]         y,
  output logic signed [XW-1:0] yx
);

  logic [2*P-1:0] prod;
  logic [P-1:0]   hi;
  logic           shift_needed;

  always_comb begin
    prod         = a * b;
    hi           = prod[2*P-1:P];                 // floor(a*b * 2^-P)
    shift_needed = ~hi[P-1];                      // leading bit is 0
    y            = hi << shift_needed;
    yx           = ax + bx + XW'(P) - XW'(shift_needed);
  end

endmodule
