// pow5_square_chain: a table value raised to the power 2^NSQ by NSQ
// successive squarings, unrolled into a pipeline.
//
// This is one "square n times" column of the power-of-five scheme. Stage i
// (0 <= i < DEPTH) squares its input with norm_mul when i < NSQ and passes
// it on unchanged otherwise, so that columns with different NSQ can be given
// the same DEPTH and stay aligned. Each stage ends in a register: latency is
// DEPTH cycles and a new value is accepted every cycle. in_valid travels with
// the data. The unrolling follows the paper (the squaring loops are short and
// can be unrolled); a register after every squaring is this design's choice.
module pow5_square_chain #(
  parameter int P     = 128,
  parameter int XW    = 32,
  parameter int NSQ   = 4,    // number of squarings n_i
  parameter int DEPTH = 4     // pipeline stages, at least NSQ
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [P-1:0]         in_mant,
  input  logic signed [XW-1:0] in_exp,
  output logic                 out_valid,
  output logic [P-1:0]         out_mant,
  output logic signed [XW-1:0] out_exp
);

  logic [DEPTH:0]                 v;
  logic [DEPTH:0][P-1:0]          m;
  logic signed [DEPTH:0][XW-1:0]  x;

  assign v[0] = in_valid;
  assign m[0] = in_mant;
  assign x[0] = in_exp;

  for (genvar i = 0; i < DEPTH; i++) begin : g_stage
    logic [P-1:0]         sq_m;
    logic signed [XW-1:0] sq_x;
    if (i < NSQ) begin : g_sq
      norm_mul #(.P(P), .XW(XW)) u_sq (
        .a(m[i]), .ax(x[i]), .b(m[i]), .bx(x[i]), .y(sq_m), .yx(sq_x));
    end else begin : g_pass
      assign sq_m = m[i];
      assign sq_x = x[i];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[i+1] <= 1'b0;
        m[i+1] <= '0;
        x[i+1] <= '0;
      end else begin
        v[i+1] <= v[i];
        m[i+1] <= sq_m;
        x[i+1] <= sq_x;
      end
    end
  end

  assign out_valid = v[DEPTH];
  assign out_mant  = m[DEPTH];
  assign out_exp   = x[DEPTH];

  initial assert (DEPTH >= NSQ) else $error("pow5_square_chain: DEPTH < NSQ");

endmodule
