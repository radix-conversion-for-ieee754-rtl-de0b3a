// pow5_unit: the leading P bits of 5^B for a natural exponent B, without
// loops, divisions or rational arithmetic.
//
// B is split into K+1 digits of QBITS bits,
//     B = 2^(K*QBITS) q_K + ... + 2^QBITS q_1 + q_0,
// which with the defaults (QBITS = 4, K = 2) is the paper's
// B = 2^8 q_2 + 2^4 q_1 + q_0. Then
//     5^B = (5^q_K)^(2^(K*QBITS)) * ... * (5^q_1)^(2^QBITS) * 5^q_0 .
// Each digit reads 5^q_i from a pow5_lut; column i squares that value
// n_i = i*QBITS times (pow5_square_chain); the columns are then multiplied
// together starting from the largest power, v_K * v_(K-1), then by v_(K-2),
// ..., and last by 5^q_0: K multiplications. Every multiplication keeps P
// bits (norm_mul), so the result is a lower bound of 5^B with a relative
// error below (1 + 2^(-P+2))^N - 1, N = sum(n_i) + K.
//
// Timing: fully pipelined, one B per cycle. All columns are K*QBITS stages
// deep (the shorter ones pad with registers), followed by K registered
// multiplication stages: latency K*QBITS + K cycles (10 with the defaults).
// out_valid follows in_valid.
//
// Interface: in_b is the natural exponent; 5^in_b ~ out_mant * 2^out_exp,
// out_mant in [2^(P-1), 2^P). Starting the product with the largest factor
// instead of with 1 (the paper's m <- 1), carrying an explicit exponent
// instead of the shift counts sigma and s, and the register placement are
// this design's choices.
module pow5_unit
  import radix_pkg::*;
#(
  parameter int P     = 128,   // working precision p (lambda = p)
  parameter int QBITS = 4,     // table index size
  parameter int K     = 2,     // number of squared factors
  parameter int XW    = 32,
  localparam int BW   = QBITS * (K + 1),
  localparam int LAT  = K * QBITS + K
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_b,
  output logic                 out_valid,
  output logic [P-1:0]         out_mant,
  output logic signed [XW-1:0] out_exp
);

  localparam int DEPTH = K * QBITS;

  // ---- decompose B and look up 5^q_i, square column i n_i = i*QBITS times
  logic [K:0]                col_valid;
  logic [K:0][P-1:0]         col_m;
  logic signed [K:0][XW-1:0] col_x;

  for (genvar i = 0; i <= K; i++) begin : g_col
    logic [P-1:0]         t_m;
    logic signed [XW-1:0] t_x;
    pow5_lut #(.P(P), .QBITS(QBITS), .XW(XW)) u_lut (
      .q(in_b[i*QBITS +: QBITS]), .out_mant(t_m), .out_exp(t_x));
    pow5_square_chain #(.P(P), .XW(XW), .NSQ(i * QBITS), .DEPTH(DEPTH)) u_chain (
      .clk, .rst_n, .in_valid,
      .in_mant(t_m), .in_exp(t_x),
      .out_valid(col_valid[i]), .out_mant(col_m[i]), .out_exp(col_x[i]));
  end

  // ---- multiply the columns, largest power first
  // stage s (1..K) multiplies the running product by column K-s; the columns
  // not yet used travel along with it.
  logic [K:0]                        st_v;
  logic [K:0][P-1:0]                 st_acc;
  logic signed [K:0][XW-1:0]         st_accx;
  logic [K:0][K:0][P-1:0]            st_fm;
  logic signed [K:0][K:0][XW-1:0]    st_fx;

  assign st_v[0]    = col_valid[K];
  assign st_acc[0]  = col_m[K];
  assign st_accx[0] = col_x[K];
  assign st_fm[0]   = col_m;
  assign st_fx[0]   = col_x;

  for (genvar s = 1; s <= K; s++) begin : g_mul
    logic [P-1:0]         p_m;
    logic signed [XW-1:0] p_x;
    norm_mul #(.P(P), .XW(XW)) u_mul (
      .a(st_acc[s-1]), .ax(st_accx[s-1]),
      .b(st_fm[s-1][K-s]), .bx(st_fx[s-1][K-s]),
      .y(p_m), .yx(p_x));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_v[s]    <= 1'b0;
        st_acc[s]  <= '0;
        st_accx[s] <= '0;
        st_fm[s]   <= '0;
        st_fx[s]   <= '0;
      end else begin
        st_v[s]    <= st_v[s-1];
        st_acc[s]  <= p_m;
        st_accx[s] <= p_x;
        st_fm[s]   <= st_fm[s-1];
        st_fx[s]   <= st_fx[s-1];
      end
    end
  end

  assign out_valid = st_v[K];
  assign out_mant  = st_acc[K];
  assign out_exp   = st_accx[K];

endmodule
