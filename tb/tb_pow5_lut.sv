// tb_pow5_lut: every entry of the power-of-five table is compared with the
// exact 5^q: equal for the default table (P = 128, QBITS = 4, all entries
// exact), and equal to 5^q rounded down to P bits for a 7-bit index table
// whose largest entries are wider than P.
module tb_pow5_lut;
  import ref_pkg::*;

  localparam int P = 128, XW = 32;
  int checks = 0, failures = 0;

  logic [3:0]           q4;
  logic [P-1:0]         m4;
  logic signed [XW-1:0] x4;
  logic [6:0]           q7;
  logic [P-1:0]         m7;
  logic signed [XW-1:0] x7;

  pow5_lut #(.P(P), .QBITS(4), .XW(XW)) dut4 (.q(q4), .out_mant(m4), .out_exp(x4));
  pow5_lut #(.P(P), .QBITS(7), .XW(XW)) dut7 (.q(q7), .out_mant(m7), .out_exp(x7));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // v * 2^x must equal 5^q rounded down to P significant bits
  task automatic check(input int q, input logic [P-1:0] v, input int x);
    rbig_t e, got;
    int l;
    e = r_pow5(q);
    l = 0;
    for (int i = 0; i < 400; i++) if (e[i]) l = i + 1;
    if (l > P) e = (e >> (l - P)) << (l - P);
    got = (x >= 0) ? (rbig_t'(v) << x) : (rbig_t'(v) >> (-x));
    checks++;
    if (got != e || !v[P-1] || (x < 0 && (v & ((128'd1 << (-x)) - 1)) != 0)) begin
      failures++;
      $display("FAIL q=%0d mant=%h exp=%0d", q, v, x);
    end
  endtask

  initial begin
    for (int q = 0; q < 16; q++) begin
      q4 = 4'(q); #1;
      check(q, m4, x4);
    end
    for (int q = 0; q < 128; q++) begin
      q7 = 7'(q); #1;
      check(q, m7, x7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
