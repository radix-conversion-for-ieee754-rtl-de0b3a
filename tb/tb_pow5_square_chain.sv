// tb_pow5_square_chain: a column with NSQ = 4 squarings in DEPTH = 6 stages
// raises each table value 5^q to the power 16. Values are streamed one per
// cycle; each result must be within the error bound of the exact 5^(16q),
// never above it, exact while 5^(16q) has at most 126 bits (q <= 3), and
// come out after DEPTH cycles.
module tb_pow5_square_chain;
  import ref_pkg::*;
  localparam int P = 128, XW = 32, NSQ = 4, DEPTH = 6;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [P-1:0] in_mant = '0, out_mant;
  logic signed [XW-1:0] in_exp = '0, out_exp;
  int checks = 0, failures = 0, cycle = 0;
  int qq[$], tt[$];

  pow5_square_chain #(.P(P), .XW(XW), .NSQ(NSQ), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      rbig_t l, r, d;
      int q, t;
      q = qq.pop_front();
      t = tt.pop_front();
      l = r_pow5(16 * q);
      r = rbig_t'(out_mant);
      if (out_exp < 0) l = l << (-out_exp); else r = r << out_exp;
      d = l - r;
      checks++;
      if (!out_mant[P-1] || r > l || (d << (P - 2)) > l * rbig_t'(NSQ + 1) ||
          (q <= 3 && d != '0) || cycle - t != DEPTH) begin
        failures++;
        $display("FAIL q=%0d mant=%h exp=%0d lat=%0d", q, out_mant, out_exp, cycle - t);
      end
    end
  end

  initial begin
    rbig_t v;
    int l;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++)
      for (int q = 0; q < 16; q++) begin
        v = r_pow5(q);
        l = 0;
        for (int i = 0; i < 64; i++) if (v[i]) l = i + 1;
        @(negedge clk);
        in_valid = 1'b1;
        in_mant = P'(v << (P - l));
        in_exp = XW'(l - P);
        qq.push_back(q);
        tt.push_back(cycle);
      end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (DEPTH + 3) @(posedge clk);
    checks++;
    if (qq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
