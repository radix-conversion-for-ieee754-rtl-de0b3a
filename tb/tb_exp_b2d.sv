// tb_exp_b2d: checks the binary-to-decimal exponent unit against an exact
// big-integer floor(log10(2^E*m)). Every binary exponent of the range is
// visited with a random significand, with the two extreme significands, and
// with the significands just below and at the decade boundary
// ceil(10^j / 2^E), where gamma switches. Output latency is checked to be one
// cycle.
module tb_exp_b2d;
  import radix_pkg::*;
  import ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [EW-1:0] in_exp = '0;
  logic [P2-1:0] in_mant = '0;
  logic out_valid;
  logic signed [EW-1:0] out_f;
  int checks = 0, failures = 0;

  exp_b2d dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int e, input longint unsigned m);
    int fexp;
    @(negedge clk);
    in_valid = 1'b1;
    in_exp   = EW'(e);
    in_mant  = P2'(m);
    @(negedge clk);
    in_valid = 1'b0;
    fexp = flog10_b(e, m) - (P10 - 1);
    checks++;
    if (!out_valid || out_f != EW'(fexp)) begin
      failures++;
      if (failures < 10)
        $display("FAIL E=%0d m=%0d: F=%0d valid=%0b, expected %0d", e, m, out_f, out_valid, fexp);
    end
  endtask

  initial begin
    longint unsigned mlo, mhi, m, mc;
    rbig_t num, den;
    int j;
    mlo = 64'd1 << (P2 - 1);
    mhi = (64'd1 << P2) - 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int e = EMIN_B; e <= EMAX_B; e++) begin
      m = mlo | ({$urandom, $urandom} & (mlo - 1));
      apply(e, m);
      if (e % 7 == 0) begin
        apply(e, mlo);
        apply(e, mhi);
      end
      // decade boundary inside this binade: the smallest m with 2^e*m >= 10^j
      j = flog10_b(e, mhi);
      if (flog10_b(e, mlo) != j) begin
        num = rbig_t'(1); den = rbig_t'(1);
        if (j >= 0) num = r_pow10(j); else den = r_pow10(-j);
        if (e >= 0) den = den << e; else num = num << (-e);
        mc = longint'((num + den - 1) / den);
        apply(e, mc);
        apply(e, mc - 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
