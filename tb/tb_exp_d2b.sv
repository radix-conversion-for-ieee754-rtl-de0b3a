// tb_exp_d2b: checks the decimal-to-binary exponent unit against an exact
// big-integer floor(log2(10^F*n)). Every decimal exponent of the range is
// visited with a random 16-digit significand, a random short significand
// (exercising the normalising shift), n = 1, n = 10^16 - 1, and the two
// significands around the binade boundary where gamma switches. Output
// latency is checked to be one cycle.
module tb_exp_d2b;
  import radix_pkg::*;
  import ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [EW-1:0] in_f = '0;
  logic [KAPPA-1:0] in_mant = '0;
  logic out_valid;
  logic signed [EW-1:0] out_e;
  int checks = 0, failures = 0;

  exp_d2b dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int f, input longint unsigned n);
    int eexp;
    @(negedge clk);
    in_valid = 1'b1;
    in_f     = EW'(f);
    in_mant  = KAPPA'(n);
    @(negedge clk);
    in_valid = 1'b0;
    eexp = flog2_d(f, n) - (P2 - 1);
    checks++;
    if (!out_valid || out_e != EW'(eexp)) begin
      failures++;
      if (failures < 10)
        $display("FAIL F=%0d n=%0d: E=%0d valid=%0b, expected %0d", f, n, out_e, out_valid, eexp);
    end
  endtask

  localparam longint unsigned NMAX = 64'd9_999_999_999_999_999;

  initial begin
    longint unsigned n, nc;
    rbig_t num, den;
    int j;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = FMIN_D; f <= FMAX_D; f++) begin
      n = 64'd1_000_000_000_000_000 + ({$urandom, $urandom} % 64'd9_000_000_000_000_000);
      apply(f, n);
      apply(f, 64'($urandom_range(1, 1000000)));
      if (f % 5 == 0) begin
        apply(f, 1);
        apply(f, NMAX);
      end
      // smallest n of the top decade range with 10^f*n >= 2^j
      j = flog2_d(f, NMAX);
      if (flog2_d(f, 64'd1_000_000_000_000_000) != j) begin
        num = rbig_t'(1); den = rbig_t'(1);
        if (j >= 0) num = num << j; else den = den << (-j);
        if (f >= 0) den = den * r_pow10(f); else num = num * r_pow10(-f);
        nc = longint'((num + den - 1) / den);
        apply(f, nc);
        apply(f, nc - 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
