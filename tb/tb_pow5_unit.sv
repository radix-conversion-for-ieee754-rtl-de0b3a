// tb_pow5_unit: checks 5^B against exact big-integer powers of five.
//
// Exponents are streamed back to back (one per cycle) and every result is
// compared with the exact 5^B: it must never exceed it, must lie within the
// error bound (N+1) * 2^(-P+2) with N = 14 truncating steps, and must be exact
// while 5^B has at most P significant bits, less one (B <= 54). The latency from input
// to output must be K*QBITS + K = 10 cycles.
module tb_pow5_unit;
  import ref_pkg::*;

  localparam int P = 128, QBITS = 4, K = 2, XW = 32;
  localparam int BW = QBITS * (K + 1), LAT = K * QBITS + K;
  localparam int NMUL = K * (K + 1) / 2 * QBITS + K;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [BW-1:0] in_b = '0;
  logic out_valid;
  logic [P-1:0] out_mant;
  logic signed [XW-1:0] out_exp;
  int checks = 0, failures = 0;
  int cycle = 0;

  pow5_unit #(.P(P), .QBITS(QBITS), .K(K), .XW(XW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int q_b[$];
  int q_t[$];
  int n_out = 0;

  task automatic check(input int b, input logic [P-1:0] vm, input int vx);
    rbig_t l, r, d;
    bit ok;
    l = r_pow5(b);
    r = rbig_t'(vm);
    if (vx < 0) l = l << (-vx); else r = r << vx;
    ok = vm[P-1] && (r <= l);
    if (ok) begin
      d = l - r;
      ok = (d << (P - 2)) <= l * rbig_t'(NMUL + 1);
      if (b <= 54) ok = ok && (d == '0);
    end
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL B=%0d: mant=%h exp=%0d", b, vm, vx);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int b, t;
      b = q_b.pop_front();
      t = q_t.pop_front();
      check(b, out_mant, out_exp);
      checks++;
      if (cycle - t != LAT) begin
        failures++;
        $display("FAIL latency %0d for B=%0d", cycle - t, b);
      end
      n_out++;
    end
  end

  initial begin
    int list[$];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b <= 60; b++) list.push_back(b);
    list.push_back(255); list.push_back(256); list.push_back(257);
    list.push_back(767); list.push_back(900); list.push_back(16 * 15 + 15);
    repeat (300) list.push_back($urandom_range(0, 900));
    foreach (list[i]) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_b = BW'(list[i]);
      q_b.push_back(list[i]);
      q_t.push_back(cycle);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out != list.size()) begin
      failures++;
      $display("FAIL %0d results for %0d inputs", n_out, list.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
