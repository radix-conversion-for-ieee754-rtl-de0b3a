// tb_mant_scale_round: the significand stage on its own. The power of five is
// supplied as the exact 5^(+-F) rounded down to P bits (computed here with big
// integers), the exponent and the power of two as the conversion defines
// them; the rounded significand and the (possibly bumped) exponent must equal
// the exact conversion for both directions, all rounding directions and both
// signs. Exact cases, results just below 10^16 and 2^53 and random values
// are used. Latency must be 2 cycles.
module tb_mant_scale_round;
  import radix_pkg::*;
  import ref_pkg::*;
  localparam int P = 128, XW = 32;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  conv_side_t in_side = '0;
  logic [P-1:0] in_pm = '0;
  logic signed [XW-1:0] in_px = '0;
  logic out_valid, out_sign;
  dir_e out_dir;
  logic signed [EW-1:0] out_exp;
  logic [MW-1:0] out_mant;
  int checks = 0, failures = 0;

  mant_scale_round #(.P(P), .XW(XW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blen(input rbig_t v);
    int l;
    l = 0;
    for (int i = 0; i < RW; i++) if (v[i]) l = i + 1;
    return l;
  endfunction

  // 5^a rounded down to P bits: mant * 2^exp
  task automatic pow5_trunc(input int a, output logic [P-1:0] pm, output int px);
    rbig_t v;
    int l;
    if (a >= 0) begin
      v = r_pow5(a);
      l = blen(v);
      if (l <= P) begin pm = P'(v << (P - l)); px = l - P; end
      else begin pm = P'(v >> (l - P)); px = l - P; end
    end else begin
      v = r_pow5(-a);
      l = blen(v);
      pm = P'((rbig_t'(1) << (P - 1 + l)) / v);
      px = -(P - 1 + l);
    end
  endtask

  task automatic run(input bit dir, input int e, input longint unsigned m);
    int oe, f, ex, px, rm;
    bit sg;
    longint unsigned mx;
    logic [P-1:0] pm;
    rm = $urandom_range(0, 2);
    sg = 1'($urandom);
    @(negedge clk);
    if (dir == 0) begin
      f = flog10_b(e, m) - 15;
      pow5_trunc(-f, pm, px);
      in_side.extra = EW'(e - f);
      in_side.oexp  = EW'(f);
      ref_b2d(e, m, sg, rm, ex, mx);
    end else begin
      oe = flog2_d(e, m) - 52;
      pow5_trunc(e, pm, px);
      in_side.extra = EW'(e - oe);
      in_side.oexp  = EW'(oe);
      ref_d2b(e, m, sg, rm, ex, mx);
    end
    in_valid = 1'b1;
    in_side.dir = dir_e'(dir);
    in_side.sign = sg;
    in_side.rm = rm_e'(rm);
    in_side.mant = MW'(m);
    in_pm = pm;
    in_px = XW'(px);
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (out_valid) begin failures++; $display("FAIL latency below 2"); end
    @(negedge clk);
    checks++;
    if (!out_valid || out_exp != EW'(ex) || out_mant != MW'(mx) || out_sign != sg ||
        out_dir != dir_e'(dir)) begin
      failures++;
      if (failures < 10)
        $display("FAIL dir=%0d rm=%0d s=%0d (%0d,%0d): got (%0d,%0d) expected (%0d,%0d)",
                 dir, rm, sg, e, m, out_exp, out_mant, ex, mx);
    end
  endtask

  localparam longint unsigned BLO = 64'd1 << 52;
  localparam longint unsigned DLO = 64'd1_000_000_000_000_000;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // exact: 1.0, integers, powers of ten
    run(0, -52, BLO);
    run(1, 0, 1);
    for (int i = 1; i < 40; i++) begin
      run(1, i - 20, DLO);
      run(1, 0, longint'(i) * 64'd777);
    end
    // the largest significands of a binade
    for (int k = 0; k < 30; k++) run(0, 1, (64'd1 << 53) - 1 - longint'(k));
    // 16-digit decimals just below 2^53: rounding may carry to 2^53
    for (int k = 0; k < 30; k++) run(1, 0, (64'd1 << 53) - 1 - longint'(k));
    // exact ties: odd m at E = -1 gives n* = k + 1/2 (F = 0); odd n at F = 0
    // above 2^53 gives m* = k + 1/2 (E = 1)
    repeat (40) begin
      run(0, -1, BLO | ({$urandom, $urandom} & (BLO - 1)) | 64'd1);
      run(1, 0, (64'd1 << 53) + (({$urandom, $urandom} % (64'd10_000_000_000_000_000 - (64'd1 << 53))) | 64'd1));
    end
    repeat (600) begin
      run(0, $urandom_range(0, EMAX_B - EMIN_B) + EMIN_B, BLO | ({$urandom, $urandom} & (BLO - 1)));
      run(1, $urandom_range(0, FMAX_D - FMIN_D) + FMIN_D, DLO + ({$urandom, $urandom} % (9 * DLO)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
