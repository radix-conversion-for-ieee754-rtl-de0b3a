// tb_radix_converter: end-to-end test of the conversion unit at its default
// parameters (binary64 <-> decimal64, P = 128, B = 2^8 q2 + 2^4 q1 + q0).
//
// Conversions in both directions, with all three rounding directions and
// both signs, are streamed into the pipeline back to back and every result
// is compared with an exact big-integer conversion (ref_pkg). The stimulus
// mixes random numbers over the whole exponent ranges with the cases that
// exercise each mechanism: exact results (powers of ten, integers), results
// that round up out of the significand range (the exponent is then bumped),
// decade and binade boundaries (the table correction gamma), and short
// decimal significands (the normalising shift of the decimal direction).
// Each mechanism is counted when it happens inside the design; one that
// never happens counts as a failure. The latency must be 14 cycles.
module tb_radix_converter;
  import radix_pkg::*;
  import ref_pkg::*;

  localparam int LAT = 14;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  dir_e in_dir = DIR_B2D;
  logic in_sign = 1'b0;
  rm_e  in_rm = RM_NEAREST_EVEN;
  logic signed [EW-1:0] in_exp = '0;
  logic [MW-1:0] in_mant = '0;
  logic out_valid;
  dir_e out_dir;
  logic out_sign;
  logic signed [EW-1:0] out_exp;
  logic [MW-1:0] out_mant;

  int checks = 0, failures = 0, cycle = 0;

  radix_converter dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    int              t;
    bit              dir;
    bit              sign;
    int              rm;
    int              exp;
    longint unsigned mant;
  } job_t;
  job_t jobs[$];
  int n_out = 0;

  // mechanism counters
  int c_b2d = 0, c_d2b = 0, c_rm[3] = '{0, 0, 0};
  int c_gamma_b[2] = '{0, 0}, c_gamma_d[2] = '{0, 0};
  int c_snap = 0, c_carry = 0, c_shift = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_exp_b2d.in_valid) c_gamma_b[dut.u_exp_b2d.gamma]++;
      if (dut.u_exp_d2b.in_valid) begin
        c_gamma_d[dut.u_exp_d2b.gamma]++;
        if (dut.u_exp_d2b.lz != 0) c_shift++;
      end
      if (dut.u_round.s1_valid) begin
        if (!dut.u_round.sticky) c_snap++;   // exact or half-way value recognised
        if (dut.u_round.ipart + dut.u_round.up == dut.u_round.top) c_carry++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      job_t j;
      int ex;
      longint unsigned mx;
      j = jobs.pop_front();
      if (j.dir == 0) ref_b2d(j.exp, j.mant, j.sign, j.rm, ex, mx);
      else            ref_d2b(j.exp, j.mant, j.sign, j.rm, ex, mx);
      checks++;
      if (out_exp != EW'(ex) || out_mant != MW'(mx) || out_sign != j.sign ||
          out_dir != dir_e'(j.dir) || cycle - j.t != LAT) begin
        failures++;
        if (failures < 10)
          $display("FAIL dir=%0d rm=%0d s=%0d in=(%0d, %0d): got (%0d, %0d) lat %0d, expected (%0d, %0d)",
                   j.dir, j.rm, j.sign, j.exp, j.mant, out_exp, out_mant, cycle - j.t, ex, mx);
      end
      n_out++;
    end
  end

  task automatic send(input bit dir, input int e, input longint unsigned m);
    job_t j;
    @(negedge clk);
    j.t    = cycle;
    j.dir  = dir;
    j.sign = 1'($urandom);
    j.rm   = $urandom_range(0, 2);
    j.exp  = e;
    j.mant = m;
    jobs.push_back(j);
    in_valid = 1'b1;
    in_dir   = dir_e'(dir);
    in_sign  = j.sign;
    in_rm    = rm_e'(j.rm);
    in_exp   = EW'(e);
    in_mant  = MW'(m);
    if (dir == 0) c_b2d++; else c_d2b++;
    c_rm[j.rm]++;
  endtask

  localparam longint unsigned BLO = 64'd1 << 52;
  localparam longint unsigned DLO = 64'd1_000_000_000_000_000;

  // largest binary 2^e*m not above 10^k, m normalised
  task automatic send_below_pow10(input int k);
    int e;
    rbig_t num, den;
    e = int'($floor(real'(k) * $ln(10.0) / $ln(2.0))) - 52;
    num = rbig_t'(1); den = rbig_t'(1);
    if (k >= 0) num = r_pow10(k); else den = r_pow10(-k);
    if (e >= 0) den = den << e; else num = num << (-e);
    if (num / den >= rbig_t'(1) << 53) begin e++; den = den << 1; end
    if (num / den <  rbig_t'(1) << 52) begin e--; num = num << 1; end
    send(0, e, longint'(num / den));
  endtask

  // largest 16-digit decimal 10^f*n not above 2^k
  task automatic send_below_pow2(input int k);
    int f;
    rbig_t num, den;
    f = int'($floor(real'(k) * $ln(2.0) / $ln(10.0))) - 15;
    num = rbig_t'(1); den = rbig_t'(1);
    if (k >= 0) num = num << k; else den = den << (-k);
    if (f >= 0) den = den * r_pow10(f); else num = num * r_pow10(-f);
    if (num / den >= rbig_t'(10 * DLO)) begin f++; den = den * rbig_t'(10); end
    if (f >= FMIN_D && f <= FMAX_D) send(1, f, longint'(num / den));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // exact cases: integers and powers of ten in both directions
    for (int i = 1; i <= 60; i++) begin
      longint unsigned v;
      int sh;
      v = longint'(i) * 64'd12345;
      sh = 0;
      while (((v << sh) & BLO) == 0) sh++;
      send(0, -sh, v << sh);                       // the integer v
      send(1, i - 20, DLO);                        // 10^(i-5)
      send(1, 0, longint'(i));                     // the integer i
    end
    // exact ties halfway between two results
    repeat (40) begin
      send(0, -1, BLO | ({$urandom, $urandom} & (BLO - 1)) | 64'd1);
      send(1, 0, (64'd1 << 53) + (({$urandom, $urandom} % (10 * DLO - (64'd1 << 53))) | 64'd1));
    end
    // results just below a power of ten / two: rounding may carry out
    for (int k = -300; k <= 300; k += 7) send_below_pow10(k);
    for (int k = -1000; k <= 1000; k += 23) send_below_pow2(k);
    // random numbers over the whole ranges
    repeat (1500) begin
      send(0, $urandom_range(0, EMAX_B - EMIN_B) + EMIN_B,
           BLO | ({$urandom, $urandom} & (BLO - 1)));
      send(1, $urandom_range(0, FMAX_D - FMIN_D) + FMIN_D,
           ($urandom_range(0, 3) == 0) ? longint'($urandom_range(1, 99999))
                                       : DLO + ({$urandom, $urandom} % (9 * DLO)));
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out == 0 || jobs.size() != 0) begin
      failures++;
      $display("FAIL %0d results, %0d missing", n_out, jobs.size());
    end
    $display("mechanisms: b2d=%0d d2b=%0d rm=%0d/%0d/%0d gamma_b2d=%0d/%0d gamma_d2b=%0d/%0d snap=%0d carry=%0d shift=%0d",
             c_b2d, c_d2b, c_rm[0], c_rm[1], c_rm[2], c_gamma_b[0], c_gamma_b[1],
             c_gamma_d[0], c_gamma_d[1], c_snap, c_carry, c_shift);
    foreach (c_rm[i]) begin checks++; if (c_rm[i] == 0) failures++; end
    checks += 7;
    if (c_b2d == 0) failures++;
    if (c_d2b == 0) failures++;
    if (c_gamma_b[0] == 0 || c_gamma_b[1] == 0) failures++;
    if (c_gamma_d[0] == 0 || c_gamma_d[1] == 0) failures++;
    if (c_snap == 0) failures++;
    if (c_carry == 0) failures++;
    if (c_shift == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
