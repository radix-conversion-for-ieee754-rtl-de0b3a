// tb_pow5_accuracy: accuracy of 5^B as a function of working precision P and
// table index size QBITS, the trade-off the conversion scheme is tuned by.
//
// Four configurations of pow5_unit, each able to hold the exponents
// B = 0 .. 767 that the binary64/decimal64 conversions need, are run over all
// those exponents:
//     P =  64, QBITS = 2, K = 4      P = 128, QBITS = 4, K = 2 (default)
//     P = 192, QBITS = 7, K = 1      P = 256, QBITS = 5, K = 1
// For each, the worst accuracy in bits, -log2 of the largest relative error
// against the exact big-integer 5^B, is printed, and it must not fall below
// the bound P - 2 - log2(N + 1), N the number of truncating steps.
module tb_pow5_accuracy;
  import ref_pkg::*;

  localparam int NCFG = 4;
  localparam int PS[NCFG]  = '{64, 128, 192, 256};
  localparam int QS[NCFG]  = '{2, 4, 7, 5};
  localparam int KS[NCFG]  = '{4, 2, 1, 1};
  localparam int BMAX = 767;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [13:0] b = '0;
  int checks = 0, failures = 0;

  logic [NCFG-1:0]  ov;
  logic [255:0]     om [NCFG];
  logic signed [31:0] ox [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int P = PS[c], Q = QS[c], K = KS[c];
    logic [P-1:0] m;
    pow5_unit #(.P(P), .QBITS(Q), .K(K)) dut (
      .clk, .rst_n, .in_valid, .in_b(b[Q*(K+1)-1:0]),
      .out_valid(ov[c]), .out_mant(m), .out_exp(ox[c]));
    assign om[c] = 256'(m);
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  int worst[NCFG];

  initial begin
    rbig_t l, r, d;
    int acc, nstep, bound;
    foreach (worst[c]) worst[c] = 100000;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int bb = 0; bb <= BMAX; bb++) begin
      @(negedge clk);
      b = 14'(bb);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      repeat (20) @(negedge clk);
      for (int c = 0; c < NCFG; c++) begin
        l = r_pow5(bb);
        r = rbig_t'(om[c]);
        if (ox[c] < 0) l = l << (-ox[c]); else r = r << ox[c];
        checks++;
        if (r > l) begin
          failures++;
          $display("FAIL P=%0d B=%0d: result above 5^B", PS[c], bb);
        end else begin
          d = l - r;
          acc = (d == '0) ? 100000 : blen(l) - blen(d);   // within one bit
          if (acc < worst[c]) worst[c] = acc;
        end
      end
    end
    $display("   P  QBITS  K  steps  worst accuracy (bits)  bound");
    for (int c = 0; c < NCFG; c++) begin
      nstep = KS[c] * (KS[c] + 1) / 2 * QS[c] + KS[c];
      bound = PS[c] - 2 - $clog2(nstep + 1) - 1;
      $display("%4d  %5d  %1d  %5d  %21d  %5d", PS[c], QS[c], KS[c], nstep, worst[c], bound);
      checks++;
      if (worst[c] < bound) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
