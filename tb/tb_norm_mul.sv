// tb_norm_mul: random normalised operands (and the extreme ones) are
// multiplied; the result must be normalised, never above the exact product,
// below it by less than 2^(-P+2) relative, and equal to the product's upper
// P bits (shifted left by one, with a zero, when the leading bit is clear).
module tb_norm_mul;
  localparam int P = 128, XW = 32;
  int checks = 0, failures = 0;

  logic [P-1:0] a, b, y;
  logic signed [XW-1:0] ax, bx, yx;

  norm_mul #(.P(P), .XW(XW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [P-1:0] rnd();
    logic [P-1:0] r;
    for (int i = 0; i < P / 32; i++) r[i*32 +: 32] = $urandom;
    r[P-1] = 1'b1;
    return r;
  endfunction

  task automatic run(input logic [P-1:0] va, input logic [P-1:0] vb);
    logic [2*P+1:0] exact, approx, diff;
    int s;
    a = va; b = vb;
    ax = XW'($urandom_range(0, 2000)) - 1000;
    bx = XW'($urandom_range(0, 2000)) - 1000;
    #1;
    exact = (2*P+2)'(va) * (2*P+2)'(vb);
    // y * 2^yx vs a*b * 2^(ax+bx): scale both to 2^(ax+bx)
    s = yx - ax - bx;
    approx = (2*P+2)'(y) << s;
    diff = exact - approx;
    checks++;
    if (!y[P-1] || s < P - 1 || s > P || approx > exact ||
        (diff << (P - 2)) >= exact || (s == P - 1 && y[0]) ||
        (s == P && y != exact[2*P-1:P])) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h y=%h s=%0d", va, vb, y, s);
    end
  endtask

  initial begin
    run({1'b1, {(P-1){1'b0}}}, {1'b1, {(P-1){1'b0}}});
    run({P{1'b1}}, {P{1'b1}});
    run({1'b1, {(P-1){1'b0}}}, {P{1'b1}});
    repeat (5000) run(rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
