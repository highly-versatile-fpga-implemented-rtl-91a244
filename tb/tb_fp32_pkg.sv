// tb_fp32_pkg -- self-checking test of the FP32 operators (FADD, FMUL,
// FSQRT). Random operands over a wide exponent range are checked bit for
// bit against double-precision results rounded once to single precision
// (exact for the product and the square root; for sums the operands are
// kept within 2^20 of each other so that the double sum is exact too).
// Special cases: zero, cancellation, infinity, NaN, negative square root.
module tb_fp32_pkg;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [31:0] rnd_fp(input int emin, input int emax);
    int e;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    return {1'(($urandom) & 1), 8'(e + 127), 23'($urandom)};
  endfunction

  initial begin
    logic [31:0] a, b;
    for (int t = 0; t < 3000; t++) begin
      a = rnd_fp(-40, 40);
      b = rnd_fp(-40, 40);
      chk("mul", fp_mul(a, b), f32(r32(a) * r32(b)));
      b = {b[31], 8'(int'(a[30:23]) + int'($urandom % 41) - 20), b[22:0]};
      chk("add", fp_add(a, b), f32(r32(a) + r32(b)));
      chk("sub", fp_sub(a, b), f32(r32(a) - r32(b)));
      a[31] = 1'b0;
      chk("sqrt", fp_sqrt(a), f32($sqrt(r32(a))));
    end
    chk("x-x", fp_sub(32'h3FC00000, 32'h3FC00000), 32'h00000000);
    chk("0*x", fp_mul(32'h00000000, 32'h40490FDB), 32'h00000000);
    chk("inf+1", fp_add(32'h7F800000, 32'h3F800000), 32'h7F800000);
    chk("inf*0", fp_mul(32'h7F800000, 32'h00000000), 32'h7FC00000);
    chk("sqrt(-1)", fp_sqrt(32'hBF800000), 32'h7FC00000);
    chk("sqrt(4)", fp_sqrt(32'h40800000), 32'h40000000);
    chk("sqrt(2)", fp_sqrt(32'h40000000), 32'h3FB504F3);
    chk("1+1", fp_add(32'h3F800000, 32'h3F800000), 32'h40000000);
    chk("max*2", fp_mul(32'h7F7FFFFF, 32'h40000000), 32'h7F800000);
    chk("abs", fp_abs(32'hC0000000), 32'h40000000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
