// tb_fp32_mul: self-checking testbench of the single-precision multiplier.
// Random operands over the whole exponent range (including subnormals,
// underflow and overflow) in all five rounding modes, plus special values,
// are compared with the double-precision reference of tb_fp_ref.
module tb_fp32_mul;
  import tb_fp_ref::*;
  logic [31:0] a, b, y, exp_y;
  logic [2:0]  rm;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_mul dut (.a(a), .b(b), .rm(rm), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [2:0] trm);
    a = ta; b = tb_; rm = trm;
    #1;
    exp_y = r2f(f2r(ta) * f2r(tb_), trm);
    checks++;
    if (is_nan(exp_y) ? !is_nan(y) : (y !== exp_y)) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h rm=%0d: got %h exp %h", ta, tb_, trm, y, exp_y);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3FC00000, 32'h40200000, 0);   // 1.5 * 2.5 = 3.75
    check(32'h00000000, 32'h7F800000, 0);   // 0 * inf = NaN
    check(32'h7F800000, 32'hC0000000, 0);   // inf * -2
    check(32'h7FC00000, 32'h3F800000, 0);   // NaN
    check(32'h80000000, 32'h3F800000, 0);   // -0 * 1
    check(32'h00000001, 32'h3F800000, 0);   // min subnormal * 1
    check(32'h00000001, 32'h3F000000, 0);   // min subnormal / 2, ties to even -> 0
    check(32'h00000001, 32'h3F000000, 3);   // same, round up
    check(32'h7F7FFFFF, 32'h40000000, 0);   // overflow
    check(32'h7F7FFFFF, 32'h40000000, 1);   // overflow, RTZ -> max
    for (int i = 0; i < 4000; i++) check(rnd_f(1, 254), rnd_f(1, 254), 3'(i % 5));
    for (int i = 0; i < 2000; i++) check(rnd_f(100, 154), rnd_f(100, 154), 3'(i % 5));
    for (int i = 0; i < 2000; i++) check(rnd_f(0, 40), rnd_f(60, 140), 3'(i % 5));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
