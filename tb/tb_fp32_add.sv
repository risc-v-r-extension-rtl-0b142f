// tb_fp32_add: self-checking testbench of the single-precision adder.
// Random sums and differences are compared with the double-precision
// reference of tb_fp_ref: over the whole exponent range in
// round-to-nearest-even, and with exponents close enough for the double sum
// to be exact in all five rounding modes. Special values and cancellation
// to zero are checked directly.
module tb_fp32_add;
  import tb_fp_ref::*;
  logic [31:0] a, b, y, exp_y;
  logic        sub;
  logic [2:0]  rm;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_add dut (.a(a), .b(b), .sub(sub), .rm(rm), .y(y));

  task automatic check_v(input logic [31:0] ta, input logic [31:0] tb_, input logic ts,
                         input logic [2:0] trm, input logic [31:0] ey);
    a = ta; b = tb_; sub = ts; rm = trm;
    #1;
    checks++;
    if (is_nan(ey) ? !is_nan(y) : (y !== ey)) begin
      failures++;
      if (failures < 10) $display("FAIL add %h %s %h rm=%0d: got %h exp %h", ta, ts ? "-" : "+", tb_, trm, y, ey);
    end
  endtask

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic ts, input logic [2:0] trm);
    real r;
    logic sb;
    r  = ts ? f2r(ta) - f2r(tb_) : f2r(ta) + f2r(tb_);
    sb = tb_[31] ^ ts;
    // an exact zero sum is +0 (-0 in round-down) unless both are equal-signed zeros
    if (r == 0.0 && !(ta[30:0] == 0 && tb_[30:0] == 0 && ta[31] == sb))
      check_v(ta, tb_, ts, trm, {(trm == 3'd2), 31'd0});
    else
      check_v(ta, tb_, ts, trm, r2f(r, trm));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] x;
  initial begin
    check_v(32'h3F800000, 32'h40000000, 0, 0, 32'h40400000);   // 1 + 2 = 3
    check_v(32'h3F800000, 32'h3F800000, 1, 0, 32'h00000000);   // 1 - 1 = +0
    check_v(32'h3F800000, 32'h3F800000, 1, 2, 32'h80000000);   // 1 - 1 = -0 in RDN
    check_v(32'h80000000, 32'h80000000, 0, 0, 32'h80000000);   // -0 + -0
    check_v(32'h7F800000, 32'h7F800000, 1, 0, 32'h7FC00000);   // inf - inf
    check_v(32'h7F800000, 32'h3F800000, 0, 0, 32'h7F800000);   // inf + 1
    check_v(32'h7F7FFFFF, 32'h7F7FFFFF, 0, 0, 32'h7F800000);   // overflow
    check_v(32'h00800000, 32'h00000001, 1, 0, 32'h007FFFFF);   // into subnormal
    check_v(32'h3F800000, 32'h33800000, 0, 0, 32'h3F800000);   // 1 + 2^-24 tie -> even
    check_v(32'h3F800000, 32'h33800000, 0, 3, 32'h3F800001);   // same, round up
    for (int i = 0; i < 4000; i++) check(rnd_f(0, 254), rnd_f(0, 254), 1'($urandom), 0);
    for (int i = 0; i < 6000; i++) begin
      x = rnd_f(40, 200);
      check(x, rnd_f(int'(x[30:23]) - 27, int'(x[30:23]) + 27), 1'($urandom), 3'(i % 5));
    end
    for (int i = 0; i < 2000; i++) begin   // near cancellation
      x = rnd_f(1, 30);
      check(x, {x[31], x[30:0] + 31'($urandom_range(8)) - 31'd4}, 1'b1, 3'(i % 5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
