// tb_r_ex_stage: testbench of the rented execution stage. For random
// APR values and products it checks acc_sum against the reference sum of
// tb_fp_ref in each rounding mode, and checks the control outputs for
// rfmac.s, rfsmac.s, other instructions and bubbles.
module tb_r_ex_stage;
  import tb_fp_ref::*;
  logic valid, is_rfmac, is_rfsmac, acc_en, apr_clr, mem_idle;
  logic [31:0] product, apr_q, acc_sum, wb_value;
  logic [2:0]  rm;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  r_ex_stage dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] e;
      valid = 1'($urandom); is_rfmac = 1'($urandom); is_rfsmac = !is_rfmac && 1'($urandom);
      apr_q = rnd_f(100, 140); product = rnd_f(int'(apr_q[30:23]) - 20, int'(apr_q[30:23]) + 20);
      rm = 3'(i % 5);
      #1;
      e = r2f(f2r(apr_q) + f2r(product), rm);
      if (f2r(apr_q) + f2r(product) == 0.0) e = {(rm == 3'd2), 31'd0};
      chk(acc_sum === e, $sformatf("sum %h+%h rm%0d got %h exp %h", apr_q, product, rm, acc_sum, e));
      chk(acc_en === (valid & is_rfmac), "acc_en");
      chk(apr_clr === (valid & is_rfsmac), "apr_clr");
      chk(mem_idle === (valid & (is_rfmac | is_rfsmac)), "mem_idle");
      chk(wb_value === apr_q, "wb_value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
