// tb_apr: testbench of the architectural pipeline register. Drives random
// accumulate / clear / hold cycles and compares apr_q with a model register
// updated here (clear -> 0, accumulate -> new sum, otherwise hold), and
// checks the one-cycle update timing and the reset value.
module tb_apr;
  logic clk = 0, rst_n = 0, acc_en = 0, clr = 0;
  logic [31:0] acc_sum = 0, apr_q, model;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  apr dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    #1 checks++; if (apr_q !== 32'd0) failures++;
    rst_n = 1; model = 0;
    for (int i = 0; i < 1000; i++) begin
      int r;
      r = int'($urandom_range(3));
      acc_en  = (r == 1) || (r == 3 && i % 7 == 0);
      clr     = (r == 2);
      acc_sum = $urandom;
      #1 checks++;
      if (apr_q !== model) begin failures++; if (failures < 5) $display("FAIL before edge %0d", i); end
      @(posedge clk);
      if (clr) model = 0; else if (acc_en) model = acc_sum;
      #1 checks++;
      if (apr_q !== model) begin failures++; if (failures < 5) $display("FAIL %0d: %h vs %h", i, apr_q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
