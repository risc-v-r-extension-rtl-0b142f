// tb_int_regfile: testbench of the int register file. Random writes
// and reads on both ports are compared with a model array, including reads
// of the register being written in the same cycle (write-through) and
// the hard-wired zero of x0. Registers read zero after reset.
module tb_int_regfile;
  localparam int W = rext_pkg::XLEN;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] raddr1 = 0, raddr2 = 0, waddr = 0;
  logic [W-1:0] rdata1, rdata2, wdata = 0;
  logic [W-1:0] model [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  int_regfile dut (.*);
  function automatic logic [W-1:0] exp_rd(input logic [4:0] a);
    if (1 == 1 && a == 0) return '0;
    if (we && waddr == a) return wdata;
    return model[a];
  endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      we = 1'($urandom); waddr = 5'($urandom); wdata = W'({$urandom, $urandom});
      raddr1 = (i % 3 == 0) ? waddr : 5'($urandom); raddr2 = 5'($urandom);
      #1;
      checks += 2;
      if (rdata1 !== exp_rd(raddr1)) begin failures++; if (failures < 5) $display("FAIL r1 %0d", raddr1); end
      if (rdata2 !== exp_rd(raddr2)) begin failures++; if (failures < 5) $display("FAIL r2 %0d", raddr2); end
      @(posedge clk);
      if (we && !(1 == 1 && waddr == 0)) model[waddr] = wdata;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
