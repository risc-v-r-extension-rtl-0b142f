// tb_fcsr: testbench of the rounding-mode CSR. Random csrrw/csrrs/csrrc
// operations on fflags, frm, fcsr and an unrelated address are applied and
// the old-value read-back and the frm output are compared with a model.
module tb_fcsr;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] op = 0;
  logic [11:0] addr = 0;
  logic [63:0] wdata = 0, rdata, e_rd;
  logic [2:0] frm, m_frm;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fcsr dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    @(posedge clk); #1 checks++; if (frm !== 3'd0) failures++;
    rst_n = 1; m_frm = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] nv;
      logic [11:0] addrs [4];
      addrs = '{12'h001, 12'h002, 12'h003, 12'h300};
      en = 1'($urandom); op = 2'($urandom_range(1, 3)); addr = addrs[$urandom_range(3)];
      wdata = {$urandom, $urandom};
      #1;
      e_rd = (addr == 12'h002) ? 64'(m_frm) : (addr == 12'h003) ? 64'({m_frm, 5'd0}) : 64'd0;
      checks++; if (rdata !== e_rd) begin failures++; if (failures < 5) $display("FAIL rd %h %h", rdata, e_rd); end
      nv = (op == 1) ? wdata : (op == 2) ? (e_rd | wdata) : (e_rd & ~wdata);
      @(posedge clk);
      if (en && addr == 12'h002) m_frm = nv[2:0];
      if (en && addr == 12'h003) m_frm = nv[7:5];
      #1 checks++; if (frm !== m_frm) begin failures++; if (failures < 5) $display("FAIL frm %0d %0d", frm, m_frm); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
