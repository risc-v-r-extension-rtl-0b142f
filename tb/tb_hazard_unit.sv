// tb_hazard_unit: testbench of the forwarding / interlock unit. Random
// register fields (drawn from a small set so that matches are frequent)
// for the instructions in ID, EX, MEM and WB; the forwarding selects and
// the load-use stall are compared with the rules written out here
// (same register file, same index, x0 never matches, MEM before WB).
module tb_hazard_unit;
  logic [4:0] id_rs1, id_rs2, ex_rs1, ex_rs2, ex_rd, mem_rd, wb_rd;
  logic id_use_rs1, id_use_rs2, id_rs1_fp, id_rs2_fp, ex_use_rs1, ex_use_rs2, ex_rs1_fp, ex_rs2_fp;
  logic ex_wb_int, ex_wb_fp, ex_is_load, mem_wb_int, mem_wb_fp, wb_wb_int, wb_wb_fp;
  logic [1:0] fwd_a, fwd_b;
  logic load_use_stall;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  hazard_unit dut (.*);

  function automatic bit m(input logic [4:0] rs, input logic u, input logic fp,
                           input logic [4:0] rd, input logic wi, input logic wf);
    if (!u || rs != rd) return 0;
    return fp ? wf : (wi && rd != 0);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [1:0] ea, eb;
      logic es;
      {id_rs1, id_rs2, ex_rs1, ex_rs2, ex_rd, mem_rd, wb_rd} =
        {5'($urandom_range(3)), 5'($urandom_range(3)), 5'($urandom_range(3)), 5'($urandom_range(3)),
         5'($urandom_range(3)), 5'($urandom_range(3)), 5'($urandom_range(3))};
      {id_use_rs1, id_use_rs2, id_rs1_fp, id_rs2_fp, ex_use_rs1, ex_use_rs2, ex_rs1_fp, ex_rs2_fp} = 8'($urandom);
      {ex_wb_int, ex_wb_fp, ex_is_load, mem_wb_int, mem_wb_fp, wb_wb_int, wb_wb_fp} = 7'($urandom);
      #1;
      ea = m(ex_rs1, ex_use_rs1, ex_rs1_fp, mem_rd, mem_wb_int, mem_wb_fp) ? 2'b01 :
           m(ex_rs1, ex_use_rs1, ex_rs1_fp, wb_rd, wb_wb_int, wb_wb_fp) ? 2'b10 : 2'b00;
      eb = m(ex_rs2, ex_use_rs2, ex_rs2_fp, mem_rd, mem_wb_int, mem_wb_fp) ? 2'b01 :
           m(ex_rs2, ex_use_rs2, ex_rs2_fp, wb_rd, wb_wb_int, wb_wb_fp) ? 2'b10 : 2'b00;
      es = ex_is_load && (m(id_rs1, id_use_rs1, id_rs1_fp, ex_rd, ex_wb_int, ex_wb_fp) ||
                          m(id_rs2, id_use_rs2, id_rs2_fp, ex_rd, ex_wb_int, ex_wb_fp));
      checks += 3;
      if (fwd_a !== ea) begin failures++; if (failures < 5) $display("FAIL fwd_a %b %b", fwd_a, ea); end
      if (fwd_b !== eb) begin failures++; if (failures < 5) $display("FAIL fwd_b %b %b", fwd_b, eb); end
      if (load_use_stall !== es) begin failures++; if (failures < 5) $display("FAIL stall"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
