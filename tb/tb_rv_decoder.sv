// tb_rv_decoder: testbench of the ID-stage decoder. Checks the decode of
// every instruction class used by the core, with random register fields,
// against fields and flags written out here from the RISC-V encodings, and
// in particular the R-extension MASK/MATCH rules: rfmac.s with a non-zero
// rd and rfsmac.s with non-zero rs1/rs2 are illegal, every rm value except
// the reserved ones is accepted, and fmt other than S is illegal.
module tb_rv_decoder;
  import rext_pkg::*;
  import tb_rv_asm::*;
  logic [31:0] instr;
  ctrl_t ctrl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  rv_decoder dut (.instr, .ctrl);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (instr %h)", s, instr); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int rd, rs1, rs2, rm;
      rd = 1 + int'($urandom_range(30)); rs1 = int'($urandom_range(31)); rs2 = int'($urandom_range(31));
      rm = int'($urandom_range(4)); if (i % 2 == 0) rm = 7;
      // rfmac.s
      instr = rfmac_s(rs1, rs2, rm); #1;
      chk(ctrl.is_rfmac && !ctrl.illegal && !ctrl.wb_fp && !ctrl.wb_int, "rfmac decode");
      chk(ctrl.rs1 == 5'(rs1) && ctrl.rs2 == 5'(rs2) && ctrl.rs1_fp && ctrl.rs2_fp && ctrl.use_rs1 && ctrl.use_rs2, "rfmac srcs");
      chk(ctrl.rm == 3'(rm) && ctrl.res_sel == RES_FMUL, "rfmac rm/res");
      chk((instr & MASK_RFMAC_S) == MATCH_RFMAC_S, "rfmac match");
      instr = rfmac_s(rs1, rs2, rm) | {20'd0, 5'(rd), 7'd0}; #1;
      chk(ctrl.illegal && !ctrl.is_rfmac, "rfmac with rd illegal");
      // rfsmac.s
      instr = rfsmac_s(rd, rm); #1;
      chk(ctrl.is_rfsmac && !ctrl.illegal && ctrl.wb_fp && !ctrl.use_rs1 && !ctrl.use_rs2 && ctrl.rd == 5'(rd), "rfsmac decode");
      instr = rfsmac_s(rd, rm) | {12'd0, 5'(1 + rs1 % 31), 15'd0}; #1;
      chk(ctrl.illegal && !ctrl.is_rfsmac, "rfsmac with rs1 illegal");
      instr = rfsmac_s(rd, rm) | {7'd0, 5'(1 + rs2 % 31), 20'd0}; #1;
      chk(ctrl.illegal && !ctrl.is_rfsmac, "rfsmac with rs2 illegal");
      instr = rfmac_s(rs1, rs2, 5 + i % 2); #1;
      chk(ctrl.illegal, "reserved rm illegal");
      instr = rfmac_s(rs1, rs2, rm) | 32'h0200_0000; #1;
      chk(ctrl.illegal, "fmt D illegal");
      // F subset
      instr = fmul_s(rd, rs1, rs2, rm); #1;
      chk(!ctrl.illegal && ctrl.wb_fp && ctrl.res_sel == RES_FMUL && !ctrl.is_rfmac && ctrl.rd == 5'(rd), "fmul.s");
      instr = fadd_s(rd, rs1, rs2, rm); #1;
      chk(!ctrl.illegal && ctrl.wb_fp && ctrl.res_sel == RES_FADD && !ctrl.fsub, "fadd.s");
      instr = fsub_s(rd, rs1, rs2, rm); #1;
      chk(!ctrl.illegal && ctrl.res_sel == RES_FADD && ctrl.fsub, "fsub.s");
      instr = flw(rd, rs1, 12); #1;
      chk(ctrl.is_load && ctrl.wb_fp && !ctrl.wb_int && !ctrl.rs1_fp && ctrl.imm == 64'd12, "flw");
      instr = fsw(rs2, rs1, -8); #1;
      chk(ctrl.is_store && ctrl.rs2_fp && !ctrl.rs1_fp && ctrl.imm == -64'sd8, "fsw");
      instr = fmv_x_w(rd, rs1); #1;
      chk(ctrl.wb_int && ctrl.rs1_fp && ctrl.res_sel == RES_FMVXW, "fmv.x.w");
      instr = fmv_w_x(rd, rs1); #1;
      chk(ctrl.wb_fp && !ctrl.rs1_fp && ctrl.res_sel == RES_FMVWX, "fmv.w.x");
      // integer subset
      instr = addi(rd, rs1, -5); #1;
      chk(ctrl.wb_int && ctrl.alu_op == ALU_ADD && ctrl.alu_b_imm && ctrl.imm == -64'sd5 && !ctrl.word_op, "addi");
      instr = addiw(rd, rs1, 7); #1;
      chk(ctrl.wb_int && ctrl.word_op, "addiw");
      instr = sub(rd, rs1, rs2); #1;
      chk(ctrl.alu_op == ALU_SUB && !ctrl.alu_b_imm && ctrl.use_rs2, "sub");
      instr = addi(0, rs1, 3); #1;
      chk(!ctrl.wb_int, "x0 write dropped");
      instr = ld(rd, rs1, 16); #1;
      chk(ctrl.is_load && ctrl.wb_int && ctrl.mem_funct3 == 3'd3, "ld");
      instr = sd(rs2, rs1, 24); #1;
      chk(ctrl.is_store && ctrl.imm == 64'd24 && !ctrl.wb_int, "sd");
      instr = bne(rs1, rs2, -16); #1;
      chk(ctrl.is_branch && ctrl.imm == -64'sd16 && ctrl.br_funct3 == 3'd1, "bne");
      instr = bge(rs1, rs2, 2048); #1;
      chk(ctrl.is_branch && ctrl.imm == 64'd2048 && ctrl.br_funct3 == 3'd5, "bge");
      instr = jal(rd, -1024); #1;
      chk(ctrl.is_jal && ctrl.imm == -64'sd1024 && ctrl.res_sel == RES_PC4, "jal");
      instr = jalr(rd, rs1, 8); #1;
      chk(ctrl.is_jalr && ctrl.imm == 64'd8, "jalr");
      instr = lui(rd, 20'h80001); #1;
      chk(ctrl.imm == 64'hFFFF_FFFF_8000_1000 && ctrl.alu_op == ALU_PASSB, "lui");
      instr = csrrwi(rd, 12'h002, rs1); #1;
      chk(ctrl.is_csr && ctrl.csr_imm && ctrl.csr_op == 2'b01 && ctrl.csr_addr == 12'h002 && ctrl.imm == 64'(rs1), "csrrwi");
      instr = ebreak(); #1;
      chk(ctrl.is_ebreak && !ctrl.illegal, "ebreak");
      instr = 32'hFFFF_FFFF; #1;
      chk(ctrl.illegal && !ctrl.wb_int && !ctrl.wb_fp && !ctrl.is_store, "illegal word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
