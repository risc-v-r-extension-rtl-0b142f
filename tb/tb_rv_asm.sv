// tb_rv_asm: instruction encoders used by the testbenches to build
// programs for the RV64R core (standard RISC-V formats, plus the two
// R-extension instructions: funct5 0x0D rfmac.s and 0x0E rfsmac.s, fmt S,
// opcode OP-FP).
package tb_rv_asm;
  function automatic logic [31:0] r_t(input int f7, input int rs2, input int rs1, input int f3, input int rd, input int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input int rs1, input int f3, input int rd, input int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input int rs2, input int rs1, input int f3, input int opc);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'(opc)};
  endfunction
  function automatic logic [31:0] b_t(input int off, input int rs2, input int rs1, input int f3);
    logic [12:0] i; i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] lui(input int rd, input int imm20);
    return {20'(imm20), 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] i; i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] addi (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] addiw(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 0, rd, 7'b0011011); endfunction
  function automatic logic [31:0] slli (input int rd, input int rs1, input int sh);  return i_t(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add  (input int rd, input int rs1, input int rs2); return r_t(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub  (input int rd, input int rs1, input int rs2); return r_t(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] ld   (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sd   (input int rs2, input int rs1, input int imm); return s_t(imm, rs2, rs1, 3, 7'b0100011); endfunction
  function automatic logic [31:0] bne  (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] bge  (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 5); endfunction
  function automatic logic [31:0] flw  (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 2, rd, 7'b0000111); endfunction
  function automatic logic [31:0] fsw  (input int rs2, input int rs1, input int imm); return s_t(imm, rs2, rs1, 2, 7'b0100111); endfunction
  function automatic logic [31:0] fadd_s(input int rd, input int rs1, input int rs2, input int rm = 7); return r_t(7'h00, rs2, rs1, rm, rd, 7'b1010011); endfunction
  function automatic logic [31:0] fsub_s(input int rd, input int rs1, input int rs2, input int rm = 7); return r_t(7'h04, rs2, rs1, rm, rd, 7'b1010011); endfunction
  function automatic logic [31:0] fmul_s(input int rd, input int rs1, input int rs2, input int rm = 7); return r_t(7'h08, rs2, rs1, rm, rd, 7'b1010011); endfunction
  function automatic logic [31:0] fmv_x_w(input int rd, input int rs1); return r_t(7'h70, 0, rs1, 0, rd, 7'b1010011); endfunction
  function automatic logic [31:0] fmv_w_x(input int rd, input int rs1); return r_t(7'h78, 0, rs1, 0, rd, 7'b1010011); endfunction
  function automatic logic [31:0] rfmac_s(input int rs1, input int rs2, input int rm = 7); return r_t(7'h34, rs2, rs1, rm, 0, 7'b1010011); endfunction
  function automatic logic [31:0] rfsmac_s(input int rd, input int rm = 7); return r_t(7'h38, 0, 0, rm, rd, 7'b1010011); endfunction
  function automatic logic [31:0] csrrwi(input int rd, input int csr, input int zimm); return i_t(csr, zimm, 5, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrs (input int rd, input int csr, input int rs1); return i_t(csr, rs1, 2, rd, 7'b1110011); endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
endpackage
