// rv_decoder: ID-stage instruction decoder of the RV64R core.
//
// Turns a 32-bit instruction into the ctrl_t control struct of rext_pkg.
// Recognised: RV64I (lui, auipc, jal, jalr, branches, loads, stores, ALU
// register/immediate and *W forms), ebreak (halts the core), Zicsr on the
// FP CSRs, and from the F extension flw, fsw, fadd.s, fsub.s, fmul.s,
// fmv.x.w and fmv.w.x. The two R-extension instructions are matched with
// the MASK/MATCH pairs of the paper, so a non-zero rd in rfmac.s or a
// non-zero rs1/rs2 in rfsmac.s makes the word illegal:
//   rfmac.s  rs1, rs2 : funct5 0x0D, fmt S; reads f[rs1], f[rs2]; no rd
//   rfsmac.s rd       : funct5 0x0E, fmt S; writes f[rd] from the APR
// The rm field of OP-FP words is passed on; the reserved values 101/110
// make the word illegal. Illegal words decode as a valid no-op with the
// illegal flag set. Purely combinational.
// The R-extension part follows the paper's format and MASK/MATCH tables;
// the choice of base-ISA subset is this design's own.
module rv_decoder
  import rext_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [4:0] f5;
  logic [XLEN-1:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc   = instr[6:0];
    f3    = instr[14:12];
    f7    = instr[31:25];
    f5    = instr[31:27];
    imm_i = {{(XLEN-12){instr[31]}}, instr[31:20]};
    imm_s = {{(XLEN-12){instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{(XLEN-13){instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {{(XLEN-32){instr[31]}}, instr[31:12], 12'd0};
    imm_j = {{(XLEN-21){instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl            = '0;
    ctrl.valid      = 1'b1;
    ctrl.rs1        = instr[19:15];
    ctrl.rs2        = instr[24:20];
    ctrl.rd         = instr[11:7];
    ctrl.alu_op     = ALU_ADD;
    ctrl.res_sel    = RES_ALU;
    ctrl.mem_funct3 = f3;
    ctrl.br_funct3  = f3;
    ctrl.rm         = instr[14:12];
    ctrl.csr_addr   = instr[31:20];

    unique case (opc)
      OPC_LUI: begin
        ctrl.wb_int = 1'b1; ctrl.alu_b_imm = 1'b1; ctrl.imm = imm_u; ctrl.alu_op = ALU_PASSB;
      end
      OPC_AUIPC: begin
        ctrl.wb_int = 1'b1; ctrl.alu_a_pc = 1'b1; ctrl.alu_b_imm = 1'b1; ctrl.imm = imm_u;
      end
      OPC_JAL: begin
        ctrl.wb_int = 1'b1; ctrl.is_jal = 1'b1; ctrl.imm = imm_j; ctrl.res_sel = RES_PC4;
      end
      OPC_JALR: begin
        ctrl.wb_int = 1'b1; ctrl.is_jalr = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.imm = imm_i;
        ctrl.res_sel = RES_PC4;
        if (f3 != 3'b000) ctrl.illegal = 1'b1;
      end
      OPC_BRANCH: begin
        ctrl.is_branch = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.imm = imm_b;
        if (f3 == 3'b010 || f3 == 3'b011) ctrl.illegal = 1'b1;
      end
      OPC_LOAD: begin
        ctrl.wb_int = 1'b1; ctrl.is_load = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.alu_b_imm = 1'b1;
        ctrl.imm = imm_i;
        if (f3 == 3'b111) ctrl.illegal = 1'b1;
      end
      OPC_STORE: begin
        ctrl.is_store = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.alu_b_imm = 1'b1;
        ctrl.imm = imm_s;
        if (f3[2]) ctrl.illegal = 1'b1;
      end
      OPC_LOADFP: begin
        ctrl.wb_fp = 1'b1; ctrl.is_load = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.alu_b_imm = 1'b1;
        ctrl.imm = imm_i;
        if (f3 != 3'b010) ctrl.illegal = 1'b1;
      end
      OPC_STOREFP: begin
        ctrl.is_store = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.rs2_fp = 1'b1;
        ctrl.alu_b_imm = 1'b1; ctrl.imm = imm_s;
        if (f3 != 3'b010) ctrl.illegal = 1'b1;
      end
      OPC_OPIMM, OPC_OPIMM32: begin
        ctrl.wb_int = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.alu_b_imm = 1'b1; ctrl.imm = imm_i;
        ctrl.word_op = (opc == OPC_OPIMM32);
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b101: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
          default: ctrl.alu_op = ALU_ADD;
        endcase
        if (ctrl.word_op && !(f3 == 3'b000 || f3 == 3'b001 || f3 == 3'b101)) ctrl.illegal = 1'b1;
        if (f3 == 3'b001 && instr[31:26] != 6'd0) ctrl.illegal = 1'b1;
        if (f3 == 3'b101 && {instr[31], instr[29:26]} != 5'd0) ctrl.illegal = 1'b1;
        if (ctrl.word_op && (f3 == 3'b001 || f3 == 3'b101) && instr[25]) ctrl.illegal = 1'b1;
      end
      OPC_OP, OPC_OP32: begin
        ctrl.wb_int = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.word_op = (opc == OPC_OP32);
        unique case (f3)
          3'b000: ctrl.alu_op = instr[30] ? ALU_SUB : ALU_ADD;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b101: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          default: ctrl.alu_op = ALU_ADD;
        endcase
        if (!(f7 == 7'h00 || (f7 == 7'h20 && (f3 == 3'b000 || f3 == 3'b101)))) ctrl.illegal = 1'b1;
        if (ctrl.word_op && !(f3 == 3'b000 || f3 == 3'b001 || f3 == 3'b101)) ctrl.illegal = 1'b1;
      end
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          if (instr == 32'h0010_0073) ctrl.is_ebreak = 1'b1;
          else ctrl.illegal = 1'b1;
        end else if (f3 == 3'b100) begin
          ctrl.illegal = 1'b1;
        end else begin
          ctrl.is_csr  = 1'b1; ctrl.wb_int = 1'b1; ctrl.res_sel = RES_CSR;
          ctrl.csr_op  = f3[1:0];
          ctrl.csr_imm = f3[2];
          ctrl.use_rs1 = ~f3[2];
          ctrl.imm     = XLEN'(instr[19:15]);
        end
      end
      OPC_OPFP: begin
        if (instr[26:25] != 2'b00 || ctrl.rm == 3'b101 || ctrl.rm == 3'b110) begin
          ctrl.illegal = 1'b1;                       // only fmt = S
        end else if ((instr & MASK_RFMAC_S) == MATCH_RFMAC_S) begin
          ctrl.is_rfmac = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
          ctrl.rs1_fp = 1'b1; ctrl.rs2_fp = 1'b1; ctrl.res_sel = RES_FMUL;
        end else if ((instr & MASK_RFSMAC_S) == MATCH_RFSMAC_S) begin
          ctrl.is_rfsmac = 1'b1; ctrl.wb_fp = 1'b1;
        end else begin
          unique case (f5)
            F5_FADD, F5_FSUB: begin
              ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.rs1_fp = 1'b1; ctrl.rs2_fp = 1'b1;
              ctrl.wb_fp = 1'b1; ctrl.res_sel = RES_FADD; ctrl.fsub = (f5 == F5_FSUB);
            end
            F5_FMUL: begin
              ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.rs1_fp = 1'b1; ctrl.rs2_fp = 1'b1;
              ctrl.wb_fp = 1'b1; ctrl.res_sel = RES_FMUL;
            end
            F5_FMVXW: begin
              ctrl.use_rs1 = 1'b1; ctrl.rs1_fp = 1'b1; ctrl.wb_int = 1'b1; ctrl.res_sel = RES_FMVXW;
              if (ctrl.rs2 != 5'd0 || f3 != 3'b000) ctrl.illegal = 1'b1;
            end
            F5_FMVWX: begin
              ctrl.use_rs1 = 1'b1; ctrl.wb_fp = 1'b1; ctrl.res_sel = RES_FMVWX;
              if (ctrl.rs2 != 5'd0 || f3 != 3'b000) ctrl.illegal = 1'b1;
            end
            default: ctrl.illegal = 1'b1;
          endcase
        end
      end
      default: ctrl.illegal = 1'b1;
    endcase

    if (ctrl.illegal) begin
      ctrl.wb_int = 1'b0; ctrl.wb_fp = 1'b0; ctrl.is_load = 1'b0; ctrl.is_store = 1'b0;
      ctrl.is_branch = 1'b0; ctrl.is_jal = 1'b0; ctrl.is_jalr = 1'b0; ctrl.is_csr = 1'b0;
      ctrl.is_rfmac = 1'b0; ctrl.is_rfsmac = 1'b0; ctrl.is_ebreak = 1'b0;
      ctrl.use_rs1 = 1'b0; ctrl.use_rs2 = 1'b0;
    end
    if (ctrl.wb_int && ctrl.rd == 5'd0) ctrl.wb_int = 1'b0;   // x0 writes dropped
  end
endmodule
