// rext_pkg: constants, types and shared functions of the RV64R core.
//
// Holds the instruction encodings of the RV64I subset, the F-extension
// subset and the two R-extension instructions (rfmac.s, rfsmac.s), the
// decoded-control struct that travels down the pipeline, and the IEEE 754
// single-precision rounding/packing function shared by the FP multiplier and
// the FP adder.
//
// The R-extension encodings follow the paper's instruction-format and
// MASK/MATCH tables exactly: opcode OP-FP (0x53), fmt = S (00), funct5 =
// 0x0C (fmac.s, baseline only, not decoded here), 0x0D (rfmac.s), 0x0E
// (rfsmac.s). rfmac.s requires rd = 0; rfsmac.s requires rs1 = rs2 = 0. The
// rm field is left free by both masks. Everything else (the subset of the
// base ISA, the struct layout) is this design's own choice.
package rext_pkg;

  localparam int XLEN = 64;   // RV64R
  localparam int FLEN = 32;   // single precision only

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LUI      = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC    = 7'b0010111;
  localparam logic [6:0] OPC_JAL      = 7'b1101111;
  localparam logic [6:0] OPC_JALR     = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH   = 7'b1100011;
  localparam logic [6:0] OPC_LOAD     = 7'b0000011;
  localparam logic [6:0] OPC_STORE    = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM    = 7'b0010011;
  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] OPC_OPIMM32  = 7'b0011011;
  localparam logic [6:0] OPC_OP32     = 7'b0111011;
  localparam logic [6:0] OPC_SYSTEM   = 7'b1110011;
  localparam logic [6:0] OPC_LOADFP   = 7'b0000111;
  localparam logic [6:0] OPC_STOREFP  = 7'b0100111;
  localparam logic [6:0] OPC_OPFP     = 7'b1010011;   // OP-FP, opcode[6:2] = 0x14

  // ------------------------------------------------------ OP-FP funct5 codes
  localparam logic [4:0] F5_FADD   = 5'h00;
  localparam logic [4:0] F5_FSUB   = 5'h01;
  localparam logic [4:0] F5_FMUL   = 5'h02;
  localparam logic [4:0] F5_RFMAC  = 5'h0D;
  localparam logic [4:0] F5_RFSMAC = 5'h0E;
  localparam logic [4:0] F5_FMVXW  = 5'h1C;
  localparam logic [4:0] F5_FMVWX  = 5'h1E;

  // MASK / MATCH of the R-extension instructions (paper's MASK/MATCH table).
  localparam logic [31:0] MASK_RFMAC_S   = 32'hFE00_0FFF;
  localparam logic [31:0] MATCH_RFMAC_S  = 32'h6800_0053;
  localparam logic [31:0] MASK_RFSMAC_S  = 32'hFFFF_807F;
  localparam logic [31:0] MATCH_RFSMAC_S = 32'h7000_0053;
  // fmul.s, for reference: same opcode, funct5 = 0x02.
  localparam logic [31:0] MASK_FMUL_S    = 32'hFE00_007F;
  localparam logic [31:0] MATCH_FMUL_S   = 32'h1000_0053;

  // ---------------------------------------------------------- rounding mode
  typedef enum logic [2:0] {
    RM_RNE = 3'b000,
    RM_RTZ = 3'b001,
    RM_RDN = 3'b010,
    RM_RUP = 3'b011,
    RM_RMM = 3'b100,
    RM_DYN = 3'b111
  } rm_e;

  localparam logic [31:0] FP_CANON_NAN = 32'h7FC0_0000;

  // ----------------------------------------------------------- ALU control
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  // Which unit produces the EX-stage result.
  typedef enum logic [2:0] {
    RES_ALU,      // integer ALU
    RES_PC4,      // link address of jal/jalr
    RES_FADD,     // fadd.s / fsub.s
    RES_FMUL,     // fmul.s and the product of rfmac.s
    RES_FMVXW,    // fmv.x.w (FP bits -> integer, sign extended)
    RES_FMVWX,    // fmv.w.x (integer bits -> FP)
    RES_CSR       // old CSR value
  } res_sel_e;

  // Decoded control of one instruction.
  typedef struct packed {
    logic        valid;       // a real instruction (not a bubble)
    logic        illegal;     // not recognised; executed as a no-op
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        rs1_fp;      // rs1 read from the FP register file
    logic        rs2_fp;      // rs2 read from the FP register file
    logic        use_rs1;
    logic        use_rs2;
    logic        wb_int;      // writes rd of the integer register file
    logic        wb_fp;       // writes rd of the FP register file
    logic [XLEN-1:0] imm;
    logic        alu_a_pc;    // ALU operand A = PC
    logic        alu_b_imm;   // ALU operand B = immediate
    alu_op_e     alu_op;
    logic        word_op;     // RV64 *W operation: 32-bit result, sign extended
    res_sel_e    res_sel;
    logic        is_load;
    logic        is_store;
    logic [2:0]  mem_funct3;  // size / signedness of the access
    logic        is_branch;
    logic [2:0]  br_funct3;
    logic        is_jal;
    logic        is_jalr;
    logic        is_csr;
    logic [1:0]  csr_op;      // 01 write, 10 set, 11 clear
    logic        csr_imm;     // zimm form
    logic [11:0] csr_addr;
    logic [2:0]  rm;          // rm field of an FP instruction
    logic        fsub;        // negate operand B of the adder
    logic        is_rfmac;    // R-extension: accumulate product into APR
    logic        is_rfsmac;   // R-extension: write APR to rd, clear APR
    logic        is_ebreak;   // stops the core when it retires
  } ctrl_t;

  // ------------------------------------------------------- FP rounding/pack
  // Rounds and packs a finite, non-zero single-precision result.
  //   sgn : sign
  //   e   : biased exponent of the value 1.sig[48:0] (may be <= 0 or >= 255)
  //   sig : significand with its leading one at bit 49
  //   stk : sticky bit of anything already shifted out below sig[0]
  //   rm  : static rounding mode (RNE, RTZ, RDN, RUP, RMM)
  // Gradual underflow: when e <= 0 the significand is shifted right into the
  // subnormal range before rounding. Rounding adds one to the packed
  // {exponent, fraction} so that a carry out of the fraction moves into the
  // exponent (and reaches infinity when it should).
  function automatic logic [31:0] fp_round_pack(input logic sgn,
                                                input logic signed [12:0] e,
                                                input logic [49:0] sig,
                                                input logic stk,
                                                input logic [2:0] rm);
    logic [49:0] s;
    logic        sticky;
    logic [7:0]  ef;
    logic        g, lsb, inc, any;
    logic [30:0] packed_v;
    int          sh;
    s      = sig;
    sticky = stk;
    if (e >= 13'sd255) begin
      // overflow before rounding: infinity or the largest finite value
      if (rm == RM_RTZ || (rm == RM_RDN && !sgn) || (rm == RM_RUP && sgn))
        return {sgn, 8'hFE, 23'h7FFFFF};
      return {sgn, 8'hFF, 23'h0};
    end
    if (e <= 13'sd0) begin
      sh = 1 - int'(e);
      if (sh > 50) sh = 50;
      for (int i = 0; i < 50; i++)
        if (i < sh) sticky |= s[i];
      s  = s >> sh;
      ef = 8'd0;
    end else begin
      ef = e[7:0];
    end
    g   = s[25];
    any = g | sticky | (|s[24:0]);
    lsb = s[26];
    unique case (rm)
      RM_RNE:  inc = g & (lsb | sticky | (|s[24:0]));
      RM_RTZ:  inc = 1'b0;
      RM_RDN:  inc = any & sgn;
      RM_RUP:  inc = any & ~sgn;
      RM_RMM:  inc = g;
      default: inc = g & (lsb | sticky | (|s[24:0]));
    endcase
    packed_v = {ef, s[48:26]} + {30'd0, inc};
    return {sgn, packed_v};
  endfunction

  // Number of leading zeros of a 50-bit value (50 when it is zero).
  function automatic logic [5:0] lzc50(input logic [49:0] v);
    logic [5:0] n;
    n = 6'd50;
    for (int i = 0; i < 50; i++)
      if (v[i]) n = 6'(49 - i);
    return n;
  endfunction

endpackage
