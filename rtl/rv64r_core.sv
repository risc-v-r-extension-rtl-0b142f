// rv64r_core: 5-stage in-order RV64 pipeline with the R-extension.
//
// The core runs a subset of RV64I plus single-precision F instructions and
// the two R-extension instructions that speed up multiply-accumulate loops:
//   rfmac.s rs1, rs2 : APR <- APR + f[rs1] * f[rs2]
//   rfsmac.s rd      : f[rd] <- APR ; APR <- 0
// Stages: IF (fetch), ID (decode, register read, load-use interlock),
// EX (integer ALU, branch resolution, FP multiplier, FP adder, frm CSR),
// MEM (data memory, or for rfmac.s/rfsmac.s the rented execution stage
// R_EX with its accumulator), WB (register write).
// The key idea is that a MAC never needs more stages or a longer EX stage:
// the multiply uses EX, the accumulate "rents" the MEM stage, which an
// arithmetic instruction would otherwise leave idle, and the running sum
// lives in the architectural pipeline register (APR) beside MEM/WB instead
// of in a register or in memory. Back-to-back rfmac.s therefore issue one
// per cycle with no hazard: each adds to the APR value the previous one
// wrote at the end of its MEM cycle. rfsmac.s takes the APR value in MEM,
// clears the APR there, and writes the value to f[rd] in WB; younger
// instructions get it by ordinary forwarding.
//
// Interface: imem_* is a combinational-read instruction port (address out,
// 32-bit word back in the same cycle); dmem_* is a combinational-read,
// synchronous-write 64-bit data port addressed by byte address with byte
// enables on the aligned doubleword. Misaligned accesses are not supported.
// halted rises after an ebreak retires; retire pulses once per retired
// instruction (for IPC measurement). Reset is synchronous, active low;
// execution starts at RESET_PC.
// Timing: one instruction per cycle except a one-cycle bubble on a
// load-use dependence and a two-cycle bubble on a taken branch or jump
// (resolved in EX, fetch predicts not-taken).
//
// From the paper: the five stages, rfmac.s/rfsmac.s encodings, multiply in
// EX, accumulate in MEM (R_EX), the APR with its zero/accumulate input mux,
// its feedback to R_EX and its path to the register file via rfsmac.s, the
// rounding mode held in a CSR. This design's own choices: the base-ISA
// subset, the memory ports (the paper simulates caches and DRAM), branch
// handling, forwarding details, and XLEN = 64 (the paper evaluates RV64R in
// simulation and reports an RV32R FPGA build).
module rv64r_core
  import rext_pkg::*;
#(
  parameter logic [63:0] RESET_PC = 64'h0
)(
  input  logic            clk,
  input  logic            rst_n,
  // instruction memory
  output logic [XLEN-1:0] imem_addr,
  input  logic [31:0]     imem_rdata,
  // data memory
  output logic            dmem_req,
  output logic            dmem_we,
  output logic [XLEN-1:0] dmem_addr,
  output logic [7:0]      dmem_be,
  output logic [63:0]     dmem_wdata,
  input  logic [63:0]     dmem_rdata,
  // status
  output logic            halted,
  output logic            retire
);

  // ------------------------------------------------------ pipeline registers
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
  } ifid_t;

  typedef struct packed {
    ctrl_t           c;
    logic [XLEN-1:0] pc;
    logic [XLEN-1:0] op1;
    logic [XLEN-1:0] op2;
  } idex_t;

  typedef struct packed {
    ctrl_t           c;
    logic [XLEN-1:0] result;
    logic [XLEN-1:0] store_data;
    logic [2:0]      rm_eff;
  } exmem_t;

  typedef struct packed {
    ctrl_t           c;
    logic [XLEN-1:0] value;
  } memwb_t;

  ifid_t  ifid;
  idex_t  idex;
  exmem_t exmem;
  memwb_t memwb;

  logic [XLEN-1:0] pc_q;
  logic            stall, redirect, ebreak_ex, fetch_stop;
  logic [XLEN-1:0] redirect_pc;

  // ----------------------------------------------------------------- IF
  assign imem_addr = pc_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc_q       <= RESET_PC;
      fetch_stop <= 1'b0;
    end else begin
      if (ebreak_ex) fetch_stop <= 1'b1;
      if (redirect)                                pc_q <= redirect_pc;
      else if (!stall && !fetch_stop && !ebreak_ex) pc_q <= pc_q + XLEN'(4);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ifid <= '0;
    end else if (redirect || ebreak_ex || fetch_stop) begin
      ifid <= '0;
    end else if (!stall) begin
      ifid.valid <= 1'b1;
      ifid.pc    <= pc_q;
      ifid.instr <= imem_rdata;
    end
  end

  // ----------------------------------------------------------------- ID
  ctrl_t           id_c_raw, id_c;
  logic [XLEN-1:0] rf_rd1, rf_rd2;
  logic [FLEN-1:0] ff_rd1, ff_rd2;
  logic [1:0]      fwd_a, fwd_b;
  logic            wb_int_we, wb_fp_we;
  logic [XLEN-1:0] wb_value;

  rv_decoder u_dec (.instr(ifid.instr), .ctrl(id_c_raw));

  always_comb begin
    id_c = id_c_raw;
    if (!ifid.valid) id_c = '0;
  end

  int_regfile u_xrf (
    .clk, .rst_n,
    .raddr1(id_c.rs1), .raddr2(id_c.rs2), .rdata1(rf_rd1), .rdata2(rf_rd2),
    .we(wb_int_we), .waddr(memwb.c.rd), .wdata(wb_value)
  );

  fp_regfile u_frf (
    .clk, .rst_n,
    .raddr1(id_c.rs1), .raddr2(id_c.rs2), .rdata1(ff_rd1), .rdata2(ff_rd2),
    .we(wb_fp_we), .waddr(memwb.c.rd), .wdata(wb_value[FLEN-1:0])
  );

  hazard_unit u_hz (
    .id_rs1(id_c.rs1), .id_rs2(id_c.rs2), .id_use_rs1(id_c.use_rs1), .id_use_rs2(id_c.use_rs2),
    .id_rs1_fp(id_c.rs1_fp), .id_rs2_fp(id_c.rs2_fp),
    .ex_rs1(idex.c.rs1), .ex_rs2(idex.c.rs2), .ex_use_rs1(idex.c.use_rs1),
    .ex_use_rs2(idex.c.use_rs2), .ex_rs1_fp(idex.c.rs1_fp), .ex_rs2_fp(idex.c.rs2_fp),
    .ex_rd(idex.c.rd), .ex_wb_int(idex.c.wb_int), .ex_wb_fp(idex.c.wb_fp),
    .ex_is_load(idex.c.is_load),
    .mem_rd(exmem.c.rd), .mem_wb_int(exmem.c.wb_int), .mem_wb_fp(exmem.c.wb_fp),
    .wb_rd(memwb.c.rd), .wb_wb_int(memwb.c.wb_int), .wb_wb_fp(memwb.c.wb_fp),
    .fwd_a, .fwd_b, .load_use_stall(stall)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || redirect || stall || ebreak_ex) begin
      idex <= '0;
    end else begin
      idex.c   <= id_c;
      idex.pc  <= ifid.pc;
      idex.op1 <= id_c.rs1_fp ? XLEN'(ff_rd1) : rf_rd1;
      idex.op2 <= id_c.rs2_fp ? XLEN'(ff_rd2) : rf_rd2;
    end
  end

  // ----------------------------------------------------------------- EX
  logic [XLEN-1:0] mem_fwd_value;
  logic [XLEN-1:0] ex_a, ex_b, alu_a, alu_b, alu_y, ex_result, csr_rdata, csr_wdata;
  logic [31:0]     fmul_y, fadd_y;
  logic [2:0]      frm, rm_eff;
  logic            br_taken;
  logic [31:0]     apr_q;

  always_comb begin
    ex_a = (fwd_a == 2'b01) ? mem_fwd_value : (fwd_a == 2'b10) ? wb_value : idex.op1;
    ex_b = (fwd_b == 2'b01) ? mem_fwd_value : (fwd_b == 2'b10) ? wb_value : idex.op2;
    alu_a  = idex.c.alu_a_pc  ? idex.pc    : ex_a;
    alu_b  = idex.c.alu_b_imm ? idex.c.imm : ex_b;
    rm_eff = (idex.c.rm == RM_DYN) ? frm : idex.c.rm;
    csr_wdata = idex.c.csr_imm ? idex.c.imm : ex_a;
  end

  int_alu u_alu (
    .op(idex.c.alu_op), .word_op(idex.c.word_op), .a(alu_a), .b(alu_b), .y(alu_y),
    .br_funct3(idex.c.br_funct3), .cmp_a(ex_a), .cmp_b(ex_b), .br_taken
  );

  fp32_mul u_fmul (.a(ex_a[31:0]), .b(ex_b[31:0]), .rm(rm_eff), .y(fmul_y));
  fp32_add u_fadd (.a(ex_a[31:0]), .b(ex_b[31:0]), .sub(idex.c.fsub), .rm(rm_eff), .y(fadd_y));

  fcsr u_fcsr (
    .clk, .rst_n,
    .en(idex.c.valid & idex.c.is_csr), .op(idex.c.csr_op), .addr(idex.c.csr_addr),
    .wdata(csr_wdata), .rdata(csr_rdata), .frm
  );

  always_comb begin
    unique case (idex.c.res_sel)
      RES_ALU:   ex_result = alu_y;
      RES_PC4:   ex_result = idex.pc + XLEN'(4);
      RES_FADD:  ex_result = XLEN'(fadd_y);
      RES_FMUL:  ex_result = XLEN'(fmul_y);
      RES_FMVXW: ex_result = {{(XLEN-32){ex_a[31]}}, ex_a[31:0]};
      RES_FMVWX: ex_result = XLEN'(ex_a[31:0]);
      RES_CSR:   ex_result = csr_rdata;
      default:   ex_result = alu_y;
    endcase
    redirect    = idex.c.valid &&
                  (idex.c.is_jal || idex.c.is_jalr || (idex.c.is_branch && br_taken));
    redirect_pc = idex.c.is_jalr ? ((ex_a + idex.c.imm) & ~XLEN'(1)) : (idex.pc + idex.c.imm);
    ebreak_ex   = idex.c.valid && idex.c.is_ebreak;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      exmem <= '0;
    end else begin
      exmem.c          <= idex.c;
      exmem.result     <= ex_result;
      exmem.store_data <= ex_b;
      exmem.rm_eff     <= rm_eff;
    end
  end

  // ----------------------------------------------------- MEM / rented R_EX
  logic [31:0]     acc_sum, rex_wb_value;
  logic            acc_en, apr_clr, mem_idle;
  logic [2:0]      off;
  logic [63:0]     ld_raw;
  logic [XLEN-1:0] ld_value, mem_result;

  r_ex_stage u_rex (
    .valid(exmem.c.valid), .is_rfmac(exmem.c.is_rfmac), .is_rfsmac(exmem.c.is_rfsmac),
    .product(exmem.result[31:0]), .rm(exmem.rm_eff), .apr_q,
    .acc_sum, .acc_en, .apr_clr, .wb_value(rex_wb_value), .mem_idle
  );

  apr u_apr (.clk, .rst_n, .acc_en, .clr(apr_clr), .acc_sum, .apr_q);

  always_comb begin
    off        = exmem.result[2:0];
    dmem_req   = exmem.c.valid && (exmem.c.is_load || exmem.c.is_store);
    dmem_we    = exmem.c.valid && exmem.c.is_store;
    dmem_addr  = exmem.result;
    dmem_wdata = exmem.store_data << {off, 3'b000};
    unique case (exmem.c.mem_funct3[1:0])
      2'b00:   dmem_be = 8'h01 << off;
      2'b01:   dmem_be = 8'h03 << off;
      2'b10:   dmem_be = 8'h0F << off;
      default: dmem_be = 8'hFF;
    endcase
    ld_raw = dmem_rdata >> {off, 3'b000};
    unique case (exmem.c.mem_funct3)
      3'b000:  ld_value = {{(XLEN-8){ld_raw[7]}},   ld_raw[7:0]};
      3'b001:  ld_value = {{(XLEN-16){ld_raw[15]}}, ld_raw[15:0]};
      3'b010:  ld_value = exmem.c.wb_fp ? XLEN'(ld_raw[31:0])
                                        : {{(XLEN-32){ld_raw[31]}}, ld_raw[31:0]};
      3'b100:  ld_value = XLEN'(ld_raw[7:0]);
      3'b101:  ld_value = XLEN'(ld_raw[15:0]);
      3'b110:  ld_value = XLEN'(ld_raw[31:0]);
      default: ld_value = ld_raw;
    endcase
    mem_fwd_value = exmem.c.is_rfsmac ? XLEN'(rex_wb_value) : exmem.result;
    mem_result    = exmem.c.is_load ? ld_value : mem_fwd_value;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      memwb <= '0;
    end else begin
      memwb.c     <= exmem.c;
      memwb.value <= mem_result;
    end
  end

  // ----------------------------------------------------------------- WB
  always_comb begin
    wb_value  = memwb.value;
    wb_int_we = memwb.c.valid && memwb.c.wb_int;
    wb_fp_we  = memwb.c.valid && memwb.c.wb_fp;
    retire    = memwb.c.valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                             halted <= 1'b0;
    else if (memwb.c.valid && memwb.c.is_ebreak) halted <= 1'b1;
  end

  // ------------------------------------------------------------- assertions
  // The rented MEM stage never drives the data memory.
  a_rex_no_mem: assert property (@(posedge clk) disable iff (!rst_n) !(mem_idle && dmem_req));
  // rfmac.s never writes a register; rfsmac.s never reads one.
  a_rfmac_no_wb: assert property (@(posedge clk) disable iff (!rst_n)
                   !(idex.c.valid && idex.c.is_rfmac && (idex.c.wb_int || idex.c.wb_fp)));
  a_rfsmac_no_src: assert property (@(posedge clk) disable iff (!rst_n)
                   !(idex.c.valid && idex.c.is_rfsmac && (idex.c.use_rs1 || idex.c.use_rs2)));

endmodule
