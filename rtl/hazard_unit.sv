// hazard_unit: operand forwarding and interlock control of the pipeline.
//
// Forwarding: for each of the two source operands of the instruction in EX
// it selects the newest producer among the instruction in MEM (EX/MEM
// register) and the one in WB (MEM/WB register); a producer matches when
// its destination is in the same register file (integer or FP) and has the
// same index (integer x0 never matches). The fwd codes are 00 register
// file value, 01 from MEM, 10 from WB. The register files write through,
// so WB-to-ID needs no path here.
// Interlock: a load (integer or FP) in EX whose destination is read by the
// instruction in ID stalls IF and ID one cycle (load-use bubble), since its
// data only exists at the end of MEM.
// The R-extension needs no interlock: rfmac.s writes only the APR, which
// the next rfmac.s reads in MEM one cycle after it was written, and the
// APR value of rfsmac.s is already available in MEM (it is a register), so
// rfsmac.s forwards from MEM like an ALU result.
// Combinational. Standard 5-stage practice; the paper mentions
// conventional forwarding but does not give the unit.
module hazard_unit
  import rext_pkg::*;
(
  // instruction in ID
  input  logic [4:0] id_rs1,
  input  logic [4:0] id_rs2,
  input  logic       id_use_rs1,
  input  logic       id_use_rs2,
  input  logic       id_rs1_fp,
  input  logic       id_rs2_fp,
  // instruction in EX
  input  logic [4:0] ex_rs1,
  input  logic [4:0] ex_rs2,
  input  logic       ex_use_rs1,
  input  logic       ex_use_rs2,
  input  logic       ex_rs1_fp,
  input  logic       ex_rs2_fp,
  input  logic [4:0] ex_rd,
  input  logic       ex_wb_int,
  input  logic       ex_wb_fp,
  input  logic       ex_is_load,
  // instruction in MEM
  input  logic [4:0] mem_rd,
  input  logic       mem_wb_int,
  input  logic       mem_wb_fp,
  // instruction in WB
  input  logic [4:0] wb_rd,
  input  logic       wb_wb_int,
  input  logic       wb_wb_fp,
  // outputs
  output logic [1:0] fwd_a,
  output logic [1:0] fwd_b,
  output logic       load_use_stall
);
  function automatic logic hit(input logic [4:0] rs, input logic use_rs, input logic rs_fp,
                               input logic [4:0] rd, input logic w_int, input logic w_fp);
    return use_rs && (rs == rd) && (rs_fp ? w_fp : (w_int && rd != 5'd0));
  endfunction

  always_comb begin
    fwd_a = 2'b00;
    fwd_b = 2'b00;
    if (hit(ex_rs1, ex_use_rs1, ex_rs1_fp, mem_rd, mem_wb_int, mem_wb_fp))      fwd_a = 2'b01;
    else if (hit(ex_rs1, ex_use_rs1, ex_rs1_fp, wb_rd, wb_wb_int, wb_wb_fp))    fwd_a = 2'b10;
    if (hit(ex_rs2, ex_use_rs2, ex_rs2_fp, mem_rd, mem_wb_int, mem_wb_fp))      fwd_b = 2'b01;
    else if (hit(ex_rs2, ex_use_rs2, ex_rs2_fp, wb_rd, wb_wb_int, wb_wb_fp))    fwd_b = 2'b10;
    load_use_stall = ex_is_load &&
                     (hit(id_rs1, id_use_rs1, id_rs1_fp, ex_rd, ex_wb_int, ex_wb_fp) ||
                      hit(id_rs2, id_use_rs2, id_rs2_fp, ex_rd, ex_wb_int, ex_wb_fp));
  end
endmodule
