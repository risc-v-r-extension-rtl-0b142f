// r_ex_stage: rented execution stage (R_EX) of the R-extension.
//
// The MEM stage of the 5-stage pipeline is "rented" by rfmac.s and
// rfsmac.s: instead of accessing data memory, the stage runs an FP adder
// that adds the product computed one cycle earlier in EX to the value in
// the architectural pipeline register (APR). The stage turns the decoded
// control of the instruction in MEM into the APR controls:
//   rfmac.s  : acc_en = 1, acc_sum = APR + product (rounded with rm)
//   rfsmac.s : apr_clr = 1, wb_value = APR (written to rd in WB)
// Both instructions leave the data-memory port idle (mem_idle = 1).
// Interface: valid/is_rfmac/is_rfsmac of the instruction in MEM, its
// product (the EX result), rm (resolved static rounding mode), apr_q.
// Combinational; the APR register itself is the separate apr module.
// The adder position, the operands and the zero/accumulate choice follow
// the paper's dataflow figure; using the instruction's own rm for the
// accumulation is this design's choice.
module r_ex_stage
  import rext_pkg::*;
(
  input  logic        valid,
  input  logic        is_rfmac,
  input  logic        is_rfsmac,
  input  logic [31:0] product,
  input  logic [2:0]  rm,
  input  logic [31:0] apr_q,
  output logic [31:0] acc_sum,
  output logic        acc_en,
  output logic        apr_clr,
  output logic [31:0] wb_value,
  output logic        mem_idle
);
  fp32_add u_acc (
    .a   (apr_q),
    .b   (product),
    .sub (1'b0),
    .rm  (rm),
    .y   (acc_sum)
  );

  always_comb begin
    acc_en   = valid & is_rfmac;
    apr_clr  = valid & is_rfsmac;
    wb_value = apr_q;
    mem_idle = valid & (is_rfmac | is_rfsmac);
  end
endmodule
