// fcsr: floating-point control and status register (rounding mode only).
//
// Holds frm, the dynamic rounding mode used by FP instructions whose rm
// field is DYN (111), as the paper states the rounding mode is defined in a
// CSR. Supports the Zicsr operations on the F-extension addresses:
//   0x001 fflags : reads zero, writes ignored (no exception flags kept)
//   0x002 frm    : 3-bit rounding mode
//   0x003 fcsr   : {frm, fflags}
// Any other address reads zero and ignores writes.
// Interface: when en is high the CSR instruction in EX performs op
// (01 write, 10 set, 11 clear) with operand wdata; rdata is the old value
// (combinational), and the update lands on the next rising edge. rs1 = x0
// for set/clear means "read only" and is expressed by the caller through
// wdata = 0. Reset value: RNE. Only frm is this paper's concern; the
// address map is the standard RISC-V one and the flag-less implementation
// is this design's simplification.
module fcsr
  import rext_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [1:0]      op,
  input  logic [11:0]     addr,
  input  logic [XLEN-1:0] wdata,
  output logic [XLEN-1:0] rdata,
  output logic [2:0]      frm
);
  logic [7:0]      newv;   // only frm/fflags bits are kept

  always_comb begin
    unique case (addr)
      12'h002: rdata = XLEN'(frm);
      12'h003: rdata = XLEN'({frm, 5'b00000});
      default: rdata = '0;
    endcase
    unique case (op)
      2'b01:   newv = wdata[7:0];
      2'b10:   newv = rdata[7:0] | wdata[7:0];
      2'b11:   newv = rdata[7:0] & ~wdata[7:0];
      default: newv = rdata[7:0];
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) frm <= 3'b000;
    else if (en) begin
      if (addr == 12'h002)      frm <= newv[2:0];
      else if (addr == 12'h003) frm <= newv[7:5];
    end
  end
endmodule
