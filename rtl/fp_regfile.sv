// fp_regfile: single-precision floating-point register file f0..f31.
//
// Two combinational read ports used in ID (for fadd.s, fmul.s, rfmac.s,
// fsw, fmv.x.w) and one write port used in WB (flw, arithmetic results,
// fmv.w.x, and the APR value delivered by rfsmac.s). Unlike x0, f0 is an
// ordinary register. Same-cycle write and read of a register return the
// written value (write-through). Reset clears all registers (this design's
// choice; the paper only draws the register file).
module fp_regfile
  import rext_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      raddr1,
  input  logic [4:0]      raddr2,
  output logic [FLEN-1:0] rdata1,
  output logic [FLEN-1:0] rdata2,
  input  logic            we,
  input  logic [4:0]      waddr,
  input  logic [FLEN-1:0] wdata
);
  logic [FLEN-1:0] regs [32];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata1 = (we && waddr == raddr1) ? wdata : regs[raddr1];
    rdata2 = (we && waddr == raddr2) ? wdata : regs[raddr2];
  end
endmodule
