// int_regfile: integer register file x0..x31 of the RV64 pipeline.
//
// Two combinational read ports used in ID and one write port used in WB.
// x0 always reads zero. A write and a read of the same register in the
// same cycle return the value being written (write-through), so the
// pipeline needs no WB-to-ID forwarding path. Registers are reset to zero.
// Standard 5-stage RISC-V practice; the paper only draws the register file.
module int_regfile
  import rext_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      raddr1,
  input  logic [4:0]      raddr2,
  output logic [XLEN-1:0] rdata1,
  output logic [XLEN-1:0] rdata2,
  input  logic            we,
  input  logic [4:0]      waddr,
  input  logic [XLEN-1:0] wdata
);
  logic [XLEN-1:0] regs [32];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && waddr != 5'd0) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata1 = (raddr1 == 5'd0) ? '0 : (we && waddr == raddr1) ? wdata : regs[raddr1];
    rdata2 = (raddr2 == 5'd0) ? '0 : (we && waddr == raddr2) ? wdata : regs[raddr2];
  end
endmodule
