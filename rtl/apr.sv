// apr: architectural pipeline register (APR) of the R-extension.
//
// A 32-bit register that sits beside the MEM/WB pipeline register and holds
// the running single-precision partial sum of a chain of rfmac.s
// instructions. Its input multiplexer chooses between the new sum coming
// from the rented execution stage (R_EX) when an rfmac.s leaves the MEM
// stage, and zero when an rfsmac.s leaves the MEM stage (the partial sum
// is handed to write-back in the same cycle and the register is cleared for
// the next output). Otherwise it holds.
// Interface: acc_en loads acc_sum; clr loads zero (clr wins if both were
// ever asserted, which the pipeline never does). apr_q is the registered
// value, read by R_EX and by the write-back path of rfsmac.s.
// Timing: updates on the rising clock edge at the end of the MEM cycle, so
// an rfmac.s or rfsmac.s that follows in the very next cycle sees the new
// value with no stall. Reset (synchronous, active low rst_n) clears it;
// the paper says only that it is reset by rfsmac.s, the power-on reset is
// this design's choice.
module apr
  import rext_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acc_en,
  input  logic        clr,
  input  logic [31:0] acc_sum,
  output logic [31:0] apr_q
);
  logic [31:0] apr_d;

  always_comb begin
    apr_d = apr_q;
    if (clr)         apr_d = 32'd0;
    else if (acc_en) apr_d = acc_sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) apr_q <= 32'd0;
    else        apr_q <= apr_d;
  end
endmodule
