// int_alu: integer ALU and branch comparator of the EX stage (RV64I).
//
// Computes add, sub, shifts, compares and logic operations on XLEN-bit
// operands; with word_op set it performs the RV64 *W form (operation on
// the low 32 bits, result sign-extended to 64 bits). Separately, it
// evaluates the branch condition selected by br_funct3 (beq, bne, blt,
// bge, bltu, bgeu) on the two register operands. Combinational.
// Standard RV64I behaviour; the paper does not describe the integer datapath.
module int_alu
  import rext_pkg::*;
(
  input  alu_op_e         op,
  input  logic            word_op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic [XLEN-1:0] y,
  input  logic [2:0]      br_funct3,
  input  logic [XLEN-1:0] cmp_a,
  input  logic [XLEN-1:0] cmp_b,
  output logic            br_taken
);
  logic [XLEN-1:0] r;
  logic [31:0]     w;
  logic [5:0]      sh;

  always_comb begin
    sh = word_op ? {1'b0, b[4:0]} : b[5:0];
    unique case (op)
      ALU_ADD:   r = a + b;
      ALU_SUB:   r = a - b;
      ALU_SLL:   r = a << sh;
      ALU_SLT:   r = XLEN'($signed(a) < $signed(b));
      ALU_SLTU:  r = XLEN'(a < b);
      ALU_XOR:   r = a ^ b;
      ALU_SRL:   r = word_op ? XLEN'(a[31:0] >> sh) : (a >> sh);
      ALU_SRA:   r = word_op ? XLEN'($signed(a[31:0]) >>> sh) : XLEN'($signed(a) >>> sh);
      ALU_OR:    r = a | b;
      ALU_AND:   r = a & b;
      ALU_PASSB: r = b;
      default:   r = a + b;
    endcase
    w = r[31:0];
    y = word_op ? {{(XLEN-32){w[31]}}, w} : r;

    unique case (br_funct3)
      3'b000:  br_taken = (cmp_a == cmp_b);
      3'b001:  br_taken = (cmp_a != cmp_b);
      3'b100:  br_taken = ($signed(cmp_a) <  $signed(cmp_b));
      3'b101:  br_taken = ($signed(cmp_a) >= $signed(cmp_b));
      3'b110:  br_taken = (cmp_a <  cmp_b);
      3'b111:  br_taken = (cmp_a >= cmp_b);
      default: br_taken = 1'b0;
    endcase
  end
endmodule
