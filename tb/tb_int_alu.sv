// tb_int_alu: testbench of the integer ALU and branch comparator. Random
// operands (with a bias to equal and sign-boundary values) for every
// operation, in 64-bit and *W form, and every branch condition are
// compared with expressions evaluated here.
module tb_int_alu;
  import rext_pkg::*;
  alu_op_e op;
  logic word_op;
  logic [63:0] a, b, y, cmp_a, cmp_b, e;
  logic [2:0] br_funct3;
  logic br_taken, eb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  int_alu dut (.*);
  function automatic logic [63:0] rnd64();
    case ($urandom_range(3))
      0: return {$urandom, $urandom};
      1: return 64'h8000_0000_0000_0000 + 64'($urandom_range(3)) - 64'd1;
      2: return 64'($urandom_range(70));
      default: return 64'hFFFF_FFFF_0000_0000 | 64'($urandom);
    endcase
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 6000; i++) begin
      logic [31:0] w;
      logic [63:0] r;
      op = alu_op_e'($urandom_range(10)); word_op = 1'($urandom);
      a = rnd64(); b = rnd64();
      cmp_a = rnd64(); cmp_b = (i % 4 == 0) ? cmp_a : rnd64();
      br_funct3 = 3'($urandom);
      #1;
      case (op)
        ALU_ADD:  r = a + b;
        ALU_SUB:  r = a - b;
        ALU_SLL:  r = word_op ? 64'(a[31:0] << b[4:0]) : a << b[5:0];
        ALU_SLT:  r = {63'd0, $signed(a) < $signed(b)};
        ALU_SLTU: r = {63'd0, a < b};
        ALU_XOR:  r = a ^ b;
        ALU_SRL:  r = word_op ? 64'(a[31:0] >> b[4:0]) : a >> b[5:0];
        ALU_SRA:  r = word_op ? 64'($signed(a[31:0]) >>> b[4:0]) : $signed(a) >>> b[5:0];
        ALU_OR:   r = a | b;
        ALU_AND:  r = a & b;
        default:  r = b;
      endcase
      w = r[31:0];
      e = word_op ? {{32{w[31]}}, w} : r;
      case (br_funct3)
        0: eb = cmp_a == cmp_b;
        1: eb = cmp_a != cmp_b;
        4: eb = $signed(cmp_a) < $signed(cmp_b);
        5: eb = $signed(cmp_a) >= $signed(cmp_b);
        6: eb = cmp_a < cmp_b;
        7: eb = cmp_a >= cmp_b;
        default: eb = 0;
      endcase
      checks += 2;
      if (y !== e) begin failures++; if (failures < 6) $display("FAIL op %s w%0d %h %h: %h vs %h", op.name(), word_op, a, b, y, e); end
      if (br_taken !== eb) begin failures++; if (failures < 6) $display("FAIL br %0d", br_funct3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
