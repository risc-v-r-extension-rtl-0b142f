// tb_conv_harness: end-to-end test of rv64r_core on a convolution layer.
//
// Builds a program for the core with the encoders of tb_rv_asm, loads it
// and random single-precision data into a behavioural memory (one array
// behind both ports, combinational read, write on the clock edge), runs it
// to ebreak and checks every stored result against a reference computed
// here with tb_fp_ref.
// The program, in order:
//   1. (DIRECTED = 1) short directed tests: RV64 integer ops and *W sign
//      extension, ld/sd with a load-use dependence, fmv/fmul/fsub with the
//      dynamic rounding mode, eight back-to-back rfmac.s followed at once by
//      rfsmac.s and an fsw that takes the rfsmac.s value by forwarding, a
//      second rfsmac.s that must read the cleared APR, frm CSR access, jal.
//   2. Convolution, R-extension form: the inner loop is flw, flw, rfmac.s;
//      after each output rfsmac.s + fsw (the paper's code listing (c)).
//   3. Convolution, plain F form: flw, flw, fmul.s, flw, fadd.s, fsw in the
//      inner loop (the paper's RV64F listing (a)).
//   4. (DIRECTED = 1) frm set to round-toward-zero, R-extension form again.
// Output geometry follows the paper's loop nest: H = HIN-HF+1 positions
// stepped by S, Output[i][j/S][k/S] += Input[l][j+m][k+n]*Filter[i][l][m][n].
// Phase boundaries are marked by stores to MARK; the harness counts cycles,
// retired instructions and data-memory accesses per phase, requires the
// R-extension phase to take fewer cycles and fewer memory accesses than
// the F phase, and requires every pipeline mechanism (load-use stall, taken
// branch flush, forwarding from MEM and WB, APR accumulate, back-to-back
// rfmac.s, rfsmac.s right after rfmac.s, rfsmac.s value forwarded, APR
// clear, frm change, halt) to have happened at least once.
module tb_conv_harness #(
  parameter int M   = 2,
  parameter int C   = 2,
  parameter int HIN = 6,
  parameter int WIN = 6,
  parameter int HF  = 3,
  parameter int WF  = 3,
  parameter int S   = 1,
  parameter bit DIRECTED = 1,
  parameter bit RUN_F    = 1,
  parameter int MAX_CYCLES = 2_000_000,
  parameter bit STANDALONE = 1
)(
  output bit done,
  output int n_checks,
  output int n_failures
);
  import tb_fp_ref::*;
  import tb_rv_asm::*;

  localparam int HO = (HIN - HF) / S + 1;
  localparam int WO = (WIN - WF) / S + 1;
  localparam int NOUT = M * HO * WO;
  localparam int MEM_WORDS = 1 << 17;           // 1 MiB
  localparam int IN_BASE   = 32'h10000;
  localparam int FLT_BASE  = 32'h40000;
  localparam int OUTR_BASE = 32'h50000;
  localparam int OUTF_BASE = 32'h70000;
  localparam int OUTZ_BASE = 32'h90000;
  localparam int RES_BASE  = 32'hE0000;
  localparam int MARK      = 32'hF0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] imem_addr, dmem_addr, dmem_wdata, dmem_rdata;
  logic [31:0] imem_rdata;
  logic        dmem_req, dmem_we, halted, retire;
  logic [7:0]  dmem_be;
  logic [63:0] mem [MEM_WORDS];

  rv64r_core dut (
    .clk, .rst_n, .imem_addr, .imem_rdata,
    .dmem_req, .dmem_we, .dmem_addr, .dmem_be, .dmem_wdata, .dmem_rdata,
    .halted, .retire
  );

  // ------------------------------------------------------ behavioural memory
  always_comb begin
    logic [63:0] w;
    w          = mem[imem_addr[19:3]];
    imem_rdata = imem_addr[2] ? w[63:32] : w[31:0];
    dmem_rdata = mem[dmem_addr[19:3]];
  end
  always_ff @(posedge clk) begin
    if (dmem_req && dmem_we)
      for (int i = 0; i < 8; i++)
        if (dmem_be[i]) mem[dmem_addr[19:3]][8*i +: 8] <= dmem_wdata[8*i +: 8];
  end

  function automatic logic [31:0] rd32(input int addr);
    logic [63:0] w; w = mem[addr >> 3];
    return addr[2] ? w[63:32] : w[31:0];
  endfunction
  function automatic void wr32(input int addr, input logic [31:0] v);
    if (addr[2]) mem[addr >> 3][63:32] = v; else mem[addr >> 3][31:0] = v;
  endfunction

  // ------------------------------------------------------------ assembler
  int pc_words = 0;
  function automatic void emit(input logic [31:0] ins);
    wr32(pc_words * 4, ins);
    pc_words++;
  endfunction
  function automatic void li(input int rd, input int val);
    int hi, lo;
    hi = (val + 32'h800) >>> 12;
    lo = val - (hi << 12);
    emit(lui(rd, hi));
    emit(addiw(rd, rd, lo));
  endfunction
  function automatic int here(); return pc_words; endfunction
  function automatic int back(input int target); return (target - pc_words) * 4; endfunction

  // registers
  localparam int S0 = 8, S1 = 9, S2 = 18, S3 = 19, S4 = 20, S5 = 21, S6 = 22, S7 = 23, S8 = 24;
  localparam int A0 = 10, A1 = 11, A2 = 12, A3 = 13, A4 = 14, A5 = 15, A6 = 16;
  localparam int T0 = 5, T1 = 6, T2 = 7, T3 = 28, T4 = 29, T5 = 30;
  localparam int FA2 = 12, FA3 = 13, FA4 = 14, FA5 = 15;

  function automatic void mark(input int phase);
    li(S8, phase);
    li(A0, MARK);
    emit(sd(S8, A0, 0));
  endfunction

  // Convolution loop nest; rext = 1: rfmac.s/rfsmac.s form, 0: fmul/fadd form.
  function automatic void emit_conv(input bit rext, input int out_base);
    int li_, lj, lk, ll, lm, ln;
    li(S0, IN_BASE);  li(S1, FLT_BASE); li(S2, out_base);
    li(S3, 4 * WIN);  li(S4, 4 * HIN * WIN); li(S5, 4 * S); li(S6, 4 * S * WIN);
    li(S7, 4 * C * HF * WF);
    emit(addi(A0, S1, 0));
    li(T0, M);
    li_ = here();
      emit(addi(A1, S0, 0)); li(T1, HO);
      lj = here();
        emit(addi(A2, A1, 0)); li(T2, WO);
        lk = here();
          emit(addi(A6, A0, 0)); emit(addi(A3, A2, 0)); li(T3, C);
          ll = here();
            emit(addi(A4, A3, 0)); li(T4, HF);
            lm = here();
              emit(addi(A5, A4, 0)); li(T5, WF);
              ln = here();
                emit(flw(FA5, A5, 0));
                emit(flw(FA4, A6, 0));
                if (rext) begin
                  emit(rfmac_s(FA5, FA4));
                end else begin
                  emit(fmul_s(FA3, FA5, FA4));
                  emit(flw(FA2, S2, 0));
                  emit(fadd_s(FA2, FA2, FA3));
                  emit(fsw(FA2, S2, 0));
                end
                emit(addi(A5, A5, 4)); emit(addi(A6, A6, 4));
                emit(addi(T5, T5, -1)); emit(bne(T5, 0, back(ln)));
              emit(add(A4, A4, S3)); emit(addi(T4, T4, -1)); emit(bne(T4, 0, back(lm)));
            emit(add(A3, A3, S4)); emit(addi(T3, T3, -1)); emit(bne(T3, 0, back(ll)));
          if (rext) begin
            emit(rfsmac_s(FA5));
            emit(fsw(FA5, S2, 0));
          end
          emit(addi(S2, S2, 4));
          emit(add(A2, A2, S5)); emit(addi(T2, T2, -1)); emit(bne(T2, 0, back(lk)));
        emit(add(A1, A1, S6)); emit(addi(T1, T1, -1)); emit(bne(T1, 0, back(lj)));
      emit(add(A0, A0, S7)); emit(addi(T0, T0, -1)); emit(bne(T0, 0, back(li_)));
  endfunction

  function automatic void emit_directed();
    int skip;
    li(31, RES_BASE);
    li(1, 32'h12345678);
    emit(slli(2, 1, 4));
    emit(sd(2, 31, 0));                    // 0x123456780
    li(4, 32'h7FFFFFFF);
    emit(addiw(5, 4, 1));
    emit(sd(5, 31, 8));                    // 0xFFFFFFFF80000000
    emit(sub(6, 2, 1));
    emit(sd(6, 31, 16));                   // 0x123456780 - 0x12345678
    emit(ld(7, 31, 0));
    emit(addi(7, 7, 1));                   // load-use
    emit(sd(7, 31, 24));                   // 0x123456781
    li(8, 32'h3FC00000);  emit(fmv_w_x(1, 8));   // 1.5
    li(9, 32'h40200000);  emit(fmv_w_x(2, 9));   // 2.5
    emit(fmul_s(3, 1, 2));                 // 3.75
    emit(fsub_s(4, 3, 1));                 // 2.25
    emit(fmv_x_w(10, 4));
    emit(sd(10, 31, 32));                  // 0x40100000
    emit(fsw(3, 31, 40));                  // 0x40700000
    for (int i = 0; i < 8; i++) emit(rfmac_s(1, 2));
    emit(rfsmac_s(5));                     // 8 * 3.75 = 30
    emit(fsw(5, 31, 44));                  // 0x41F00000 (forwarded from MEM)
    emit(rfsmac_s(6));                     // APR was cleared: 0
    emit(fsw(6, 31, 48));
    emit(csrrwi(11, 12'h002, 3));
    emit(csrrs(12, 12'h002, 0));
    emit(sd(12, 31, 56));                  // 3
    emit(csrrwi(0, 12'h002, 0));
    emit(jal(0, 8));
    emit(addi(13, 0, 99));                 // skipped
    emit(sd(13, 31, 64));                  // 0
    skip = 0;
  endfunction

  // ------------------------------------------------------------ reference
  logic [31:0] in_v [C*HIN*WIN];
  logic [31:0] flt_v [M*C*HF*WF];

  function automatic logic [31:0] ref_out(input int i, input int jj, input int kk, input logic [2:0] rm);
    logic [31:0] acc, p;
    acc = 32'h0;
    for (int l = 0; l < C; l++)
      for (int m = 0; m < HF; m++)
        for (int n = 0; n < WF; n++) begin
          p   = r2f(f2r(in_v[(l*HIN + jj*S + m)*WIN + kk*S + n]) * f2r(flt_v[((i*C + l)*HF + m)*WF + n]), rm);
          acc = r2f(f2r(acc) + f2r(p), rm);
        end
    return acc;
  endfunction

  // ------------------------------------------------------------ monitoring
  int checks = 0, failures = 0;
  longint cycle = 0;
  int n_load_use = 0, n_redirect = 0, n_fwd_mem = 0, n_fwd_wb = 0, n_apr_acc = 0,
      n_b2b_rfmac = 0, n_rfsmac_after_rfmac = 0, n_rfsmac_fwd = 0, n_apr_clr = 0,
      n_frm_change = 0;
  int phase = 0;
  longint ph_cycles [8], ph_retired [8], ph_mem [8];
  int b2b_run = 0, b2b_max = 0;
  logic [2:0] frm_prev;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      ph_cycles[phase] <= ph_cycles[phase] + 1;
      if (retire) ph_retired[phase] <= ph_retired[phase] + 1;
      if (dmem_req && !(dmem_we && dmem_addr == 64'(MARK))) ph_mem[phase] <= ph_mem[phase] + 1;
      if (dmem_req && dmem_we && dmem_addr == 64'(MARK)) phase <= int'(dmem_wdata[2:0]);
      if (dut.stall) n_load_use++;
      if (dut.redirect) n_redirect++;
      if (dut.fwd_a == 2'b01 || dut.fwd_b == 2'b01) n_fwd_mem++;
      if (dut.fwd_a == 2'b10 || dut.fwd_b == 2'b10) n_fwd_wb++;
      if (dut.acc_en) n_apr_acc++;
      if (dut.apr_clr) n_apr_clr++;
      if (dut.exmem.c.valid && dut.exmem.c.is_rfmac && dut.idex.c.valid && dut.idex.c.is_rfmac) begin
        n_b2b_rfmac++;
        b2b_run = b2b_run + 1;
        if (b2b_run > b2b_max) b2b_max = b2b_run;
      end else b2b_run = 0;
      if (dut.exmem.c.valid && dut.exmem.c.is_rfsmac && dut.memwb.c.valid && dut.memwb.c.is_rfmac)
        n_rfsmac_after_rfmac++;
      if (dut.fwd_b == 2'b01 && dut.exmem.c.is_rfsmac) n_rfsmac_fwd++;
      if (dut.frm != frm_prev) n_frm_change++;
      frm_prev <= dut.frm;
    end
  end

  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic chk_true(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Standalone: print the result line and stop. Otherwise report through
  // the ports so that a parent testbench can run several layers.
  task automatic finish();
    n_checks   = checks;
    n_failures = failures;
    done       = 1'b1;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: core did not halt after %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    done = 1'b0; n_checks = 0; n_failures = 0;
    for (int i = 0; i < MEM_WORDS; i++) mem[i] = '0;
    for (int i = 0; i < 8; i++) begin ph_cycles[i] = 0; ph_retired[i] = 0; ph_mem[i] = 0; end
    frm_prev = 3'd0;
    void'($urandom(32'd2024));
    for (int i = 0; i < C*HIN*WIN; i++) begin in_v[i] = rnd_f(120, 128); wr32(IN_BASE + 4*i, in_v[i]); end
    for (int i = 0; i < M*C*HF*WF; i++) begin flt_v[i] = rnd_f(118, 127); wr32(FLT_BASE + 4*i, flt_v[i]); end

    if (DIRECTED) emit_directed();
    mark(1);  emit_conv(1'b1, OUTR_BASE);
    mark(2);
    if (RUN_F) emit_conv(1'b0, OUTF_BASE);
    mark(3);
    if (DIRECTED) begin
      emit(csrrwi(0, 12'h002, 1));          // frm = RTZ
      emit_conv(1'b1, OUTZ_BASE);
      emit(csrrwi(0, 12'h002, 0));
    end
    mark(4);
    emit(ebreak());

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (halted);
    @(posedge clk);

    if (DIRECTED) begin
      chk("slli",        mem[(RES_BASE >> 3) + 0], 64'h0000_0001_2345_6780);
      chk("addiw sext",  mem[(RES_BASE >> 3) + 1], 64'hFFFF_FFFF_8000_0000);
      chk("sub",         mem[(RES_BASE >> 3) + 2], 64'h0000_0001_2345_6780 - 64'h1234_5678);
      chk("load-use",    mem[(RES_BASE >> 3) + 3], 64'h0000_0001_2345_6781);
      chk("fsub/fmv.x.w",mem[(RES_BASE >> 3) + 4], 64'h0000_0000_4010_0000);
      chk("fmul",        64'(rd32(RES_BASE + 40)), 64'h4070_0000);
      chk("rfmac x8",    64'(rd32(RES_BASE + 44)), 64'h41F0_0000);
      chk("apr cleared", 64'(rd32(RES_BASE + 48)), 64'h0);
      chk("csr frm",     mem[(RES_BASE >> 3) + 7], 64'd3);
      chk("jal skip",    mem[(RES_BASE >> 3) + 8], 64'd0);
      // 8 back-to-back rfmac.s: 7 cycles with one rfmac in MEM and the next in EX
      chk_true("rfmac.s issue one per cycle", b2b_max >= 7);
    end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < HO; j++)
        for (int k = 0; k < WO; k++) begin
          int idx;
          logic [31:0] e;
          idx = (i*HO + j)*WO + k;
          e = ref_out(i, j, k, 3'd0);
          chk($sformatf("R out[%0d][%0d][%0d]", i, j, k), 64'(rd32(OUTR_BASE + 4*idx)), 64'(e));
          if (RUN_F)
            chk($sformatf("F out[%0d][%0d][%0d]", i, j, k), 64'(rd32(OUTF_BASE + 4*idx)), 64'(e));
          if (DIRECTED)
            chk($sformatf("R-rtz out[%0d][%0d][%0d]", i, j, k), 64'(rd32(OUTZ_BASE + 4*idx)),
                64'(ref_out(i, j, k, 3'd1)));
        end
    // APR chain: one accumulate per MAC of each R-extension convolution
    chk("APR accumulates (R conv)", 64'(n_apr_acc),
        64'((DIRECTED ? 2 : 1) * NOUT * C * HF * WF + (DIRECTED ? 8 : 0)));

    $display("MAC layer M=%0d C=%0d %0dx%0d filter %0dx%0d S=%0d -> %0d outputs, %0d MACs",
             M, C, HIN, WIN, HF, WF, S, NOUT, NOUT * C * HF * WF);
    $display("R-ext : cycles=%0d retired=%0d IPC=%0.3f mem accesses=%0d",
             ph_cycles[1], ph_retired[1], real'(ph_retired[1]) / real'(ph_cycles[1]), ph_mem[1]);
    if (RUN_F) begin
      $display("F-ext : cycles=%0d retired=%0d IPC=%0.3f mem accesses=%0d",
               ph_cycles[2], ph_retired[2], real'(ph_retired[2]) / real'(ph_cycles[2]), ph_mem[2]);
      chk_true("R-ext faster than F", ph_cycles[1] < ph_cycles[2]);
      chk_true("R-ext fewer memory accesses than F", ph_mem[1] < ph_mem[2]);
    end
    $display("mechanisms: load-use=%0d redirect=%0d fwd-mem=%0d fwd-wb=%0d apr-acc=%0d b2b-rfmac=%0d rfsmac-after-rfmac=%0d rfsmac-fwd=%0d apr-clr=%0d frm-change=%0d",
             n_load_use, n_redirect, n_fwd_mem, n_fwd_wb, n_apr_acc, n_b2b_rfmac,
             n_rfsmac_after_rfmac, n_rfsmac_fwd, n_apr_clr, n_frm_change);
    chk_true("load-use stall seen", n_load_use > 0);
    chk_true("branch/jump redirect seen", n_redirect > 0);
    chk_true("forward from MEM seen", n_fwd_mem > 0);
    chk_true("forward from WB seen", n_fwd_wb > 0);
    chk_true("APR accumulate seen", n_apr_acc > 0);
    chk_true("APR clear seen", n_apr_clr > 0);
    if (DIRECTED) begin
      chk_true("back-to-back rfmac seen", n_b2b_rfmac > 0);
      chk_true("rfsmac right after rfmac seen", n_rfsmac_after_rfmac > 0);
      chk_true("rfsmac result forwarded seen", n_rfsmac_fwd > 0);
      chk_true("frm change seen", n_frm_change > 0);
    end
    finish();
  end
endmodule
