// fp32_add: IEEE 754 single-precision adder/subtractor (combinational).
//
// Used twice in the core: in the EX stage by fadd.s/fsub.s, and in the MEM
// stage as the accumulator of the rented execution stage (R_EX), where it
// adds the product of rfmac.s to the architectural pipeline register (APR).
// Operation: operands are ordered by magnitude, the smaller one is aligned
// to the larger inside a 50-bit field (shifted-out bits jam into a sticky
// LSB), the significands are added or subtracted, the result is
// renormalised with a leading-zero count and rounded by the shared
// round-and-pack function of rext_pkg (gradual underflow supported).
// Exact zero sums are +0, or -0 in round-down mode, or keep the sign when
// both operands are zeros of the same sign. NaN in or inf - inf gives the
// canonical NaN.
// Interface: a, b (binary32), sub negates b, rm is the static rounding mode;
// y is the rounded result. No latency of its own.
// The paper names an FP adder IP and does not give its insides; this
// implementation is this design's own. Exception flags are not produced.
module fp32_add
  import rext_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  input  logic [2:0]  rm,
  output logic [31:0] y
);
  logic [31:0] bb, big, sml;
  logic        sbig, ssml, eff_sub;
  logic [7:0]  ebig, esml, eeb, ees;
  logic [23:0] mbig, msml;
  logic [49:0] A, B, S, Sn;
  logic [8:0]  d;
  logic        stk;
  logic [5:0]  lz;
  logic signed [12:0] e;
  logic a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    bb    = {b[31] ^ sub, b[30:0]};
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan = (bb[30:23] == 8'hFF) && (bb[22:0] != 0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf = (bb[30:23] == 8'hFF) && (bb[22:0] == 0);
    // order by magnitude
    if (a[30:0] >= bb[30:0]) begin big = a;  sml = bb; end
    else                     begin big = bb; sml = a;  end
    sbig    = big[31];
    ssml    = sml[31];
    ebig    = big[30:23];
    esml    = sml[30:23];
    eff_sub = sbig ^ ssml;
    eeb     = (ebig == 0) ? 8'd1 : ebig;
    ees     = (esml == 0) ? 8'd1 : esml;
    mbig    = {(ebig != 0), big[22:0]};
    msml    = {(esml != 0), sml[22:0]};
    d       = {1'b0, eeb} - {1'b0, ees};
    A       = {1'b0, mbig, 25'd0};
    B       = {1'b0, msml, 25'd0};
    stk     = 1'b0;
    if (d >= 9'd50) begin
      stk = |msml;
      B   = 50'd0;
    end else begin
      for (int i = 0; i < 50; i++)
        if (i < int'(d)) stk |= B[i];
      B = B >> d;
    end
    B  = B | {49'd0, stk};                // jam the sticky into the LSB
    S  = eff_sub ? (A - B) : (A + B);
    lz = lzc50(S);
    Sn = S << lz;
    e  = 13'(signed'({5'd0, eeb})) + 13'sd1 - 13'(signed'({7'd0, lz}));

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != bb[31])))
      y = FP_CANON_NAN;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = bb;
    else if (S == 50'd0) begin
      if (!eff_sub)        y = {sbig, 31'd0};              // (+0)+(+0), (-0)+(-0)
      else                 y = {(rm == RM_RDN), 31'd0};
    end else
      y = fp_round_pack(sbig, e, Sn, 1'b0, rm);
  end
endmodule
