// fp32_mul: IEEE 754 single-precision multiplier (combinational).
//
// Used in the EX stage by fmul.s and by rfmac.s, whose product is then
// accumulated by the rented execution stage (R_EX) one stage later.
// Operation: the two 24-bit significands (hidden bit 0 for subnormal
// inputs) are multiplied into a 48-bit product, the product is normalised
// with a leading-zero count, and the shared round-and-pack function of
// rext_pkg rounds it in the requested mode, with gradual underflow and
// overflow to infinity or the largest finite value.
// Special operands: NaN in -> canonical NaN out; inf x 0 -> canonical NaN;
// inf x finite -> inf; zero x finite -> signed zero.
// Interface: a, b (binary32), rm (static mode, already resolved from frm);
// y is the rounded product. Purely combinational, no latency of its own.
// The paper names an FP multiplier IP but does not give its insides; this
// implementation is this design's own. Exception flags are not produced.
module fp32_mul
  import rext_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [2:0]  rm,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [49:0] pn;
  logic [5:0]  lz;
  logic signed [12:0] e;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_nan  = (ea == 8'hFF) && (fa != 0);
    b_nan  = (eb == 8'hFF) && (fb != 0);
    a_inf  = (ea == 8'hFF) && (fa == 0);
    b_inf  = (eb == 8'hFF) && (fb == 0);
    a_zero = (ea == 8'h00) && (fa == 0);
    b_zero = (eb == 8'h00) && (fb == 0);
    ma     = {(ea != 0), fa};
    mb     = {(eb != 0), fb};
    prod   = ma * mb;
    lz     = lzc50({prod, 2'b00});       // leading zeros of the 48-bit product
    pn     = {prod, 2'b00} << lz;         // leading one now at bit 49
    // value = prod * 2^(Ea+Eb-254-46), Ea/Eb = effective exponents
    e      = 13'(signed'({5'd0, (ea == 0) ? 8'd1 : ea}))
           + 13'(signed'({5'd0, (eb == 0) ? 8'd1 : eb}))
           - 13'sd126 - 13'(signed'({7'd0, lz}));
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP_CANON_NAN;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else
      y = fp_round_pack(sy, e, pn, 1'b0, rm);
  end
endmodule
