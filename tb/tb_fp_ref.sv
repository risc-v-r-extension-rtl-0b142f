// tb_fp_ref: reference single-precision arithmetic for the testbenches.
//
// Works through the simulator's double-precision 'real': a binary32 value is
// widened to binary64 exactly (f2r), the operation is done in double, and
// the double is rounded back to binary32 in a chosen rounding mode (r2f),
// with gradual underflow. A product of two binary32 values is exact in
// double, so r2f(f2r(a)*f2r(b), rm) is the correctly rounded product in any
// mode. A sum is exact in double when the exponents differ by less than 29;
// otherwise only round-to-nearest-even is guaranteed by the double rounding.
package tb_fp_ref;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [22:0] m;
    logic [52:0] mm;
    s = f[31];
    e = int'(f[30:23]);
    m = f[22:0];
    if (e == 255) begin
      d = {s, 11'h7FF, (m != 0), 51'd0};
    end else if (e == 0 && m == 0) begin
      d = {s, 63'd0};
    end else if (e == 0) begin
      // subnormal: m * 2^-149, normalise
      mm = {30'd0, m};
      e  = -126;
      while (mm[23] == 1'b0) begin mm = mm << 1; e = e - 1; end
      d = {s, 11'(e + 1023), mm[22:0], 29'd0};
    end else begin
      d = {s, 11'(e - 127 + 1023), m, 29'd0};
    end
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r, input logic [2:0] rm);
    logic [63:0] d;
    logic        s, g, st, up;
    int          e, sh;
    logic [52:0] M;
    logic [23:0] q;
    logic [31:0] res;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC00000 : {s, 8'hFF, 23'd0};
    if (d[62:0] == 0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;  // biased float exponent of 1.m
    M = {1'b1, d[51:0]};
    if (e >= 255) begin
      if (rm == 3'd1 || (rm == 3'd2 && !s) || (rm == 3'd3 && s)) return {s, 8'hFE, 23'h7FFFFF};
      return {s, 8'hFF, 23'd0};
    end
    // q = integer significand in units of the float LSB
    sh = (e >= 1) ? 29 : 29 + (1 - e);
    if (sh > 53) begin q = 0; g = 0; st = 1; end   // below half the smallest subnormal
    else begin
      q  = 24'(M >> sh);
      g  = M[sh-1];
      st = 0;
      for (int i = 0; i < sh - 1; i++) st |= M[i];
    end
    case (rm)
      3'd0: up = g & (st | q[0]);
      3'd1: up = 0;
      3'd2: up = (g | st) & s;
      3'd3: up = (g | st) & !s;
      3'd4: up = g;
      default: up = g & (st | q[0]);
    endcase
    if (e >= 1) res = {s, 8'(e), q[22:0]};
    else        res = {s, 8'd0, q[22:0]};
    res[30:0] = res[30:0] + {30'd0, up};
    return res;
  endfunction

  function automatic bit is_nan(input logic [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

  // random binary32 with exponent in [elo, ehi] (biased), random sign/fraction
  function automatic logic [31:0] rnd_f(input int elo, input int ehi);
    int e;
    e = elo + int'($urandom_range(ehi - elo));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
