// Reference single-precision arithmetic for the testbenches, built on the
// simulator's double-precision real type. A float32 result is formed by
// rounding the (exact or correctly rounded) double result to nearest even,
// which is the correctly rounded float32 result for a sum or a product of
// two float32 values. Results below the smallest normal float become zero
// and results above the largest become infinity, matching the datapath's
// flush-to-zero convention.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real x);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(x);
    if (d[62:52] == 11'd0) return 32'd0;
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0)   return 32'd0;
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // equality with +0 and -0 treated as the same value
  function automatic bit same(logic [31:0] a, logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b1;
    return a == b;
  endfunction

  // a random normal float with biased exponent in [elo, ehi]
  function automatic logic [31:0] rnd(int elo, int ehi);
    logic [31:0] x;
    x = $urandom;
    x[30:23] = 8'(elo + int'($urandom_range(ehi - elo)));
    return x;
  endfunction

endpackage
