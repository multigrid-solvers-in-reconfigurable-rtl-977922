// Single-precision floating-point multiplier, combinational.
//
// y = a * b in IEEE-754 binary32 with round-to-nearest-even. Subnormal
// inputs are read as zero, results below the smallest normal number are
// flushed to (signed) zero and results that overflow become infinity. An
// infinite or NaN input is passed to the output unchanged.
//
// The paper takes its floating-point multiplier from a vendor library and
// does not describe it; this is this design's own stand-in with the same
// function: a 24x24-bit significand product, a one-bit normalisation, then
// rounding on the guard bit and the sticky OR of the bits below it.
module fp_mul
  import mg_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  always_comb begin
    logic        s;
    logic [47:0] p;
    logic [9:0]  e;
    logic [23:0] mant;
    logic        g, st, up;
    logic [24:0] mr;

    s = a[31] ^ b[31];
    p = '0;
    e = '0;
    mant = '0;
    g = 1'b0; st = 1'b0; up = 1'b0; mr = '0;
    if (a[30:23] == 8'hff) begin
      y = a;
    end else if (b[30:23] == 8'hff) begin
      y = b;
    end else if (a[30:23] == 8'd0 || b[30:23] == 8'd0) begin
      y = {s, 31'd0};
    end else begin
      p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
      e = 10'(a[30:23]) + 10'(b[30:23]) - 10'd127;
      if (p[47]) begin
        mant = p[47:24];
        g    = p[23];
        st   = |p[22:0];
        e    = e + 10'd1;
      end else begin
        mant = p[46:23];
        g    = p[22];
        st   = |p[21:0];
      end
      up = g & (st | mant[0]);
      mr = {1'b0, mant} + 25'(up);
      if (mr[24]) begin
        mr = mr >> 1;
        e  = e + 10'd1;
      end
      if (e[9] || e == 10'd0) y = {s, 31'd0};
      else if (e >= 10'd255)  y = {s, 8'hff, 23'd0};
      else                    y = {s, e[7:0], mr[22:0]};
    end
  end

endmodule
