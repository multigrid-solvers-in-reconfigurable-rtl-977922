// Single-precision floating-point adder, combinational.
//
// y = a + b in IEEE-754 binary32 with round-to-nearest-even. To subtract,
// flip the sign bit of b. Subnormal inputs are read as zero and results
// below the smallest normal number are flushed to zero; a result that
// overflows becomes infinity. An infinite or NaN input is passed to the
// output unchanged (a taking precedence).
//
// The paper builds its datapath from the floating-point adder of a vendor
// library, which it does not describe; this unit is this design's own
// stand-in with the same function. Works in three steps: align the smaller
// operand to the larger one keeping guard, round and sticky bits, add or
// subtract the 24-bit significands, then normalise and round.
module fp_add
  import mg_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  always_comb begin
    logic        sa, sb, sl, ss;
    logic [7:0]  ea, eb, el, es;
    logic [23:0] ml, ms;
    logic [7:0]  d;
    logic [26:0] xl, xs;        // significand, guard, round, sticky
    logic [27:0] sum;
    logic [9:0]  e;
    logic [4:0]  lz;
    logic [23:0] mant;
    logic        g, r, st, up;
    logic [24:0] mr;

    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    y  = FP_ZERO;
    lz = '0;
    sl = 1'b0; ss = 1'b0; el = '0; es = '0; ml = '0; ms = '0; d = '0;
    xl = '0; xs = '0; sum = '0; e = '0; mant = '0;
    g = 1'b0; r = 1'b0; st = 1'b0; up = 1'b0; mr = '0;
    if (ea == 8'hff) begin
      y = a;
    end else if (eb == 8'hff) begin
      y = b;
    end else if (ea == 8'd0 && eb == 8'd0) begin
      y = FP_ZERO;
    end else if (eb == 8'd0) begin
      y = a;
    end else if (ea == 8'd0) begin
      y = b;
    end else begin
      // order by magnitude
      if (a[30:0] >= b[30:0]) begin
        sl = sa; el = ea; ml = {1'b1, a[22:0]};
        ss = sb; es = eb; ms = {1'b1, b[22:0]};
      end else begin
        sl = sb; el = eb; ml = {1'b1, b[22:0]};
        ss = sa; es = ea; ms = {1'b1, a[22:0]};
      end
      d  = el - es;
      xl = {ml, 3'b000};
      if (d >= 8'd27) begin
        xs = 27'd1;                     // only sticky survives
      end else begin
        xs = {ms, 3'b000} >> d;
        if ((({ms, 3'b000} << (8'd27 - d)) & 27'h7ff_ffff) != 27'd0) xs[0] = 1'b1;
      end
      e = {2'b00, el};
      if (sl == ss) begin
        sum = {1'b0, xl} + {1'b0, xs};
        if (sum[27]) begin
          sum = {1'b0, sum[27:2], sum[1] | sum[0]};
          e   = e + 10'd1;
        end
      end else begin
        sum = {1'b0, xl} - {1'b0, xs};
        for (int k = 0; k <= 26; k++) begin
          if (sum[k]) lz = 5'(26 - k);
        end
        sum = sum << lz;
        e   = e - 10'(lz);
      end
      if (sum[26:0] == 27'd0) begin
        y = FP_ZERO;
      end else begin
        mant = sum[26:3];
        g    = sum[2];
        r    = sum[1];
        st   = sum[0];
        up   = g & (r | st | mant[0]);
        mr   = {1'b0, mant} + 25'(up);
        if (mr[24]) begin
          mr = mr >> 1;
          e  = e + 10'd1;
        end
        if ($signed(e) <= 0 || e[9]) y = FP_ZERO;
        else if (e >= 10'd255)       y = {sl, 8'hff, 23'd0};
        else                         y = {sl, e[7:0], mr[22:0]};
      end
    end
  end

endmodule
