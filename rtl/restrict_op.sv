// Residual restriction for one coarse-grid row (the "Restrict Residual"
// operator).
//
// The lane of coarse row I builds, for coarse column J, the average of the
// 2x2 block of fine residuals at fine rows 2I-1, 2I and fine columns 2J-1,
// 2J, exactly as the paper's Restrict_Residual code does:
//   phase 0: op1 = r(i,j) + r(i+1,j),  op2 = r(i,j+1) + r(i+1,j+1)
//   phase 1: opResult = op1 + op2
//   phase 2: R(I,J) = fFactor * opResult, written (we = 1)
// (i = 2I-1, j = 2J-1). The paper's text names full weighting for the
// restriction while its code shows this 4-point sum; the code is followed.
// The paper does not give the value of fFactor here. This design uses
// 1/8: with the 2x2-copy prolongation P of the paper's code and the coarse
// operator rediscretised with H = 2h, R = P^T/8 is the restriction for which
// R A P equals the coarse operator (Galerkin condition). With 1/4, a plain
// average, every coarse correction is twice too large and the V-cycle
// diverges from 64 x 64 upwards. The inputs must be stable in phase 0 only.
module restrict_op
  import mg_pkg::*;
(
  input  logic       clk,
  input  logic       en,
  input  logic [2:0] phase,
  input  fp32_t      r00,   // r(2I-1, 2J-1)
  input  fp32_t      r10,   // r(2I,   2J-1)
  input  fp32_t      r01,   // r(2I-1, 2J)
  input  fp32_t      r11,   // r(2I,   2J)
  output logic       we,
  output fp32_t      wdata
);

  fp32_t t0, t1;
  fp32_t add0_a, add0_b, add0_y, add1_y, mul_y;

  fp_add u_add0 (.a(add0_a),     .b(add0_b), .y(add0_y));
  fp_add u_add1 (.a(r01),        .b(r11),    .y(add1_y));
  fp_mul u_mul  (.a(FP_EIGHTH),  .b(t0),     .y(mul_y));

  always_comb begin
    add0_a = t0;
    add0_b = t1;
    if (phase == 3'd0) begin
      add0_a = r00;
      add0_b = r10;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      unique case (phase)
        3'd0: begin t0 <= add0_y; t1 <= add1_y; end
        3'd1: t0 <= add0_y;
        default: ;
      endcase
    end
  end

  assign we    = en && (phase == 3'd2);
  assign wdata = mul_y;

endmodule
