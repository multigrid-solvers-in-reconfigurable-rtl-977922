// Residual computation for one grid row (the "Find Residual" operator).
//
// Computes r(i,j) = f(i,j) + ( u(i-1,j) + u(i+1,j) + u(i,j-1) + u(i,j+1)
//                              - 4*u(i,j) ) / (h*h),
// the residual f - A u of the 5-point discretisation of -laplace(u) = f that
// the Gauss-Seidel update of the paper solves. Phases of one column:
//   phase 0: op1 = up + down,  op2 = left + right
//   phase 1: op3 = op1 + op2,  tmp1 = 4 * u(i,j)
//   phase 2: opResult = op3 - tmp1
//   phase 3: opResult = opResult * (1/(h*h))
//   phase 4: r = f + opResult, written back (we = 1)
// The paper's figure names op1, op2, op3, tmp1 and opResult and the final
// "r = r + opResult" with r preset to rho; it shows the 1/(h*h) scaling only
// partly legibly, so the multiplication by a precomputed 1/(h*h) is this
// design's reading. res_abs is |r| for the controller's convergence test.
module residual_op
  import mg_pkg::*;
(
  input  logic       clk,
  input  logic       en,
  input  logic [2:0] phase,
  input  fp32_t      up,
  input  fp32_t      down,
  input  fp32_t      left,
  input  fp32_t      right,
  input  fp32_t      centre,    // u(i,j)
  input  fp32_t      rho,       // f(i,j)
  input  fp32_t      inv_sq_h,  // 1/(h*h) of the level
  output logic       we,
  output fp32_t      wdata,
  output fp32_t      res_abs
);

  fp32_t t0, t1;
  fp32_t add0_a, add0_b, add0_y, add1_y, mul_a, mul_b, mul_y;

  fp_add u_add0 (.a(add0_a), .b(add0_b), .y(add0_y));
  fp_add u_add1 (.a(left),   .b(right),  .y(add1_y));
  fp_mul u_mul  (.a(mul_a),  .b(mul_b),  .y(mul_y));

  always_comb begin
    add0_a = t0;
    add0_b = t1;
    mul_a  = FP_FOUR;
    mul_b  = centre;
    unique case (phase)
      3'd0: begin add0_a = up;  add0_b = down; end
      3'd2: begin add0_b = {~t1[31], t1[30:0]}; end
      3'd3: begin mul_a = t0;   mul_b = inv_sq_h; end
      3'd4: begin add0_a = rho; add0_b = t0; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (en) begin
      unique case (phase)
        3'd0: begin t0 <= add0_y; t1 <= add1_y; end
        3'd1: begin t0 <= add0_y; t1 <= mul_y;  end
        3'd2: t0 <= add0_y;
        3'd3: t0 <= mul_y;
        default: ;
      endcase
    end
  end

  assign we      = en && (phase == 3'd4);
  assign wdata   = add0_y;
  assign res_abs = {1'b0, add0_y[30:0]};

endmodule
