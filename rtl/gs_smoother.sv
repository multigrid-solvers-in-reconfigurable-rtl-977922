// Gauss-Seidel smoother for one grid row (the "Smoother" of the V-cycle).
//
// Computes the 5-point Gauss-Seidel update of the 2-D Poisson equation
//     u(i,j) = 1/4 * ( u(i-1,j) + u(i+1,j) + u(i,j-1) + u(i,j+1) + h*h*f(i,j) )
// for the point in column j of this lane's row. One instance sits in every
// row lane and all lanes run the same column at once, so rows are updated in
// parallel while the columns of a row are swept in order: the left neighbour
// is the value this lane wrote one column earlier, the right neighbour and
// the rows above and below still hold their previous values.
//
// The operation order follows the smoother of the paper's V-cycle figure:
//   phase 0: op1 = up + down,  op2 = left + right
//   phase 1: opResult = op1 + op2,  temp1 = sq_h * rho
//   phase 2: tmp2 = opResult + temp1
//   phase 3: psiNew = tmp2 * fFactor (0.25), written back (we = 1)
// so a column takes four clocks. Two adders and one multiplier; neighbour
// values must be stable from phase 0 to phase 3 (phase 0 samples them, the
// later phases use the internal registers, except rho and sq_h in phase 1).
module gs_smoother
  import mg_pkg::*;
(
  input  logic       clk,
  input  logic       en,      // this lane takes part in the sweep
  input  logic [2:0] phase,
  input  fp32_t      up,      // u(i-1,j), 0 on the boundary
  input  fp32_t      down,    // u(i+1,j)
  input  fp32_t      left,    // u(i,j-1), already updated in this sweep
  input  fp32_t      right,   // u(i,j+1)
  input  fp32_t      rho,     // f(i,j)
  input  fp32_t      sq_h,    // h*h of the level
  output logic       we,
  output fp32_t      wdata
);

  fp32_t t0, t1;
  fp32_t add0_a, add0_b, add0_y, add1_y, mul_a, mul_b, mul_y;

  fp_add u_add0 (.a(add0_a), .b(add0_b), .y(add0_y));
  fp_add u_add1 (.a(left),   .b(right),  .y(add1_y));
  fp_mul u_mul  (.a(mul_a),  .b(mul_b),  .y(mul_y));

  always_comb begin
    add0_a = t0;
    add0_b = t1;
    mul_a  = sq_h;
    mul_b  = rho;
    if (phase == 3'd0) begin
      add0_a = up;
      add0_b = down;
    end
    if (phase == 3'd3) begin
      mul_a = FP_QUARTER;
      mul_b = t0;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      unique case (phase)
        3'd0: begin t0 <= add0_y; t1 <= add1_y; end
        3'd1: begin t0 <= add0_y; t1 <= mul_y;  end
        3'd2: t0 <= add0_y;
        default: ;
      endcase
    end
  end

  assign we    = en && (phase == 3'd3);
  assign wdata = mul_y;

endmodule
