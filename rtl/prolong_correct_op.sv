// Prolongation and correction for one fine-grid row (the "Prolongate" and
// "Correct" operators).
//
// Prolongate (en_prolong): the fine point (i,j) receives the coarse
// correction V(ceil(i/2), ceil(j/2)), so every coarse value is copied onto
// its 2x2 block of fine points, as the paper's Prolongate code does
// (v[i][j] = v[i+1][j] = v[i][j+1] = v[i+1][j+1] = V[I][J]). The paper's text
// calls the interpolation bilinear; the code is followed. The result goes to
// the lane's scratch row v.
// Correct (en_correct): u(i,j) = u(i,j) + v(i,j), the paper's Correct
// operator a[i][j] = a[i][j] + v[i][j].
// Both take one clock per column; the unit is combinational and the lane's
// memories register the result.
module prolong_correct_op
  import mg_pkg::*;
(
  input  logic  en_prolong,
  input  logic  en_correct,
  input  fp32_t coarse,      // V(ceil(i/2), ceil(j/2)) from the parent lane
  input  fp32_t u_in,        // u(i,j)
  input  fp32_t v_in,        // v(i,j)
  output logic  v_we,
  output fp32_t v_wdata,
  output logic  u_we,
  output fp32_t u_wdata
);

  fp_add u_add (.a(u_in), .b(v_in), .y(u_wdata));

  assign v_we    = en_prolong;
  assign v_wdata = coarse;
  assign u_we    = en_correct;

endmodule
