// Shared types and constants of the multigrid V-cycle solver.
//
// Every grid value in the solver is an IEEE-754 single-precision number
// (fp32_t). The V-cycle controller drives all row lanes with one control
// word (mg_ctrl_t) per clock: which operator runs, which phase of that
// operator, and the memory addresses every lane uses in that cycle. All lanes
// work in lock step on the same column, so one address set serves them all.
//
// The operator set (smooth, find residual, restrict, prolongate, correct) and
// the use of single-precision floating point follow the paper; the encodings,
// the field widths and the address scheme are this design's own choices.
package mg_pkg;

  typedef logic [31:0] fp32_t;

  // Width of row/column counts and of addresses in the control word. Lanes
  // use only the low bits they need.
  localparam int unsigned IDX_W = 16;
  typedef logic [IDX_W-1:0] idx_t;

  localparam fp32_t FP_ZERO    = 32'h0000_0000;
  localparam fp32_t FP_QUARTER = 32'h3e80_0000;  // 0.25, the smoother's "fFactor" (1/4 of Eq. 2)
  localparam fp32_t FP_EIGHTH  = 32'h3e00_0000;  // 0.125, the restriction's "fFactor"
  localparam fp32_t FP_FOUR    = 32'h4080_0000;  // 4.0, centre weight of the 5-point stencil

  typedef enum logic [2:0] {
    OP_IDLE,
    OP_INIT,      // clear the fine-grid solution (initial guess 0)
    OP_SMOOTH,    // one Gauss-Seidel sweep, 4 phases per column
    OP_RESID,     // residual r = f - A u, 5 phases per column
    OP_RESTRICT,  // 2x2 average of r into the next coarser right-hand side, 3 phases
    OP_PROLONG,   // copy the coarse correction onto the 2x2 fine points, 1 phase
    OP_CORRECT    // u = u + v, 1 phase
  } mg_op_e;

  typedef struct packed {
    mg_op_e      op;
    logic [2:0]  phase;
    idx_t        n_l;        // interior points per side of the level being swept
    idx_t        a_c;        // address of the current column at this level
    idx_t        a_l;        // a_c - 1
    idx_t        a_r;        // a_c + 1
    idx_t        a_p;        // coarse-level address of the prolongation source
    idx_t        a_w;        // coarse-level write address (restriction)
    logic        first_col;  // column 1: the left neighbour is boundary (0)
    logic        last_col;   // column n_l: the right neighbour is boundary (0)
    fp32_t       sq_h;       // h*h of this level
    fp32_t       inv_sq_h;   // 1/(h*h) of this level
  } mg_ctrl_t;

  // Multiply a normal float by 4**k by moving its exponent (exact while the
  // result stays normal). Zero stays zero.
  function automatic fp32_t fp_scale_pow4(fp32_t x, int k);
    logic [8:0] e;
    if (x[30:23] == 8'd0) return FP_ZERO;
    e = 9'(int'(x[30:23]) + 2 * k);
    return {x[31], e[7:0], x[22:0]};
  endfunction

endpackage
