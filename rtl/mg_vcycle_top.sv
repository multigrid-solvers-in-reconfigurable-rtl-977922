// V-cycle multigrid solver for the 2-D Poisson equation -laplace(u) = f on
// an N x N interior grid with zero boundary values.
//
// Structure: one V-cycle controller and N row lanes. Lane k owns row k of
// every grid level and contains the row's memories and one instance of each
// multigrid operator (Gauss-Seidel smoother, residual, restriction,
// prolongation/correction). The controller broadcasts one control word per
// clock and all lanes active at the current level execute it on the same
// column, which is the row-parallel ("par over i") organisation of the
// paper. The top wires the lanes together:
//   stencil       u(j) of lanes k-1 and k+1 into lane k
//   restriction   v(j), v(j+1) of lanes 2k-1 and 2k into lane k
//   prolongation  coarse u of lane ceil(k/2) into lane k
// and reduces the lanes' residual magnitudes to their maximum for the
// controller's convergence test.
//
// Use: while busy is low, load f (host_sel_f = 1) and, if wanted, u by
// writing one word per clock through host_we/host_row/host_col (1-based
// indices of the finest grid). Pulse start. The solver clears u (initial
// guess 0), runs V-cycles until max |r| < tol or max_cycles, then raises
// done; converged, vcycles and res_norm report the outcome and u is read
// back through host_row/host_col/host_rdata (combinational read). sq_h0 and
// inv_sq_h0 are h*h and 1/(h*h) of the finest grid, h = 1/(N+1) for the
// unit square. op and level show the operator being executed, for
// observation.
module mg_vcycle_top
  import mg_pkg::*;
#(
  parameter int unsigned N = 2048,
  localparam int unsigned AW = $clog2(2 * N)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [3:0]  nu1,
  input  logic [3:0]  nu2,
  input  logic [15:0] max_cycles,
  input  fp32_t       tol,
  input  fp32_t       sq_h0,
  input  fp32_t       inv_sq_h0,
  input  logic        host_we,
  input  logic        host_sel_f,   // 1: write f, 0: write u
  input  idx_t        host_row,     // 1..N
  input  idx_t        host_col,     // 1..N
  input  fp32_t       host_wdata,
  output fp32_t       host_rdata,   // u(host_row, host_col)
  output logic        busy,
  output logic        done,
  output logic        converged,
  output logic [15:0] vcycles,
  output fp32_t       res_norm,
  output mg_op_e      op,
  output logic [4:0]  level
);

  mg_ctrl_t ctrl;
  logic     res_valid_any;
  fp32_t    res_max;

  vcycle_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .nu1, .nu2, .max_cycles, .tol, .sq_h0, .inv_sq_h0,
    .res_valid(res_valid_any), .res_max, .ctrl, .level, .busy, .done,
    .converged, .vcycles, .res_norm);

  assign op = ctrl.op;

  // lane signals, index 0 and N+1 are the (zero) rows outside the grid
  fp32_t u_c   [N+2];
  fp32_t v_c   [N+2];
  fp32_t v_r   [N+2];
  fp32_t u_p   [N+2];
  fp32_t h_rd  [N+2];
  logic  r_vld [N+2];
  fp32_t r_abs [N+2];

  assign u_c[0]     = FP_ZERO;
  assign u_c[N+1]   = FP_ZERO;
  assign v_c[0]     = FP_ZERO;
  assign v_c[N+1]   = FP_ZERO;
  assign v_r[0]     = FP_ZERO;
  assign v_r[N+1]   = FP_ZERO;
  assign u_p[0]     = FP_ZERO;
  assign u_p[N+1]   = FP_ZERO;
  assign h_rd[0]    = FP_ZERO;
  assign h_rd[N+1]  = FP_ZERO;
  assign r_vld[0]   = 1'b0;
  assign r_vld[N+1] = 1'b0;
  assign r_abs[0]   = FP_ZERO;
  assign r_abs[N+1] = FP_ZERO;

  logic          hw;
  logic [AW-1:0] host_addr;
  assign hw        = host_we && !busy;
  assign host_addr = AW'(host_col - idx_t'(1));

  for (genvar k = 1; k <= N; k++) begin : g_lane
    localparam int unsigned C1 = (2 * k - 1 <= N) ? 2 * k - 1 : N + 1;
    localparam int unsigned C2 = (2 * k <= N) ? 2 * k : N + 1;
    localparam int unsigned P  = (k + 1) / 2;

    mg_lane #(.N(N)) u_lane (
      .clk,
      .ctrl,
      .row       (idx_t'(k)),
      .u_c_o     (u_c[k]),
      .v_c_o     (v_c[k]),
      .v_r_o     (v_r[k]),
      .u_p_o     (u_p[k]),
      .u_up_i    (u_c[k-1]),
      .u_dn_i    (u_c[k+1]),
      .v_c1_i    (v_c[C1]),
      .v_r1_i    (v_r[C1]),
      .v_c2_i    (v_c[C2]),
      .v_r2_i    (v_r[C2]),
      .u_par_i   (u_p[P]),
      .host_we_u (hw && !host_sel_f && host_row == idx_t'(k)),
      .host_we_f (hw &&  host_sel_f && host_row == idx_t'(k)),
      .host_addr,
      .host_wdata,
      .host_rdata(h_rd[k]),
      .res_valid (r_vld[k]),
      .res_abs   (r_abs[k]));
  end

  assign host_rdata = (host_row >= idx_t'(1) && host_row <= idx_t'(N))
                    ? h_rd[host_row[$clog2(N+2)-1:0]] : FP_ZERO;

  // largest residual magnitude delivered this clock (magnitudes of floats
  // order like unsigned integers)
  always_comb begin
    res_valid_any = 1'b0;
    res_max       = FP_ZERO;
    for (int k = 1; k <= N; k++) begin
      if (r_vld[k]) begin
        res_valid_any = 1'b1;
        if (r_abs[k][30:0] > res_max[30:0]) res_max = r_abs[k];
      end
    end
  end

endmodule
