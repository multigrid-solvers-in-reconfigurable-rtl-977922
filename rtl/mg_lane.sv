// Row lane: the processing element that owns one grid row.
//
// The paper parallelises every multigrid operator over the rows of the grid
// (a Handel-C "par" over i, each replicated row process sweeping its columns in
// order). This module is one such replicated row process made into hardware:
// it holds the row's three memories and one instance of every row operator.
//   u  solution / correction  (5 read ports: j, j-1, j+1, prolongation
//                              source, host)
//   f  right-hand side        (1 read port: j)
//   v  residual, later reused for the prolonged correction
//                             (2 read ports: j, j+1)
// Each memory holds this row of every level (see mg_row_bank). Lane k (k =
// row, 1-based) is the row k of every level that has at least k rows.
//
// Connections to other lanes (made by the top): u(j) of the lanes above and
// below for the 5-point stencil, v(j) and v(j+1) of lanes 2k-1 and 2k for
// restriction, and the coarse u of lane ceil(k/2) for prolongation. The
// lane masks the domain boundary itself: row 1 has no upper neighbour, row
// n_l no lower one, column 1 and column n_l no left/right one, and all of
// them read as 0 (homogeneous Dirichlet boundary, this design's choice: the
// paper does not state its boundary values).
//
// Timing: the controller's control word is combinational from its state; all
// memory writes happen at the clock edge of the operator's last phase. The
// host port writes u or f of level 0 while the controller is idle.
module mg_lane
  import mg_pkg::*;
#(
  parameter int unsigned N = 2048,
  localparam int unsigned DEPTH = 2 * N,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  mg_ctrl_t      ctrl,
  input  idx_t          row,          // this lane's row index, 1..N
  // to and from other lanes
  output fp32_t         u_c_o,        // u(row, j) at this level
  output fp32_t         v_c_o,        // v(row, j)
  output fp32_t         v_r_o,        // v(row, j+1)
  output fp32_t         u_p_o,        // coarse u at the prolongation address
  input  fp32_t         u_up_i,       // u(row-1, j)
  input  fp32_t         u_dn_i,       // u(row+1, j)
  input  fp32_t         v_c1_i,       // v(2row-1, j)
  input  fp32_t         v_r1_i,       // v(2row-1, j+1)
  input  fp32_t         v_c2_i,       // v(2row, j)
  input  fp32_t         v_r2_i,       // v(2row, j+1)
  input  fp32_t         u_par_i,      // coarse u of row ceil(row/2)
  // host access to level 0
  input  logic          host_we_u,
  input  logic          host_we_f,
  input  logic [AW-1:0] host_addr,
  input  fp32_t         host_wdata,
  output fp32_t         host_rdata,
  // residual magnitude for the convergence test
  output logic          res_valid,
  output fp32_t         res_abs
);

  // ---------------------------------------------------------------- control
  logic act, act_restrict, host_w;
  assign act          = (row <= ctrl.n_l);
  assign act_restrict = (row <= (ctrl.n_l >> 1));
  assign host_w       = host_we_u | host_we_f;

  logic [AW-1:0] a_c, a_l, a_r, a_p, a_w;
  assign a_c = ctrl.a_c[AW-1:0];
  assign a_l = ctrl.a_l[AW-1:0];
  assign a_r = ctrl.a_r[AW-1:0];
  assign a_p = ctrl.a_p[AW-1:0];
  assign a_w = ctrl.a_w[AW-1:0];

  // --------------------------------------------------------------- memories
  logic [AW-1:0] u_ra [5];
  fp32_t         u_rd [5];
  logic [AW-1:0] f_ra [1];
  fp32_t         f_rd [1];
  logic [AW-1:0] v_ra [2];
  fp32_t         v_rd [2];

  assign u_ra[0] = a_c;
  assign u_ra[1] = a_l;
  assign u_ra[2] = a_r;
  assign u_ra[3] = a_p;
  assign u_ra[4] = host_addr;
  assign f_ra[0] = a_c;
  assign v_ra[0] = a_c;
  assign v_ra[1] = a_r;

  logic          u_we, f_we, v_we;
  logic [AW-1:0] u_wa, f_wa;
  fp32_t         u_wd, f_wd, v_wd;

  mg_row_bank #(.DEPTH(DEPTH), .NRD(5)) u_mem (
    .clk, .we(u_we), .waddr(u_wa), .wdata(u_wd), .raddr(u_ra), .rdata(u_rd));
  mg_row_bank #(.DEPTH(DEPTH), .NRD(1)) f_mem (
    .clk, .we(f_we), .waddr(f_wa), .wdata(f_wd), .raddr(f_ra), .rdata(f_rd));
  mg_row_bank #(.DEPTH(DEPTH), .NRD(2)) v_mem (
    .clk, .we(v_we), .waddr(a_c), .wdata(v_wd), .raddr(v_ra), .rdata(v_rd));

  assign u_c_o      = u_rd[0];
  assign u_p_o      = u_rd[3];
  assign host_rdata = u_rd[4];
  assign v_c_o      = v_rd[0];
  assign v_r_o      = v_rd[1];

  // ------------------------------------------------- stencil with boundary
  fp32_t up, down, left, right;
  assign up    = (row == idx_t'(1))  ? FP_ZERO : u_up_i;
  assign down  = (row == ctrl.n_l)   ? FP_ZERO : u_dn_i;
  assign left  = ctrl.first_col      ? FP_ZERO : u_rd[1];
  assign right = ctrl.last_col       ? FP_ZERO : u_rd[2];

  // -------------------------------------------------------------- operators
  logic  sm_we, rs_we, rr_we, pv_we, pu_we;
  fp32_t sm_wd, rs_wd, rr_wd, pv_wd, pu_wd;

  gs_smoother u_smooth (
    .clk, .en(act && ctrl.op == OP_SMOOTH), .phase(ctrl.phase),
    .up, .down, .left, .right, .rho(f_rd[0]), .sq_h(ctrl.sq_h),
    .we(sm_we), .wdata(sm_wd));

  residual_op u_resid (
    .clk, .en(act && ctrl.op == OP_RESID), .phase(ctrl.phase),
    .up, .down, .left, .right, .centre(u_rd[0]), .rho(f_rd[0]),
    .inv_sq_h(ctrl.inv_sq_h), .we(rs_we), .wdata(rs_wd), .res_abs(res_abs));

  restrict_op u_restrict (
    .clk, .en(act_restrict && ctrl.op == OP_RESTRICT), .phase(ctrl.phase),
    .r00(v_c1_i), .r10(v_c2_i), .r01(v_r1_i), .r11(v_r2_i),
    .we(rr_we), .wdata(rr_wd));

  prolong_correct_op u_pc (
    .en_prolong(act && ctrl.op == OP_PROLONG),
    .en_correct(act && ctrl.op == OP_CORRECT),
    .coarse(u_par_i), .u_in(u_rd[0]), .v_in(v_rd[0]),
    .v_we(pv_we), .v_wdata(pv_wd), .u_we(pu_we), .u_wdata(pu_wd));

  assign res_valid = rs_we;

  // ----------------------------------------------------- memory write muxes
  logic init_we;
  assign init_we = act && ctrl.op == OP_INIT;

  always_comb begin
    // u: host, smoother, correct, initialisation, or clearing the coarse
    // initial guess while restricting
    u_we = host_we_u | sm_we | pu_we | init_we | rr_we;
    u_wa = a_c;
    u_wd = FP_ZERO;
    if (host_we_u) begin
      u_wa = host_addr;
      u_wd = host_wdata;
    end else if (sm_we) begin
      u_wd = sm_wd;
    end else if (pu_we) begin
      u_wd = pu_wd;
    end else if (rr_we) begin
      u_wa = a_w;
    end
    // f: host or the restricted residual
    f_we = host_we_f | rr_we;
    f_wa = host_we_f ? host_addr : a_w;
    f_wd = host_we_f ? host_wdata : rr_wd;
    // v: residual or prolonged correction
    v_we = (rs_we | pv_we) & ~host_w;
    v_wd = rs_we ? rs_wd : pv_wd;
  end

endmodule
