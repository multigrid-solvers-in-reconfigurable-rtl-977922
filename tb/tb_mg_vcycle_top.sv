// End-to-end testbench of the V-cycle multigrid solver.
//
// Loads the right-hand side f(x,y) = 2*pi^2*sin(pi*x)*sin(pi*y) of the unit
// square (exact solution sin(pi*x)*sin(pi*y)) through the host port and
// runs the solver twice:
//   run 1  two V-cycles with an unreachable tolerance, so the V-cycle limit
//          ends the solve;
//   run 2  tolerance 0.001, so the convergence test ends the solve.
// A reference model in this file repeats the whole algorithm in float32
// (every operation rounded in the order the hardware uses, rows of a column
// updated together, columns in order) and the solution read back must match
// it bit for bit. Also checked: the number of busy clocks against the
// closed-form schedule of the controller, the V-cycle count, the converged
// flag and the reported residual norm, and that the solution is close to
// the exact one. Every mechanism of the design (initialise, smoothing,
// residual, restriction, coarse solve, prolongation, correction, stop on
// limit, stop on convergence, host load) is counted and must occur.
// Parameter N is the grid size; the default run uses a small grid.
module tb_mg_vcycle_top #(
  parameter int unsigned N = 16
);
  import fp_ref_pkg::*;
  import mg_pkg::*;

  localparam int unsigned K = $clog2(N);

  logic        clk = 0, rst_n = 0, start = 0;
  logic [3:0]  nu1 = 2, nu2 = 2;
  logic [15:0] max_cycles = 2;
  fp32_t       tol = '0, sq_h0, inv_sq_h0;
  logic        host_we = 0, host_sel_f = 0;
  idx_t        host_row = 1, host_col = 1;
  fp32_t       host_wdata = '0, host_rdata, res_norm;
  logic        busy, done, converged;
  logic [15:0] vcycles;
  mg_op_e      op;
  logic [4:0]  level;

  mg_vcycle_top #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int busy_clocks = 0;
  int ev_init = 0, ev_smooth = 0, ev_resid = 0, ev_restrict = 0, ev_coarse = 0,
      ev_prolong = 0, ev_correct = 0, ev_limit = 0, ev_conv = 0, ev_load = 0;

  always @(posedge clk) begin
    if (busy) busy_clocks++;
    if (busy && op == OP_INIT) ev_init++;
    if (busy && op == OP_SMOOTH && level != 5'(K)) ev_smooth++;
    if (busy && op == OP_SMOOTH && level == 5'(K)) ev_coarse++;
    if (busy && op == OP_RESID) ev_resid++;
    if (busy && op == OP_RESTRICT) ev_restrict++;
    if (busy && op == OP_PROLONG) ev_prolong++;
    if (busy && op == OP_CORRECT) ev_correct++;
    if (host_we && !busy) ev_load++;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  // ------------------------------------------------------ reference model
  fp32_t U [K+1][N+2][N+2];
  fp32_t F [K+1][N+2][N+2];
  fp32_t V [K+1][N+2][N+2];
  fp32_t ref_res;

  function automatic fp32_t neg(fp32_t x);
    return {~x[31], x[30:0]};
  endfunction

  function automatic fp32_t lvl_const(fp32_t x, int l, bit inverse);
    real s = 1.0;
    for (int k = 0; k < l; k++) s = inverse ? s / 4.0 : s * 4.0;
    return r2f(f2r(x) * s);
  endfunction

  task automatic ref_smooth(int l);
    int n = N >> l;
    fp32_t col [N+2];
    fp32_t sq = lvl_const(sq_h0, l, 0);
    for (int j = 1; j <= n; j++) begin
      for (int i = 1; i <= n; i++)
        col[i] = fmul(FP_QUARTER, fadd(fadd(fadd(U[l][i-1][j], U[l][i+1][j]),
                                            fadd(U[l][i][j-1], U[l][i][j+1])),
                                       fmul(sq, F[l][i][j])));
      for (int i = 1; i <= n; i++) U[l][i][j] = col[i];
    end
  endtask

  task automatic ref_resid(int l);
    int n = N >> l;
    fp32_t inv = lvl_const(inv_sq_h0, l, 1);
    if (l == 0) ref_res = '0;
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= n; j++) begin
        V[l][i][j] = fadd(F[l][i][j],
                          fmul(fadd(fadd(fadd(U[l][i-1][j], U[l][i+1][j]),
                                         fadd(U[l][i][j-1], U[l][i][j+1])),
                                    neg(fmul(FP_FOUR, U[l][i][j]))), inv));
        if (l == 0 && V[l][i][j][30:0] > ref_res[30:0]) ref_res = {1'b0, V[l][i][j][30:0]};
      end
  endtask

  task automatic ref_restrict(int l);
    int n = N >> (l + 1);
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= n; j++) begin
        F[l+1][i][j] = fmul(r2f(0.125), fadd(fadd(V[l][2*i-1][2*j-1], V[l][2*i][2*j-1]),
                                            fadd(V[l][2*i-1][2*j], V[l][2*i][2*j])));
        U[l+1][i][j] = '0;
      end
  endtask

  task automatic ref_up(int l);
    int n = N >> l;
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= n; j++) V[l][i][j] = U[l+1][(i+1)/2][(j+1)/2];
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= n; j++) U[l][i][j] = fadd(U[l][i][j], V[l][i][j]);
  endtask

  // runs the reference solve; returns V-cycles done, sets conv and clocks
  task automatic ref_solve(output int cycles, output bit conv, output longint clocks);
    cycles = 0;
    conv   = 0;
    clocks = N;                                     // initialise
    for (int i = 0; i <= N + 1; i++)
      for (int j = 0; j <= N + 1; j++) U[0][i][j] = '0;
    forever begin
      for (int l = 0; l < K; l++) begin
        for (int s = 0; s < nu1; s++) ref_smooth(l);
        clocks += 4 * nu1 * (N >> l);
        ref_resid(l);
        clocks += 5 * (N >> l);
        if (l == 0 && ref_res[30:0] < tol[30:0]) begin
          conv = 1;
          return;
        end
        ref_restrict(l);
        clocks += 3 * (N >> (l + 1));
      end
      ref_smooth(K);                                // exact on the 1x1 grid
      clocks += 4;
      for (int l = K - 1; l >= 0; l--) begin
        ref_up(l);
        clocks += 2 * (N >> l);
        for (int s = 0; s < nu2; s++) ref_smooth(l);
        clocks += 4 * nu2 * (N >> l);
      end
      cycles++;
      if (cycles >= int'(max_cycles)) return;
    end
  endtask

  // ------------------------------------------------------------- stimulus
  task automatic load_rhs();
    real h = 1.0 / real'(N + 1);
    for (int l = 0; l <= K; l++)
      for (int i = 0; i <= N + 1; i++)
        for (int j = 0; j <= N + 1; j++) begin
          U[l][i][j] = '0; F[l][i][j] = '0; V[l][i][j] = '0;
        end
    for (int i = 1; i <= N; i++)
      for (int j = 1; j <= N; j++) begin
        F[0][i][j] = r2f(2.0 * 3.14159265358979 * 3.14159265358979 *
                         $sin(3.14159265358979 * i * h) * $sin(3.14159265358979 * j * h));
        @(negedge clk);
        host_we = 1; host_sel_f = 1; host_row = idx_t'(i); host_col = idx_t'(j);
        host_wdata = F[0][i][j];
        // a stale initial guess, which the solver must clear
        @(negedge clk);
        host_sel_f = 0; host_wdata = 32'h4100_0000;
      end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic run_and_check(string name);
    int    rc;
    bit    rconv;
    longint rclk;
    int    b0;
    real   err, e;
    real   h = 1.0 / real'(N + 1);
    ref_solve(rc, rconv, rclk);
    b0 = busy_clocks;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (longint'(busy_clocks - b0) != rclk)
      fail($sformatf("%s: %0d busy clocks, schedule gives %0d", name, busy_clocks - b0, rclk));
    checks++;
    if (int'(vcycles) != rc) fail($sformatf("%s: %0d V-cycles, expected %0d", name, vcycles, rc));
    checks++;
    if (converged != rconv) fail($sformatf("%s: converged=%0d expected %0d", name, converged, rconv));
    checks++;
    if (res_norm != ref_res) fail($sformatf("%s: residual norm %h expected %h", name, res_norm, ref_res));
    if (rconv) ev_conv++; else ev_limit++;
    err = 0.0;
    for (int i = 1; i <= N; i++)
      for (int j = 1; j <= N; j++) begin
        host_row = idx_t'(i); host_col = idx_t'(j);
        #1;
        checks++;
        if (!same(host_rdata, U[0][i][j]))
          fail($sformatf("%s: u(%0d,%0d) = %h, reference %h", name, i, j, host_rdata, U[0][i][j]));
        e = f2r(host_rdata) - $sin(3.14159265358979 * i * h) * $sin(3.14159265358979 * j * h);
        if (e < 0) e = -e;
        if (e > err) err = e;
      end
    $display("%s: %0d V-cycles, converged=%0d, max|r|=%g, %0d clocks, max error to exact solution %g",
             name, vcycles, converged, f2r(res_norm), busy_clocks - b0, err);
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real h = 1.0 / real'(N + 1);
    sq_h0     = r2f(h * h);
    inv_sq_h0 = r2f(1.0 / (h * h));
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_rhs();
    // run 1: the V-cycle limit ends the solve
    max_cycles = 2;
    tol        = '0;
    run_and_check("limit");
    // run 2: the accuracy ends the solve
    for (int l = 0; l <= K; l++)
      for (int i = 0; i <= N + 1; i++)
        for (int j = 0; j <= N + 1; j++) U[l][i][j] = '0;
    max_cycles = 40;
    tol        = r2f(0.001);
    run_and_check("accuracy");
    checks++;
    if (ev_init == 0 || ev_smooth == 0 || ev_resid == 0 || ev_restrict == 0 || ev_coarse == 0 ||
        ev_prolong == 0 || ev_correct == 0 || ev_limit == 0 || ev_conv == 0 || ev_load == 0)
      fail("a mechanism never occurred");
    $display("clocks per operator: init %0d smooth %0d resid %0d restrict %0d coarse %0d prolong %0d correct %0d; stops: limit %0d accuracy %0d; host writes %0d",
             ev_init, ev_smooth, ev_resid, ev_restrict, ev_coarse, ev_prolong, ev_correct,
             ev_limit, ev_conv, ev_load);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
