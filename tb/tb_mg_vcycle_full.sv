// Full-size testbench: one complete V-cycle of the solver at its default
// size (N = 2048, a 2048 x 2048 grid, the largest mesh of the paper).
//
// Loading four million values through the one-word host port would take
// four million clocks, so this testbench writes f of the finest grid
// straight into the lanes' f memories and reads the solution straight out of
// their u memories (hierarchical references). It then runs one V-cycle with
// one pre- and one post-smoothing step and compares every point of the
// solution bit for bit with a float32 reference model of the same
// algorithm, the busy clocks with the controller's schedule, and the
// reported fine-grid residual norm. The right-hand side is
// f = 2*pi^2*sin(pi*x)*sin(pi*y) on the unit square.
module tb_mg_vcycle_full;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  localparam int unsigned N = 2048;           // the solver's default size
  localparam int unsigned K = $clog2(N);

  logic        clk = 0, rst_n = 0, start = 0;
  logic [3:0]  nu1 = 1, nu2 = 1;
  logic [15:0] max_cycles = 1;
  fp32_t       tol = '0, sq_h0, inv_sq_h0;
  logic        host_we = 0, host_sel_f = 0;
  idx_t        host_row = 1, host_col = 1;
  fp32_t       host_wdata = '0, host_rdata, res_norm;
  logic        busy, done, converged;
  logic [15:0] vcycles;
  mg_op_e      op;
  logic [4:0]  level;

  mg_vcycle_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, mismatches = 0, compared = 0;
  longint busy_clocks = 0;
  always @(posedge clk) if (busy) busy_clocks++;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  // ------------------------------------------------ reference, per level
  // point (i,j) of level l, boundary included, is at off[l] + i*(n+2) + j
  int    off [K+2];
  fp32_t U [], F [], V [];
  fp32_t ref_res;

  function automatic int ix(int l, int i, int j);
    return off[l] + i * ((N >> l) + 2) + j;
  endfunction

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
        col[i] = fmul(FP_QUARTER, fadd(fadd(fadd(U[ix(l,i-1,j)], U[ix(l,i+1,j)]),
                                            fadd(U[ix(l,i,j-1)], U[ix(l,i,j+1)])),
                                       fmul(sq, F[ix(l,i,j)])));
      for (int i = 1; i <= n; i++) U[ix(l,i,j)] = col[i];
    end
  endtask

  task automatic ref_resid(int l);
    int n = N >> l;
    fp32_t inv = lvl_const(inv_sq_h0, l, 1);
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= n; j++) begin
        V[ix(l,i,j)] = fadd(F[ix(l,i,j)],
                            fmul(fadd(fadd(fadd(U[ix(l,i-1,j)], U[ix(l,i+1,j)]),
                                           fadd(U[ix(l,i,j-1)], U[ix(l,i,j+1)])),
                                      neg(fmul(FP_FOUR, U[ix(l,i,j)]))), inv));
        if (l == 0 && V[ix(l,i,j)][30:0] > ref_res[30:0]) ref_res = {1'b0, V[ix(l,i,j)][30:0]};
      end
  endtask

  task automatic ref_vcycle(output longint clocks);
    clocks = N;
    ref_res = '0;
    for (int l = 0; l < K; l++) begin
      for (int s = 0; s < nu1; s++) ref_smooth(l);
      ref_resid(l);
      for (int i = 1; i <= (N >> (l + 1)); i++)
        for (int j = 1; j <= (N >> (l + 1)); j++) begin
          F[ix(l+1,i,j)] = fmul(r2f(0.125), fadd(fadd(V[ix(l,2*i-1,2*j-1)], V[ix(l,2*i,2*j-1)]),
                                                fadd(V[ix(l,2*i-1,2*j)], V[ix(l,2*i,2*j)])));
          U[ix(l+1,i,j)] = '0;
        end
      clocks += 4 * nu1 * (N >> l) + 5 * (N >> l) + 3 * (N >> (l + 1));
    end
    ref_smooth(K);
    clocks += 4;
    for (int l = K - 1; l >= 0; l--) begin
      for (int i = 1; i <= (N >> l); i++)
        for (int j = 1; j <= (N >> l); j++)
          U[ix(l,i,j)] = fadd(U[ix(l,i,j)], U[ix(l+1,(i+1)/2,(j+1)/2)]);
      for (int s = 0; s < nu2; s++) ref_smooth(l);
      clocks += 2 * (N >> l) + 4 * nu2 * (N >> l);
    end
  endtask

  // --------------------------------------- back-door load and read-back
  event ev_load, ev_loaded, ev_compare;
  int   lanes_loaded = 0, lanes_compared = 0;

  for (genvar k = 1; k <= N; k++) begin : g_bd
    initial begin
      @(ev_load);
      for (int j = 1; j <= N; j++) dut.g_lane[k].u_lane.f_mem.mem[j-1] = F[ix(0,k,j)];
      lanes_loaded++;
      @(ev_compare);
      for (int j = 1; j <= N; j++) begin
        compared++;
        if (!same(dut.g_lane[k].u_lane.u_mem.mem[j-1], U[ix(0,k,j)])) begin
          mismatches++;
          if (mismatches < 5)
            $display("u(%0d,%0d) = %h, reference %h", k, j, dut.g_lane[k].u_lane.u_mem.mem[j-1], U[ix(0,k,j)]);
        end
      end
      lanes_compared++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    h = 1.0 / real'(N + 1);
    real    pi = 3.14159265358979;
    longint rclk, b0;
    int     total = 0;
    sq_h0     = r2f(h * h);
    inv_sq_h0 = r2f(1.0 / (h * h));
    for (int l = 0; l <= K + 1; l++) begin
      off[l] = total;
      if (l <= K) total += ((N >> l) + 2) * ((N >> l) + 2);
    end
    U = new[total];
    F = new[total];
    V = new[total];
    foreach (U[x]) begin U[x] = '0; F[x] = '0; V[x] = '0; end
    for (int i = 1; i <= N; i++)
      for (int j = 1; j <= N; j++)
        F[ix(0,i,j)] = r2f(2.0 * pi * pi * $sin(pi * i * h) * $sin(pi * j * h));
    repeat (3) @(negedge clk);
    rst_n = 1;
    -> ev_load;
    wait (lanes_loaded == N);
    @(negedge clk);
    b0 = busy_clocks;
    start = 1;
    @(negedge clk);
    start = 0;
    ref_vcycle(rclk);
    while (!done) @(negedge clk);
    checks++;
    if (busy_clocks - b0 != rclk) fail($sformatf("%0d busy clocks, schedule gives %0d", busy_clocks - b0, rclk));
    checks++;
    if (vcycles != 16'd1 || converged) fail($sformatf("vcycles %0d converged %0d", vcycles, converged));
    checks++;
    if (res_norm != ref_res) fail($sformatf("residual norm %h, reference %h", res_norm, ref_res));
    -> ev_compare;
    wait (lanes_compared == N);
    checks++;
    if (mismatches != 0 || compared != N * N) fail($sformatf("%0d of %0d points differ", mismatches, compared));
    $display("one V-cycle on %0dx%0d: %0d clocks, fine-grid max|r| after pre-smoothing %g",
             N, N, busy_clocks - b0, f2r(res_norm));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
