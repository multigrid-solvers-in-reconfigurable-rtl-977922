// Self-checking testbench of one row lane (N = 8, so the lane holds levels
// of 8, 4, 2 and 1 columns at addresses 0-7, 8-11, 12-13 and 14).
// The testbench plays the controller and the neighbouring lanes: it drives
// control words and neighbour values, and checks through the host port,
// the exported values and a model of the lane's memories that
//   - the host port writes u and f and reads u back;
//   - initialisation clears u;
//   - a smoothing sweep over a row (first, last and an inner row) gives the Gauss-Seidel values, with the
//     left neighbour taken from the previous column and the row/column
//     boundaries read as zero;
//   - the residual sweep writes v and reports |r|;
//   - restriction writes the 2x2 average to f of the next level and clears
//     u there;
//   - prolongation copies the parent's coarse value and correction adds v;
//   - a lane whose row lies outside the level stays idle.
module tb_mg_lane;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  localparam int unsigned N = 8, AW = $clog2(2 * N);

  logic clk = 0;
  mg_ctrl_t ctrl;
  idx_t row;
  fp32_t u_c_o, v_c_o, v_r_o, u_p_o, u_up_i, u_dn_i, v_c1_i, v_r1_i, v_c2_i, v_r2_i, u_par_i;
  logic host_we_u = 0, host_we_f = 0, res_valid;
  logic [AW-1:0] host_addr = '0;
  fp32_t host_wdata = '0, host_rdata, res_abs;

  mg_lane #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fp32_t mu [2*N];   // model of u
  fp32_t mf [2*N];   // model of f
  fp32_t mv [2*N];   // model of v

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  function automatic int base(int l);
    int s = 0;
    for (int k = 0; k < l; k++) s += N >> k;
    return s;
  endfunction

  // drive the control word of one phase of column j at level l
  task automatic drive(mg_op_e op, int l, int j, int ph);
    ctrl = '0;
    ctrl.op = op;
    ctrl.phase = 3'(ph);
    ctrl.n_l = idx_t'(N >> l);
    ctrl.first_col = (j == 1);
    ctrl.last_col = (j == (N >> l));
    ctrl.sq_h = r2f(0.01 * (4.0 ** l));
    ctrl.inv_sq_h = r2f(100.0 / (4.0 ** l));
    if (op == OP_RESTRICT) begin
      ctrl.a_c = idx_t'(base(l) + 2 * (j - 1));
      ctrl.a_w = idx_t'(base(l + 1) + j - 1);
    end else begin
      ctrl.a_c = idx_t'(base(l) + j - 1);
      ctrl.a_w = ctrl.a_c;
    end
    ctrl.a_l = ctrl.a_c - 1;
    ctrl.a_r = ctrl.a_c + 1;
    ctrl.a_p = idx_t'(base(l + 1) + (j - 1) / 2);
  endtask

  task automatic host_write(bit is_f, int a, fp32_t d);
    @(negedge clk);
    ctrl = '0;
    host_we_u = !is_f; host_we_f = is_f; host_addr = AW'(a); host_wdata = d;
    @(negedge clk);
    host_we_u = 0; host_we_f = 0;
    if (is_f) mf[a] = d; else mu[a] = d;
  endtask

  task automatic check_u(string what, int a);
    host_addr = AW'(a);
    #1;
    checks++;
    if (!same(host_rdata, mu[a])) fail($sformatf("%s: u[%0d] = %h, expected %h", what, a, host_rdata, mu[a]));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t up_v [N+1], dn_v [N+1], col, s4, e;
    int n, l;
    int rows [3] = '{1, N, 3};   // top row, bottom row, inner row
    ctrl = '0;
    row = 1;
    {u_up_i, u_dn_i, v_c1_i, v_r1_i, v_c2_i, v_r2_i, u_par_i} = '0;

    // host access
    for (int a = 0; a < N; a++) host_write(0, a, rnd(120, 130));
    for (int a = 0; a < N; a++) host_write(1, a, rnd(120, 130));
    for (int a = 0; a < N; a++) check_u("host", a);

    // initialise clears u of level 0
    for (int j = 1; j <= N; j++) begin
      @(negedge clk); drive(OP_INIT, 0, j, 0);
      mu[j-1] = '0;
    end
    @(negedge clk); ctrl = '0;
    for (int a = 0; a < N; a++) check_u("init", a);
    for (int a = 0; a < N; a++) host_write(0, a, rnd(120, 130));

    // smoothing sweep at level 0 in rows 1 and N (boundaries) and 3
    foreach (rows[q]) begin
      int r;
      r = rows[q];
      row = idx_t'(r);
      for (int j = 1; j <= N; j++) begin up_v[j] = rnd(120, 130); dn_v[j] = rnd(120, 130); end
      for (int j = 1; j <= N; j++) begin
        col = fmul(FP_QUARTER, fadd(fadd(fadd(r == 1 ? FP_ZERO : up_v[j], r == N ? FP_ZERO : dn_v[j]),
                                         fadd(j == 1 ? FP_ZERO : mu[j-2], j == N ? FP_ZERO : mu[j])),
                                    fmul(r2f(0.01), mf[j-1])));
        for (int p = 0; p < 4; p++) begin
          @(negedge clk);
          drive(OP_SMOOTH, 0, j, p);
          u_up_i = up_v[j]; u_dn_i = dn_v[j];
          if (p == 0) begin
            #1; checks++;
            if (u_c_o != mu[j-1]) fail("u_c_o does not show u(j)");
          end
        end
        mu[j-1] = col;
      end
      @(negedge clk); ctrl = '0;
      for (int a = 0; a < N; a++) check_u($sformatf("smooth row %0d", r), a);
    end

    // residual sweep at level 0, row 3
    for (int j = 1; j <= N; j++) begin
      s4 = fmul(FP_FOUR, mu[j-1]);
      e = fadd(mf[j-1], fmul(fadd(fadd(fadd(up_v[j], dn_v[j]),
                                       fadd(j == 1 ? FP_ZERO : mu[j-2], j == N ? FP_ZERO : mu[j])),
                                  {~s4[31], s4[30:0]}), r2f(100.0)));
      for (int p = 0; p < 5; p++) begin
        @(negedge clk);
        drive(OP_RESID, 0, j, p);
        u_up_i = up_v[j]; u_dn_i = dn_v[j];
        #1;
        if (p == 4) begin
          checks++;
          if (!res_valid || res_abs != {1'b0, e[30:0]}) fail($sformatf("resid col %0d: |r| %h expected %h", j, res_abs, e));
        end else if (res_valid) fail("res_valid outside phase 4");
      end
      mv[j-1] = e;
    end
    @(negedge clk); ctrl = '0;
    for (int j = 1; j <= N; j++) begin
      @(negedge clk); drive(OP_IDLE, 0, j, 0);
      #1; checks += 2;
      if (v_c_o != mv[j-1]) fail($sformatf("v(%0d) = %h expected %h", j, v_c_o, mv[j-1]));
      if (j < N && v_r_o != mv[j]) fail("v_r_o does not show v(j+1)");
    end

    // restriction into level 1 (row 3 of level 1 exists: 3 <= 4)
    for (int jj = 1; jj <= N / 2; jj++) begin
      fp32_t a0, a1, b0, b1;
      a0 = rnd(120, 125); a1 = rnd(120, 125); b0 = rnd(120, 125); b1 = rnd(120, 125);
      for (int p = 0; p < 3; p++) begin
        @(negedge clk);
        drive(OP_RESTRICT, 0, jj, p);
        v_c1_i = a0; v_c2_i = a1; v_r1_i = b0; v_r2_i = b1;
      end
      mf[base(1) + jj - 1] = fmul(r2f(0.125), fadd(fadd(a0, a1), fadd(b0, b1)));
      mu[base(1) + jj - 1] = '0;
    end
    @(negedge clk); ctrl = '0;
    for (int jj = 1; jj <= N / 2; jj++) check_u("restrict clears u", base(1) + jj - 1);
    // f of level 1 is checked through a smoothing step with zero neighbours
    for (int jj = 1; jj <= N / 2; jj++) host_write(0, base(1) + jj - 1, '0);
    for (int jj = 1; jj <= N / 2; jj++) begin
      col = fmul(FP_QUARTER, fadd(fadd(FP_ZERO, FP_ZERO), fmul(r2f(0.04), mf[base(1) + jj - 1])));
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        drive(OP_SMOOTH, 1, jj, p);
        u_up_i = '0; u_dn_i = '0;
        ctrl.first_col = 1; ctrl.last_col = 1;   // isolate the point
      end
      mu[base(1) + jj - 1] = col;
    end
    @(negedge clk); ctrl = '0;
    for (int jj = 1; jj <= N / 2; jj++) check_u("restricted f", base(1) + jj - 1);

    // prolongation and correction at level 0
    for (int j = 1; j <= N; j++) begin
      fp32_t pv;
      pv = rnd(118, 122);
      @(negedge clk); drive(OP_PROLONG, 0, j, 0);
      u_par_i = pv;
      #1; checks++;
      if (u_p_o != mu[base(1) + (j - 1) / 2]) fail("u_p_o does not show the coarse value");
      mv[j-1] = pv;
    end
    for (int j = 1; j <= N; j++) begin
      @(negedge clk); drive(OP_CORRECT, 0, j, 0);
      mu[j-1] = fadd(mu[j-1], mv[j-1]);
    end
    @(negedge clk); ctrl = '0;
    for (int a = 0; a < N; a++) check_u("correct", a);

    // row 5 is outside level 1 (4 rows): nothing may change there
    row = 5;
    for (int jj = 1; jj <= N / 2; jj++)
      for (int p = 0; p < 4; p++) begin
        @(negedge clk); drive(OP_SMOOTH, 1, jj, p);
        u_up_i = rnd(120, 130);
      end
    @(negedge clk); ctrl = '0;
    for (int jj = 1; jj <= N / 2; jj++) check_u("inactive lane", base(1) + jj - 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
