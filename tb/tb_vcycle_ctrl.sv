// Self-checking testbench of the V-cycle controller (N = 8, levels of 8, 4,
// 2 and 1 points). The testbench builds the expected schedule of control
// words from the V-cycle definition (initialise; per level down nu1
// smoothing sweeps, residual, restriction; one smoothing sweep on the 1x1
// level; per level up prolongation, correction, nu2 smoothing sweeps) and
// compares the controller's control word with it on every clock: operator,
// phase, level size, addresses, boundary flags and level constants. It plays
// the lanes' residual report, and checks both ways a solve ends: the
// V-cycle limit, and a fine-grid residual below the tolerance (which must
// end the solve right after that residual sweep).
module tb_vcycle_ctrl;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  localparam int unsigned N = 8, K = 3;

  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] nu1 = 1, nu2 = 2;
  logic [15:0] max_cycles = 2;
  fp32_t tol = '0, sq_h0 = 32'h3c23d70a, inv_sq_h0 = 32'h42c80000;  // 0.01, 100
  logic res_valid;
  fp32_t res_max;
  mg_ctrl_t ctrl;
  logic [4:0] level;
  logic busy, done, converged;
  logic [15:0] vcycles;
  fp32_t res_norm;

  vcycle_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  typedef struct { mg_op_e op; int l; int j; int ph; } step_t;
  step_t sched [$];

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  function automatic int base(int l);
    int s = 0;
    for (int k = 0; k < l; k++) s += N >> k;
    return s;
  endfunction

  task automatic sweep(mg_op_e op, int l, int ncol, int nph);
    for (int j = 1; j <= ncol; j++)
      for (int p = 0; p < nph; p++) sched.push_back('{op, l, j, p});
  endtask

  // the schedule of a solve; stop_after_resid ends it at the fine residual
  // of V-cycle number stop_cycle (counting from 0)
  task automatic build(int cycles, int stop_cycle);
    sched.delete();
    sweep(OP_INIT, 0, N, 1);
    for (int c = 0; c < cycles; c++) begin
      for (int l = 0; l < K; l++) begin
        for (int s = 0; s < nu1; s++) sweep(OP_SMOOTH, l, N >> l, 4);
        sweep(OP_RESID, l, N >> l, 5);
        if (l == 0 && c == stop_cycle) return;
        sweep(OP_RESTRICT, l, N >> (l + 1), 3);
      end
      sweep(OP_SMOOTH, K, 1, 4);
      for (int l = K - 1; l >= 0; l--) begin
        sweep(OP_PROLONG, l, N >> l, 1);
        sweep(OP_CORRECT, l, N >> l, 1);
        for (int s = 0; s < nu2; s++) sweep(OP_SMOOTH, l, N >> l, 4);
      end
    end
  endtask

  int cur_cycle;
  int small_from;   // V-cycle from which the residual reported is small

  // the lanes' residual report
  always_comb begin
    res_valid = (ctrl.op == OP_RESID) && (ctrl.phase == 3'd4);
    res_max   = (cur_cycle >= small_from && level == 0) ? r2f(0.25) : r2f(2.0);
    if (ctrl.last_col) res_max = r2f(0.125);   // the largest is not in the last column
  end

  task automatic run(string name, int exp_cycles, bit exp_conv);
    step_t s;
    int    idx = 0;
    cur_cycle = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) begin
      checks++;
      if (idx >= sched.size()) begin
        fail($sformatf("%s: controller runs past the schedule", name));
        break;
      end
      s = sched[idx];
      if (ctrl.op != s.op || int'(ctrl.phase) != s.ph || int'(level) != s.l ||
          int'(ctrl.n_l) != (N >> s.l) || ctrl.first_col != (s.j == 1) ||
          ctrl.last_col != (s.j == ((s.op == OP_RESTRICT) ? -1 : (N >> s.l))) && s.op != OP_RESTRICT)
        fail($sformatf("%s step %0d: op %s ph %0d lvl %0d, expected %s ph %0d lvl %0d col %0d",
                       name, idx, ctrl.op.name(), ctrl.phase, level, s.op.name(), s.ph, s.l, s.j));
      if (s.op == OP_RESTRICT) begin
        if (int'(ctrl.a_c) != base(s.l) + 2 * (s.j - 1) || int'(ctrl.a_r) != base(s.l) + 2 * s.j - 1 ||
            int'(ctrl.a_w) != base(s.l + 1) + s.j - 1)
          fail($sformatf("%s step %0d: restriction addresses %0d/%0d/%0d", name, idx, ctrl.a_c, ctrl.a_r, ctrl.a_w));
      end else begin
        if (int'(ctrl.a_c) != base(s.l) + s.j - 1 || int'(ctrl.a_l) != base(s.l) + s.j - 2 && s.j > 1 ||
            int'(ctrl.a_r) != base(s.l) + s.j || int'(ctrl.a_p) != base(s.l + 1) + (s.j - 1) / 2)
          fail($sformatf("%s step %0d: addresses a_c %0d a_p %0d", name, idx, ctrl.a_c, ctrl.a_p));
      end
      if (!same(ctrl.sq_h, r2f(0.01 * (4.0 ** s.l))) || !same(ctrl.inv_sq_h, r2f(100.0 / (4.0 ** s.l))))
        fail($sformatf("%s step %0d: level constants %h %h", name, idx, ctrl.sq_h, ctrl.inv_sq_h));
      if (s.op == OP_CORRECT && s.l == 0 && s.j == N) cur_cycle++;
      idx++;
      @(negedge clk);
    end
    checks += 4;
    if (idx != sched.size()) fail($sformatf("%s: %0d busy clocks, schedule has %0d", name, idx, sched.size()));
    if (!done) fail($sformatf("%s: done not raised", name));
    if (converged != exp_conv) fail($sformatf("%s: converged = %0d", name, converged));
    if (int'(vcycles) != exp_cycles) fail($sformatf("%s: %0d V-cycles, expected %0d", name, vcycles, exp_cycles));
    checks++;
    if (res_norm != (cur_cycle >= small_from ? r2f(0.25) : r2f(2.0)))
      fail($sformatf("%s: residual norm %h", name, res_norm));
    repeat (3) @(negedge clk);
    checks++;
    if (!done || busy) fail($sformatf("%s: done not held", name));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || done) fail("not idle after reset");
    // limit: two V-cycles, tolerance never met
    nu1 = 1; nu2 = 2; max_cycles = 2; tol = r2f(0.001); small_from = 100;
    build(2, -1);
    run("limit", 2, 0);
    // accuracy: residual small from V-cycle 1 on, tolerance 0.5
    nu1 = 2; nu2 = 1; max_cycles = 10; tol = r2f(0.5); small_from = 1;
    build(10, 1);
    run("accuracy", 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
