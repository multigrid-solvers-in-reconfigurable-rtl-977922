// V-cycle controller: sequences the multigrid operators over the grid levels.
//
// Implements the flowchart of the paper's iterative V-cycle: Initialize,
// then per level on the way down Pre-Smoothing, Find Residual and Restrict
// Residual until the coarsest level, Solve on Coarse Grid, and per level on
// the way up Prolongate, Correct and Post-Smoothing back to the finest grid.
// V-cycles repeat until the largest fine-grid residual magnitude found by
// Find Residual drops below the tolerance input (the paper's "accuracy",
// 0.001 in its tests) or max_cycles V-cycles have run.
//
// Grid levels: level 0 has N x N interior points, level l has N/2**l, so the
// coarsest level K = log2(N) is a single point. On it one Gauss-Seidel step
// with the zero boundary is the exact solution, and that step is the coarse
// grid solver (the paper only says a direct solver is applied there). The
// number of smoothing steps nu1/nu2 is an input: the paper leaves it blank.
//
// Every clock issues one phase of one column to all row lanes at once
// through the combinational control word ctrl; a sweep over a level of n
// columns with an operator of p phases takes exactly n*p clocks, with no
// idle clocks between sweeps:
//   Initialize N*1, smoothing n*4, residual n*5, restriction (n/2)*3,
//   prolongation n*1, correction n*1.
// busy is high for exactly those clocks. done rises the clock after the last
// one and stays high until the next start. Level-dependent constants: h*h
// and 1/(h*h) of level l are sq_h0*4**l and inv_sq_h0/4**l, formed by
// exponent arithmetic.
module vcycle_ctrl
  import mg_pkg::*;
#(
  parameter int unsigned N = 2048,
  localparam int unsigned K = $clog2(N)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [3:0]  nu1,         // pre-smoothing steps
  input  logic [3:0]  nu2,         // post-smoothing steps
  input  logic [15:0] max_cycles,  // V-cycle limit, at least 1
  input  fp32_t       tol,         // stop when max |r| < tol
  input  fp32_t       sq_h0,       // h*h of the finest level
  input  fp32_t       inv_sq_h0,   // 1/(h*h) of the finest level
  input  logic        res_valid,   // some lane delivers a residual this clock
  input  fp32_t       res_max,     // largest |r| delivered this clock
  output mg_ctrl_t    ctrl,
  output logic [4:0]  level,
  output logic        busy,
  output logic        done,
  output logic        converged,
  output logic [15:0] vcycles,     // completed V-cycles
  output fp32_t       res_norm     // max |r| of the last fine-grid residual
);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_PRE, S_RESID, S_RESTRICT, S_COARSE,
    S_PROLONG, S_CORRECT, S_POST, S_DONE
  } stage_e;

  stage_e      stage, nxt_stage;
  logic [4:0]  nxt_level;
  idx_t        j;
  logic [2:0]  phase, nph;
  logic [3:0]  rep, nxt_rep;
  idx_t        n_l, ncols;
  logic        last;
  fp32_t       res_acc, res_fin;
  logic        nxt_conv, nxt_done_cycle;

  function automatic idx_t base_of(logic [4:0] l);
    idx_t s = '0;
    for (int k = 0; k <= K; k++) begin
      if (k < int'(l)) s = s + idx_t'(N >> k);
    end
    return s;
  endfunction

  assign n_l = idx_t'(N >> level);

  always_comb begin
    unique case (stage)
      S_PRE, S_POST, S_COARSE: nph = 3'd4;
      S_RESID:                 nph = 3'd5;
      S_RESTRICT:              nph = 3'd3;
      default:                 nph = 3'd1;
    endcase
    ncols = (stage == S_RESTRICT) ? (n_l >> 1) : n_l;
    last  = (phase == nph - 3'd1) && (j == ncols);
  end

  // largest residual of the sweep including the value arriving now
  always_comb begin
    res_fin = res_acc;
    if (res_valid && res_max[30:0] > res_acc[30:0]) res_fin = res_max;
  end

  // next stage at the end of the current one
  always_comb begin
    nxt_stage      = stage;
    nxt_level      = level;
    nxt_rep        = rep + 4'd1;
    nxt_conv       = 1'b0;
    nxt_done_cycle = 1'b0;
    unique case (stage)
      S_INIT: begin
        nxt_stage = (nu1 == 4'd0) ? S_RESID : S_PRE;
        nxt_rep   = '0;
      end
      S_PRE: begin
        if (rep + 4'd1 >= nu1) nxt_stage = S_RESID;
      end
      S_RESID: begin
        nxt_stage = S_RESTRICT;
        if (level == 5'd0 && res_fin[30:0] < tol[30:0]) begin
          nxt_stage = S_DONE;
          nxt_conv  = 1'b1;
        end
      end
      S_RESTRICT: begin
        nxt_level = level + 5'd1;
        nxt_rep   = '0;
        if (level + 5'd1 == 5'(K)) nxt_stage = S_COARSE;
        else                       nxt_stage = (nu1 == 4'd0) ? S_RESID : S_PRE;
      end
      S_COARSE: begin
        nxt_stage = S_PROLONG;
        nxt_level = level - 5'd1;
      end
      S_PROLONG: nxt_stage = S_CORRECT;
      S_CORRECT, S_POST: begin
        nxt_rep = (stage == S_CORRECT) ? 4'd0 : rep + 4'd1;
        if (stage == S_CORRECT && nu2 != 4'd0) begin
          nxt_stage = S_POST;
        end else if (stage == S_POST && rep + 4'd1 < nu2) begin
          nxt_stage = S_POST;
        end else if (level != 5'd0) begin
          nxt_stage = S_PROLONG;
          nxt_level = level - 5'd1;
        end else begin
          nxt_done_cycle = 1'b1;
          nxt_rep        = '0;
          nxt_stage      = (vcycles + 16'd1 >= max_cycles) ? S_DONE
                         : (nu1 == 4'd0) ? S_RESID : S_PRE;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage     <= S_IDLE;
      level     <= '0;
      j         <= idx_t'(1);
      phase     <= '0;
      rep       <= '0;
      vcycles   <= '0;
      converged <= 1'b0;
      res_acc   <= FP_ZERO;
      res_norm  <= FP_ZERO;
    end else if (stage == S_IDLE || stage == S_DONE) begin
      if (start) begin
        stage     <= S_INIT;
        level     <= '0;
        j         <= idx_t'(1);
        phase     <= '0;
        rep       <= '0;
        vcycles   <= '0;
        converged <= 1'b0;
        res_acc   <= FP_ZERO;
      end
    end else begin
      res_acc <= res_fin;
      if (!last) begin
        if (phase == nph - 3'd1) begin
          phase <= '0;
          j     <= j + idx_t'(1);
        end else begin
          phase <= phase + 3'd1;
        end
      end else begin
        phase <= '0;
        j     <= idx_t'(1);
        stage <= nxt_stage;
        level <= nxt_level;
        rep   <= nxt_rep;
        if (stage == S_RESID) begin
          res_acc <= FP_ZERO;
          if (level == 5'd0) res_norm <= res_fin;
        end
        if (nxt_conv) converged <= 1'b1;
        if (nxt_done_cycle) vcycles <= vcycles + 16'd1;
      end
    end
  end

  assign busy = (stage != S_IDLE) && (stage != S_DONE);
  assign done = (stage == S_DONE);

  // ----------------------------------------------------------- control word
  always_comb begin
    idx_t b0, b1;
    b0 = base_of(level);
    b1 = base_of(level + 5'd1);
    ctrl           = '0;
    ctrl.phase     = phase;
    ctrl.n_l       = n_l;
    ctrl.first_col = (j == idx_t'(1));
    ctrl.last_col  = (j == n_l);
    ctrl.sq_h      = fp_scale_pow4(sq_h0, int'(level));
    ctrl.inv_sq_h  = fp_scale_pow4(inv_sq_h0, -int'(level));
    if (stage == S_RESTRICT) begin
      ctrl.a_c = b0 + ((j - idx_t'(1)) << 1);
      ctrl.a_w = b1 + j - idx_t'(1);
    end else begin
      ctrl.a_c = b0 + j - idx_t'(1);
      ctrl.a_w = ctrl.a_c;
    end
    ctrl.a_l = ctrl.a_c - idx_t'(1);
    ctrl.a_r = ctrl.a_c + idx_t'(1);
    ctrl.a_p = b1 + ((j - idx_t'(1)) >> 1);
    unique case (stage)
      S_INIT:                  ctrl.op = OP_INIT;
      S_PRE, S_POST, S_COARSE: ctrl.op = OP_SMOOTH;
      S_RESID:                 ctrl.op = OP_RESID;
      S_RESTRICT:              ctrl.op = OP_RESTRICT;
      S_PROLONG:               ctrl.op = OP_PROLONG;
      S_CORRECT:               ctrl.op = OP_CORRECT;
      default:                 ctrl.op = OP_IDLE;
    endcase
  end

endmodule
