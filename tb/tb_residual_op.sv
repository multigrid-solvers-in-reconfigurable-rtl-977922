// Self-checking testbench of residual_op: runs the five phases of a column
// for random stencil values and compares the written residual with
// f + (((up+down)+(left+right)) - 4*u) * (1/h^2), rounded step by step in the
// operator's order, and res_abs with its magnitude. Checks that the write
// comes in phase 4 only (five clocks per column).
module tb_residual_op;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  logic clk = 0, en = 0, we;
  logic [2:0] phase = 0;
  fp32_t up, down, left, right, centre, rho, inv_sq_h, wdata, res_abs;
  int checks = 0, failures = 0;

  residual_op dut (.clk, .en, .phase, .up, .down, .left, .right, .centre, .rho,
                   .inv_sq_h, .we, .wdata, .res_abs);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t exp_w, s4;
    int    wes;
    for (int k = 0; k < 400; k++) begin
      up = rnd(120, 130); down = rnd(120, 130); left = rnd(120, 130); right = rnd(120, 130);
      centre = rnd(120, 130); rho = rnd(120, 140); inv_sq_h = rnd(127, 150);
      s4 = fmul(FP_FOUR, centre);
      exp_w = fadd(rho, fmul(fadd(fadd(fadd(up, down), fadd(left, right)), {~s4[31], s4[30:0]}), inv_sq_h));
      wes = 0;
      for (int p = 0; p < 5; p++) begin
        @(negedge clk);
        en = 1; phase = 3'(p);
        #1;
        if (we) begin
          wes++;
          checks += 2;
          if (p != 4) begin
            failures++;
            $display("write in phase %0d", p);
          end
          if (!same(wdata, exp_w)) begin
            failures++;
            if (failures < 10) $display("resid: got %h expected %h", wdata, exp_w);
          end
          if (res_abs[30:0] != wdata[30:0] || res_abs[31]) begin
            failures++;
            $display("res_abs %h for r %h", res_abs, wdata);
          end
        end
      end
      checks++;
      if (wes != 1) begin
        failures++;
        $display("%0d writes in one column", wes);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
