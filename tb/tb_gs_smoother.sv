// Self-checking testbench of gs_smoother: for random stencil values it runs
// the four phases of one column and compares the written value with
// 0.25*((up+down)+(left+right) + sq_h*rho), each step rounded to float32 in
// the same order as the operator. Checks that the write strobe comes in
// phase 3 only (four clocks per column) and never when the lane is disabled.
module tb_gs_smoother;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  logic clk = 0, en = 0, we;
  logic [2:0] phase = 0;
  fp32_t up, down, left, right, rho, sq_h, wdata;
  int checks = 0, failures = 0;

  gs_smoother dut (.clk, .en, .phase, .up, .down, .left, .right, .rho, .sq_h, .we, .wdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t exp_w;
    int    wes;
    for (int k = 0; k < 400; k++) begin
      up = rnd(110, 135); down = rnd(110, 135); left = rnd(110, 135); right = rnd(110, 135);
      rho = rnd(110, 135); sq_h = rnd(100, 120);
      if (k % 7 == 0) up = FP_ZERO;      // boundary neighbour
      exp_w = fmul(FP_QUARTER, fadd(fadd(fadd(up, down), fadd(left, right)), fmul(sq_h, rho)));
      wes = 0;
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        en = 1; phase = 3'(p);
        #1;
        if (we) begin
          wes++;
          checks++;
          if (p != 3) begin
            failures++;
            $display("write in phase %0d", p);
          end
          if (!same(wdata, exp_w)) begin
            failures++;
            if (failures < 10) $display("gs: got %h expected %h", wdata, exp_w);
          end
        end
      end
      checks++;
      if (wes != 1) begin
        failures++;
        $display("%0d writes in one column", wes);
      end
    end
    @(negedge clk);
    en = 0; phase = 3;
    #1;
    checks++;
    if (we) begin
      failures++;
      $display("write while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
