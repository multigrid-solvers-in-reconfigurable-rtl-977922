// Self-checking testbench of restrict_op: for random 2x2 blocks of fine
// residuals it runs the three phases and compares the written coarse value
// with 0.125*((r00+r10)+(r01+r11)) rounded in the operator's order. The fine
// inputs are changed after phase 0 to check that the unit holds them.
module tb_restrict_op;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  logic clk = 0, en = 0, we;
  logic [2:0] phase = 0;
  fp32_t r00, r10, r01, r11, wdata;
  int checks = 0, failures = 0;

  restrict_op dut (.clk, .en, .phase, .r00, .r10, .r01, .r11, .we, .wdata);

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
    for (int k = 0; k < 500; k++) begin
      r00 = rnd(110, 135); r10 = rnd(110, 135); r01 = rnd(110, 135); r11 = rnd(110, 135);
      exp_w = fmul(r2f(0.125), fadd(fadd(r00, r10), fadd(r01, r11)));
      wes = 0;
      for (int p = 0; p < 3; p++) begin
        @(negedge clk);
        en = 1; phase = 3'(p);
        if (p > 0) begin
          r00 = $urandom; r10 = $urandom; r01 = $urandom; r11 = $urandom;
        end
        #1;
        if (we) begin
          wes++;
          checks++;
          if (p != 2 || !same(wdata, exp_w)) begin
            failures++;
            if (failures < 10) $display("restrict phase %0d: got %h expected %h", p, wdata, exp_w);
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
