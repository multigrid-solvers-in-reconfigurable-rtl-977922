// Self-checking testbench of fp_mul: random and corner-case operands are
// compared bit for bit with the reference product of fp_ref_pkg.
module tb_fp_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul dut (.a, .b, .y);

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = fmul(x, z);
    checks++;
    if (!same(y, exp_y)) begin
      failures++;
      if (failures < 10) $display("fp_mul %h * %h = %h, expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3e800000, 32'h40800000);   // 0.25 * 4
    check(32'hc0400000, 32'h3f000000);   // -3 * 0.5
    check(32'h3f800000, 32'h00000000);   // 1 * 0
    check(32'h3fffffff, 32'h3fffffff);   // rounding carries into the exponent
    check(32'h3f800001, 32'h3f800001);
    for (int k = 0; k < 5000; k++) check(rnd(70, 180), rnd(70, 180));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
