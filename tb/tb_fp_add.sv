// Self-checking testbench of fp_add: random and corner-case operands are
// compared bit for bit with the reference sum of fp_ref_pkg (double
// arithmetic rounded to float32). Covers far-apart exponents (sticky-only
// alignment), near-equal magnitudes of opposite sign (massive cancellation),
// exact cancellation, rounding carry-out and zero operands.
module tb_fp_add;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_add dut (.a, .b, .y);

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = fadd(x, z);
    checks++;
    if (!same(y, exp_y)) begin
      failures++;
      if (failures < 10) $display("fp_add %h + %h = %h, expected %h", x, z, y, exp_y);
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
    logic [31:0] x, z;
    check(32'h3f800000, 32'h3f800000);   // 1 + 1
    check(32'h3f800000, 32'hbf800000);   // 1 - 1
    check(32'h3f800000, 32'h00000000);   // 1 + 0
    check(32'h00000000, 32'hc0400000);   // 0 - 3
    check(32'h3f7fffff, 32'h33800000);   // rounding carries into the exponent
    check(32'h4b000000, 32'h3f000000);   // tie, round to even
    check(32'h4b000001, 32'h3f000000);   // tie, round up to even
    check(32'h3f800001, 32'hbf800000);   // cancellation to one ulp
    for (int k = 0; k < 3000; k++) begin
      x = rnd(100, 154);
      z = rnd(int'(x[30:23]) - 30, int'(x[30:23]) + 30);
      check(x, z);
      z = {~x[31], x[30:2], 2'($urandom)};  // near cancellation
      check(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
