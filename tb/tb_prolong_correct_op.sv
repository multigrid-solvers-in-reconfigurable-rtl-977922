// Self-checking testbench of prolong_correct_op: in prolongation mode the
// coarse value must be written to v unchanged and u left alone; in
// correction mode u + v (reference float32 sum) must be written to u and v
// left alone; with neither enabled nothing may be written.
module tb_prolong_correct_op;
  import fp_ref_pkg::*;
  import mg_pkg::*;

  logic  en_prolong, en_correct, v_we, u_we;
  fp32_t coarse, u_in, v_in, v_wdata, u_wdata;
  int checks = 0, failures = 0;

  prolong_correct_op dut (.en_prolong, .en_correct, .coarse, .u_in, .v_in,
                          .v_we, .v_wdata, .u_we, .u_wdata);

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("%s", msg);
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 1000; k++) begin
      coarse = rnd(100, 150); u_in = rnd(110, 140); v_in = rnd(110, 140);
      en_prolong = 1; en_correct = 0;
      #1;
      checks += 2;
      if (!v_we || v_wdata != coarse) fail("prolongation did not copy the coarse value");
      if (u_we) fail("u written during prolongation");
      en_prolong = 0; en_correct = 1;
      #1;
      checks += 2;
      if (!u_we || !same(u_wdata, fadd(u_in, v_in)))
        fail($sformatf("correct: %h + %h gave %h", u_in, v_in, u_wdata));
      if (v_we) fail("v written during correction");
      en_correct = 0;
      #1;
      checks++;
      if (u_we || v_we) fail("write while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
