// Self-checking testbench of mg_row_bank: writes random words to random
// addresses while reading random addresses on all three read ports, and
// compares every read with a model array kept by the testbench. A write
// must be visible from the clock edge on which it is made.
module tb_mg_row_bank;
  import mg_pkg::*;

  localparam int unsigned DEPTH = 64, NRD = 3, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr [NRD];
  fp32_t wdata = '0, rdata [NRD];
  fp32_t model [DEPTH];
  int checks = 0, failures = 0;

  mg_row_bank #(.DEPTH(DEPTH), .NRD(NRD)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NRD; p++) raddr[p] = '0;
    // fill every word first
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = $urandom; model[a] = wdata;
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 1);
      waddr = AW'($urandom); wdata = $urandom;
      for (int p = 0; p < NRD; p++) raddr[p] = AW'($urandom);
      if (k % 5 == 0) raddr[0] = waddr;
      #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] != model[raddr[p]]) begin
          failures++;
          if (failures < 10) $display("port %0d addr %0d: %h expected %h", p, raddr[p], rdata[p], model[raddr[p]]);
        end
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
