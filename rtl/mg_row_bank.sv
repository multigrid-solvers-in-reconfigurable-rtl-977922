// One grid row of one lane, for every level of the grid hierarchy.
//
// A plain memory with NRD combinational read ports and one synchronous write
// port, written as an array (register file or distributed RAM on an FPGA).
// Level l of the hierarchy keeps its row at addresses base(l) .. base(l)+n_l-1
// where n_l = N/2**l and base(l) = N + N/2 + ... (the sum of the finer
// levels' widths); the address arithmetic is done by the V-cycle controller.
// Boundary columns are not stored: the lane substitutes zero for them.
//
// Timing: a read returns the word written at an earlier clock edge; a write
// takes effect at the rising edge where we is high. The paper keeps its
// grids in Handel-C arrays without saying how they map to memory; the
// per-row banking is this design's choice, made so that every row lane owns
// its own memory.
module mg_row_bank
  import mg_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp32_t         wdata,
  input  logic [AW-1:0] raddr [NRD],
  output fp32_t         rdata [NRD]
);

  fp32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end

endmodule
