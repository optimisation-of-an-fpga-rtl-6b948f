// rate_ram: on-chip store of one rate curve (hazard or interest rate): DEPTH entries,
// each a (time, rate) pair of doubles.
//
// The curve is written once, when the engine is initialised, through the write port,
// and is then only read. The memory has two read ports, like the dual-ported UltraRAM
// blocks that hold the constant data in the engine; a bank of replicated hazard or
// interpolation units uses one copy of the curve per two units. Reads are synchronous:
// the entry at rd_addr appears on rd_data one cycle later.
module rate_ram
  import cds_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  rate_pt_t      wdata,
  input  logic [AW-1:0] rd_addr [2],
  output rate_pt_t      rd_data [2]
);
  rate_pt_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < 2; p++) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule
