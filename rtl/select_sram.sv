// select_sram: static routing schedule of one PE.
//
// Entry t holds the select value of this PE's crossbar multiplexer in routing
// cycle t, i.e. which source PE's broadcast activation becomes input t of
// this PE's block. The schedule is computed offline, because the pruning
// permutation is fixed after training, and written through the memory
// interface. Synchronous read, one write port. Values >= N_SRC select nothing
// (the routing matrix then delivers zero), which this design uses for unused
// slots.
module select_sram #(
  parameter int unsigned DEPTH = apu_pkg::BLOCK,
  parameter int unsigned N_SRC = apu_pkg::N_PE,
  localparam int unsigned SW   = (N_SRC > 1) ? $clog2(N_SRC + 1) : 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [SW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [SW-1:0] rdata
);
  logic [SW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
