// act_sram: output-activation memory of a PE.
//
// Holds the DEPTH activations the PE computed for the current layer; the same
// contents are the (already permuted) inputs of the next layer, which the
// routing matrix reads back one value per cycle. Two write sources share the
// write port through a multiplexer, as in the PE diagram: the ReLU/quantizer
// output during compute, and the memory interface (host) otherwise; compute
// wins if both write in the same cycle. Read is synchronous (data in the
// cycle after the address). On silicon an SRAM macro; here an array.
module act_sram #(
  parameter int unsigned DEPTH = apu_pkg::BLOCK,
  parameter int unsigned A_W   = apu_pkg::A_W,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  // datapath write (ReLU/quantizer)
  input  logic           cwe,
  input  logic [AW-1:0]  caddr,
  input  logic [A_W-1:0] cdata,
  // memory-interface write
  input  logic           hwe,
  input  logic [AW-1:0]  haddr,
  input  logic [A_W-1:0] hdata,
  // read port
  input  logic           re,
  input  logic [AW-1:0]  raddr,
  output logic [A_W-1:0] rdata
);
  logic [A_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cwe)      mem[caddr] <= cdata;
    else if (hwe) mem[haddr] <= hdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
