// routing_matrix: output-multiplexed crossbar between the PEs.
//
// Every cycle each of the N_SRC source PEs broadcasts one activation read
// from its activation SRAM. Each of the N_DST destination PEs owns one
// N_SRC:1 multiplexer whose select comes from its select SRAM, and so picks
// up exactly one of the broadcast values. The offline schedule makes the
// selects of one cycle a permutation, so no value is lost or duplicated.
// A select >= N_SRC delivers zero (own choice, used for idle slots).
// Combinational; the destination registers the value. The
// broadcast-and-multiplex structure follows the published design.
module routing_matrix #(
  parameter int unsigned N_SRC = apu_pkg::N_PE,
  parameter int unsigned N_DST = apu_pkg::N_PE,
  parameter int unsigned A_W   = apu_pkg::A_W,
  localparam int unsigned SW   = (N_SRC > 1) ? $clog2(N_SRC + 1) : 1
) (
  input  logic [N_SRC-1:0][A_W-1:0] src,
  input  logic [N_DST-1:0][SW-1:0]  sel,
  output logic [N_DST-1:0][A_W-1:0] dst
);
  always_comb begin
    for (int d = 0; d < N_DST; d++) begin
      dst[d] = '0;
      for (int s = 0; s < N_SRC; s++)
        if (sel[d] == SW'(s)) dst[d] = src[s];
    end
  end
endmodule
