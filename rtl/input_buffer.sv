// input_buffer: input register and input-activation latches of a PE.
//
// During routing one activation per cycle arrives from the crossbar and is
// written into slot wr_idx of the input register. When the whole block input
// has arrived, a latch pulse copies the register into the activation latches,
// which hold the operands of all multipliers steady for the whole compute
// phase. Because the two are separate, the register is free to collect the
// next input vector while the latches are in use. clear zeroes the register
// so slots that a short layer does not fill multiply as zero.
// The two storage stages follow the PE power breakdown, which lists an input
// register and input activation latches; the clear is this design's choice.
// The latches are modelled as edge-triggered registers.
module input_buffer #(
  parameter int unsigned N   = apu_pkg::BLOCK,
  parameter int unsigned A_W = apu_pkg::A_W,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_idx,
  input  logic [A_W-1:0]        wr_data,
  input  logic                  latch,
  output logic [N-1:0][A_W-1:0] acts
);
  logic [N-1:0][A_W-1:0] in_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_reg <= '0;
      acts   <= '0;
    end else begin
      if (clear)      in_reg         <= '0;
      else if (wr_en) in_reg[wr_idx] <= wr_data;
      if (latch) acts <= in_reg;
    end
  end
endmodule
