// sync_fifo: single-clock FIFO with valid/ready handshakes on both sides.
//
// Used for the command and response queues of the RoCC link between the core
// and the accelerator. in_ready is low when DEPTH entries are stored;
// out_valid is high while any entry is stored. A push and a pop may happen in
// the same cycle. Data appear at the output in the cycle after the push
// (registered storage, no fall-through). The published link diagram shows the
// two queues; their depth and handshake are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      // handshake rule: never more entries than DEPTH
      assert (count <= (PW+1)'(DEPTH)) else $error("sync_fifo: overflow");
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

endmodule
