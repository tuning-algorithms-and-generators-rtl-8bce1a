// weight_sram: PE-local weight memory, one dense block of the pruned layer.
//
// ROWS rows of N weights each (400 x 400 INT4 = 640 kbit per PE on the chip).
// One full row is read per cycle and feeds all multipliers at once. The read
// is synchronous: the row addressed in cycle t appears on rd_row in cycle t+1.
// Each row also holds one signed bias, kept in a side array.
// The memory is loaded through the memory interface in XLEN-bit chunks:
// chunk c of a row holds weights c*(XLEN/W_W) .. upward, weight 0 in the low
// bits; chunk index N_CHUNK writes the bias. The chunked write port and the
// bias storage are this design's choices; the published design states only
// that the weights of a block sit in a dedicated SRAM read one row per output.
// On silicon this is an SRAM macro; here it is an array.
module weight_sram #(
  parameter int unsigned ROWS   = apu_pkg::BLOCK,
  parameter int unsigned N      = apu_pkg::BLOCK,
  parameter int unsigned W_W    = apu_pkg::W_W,
  parameter int unsigned BIAS_W = apu_pkg::BIAS_W,
  parameter int unsigned XLEN   = apu_pkg::XLEN,
  localparam int unsigned N_CHUNK = (N * W_W + XLEN - 1) / XLEN,
  localparam int unsigned AW      = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW      = $clog2(N_CHUNK + 1)
) (
  input  logic                       clk,
  // write port (memory interface)
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [CW-1:0]              wchunk,
  input  logic [XLEN-1:0]            wdata,
  // read port (datapath)
  input  logic                       re,
  input  logic [AW-1:0]              raddr,
  output logic [N-1:0][W_W-1:0]      rd_row,
  output logic signed [BIAS_W-1:0]   rd_bias
);
  logic [XLEN-1:0]   mem  [ROWS][N_CHUNK];
  logic [BIAS_W-1:0] bias [ROWS];
  logic [N_CHUNK*XLEN-1:0] row_q;

  always_ff @(posedge clk) begin
    if (we) begin
      if (wchunk < CW'(N_CHUNK)) mem[waddr][wchunk] <= wdata;
      else                       bias[waddr]        <= wdata[BIAS_W-1:0];
    end
    if (re) begin
      for (int c = 0; c < N_CHUNK; c++) row_q[c*XLEN +: XLEN] <= mem[raddr][c];
      rd_bias <= bias[raddr];
    end
  end

  assign rd_row = row_q[N*W_W-1:0];
endmodule
