// pe: processing element, one dense block of the structured-sparse layer.
//
// Datapath (spatial processing): the routed input activations are collected
// one per cycle in the input register, copied into the input latches, and then
// every cycle one weight-SRAM row is read and multiplied with all latched
// activations at once; a 9-stage adder tree sums the products, the
// ReLU/quantizer turns the sum into a 4-bit activation, and that activation
// is written into the activation SRAM. One output activation per cycle.
// The activation SRAM doubles as this PE's broadcast source on the routing
// matrix for the next layer; the select SRAM holds this PE's crossbar select
// for every routing cycle. All three memories are written by the memory
// interface (mem_*).
//
// Control comes from the accelerator controller, shared by all PEs:
//   rt_clear          zero the input register (start of routing)
//   rt_rd, rt_addr    routing cycle t: read act_sram[t] (broadcast) and
//                     select_sram[t]; one cycle later the routed value
//                     (rt_in) is written to input slot t
//   latch             copy the input register to the latches
//   cp_rd, cp_addr    compute cycle r: read weight row r; one cycle later
//                     act_sram[r] <= quant(sum_j w[r][j]*a[j] + bias[r])
//   hr_rd, hr_addr    host read of the activation SRAM, data on bcast_act
// Latencies: bcast_act and sel are valid the cycle after rt_rd/hr_rd.
// The block structure follows the published PE diagram; the control
// signalling and pipelining are this design's own.
module pe
  import apu_pkg::*;
#(
  parameter int unsigned N     = BLOCK,
  parameter int unsigned N_SRC = N_PE,
  localparam int unsigned AW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW      = (N_SRC > 1) ? $clog2(N_SRC + 1) : 1,
  localparam int unsigned N_CHUNK = (N * W_W + XLEN - 1) / XLEN,
  localparam int unsigned CW      = $clog2(N_CHUNK + 1),
  localparam int unsigned SUM_W   = PROD_W + $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // memory interface
  input  logic            mem_we,
  input  mem_sel_e        mem_sel,
  input  logic [AW-1:0]   mem_addr,
  input  logic [CW-1:0]   mem_chunk,
  input  logic [XLEN-1:0] mem_wdata,
  // layer control
  input  logic            rt_clear,
  input  logic            rt_rd,
  input  logic [AW-1:0]   rt_addr,
  input  logic            latch,
  input  logic            cp_rd,
  input  logic [AW-1:0]   cp_addr,
  input  logic [4:0]      shift,
  input  logic            hr_rd,
  input  logic [AW-1:0]   hr_addr,
  // routing matrix side
  output logic [A_W-1:0]  bcast_act,  // this PE's broadcast activation
  output logic [SW-1:0]   sel,        // select of this PE's multiplexer
  input  logic [A_W-1:0]  rt_in,      // value the multiplexer picked
  // event flags for the written output (valid with act_we)
  output logic            act_we,
  output logic            clipped_neg,
  output logic            saturated
);
  // pipeline registers: one cycle of SRAM read latency
  logic          rt_wr_q, cp_wr_q;
  logic [AW-1:0] rt_idx_q, cp_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_wr_q  <= 1'b0;
      cp_wr_q  <= 1'b0;
      rt_idx_q <= '0;
      cp_idx_q <= '0;
    end else begin
      rt_wr_q  <= rt_rd;
      cp_wr_q  <= cp_rd;
      rt_idx_q <= rt_addr;
      cp_idx_q <= cp_addr;
    end
  end

  // ---- select SRAM ----
  select_sram #(.DEPTH(N), .N_SRC(N_SRC)) u_sel (
    .clk, .we(mem_we && mem_sel == MEM_SELECT), .waddr(mem_addr),
    .wdata(mem_wdata[SW-1:0]), .re(rt_rd), .raddr(rt_addr), .rdata(sel)
  );

  // ---- input register + latches ----
  logic [N-1:0][A_W-1:0] acts;
  input_buffer #(.N(N)) u_inbuf (
    .clk, .rst_n, .clear(rt_clear), .wr_en(rt_wr_q), .wr_idx(rt_idx_q),
    .wr_data(rt_in), .latch, .acts
  );

  // ---- weight SRAM ----
  logic [N-1:0][W_W-1:0]   wrow;
  logic signed [BIAS_W-1:0] bias;
  weight_sram #(.ROWS(N), .N(N)) u_wsram (
    .clk, .we(mem_we && mem_sel == MEM_WEIGHT), .waddr(mem_addr),
    .wchunk(mem_chunk), .wdata(mem_wdata),
    .re(cp_rd), .raddr(cp_addr), .rd_row(wrow), .rd_bias(bias)
  );

  // ---- multipliers, adder tree, ReLU/quantizer ----
  logic signed [N-1:0][PROD_W-1:0] prods;
  logic signed [SUM_W-1:0]         sum;
  logic [A_W-1:0]                  qact;
  logic                            q_neg, q_sat;

  mult_array #(.N(N)) u_mul (.weights(wrow), .acts, .prods);
  adder_tree #(.N(N), .W(PROD_W)) u_tree (.in(prods), .sum);
  relu_quant #(.IN_W(SUM_W)) u_q (
    .sum, .bias, .shift, .act(qact), .clipped_neg(q_neg), .saturated(q_sat)
  );

  // ---- activation SRAM ----
  act_sram #(.DEPTH(N)) u_asram (
    .clk,
    .cwe(cp_wr_q), .caddr(cp_idx_q), .cdata(qact),
    .hwe(mem_we && mem_sel == MEM_ACT), .haddr(mem_addr), .hdata(mem_wdata[A_W-1:0]),
    .re(rt_rd || hr_rd), .raddr(rt_rd ? rt_addr : hr_addr), .rdata(bcast_act)
  );

  assign act_we      = cp_wr_q;
  assign clipped_neg = cp_wr_q && q_neg;
  assign saturated   = cp_wr_q && q_sat;
endmodule
