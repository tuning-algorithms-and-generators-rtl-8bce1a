// apu_top: accelerator side of the Accelerator Processing Unit (APU).
//
// A fully connected layer, pruned during training into N_P independent dense
// BLOCK x BLOCK blocks, is computed by N_P processing elements in parallel.
// Each PE keeps its block of weights locally, so no weights move during
// inference; only activations move, through the routing matrix, which lets
// every PE pick one activation per cycle from the broadcasts of all PEs
// according to a schedule fixed at compile time.
//
// The RISC-V core talks to the accelerator over the RoCC link: commands enter
// a command queue, responses leave through a response queue (both
// sync_fifo), and the controller decodes the commands, writes PE memories
// through the memory interface and sequences a layer:
//   route (n_in cycles) -> latch -> compute (n_out cycles, one output row per
//   cycle in every PE) -> response with the layer's cycle count.
// With the defaults (10 PEs, 400x400 INT4 blocks) one layer is a 4000x4000
// block-diagonal matrix (16M dense-equivalent parameters); compute takes 400
// cycles and routing another 400.
// Ports are the RoCC command/response handshakes and the RoCC memory
// request/response port (used by the LOAD command to stream PE memory
// contents from the core's data cache); the core and its caches are outside
// this module. The block set and
// its wiring follow the published top-level, PE and RoCC diagrams; the
// command set, queue depth and phase timing are this design's choices.
module apu_top
  import apu_pkg::*;
#(
  parameter int unsigned N_P       = N_PE,
  parameter int unsigned N         = BLOCK,
  parameter int unsigned CMD_DEPTH = 4,
  parameter int unsigned RSP_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  rocc_cmd_t  cmd,
  output logic       resp_valid,
  input  logic       resp_ready,
  output rocc_resp_t resp,
  output logic       busy,
  // memory request/response port towards the core's L1 data cache
  output logic             dmem_req_valid,
  input  logic             dmem_req_ready,
  output logic [XLEN-1:0]  dmem_req_addr,
  input  logic             dmem_resp_valid,
  input  logic [XLEN-1:0]  dmem_resp_data
);
  localparam int unsigned AW      = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned SW      = (N_P > 1) ? $clog2(N_P + 1) : 1;
  localparam int unsigned N_CHUNK = (N * W_W + XLEN - 1) / XLEN;
  localparam int unsigned CW      = $clog2(N_CHUNK + 1);

  // ---- RoCC queues ----
  logic       q_cmd_valid, q_cmd_ready, c_resp_valid, c_resp_ready;
  rocc_cmd_t  q_cmd;
  rocc_resp_t c_resp;

  sync_fifo #(.WIDTH($bits(rocc_cmd_t)), .DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_cmd_valid), .out_ready(q_cmd_ready), .out_data(q_cmd)
  );

  sync_fifo #(.WIDTH($bits(rocc_resp_t)), .DEPTH(RSP_DEPTH)) u_rspq (
    .clk, .rst_n,
    .in_valid(c_resp_valid), .in_ready(c_resp_ready), .in_data(c_resp),
    .out_valid(resp_valid), .out_ready(resp_ready), .out_data(resp)
  );

  // ---- controller ----
  logic [N_P-1:0]           mem_we;
  mem_sel_e                 mem_sel;
  logic [AW-1:0]            mem_addr, rt_addr, cp_addr, hr_addr;
  logic [CW-1:0]            mem_chunk;
  logic [XLEN-1:0]          mem_wdata;
  logic                     rt_clear, rt_rd, latch, cp_rd, hr_rd, ctrl_busy;
  logic [4:0]               shift;
  logic [N_P-1:0][A_W-1:0]  bcast, routed;
  logic [N_P-1:0][SW-1:0]   sel;

  accel_ctrl #(.N_P(N_P), .N(N)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid(q_cmd_valid), .cmd_ready(q_cmd_ready), .cmd(q_cmd),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp(c_resp),
    .busy(ctrl_busy),
    .mem_we, .mem_sel, .mem_addr, .mem_chunk, .mem_wdata,
    .rt_clear, .rt_rd, .rt_addr, .latch, .cp_rd, .cp_addr, .shift,
    .hr_rd, .hr_addr, .pe_rdata(bcast),
    .dmem_req_valid, .dmem_req_ready, .dmem_req_addr, .dmem_resp_valid, .dmem_resp_data
  );

  assign busy = ctrl_busy || resp_valid;

  // ---- routing matrix ----
  routing_matrix #(.N_SRC(N_P), .N_DST(N_P)) u_route (
    .src(bcast), .sel, .dst(routed)
  );

  // ---- processing elements ----
  logic [N_P-1:0] pe_act_we, pe_neg, pe_sat;

  for (genvar p = 0; p < N_P; p++) begin : g_pe
    pe #(.N(N), .N_SRC(N_P)) u_pe (
      .clk, .rst_n,
      .mem_we(mem_we[p]), .mem_sel, .mem_addr, .mem_chunk, .mem_wdata,
      .rt_clear, .rt_rd, .rt_addr, .latch, .cp_rd, .cp_addr, .shift,
      .hr_rd, .hr_addr,
      .bcast_act(bcast[p]), .sel(sel[p]), .rt_in(routed[p]),
      .act_we(pe_act_we[p]), .clipped_neg(pe_neg[p]), .saturated(pe_sat[p])
    );
  end
endmodule
