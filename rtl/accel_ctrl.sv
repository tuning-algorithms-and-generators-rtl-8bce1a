// accel_ctrl: accelerator controller behind the RoCC link.
//
// Takes custom-instruction commands from the command queue and either
//  * writes one word into a PE memory through the memory interface
//    (weight chunk or bias, crossbar select, activation), one per cycle;
//  * sets the layer configuration (n_in routed inputs, n_out output rows,
//    quantizer shift);
//  * runs one layer: ROUTE for n_in cycles (every PE broadcasts act_sram[t],
//    every PE picks one broadcast by select_sram[t] and stores it as input
//    t), one cycle for the last routed value to land, one LATCH cycle, COMPUTE
//    for n_out cycles (row r of every PE in parallel, one output per cycle),
//    one cycle for the last write; then it answers with the number of cycles
//    the layer took (n_in + n_out + 3);
//  * reads one activation back (answer: the activation);
//  * LOAD: copies a block of 64-bit words from the core's data cache into a
//    PE memory through dma_loader (answer: the word count), using the
//    memory request/response port of the RoCC link.
// A response is sent only when the command has xd set; while a response waits
// for the response queue, no new command is taken.
// rs1 carries {pe[31:24], chunk[23:16], addr[15:0]}; CONFIG carries n_in in
// rs1[15:0] and {shift[20:16], n_out[15:0]} in rs2. The command set, field
// layout and phase sequence are this design's choices: the published design
// names the controller and the RoCC command/response path but not its
// instructions. Values of n_in/n_out outside 1..N are clamped to that range.
module accel_ctrl
  import apu_pkg::*;
#(
  parameter int unsigned N_P = N_PE,
  parameter int unsigned N   = BLOCK,
  localparam int unsigned AW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned N_CHUNK = (N * W_W + XLEN - 1) / XLEN,
  localparam int unsigned CW      = $clog2(N_CHUNK + 1),
  localparam int unsigned PIW     = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command queue side
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  rocc_cmd_t                cmd,
  // response queue side
  output logic                     resp_valid,
  input  logic                     resp_ready,
  output rocc_resp_t               resp,
  output logic                     busy,
  // memory interface to the PEs
  output logic [N_P-1:0]           mem_we,
  output mem_sel_e                 mem_sel,
  output logic [AW-1:0]            mem_addr,
  output logic [CW-1:0]            mem_chunk,
  output logic [XLEN-1:0]          mem_wdata,
  // layer control to all PEs
  output logic                     rt_clear,
  output logic                     rt_rd,
  output logic [AW-1:0]            rt_addr,
  output logic                     latch,
  output logic                     cp_rd,
  output logic [AW-1:0]            cp_addr,
  output logic [4:0]               shift,
  output logic                     hr_rd,
  output logic [AW-1:0]            hr_addr,
  input  logic [N_P-1:0][A_W-1:0]  pe_rdata,
  // memory request/response port towards the L1 data cache
  output logic                     dmem_req_valid,
  input  logic                     dmem_req_ready,
  output logic [XLEN-1:0]          dmem_req_addr,
  input  logic                     dmem_resp_valid,
  input  logic [XLEN-1:0]          dmem_resp_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_ROUTE, S_RLAND, S_LATCH, S_COMPUTE, S_CLAND, S_RDWAIT, S_RESP, S_DMA
  } state_e;

  state_e          state;
  logic [AW:0]     n_in, n_out;       // configured lengths, 1..N
  logic [AW:0]     idx;               // phase counter
  logic [31:0]     cyc;               // cycles spent in the running layer
  logic [4:0]      rd_q;
  logic            xd_q;
  logic [XLEN-1:0] rdata_q;
  logic [7:0]      rpe_q;

  // command fields
  logic [7:0]  f_pe;
  logic [7:0]  f_chunk;
  logic [15:0] f_addr;
  assign f_pe    = cmd.rs1[RS1_PE_LSB    +: 8];
  assign f_chunk = cmd.rs1[RS1_CHUNK_LSB +: 8];
  assign f_addr  = cmd.rs1[RS1_ADDR_LSB  +: 16];

  function automatic logic [AW:0] clamp_len(input logic [15:0] v);
    if (v == 16'd0)          return (AW+1)'(1);
    else if (v > 16'(N))     return (AW+1)'(N);
    else                     return v[AW:0];
  endfunction

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE) || cmd_valid;

  // memory loader
  logic            dma_start, dma_active, dma_done;
  logic [N_P-1:0]  dma_we;
  mem_sel_e        dma_sel;
  logic [AW-1:0]   dma_addr;
  logic [CW-1:0]   dma_chunk;
  logic [XLEN-1:0] dma_wdata;

  assign dma_start = (state == S_IDLE) && cmd_valid && cmd.funct == OP_LOAD
                     && cmd.rs2[RS2_PE_LSB +: 8] < 8'(N_P);

  dma_loader #(.N_P(N_P), .N(N)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .base(cmd.rs1), .pe(cmd.rs2[RS2_PE_LSB +: PIW]),
    .target(mem_sel_e'(cmd.rs2[RS2_TARGET_LSB +: 2])), .count(cmd.rs2[15:0]),
    .active(dma_active), .done(dma_done),
    .req_valid(dmem_req_valid), .req_ready(dmem_req_ready), .req_addr(dmem_req_addr),
    .resp_valid(dmem_resp_valid), .resp_data(dmem_resp_data),
    .mem_we(dma_we), .mem_sel(dma_sel), .mem_addr(dma_addr), .mem_chunk(dma_chunk),
    .mem_wdata(dma_wdata)
  );

  // memory-interface write: from the loader while it runs, otherwise
  // straight from the accepted command
  always_comb begin
    mem_we    = '0;
    mem_sel   = MEM_WEIGHT;
    mem_addr  = f_addr[AW-1:0];
    mem_chunk = f_chunk[CW-1:0];
    mem_wdata = cmd.rs2;
    if (state == S_IDLE && cmd_valid && f_pe < 8'(N_P) && f_addr < 16'(N)) begin
      unique case (cmd.funct)
        OP_WR_WEIGHT: begin mem_sel = MEM_WEIGHT; mem_we[f_pe[PIW-1:0]] = 1'b1; end
        OP_WR_SELECT: begin mem_sel = MEM_SELECT; mem_we[f_pe[PIW-1:0]] = 1'b1; end
        OP_WR_ACT:    begin mem_sel = MEM_ACT;    mem_we[f_pe[PIW-1:0]] = 1'b1; end
        default: ;
      endcase
    end
    if (state == S_DMA) begin
      mem_we    = dma_we;
      mem_sel   = dma_sel;
      mem_addr  = dma_addr;
      mem_chunk = dma_chunk;
      mem_wdata = dma_wdata;
    end
  end

  // phase outputs
  always_comb begin
    rt_clear = (state == S_IDLE) && cmd_valid && cmd.funct == OP_RUN;
    rt_rd    = (state == S_ROUTE);
    rt_addr  = idx[AW-1:0];
    latch    = (state == S_LATCH);
    cp_rd    = (state == S_COMPUTE);
    cp_addr  = idx[AW-1:0];
    hr_rd    = (state == S_IDLE) && cmd_valid && cmd.funct == OP_RD_ACT;
    hr_addr  = f_addr[AW-1:0];
  end

  assign resp_valid = (state == S_RESP);
  assign resp.rd    = rd_q;
  assign resp.data  = rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n_in    <= (AW+1)'(N);
      n_out   <= (AW+1)'(N);
      shift   <= '0;
      idx     <= '0;
      cyc     <= '0;
      rd_q    <= '0;
      xd_q    <= 1'b0;
      rdata_q <= '0;
      rpe_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          rd_q    <= cmd.rd;
          xd_q    <= cmd.xd;
          rdata_q <= '0;
          rpe_q   <= f_pe;
          case (cmd.funct)
            OP_CONFIG: begin
              n_in  <= clamp_len(cmd.rs1[15:0]);
              n_out <= clamp_len(cmd.rs2[15:0]);
              shift <= cmd.rs2[20:16];
              if (cmd.xd) state <= S_RESP;
            end
            OP_RUN: begin
              idx   <= '0;
              cyc   <= 32'd1;
              state <= S_ROUTE;
            end
            OP_RD_ACT: state <= S_RDWAIT;
            OP_LOAD: begin
              rdata_q <= XLEN'(cmd.rs2[15:0]);
              if (dma_start)   state <= S_DMA;
              else if (cmd.xd) state <= S_RESP;
            end
            default:   if (cmd.xd) state <= S_RESP;   // writes and unknown opcodes
          endcase
        end
        S_ROUTE: begin
          cyc <= cyc + 1;
          if (idx == n_in - 1) begin idx <= '0; state <= S_RLAND; end
          else idx <= idx + 1'b1;
        end
        S_RLAND: begin cyc <= cyc + 1; state <= S_LATCH; end
        S_LATCH: begin cyc <= cyc + 1; state <= S_COMPUTE; end
        S_COMPUTE: begin
          cyc <= cyc + 1;
          if (idx == n_out - 1) begin idx <= '0; state <= S_CLAND; end
          else idx <= idx + 1'b1;
        end
        S_CLAND: begin
          rdata_q <= XLEN'(cyc);
          state   <= xd_q ? S_RESP : S_IDLE;
        end
        S_RDWAIT: begin
          rdata_q <= (rpe_q < 8'(N_P)) ? XLEN'(pe_rdata[rpe_q[PIW-1:0]]) : '0;
          state   <= xd_q ? S_RESP : S_IDLE;
        end
        S_DMA: if (dma_done || !dma_active) state <= xd_q ? S_RESP : S_IDLE;
        S_RESP: if (resp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
