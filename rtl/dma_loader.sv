// dma_loader: streams PE memory contents from the core's data cache.
//
// Started with a byte address, a target PE, a target memory and a word count,
// it reads `count` consecutive 64-bit words from memory (addresses base,
// base+8, ...) over the accelerator's memory request/response port and turns
// each returned word into one memory-interface write:
//   weights: word k goes to row k / (N_CHUNK+1), chunk k % (N_CHUNK+1), i.e.
//            a row is N_CHUNK weight words followed by one bias word;
//   select / activation: word k goes to entry k (low bits of the word).
// Requests are issued whenever the port is ready, without waiting for earlier
// responses; responses must come back in request order (one per request).
// done pulses for one cycle after the last write. The request/response
// memory path itself is named in the published RoCC diagram ("MEM REQ/RESP");
// the address order, the in-order response rule and the word formats are this
// design's choices.
module dma_loader
  import apu_pkg::*;
#(
  parameter int unsigned N_P = N_PE,
  parameter int unsigned N   = BLOCK,
  localparam int unsigned AW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned N_CHUNK = (N * W_W + XLEN - 1) / XLEN,
  localparam int unsigned CW      = $clog2(N_CHUNK + 1),
  localparam int unsigned PIW     = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // job
  input  logic            start,
  input  logic [XLEN-1:0] base,
  input  logic [PIW-1:0]  pe,
  input  mem_sel_e        target,
  input  logic [15:0]     count,
  output logic            active,
  output logic            done,
  // memory port
  output logic            req_valid,
  input  logic            req_ready,
  output logic [XLEN-1:0] req_addr,
  input  logic            resp_valid,
  input  logic [XLEN-1:0] resp_data,
  // memory-interface write
  output logic [N_P-1:0]  mem_we,
  output mem_sel_e        mem_sel,
  output logic [AW-1:0]   mem_addr,
  output logic [CW-1:0]   mem_chunk,
  output logic [XLEN-1:0] mem_wdata
);
  logic [XLEN-1:0] base_q;
  logic [PIW-1:0]  pe_q;
  mem_sel_e        target_q;
  logic [15:0]     count_q, n_req, n_resp;
  logic [AW-1:0]   row;
  logic [CW-1:0]   chunk;

  assign req_valid = active && (n_req != count_q);
  assign req_addr  = base_q + XLEN'({n_req, 3'b000});

  always_comb begin
    mem_we    = '0;
    mem_sel   = target_q;
    mem_addr  = row;
    mem_chunk = chunk;
    mem_wdata = resp_data;
    if (active && resp_valid && n_resp != count_q) mem_we[pe_q] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      done     <= 1'b0;
      base_q   <= '0;
      pe_q     <= '0;
      target_q <= MEM_WEIGHT;
      count_q  <= '0;
      n_req    <= '0;
      n_resp   <= '0;
      row      <= '0;
      chunk    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active   <= (count != 16'd0);
        done     <= (count == 16'd0);
        base_q   <= base;
        pe_q     <= pe;
        target_q <= target;
        count_q  <= count;
        n_req    <= '0;
        n_resp   <= '0;
        row      <= '0;
        chunk    <= '0;
      end else if (active) begin
        if (req_valid && req_ready) n_req <= n_req + 1'b1;
        if (resp_valid && n_resp != count_q) begin
          n_resp <= n_resp + 1'b1;
          if (target_q == MEM_WEIGHT && chunk != CW'(N_CHUNK)) begin
            chunk <= chunk + 1'b1;
          end else begin
            chunk <= '0;
            row   <= row + 1'b1;
          end
          if (n_resp + 16'd1 == count_q) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
    end
  end

  // a response may only answer an issued request
  always_ff @(posedge clk) begin
    if (active && resp_valid)
      assert (n_resp < n_req) else $error("dma_loader: response without request");
  end
endmodule
