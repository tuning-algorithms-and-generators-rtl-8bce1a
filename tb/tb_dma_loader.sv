// tb_dma_loader: runs weight, select and activation load jobs against the
// behavioural memory model and checks every request address, every
// memory-interface write (PE strobe, memory, row, chunk, data) against the
// expected word sequence, the word count, and the done pulse.
module tb_dma_loader;
  import apu_pkg::*;
  localparam int NP = 10, N = 400, NCH = (N * 4 + 63) / 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, active, done;
  logic [63:0] base = '0;
  logic [3:0] pe = '0;
  mem_sel_e target = MEM_WEIGHT;
  logic [15:0] count = '0;
  logic req_valid, req_ready, resp_valid;
  logic [63:0] req_addr, resp_data;
  logic [NP-1:0] mem_we;
  mem_sel_e mem_sel;
  logic [8:0] mem_addr;
  logic [4:0] mem_chunk;
  logic [63:0] mem_wdata;

  dma_loader #(.N_P(NP), .N(N)) dut (.*);
  l1_mem_model u_mem (.clk, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data);

  int checks = 0, failures = 0;
  int n_wr = 0, n_req = 0;
  logic [63:0] job_base;
  int job_pe;
  mem_sel_e job_tgt;

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      checks++;
      if (req_addr != job_base + 64'(8 * n_req)) begin
        failures++;
        if (failures < 10) $display("request %0d address %h", n_req, req_addr);
      end
      n_req++;
    end
    if (mem_we != '0) begin
      automatic int row = (job_tgt == MEM_WEIGHT) ? n_wr / (NCH + 1) : n_wr;
      automatic int ch  = (job_tgt == MEM_WEIGHT) ? n_wr % (NCH + 1) : 0;
      checks++;
      if (mem_we != NP'(1) << job_pe || mem_sel != job_tgt || int'(mem_addr) != row
          || int'(mem_chunk) != ch || mem_wdata != u_mem.mem[job_base + 64'(8 * n_wr)]) begin
        failures++;
        if (failures < 10) $display("write %0d wrong: we %b row %0d chunk %0d", n_wr, mem_we, mem_addr, mem_chunk);
      end
      n_wr++;
    end
  end

  task automatic run_job(mem_sel_e tgt, int p, int words);
    int cyc = 0;
    job_base = 64'h8000_0000 + 64'($urandom_range(0, 1000) * 8);
    job_pe = p; job_tgt = tgt; n_wr = 0; n_req = 0;
    for (int k = 0; k < words; k++) u_mem.write_word(job_base + 64'(8 * k), {$urandom, $urandom});
    @(negedge clk);
    start = 1; base = job_base; pe = 4'(p); target = tgt; count = 16'(words);
    @(negedge clk); start = 0;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (n_wr != words || n_req != words || active) begin
      failures++; $display("job: %0d writes %0d requests for %0d words", n_wr, n_req, words);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_job(MEM_WEIGHT, 3, 20 * (NCH + 1));
    run_job(MEM_SELECT, 9, 400);
    run_job(MEM_ACT, 0, 137);
    run_job(MEM_WEIGHT, 7, N * (NCH + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
