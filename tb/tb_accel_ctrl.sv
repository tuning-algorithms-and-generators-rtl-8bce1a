// tb_accel_ctrl: drives RoCC commands straight into the controller and
// checks the memory-interface writes it issues, the CONFIG fields, the exact
// phase sequence of a RUN (n_in route cycles with addresses 0..n_in-1, one
// landing cycle, one latch, n_out compute cycles, the cycle-count response),
// the RD_ACT response, response back-pressure, and that no command is taken
// while busy, and a LOAD command that streams words from the memory model
// into a PE memory.
module tb_accel_ctrl;
  import apu_pkg::*;
  localparam int NP = 10, N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, resp_valid, resp_ready = 1, busy;
  rocc_cmd_t cmd = '0;
  rocc_resp_t resp;
  logic [NP-1:0] mem_we;
  mem_sel_e mem_sel;
  logic [8:0] mem_addr, rt_addr, cp_addr, hr_addr;
  logic [4:0] mem_chunk, shift;
  logic [63:0] mem_wdata;
  logic rt_clear, rt_rd, latch, cp_rd, hr_rd;
  logic [NP-1:0][3:0] pe_rdata;
  logic dmem_req_valid, dmem_req_ready, dmem_resp_valid;
  logic [63:0] dmem_req_addr, dmem_resp_data;
  l1_mem_model u_mem (.clk, .req_valid(dmem_req_valid), .req_ready(dmem_req_ready),
                      .req_addr(dmem_req_addr), .resp_valid(dmem_resp_valid), .resp_data(dmem_resp_data));
  int n_dma_wr = 0;
  always @(posedge clk) if (mem_we == NP'(1) << 2 && mem_sel == MEM_SELECT && dut.dma_active) begin
    n_dma_wr++;
    if (mem_wdata != 64'(n_dma_wr * 3) || int'(mem_addr) != n_dma_wr - 1) failures++;
  end

  accel_ctrl #(.N_P(NP), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic rocc_cmd_t mk(apu_op_e op, int pe, int chunk, int addr, logic [63:0] rs2, bit xd);
    rocc_cmd_t c = '0;
    c.funct = op; c.rd = 5'd7; c.xd = xd;
    c.rs1 = 64'(addr) | (64'(chunk) << 16) | (64'(pe) << 24);
    c.rs2 = rs2;
    return c;
  endfunction

  // issue one command; returns after it was accepted
  task automatic issue(rocc_cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    while (!cmd_ready) @(negedge clk);
    #1;
  endtask

  task automatic wait_resp(output logic [63:0] d, input int limit);
    int n = 0;
    while (!resp_valid && n < limit) begin @(posedge clk); #1; n++; end
    chk(resp_valid, "response arrives");
    chk(resp.rd == 5'd7, "response rd");
    d = resp.data;
  endtask

  initial begin
    logic [63:0] d;
    int n_rt, n_cp, n_lat, first_rt, first_cp, last_rt, cyc;
    for (int p = 0; p < NP; p++) pe_rdata[p] = 4'(p + 3);
    repeat (2) @(negedge clk); rst_n = 1;

    // memory-interface writes
    for (int k = 0; k < 60; k++) begin
      automatic int pe = $urandom_range(0, NP - 1);
      automatic int addr = $urandom_range(0, N - 1);
      automatic int ch = $urandom_range(0, 25);
      automatic apu_op_e op = apu_op_e'($urandom_range(0, 2));
      automatic logic [63:0] v = {$urandom, $urandom};
      issue(mk(op, pe, ch, addr, v, 0));
      chk(mem_we == NP'(1) << pe, "write strobe goes to one PE");
      chk(int'(mem_addr) == addr && mem_wdata == v, "write address/data");
      chk(mem_sel == ((op == OP_WR_WEIGHT) ? MEM_WEIGHT : (op == OP_WR_SELECT) ? MEM_SELECT : MEM_ACT), "memory select");
      if (op == OP_WR_WEIGHT) chk(int'(mem_chunk) == ch, "chunk index");
    end
    issue(mk(OP_WR_ACT, 12, 0, 5, 64'd1, 0));   // PE index out of range: no write
    chk(mem_we == '0, "out-of-range PE ignored");
    cmd_valid = 0;

    // config with response
    issue(mk(OP_CONFIG, 0, 0, 37, (64'd9 << 16) | 64'd23, 1));
    @(negedge clk); cmd_valid = 0;
    wait_resp(d, 10);
    chk(shift == 5'd9, "shift configured");
    @(negedge clk);

    // run: observe the phase sequence
    n_rt = 0; n_cp = 0; n_lat = 0; first_rt = -1; first_cp = -1; last_rt = -1; cyc = 0;
    resp_ready = 0;
    issue(mk(OP_RUN, 0, 0, 0, 64'd0, 1));
    chk(rt_clear, "rt_clear with the accepted RUN");
    @(negedge clk); cmd_valid = 1; cmd = mk(OP_RD_ACT, 4, 0, 3, 64'd0, 1);
    for (int t = 1; t < 200; t++) begin
      if (cmd_ready && t < 150) begin failures++; $display("FAIL: command taken while running"); end
      if (rt_rd) begin
        if (first_rt < 0) first_rt = t;
        chk(int'(rt_addr) == n_rt, "route address sequence");
        n_rt++; last_rt = t;
      end
      if (latch) begin n_lat++; chk(t == last_rt + 2, "latch two cycles after last route"); end
      if (cp_rd) begin
        if (first_cp < 0) first_cp = t;
        chk(int'(cp_addr) == n_cp, "compute address sequence");
        n_cp++;
      end
      if (resp_valid) break;
      @(negedge clk);
    end
    chk(first_rt == 1 && n_rt == 37, "37 route cycles right after accept");
    chk(n_lat == 1 && first_cp == last_rt + 3, "one latch, then compute");
    chk(n_cp == 23, "23 compute cycles");
    repeat (5) begin @(negedge clk); chk(resp_valid && !cmd_ready, "response held under back-pressure"); end
    chk(resp.data == 64'(37 + 23 + 3), "cycle count in response");
    resp_ready = 1;
    @(negedge clk);
    // the queued RD_ACT now runs
    wait_resp(d, 10);
    chk(d == 64'd7, "read-back data from PE 4");
    cmd_valid = 0;
    @(negedge clk);
    // LOAD: 10 words from memory into the select SRAM of PE 2
    for (int k = 0; k < 10; k++) u_mem.write_word(64'h1000 + 64'(8 * k), 64'((k + 1) * 3));
    issue(mk(OP_LOAD, 0, 0, 'h1000, (64'(MEM_SELECT) << 40) | (64'd2 << 24) | 64'd10, 1));
    @(negedge clk); cmd_valid = 0;
    wait_resp(d, 500);
    chk(d == 64'd10, "LOAD response carries the word count");
    chk(n_dma_wr == 10, "LOAD wrote 10 entries in order");
    @(negedge clk);
    // clamping of lengths
    issue(mk(OP_CONFIG, 0, 0, 0, 64'd5000, 0));
    @(negedge clk); cmd_valid = 0;
    chk(dut.n_in == 10'd1 && dut.n_out == 10'(N), "lengths clamped to 1..N");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
