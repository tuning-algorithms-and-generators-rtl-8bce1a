// apu_tb_body.svh: end-to-end test body shared by the top-level testbenches.
// The including module defines NP (PEs), N (block size), WATCHDOG, and an
// apu_top instance named dut wired to the signals declared below; the memory
// port is answered by l1_mem_model.
//
// Scenario (all through the RoCC command port, as the core would do it):
//  layer 1: write an input vector into the activation SRAMs of all PEs,
//           a random per-cycle permutation schedule into the select SRAMs,
//           random weights and biases; RUN; read every output back.
//  layer 2: new weights loaded from the memory model with one LOAD per PE,
//           a new schedule, a CONFIG with shorter n_in/n_out, RUN
//           on the outputs of layer 1 still held in the activation SRAMs.
// Every output is compared with an integer model of the whole chain
// (routing permutation, dot product, bias, ReLU, shift, saturation). The RUN
// responses must report n_in + n_out + 3 cycles. Responses are accepted with
// random back-pressure. Each mechanism is counted and must occur.

  logic       clk = 0, rst_n = 0;
  logic       dmem_req_valid, dmem_req_ready, dmem_resp_valid;
  logic [63:0] dmem_req_addr, dmem_resp_data;
  l1_mem_model u_mem (.clk, .req_valid(dmem_req_valid), .req_ready(dmem_req_ready),
                      .req_addr(dmem_req_addr), .resp_valid(dmem_resp_valid), .resp_data(dmem_resp_data));
  logic       cmd_valid = 0, cmd_ready, resp_valid, resp_ready = 0, busy;
  rocc_cmd_t  cmd = '0;
  rocc_resp_t resp;
  always #5 clk = ~clk;

  localparam int NCH = (N * 4 + 63) / 64;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_route = 0, n_latch = 0, n_comp = 0, n_relu = 0, n_sat = 0;
  int n_hostwr = 0, n_cmdstall = 0, n_respstall = 0, n_chain = 0, n_short = 0, n_dma = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.rt_rd) n_route++;
    if (dut.latch) n_latch++;
    n_comp += $countones(dut.pe_act_we);
    n_relu += $countones(dut.pe_neg);
    n_sat  += $countones(dut.pe_sat);
    if (dut.mem_we != '0 && dut.mem_sel == MEM_ACT) n_hostwr++;
    if (cmd_valid && !cmd_ready) n_cmdstall++;
    if (resp_valid && !resp_ready) n_respstall++;
    if (dmem_resp_valid && dut.u_ctrl.dma_active) n_dma++;
  end

  // random response back-pressure
  always @(negedge clk) resp_ready <= ($urandom_range(0, 3) != 0);

  // response collector
  logic [63:0] resp_q [$];
  always @(posedge clk) if (resp_valid && resp_ready) resp_q.push_back(resp.data);

  // ---- model state ----
  logic [3:0]        act_m [NP][N];     // activation SRAM contents
  logic signed [3:0] w_m   [NP][N][N];
  int                bias_m[NP][N];
  int                sel_m [NP][N];

  task automatic send(apu_op_e op, int pe, int chunk, int addr, logic [63:0] rs2, bit xd);
    send_raw(op, 64'(addr) | (64'(chunk) << 16) | (64'(pe) << 24), rs2, xd);
  endtask

  task automatic send_raw(apu_op_e op, logic [63:0] rs1, logic [63:0] rs2, bit xd);
    rocc_cmd_t c = '0;
    c.funct = op; c.rd = 5'd1; c.xd = xd;
    c.rs1 = rs1;
    c.rs2 = rs2;
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic get_resp(output logic [63:0] d);
    int n = 0;
    while (resp_q.size() == 0 && n < 100000) begin @(posedge clk); n++; end
    if (resp_q.size() == 0) begin failures++; $display("no response"); d = '0; end
    else d = resp_q.pop_front();
  endtask

  // use_dma = 0: every word as a WR_WEIGHT command;
  // use_dma = 1: words placed in memory, one LOAD command per PE
  task automatic load_layer(bit use_dma);
    logic [63:0] rsp;
    // weights + bias
    for (int p = 0; p < NP; p++) begin
      automatic logic [63:0] pbase = 64'h1000_0000 + 64'(p) * 64'h10_0000;
      for (int r = 0; r < N; r++) begin
        for (int j = 0; j < N; j++) w_m[p][r][j] = 4'($urandom);
        bias_m[p][r] = $urandom_range(0, 1600) - 400;
        for (int c = 0; c <= NCH; c++) begin
          automatic logic [63:0] d = '0;
          if (c < NCH) begin
            for (int k = 0; k < 16; k++) if (c * 16 + k < N) d[k*4 +: 4] = w_m[p][r][c*16 + k];
          end else d = 64'(bias_m[p][r]);
          if (use_dma) u_mem.write_word(pbase + 64'(8 * (r * (NCH + 1) + c)), d);
          else send(OP_WR_WEIGHT, p, c, r, d, 0);
        end
      end
      if (use_dma) begin
        send_raw(OP_LOAD, pbase, (64'(MEM_WEIGHT) << 40) | (64'(p) << 24) | 64'(N * (NCH + 1)), 1);
        get_resp(rsp);
        checks++;
        if (rsp != 64'(N * (NCH + 1))) begin failures++; $display("LOAD reported %0d words", rsp); end
      end
    end
    // schedule: a random permutation of the sources in every routing cycle
    for (int t = 0; t < N; t++) begin
      automatic int perm [NP];
      for (int i = 0; i < NP; i++) perm[i] = i;
      for (int i = NP - 1; i > 0; i--) begin
        automatic int j = $urandom_range(0, i);
        automatic int tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int d = 0; d < NP; d++) begin
        sel_m[d][t] = perm[d];
        send(OP_WR_SELECT, d, 0, t, 64'(perm[d]), 0);
      end
    end
  endtask

  task automatic run_layer(int n_in, int n_out, int sh);
    logic [63:0] d;
    logic [3:0] nxt [NP][N];
    send(OP_CONFIG, 0, 0, n_in, (64'(sh) << 16) | 64'(n_out), 0);
    // model
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < N; r++) begin
        if (r < n_out) begin
          automatic int acc = bias_m[p][r];
          for (int t = 0; t < n_in; t++) acc += int'(w_m[p][r][t]) * int'(act_m[sel_m[p][t]][t]);
          if (acc < 0) acc = 0;
          acc = acc >>> sh;
          nxt[p][r] = (acc > 15) ? 4'd15 : 4'(acc);
        end else nxt[p][r] = act_m[p][r];
      end
    act_m = nxt;
    send(OP_RUN, 0, 0, 0, 64'd0, 1);
    // queue more commands than the command queue holds while the layer runs;
    // they address no PE (index NP+1) and so change nothing
    for (int k = 0; k < 6; k++) send(OP_WR_SELECT, NP + 1, 0, 0, 64'd0, 0);
    get_resp(d);
    checks++;
    if (d != 64'(n_in + n_out + 3)) begin
      failures++; $display("RUN reported %0d cycles, expected %0d", d, n_in + n_out + 3);
    end
  endtask

  task automatic check_outputs(string what);
    logic [63:0] d;
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < N; r++) begin
        send(OP_RD_ACT, p, 0, r, 64'd0, 1);
        get_resp(d);
        checks++;
        if (d != 64'(act_m[p][r])) begin
          failures++;
          if (failures < 10) $display("%s: PE %0d row %0d got %0d expected %0d", what, p, r, d, act_m[p][r]);
        end
      end
  endtask

  task automatic expect_seen(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // layer 1 input vector through the memory interface
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < N; r++) begin
        act_m[p][r] = 4'($urandom);
        send(OP_WR_ACT, p, 0, r, 64'(act_m[p][r]), 0);
      end
    load_layer(0);
    run_layer(N, N, 5);
    check_outputs("layer 1");
    // layer 2 chained on layer-1 outputs, shorter lengths
    load_layer(1);
    n_chain++;
    n_short++;
    run_layer(N - 3, N - 5, 3);
    check_outputs("layer 2");
    $display("mechanisms:");
    expect_seen(n_route,     "routing cycles");
    expect_seen(n_latch,     "input latch pulses");
    expect_seen(n_comp,      "outputs computed");
    expect_seen(n_relu,      "ReLU clips");
    expect_seen(n_sat,       "quantizer saturations");
    expect_seen(n_hostwr,    "host activation writes");
    expect_seen(n_cmdstall,  "command queue stalls");
    expect_seen(n_respstall, "response back-pressure");
    expect_seen(n_chain,     "chained layers");
    expect_seen(n_short,     "short (configured) layers");
    expect_seen(n_dma,       "words loaded from memory");
    checks++;
    if (n_latch != 2 || n_route != 2 * N - 3) begin failures++; $display("phase counts wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
