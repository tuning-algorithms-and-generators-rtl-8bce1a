// tb_apu_lenet: the LeNet-300-100 MNIST classifier (784-300-100-10) run as a
// workload on the accelerator at its default size (10 PEs of 400x400).
//
// Each fully connected layer is pruned to 10 diagonal blocks, one per PE:
//   layer 1: 784 -> 300, blocks of 79 x 30 (input padded to 790 with zeros)
//   layer 2: 300 -> 100, blocks of 30 x 10
//   layer 3: 100 ->  10, blocks of 10 x 1  (one class score per PE)
// Everything the network needs is placed in the data-cache model and moved
// in with LOAD commands, as the core would do it: the image into the
// activation SRAMs, then per layer the weight rows with their biases and the
// routing schedule (a random permutation of the PEs in every routing cycle).
// A CONFIG sets n_in, n_out and the shift; RUN computes the layer on the
// previous layer's outputs in place. Every output of every layer is read
// back and compared with an integer model of routing, dot product, bias,
// ReLU, shift and saturation, and each RUN must report n_in + n_out + 3
// cycles. The class scores pass through the same ReLU/quantizer as the
// hidden layers, since that is the only output path the PEs have.
module tb_apu_lenet;
  import apu_pkg::*;
  localparam int NP = N_PE, N = BLOCK, WATCHDOG = 400000;
  localparam int NCH = (N * W_W + XLEN - 1) / XLEN;
  localparam int NL = 3;
  localparam int LIN  [NL] = '{79, 30, 10};   // inputs per PE
  localparam int LOUT [NL] = '{30, 10, 1};    // outputs per PE
  localparam int LSH  [NL] = '{5, 3, 2};      // quantizer shift
  localparam int IMG = 784;

  logic        clk = 0, rst_n = 0;
  logic        dmem_req_valid, dmem_req_ready, dmem_resp_valid;
  logic [63:0] dmem_req_addr, dmem_resp_data;
  logic        cmd_valid = 0, cmd_ready, resp_valid, resp_ready = 0, busy;
  rocc_cmd_t   cmd = '0;
  rocc_resp_t  resp;
  always #5 clk = ~clk;

  apu_top dut (.*);
  l1_mem_model u_mem (.clk, .req_valid(dmem_req_valid), .req_ready(dmem_req_ready),
                      .req_addr(dmem_req_addr), .resp_valid(dmem_resp_valid),
                      .resp_data(dmem_resp_data));

  int checks = 0, failures = 0;
  int n_dma = 0, n_comp = 0, run_cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (dmem_resp_valid && dut.u_ctrl.dma_active) n_dma++;
    n_comp += $countones(dut.pe_act_we);
  end

  always @(negedge clk) resp_ready <= ($urandom_range(0, 3) != 0);

  logic [63:0] resp_q [$];
  always @(posedge clk) if (resp_valid && resp_ready) resp_q.push_back(resp.data);

  // model state: activation SRAM contents of every PE, and the current
  // layer's weights, biases and schedule
  logic [3:0]        act_m [NP][N];
  logic signed [3:0] w     [NP][N][N];
  int                bias  [NP][N];
  int                sel   [NP][N];

  task automatic send(apu_op_e op, logic [63:0] rs1, logic [63:0] rs2, bit xd);
    rocc_cmd_t c = '0;
    c.funct = op; c.rd = 5'd2; c.xd = xd; c.rs1 = rs1; c.rs2 = rs2;
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

  // LOAD `count` words at `addr` into memory `tgt` of PE p; the response
  // must echo the count
  task automatic load(logic [63:0] addr, mem_sel_e tgt, int p, int count);
    logic [63:0] d;
    send(OP_LOAD, addr, (64'(tgt) << 40) | (64'(p) << 24) | 64'(count), 1);
    get_resp(d);
    checks++;
    if (d != 64'(count)) begin failures++; $display("LOAD reported %0d words", d); end
  endtask

  function automatic logic [63:0] region(int layer, int p, mem_sel_e tgt);
    return 64'h2000_0000 + 64'(layer) * 64'h100_0000 + 64'(p) * 64'h10_0000
         + 64'(tgt) * 64'h4_0000;
  endfunction

  task automatic run_layer(int l);
    int n_in = LIN[l], n_out = LOUT[l], sh = LSH[l];
    logic [3:0] nxt [NP][N];
    logic [63:0] d;
    // weights and biases: rows 0..n_out-1, columns beyond n_in are zero
    for (int p = 0; p < NP; p++) begin
      for (int r = 0; r < n_out; r++) begin
        for (int j = 0; j < N; j++) w[p][r][j] = (j < n_in) ? 4'($urandom) : 4'd0;
        bias[p][r] = $urandom_range(0, 500) - 100;
        for (int c = 0; c <= NCH; c++) begin
          automatic logic [63:0] wd = '0;
          if (c < NCH) begin
            for (int k = 0; k < 16; k++) if (c * 16 + k < N) wd[k*4 +: 4] = w[p][r][c*16 + k];
          end else wd = 64'(bias[p][r]);
          u_mem.write_word(region(l, p, MEM_WEIGHT) + 64'(8 * (r * (NCH + 1) + c)), wd);
        end
      end
      load(region(l, p, MEM_WEIGHT), MEM_WEIGHT, p, n_out * (NCH + 1));
    end
    // schedule: a random permutation of the sources in each routing cycle
    for (int t = 0; t < n_in; t++) begin
      automatic int perm [NP];
      for (int i = 0; i < NP; i++) perm[i] = i;
      for (int i = NP - 1; i > 0; i--) begin
        automatic int j = $urandom_range(0, i);
        automatic int tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int p = 0; p < NP; p++) begin
        sel[p][t] = perm[p];
        u_mem.write_word(region(l, p, MEM_SELECT) + 64'(8 * t), 64'(perm[p]));
      end
    end
    for (int p = 0; p < NP; p++) load(region(l, p, MEM_SELECT), MEM_SELECT, p, n_in);
    // model
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < N; r++) begin
        if (r < n_out) begin
          automatic int acc = bias[p][r];
          for (int t = 0; t < n_in; t++) acc += int'(w[p][r][t]) * int'(act_m[sel[p][t]][t]);
          if (acc < 0) acc = 0;
          acc = acc >>> sh;
          nxt[p][r] = (acc > 15) ? 4'd15 : 4'(acc);
        end else nxt[p][r] = act_m[p][r];
      end
    act_m = nxt;
    // configure and run
    send(OP_CONFIG, 64'(n_in), (64'(sh) << 16) | 64'(n_out), 0);
    send(OP_RUN, 64'd0, 64'd0, 1);
    get_resp(d);
    checks++;
    run_cycles += int'(d);
    if (d != 64'(n_in + n_out + 3)) begin
      failures++; $display("layer %0d: RUN reported %0d cycles, expected %0d", l + 1, d, n_in + n_out + 3);
    end
    // read back every output of the layer
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < n_out; r++) begin
        send(OP_RD_ACT, (64'(p) << 24) | 64'(r), 64'd0, 1);
        get_resp(d);
        checks++;
        if (d != 64'(act_m[p][r])) begin
          failures++;
          if (failures < 10) $display("layer %0d: PE %0d row %0d got %0d expected %0d",
                                      l + 1, p, r, d, act_m[p][r]);
        end
      end
    $display("  layer %0d: %0d x %0d per PE, %0d cycles", l + 1, n_in, n_out, n_in + n_out + 3);
  endtask

  initial begin
    int nz;
    repeat (3) @(negedge clk); rst_n = 1;
    // image: 784 pixels quantized to 4 bits, padded to 790; PE p holds
    // pixels 79p .. 79p+78 in entries 0..78
    for (int p = 0; p < NP; p++) begin
      for (int r = 0; r < N; r++) act_m[p][r] = '0;
      for (int r = 0; r < LIN[0]; r++) begin
        act_m[p][r] = (p * LIN[0] + r < IMG) ? 4'($urandom) : 4'd0;
        u_mem.write_word(region(NL, p, MEM_ACT) + 64'(8 * r), 64'(act_m[p][r]));
      end
      load(region(NL, p, MEM_ACT), MEM_ACT, p, LIN[0]);
    end
    for (int l = 0; l < NL; l++) run_layer(l);
    nz = 0;
    for (int p = 0; p < NP; p++) if (act_m[p][0] != 0) nz++;
    $display("  class scores (PE 0..9, entry 0): %0d nonzero; %0d compute+route cycles in all",
             nz, run_cycles);
    checks++;
    if (n_comp != NP * (LOUT[0] + LOUT[1] + LOUT[2])) begin
      failures++; $display("computed %0d outputs, expected %0d", n_comp, NP * (LOUT[0] + LOUT[1] + LOUT[2]));
    end
    checks++;
    if (n_dma == 0) begin failures++; $display("no words loaded from memory"); end
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
endmodule
