// tb_pe: one full-size processing element (400x400 INT4 block).
// Loads weights, biases, a select schedule and activations through the memory
// interface, plays the routing matrix (checks the broadcast value and select
// the PE presents each routing cycle, and feeds it an input vector), latches,
// runs 400 compute cycles and reads all 400 outputs back. Outputs are checked
// against an integer model of min(15, max(0, w.a + b) >> shift). Also checks
// that the compute phase writes exactly one output per cycle.
module tb_pe;
  import apu_pkg::*;
  localparam int N = 400, NS = 10, NCH = (N * 4 + 63) / 64;
  localparam int SHIFT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mem_we = 0;
  mem_sel_e mem_sel = MEM_WEIGHT;
  logic [8:0] mem_addr = '0, rt_addr = '0, cp_addr = '0, hr_addr = '0;
  logic [4:0] mem_chunk = '0;
  logic [63:0] mem_wdata = '0;
  logic rt_clear = 0, rt_rd = 0, latch = 0, cp_rd = 0, hr_rd = 0;
  logic [4:0] shift = 5'(SHIFT);
  logic [3:0] bcast_act, sel, rt_in = '0;
  logic act_we, clipped_neg, saturated;

  pe #(.N(N), .N_SRC(NS)) dut (.*);

  logic signed [3:0] w [N][N];
  int bias [N];
  logic [3:0] src_act [N], in_vec [N], sel_m [N];
  int checks = 0, failures = 0, n_we = 0, n_neg = 0, n_sat = 0;

  always @(posedge clk) if (act_we) n_we++;
  always @(posedge clk) if (clipped_neg) n_neg++;
  always @(posedge clk) if (saturated) n_sat++;

  task automatic memw(mem_sel_e s, int addr, int chunk, logic [63:0] d);
    @(negedge clk);
    mem_we = 1; mem_sel = s; mem_addr = 9'(addr); mem_chunk = 5'(chunk); mem_wdata = d;
  endtask

  function automatic int ref_out(int r);
    int acc = bias[r];
    for (int j = 0; j < N; j++) acc += int'(w[r][j]) * int'(in_vec[j]);
    if (acc < 0) return 0;
    acc = acc >>> SHIFT;
    return (acc > 15) ? 15 : acc;
  endfunction

  initial begin
    for (int r = 0; r < N; r++) begin
      for (int j = 0; j < N; j++) w[r][j] = 4'($urandom);
      bias[r] = $urandom_range(0, 4000) - 2000;
      src_act[r] = 4'($urandom); in_vec[r] = 4'($urandom); sel_m[r] = 4'($urandom_range(0, NS - 1));
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // memory interface loads
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < NCH; c++) begin
        automatic logic [63:0] d = '0;
        for (int k = 0; k < 16; k++) if (c * 16 + k < N) d[k*4 +: 4] = w[r][c*16 + k];
        memw(MEM_WEIGHT, r, c, d);
      end
      memw(MEM_WEIGHT, r, NCH, 64'(bias[r]));
      memw(MEM_SELECT, r, 0, 64'(sel_m[r]));
      memw(MEM_ACT, r, 0, 64'(src_act[r]));
    end
    @(negedge clk); mem_we = 0;
    // routing phase
    rt_clear = 1; @(negedge clk); rt_clear = 0;
    for (int t = 0; t <= N; t++) begin
      rt_rd = (t < N); rt_addr = 9'(t < N ? t : 0);
      if (t > 0) begin
        rt_in = in_vec[t-1];
        checks++;
        if (bcast_act != src_act[t-1] || sel != sel_m[t-1]) begin
          failures++;
          if (failures < 10) $display("route %0d: bcast %0d/%0d sel %0d/%0d", t-1, bcast_act, src_act[t-1], sel, sel_m[t-1]);
        end
      end
      @(negedge clk);
    end
    rt_rd = 0;
    latch = 1; @(negedge clk); latch = 0;
    // compute phase
    n_we = 0;
    for (int r = 0; r < N; r++) begin cp_rd = 1; cp_addr = 9'(r); @(negedge clk); end
    cp_rd = 0;
    @(negedge clk);
    checks++;
    if (n_we != N) begin failures++; $display("%0d outputs written, expected %0d", n_we, N); end
    // read back
    for (int r = 0; r < N; r++) begin
      hr_rd = 1; hr_addr = 9'(r);
      @(negedge clk);
      checks++;
      if (int'(bcast_act) != ref_out(r)) begin
        failures++;
        if (failures < 10) $display("row %0d: got %0d expected %0d", r, bcast_act, ref_out(r));
      end
    end
    hr_rd = 0;
    checks++;
    if (n_neg == 0 || n_sat == 0) begin failures++; $display("ReLU or saturation never hit (%0d, %0d)", n_neg, n_sat); end
    $display("relu clips %0d, saturations %0d", n_neg, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
