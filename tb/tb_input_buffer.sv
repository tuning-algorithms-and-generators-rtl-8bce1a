// tb_input_buffer: fills the input register serially, latches it, then fills
// it with a second vector while checking that the latches still hold the
// first one; checks the clear and that a short fill leaves zeros.
module tb_input_buffer;
  localparam int N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_en = 0, latch = 0;
  logic [8:0] wr_idx = '0;
  logic [3:0] wr_data = '0;
  logic [N-1:0][3:0] acts, vec_a, vec_b;
  int checks = 0, failures = 0;

  input_buffer #(.N(N)) dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_data, .latch, .acts);

  task automatic fill(input logic [N-1:0][3:0] v, int len);
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int i = 0; i < len; i++) begin
      wr_en = 1; wr_idx = 9'(i); wr_data = v[i];
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic do_latch();
    latch = 1; @(negedge clk); latch = 0;
  endtask

  task automatic expect_acts(input logic [N-1:0][3:0] v, string what);
    checks++;
    if (acts != v) begin failures++; $display("%s: latch contents wrong", what); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin vec_a[i] = 4'($urandom); vec_b[i] = 4'($urandom); end
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (acts != '0) failures++;
    fill(vec_a, N);
    expect_acts('0, "latched before pulse");
    do_latch();
    expect_acts(vec_a, "vector A");
    fill(vec_b, N);
    expect_acts(vec_a, "A held while B fills");
    do_latch();
    expect_acts(vec_b, "vector B");
    // short fill: slots past len must read zero
    fill(vec_a, 100);
    do_latch();
    begin
      logic [N-1:0][3:0] v = '0;
      for (int i = 0; i < 100; i++) v[i] = vec_a[i];
      expect_acts(v, "short vector");
    end
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
