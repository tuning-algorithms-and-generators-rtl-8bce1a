// tb_adder_tree: checks the 400-input, 9-stage adder tree against a plain sum.
// Random vectors plus the two extreme vectors (all -128, all +127), which need
// the full 17-bit result width.
module tb_adder_tree;
  localparam int N = 400, W = 8, OW = W + $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [N-1:0][W-1:0] in;
  logic signed [OW-1:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .W(W)) dut (.in, .sum);

  task automatic check_vec();
    int ref_sum = 0;
    for (int i = 0; i < N; i++) ref_sum += int'($signed(in[i]));
    #1;
    checks++;
    if (int'(sum) != ref_sum) begin
      failures++;
      $display("mismatch: got %0d expected %0d", sum, ref_sum);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) in[i] = -8'sd128;
    check_vec();
    for (int i = 0; i < N; i++) in[i] = 8'sd127;
    check_vec();
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) in[i] = W'($urandom);
      check_vec();
      @(posedge clk);
    end
    if (OW != 17) begin failures++; $display("width %0d, expected 17", OW); end
    checks++;
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
