// tb_mult_array: checks every product of the 400-wide multiplier row against
// integer arithmetic (signed INT4 weight times unsigned INT4 activation),
// including the corner products -8*15 and 7*15.
module tb_mult_array;
  localparam int N = 400;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][3:0] weights, acts;
  logic signed [N-1:0][7:0] prods;
  int checks = 0, failures = 0;

  mult_array #(.N(N)) dut (.weights, .acts, .prods);

  task automatic check_all();
    #1;
    for (int i = 0; i < N; i++) begin
      int w, a, p;
      w = int'($signed(weights[i]));
      a = int'(acts[i]);
      p = int'($signed(prods[i]));
      checks++;
      if (p != w * a) begin
        failures++;
        if (failures < 10) $display("lane %0d: %0d*%0d got %0d", i, w, a, p);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin weights[i] = 4'h8; acts[i] = 4'hf; end
    check_all();
    for (int i = 0; i < N; i++) begin weights[i] = 4'h7; acts[i] = 4'hf; end
    check_all();
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < N; i++) begin weights[i] = 4'($urandom); acts[i] = 4'($urandom); end
      check_all();
      @(posedge clk);
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
