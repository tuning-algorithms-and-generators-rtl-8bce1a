// tb_sync_fifo: random push/pop traffic against a queue model; checks order,
// full/empty flags and that the queue fills to exactly DEPTH entries.
module tb_sync_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [W-1:0] in_data = '0, out_data;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < ((t / 500) % 2 ? 80 : 30));
      out_ready = ($urandom_range(0, 99) < ((t / 500) % 2 ? 30 : 80));
      in_data   = W'($urandom);
      #1;
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++;
        if (failures < 10) $display("t=%0d flags wrong: size %0d ready %b valid %b", t, q.size(), in_ready, out_valid);
      end
      if (q.size() == D) n_full++;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin
          failures++;
          if (failures < 10) $display("t=%0d data wrong", t);
        end
        if (q.size() > 0) void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("never full"); end
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
