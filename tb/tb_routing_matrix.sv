// tb_routing_matrix: drives random broadcasts and random permutation
// schedules (plus idle selects) through the 10x10 output-multiplexed crossbar
// and checks each destination against the selected source; also checks that
// a permutation schedule delivers every broadcast value exactly once.
module tb_routing_matrix;
  localparam int NP = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NP-1:0][3:0] src, dst;
  logic [NP-1:0][3:0] sel;
  int checks = 0, failures = 0;

  routing_matrix #(.N_SRC(NP), .N_DST(NP)) dut (.src, .sel, .dst);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int perm [NP];
      automatic int seen [NP];
      for (int i = 0; i < NP; i++) begin perm[i] = i; seen[i] = 0; end
      for (int i = NP - 1; i > 0; i--) begin
        automatic int j = $urandom_range(0, i);
        automatic int tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < NP; i++) begin src[i] = 4'($urandom); sel[i] = 4'(perm[i]); end
      if (t % 10 == 0) sel[$urandom_range(0, NP - 1)] = 4'($urandom_range(NP, 15));
      #1;
      for (int d = 0; d < NP; d++) begin
        automatic logic [3:0] e = (int'(sel[d]) < NP) ? src[sel[d]] : 4'd0;
        checks++;
        if (dst[d] != e) begin
          failures++;
          if (failures < 10) $display("t=%0d dst %0d sel %0d got %0d expected %0d", t, d, sel[d], dst[d], e);
        end
        if (int'(sel[d]) < NP) seen[sel[d]]++;
      end
      if (t % 10 != 0) begin
        checks++;
        for (int s = 0; s < NP; s++) if (seen[s] != 1) begin failures++; break; end
      end
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
