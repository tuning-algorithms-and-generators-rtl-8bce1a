// tb_weight_sram: fills a 400-row x 400-weight memory chunk by chunk (plus a
// bias per row) from a seeded generator, then reads rows back in random order
// and compares every weight and bias with a model array. Also checks the
// one-cycle read latency and that a disabled read holds the output.
module tb_weight_sram;
  localparam int ROWS = 400, N = 400, NCH = (N * 4 + 63) / 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [4:0] wchunk = '0;
  logic [63:0] wdata = '0;
  logic [N-1:0][3:0] rd_row;
  logic signed [15:0] rd_bias;
  logic [NCH*64-1:0] model [ROWS];
  logic [15:0] mbias [ROWS];
  int checks = 0, failures = 0;

  weight_sram #(.ROWS(ROWS), .N(N)) dut (.clk, .we, .waddr, .wchunk, .wdata, .re, .raddr, .rd_row, .rd_bias);

  task automatic check_row(int r);
    logic [N*4-1:0] exp_row;
    exp_row = model[r][N*4-1:0];
    checks++;
    if (rd_row != exp_row || rd_bias != mbias[r]) begin
      failures++;
      if (failures < 10) $display("row %0d mismatch", r);
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c <= NCH; c++) begin
        @(negedge clk);
        we = 1; waddr = 9'(r); wchunk = 5'(c); wdata = {$urandom, $urandom};
        if (c < NCH) model[r][c*64 +: 64] = wdata; else mbias[r] = wdata[15:0];
      end
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      automatic int r = $urandom_range(0, ROWS - 1);
      re = 1; raddr = 9'(r);
      @(posedge clk); #1;
      check_row(r);
      re = 0;
      raddr = 9'((r + 1) % ROWS);
      @(posedge clk); #1;
      check_row(r);           // output held while re is low
      @(negedge clk);
    end
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
