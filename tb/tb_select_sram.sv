// tb_select_sram: writes a random schedule into the select SRAM and reads it
// back in a routing-style sequential sweep, checking the one-cycle latency.
module tb_select_sram;
  localparam int D = 400, NS = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [3:0] wdata = '0, rdata;
  logic [3:0] model [D];
  int checks = 0, failures = 0;

  select_sram #(.DEPTH(D), .N_SRC(NS)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; waddr = 9'(a); wdata = 4'($urandom_range(0, NS)); model[a] = wdata;
      end
      @(negedge clk); we = 0; re = 1; raddr = 0;
      for (int a = 0; a < D; a++) begin
        raddr = 9'(a);
        @(posedge clk); #1;
        checks++;
        if (rdata != model[a]) begin
          failures++;
          if (failures < 10) $display("addr %0d got %0d expected %0d", a, rdata, model[a]);
        end
      end
      re = 0;
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
