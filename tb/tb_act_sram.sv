// tb_act_sram: writes the activation SRAM from the memory interface and from
// the datapath port, including same-cycle writes from both (datapath wins),
// and reads every entry back with one cycle of latency.
module tb_act_sram;
  localparam int D = 400;
  logic clk = 0;
  always #5 clk = ~clk;
  logic cwe = 0, hwe = 0, re = 0;
  logic [8:0] caddr = '0, haddr = '0, raddr = '0;
  logic [3:0] cdata = '0, hdata = '0, rdata;
  logic [3:0] model [D];
  int checks = 0, failures = 0, n_coll = 0;

  act_sram #(.DEPTH(D)) dut (.clk, .cwe, .caddr, .cdata, .hwe, .haddr, .hdata, .re, .raddr, .rdata);

  task automatic readback();
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; raddr = 9'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d got %0d expected %0d", a, rdata, model[a]);
      end
    end
    @(negedge clk); re = 0;
  endtask

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); hwe = 1; haddr = 9'(a); hdata = 4'($urandom); model[a] = hdata;
    end
    @(negedge clk); hwe = 0;
    readback();
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      cwe = 1'($urandom); hwe = 1'($urandom);
      caddr = 9'($urandom_range(0, D - 1)); haddr = 9'($urandom_range(0, D - 1));
      if (t % 7 == 0) haddr = caddr;
      cdata = 4'($urandom); hdata = 4'($urandom);
      if (cwe && hwe) n_coll++;
      if (cwe) model[caddr] = cdata;
      else if (hwe) model[haddr] = hdata;
    end
    @(negedge clk); cwe = 0; hwe = 0;
    readback();
    checks++;
    if (n_coll == 0) failures++;
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
