// tb_apu_top: end-to-end test of the accelerator at reduced size
// (4 PEs, 48x48 blocks) so that it runs in seconds; see apu_tb_body.svh for
// the scenario. tb_apu_full runs the same scenario at the chip's size.
module tb_apu_top;
  import apu_pkg::*;
  localparam int NP = 4, N = 48, WATCHDOG = 400000;
  apu_top #(.N_P(NP), .N(N)) dut (.*);
  `include "apu_tb_body.svh"
endmodule
