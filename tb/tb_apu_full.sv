// tb_apu_full: end-to-end test of the accelerator at its default size
// (10 PEs, 400x400 INT4 blocks, 4000x4000 block-diagonal layer): two chained
// layers, every output checked; see apu_tb_body.svh for the scenario.
module tb_apu_full;
  import apu_pkg::*;
  localparam int NP = N_PE, N = BLOCK, WATCHDOG = 2000000;
  apu_top dut (.*);
  `include "apu_tb_body.svh"
endmodule
