// tb_gem3d_full -- the same end-to-end sequence on gem3d_top at its default
// size: 32 x 32 transpose and 32 x 32 element-wise multiply and add, with
// ideal comparators. See gem3d_tb_body.svh.
module tb_gem3d_full;
  localparam int TN = 32, TMA_N = 32, TMA_M = 32, TVOS = 0;
  localparam int WATCHDOG_CYCLES = 200000;

  gem3d_top dut (.*);

`include "gem3d_tb_body.svh"
endmodule
