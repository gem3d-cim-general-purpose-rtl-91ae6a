// tb_gem3d_top -- end-to-end test of gem3d_top at reduced size (6 x 6
// transpose, 3 x 4 multiply/add) with comparator offsets of -3..+3 ramp
// steps, so that calibration has something to correct. See gem3d_tb_body.svh.
module tb_gem3d_top;
  localparam int TN = 6, TMA_N = 3, TMA_M = 4, TVOS = 1;
  localparam int WATCHDOG_CYCLES = 20000;

  gem3d_top #(.N(TN), .MA_N(TMA_N), .MA_M(TMA_M), .COMP_VOS_LSB(1.0)) dut (.*);

`include "gem3d_tb_body.svh"
endmodule
