// tb_epochcore_full: end-to-end test of the core at its default size: a 64 x 64
// array (S4 / Liquid-S4 layers with N = 62, the largest single-head state that
// fits), 16 MB weight and 16 MB I/O SRAM. The test itself is in
// epochcore_tb_body.svh.
module tb_epochcore_full;
  localparam int ROWS = 64, COLS = 64, W = 32, FRAC = 16;
  localparam int IO_DEPTH = 4194304, W_DEPTH = 134217728 / (ROWS * (W + 3));
  localparam int T = 32, K = 8, WATCHDOG = 60000;

  `include "epochcore_tb_body.svh"

  epochcore_top dut (.*);
endmodule
