// tb_epochcore_top: end-to-end test of the core at a reduced size, a 5 x 4
// array (one S4 / Liquid-S4 layer with N = 3, the example of the paper's
// Figure 7) and small SRAMs. The test itself is in epochcore_tb_body.svh.
module tb_epochcore_top;
  localparam int ROWS = 5, COLS = 4, W = 32, FRAC = 16;
  localparam int IO_DEPTH = 1024, W_DEPTH = 64;
  localparam int T = 20, K = 6, WATCHDOG = 20000;

  `include "epochcore_tb_body.svh"

  epochcore_top #(.ROWS(ROWS), .COLS(COLS), .W(W), .FRAC(FRAC), .IO_DEPTH(IO_DEPTH),
                  .W_DEPTH(W_DEPTH)) dut (.*);
endmodule
