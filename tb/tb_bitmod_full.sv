// tb_bitmod_full: end-to-end test of the accelerator at its full default size
// (4 x 4 tiles of 8 x 8 PEs, 32 input and 32 weight banks, group size 128,
// 512 KB buffers), two groups per pass, one pass per weight data type. See
// tb_top_body.svh for the stimulus and checks.
module tb_bitmod_full;
  localparam int P_TR = 4, P_TC = 4, P_ROWS = 8, P_COLS = 8, P_GROUP = 128;
  localparam int P_IDEPTH = 2048, P_WDEPTH = 4096, P_MDEPTH = 128, P_NG = 2;

  `include "tb_top_body.svh"

  bitmod_top dut (.*);
endmodule
