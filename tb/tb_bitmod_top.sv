// tb_bitmod_top: end-to-end test of the accelerator at reduced size (2 x 2
// tiles of 4 x 2 PEs, group size 32, 2 groups per pass). See tb_top_body.svh.
module tb_bitmod_top;
  localparam int P_TR = 2, P_TC = 2, P_ROWS = 4, P_COLS = 2, P_GROUP = 32;
  localparam int P_IDEPTH = 64, P_WDEPTH = 64, P_MDEPTH = 8, P_NG = 2;

  `include "tb_top_body.svh"

  bitmod_top #(
    .TR(P_TR), .TC(P_TC), .ROWS(P_ROWS), .COLS(P_COLS), .GROUP(P_GROUP),
    .IDEPTH(P_IDEPTH), .WDEPTH(P_WDEPTH), .MDEPTH(P_MDEPTH)
  ) dut (.*);
endmodule
