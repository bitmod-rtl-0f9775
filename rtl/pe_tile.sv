// pe_tile: an 8 x 8 tile of BitMoD PEs.
//
// The tile holds COLS PE columns of ROWS PEs each. Inside the tile the input
// activations of PE row r are broadcast to all columns and the bit-serial
// weight term of column c is broadcast to all rows. Tiles are chained
// systolically: the tile registers its activations and passes them to the tile
// on its right, and registers its weight terms (with their control) and passes
// them to the tile below, one cycle per hop.
//
// Sizes (8 x 8) and the broadcast/systolic arrangement follow the paper; the
// one-register-per-hop timing is this design's choice.
//
// Interface: act_in/ctl_in/wt_in enter, act_out/ctl_out/wt_out leave one cycle
// later. rd_col/rd_row/rd_data read the column output buffers.
module pe_tile
  import bitmod_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  fp16_t [ROWS-1:0][LANES-1:0]  act_in,
  input  tctl_t                        ctl_in,
  input  colterm_t [COLS-1:0]          wt_in,
  output fp16_t [ROWS-1:0][LANES-1:0]  act_out,
  output tctl_t                        ctl_out,
  output colterm_t [COLS-1:0]          wt_out,
  input  logic [$clog2(COLS)-1:0]      rd_col,
  input  logic [$clog2(ROWS)-1:0]      rd_row,
  output outw_t                        rd_data,
  output logic                         drain_busy,
  output logic                         dq_busy,
  output logic                         norm_event
);
  outw_t [COLS-1:0]           col_rd;
  logic  [COLS-1:0]           col_drain;
  logic  [COLS-1:0][ROWS-1:0] col_dq, col_norm;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    pe_column #(.ROWS(ROWS)) u_col (
      .clk, .rst_n, .act(act_in), .ctl(ctl_in), .wt(wt_in[c]),
      .rd_row, .rd_data(col_rd[c]), .drain_busy(col_drain[c]),
      .dq_busy(col_dq[c]), .norm_event(col_norm[c])
    );
  end

  assign rd_data    = col_rd[rd_col];
  assign drain_busy = |col_drain;
  assign dq_busy    = |col_dq;
  assign norm_event = |col_norm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_out <= '0;
      ctl_out <= '0;
      wt_out  <= '0;
    end else begin
      act_out <= act_in;
      ctl_out <= ctl_in;
      wt_out  <= wt_in;
    end
  end
endmodule
