// pe_array: the main PE array, TR x TC (4 x 4) PE tiles connected systolically.
//
// Activations enter each tile row at the left and move one tile to the right
// per cycle; bit-serial weight terms (with their control bundle) enter each
// tile column at the top and move one tile down per cycle. Tile (i, j)
// therefore sees the activations of tile row i delayed by j cycles and the
// terms of tile column j delayed by i cycles. The feeder skews its inputs
// (tile row i by i cycles, tile column j by j cycles) so that every tile pairs
// the same activations with the same terms.
//
// The 4 x 4 arrangement of 8 x 8 tiles follows the paper. Read-out: tile
// (rd_tr, rd_tc), PE column rd_col, row rd_row, combinational.
// Timing: one cycle per tile hop (the registers sit in pe_tile).
// Lint note: the terms leaving the bottom tile row (and the activations
// leaving the right tile column) have no consumer; the linter lists those
// chain bits as unused.
module pe_array
  import bitmod_pkg::*;
#(
  parameter int unsigned TR   = 4,
  parameter int unsigned TC   = 4,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  fp16_t [TR-1:0][ROWS-1:0][LANES-1:0]   act_in,   // per tile row, already skewed
  input  tctl_t [TC-1:0]                        ctl_in,   // per tile column, already skewed
  input  colterm_t [TC-1:0][COLS-1:0]           wt_in,
  input  logic [$clog2(TR)-1:0]                 rd_tr,
  input  logic [$clog2(TC)-1:0]                 rd_tc,
  input  logic [$clog2(COLS)-1:0]               rd_col,
  input  logic [$clog2(ROWS)-1:0]               rd_row,
  output outw_t                                 rd_data,
  output logic                                  drain_busy,
  output logic                                  dq_busy,
  output logic                                  norm_event
);
  // activation chain: a[i][j] enters tile (i, j)
  fp16_t    [TR-1:0][TC:0][ROWS-1:0][LANES-1:0] a;
  tctl_t    [TR:0][TC-1:0]                      k;
  colterm_t [TR:0][TC-1:0][COLS-1:0]            w;
  outw_t    [TR-1:0][TC-1:0]                    rd;
  logic     [TR-1:0][TC-1:0]                    db, dq, ne;

  for (genvar i = 0; i < TR; i++) begin : g_tr
    assign a[i][0] = act_in[i];
    for (genvar j = 0; j < TC; j++) begin : g_tc
      if (i == 0) begin : g_top
        assign k[0][j] = ctl_in[j];
        assign w[0][j] = wt_in[j];
      end
      pe_tile #(.ROWS(ROWS), .COLS(COLS)) u_tile (
        .clk, .rst_n,
        .act_in(a[i][j]), .ctl_in(k[i][j]), .wt_in(w[i][j]),
        .act_out(a[i][j+1]), .ctl_out(k[i+1][j]), .wt_out(w[i+1][j]),
        .rd_col, .rd_row, .rd_data(rd[i][j]),
        .drain_busy(db[i][j]), .dq_busy(dq[i][j]), .norm_event(ne[i][j])
      );
    end
  end

  assign rd_data    = rd[rd_tr][rd_tc];
  assign drain_busy = |db;
  assign dq_busy    = |dq;
  assign norm_event = |ne;
endmodule
