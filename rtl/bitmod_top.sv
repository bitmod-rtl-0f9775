// bitmod_top: the BitMoD accelerator - weight buffer, bit-serial term
// generator, input buffer and a 4 x 4 array of 8 x 8 PE tiles.
//
// One pass computes a 32 x 32 block of outputs Y[r][c] = sum_k X[r][k] * W[k][c]
// over n_groups groups of GROUP (128) weights along k, where X is FP16 and each
// column of W is quantized per group to INT8, INT6, FP4 or FP3 with an 8-bit
// scaling factor and, for FP4/FP3, a 2-bit special-value select. Each output
// word is the sum over groups of (scaling factor x group dot product), in the
// accumulator's floating format; the per-channel second-level scale (and the
// factor 1/2 of FP4/FP3 half units) is applied downstream, as in the paper.
//
// Data flow per term cycle:
//   cycle 0  the sequencer reads one word from every input and weight bank
//            (only on the first term of a word) and sends the term index
//   cycle 1  the term generator decodes term s of every weight (registered)
//            while the activations are registered alongside
//   cycle 2+ tile column j gets the terms after j skew cycles, tile row i the
//            activations after i skew cycles; the array's systolic hops add
//            one cycle per tile, so tile (i, j) pairs them at cycle 2 + i + j
// At the end of every group the PEs dequantize in the background (8 cycles)
// and each PE column drains its 8 results into its accumulator (8 cycles).
//
// The blocks and their arrangement follow the paper's architecture figure. The
// sequencer, the skew registers, the load/read ports standing in for the
// off-chip DRAM side and the pass structure are this design's choices.
// A pass takes n_groups * (GROUP/4) * T + LAT + 1 cycles from the clock edge
// that samples start to done, with
// T = 4/3/2/2 for INT8/INT6/FP4/FP3.
//
// Interface: start (one cycle, while !busy) with cfg_* held; cfg_accum makes
// the pass add to the outputs already in the column buffers instead of
// replacing them, so a reduction longer than the input buffer holds can be
// split over passes. done pulses at the end. sv_* programs the special-value
// registers; ib_wr_* / wb_wr_* / wb_mwr_* load the buffers (the off-chip side);
// rd_* reads one output word combinationally.
//
// Lint note: the linter reports rst_n as used both synchronously and
// asynchronously. Every flip-flop resets asynchronously; the synchronous use
// is the 'disable iff (!rst_n)' of the concurrent assertions in the PE column
// and dequantizer, which is not logic.
module bitmod_top
  import bitmod_pkg::*;
#(
  parameter int unsigned TR     = 4,     // tile rows
  parameter int unsigned TC     = 4,     // tile columns
  parameter int unsigned ROWS   = 8,     // PE rows per tile
  parameter int unsigned COLS   = 8,     // PE columns per tile
  parameter int unsigned GROUP  = 128,   // quantization group size
  parameter int unsigned IDEPTH = 2048,  // input-buffer words per bank (512 KB)
  parameter int unsigned WDEPTH = 4096,  // weight-buffer words per bank (512 KB)
  parameter int unsigned MDEPTH = 128    // group-metadata entries per bank
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // pass control
  input  logic                              start,
  input  dtype_e                            cfg_dtype,
  input  logic [7:0]                        cfg_ngroups,
  input  logic                              cfg_accum,
  input  logic [$clog2(IDEPTH)-1:0]         cfg_ibase,
  input  logic [$clog2(WDEPTH)-1:0]         cfg_wbase,
  input  logic [$clog2(MDEPTH)-1:0]         cfg_mbase,
  output logic                              busy,
  output logic                              done,
  // special-value register programming
  input  logic                              sv_we,
  input  logic [1:0]                        sv_waddr,
  input  sv_t                               sv_wdata,
  // buffer fill (off-chip memory side)
  input  logic                              ib_wr_en,
  input  logic [$clog2(TR*ROWS)-1:0]        ib_wr_bank,
  input  logic [$clog2(IDEPTH)-1:0]         ib_wr_addr,
  input  fp16_t [LANES-1:0]                 ib_wr_data,
  input  logic                              wb_wr_en,
  input  logic [$clog2(TC*COLS)-1:0]        wb_wr_bank,
  input  logic [$clog2(WDEPTH)-1:0]         wb_wr_addr,
  input  logic [LANES-1:0][7:0]             wb_wr_data,
  input  logic                              wb_mwr_en,
  input  logic [$clog2(TC*COLS)-1:0]        wb_mwr_bank,
  input  logic [$clog2(MDEPTH)-1:0]         wb_mwr_addr,
  input  logic [1:0]                        wb_mwr_sel,
  input  logic [SF_W-1:0]                   wb_mwr_sf,
  // output read-back (PE row r = rd_tr*ROWS + rd_row, column c = rd_tc*COLS + rd_col)
  input  logic [$clog2(TR)-1:0]             rd_tr,
  input  logic [$clog2(TC)-1:0]             rd_tc,
  input  logic [$clog2(COLS)-1:0]           rd_col,
  input  logic [$clog2(ROWS)-1:0]           rd_row,
  output outw_t                             rd_data,
  // activity, for monitoring
  output logic                              stat_special,
  output logic                              stat_norm,
  output logic                              stat_dq_busy,
  output logic                              stat_drain
);
  localparam int unsigned NR  = TR * ROWS;
  localparam int unsigned NC  = TC * COLS;
  localparam int unsigned IAW = $clog2(IDEPTH);
  localparam int unsigned WAW = $clog2(WDEPTH);
  localparam int unsigned MAW = $clog2(MDEPTH);
  localparam int unsigned LAT = TR + TC + SF_W + ROWS + 6;

  // sequencer
  logic           rd_en, t_valid, t_grp_last, t_pass_first;
  logic [1:0]     t_step;
  logic [IAW-1:0] i_addr;
  logic [WAW-1:0] w_addr;
  logic [MAW-1:0] m_addr;

  bitmod_seq #(.GROUP(GROUP), .IADDR(IAW), .WADDR(WAW), .MADDR(MAW), .LAT(LAT)) u_seq (
    .clk, .rst_n, .start, .dtype(cfg_dtype), .n_groups(cfg_ngroups), .accum(cfg_accum),
    .ibase(cfg_ibase), .wbase(cfg_wbase), .mbase(cfg_mbase), .busy, .done,
    .rd_en, .i_addr, .w_addr, .m_addr,
    .t_valid, .t_step, .t_grp_last, .t_pass_first
  );

  // buffers
  fp16_t [NR-1:0][LANES-1:0]  ib_q;
  logic  [NC-1:0][LANES-1:0][7:0] wb_q;
  logic  [NC-1:0][1:0]        wb_sel;
  logic  [NC-1:0][SF_W-1:0]   wb_sf;

  input_buffer #(.NBANK(NR), .DEPTH(IDEPTH)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_bank(ib_wr_bank), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data),
    .rd_en, .rd_addr(i_addr), .rd_data(ib_q)
  );

  weight_buffer #(.NBANK(NC), .DEPTH(WDEPTH), .MDEPTH(MDEPTH)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_bank(wb_wr_bank), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .mwr_en(wb_mwr_en), .mwr_bank(wb_mwr_bank), .mwr_addr(wb_mwr_addr),
    .mwr_sel(wb_mwr_sel), .mwr_sf(wb_mwr_sf),
    .rd_en, .rd_addr(w_addr), .mrd_addr(m_addr),
    .rd_data(wb_q), .rd_sel(wb_sel), .rd_sf(wb_sf)
  );

  // term control delayed by the buffer read latency
  logic       v1, gl1, pf1;
  logic [1:0] s1;
  dtype_e     dt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, gl1, pf1, s1} <= '0;
      dt_q <= DT_INT8;
    end else begin
      v1  <= t_valid;
      gl1 <= t_grp_last;
      pf1 <= t_pass_first;
      s1  <= t_step;
      if (start && !busy) dt_q <= cfg_dtype;
    end
  end

  // bit-serial term generator
  tctl_t              g_ctl;
  colterm_t [NC-1:0]  g_col;
  logic     [NC-1:0]  g_spec;

  bs_term_gen #(.NCOL(NC)) u_gen (
    .clk, .rst_n, .sv_we, .sv_waddr, .sv_wdata,
    .dtype(dt_q), .in_valid(v1), .in_step(s1), .in_grp_last(gl1), .in_pass_first(pf1),
    .in_w(wb_q), .in_sv_sel(wb_sel), .in_sf(wb_sf),
    .out_ctl(g_ctl), .out_col(g_col), .out_special(g_spec)
  );
  assign stat_special = |g_spec;

  // activations registered alongside the term generator
  fp16_t [NR-1:0][LANES-1:0] act_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) act_q <= '0;
    else        act_q <= ib_q;

  // systolic input skew
  fp16_t    [TR-1:0][ROWS-1:0][LANES-1:0] a_in;
  tctl_t    [TC-1:0]                      k_in;
  colterm_t [TC-1:0][COLS-1:0]            w_in;

  for (genvar i = 0; i < TR; i++) begin : g_askew
    fp16_t [i:0][ROWS-1:0][LANES-1:0] sr;
    assign sr[0] = act_q[i*ROWS +: ROWS];
    for (genvar d = 1; d <= i; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) sr[d] <= '0;
        else        sr[d] <= sr[d-1];
    end
    assign a_in[i] = sr[i];
  end

  for (genvar j = 0; j < TC; j++) begin : g_wskew
    tctl_t    [j:0]           ksr;
    colterm_t [j:0][COLS-1:0] wsr;
    assign ksr[0] = g_ctl;
    assign wsr[0] = g_col[j*COLS +: COLS];
    for (genvar d = 1; d <= j; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) begin
          ksr[d] <= '0;
          wsr[d] <= '0;
        end else begin
          ksr[d] <= ksr[d-1];
          wsr[d] <= wsr[d-1];
        end
    end
    assign k_in[j] = ksr[j];
    assign w_in[j] = wsr[j];
  end

  pe_array #(.TR(TR), .TC(TC), .ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .act_in(a_in), .ctl_in(k_in), .wt_in(w_in),
    .rd_tr, .rd_tc, .rd_col, .rd_row, .rd_data,
    .drain_busy(stat_drain), .dq_busy(stat_dq_busy), .norm_event(stat_norm)
  );

  // the group must cover at least the dequantization and drain time
  initial assert (GROUP / LANES * 2 >= SF_W + ROWS)
    else $error("bitmod_top: GROUP too small to hide dequantization and drain");
endmodule
