// pe_column: one BitMoD PE column with its shared accumulator and output buffer.
//
// ROWS PEs (8) receive the same bit-serial weight term and each its own row of
// four FP16 activations. The array is output stationary: PE r keeps the partial
// sum of output row r for the current group. When a group ends, all PEs finish
// their dequantization in the same cycle; a ROWS:1 mux then drains them one per
// cycle into the single shared accumulator, which adds each group sum to word
// r of the local output buffer (read-modify-write). Draining takes ROWS cycles,
// far less than the >= 64 cycles of a group, so one accumulator suffices.
//
// Structure (PEs, mux, one ACC, output buffer) follows the paper's PE-column
// figure. The drain order (row 0 first), the output-buffer depth (one word per
// PE) and the read port are this design's choices.
//
// Interface: act[r] for PE r, shared ctl/wt. rd_row/rd_data read the output
// buffer combinationally. 'drain_busy' is high while the mux is draining.
// Lint note: only row 0's pass_first flag is used; the PEs run in lockstep
// (asserted below), so the other rows' copies are redundant by construction.
module pe_column
  import bitmod_pkg::*;
#(
  parameter int unsigned ROWS = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  fp16_t [ROWS-1:0][LANES-1:0]       act,
  input  tctl_t                             ctl,
  input  colterm_t                          wt,
  input  logic [$clog2(ROWS)-1:0]           rd_row,
  output outw_t                             rd_data,
  output logic                              drain_busy,
  output logic [ROWS-1:0]                   dq_busy,
  output logic [ROWS-1:0]                   norm_event
);
  localparam int unsigned RW = $clog2(ROWS);

  grp_t  [ROWS-1:0] res;
  logic  [ROWS-1:0] res_valid, res_pf;   // identical across rows (lockstep)
  outw_t            obuf [ROWS];
  outw_t            acc_out;
  logic [RW-1:0]    ptr;
  logic             pf_q;

  for (genvar r = 0; r < ROWS; r++) begin : g_pe
    bitmod_pe u_pe (
      .clk, .rst_n, .act(act[r]), .ctl, .wt,
      .res(res[r]), .res_valid(res_valid[r]), .res_pass_first(res_pf[r]),
      .dq_busy(dq_busy[r]), .norm_event(norm_event[r])
    );
  end

  col_acc u_acc (.g(res[ptr]), .o(obuf[ptr]), .clear(pf_q), .sum(acc_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_busy <= 1'b0;
      ptr        <= '0;
      pf_q       <= 1'b0;
      for (int r = 0; r < int'(ROWS); r++) obuf[r] <= '0;
    end else begin
      if (drain_busy) begin
        obuf[ptr] <= acc_out;
        ptr       <= ptr + RW'(1);
        if (32'(ptr) == ROWS - 1) drain_busy <= 1'b0;
      end
      if (res_valid[0]) begin
        drain_busy <= 1'b1;
        ptr        <= '0;
        pf_q       <= res_pf[0];
      end
    end
  end

  assign rd_data = obuf[rd_row];

  // All PEs of a column see the same terms, so they finish together.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (res_valid == '0) || (res_valid == '1))
    else $error("pe_column: PEs finished out of lockstep");
  a_drain_free: assert property (@(posedge clk) disable iff (!rst_n) res_valid[0] |-> !drain_busy)
    else $error("pe_column: new group results arrived while draining");
endmodule
