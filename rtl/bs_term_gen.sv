// bs_term_gen: bit-serial term generator placed between the weight buffer and
// the PE array.
//
// Every cycle it takes one weight word per PE column (four weights, one per PE
// lane, each in an 8-bit slot), the group's 2-bit special-value select and
// 8-bit scaling factor, and the step number s of the current word. It emits
// the s-th bit-serial term of every weight, with the bit-significance shared by
// the whole array. INT8 and INT6 weights go through Booth decoders (4 or 3
// terms, sent most significant first, bsig = 6/4/2/0 or 4/2/0); FP4 and FP3
// weights go through the fixed-point/special-value/LOD decoder (2 terms, bsig
// 1 then 0). FP3 codes sit in the low 3 bits of a slot and are widened to FP4
// with M = 0. The special-value register file (SV_reg) lives here.
//
// The decoding follows the paper's unified bit-serial representation; the slot
// layout, term order and control bundle are this design's choices. Timing: the
// outputs are registered, one cycle after the inputs. A word must be presented
// for terms_of(dtype) consecutive cycles with s = 0, 1, ...; in_grp_last marks
// the final word of a group and is forwarded only with that word's last term.
module bs_term_gen
  import bitmod_pkg::*;
#(
  parameter int unsigned NCOL = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // special-value register programming
  input  logic                         sv_we,
  input  logic [1:0]                   sv_waddr,
  input  sv_t                          sv_wdata,
  // one weight word per column
  input  dtype_e                       dtype,
  input  logic                         in_valid,
  input  logic [1:0]                   in_step,
  input  logic                         in_grp_last,
  input  logic                         in_pass_first,
  input  logic [NCOL-1:0][LANES-1:0][7:0] in_w,
  input  logic [NCOL-1:0][1:0]         in_sv_sel,
  input  logic [NCOL-1:0][SF_W-1:0]    in_sf,
  // terms for the PE array
  output tctl_t                        out_ctl,
  output colterm_t [NCOL-1:0]          out_col,
  output logic [NCOL-1:0]              out_special  // some lane used its special value
);
  sv_t [NCOL-1:0] sv;
  sv_regfile #(.N_RD(NCOL)) u_svreg (
    .clk, .rst_n, .we(sv_we), .waddr(sv_waddr), .wdata(sv_wdata),
    .sel(in_sv_sel), .sv(sv)
  );

  logic        is_int, last_step;
  logic [1:0]  booth_k;
  logic [2:0]  bsig_int [NCOL][LANES];
  logic [2:0]  bsig_fp  [NCOL][LANES];
  wterm_t      t_int    [NCOL][LANES];
  wterm_t      t_fp     [NCOL][LANES];
  logic        spec     [NCOL][LANES];
  colterm_t [NCOL-1:0] col_d;
  logic [NCOL-1:0]     spec_d;

  always_comb begin
    is_int    = (dtype == DT_INT8) || (dtype == DT_INT6);
    booth_k   = 2'(terms_of(dtype) - 1) - in_step;
    last_step = (32'(in_step) == terms_of(dtype) - 1);
  end

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      logic [3:0] fcode;
      assign fcode = (dtype == DT_FP3) ? {in_w[c][l][2:0], 1'b0} : in_w[c][l][3:0];
      booth_term u_booth (.w(in_w[c][l]), .k(booth_k), .term(t_int[c][l]), .bsig(bsig_int[c][l]));
      fp_term    u_fp    (.code(fcode), .sv(sv[c]), .k(in_step[0]), .term(t_fp[c][l]),
                          .bsig(bsig_fp[c][l]), .is_special(spec[c][l]));
    end
  end

  always_comb begin
    for (int c = 0; c < int'(NCOL); c++) begin
      spec_d[c] = 1'b0;
      for (int l = 0; l < int'(LANES); l++) begin
        col_d[c].t[l] = is_int ? t_int[c][l] : t_fp[c][l];
        spec_d[c] |= !is_int && spec[c][l];
      end
      col_d[c].sf = in_sf[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctl     <= '0;
      out_col     <= '0;
      out_special <= '0;
    end else begin
      out_ctl.valid      <= in_valid;
      out_ctl.grp_last   <= in_valid && in_grp_last && last_step;
      out_ctl.pass_first <= in_pass_first;
      out_ctl.bsig       <= is_int ? bsig_int[0][0] : bsig_fp[0][0];
      out_col            <= col_d;
      out_special        <= in_valid ? spec_d : '0;
    end
  end
endmodule
