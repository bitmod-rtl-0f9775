// bitmod_pe: mixed-precision bit-serial processing element.
//
// Each cycle the PE multiplies four FP16 activations by four bit-serial weight
// terms and adds the 4-way dot product to a floating-point group accumulator:
//   1. Exponent alignment: e_i = a_e + w_e (6 bits); e_MAX = max(e_i, e_ACC - bsig);
//      delta_i = e_MAX - e_i; product sign y_i = a_s XOR w_s.
//   2. Bit-serial multiplication: the 11-bit activation mantissa (hidden bit
//      included) is ANDed with the 1-bit weight mantissa, extended by 3 guard
//      bits and right-shifted by delta_i (14 bits), conditionally negated
//      (15 bits) and summed by an adder tree (17 bits).
//   3. Group accumulation: the dot product is shifted left by the shared
//      bit-significance, the accumulator mantissa is shifted by e_MAX - e_ACC
//      (right, or left by at most bsig), both are added, and the sum is normalised to a 15-bit
//      mantissa with round-to-nearest-even; the shift is added to e_MAX to
//      give the new e_ACC. A small sum (after cancellation) is shifted left
//      instead and the shift subtracted, as a floating-point normaliser does.
//   4. Dequantization (pe_dequant): on the last term of a group the final
//      accumulator is handed over with the group's scaling factor and the
//      accumulator restarts from zero for the next group.
// Value of the accumulator: m_ACC * 2^(e_ACC - 28).
//
// The datapath and its printed widths (5/2/6-bit exponents, 11/14/15/17/23/15-
// bit mantissas, 3-bit bsig, 4-bit normalize amount) follow the paper's PE
// figure. This design's choices: the accumulator exponent enters the MAX
// lowered by bsig (the figure feeds e_ACC in directly; aligning products to
// e_ACC before the << bsig would discard up to 6 bits of every product and
// gave percent-level errors over a 128-weight group), so the accumulator
// shifter also shifts left by up to bsig; subnormal activations use exponent 1 and a
// zero hidden bit; a lane whose product is zero does not take part in the MAX;
// the accumulation adder is 24 bits wide (one more than printed) so that
// a full-scale dot product shifted by bsig = 6 plus the accumulator cannot
// overflow; normalisation keeps |m_ACC| <= 2^13 (the 4-bit amount is applied as a
// right shift of 0..10 or a left shift of 0..13) so the
// dequantizer's 21-bit product cannot overflow; Inf/NaN are not handled.
//
// Timing: one term per cycle when ctl.valid is set, accumulator registered.
// res_valid pulses SF_W + 1 cycles after the term marked ctl.grp_last.
module bitmod_pe
  import bitmod_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  fp16_t [LANES-1:0] act,
  input  tctl_t             ctl,
  input  colterm_t          wt,
  output grp_t              res,
  output logic              res_valid,
  output logic              res_pass_first,
  output logic              dq_busy,
  output logic              norm_event    // a right-normalisation happened this cycle
);
  localparam int unsigned SW = 24;   // accumulation adder width
  localparam int unsigned SWL = SW + 14;  // width of the left-normalisation check

  logic signed [MACC_W-1:0] m_acc;
  logic [EW-1:0]            e_acc;

  logic [EW-1:0]            e_i   [LANES];
  logic                     nz_i  [LANES];
  logic [EW-1:0]            e_max, d_acc;
  logic [13:0]              al_i  [LANES];
  logic signed [14:0]       sg_i  [LANES];
  logic signed [16:0]       dot;
  logic signed [SW-1:0]     sum, acc_al, dot_sh, shifted;
  logic [3:0]               nsh, lsh;
  logic signed [MACC_W-1:0] m_new;
  logic [EW-1:0]            e_new;
  logic                     pf_q;
  logic                     guard, sticky;

  always_comb begin
    // step 1: exponent alignment. The accumulator enters the MAX with its
    // exponent lowered by bsig, because the dot product is scaled by 2^bsig
    // only after the adder tree.
    e_max = (e_acc > EW'(ctl.bsig)) ? e_acc - EW'(ctl.bsig) : '0;
    for (int l = 0; l < int'(LANES); l++) begin
      nz_i[l] = wt.t[l].man && (act[l].exp != 5'd0 || act[l].frac != 10'd0);
      e_i[l]  = EW'(act[l].exp == 5'd0 ? 5'd1 : act[l].exp) + EW'(wt.t[l].exp);
      if (nz_i[l] && e_i[l] > e_max) e_max = e_i[l];
    end
    // step 2: bit-serial multiplication, alignment, negation, adder tree
    dot = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      al_i[l] = nz_i[l] ? ({act[l].exp != 5'd0, act[l].frac, 3'b000} >> (e_max - e_i[l])) : 14'd0;
      sg_i[l] = (act[l].sign ^ wt.t[l].sign) ? -$signed({1'b0, al_i[l]}) : $signed({1'b0, al_i[l]});
      dot     = dot + 17'(sg_i[l]);
    end
    // step 3: group accumulation
    // the accumulator is brought to the frame of e_MAX: right shift when
    // e_ACC <= e_MAX, left shift by at most bsig otherwise
    d_acc  = (e_acc > e_max) ? e_acc - e_max : e_max - e_acc;
    acc_al = (e_acc > e_max) ? (SW'(m_acc) <<< d_acc) : (SW'(m_acc) >>> d_acc);
    dot_sh = SW'(dot) <<< ctl.bsig;
    sum    = acc_al + dot_sh;
    // normalise: smallest right shift that brings the sum into [-2^13, 2^13)
    nsh = 4'd10;
    for (int s = 10; s >= 0; s--) begin
      shifted = sum >>> s;
      if (shifted >= -(SW'(1) <<< 13) && shifted < (SW'(1) <<< 13)) nsh = 4'(s);
    end
    shifted = sum >>> nsh;
    // round to nearest even on the bits shifted out
    guard  = (nsh != 4'd0) && sum[5'(nsh) - 5'd1];
    sticky = (nsh > 4'd1) && (|(sum & ((SW'(1) << (nsh - 4'd1)) - SW'(1))));
    if (guard && (sticky || shifted[0])) shifted = shifted + SW'(1);
    // left normalisation when the sum is small (after cancellation), limited
    // so that the exponent does not go below zero
    lsh = 4'd0;
    if (nsh == 4'd0)
      for (int s = 0; s <= 13; s++)
        if (32'(s) <= 32'(e_max) &&
            (SWL'(sum) <<< s) >= -(SWL'(1) <<< 13) && (SWL'(sum) <<< s) < (SWL'(1) <<< 13))
          lsh = 4'(s);
    m_new = (nsh == 4'd0) ? MACC_W'(sum <<< lsh) : MACC_W'(shifted);
    e_new = (sum == '0) ? '0 : (e_max + EW'(nsh) - EW'(lsh));
  end

  assign norm_event = ctl.valid && (nsh != 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_acc <= '0;
      e_acc <= '0;
      pf_q  <= 1'b0;
    end else if (ctl.valid) begin
      if (ctl.grp_last) begin
        m_acc <= '0;
        e_acc <= '0;
        pf_q  <= ctl.pass_first;
      end else begin
        m_acc <= m_new;
        e_acc <= e_new;
      end
    end
  end

  logic dq_done;
  pe_dequant u_dq (
    .clk, .rst_n,
    .start(ctl.valid && ctl.grp_last),
    .m_in(m_new), .e_in(e_new), .sf_in(wt.sf),
    .busy(dq_busy), .done(dq_done), .res(res)
  );

  // pass_first of the group being dequantized is latched with its last term
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid      <= 1'b0;
      res_pass_first <= 1'b0;
    end else begin
      res_valid <= dq_done;
      if (dq_done) res_pass_first <= pf_q;
    end
  end
endmodule
