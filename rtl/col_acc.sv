// col_acc: floating-point accumulator shared by one PE column.
//
// Adds a dequantized group partial sum (m_g * 2^(e_g - 28)) to an output-buffer
// word (m_o * 2^(e_o - 28)), or passes the group sum through when 'clear' marks
// the first group of an output. Both operands are aligned to the larger
// exponent (arithmetic right shift, truncating), added in OUT_MW + 2 bits and
// normalised by right shifts until the magnitude is below 2^(OUT_MW - 2).
//
// The paper names this accumulator and its job (summing the per-group partial
// sums of a PE into the per-channel output); its number format and rounding
// are this design's choices. Combinational.
module col_acc
  import bitmod_pkg::*;
(
  input  grp_t  g,
  input  outw_t o,
  input  logic  clear,
  output outw_t sum
);
  localparam int unsigned AW = OUT_MW + 2;
  logic [OUT_EW-1:0]    eg, emax;
  logic signed [AW-1:0] ag, ao, s, sh;
  logic [2:0]           n;
  logic signed [MGRP_W-1:0] gm;
  logic signed [OUT_MW-1:0] om;

  always_comb begin
    eg   = OUT_EW'(g.e);
    emax = (clear || eg > o.e) ? eg : o.e;
    gm   = g.m;
    om   = clear ? '0 : o.m;
    ag   = AW'(gm) >>> (emax - eg);
    ao   = AW'(om) >>> (emax - o.e);
    s    = ag + ao;
    n    = 3'd4;
    for (int i = 4; i >= 0; i--) begin
      sh = s >>> i;
      if (sh >= -(AW'(1) <<< (OUT_MW-2)) && sh < (AW'(1) <<< (OUT_MW-2))) n = 3'(i);
    end
    sum.m = OUT_MW'(s >>> n);
    sum.e = (s == '0) ? '0 : emax + OUT_EW'(n);
  end
endmodule
