// fp_term: bit-serial term decoder for one extended FP4 or FP3 weight.
//
// The 4-bit code {S, E1, E0, M} (E2M1; an FP3 code {S, E1, E0} is presented
// with M = 0, since FP3 values are a subset of FP4) is first converted to a
// sign-magnitude fixed-point value with four integer bits I3..I0 and one
// fraction bit F0. If the code is the redundant negative zero, the value is
// replaced by the special value selected for the weight's group. Every legal
// value has at most two '1' bits, so two leading-one detectors produce two
// terms: one over {I3, I2, I1, I0} (bsig = 1) and one over {I2, I1, I0, F0}
// (bsig = 0) after the bit taken by the first detector is cleared.
//
// Terms are in units of 1/2 (F0 has weight 2^0 and I0 weight 2^1), so a term's
// exp is the detector position and bsig says which window it came from. The
// fixed-point conversion, the -0 comparison, the special-value mux and the two
// LODs with 2-bit exp / 1-bit man outputs follow the paper's figure; clearing
// the first detector's bit before the second detector is this design's reading
// of how a value such as 3 (two ones) yields two distinct terms.
//
// Interface: combinational. 'k' = 0 selects the {I3..I0} term, 'k' = 1 the
// {I2..F0} term.
// bsig uses the shared 3-bit term format; only bit 0 varies for FP terms, so
// bsig[2:1] are constant 0 here.
module fp_term
  import bitmod_pkg::*;
(
  input  logic [3:0] code,
  input  sv_t        sv,
  input  logic       k,
  output wterm_t     term,
  output logic [2:0] bsig,
  output logic       is_special   // the code was -0 and was replaced
);
  logic       s;
  logic [4:0] mag, mag_fx, rest;
  logic [1:0] p_hi, p_lo;
  logic       any_hi, any_lo;

  always_comb begin
    // FP (E2M1) to fixed point in half units
    unique case (code[2:1])
      2'd0:    mag_fx = {4'b0, code[0]};
      2'd1:    mag_fx = {3'b0, 1'b1, code[0]};
      2'd2:    mag_fx = {2'b0, 1'b1, code[0], 1'b0};
      default: mag_fx = {1'b0, 1'b1, code[0], 2'b0};
    endcase
    is_special = (code == 4'b1000);
    s   = is_special ? sv.sign : code[3];
    mag = is_special ? sv.mag  : mag_fx;

    // leading-one detector over {I3, I2, I1, I0}
    any_hi = |mag[4:1];
    p_hi   = 2'd0;
    for (int i = 0; i < 4; i++) if (mag[i+1]) p_hi = 2'(i);
    rest = mag;
    if (any_hi) rest[p_hi + 3'd1] = 1'b0;

    // leading-one detector over {I2, I1, I0, F0} of what is left
    any_lo = |rest[3:0];
    p_lo   = 2'd0;
    for (int i = 0; i < 4; i++) if (rest[i]) p_lo = 2'(i);

    if (!k) begin
      term = '{sign: s, exp: p_hi, man: any_hi};
      bsig = 3'd1;
    end else begin
      term = '{sign: s, exp: p_lo, man: any_lo};
      bsig = 3'd0;
    end
  end
endmodule
