// bitmod_pkg: types and constants shared by the bit-serial mixture-of-datatype
// LLM accelerator.
//
// Every low-precision weight (INT8, INT6, FP4 or FP3 with a per-group special
// value) is broken into a short series of bit-serial terms. One term is
//   (-1)^sign * 2^exp * man * 2^bsig
// with a 1-bit sign, 2-bit exponent, 1-bit mantissa and a 3-bit bit-significance
// that is shared by the four lanes of a PE. Activations stay in FP16.
//
// Fixed-point conventions used throughout (this design's choice):
//   * A PE accumulator value is m * 2^(e - ACC_BIAS), with m signed and e unsigned.
//     ACC_BIAS = 15 (FP16 bias) + 10 (FP16 fraction bits) + 3 (guard bits).
//     ACC_BIAS documents this scale; the hardware never needs it (it only
//     matters when a value is converted out), so the linter lists it unused.
//   * FP4/FP3 terms are expressed in units of 1/2 (one fraction bit), so a group
//     computed in FP mode is twice the true value; the factor 1/2 belongs to the
//     per-channel second-level scale, applied outside the array like that scale.
package bitmod_pkg;

  // Weight data types supported by the term generator.
  typedef enum logic [1:0] {
    DT_INT8 = 2'd0,
    DT_INT6 = 2'd1,
    DT_FP4  = 2'd2,
    DT_FP3  = 2'd3
  } dtype_e;

  // Number of bit-serial terms per weight for each data type.
  function automatic int unsigned terms_of(dtype_e dt);
    case (dt)
      DT_INT8: return 4;
      DT_INT6: return 3;
      default: return 2;
    endcase
  endfunction

  // One bit-serial weight term (without its shared bit-significance).
  typedef struct packed {
    logic       sign;
    logic [1:0] exp;
    logic       man;
  } wterm_t;

  // FP16 activation.
  typedef struct packed {
    logic       sign;
    logic [4:0] exp;
    logic [9:0] frac;
  } fp16_t;

  // Special value: sign-magnitude fixed point with 4 integer and 1 fraction bit.
  typedef struct packed {
    logic       sign;
    logic [4:0] mag;   // {I3, I2, I1, I0, F0}
  } sv_t;

  localparam int unsigned LANES    = 4;   // dot-product width of one PE
  localparam int unsigned EW       = 6;   // accumulator exponent width
  localparam int unsigned MACC_W   = 15;  // accumulator mantissa width
  localparam int unsigned MGRP_W   = 21;  // dequantized mantissa width
  localparam int unsigned SF_W     = 8;   // per-group scaling factor width
  localparam int unsigned ACC_BIAS = 28;  // see header

  // Control that travels with every term through the array (shared by a
  // whole row of PE columns).
  typedef struct packed {
    logic       valid;       // a term is present this cycle
    logic       grp_last;    // last term of the last weight word of a group
    logic       pass_first;  // this group is the first of an output pass
    logic [2:0] bsig;        // shared bit-significance
  } tctl_t;

  // Per-PE-column weight bundle: four lane terms plus the group's scale.
  typedef struct packed {
    wterm_t [LANES-1:0] t;
    logic [SF_W-1:0]    sf;
  } colterm_t;

  // Dequantized group partial sum: value = m * 2^(e - ACC_BIAS).
  typedef struct packed {
    logic signed [MGRP_W-1:0] m;
    logic [EW-1:0]            e;
  } grp_t;

  // Output-buffer word: value = m * 2^(e - ACC_BIAS).
  localparam int unsigned OUT_MW = 24;
  localparam int unsigned OUT_EW = 7;
  typedef struct packed {
    logic signed [OUT_MW-1:0] m;
    logic [OUT_EW-1:0]        e;
  } outw_t;

endpackage
