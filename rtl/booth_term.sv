// booth_term: radix-4 Booth decoder for one INT8 or INT6 weight.
//
// The two's-complement weight is cut into overlapping 3-bit Booth strings
// {w[2k+1], w[2k], w[2k-1]} (w[-1] = 0). INT8 gives four strings (k = 0..3),
// INT6 three (k = 0..2); string k has bit-significance 2k. Each string maps to
// one bit-serial term following the Booth truth table: 000/111 -> 0,
// 001/010 -> +x, 110/101 -> -x, 011 -> +2x, 100 -> -2x, where 2x is expressed
// as exp = 1, man = 1. The truth table and the bit-significances follow the
// paper's figure of the unified bit-serial representation.
//
// Interface: purely combinational. 'w' holds the weight (INT6 in w[5:0]; bits
// 7:6 are ignored in INT6 mode because string k = 2 uses w[5] as its MSB),
// 'k' selects the term, 'term' and 'bsig' are the decoded term.
// The outputs use the shared term format, so term.exp[1] (Booth never needs
// 4x) and bsig[0] (Booth significances are even) are constant 0 here.
module booth_term
  import bitmod_pkg::*;
(
  input  logic [7:0] w,
  input  logic [1:0] k,
  output wterm_t     term,
  output logic [2:0] bsig
);
  logic [8:0] wx;     // weight with the implicit w[-1] = 0 appended
  logic [2:0] str;

  always_comb begin
    wx   = {w, 1'b0};
    str  = wx[2*k +: 3];
    bsig = {k, 1'b0};
    case (str)
      3'b001, 3'b010: term = '{sign: 1'b0, exp: 2'd0, man: 1'b1};
      3'b110, 3'b101: term = '{sign: 1'b1, exp: 2'd0, man: 1'b1};
      3'b011:         term = '{sign: 1'b0, exp: 2'd1, man: 1'b1};
      3'b100:         term = '{sign: 1'b1, exp: 2'd1, man: 1'b1};
      default:        term = '{sign: 1'b0, exp: 2'd0, man: 1'b0};
    endcase
  end
endmodule
