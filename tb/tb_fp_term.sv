// tb_fp_term: checks the FP4/FP3 term decoder for every code and several
// special values. The two terms must add up to the value from the extended FP4
// value table (in half units), the negative zero must be replaced by the
// special value (and flagged), and the terms must carry bsig 1 and 0.
module tb_fp_term;
  import bitmod_pkg::*;
  import tb_pkg::*;

  logic [3:0] code;
  sv_t        sv;
  logic       k;
  wterm_t     term;
  logic [2:0] bsig;
  logic       is_special;
  int checks = 0, failures = 0;

  fp_term dut (.code, .sv, .k, .term, .bsig, .is_special);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // special values of FP4-ER/EA and FP3-ER/EA (Table IV) and one custom value
    real svs [9] = '{5.0, -5.0, 8.0, -8.0, 3.0, -3.0, 6.0, -6.0, 2.5};
    real sum, expv;
    for (int si = 0; si < 9; si++) begin
      sv.sign = (svs[si] < 0.0);
      sv.mag  = 5'(int'(absr(svs[si]) * 2.0));
      for (int c = 0; c < 16; c++) begin
        code = 4'(c);
        sum  = 0.0;
        for (int kk = 0; kk < 2; kk++) begin
          k = 1'(kk); #1;
          checks++;
          if (int'(bsig) != 1 - kk) failures++;
          sum += term_real(term, int'(bsig));
        end
        if (c == 8) expv = svs[si];
        else        expv = c[3] ? -fp4_mag(3'(c)) : fp4_mag(3'(c));
        checks++;
        if (sum != 2.0 * expv) begin
          failures++;
          $display("code %0d sv %f: got %f half-units, expected %f", c, svs[si], sum, 2.0 * expv);
        end
        checks++;
        if (is_special != (c == 8)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
