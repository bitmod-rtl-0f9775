// tb_pkg: reference helpers shared by the testbenches. These compute values
// directly from the number formats (FP16, bit-serial terms, the FP4 value
// table), independently of the decoders and datapaths under test.
package tb_pkg;
  import bitmod_pkg::*;

  // 2^n for any integer n
  function automatic real pow2(int n);
    real v = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) v = v * 2.0;
    else        for (int i = 0; i < -n; i++) v = v / 2.0;
    return v;
  endfunction

  // FP16 bit pattern to real (normal and subnormal numbers)
  function automatic real fp16_to_real(fp16_t a);
    real v;
    if (a.exp == 0) v = real'(a.frac) * pow2(-24);
    else            v = (1.0 + real'(a.frac) / 1024.0) * pow2(int'(a.exp) - 15);
    return a.sign ? -v : v;
  endfunction

  // random FP16 with exponent field in [emin, emax]
  function automatic fp16_t rand_fp16(int emin, int emax);
    fp16_t a;
    a.sign = 1'($urandom);
    a.exp  = 5'(emin + int'($urandom % (emax - emin + 1)));
    a.frac = 10'($urandom);
    return a;
  endfunction

  // value of one bit-serial term
  function automatic real term_real(wterm_t t, int bsig);
    real v;
    v = t.man ? pow2(int'(t.exp) + bsig) : 0.0;
    return t.sign ? -v : v;
  endfunction

  // extended FP4 basic values (E2M1), magnitude for E1E0M = 0..7
  function automatic real fp4_mag(logic [2:0] em);
    real tbl [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return tbl[em];
  endfunction

  // accumulator/output format value: m * 2^(e - 28)
  function automatic real mant_exp_real(longint m, int e);
    return real'(m) * pow2(e - 28);
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction
endpackage
