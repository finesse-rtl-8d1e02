// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Everything here is computed with plain wide multiplication and the %
// operator, independently of the hardware's Karatsuba, Montgomery and
// binary-inversion datapaths. Values are 256-bit, modulus p = BN254N.
package tb_ref_pkg;
  import finesse_pkg::*;

  typedef logic [2*DW+1:0] wide_t;

  function automatic fp_t mulmod(fp_t a, fp_t b);
    wide_t t;
    t = wide_t'(a) * wide_t'(b);
    return fp_t'(t % wide_t'(P_MOD));
  endfunction

  function automatic fp_t addmod(fp_t a, fp_t b);
    wide_t t;
    t = wide_t'(a) + wide_t'(b);
    return fp_t'(t % wide_t'(P_MOD));
  endfunction

  function automatic fp_t submod(fp_t a, fp_t b);
    wide_t t;
    t = wide_t'(a) + wide_t'(P_MOD) - wide_t'(b);
    return fp_t'(t % wide_t'(P_MOD));
  endfunction

  function automatic fp_t powmod(fp_t a, fp_t e);
    fp_t r = fp_t'(1);
    for (int i = DW - 1; i >= 0; i--) begin
      r = mulmod(r, r);
      if (e[i]) r = mulmod(r, a);
    end
    return r;
  endfunction

  // R mod p and R^-1 mod p, R = 2^DW
  function automatic fp_t r_mod();
    wide_t t;
    t = wide_t'(1) << DW;
    return fp_t'(t % wide_t'(P_MOD));
  endfunction

  function automatic fp_t rinv_mod();
    return powmod(r_mod(), P_MOD - 2);
  endfunction

  // Montgomery product a*b*R^-1 mod p
  function automatic fp_t mont(fp_t a, fp_t b, fp_t rinv);
    return mulmod(mulmod(a, b), rinv);
  endfunction

  // Montgomery-domain inverse: x = aR -> a^-1 R = x^-1 R^2
  function automatic fp_t inv_mont(fp_t x, fp_t r2);
    if (x == '0) return '0;
    return mulmod(powmod(x, P_MOD - 2), r2);
  endfunction

  function automatic fp_t rand_fp();
    fp_t v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = $urandom;
    return fp_t'(v % P_MOD);
  endfunction
endpackage
