// tb_ref_pkg: reference arithmetic for the converter testbenches.
//
// Everything is done on 256-bit unsigned integers with ordinary '%' and
// '*', independently of the bit rearrangements used by the design. For a
// word-size parameter n the moduli are m1 = 2^n, m2 = 2^(2n)-1,
// m3 = 2^(2n)+1, the dynamic range is M = m1*m2*m3, and the internal
// modulus is m4 = 2^(4n)-1.
package tb_ref_pkg;
  typedef logic [255:0] big_t;

  function automatic big_t pow2(int unsigned k);
    return big_t'(1) << k;
  endfunction

  function automatic big_t m1(int unsigned n); return pow2(n);              endfunction
  function automatic big_t m2(int unsigned n); return pow2(2*n) - 1;        endfunction
  function automatic big_t m3(int unsigned n); return pow2(2*n) + 1;        endfunction
  function automatic big_t m4(int unsigned n); return pow2(4*n) - 1;        endfunction
  function automatic big_t dyn_range(int unsigned n); return m1(n) * m2(n) * m3(n); endfunction

  // Uniform-ish random number below lim (lim > 0), from 8 x 32 random bits.
  function automatic big_t rand_below(big_t lim);
    big_t r = '0;
    for (int i = 0; i < 8; i++) r = (r << 32) | big_t'($urandom);
    return r % lim;
  endfunction
endpackage
