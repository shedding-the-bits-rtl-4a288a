// tb_mf_ref_pkg -- reference arithmetic for the MAC testbenches.
//
// Works from the number format itself, not from the RTL: a minifloat ExMy
// word {S, E, M} with bias b = 2^(e-1) - 1 is
//   (-1)^S * 2^(E - b) * (1 + M / 2^m)   for E != 0  (no inf, no NaN)
//   (-1)^S * 2^(1 - b) * (M / 2^m)       for E == 0  (subnormal)
// The values are computed in double precision, which is exact for every
// format and dot-product length the testbenches use (all sums stay below 2^53
// accumulator LSBs).
package tb_mf_ref_pkg;

  function automatic real pow2(input int k);
    real r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic int bias(input int e);
    return pow2(e - 1) > 0.0 ? int'(pow2(e - 1)) - 1 : 0;
  endfunction

  // Real value of a minifloat word with e exponent and m mantissa bits.
  function automatic real mf_value(input longint unsigned x, input int e, input int m);
    longint unsigned s, ef, mf;
    real frac, v;
    s  = (x >> (e + m)) & 1;
    ef = (x >> m) & ((64'd1 << e) - 1);
    mf = x & ((64'd1 << m) - 1);
    frac = real'(mf) / pow2(m);
    if (ef == 0) v = pow2(1 - bias(e)) * frac;
    else         v = pow2(int'(ef) - bias(e)) * (1.0 + frac);
    return (s != 0) ? -v : v;
  endfunction

  // Weight of one accumulator LSB for an a-format x b-format product.
  function automatic real acc_lsb(input int ea, input int ma, input int eb, input int mb);
    return pow2(1 - bias(ea) - ma) * pow2(1 - bias(eb) - mb);
  endfunction

  // Largest magnitude of a format: (2 - 2^-m) * 2^(2^e - b - 1).
  function automatic real mf_max(input int e, input int m);
    return (2.0 - pow2(-m)) * pow2(int'(pow2(e)) - bias(e) - 1);
  endfunction

endpackage
