// mf_pkg -- shared widths and constants of the MAC operator library.
//
// A minifloat ExMy has a sign bit, an e-bit exponent field E and an m-bit
// mantissa field M.  The exponent bias follows IEEE, b = 2^(e-1) - 1.  There is
// no inf and no NaN: every exponent code, including all ones, is an ordinary
// binade, and E = 0 marks subnormals that read with exponent 1 and a leading
// significand digit of 0.
//
// The width functions give the accumulator sizes that make a dot product of up
// to n terms exact:
//   integer MAC   : ra + rb + ceil(log2 n) + 1
//   minifloat MAC : 2^ea + ma + 2^eb + mb + ceil(log2 n) - 1
// Both formulas are the ones the design is specified with; the minifloat one is
// exactly the width of the largest aligned significand product
// (2^ea + 2^eb + ma + mb - 2 bits) plus ceil(log2 n) growth bits plus a sign.
package mf_pkg;

  // Largest dot product in ResNet-18 (3x3x512), used as default n.
  localparam int unsigned DEFAULT_N = 4608;

  function automatic int unsigned clog2(input int unsigned v);
    int unsigned r = 0;
    longint unsigned p = 1;
    while (p < longint'(v)) begin
      p = p << 1;
      r++;
    end
    return r;
  endfunction

  // Exponent bias b = 2^(e-1) - 1.
  function automatic int mf_bias(input int unsigned e);
    return (1 << (e - 1)) - 1;
  endfunction

  // Width of the aligned product magnitude: significand product (ma+mb+2 bits)
  // shifted by at most (2^ea - 2) + (2^eb - 2).
  function automatic int unsigned mf_mag_width(input int unsigned ea, ma, eb, mb);
    return (1 << ea) + (1 << eb) + ma + mb - 2;
  endfunction

  function automatic int unsigned mf_acc_width(input int unsigned ea, ma, eb, mb,
                                               input int unsigned n);
    return (1 << ea) + ma + (1 << eb) + mb + clog2(n) - 1;
  endfunction

  function automatic int unsigned int_acc_width(input int unsigned ra, rb,
                                                input int unsigned n);
    return ra + rb + clog2(n) + 1;
  endfunction

endpackage
