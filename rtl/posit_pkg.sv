// posit_pkg: width rules shared by the posit decoder, FP multiply-add and encoder.
//
// An (n,es) posit has a sign bit, a run-length coded regime, up to es exponent bits and
// the remaining fraction bits. The regime value k ranges over -(n-2)..(n-2), so the
// effective exponent k*2^es + e ranges over +-(n-2)*2^es (+ 2^es-1). The functions below
// give the signal widths every block derives from (n,es). The width rules are this
// design's own choice; the paper does not list internal widths.
package posit_pkg;

  // Width of a leading-zero / leading-one count over up to n bits.
  function automatic int cnt_w(input int n);
    return $clog2(n);
  endfunction

  // Two's-complement width of the regime value k.
  function automatic int regime_w(input int n);
    return $clog2(n) + 1;
  endfunction

  // Two's-complement width of the effective exponent {regime, exponent bits}.
  function automatic int exp_w(input int n, input int es);
    return regime_w(n) + es;
  endfunction

  // Largest number of fraction bits an (n,es) posit can hold (sign + 2 regime bits used).
  function automatic int frac_w(input int n, input int es);
    return n - 3 - es;
  endfunction

  // Exponent width at the output of the FP multiply-add: room for the product exponent,
  // carry-out and the left shift after cancellation.
  function automatic int mac_exp_w(input int n, input int es);
    return exp_w(n, es) + 3;
  endfunction

endpackage
