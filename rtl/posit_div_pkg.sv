// posit_div_pkg: widths and types shared by the radix-4 posit divider.
//
// Posit<N,2> operands have at most F = N-5 fraction bits. The combined scale
// 4k+e of an operand, and the difference of two scales, is carried as one
// signed number of scale_w(N) bits. After operand scaling the dividend and the
// divisor are fixed-point numbers with 1 integer and N-1 fraction bits
// (F+4 fraction bits: F of the posit, 1 for the leading 1 of the [0.5,1)
// significand, 3 for the shift-add by the scale factor). The carry-save
// residual adds 2 more integer bits (4w lies in [-4,4)) and 2 more fraction
// bits (w(0) = x/4), so it is N+4 bits wide. The number of radix-4 iterations
// is ceil((N-1)/2), two quotient bits per iteration.
package posit_div_pkg;

  // Signed radix-4 quotient digit, always within -2..+2.
  typedef logic signed [2:0] digit_t;

  function automatic int frac_w(input int n);
    return n - 5;
  endfunction

  function automatic int scale_w(input int n);
    return $clog2(n) + 4;
  endfunction

  function automatic int resid_w(input int n);
    return n + 4;
  endfunction

  function automatic int iter_count(input int n);
    return n / 2;  // equals ceil((n-1)/2) for every n
  endfunction

endpackage
