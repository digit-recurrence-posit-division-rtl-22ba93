// qsel_r4: radix-4 quotient-digit selection for a scaled divisor.
//
// With the divisor scaled into [1-1/64, 1+1/8] the digit depends only on an
// estimate of the shifted residual 4w(i). The estimate adds the top six bits
// of the carry-save sum and carry words (three integer and three fraction
// bits, so it is in units of 1/8) and is compared with fixed constants:
//   +2 if  3/2  <= est <=  3       +1 if  1/2 <= est <= 11/8
//    0 if -1/2  <= est <=  3/8     -1 if -13/8 <= est <= -5/8
//   -2 if -13/4 <= est <= -7/4
// Purely combinational: a 6-bit adder followed by comparisons.
//
// The selection intervals are the paper's; treating the six estimate bits as
// three integer and three fraction bits follows from their 1/8 granularity.
module qsel_r4
  import posit_div_pkg::*;
(
  input  logic [5:0] ws_top,
  input  logic [5:0] wc_top,
  output digit_t     digit
);
  logic signed [5:0] est;   // units of 1/8

  always_comb begin
    est = signed'(ws_top + wc_top);
    if      (est >= 6'sd12) digit = 3'sd2;
    else if (est >= 6'sd4)  digit = 3'sd1;
    else if (est >= -6'sd4) digit = 3'sd0;
    else if (est >= -6'sd13) digit = -3'sd1;
    else                    digit = -3'sd2;
  end
endmodule
