// residual_csa: carry-save form of w(i+1) = 4 w(i) - q z.
//
// The residual is kept as a sum word and a carry word whose plain sum, modulo
// 2^(N+4), is w. Both are shifted left by two places (times 4) and added to
// the divisor multiple by one row of full adders. The carries move up one
// place, and the free LSB of the new carry word takes cin, the +1 of the
// two's complement when the multiple was inverted. No carry propagates, so
// the delay does not depend on N. Purely combinational.
//
// Keeping the carry word already weighted (w = ws + wc) is this design's
// convention; the carry-save recurrence itself is the paper's.
module residual_csa
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic [resid_w(N)-1:0] ws,
  input  logic [resid_w(N)-1:0] wc,
  input  logic [resid_w(N)-1:0] dm,
  input  logic                  cin,
  output logic [resid_w(N)-1:0] ws_n,
  output logic [resid_w(N)-1:0] wc_n
);
  localparam int RW = resid_w(N);

  logic [RW-1:0] a, b, maj;

  always_comb begin
    a    = ws << 2;
    b    = wc << 2;
    ws_n = a ^ b ^ dm;
    maj  = (a & b) | (a & dm) | (b & dm);
    wc_n = {maj[RW-2:0], cin};
  end
endmodule
