// sign_scale_unit: sign, scale difference and special cases of X / D.
//
// The quotient sign is the XOR of the operand signs and the quotient scale is
// T = (4kX+eX) - (4kD+eD); the final regime and exponent are the upper bits
// and the two low bits of T once normalization has been accounted for. The
// result is NaR when the divisor is zero or NaR or the dividend is NaR, and
// zero when only the dividend is zero. Purely combinational.
//
// All of this follows the divider's basic scheme (XOR gate and scale
// subtractor); only the signed width of T is this design's choice.
module sign_scale_unit
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                          sx,
  input  logic                          sd,
  input  logic signed [scale_w(N)-1:0]  scale_x,
  input  logic signed [scale_w(N)-1:0]  scale_d,
  input  logic                          x_zero,
  input  logic                          x_nar,
  input  logic                          d_zero,
  input  logic                          d_nar,
  output logic                          sq,
  output logic signed [scale_w(N)-1:0]  t,
  output logic                          res_nar,
  output logic                          res_zero
);
  always_comb begin
    sq       = sx ^ sd;
    t        = scale_x - scale_d;
    res_nar  = d_zero | d_nar | x_nar;
    res_zero = x_zero & ~res_nar;
  end
endmodule
