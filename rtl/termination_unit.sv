// termination_unit: correction, compensation and normalization of the quotient.
//
// Correction: if the final residual is negative the decremented word QD, which
// the on-the-fly conversion already holds, is taken instead of Q. Compensation:
// the recurrence divided the dividend by 4 at the start, so the quotient bit of
// weight 1/4 is the integer bit of x/d and the always-zero bit above it is
// dropped. Normalization: x/d lies in [0.5,2); when its integer bit is 0 the
// word is shifted left by one and the scale T is decremented. The fraction
// below the hidden 1 (2*IT-2 bits) and the sticky bit (remainder non-zero)
// go to the posit encoder. Purely combinational.
//
// All three steps are the paper's termination steps; that the compensation is
// plain wiring is a consequence of the bit positions chosen here.
module termination_unit
  import posit_div_pkg::*;
#(
  parameter int N  = 32,
  parameter int IT = 16
) (
  input  logic        [2*IT-1:0]       q,
  input  logic        [2*IT-1:0]       qd,
  input  logic                         neg,
  input  logic                         zero,
  input  logic signed [scale_w(N)-1:0] t,
  output logic signed [scale_w(N)-1:0] t_o,
  output logic        [2*IT-3:0]       frac_o,
  output logic                         sticky_o
);
  logic [2*IT-1:0] qc;
  logic            ibit;

  always_comb begin
    qc       = neg ? qd : q;
    ibit     = qc[2*IT-2];
    frac_o   = ibit ? qc[2*IT-3:0] : {qc[2*IT-4:0], 1'b0};
    t_o      = t - scale_w(N)'(!ibit);
    sticky_o = !zero;
  end
endmodule
