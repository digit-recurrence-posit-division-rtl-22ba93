// otf_converter: on-the-fly conversion of radix-4 signed digits.
//
// Two conventional binary words are kept: Q(i), the quotient of the first i
// digits, and QD(i) = Q(i) - 4^-i. Each new digit q is appended, two bits at
// a time, to one of them, so no carry is ever propagated:
//   Q(i+1)  = Q(i)  || q        if q >= 0,   QD(i) || (4-|q|)  if q < 0
//   QD(i+1) = Q(i)  || (q-1)    if q >  0,   QD(i) || (3-|q|)  if q <= 0
// Both words start at zero. Purely combinational; words are 2*IT bits, the
// newest digit in the two LSBs.
//
// The rules are the paper's, written out for radix 4.
module otf_converter
  import posit_div_pkg::*;
#(
  parameter int IT = 16
) (
  input  logic [2*IT-1:0] q,
  input  logic [2*IT-1:0] qd,
  input  digit_t          digit,
  output logic [2*IT-1:0] q_n,
  output logic [2*IT-1:0] qd_n
);
  logic [1:0] dq, dqd;

  always_comb begin
    unique case (digit)
      3'sd2:   begin dq = 2'd2; dqd = 2'd1; end
      3'sd1:   begin dq = 2'd1; dqd = 2'd0; end
      3'sd0:   begin dq = 2'd0; dqd = 2'd3; end
      -3'sd1:  begin dq = 2'd3; dqd = 2'd2; end
      default: begin dq = 2'd2; dqd = 2'd1; end  // -2
    endcase
    q_n  = (digit >= 3'sd0) ? {q[2*IT-3:0], dq}  : {qd[2*IT-3:0], dq};
    qd_n = (digit >  3'sd0) ? {q[2*IT-3:0], dqd} : {qd[2*IT-3:0], dqd};
  end
endmodule
