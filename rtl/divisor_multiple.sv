// divisor_multiple: the term -q*z added to the shifted residual.
//
// The digit q is in -2..+2, so the multiple of the scaled divisor z is 0, z or
// 2z, made by wiring. To subtract (q > 0) the multiple is inverted and cin is
// set, completing the two's complement inside the carry-save adder; to add
// (q < 0) it is passed as is. The output is aligned to the residual format:
// N+4 bits, three integer bits and N+1 fraction bits (z has N-1 fraction bits,
// so it moves up by two places). Purely combinational.
//
// The paper names this block; the invert-plus-carry-in form is this design's.
module divisor_multiple
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic [N-1:0]          z,
  input  digit_t                digit,
  output logic [resid_w(N)-1:0] dm,
  output logic                  cin
);
  localparam int RW = resid_w(N);

  logic [RW-1:0] z1, z2, mag;

  always_comb begin
    z1 = {2'b00, z, 2'b00};
    z2 = {1'b0, z, 3'b000};
    unique case (digit)
      3'sd1, -3'sd1: mag = z1;
      3'sd2, -3'sd2: mag = z2;
      default:       mag = '0;
    endcase
    cin = (digit > 3'sd0);
    dm  = cin ? ~mag : mag;
  end
endmodule
