// operand_scaler: scales divisor and dividend so the divisor is close to 1.
//
// Both significands are taken as fractions in [0.5,1): x = 0.1fx, d = 0.1fd.
// The three bits of d after its leading 1 pick a factor M in [1.125, 2] that
// is the sum of 1 and one or two powers of two:
//   000: 1+1/2+1/2   001: 1+1/4+1/2   010: 1+1/2+1/8   011: 1+1/2
//   100: 1+1/4+1/8   101: 1+1/4       110: 1+1/8       111: 1+1/8
// Both operands are multiplied by M with shifts and a three-input add, so
// z = M*d falls in [1-1/64, 1+1/8] and the quotient is unchanged. Outputs
// have 1 integer and N-1 fraction bits (three fraction bits more than the
// operands, enough for the 1/8 shift to be exact). Purely combinational.
//
// The table of factors follows the paper; the three guard bits and the plain
// three-operand adder are this design's choices.
module operand_scaler
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic [frac_w(N)-1:0] fx,
  input  logic [frac_w(N)-1:0] fd,
  output logic [N-1:0]         xs,
  output logic [N-1:0]         zs
);
  localparam int FW = frac_w(N);

  // Operands in units of 2^-(FW+4): {1, f} shifted up by 3.
  logic [N-1:0] xb, db;
  logic [N-1:0] x_a, x_b, d_a, d_b;
  logic [1:0]   sh_a, sh_b;   // right shift for term a and b (1..3)
  logic         use_b;        // second term present

  always_comb begin
    xb = {1'b0, 1'b1, fx, 3'b000};
    db = {1'b0, 1'b1, fd, 3'b000};
    unique case (fd[FW-1 -: 3])
      3'b000:  begin sh_a = 2'd1; sh_b = 2'd1; use_b = 1'b1; end
      3'b001:  begin sh_a = 2'd2; sh_b = 2'd1; use_b = 1'b1; end
      3'b010:  begin sh_a = 2'd1; sh_b = 2'd3; use_b = 1'b1; end
      3'b011:  begin sh_a = 2'd1; sh_b = 2'd1; use_b = 1'b0; end
      3'b100:  begin sh_a = 2'd2; sh_b = 2'd3; use_b = 1'b1; end
      3'b101:  begin sh_a = 2'd2; sh_b = 2'd1; use_b = 1'b0; end
      default: begin sh_a = 2'd3; sh_b = 2'd1; use_b = 1'b0; end
    endcase
    x_a = xb >> sh_a;
    d_a = db >> sh_a;
    x_b = use_b ? (xb >> sh_b) : '0;
    d_b = use_b ? (db >> sh_b) : '0;
    xs  = xb + x_a + x_b;
    zs  = db + d_a + d_b;
  end
endmodule
