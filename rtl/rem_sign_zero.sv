// rem_sign_zero: sign and zero of a carry-save residual without a full add.
//
// Zero: ws + wc is 0 modulo 2^W exactly when, at every bit, ws^wc equals the
// OR of the two bits one place below (the carry that a zero sum would need);
// this is a bitwise test followed by a W-input AND, with no carry chain.
// Sign: the MSB of the sum is ws^wc at the top bit XOR the carry into it; the
// carry comes from a Kogge-Stone parallel-prefix tree of generate/propagate
// pairs over the lower bits, so the depth grows with log2(W). W = N+4, the
// residual width. Purely combinational.
//
// The paper asks for a lookahead network for this purpose without drawing
// one; both circuits here are this design's choice.
module rem_sign_zero
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic [resid_w(N)-1:0] ws,
  input  logic [resid_w(N)-1:0] wc,
  output logic                  neg,
  output logic                  zero
);
  localparam int RW = resid_w(N);
  localparam int L  = RW - 1;           // bits below the MSB
  localparam int LV = $clog2(L);

  logic [L-1:0] g, pr;

  always_comb begin
    g  = ws[L-1:0] & wc[L-1:0];
    pr = ws[L-1:0] ^ wc[L-1:0];
    // Level j combines each position with the one 2^j places below it; the
    // low 2^j positions already hold their final group values.
    for (int lv = 0; lv < LV; lv++) begin
      g  = g | (pr & (g << (1 << lv)));
      pr = pr & ((pr << (1 << lv)) | L'((1 << (1 << lv)) - 1));
    end
    neg  = ws[RW-1] ^ wc[RW-1] ^ g[L-1];
    zero = ((ws ^ wc) == {(ws[RW-2:0] | wc[RW-2:0]), 1'b0});
  end
endmodule
