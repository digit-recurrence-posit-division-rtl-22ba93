// posit_encoder: rounds and packs a sign, scale and fraction into Posit<N,2>.
//
// The scale T = 4k+e gives the regime value k = T >>> 2 and exponent e = T[1:0].
// The string {regime, e, fraction} is built by placing "10" (k >= 0) or "01"
// (k < 0) in front of e and the fraction and shifting right arithmetically by
// k or -k-1, which replicates the regime bit. The top N-1 bits are the body;
// the next bit is the round bit and everything below, ORed with the incoming
// sticky bit, is the sticky bit. The body is rounded to nearest, ties to even;
// a carry out of the fraction moves into the exponent and regime on its own.
// Scales beyond the format saturate to maxpos (k >= N-2) or minpos
// (k <= -(N-1)): a posit never rounds to zero or NaR. Negative results are
// two's complemented; NaR and zero flags override. Purely combinational.
//
// Rounding at the round bit with the remainder as sticky follows the paper;
// ties-to-even and saturation follow the posit standard.
module posit_encoder
  import posit_div_pkg::*;
#(
  parameter int N   = 32,
  parameter int FIN = 30
) (
  input  logic                         sign,
  input  logic signed [scale_w(N)-1:0] t,
  input  logic        [FIN-1:0]        frac,
  input  logic                         sticky,
  input  logic                         is_nar,
  input  logic                         is_zero,
  output logic        [N-1:0]          p
);
  localparam int SW = scale_w(N);
  localparam int TW = 4 + FIN + N;

  logic signed [SW-1:0] k;
  logic [1:0]           e;
  logic signed [TW-1:0] str, sh;
  logic [SW-1:0]        shamt;
  logic [N-2:0]         body, body_r;
  logic                 rbit, sbit, up;
  logic [N-1:0]         mag;

  always_comb begin
    k     = t >>> 2;
    e     = t[1:0];
    str   = (k >= 0) ? {2'b10, e, frac, {N{1'b0}}} : {2'b01, e, frac, {N{1'b0}}};
    shamt = (k >= 0) ? k : (-k - 1);
    sh    = str >>> shamt;
    body  = sh[TW-1 -: N-1];
    rbit  = sh[TW-N];
    sbit  = (|sh[TW-N-1:0]) | sticky;
    up    = rbit & (body[0] | sbit);
    body_r = body + (N-1)'(up);
    if (k >= SW'(N - 2))            mag = {1'b0, {(N-1){1'b1}}};      // maxpos
    else if (k <= -SW'(N - 1))      mag = {{(N-1){1'b0}}, 1'b1};      // minpos
    else                            mag = {1'b0, body_r};
    if (is_nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (is_zero) p = '0;
    else              p = sign ? (~mag + 1'b1) : mag;
  end
endmodule
