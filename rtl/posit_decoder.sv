// posit_decoder: splits a Posit<N,2> bit string into its fields.
//
// A negative posit is first made positive by two's complement, then the regime
// is read as the run of identical bits after the sign, ended by the opposite
// bit: k = -l for a run of l zeros, k = l-1 for a run of l ones. The next two
// bits are the exponent e (a regime that leaves fewer than two bits reads the
// missing ones as 0) and the rest is the fraction, left aligned in N-5 bits,
// the longest fraction a Posit<N,2> can have. The outputs are the sign, the
// zero and NaR flags, the combined scale 4k+e as one signed number, and the
// fraction. Purely combinational.
//
// The field layout, the regime rule and the worst-case fraction width follow
// the posit format; carrying 4k+e as one signed number is the usual way of
// letting the divider subtract regimes and exponents in one step.
module posit_decoder
  import posit_div_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                    [N-1:0]         p,
  output logic                                    sign,
  output logic                                    is_zero,
  output logic                                    is_nar,
  output logic signed [scale_w(N)-1:0]            scale,
  output logic                    [frac_w(N)-1:0] frac
);
  localparam int SW = scale_w(N);
  localparam int FW = frac_w(N);

  logic [N-1:0] mag;
  logic [N-2:0] body, rest;
  logic         r0, run_on;
  logic [$clog2(N):0] run_len;
  logic signed [SW-1:0] k;
  logic [1:0] e;

  always_comb begin
    sign    = p[N-1];
    is_zero = (p == '0);
    is_nar  = (p == {1'b1, {(N-1){1'b0}}});
    mag     = sign ? (~p + 1'b1) : p;
    body    = mag[N-2:0];
    r0      = body[N-2];
    // Length of the regime run starting at the MSB of the body.
    run_len = '0;
    run_on  = 1'b1;
    for (int i = N - 2; i >= 0; i--) begin
      if (run_on && (body[i] == r0)) run_len = run_len + 1'b1;
      else                           run_on  = 1'b0;
    end
    k    = r0 ? SW'(signed'({1'b0, run_len}) - 1) : -SW'(signed'({1'b0, run_len}));
    // Drop the regime and its terminating bit.
    rest = body << (run_len + 1'b1);
    e    = rest[N-2 -: 2];
    frac = rest[N-4 -: FW];
    scale = (k <<< 2) + SW'(e);
  end

endmodule
