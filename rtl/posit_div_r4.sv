// posit_div_r4: pipelined radix-4 digit-recurrence divider for Posit<N,2>.
//
// Computes q = x / d for two Posit<N,2> operands (es = 2). The significand
// division uses a radix-4 SRT recurrence with the minimally redundant digit
// set {-2..2}, a carry-save residual, on-the-fly conversion of the quotient
// digits, a carry-free sign/zero test of the final residual, and operand
// scaling, which makes the digit selection independent of the divisor.
//
// Pipeline, one register per stage, a new division accepted every cycle:
//   1        decode both operands; quotient sign, scale difference T and
//            special cases (NaR, zero)
//   2        scale dividend and divisor by M (divisor into [63/64, 9/8]);
//            w(0) = M*x/4, carry word 0, Q = QD = 0
//   3..IT+2  one radix-4 iteration per stage (IT = N/2 = ceil((N-1)/2))
//   IT+3     sign and zero of the final residual, Q/QD choice, normalization
//   IT+4     rounding and posit encoding
// out_valid and q appear IT+4 clock cycles after in_valid and the operands
// were sampled (20 cycles for N = 32, 12 for N = 16). There is no
// back-pressure. Only the valid bits are reset (asynchronous, active low).
// Every stage register is a stage_reg; PIPELINED = 0 removes them all and
// gives the combinational divider, with q valid in the same cycle as x and d.
//
// The algorithm, the digit set, the selection constants, the scale-factor
// table, the number of iterations and the cycle budget (one per iteration,
// one each for decoding, termination and encoding, one for scaling) follow the
// paper. The valid-bit protocol, the unrolled one-stage-per-iteration
// structure and the internal word widths are this design's choices.
module posit_div_r4
  import posit_div_pkg::*;
#(
  parameter int N         = 32,
  parameter int IT        = iter_count(N),
  parameter bit PIPELINED = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] x,
  input  logic [N-1:0] d,
  output logic         out_valid,
  output logic [N-1:0] q
);
  localparam int SW  = scale_w(N);
  localparam int FW  = frac_w(N);
  localparam int RW  = resid_w(N);
  localparam int SBW = SW + 3;        // {res_nar, res_zero, sq, t}

  // ---------------- stage 1: decode ----------------
  logic              sx, sd, xz, xn, dz, dn, sq_c, rnar_c, rzero_c;
  logic signed [SW-1:0] scx, scd, t_c;
  logic [FW-1:0]     fx_c, fd_c;

  posit_decoder #(.N(N)) u_dec_x (.p(x), .sign(sx), .is_zero(xz), .is_nar(xn), .scale(scx), .frac(fx_c));
  posit_decoder #(.N(N)) u_dec_d (.p(d), .sign(sd), .is_zero(dz), .is_nar(dn), .scale(scd), .frac(fd_c));

  sign_scale_unit #(.N(N)) u_sgn (
    .sx(sx), .sd(sd), .scale_x(scx), .scale_d(scd),
    .x_zero(xz), .x_nar(xn), .d_zero(dz), .d_nar(dn),
    .sq(sq_c), .t(t_c), .res_nar(rnar_c), .res_zero(rzero_c)
  );

  logic           v1;
  logic [SBW-1:0] sb1;
  logic [FW-1:0]  fx1, fd1;

  stage_reg #(.W(SBW + 2*FW), .PIPELINED(PIPELINED)) u_reg_dec (
    .clk(clk), .rst_n(rst_n),
    .v_i(in_valid), .d_i({rnar_c, rzero_c, sq_c, t_c, fx_c, fd_c}),
    .v_o(v1),       .d_o({sb1, fx1, fd1})
  );

  // ---------------- stage 2: operand scaling ----------------
  logic [N-1:0] xs_c, zs_c;

  operand_scaler #(.N(N)) u_scl (.fx(fx1), .fd(fd1), .xs(xs_c), .zs(zs_c));

  logic                  v_it  [IT+1];
  logic [RW-1:0]         ws_it [IT+1];
  logic [RW-1:0]         wc_it [IT+1];
  logic [N-1:0]          z_it  [IT+1];
  logic [2*IT-1:0]       q_it  [IT+1];
  logic [2*IT-1:0]       qd_it [IT+1];
  logic [SBW-1:0]        sb_it [IT+1];
  digit_t                dig   [IT];

  logic [N-1:0] xs2;

  stage_reg #(.W(2*N + SBW), .PIPELINED(PIPELINED)) u_reg_scl (
    .clk(clk), .rst_n(rst_n),
    .v_i(v1),      .d_i({xs_c, zs_c, sb1}),
    .v_o(v_it[0]), .d_o({xs2, z_it[0], sb_it[0]})
  );

  assign ws_it[0] = RW'(xs2);        // w(0) = M*x/4: in residual units the same integer
  assign wc_it[0] = '0;
  assign q_it[0]  = '0;
  assign qd_it[0] = '0;

  // ---------------- stages 3..IT+2: recurrence ----------------
  for (genvar i = 0; i < IT; i++) begin : g_it
    recurrence_stage #(.N(N), .IT(IT), .SBW(SBW), .PIPELINED(PIPELINED)) u_stage (
      .clk(clk), .rst_n(rst_n),
      .v_i(v_it[i]), .ws_i(ws_it[i]), .wc_i(wc_it[i]), .z_i(z_it[i]),
      .q_i(q_it[i]), .qd_i(qd_it[i]), .sb_i(sb_it[i]),
      .v_o(v_it[i+1]), .ws_o(ws_it[i+1]), .wc_o(wc_it[i+1]), .z_o(z_it[i+1]),
      .q_o(q_it[i+1]), .qd_o(qd_it[i+1]), .sb_o(sb_it[i+1]), .digit_o(dig[i])
    );
  end

  // ---------------- stage IT+3: termination ----------------
  logic                 rneg, rzero, sticky_c;
  logic signed [SW-1:0] tn_c;
  logic [2*IT-3:0]      fq_c;

  rem_sign_zero #(.N(N)) u_rsz (.ws(ws_it[IT]), .wc(wc_it[IT]), .neg(rneg), .zero(rzero));

  termination_unit #(.N(N), .IT(IT)) u_term (
    .q(q_it[IT]), .qd(qd_it[IT]), .neg(rneg), .zero(rzero), .t(sb_it[IT][SW-1:0]),
    .t_o(tn_c), .frac_o(fq_c), .sticky_o(sticky_c)
  );

  logic                 v_t, sq_t, nar_t, zero_t, sticky_t;
  logic signed [SW-1:0] t_t;
  logic [2*IT-3:0]      fq_t;

  stage_reg #(.W(SBW + 2*IT - 1), .PIPELINED(PIPELINED)) u_reg_term (
    .clk(clk), .rst_n(rst_n),
    .v_i(v_it[IT]), .d_i({sb_it[IT][SBW-1 -: 3], tn_c, fq_c, sticky_c}),
    .v_o(v_t),      .d_o({nar_t, zero_t, sq_t, t_t, fq_t, sticky_t})
  );

  // ---------------- stage IT+4: rounding and encoding ----------------
  logic [N-1:0] p_c;

  posit_encoder #(.N(N), .FIN(2*IT-2)) u_enc (
    .sign(sq_t), .t(t_t), .frac(fq_t), .sticky(sticky_t),
    .is_nar(nar_t), .is_zero(zero_t), .p(p_c)
  );

  stage_reg #(.W(N), .PIPELINED(PIPELINED)) u_reg_enc (
    .clk(clk), .rst_n(rst_n),
    .v_i(v_t),       .d_i(p_c),
    .v_o(out_valid), .d_o(q)
  );

endmodule
