// recurrence_stage: one pipelined radix-4 digit-recurrence iteration.
//
// From the carry-save residual (ws, wc) of iteration i the stage selects the
// digit q(i+1) from the top six bits of 4w(i), forms the divisor multiple,
// computes w(i+1) = 4w(i) - q(i+1) z in carry-save form and appends q(i+1) to
// the on-the-fly quotient words Q and QD. All results, the scaled divisor z,
// a valid bit and a side-band word of SBW bits (anything that must travel with
// the operation) are registered, so one operation enters per cycle and leaves
// one cycle later. The valid bit has an asynchronous active-low reset; data
// registers are not reset. digit_o shows the digit being chosen this cycle.
// With PIPELINED = 0 the register is left out and the stage is combinational.
// An assertion checks, for every valid operation, that the residual estimate
// lies inside the domain of the selection table (a sign of convergence).
//
// The chain selection -> multiple -> subtractor, and the digit feeding the
// quotient conversion, are the paper's. One register stage per iteration and
// the valid/side-band scheme are this design's.
module recurrence_stage
  import posit_div_pkg::*;
#(
  parameter int N   = 32,
  parameter int IT  = 16,
  parameter int SBW = 1,
  parameter bit PIPELINED = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  v_i,
  input  logic [resid_w(N)-1:0] ws_i,
  input  logic [resid_w(N)-1:0] wc_i,
  input  logic [N-1:0]          z_i,
  input  logic [2*IT-1:0]       q_i,
  input  logic [2*IT-1:0]       qd_i,
  input  logic [SBW-1:0]        sb_i,
  output logic                  v_o,
  output logic [resid_w(N)-1:0] ws_o,
  output logic [resid_w(N)-1:0] wc_o,
  output logic [N-1:0]          z_o,
  output logic [2*IT-1:0]       q_o,
  output logic [2*IT-1:0]       qd_o,
  output logic [SBW-1:0]        sb_o,
  output digit_t                digit_o
);
  localparam int RW = resid_w(N);

  digit_t          digit;
  logic [RW-1:0]   dm, ws_n, wc_n;
  logic            cin;
  logic [2*IT-1:0] q_n, qd_n;

  // Top six bits of 4w(i) are bits RW-3 .. RW-8 of w(i).
  qsel_r4 u_sel (
    .ws_top (ws_i[RW-3 -: 6]),
    .wc_top (wc_i[RW-3 -: 6]),
    .digit  (digit)
  );

  divisor_multiple #(.N(N)) u_mult (
    .z     (z_i),
    .digit (digit),
    .dm    (dm),
    .cin   (cin)
  );

  residual_csa #(.N(N)) u_csa (
    .ws   (ws_i),
    .wc   (wc_i),
    .dm   (dm),
    .cin  (cin),
    .ws_n (ws_n),
    .wc_n (wc_n)
  );

  otf_converter #(.IT(IT)) u_otf (
    .q     (q_i),
    .qd    (qd_i),
    .digit (digit),
    .q_n   (q_n),
    .qd_n  (qd_n)
  );

  assign digit_o = digit;

  // While the residual bound |w| <= (2/3) z holds, the estimate of 4w(i)
  // stays inside the selection table's domain, -26/8 .. 24/8.
  logic signed [5:0] est_chk;
  assign est_chk = signed'(ws_i[RW-3 -: 6] + wc_i[RW-3 -: 6]);

  always_ff @(posedge clk) begin
    if (v_i)
      assert (est_chk >= -6'sd26 && est_chk <= 6'sd24)
        else $error("residual estimate %0d outside the selection range", est_chk);
  end

  stage_reg #(.W(2*RW + N + 4*IT + SBW), .PIPELINED(PIPELINED)) u_reg (
    .clk(clk), .rst_n(rst_n),
    .v_i(v_i), .d_i({ws_n, wc_n, z_i, q_n, qd_n, sb_i}),
    .v_o(v_o), .d_o({ws_o, wc_o, z_o, q_o, qd_o, sb_o})
  );
endmodule
