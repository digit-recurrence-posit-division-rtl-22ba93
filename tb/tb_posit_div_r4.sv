// tb_posit_div_r4: end-to-end test of the pipelined posit divider at its
// default size (Posit32, 16 iterations, 20-cycle latency).
//
// A stream of divisions is issued, mostly one per cycle with random gaps,
// and each result is compared with the bit-serial reference model of
// posit_ref_pkg. The latency of every result is checked against IT+4 cycles.
// Operands mix special values, operands near 1 (short regimes), full-range
// random bit patterns, exact quotients and extreme scales. The test also
// counts how often each mechanism of the divider is exercised (every digit
// value, the QD correction for a negative residual, the normalization shift,
// rounding up, a zero remainder, saturation to maxpos/minpos, NaR and zero
// results, back-to-back issue) and fails any mechanism that never occurred.
module tb_posit_div_r4;
  import posit_ref_pkg::*;

  localparam int N  = 32;
  localparam int IT = 16;
  localparam int LAT = IT + 4;
  localparam int NOPS = 20000;

  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  logic [N-1:0] x = '0, d = '0, q;

  posit_div_r4 dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  typedef struct { logic [N-1:0] x, d, exp; int t0; } op_t;
  op_t pend[$];

  int n_dig[5], n_corr, n_norm, n_round, n_rzero, n_maxpos, n_minpos, n_nar, n_zero, n_b2b, n_neg;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * (NOPS * 3 + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rnd_posit(int kind);
    logic [N-1:0] v = $urandom;
    case (kind)
      0: v = {v[N-1], 2'b01, v[N-4:0]};          // k = -1
      1: v = {v[N-1], 2'b10, v[N-4:0]};          // k = 0
      2: v = {v[N-1], 3'b110, v[N-5:0]};         // k = 1
      3: v = {v[N-1], 3'b001, v[N-5:0]};         // k = -2
      default: ;
    endcase
    return v;
  endfunction

  // Mechanism counters sampled inside the pipeline.
  always @(posedge clk) begin
    for (int s = 0; s < IT; s++)
      if (dut.v_it[s]) n_dig[dut.dig[s] + 2]++;
    if (dut.v_it[IT]) begin
      if (dut.rneg) n_corr++;
      if (dut.rzero) n_rzero++;
      if (!dut.u_term.ibit) n_norm++;
    end
    if (dut.v_t && !dut.nar_t && !dut.zero_t && dut.u_enc.up) n_round++;
  end

  // Checker.
  always @(posedge clk) begin
    if (out_valid) begin
      op_t o;
      checks++;
      if (pend.size() == 0) begin
        failures++;
        $display("unexpected out_valid");
      end else begin
        o = pend.pop_front();
        if (q !== o.exp) begin
          failures++;
          if (failures < 10) $display("MISMATCH x=%h d=%h got=%h exp=%h", o.x, o.d, q, o.exp);
        end
        checks++;
        if (cyc - o.t0 != LAT) begin
          failures++;
          if (failures < 10) $display("LATENCY %0d", cyc - o.t0);
        end
        if (o.exp == {1'b0, {(N-1){1'b1}}} || o.exp == {1'b1, {(N-2){1'b0}}, 1'b1}) n_maxpos++;
        if (o.exp == {{(N-1){1'b0}}, 1'b1} || o.exp == {N{1'b1}}) n_minpos++;
        if (o.exp == {1'b1, {(N-1){1'b0}}}) n_nar++;
        if (o.exp == '0) n_zero++;
        if (o.exp[N-1] && o.exp != {1'b1, {(N-1){1'b0}}}) n_neg++;
      end
    end
  end

  // Issue with in_valid kept high across back-to-back operations.
  task automatic stream(logic [N-1:0] a, logic [N-1:0] b, bit keep);
    op_t o;
    if (in_valid) n_b2b++;
    x = a; d = b; in_valid = 1;
    o.x = a; o.d = b; o.exp = N'(divide(N, big_t'(a), big_t'(b))); o.t0 = cyc;
    pend.push_back(o);
    @(negedge clk);
    if (!keep) in_valid = 0;
  endtask

  initial begin
    logic [N-1:0] a, b;
    #1 rst_n = 0;             // asynchronous reset pulse
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Special operands.
    stream('0, 32'h4000_0000, 0);
    stream(32'h4000_0000, '0, 0);
    stream(32'h8000_0000, 32'h4000_0000, 0);
    stream(32'h4000_0000, 32'h8000_0000, 0);
    stream('0, '0, 0);
    // Extreme scales: saturation.
    stream(32'h7FFF_FFFF, 32'h0000_0001, 0);
    stream(32'h0000_0001, 32'h7FFF_FFFF, 0);
    stream(32'h8000_0001, 32'h0000_0001, 0);
    // Exact quotients.
    stream(32'h4000_0000, 32'h4000_0000, 0);
    stream(32'h4C00_0000, 32'h4800_0000, 0);
    // Random stream.
    @(negedge clk);
    for (int i = 0; i < NOPS; i++) begin
      automatic int ka = $urandom_range(0, 5);
      automatic int kb = $urandom_range(0, 5);
      a = rnd_posit(ka);
      b = rnd_posit(kb);
      if ($urandom_range(0, 15) == 0) b = {b[N-1:N-8], {(N-8){1'b0}}};   // short divisor
      if ($urandom_range(0, 31) == 0) b = a;
      stream(a, b, $urandom_range(0, 7) != 0);
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (pend.size() != 0) begin failures++; $display("%0d results missing", pend.size()); end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (n_dig[i] == 0) begin failures++; $display("digit %0d never selected", i - 2); end
    end
    checks += 9;
    if (n_corr == 0)   begin failures++; $display("QD correction never used"); end
    if (n_norm == 0)   begin failures++; $display("normalization shift never used"); end
    if (n_round == 0)  begin failures++; $display("round-up never used"); end
    if (n_rzero == 0)  begin failures++; $display("zero remainder never seen"); end
    if (n_maxpos == 0) begin failures++; $display("maxpos saturation never seen"); end
    if (n_minpos == 0) begin failures++; $display("minpos saturation never seen"); end
    if (n_nar == 0)    begin failures++; $display("NaR never seen"); end
    if (n_zero == 0)   begin failures++; $display("zero never seen"); end
    if (n_b2b == 0)    begin failures++; $display("back-to-back issue never seen"); end
    $display("digits -2..2: %0d %0d %0d %0d %0d", n_dig[0], n_dig[1], n_dig[2], n_dig[3], n_dig[4]);
    $display("corr=%0d norm=%0d round=%0d rzero=%0d maxpos=%0d minpos=%0d nar=%0d zero=%0d b2b=%0d neg=%0d",
             n_corr, n_norm, n_round, n_rzero, n_maxpos, n_minpos, n_nar, n_zero, n_b2b, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
