// tb_posit_div_workloads: the divider at the two other evaluated formats,
// Posit16 (8 iterations, 12-cycle latency) and Posit64 (32 iterations,
// 36-cycle latency), plus a combinational Posit16 divider (PIPELINED = 0),
// whose result is checked in the same cycle. Both pipelines receive a random stream of divisions,
// one per cycle with occasional gaps, and every result and its latency is
// compared with the bit-serial reference model.
module tb_posit_div_workloads;
  import posit_ref_pkg::*;

  localparam int NOPS = 4000;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  // ---------------- Posit16 ----------------
  logic        v16 = 0, ov16;
  logic [15:0] x16 = '0, d16 = '0, q16;
  posit_div_r4 #(.N(16)) dut16 (.clk, .rst_n, .in_valid(v16), .x(x16), .d(d16), .out_valid(ov16), .q(q16));

  // ---------------- Posit64 ----------------
  logic        v64 = 0, ov64;
  logic [63:0] x64 = '0, d64 = '0, q64;
  posit_div_r4 #(.N(64)) dut64 (.clk, .rst_n, .in_valid(v64), .x(x64), .d(d64), .out_valid(ov64), .q(q64));

  // ---------------- Posit16, combinational (no stage registers) ----------------
  logic        ovc;
  logic [15:0] qc;
  posit_div_r4 #(.N(16), .PIPELINED(1'b0)) dutc (.clk, .rst_n, .in_valid(v16), .x(x16), .d(d16), .out_valid(ovc), .q(qc));

  typedef struct { big_t exp; int t0; } op_t;
  op_t p16[$], p64[$];

  always @(posedge clk) begin
    op_t o;
    if (ov16) begin
      checks++;
      o = p16.pop_front();
      if (q16 !== 16'(o.exp) || cyc - o.t0 != 12) begin
        failures++;
        if (failures < 10) $display("P16 got %h exp %h lat %0d", q16, 16'(o.exp), cyc - o.t0);
      end
    end
    if (ov64) begin
      checks++;
      o = p64.pop_front();
      if (q64 !== 64'(o.exp) || cyc - o.t0 != 36) begin
        failures++;
        if (failures < 10) $display("P64 got %h exp %h lat %0d", q64, 64'(o.exp), cyc - o.t0);
      end
    end
  end

  initial begin
    #(10 * (NOPS * 2 + 1000));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] near_one(logic [63:0] r);
    // Operand with a short regime (k in {-1, 0}) and random remaining bits.
    return {r[63], r[62] ? 2'b10 : 2'b01, r[60:0]};
  endfunction

  initial begin
    op_t o;
    logic [63:0] a, b;
    #1 rst_n = 0;             // asynchronous reset pulse
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NOPS; i++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (i % 2 == 0) begin a = near_one(a); b = near_one(b); end
      v16 = ($urandom_range(0, 7) != 0);
      v64 = v16;
      x16 = a[63:48]; d16 = b[63:48];
      x64 = a; d64 = b;
      if (v16) begin
        o.exp = divide(16, big_t'(x16), big_t'(d16)); o.t0 = cyc; p16.push_back(o);
        #1;
        checks++;
        if (!ovc || qc !== 16'(o.exp)) begin
          failures++;
          if (failures < 10) $display("P16 comb got %h exp %h", qc, 16'(o.exp));
        end
        o.exp = divide(64, big_t'(x64), big_t'(d64)); o.t0 = cyc; p64.push_back(o);
      end
      @(negedge clk);
    end
    v16 = 0; v64 = 0;
    repeat (45) @(negedge clk);
    checks++;
    if (p16.size() != 0 || p64.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
