// tb_posit_encoder: the two Posit10 termination examples (quotient 0.1111101
// with non-zero remainder, scales kQ=1 and kQ=2, giving 0110011111 and
// 0111010000) and random Posit16 inputs checked against the bit-serial
// reference encoder, including saturating scales, ties and special flags.
module tb_posit_encoder;
  import posit_ref_pkg::*;
  localparam int N10 = 10, N = 16, FIN = 14;
  localparam int SW10 = posit_div_pkg::scale_w(N10), SW = posit_div_pkg::scale_w(N);
  int checks = 0, failures = 0;

  // Posit10 instance (FIN = 8)
  logic s10, st10, nar10, z10;
  logic signed [SW10-1:0] t10;
  logic [7:0] f10;
  logic [N10-1:0] p10;
  posit_encoder #(.N(N10), .FIN(8)) dut10 (.sign(s10), .t(t10), .frac(f10), .sticky(st10), .is_nar(nar10), .is_zero(z10), .p(p10));

  // Posit16 instance
  logic sg, st, nar, zr;
  logic signed [SW-1:0] t;
  logic [FIN-1:0] fr;
  logic [N-1:0] p;
  posit_encoder #(.N(N), .FIN(FIN)) dut (.sign(sg), .t(t), .frac(fr), .sticky(st), .is_nar(nar), .is_zero(zr), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t e;
    // q = 0.1111101 normalized to 1.111101 with the scale decremented: e = 1.
    s10 = 0; nar10 = 0; z10 = 0; st10 = 1; f10 = 8'b1111_0100;
    t10 = SW10'(4 * 1 + 1);
    #1; checks++;
    if (p10 !== 10'b0110011111) begin failures++; $display("example 1: %b", p10); end
    t10 = SW10'(4 * 2 + 1);
    #1; checks++;
    if (p10 !== 10'b0111010000) begin failures++; $display("example 2: %b", p10); end
    for (int i = 0; i < 20000; i++) begin
      sg = 1'($urandom); nar = ($urandom_range(0, 50) == 0); zr = ($urandom_range(0, 50) == 0);
      t = SW'($urandom_range(0, 4 * 2 * (N + 1)) - 4 * (N + 1));
      fr = FIN'($urandom);
      if (i % 5 == 0) fr[FIN-6:0] = '0;      // exact ties appear at several scales
      st = (i % 5 == 0) ? 1'b0 : 1'($urandom);
      #1;
      if (nar) e = big_t'(1) << (N - 1);
      else if (zr) e = 0;
      else e = encode(N, sg, int'(t), (big_t'(1) << FIN) | big_t'(fr), FIN, st);
      checks++;
      if (p !== N'(e)) begin
        failures++;
        if (failures < 10) $display("t=%0d f=%h st=%b got %h exp %h", t, fr, st, p, N'(e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
