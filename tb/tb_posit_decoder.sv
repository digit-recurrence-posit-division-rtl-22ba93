// tb_posit_decoder: exhaustive test of the posit field decoder for Posit16.
// Every 16-bit pattern is decoded and the sign, zero/NaR flags, scale 4k+e
// and fraction are compared with the bit-serial reference decoder.
module tb_posit_decoder;
  import posit_ref_pkg::*;
  localparam int N = 16;
  logic [N-1:0] p;
  logic sign, is_zero, is_nar;
  logic signed [posit_div_pkg::scale_w(N)-1:0] scale;
  logic [N-6:0] frac;
  int checks = 0, failures = 0;

  posit_decoder #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit s, z, nr;
    int sc;
    big_t f;
    for (int i = 0; i < (1 << N); i++) begin
      p = N'(i);
      #1;
      decode(N, big_t'(p), s, z, nr, sc, f);
      checks++;
      if (is_zero !== z || is_nar !== nr) begin
        failures++;
        if (failures < 10) $display("flags p=%h", p);
      end else if (!z && !nr) begin
        checks++;
        if (sign !== s || int'(scale) != sc || frac !== f[N-6:0]) begin
          failures++;
          if (failures < 10) $display("p=%h got s=%0d sc=%0d f=%h exp s=%0d sc=%0d f=%h", p, sign, scale, frac, s, sc, f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
