// tb_termination_unit: random quotient words Q (QD = Q-1) whose bit of weight
// 1/2 is 0, as after a real division, with random residual sign and zero
// flags. The unit must pick QD exactly when the residual is negative, take
// the bit of weight 1/4 as the integer bit, shift left by one and decrement
// the scale when that bit is 0, and set sticky for a non-zero remainder.
module tb_termination_unit;
  localparam int N = 32, IT = 16;
  localparam int SW = posit_div_pkg::scale_w(N);
  logic [2*IT-1:0] q, qd;
  logic neg, zero, sticky_o;
  logic signed [SW-1:0] t, t_o;
  logic [2*IT-3:0] frac_o;
  int checks = 0, failures = 0;

  termination_unit #(.N(N), .IT(IT)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, qc, ef;
    int et, n0, n1;
    n0 = 0; n1 = 0;
    for (int i = 0; i < 4000; i++) begin
      // True corrected quotient in [1/8, 1/2): value*2^32 in [2^29, 2^31).
      qc = longint'($urandom_range(0, 32'h5FFF_FFFF)) + (longint'(1) << 29);
      neg = 1'($urandom); zero = neg ? 1'b0 : 1'($urandom);
      v = neg ? qc + 1 : qc;                 // uncorrected Q
      q = (2*IT)'(v); qd = (2*IT)'(v - 1);
      t = SW'($urandom_range(0, 200) - 100);
      #1;
      if (qc[30]) begin ef = qc & 64'h3FFF_FFFF; et = int'(t); n1++; end
      else        begin ef = (qc << 1) & 64'h3FFF_FFFF; et = int'(t) - 1; n0++; end
      checks++;
      if (frac_o !== (2*IT-2)'(ef) || int'(t_o) != et || sticky_o !== !zero) begin
        failures++;
        if (failures < 10) $display("qc=%h neg=%b frac=%h t=%0d", qc, neg, frac_o, t_o);
      end
    end
    checks++;
    if (n0 == 0 || n1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
