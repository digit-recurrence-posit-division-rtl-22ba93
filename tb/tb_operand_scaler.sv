// tb_operand_scaler: checks the shift-add scaling for Posit16 operands.
// For every divisor fraction and random dividends, M*d and M*x must equal the
// exact products with the factor M of the scale-factor table (M*8 = 16, 14,
// 13, 12, 11, 10, 9, 9 for the three bits after the leading 1 of d) and the
// scaled divisor must lie in [63/64, 9/8].
module tb_operand_scaler;
  localparam int N  = 16;
  localparam int FW = N - 5;
  logic [FW-1:0] fx, fd;
  logic [N-1:0]  xs, zs;
  int checks = 0, failures = 0;
  int m8 [8] = '{16, 14, 13, 12, 11, 10, 9, 9};

  operand_scaler #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xi, di, one;
    one = longint'(1) << (N - 1);            // 1.0 in output units
    for (int j = 0; j < (1 << FW); j++) begin
      fd = FW'(j);
      fx = FW'($urandom);
      #1;
      xi = ((longint'(1) << FW) + longint'(fx)) * 8;   // x in units of 2^-(N-1): (1.f)/2
      di = ((longint'(1) << FW) + longint'(fd)) * 8;
      checks++;
      if (longint'(zs) * 8 != di * m8[fd[FW-1 -: 3]] || longint'(xs) * 8 != xi * m8[fd[FW-1 -: 3]]) begin
        failures++;
        if (failures < 10) $display("fd=%h fx=%h zs=%h xs=%h", fd, fx, zs, xs);
      end
      checks++;
      if (longint'(zs) * 64 < one * 63 || longint'(zs) * 8 > one * 9) begin
        failures++;
        if (failures < 10) $display("z out of range fd=%h zs=%h", fd, zs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
