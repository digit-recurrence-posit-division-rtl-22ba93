// tb_divisor_multiple: for random scaled divisors and every digit, the
// addend plus carry-in must equal -q*z in the residual format, modulo 2^(N+4).
module tb_divisor_multiple;
  import posit_div_pkg::*;
  localparam int N = 32;
  localparam int RW = N + 4;
  logic [N-1:0] z;
  digit_t digit;
  logic [RW-1:0] dm;
  logic cin;
  int checks = 0, failures = 0;

  divisor_multiple #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [RW-1:0] expv;
    for (int i = 0; i < 2000; i++) begin
      z = N'($urandom) & ~(N'(1) << (N - 1)) | (N'(1) << (N - 2));
      for (int dg = -2; dg <= 2; dg++) begin
        digit = 3'(dg);
        #1;
        expv = RW'(-longint'(dg) * longint'(z) * 4);
        checks++;
        if (RW'(dm + RW'(cin)) !== expv) begin
          failures++;
          if (failures < 10) $display("z=%h q=%0d dm=%h cin=%b", z, dg, dm, cin);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
