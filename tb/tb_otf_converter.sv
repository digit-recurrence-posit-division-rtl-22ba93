// tb_otf_converter: random digit sequences of 16 radix-4 digits are fed
// through the on-the-fly converter; after each digit Q must equal the
// integer sum of the digits so far (4*Q + q at each step) and QD must be Q-1.
module tb_otf_converter;
  import posit_div_pkg::*;
  localparam int IT = 16;
  logic [2*IT-1:0] q, qd, q_n, qd_n;
  digit_t digit;
  int checks = 0, failures = 0;

  otf_converter #(.IT(IT)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint val;
    for (int t = 0; t < 300; t++) begin
      q = '0; qd = '0; val = 0;
      for (int i = 0; i < IT; i++) begin
        digit = 3'($urandom_range(0, 4) - 2);
        // Keep the running value positive as in a real division.
        if (i == 0 && digit <= 0) digit = 3'sd1;
        #1;
        val = 4 * val + longint'(digit);
        checks++;
        if (q_n !== (2*IT)'(val) || qd_n !== (2*IT)'(val - 1)) begin
          failures++;
          if (failures < 10) $display("step %0d q=%0d got %h/%h exp %h", i, digit, q_n, qd_n, (2*IT)'(val));
        end
        q = q_n; qd = qd_n;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
