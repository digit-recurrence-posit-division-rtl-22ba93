// tb_qsel_r4: exhaustive test of the radix-4 digit selection. All pairs of
// 6-bit sum/carry tops are applied; the estimate (their sum read as a signed
// number of eighths) is classified with real-valued interval bounds.
module tb_qsel_r4;
  import posit_div_pkg::*;
  logic [5:0] ws_top, wc_top;
  digit_t digit;
  int checks = 0, failures = 0;

  qsel_r4 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, exp_d;
    real est;
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 64; b++) begin
        ws_top = 6'(a); wc_top = 6'(b);
        #1;
        s = (a + b) % 64;
        if (s >= 32) s -= 64;
        est = s / 8.0;
        if      (est >= 1.5   && est <= 3.0)    exp_d = 2;
        else if (est >= 0.5   && est <= 1.375)  exp_d = 1;
        else if (est >= -0.5  && est <= 0.375)  exp_d = 0;
        else if (est >= -1.625 && est <= -0.625) exp_d = -1;
        else if (est >= -3.25 && est <= -1.75)  exp_d = -2;
        else exp_d = 99;                        // outside the table: any digit
        if (exp_d != 99) begin
          checks++;
          if (int'(digit) != exp_d) begin
            failures++;
            if (failures < 10) $display("est=%f got %0d exp %0d", est, digit, exp_d);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
