// tb_sign_scale_unit: random and corner tests of the quotient sign, the
// scale difference and the special-case rules (NaR for 0 or NaR divisor or NaR
// dividend, zero for a zero dividend).
module tb_sign_scale_unit;
  localparam int N  = 32;
  localparam int SW = posit_div_pkg::scale_w(N);
  logic sx, sd, x_zero, x_nar, d_zero, d_nar, sq, res_nar, res_zero;
  logic signed [SW-1:0] scale_x, scale_d, t;
  int checks = 0, failures = 0;

  sign_scale_unit #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex, ed;
    for (int i = 0; i < 4000; i++) begin
      ex = $urandom_range(0, 8 * (N - 2) + 6) - 4 * (N - 2);
      ed = $urandom_range(0, 8 * (N - 2) + 6) - 4 * (N - 2);
      sx = 1'($urandom); sd = 1'($urandom);
      {x_zero, x_nar, d_zero, d_nar} = ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'b0;
      scale_x = SW'(ex); scale_d = SW'(ed);
      #1;
      checks++;
      if (sq !== (sx != sd) || int'(t) != ex - ed ||
          res_nar !== (d_zero || d_nar || x_nar) ||
          res_zero !== (x_zero && !(d_zero || d_nar || x_nar))) begin
        failures++;
        if (failures < 10) $display("ex=%0d ed=%0d t=%0d flags=%b%b%b%b nar=%b zero=%b", ex, ed, t, x_zero, x_nar, d_zero, d_nar, res_nar, res_zero);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
