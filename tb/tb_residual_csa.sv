// tb_residual_csa: random test of the carry-save recurrence step. The new
// sum and carry words must add to 4(ws+wc) + dm + cin modulo 2^(N+4).
module tb_residual_csa;
  localparam int N = 32;
  localparam int RW = N + 4;
  logic [RW-1:0] ws, wc, dm, ws_n, wc_n;
  logic cin;
  int checks = 0, failures = 0;

  residual_csa #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      ws = RW'({$urandom, $urandom}); wc = RW'({$urandom, $urandom}); dm = RW'({$urandom, $urandom}); cin = 1'($urandom);
      #1;
      checks++;
      if (RW'(ws_n + wc_n) !== RW'(4 * ws + 4 * wc + dm + RW'(cin))) begin
        failures++;
        if (failures < 10) $display("ws=%h wc=%h dm=%h", ws, wc, dm);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
