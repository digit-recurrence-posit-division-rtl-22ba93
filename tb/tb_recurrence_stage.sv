// tb_recurrence_stage: one pipelined iteration for Posit16 widths. Random
// scaled divisors z in [63/64, 9/8] and residuals with |w| <= (2/3) z, split
// at random into sum and carry words, are applied. One cycle later the
// registered outputs must satisfy w(i+1) = 4w(i) - q z, keep |w(i+1)| <= (2/3) z
// (the convergence bound), extend Q by the digit, pass z and the side band,
// and raise v_o exactly one cycle after v_i.
module tb_recurrence_stage;
  import posit_div_pkg::*;
  localparam int N = 16, IT = 8, SBW = 5;
  localparam int RW = N + 4;
  logic clk = 0, rst_n = 1, v_i = 0, v_o;
  logic [RW-1:0] ws_i, wc_i, ws_o, wc_o;
  logic [N-1:0] z_i, z_o;
  logic [2*IT-1:0] q_i, qd_i, q_o, qd_o;
  logic [SBW-1:0] sb_i, sb_o;
  digit_t digit_o;
  int checks = 0, failures = 0;

  recurrence_stage #(.N(N), .IT(IT), .SBW(SBW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint one, zmin, zmax, z4, w, wn, lim, ws;
    int dg, seen[5];
    one  = longint'(1) << (N - 1);
    zmin = (one * 63) / 64 + 1;
    zmax = (one * 9) / 8;
    ws_i = '0; wc_i = '0; z_i = '0; q_i = '0; qd_i = '0; sb_i = '0;
    #1 rst_n = 0;             // asynchronous reset pulse
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      z_i = N'($urandom_range(int'(zmin), int'(zmax)));
      z4  = longint'(z_i) * 4;                    // z in residual units
      lim = (2 * z4) / 3;
      w   = longint'($urandom_range(0, 2 * int'(lim))) - lim;
      ws  = longint'($urandom) & ((longint'(1) << RW) - 1);
      ws_i = RW'(ws);
      wc_i = RW'(w - ws);
      q_i  = (2*IT)'($urandom); qd_i = q_i - 1;
      sb_i = SBW'($urandom);
      v_i  = (i % 3 != 0);
      @(posedge clk);
      dg = int'(digit_o);
      #1;
      wn = longint'(signed'(RW'(ws_o + wc_o)));
      checks++;
      if (wn != 4 * w - dg * z4 || dg < -2 || dg > 2) begin
        failures++;
        if (failures < 10) $display("w=%0d z=%0d q=%0d wn=%0d", w, z4, dg, wn);
      end
      checks++;
      if (wn > lim || wn < -lim) begin
        failures++;
        if (failures < 10) $display("bound broken w=%0d z=%0d q=%0d wn=%0d", w, z4, dg, wn);
      end
      checks++;
      if (q_o !== (2*IT)'(4 * longint'(q_i) + dg) || qd_o !== (2*IT)'(q_o - 1) || z_o !== z_i || sb_o !== sb_i || v_o !== v_i) begin
        failures++;
        if (failures < 10) $display("register mismatch i=%0d q_i=%h q_o=%h qd_o=%h z=%h/%h sb=%h/%h v=%b/%b", i, q_i, q_o, qd_o, z_i, z_o, sb_i, sb_o, v_i, v_o);
      end
      seen[dg + 2]++;
      @(negedge clk);
    end
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("digit %0d never seen", k - 2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
