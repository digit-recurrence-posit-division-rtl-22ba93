// tb_rem_sign_zero: random carry-save pairs, pairs that sum to zero and
// pairs that sum to +-1 are applied; sign and zero must match the plain sum.
module tb_rem_sign_zero;
  localparam int N = 32;
  localparam int RW = N + 4;
  logic [RW-1:0] ws, wc, s;
  logic neg, zero;
  int checks = 0, failures = 0;

  rem_sign_zero #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 6000; i++) begin
      ws = RW'({$urandom, $urandom});
      case (i % 4)
        0: wc = -ws;
        1: wc = -ws + 1;
        2: wc = -ws - 1;
        default: wc = RW'({$urandom, $urandom});
      endcase
      #1;
      s = ws + wc;
      checks++;
      if (neg !== s[RW-1] || zero !== (s == '0)) begin
        failures++;
        if (failures < 10) $display("ws=%h wc=%h neg=%b zero=%b", ws, wc, neg, zero);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
