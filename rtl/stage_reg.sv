// stage_reg: one pipeline register of the divider: a valid bit and a data word.
//
// With PIPELINED = 1 (the default) the valid bit is a flip-flop with an
// asynchronous active-low reset and the data word a flip-flop without reset,
// both loaded on every rising clock edge, so a stage adds one cycle of
// latency and accepts new data every cycle. With PIPELINED = 0 the stage is a
// plain connection, which turns the whole divider into one combinational
// circuit (the unpipelined form of the same algorithm).
module stage_reg #(
  parameter int W         = 1,
  parameter bit PIPELINED = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         v_i,
  input  logic [W-1:0] d_i,
  output logic         v_o,
  output logic [W-1:0] d_o
);
  if (PIPELINED) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_o <= 1'b0;
      else        v_o <= v_i;
    end
    always_ff @(posedge clk) d_o <= d_i;
  end else begin : g_wire
    assign v_o = v_i;
    assign d_o = d_i;
  end
endmodule
