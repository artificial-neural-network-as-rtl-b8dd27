// par_add: registered parallel adder closing a neuron.
//
// Adds N signed partial sums. Each input is taken as IN_W bits (higher bits
// are dropped, then the IN_W-bit value is sign-extended) and the OUT_W-bit
// total is registered once on clk (latency 1). The defaults, four inputs of
// 30 bits and a 32-bit result, are the widths of the published neuron
// diagram, in which 32-bit multiply-adder results enter 30-bit adder inputs;
// note that a partial sum outside the 30-bit signed range wraps there.
module par_add #(
  parameter int N     = 4,
  parameter int IN_W  = 30,
  parameter int OUT_W = 32
) (
  input  logic                    clk,
  input  logic signed [31:0]      data [N],
  output logic signed [OUT_W-1:0] result
);

  logic signed [OUT_W-1:0] sum;

  always_comb begin
    logic signed [IN_W-1:0] part;
    sum = '0;
    for (int i = 0; i < N; i++) begin
      part = data[i][IN_W-1:0];
      sum += OUT_W'(part);
    end
  end

  always_ff @(posedge clk) result <= sum;

endmodule
