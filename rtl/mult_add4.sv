// mult_add4: four-way multiply-adder, the building block of a neuron.
//
// result = dataa[0]*datab[0] + ... + dataa[3]*datab[3], registered once on
// clk (latency 1). datab holds signed coefficients. dataa is unsigned when
// A_SIGNED = 0 (raw ADC codes entering the first layer) and signed when
// A_SIGNED = 1 (tansig outputs entering later layers). The 12-bit x 18-bit
// operand widths and the 32-bit result follow the published neuron; the
// single register stage and the signedness switch are this design's choices.
module mult_add4 #(
  parameter int A_W      = 12,
  parameter int B_W      = 18,
  parameter bit A_SIGNED = 1'b0,
  parameter int RES_W    = 32
) (
  input  logic                    clk,
  input  logic        [A_W-1:0]   dataa [4],
  input  logic signed [B_W-1:0]   datab [4],
  output logic signed [RES_W-1:0] result
);

  logic signed [RES_W-1:0] sum;

  always_comb begin
    logic signed [A_W:0] a_ext;
    sum = '0;
    for (int i = 0; i < 4; i++) begin
      a_ext = A_SIGNED ? signed'({dataa[i][A_W-1], dataa[i]}) : signed'({1'b0, dataa[i]});
      sum += RES_W'(a_ext * datab[i]);
    end
  end

  always_ff @(posedge clk) result <= sum;

endmodule
