// neuron: pipelined N_IN-input neuron sum of products.
//
// ma = sum over k of dataa[k] * datab[k], the weighted sum of one neuron
// without its bias (the bias is added after a shift, in tansig_addr). The
// inputs are cut into groups of four; each group goes to one mult_add4 and the
// group results meet in one par_add. For the default 16 inputs this is the
// published neuron: four 12x18 multiply-adders and a four-input parallel
// adder with 30-bit inputs and a 32-bit output. Neurons with 12 or 8 inputs
// use three or two multiply-adders (missing inputs of the last group are
// zero), which is this design's extension of that structure.
// Timing: fully pipelined, one new input set per clock, ma valid 2 cycles
// after dataa/datab.
module neuron #(
  parameter int N_IN     = 16,
  parameter int A_W      = 12,
  parameter int B_W      = 18,
  parameter bit A_SIGNED = 1'b0,
  parameter int GROUP_W  = 30,
  parameter int OUT_W    = 32
) (
  input  logic                    clk,
  input  logic        [A_W-1:0]   dataa [N_IN],
  input  logic signed [B_W-1:0]   datab [N_IN],
  output logic signed [OUT_W-1:0] ma
);

  localparam int G = (N_IN + 3) / 4;

  logic        [A_W-1:0] ga [G][4];
  logic signed [B_W-1:0] gb [G][4];
  logic signed [31:0]    part [G];

  always_comb begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < 4; i++) begin
        if (4 * g + i < N_IN) begin
          ga[g][i] = dataa[4*g+i];
          gb[g][i] = datab[4*g+i];
        end else begin
          ga[g][i] = '0;
          gb[g][i] = '0;
        end
      end
  end

  for (genvar g = 0; g < G; g++) begin : g_madd
    mult_add4 #(.A_W(A_W), .B_W(B_W), .A_SIGNED(A_SIGNED), .RES_W(32)) u_madd (
      .clk   (clk),
      .dataa (ga[g]),
      .datab (gb[g]),
      .result(part[g])
    );
  end

  par_add #(.N(G), .IN_W(GROUP_W), .OUT_W(OUT_W)) u_padd (
    .clk   (clk),
    .data  (part),
    .result(ma)
  );

endmodule
