// tansig_addr: turns a neuron's sum of products into a tansig table address.
//
//   p    = ma >>> SHP            (scale the products down to the bias format)
//   n    = p + bias              (the neuron's net input, 33 bits, no wrap)
//   addr = crop((n >>> SHN) + 2^(AW-1), 0, 2^AW - 1)
// The offset 2^(AW-1) = 8192 puts a zero net input at the table centre.
// Net inputs beyond the table saturate at address 0 or 2^AW - 1, where tansig
// is flat at -1 or +1. The output neuron uses the same unit; its signed
// result is addr with the MSB inverted (addr - 8192). The formula and the
// shift factors SHP/SHN per layer follow the published design; saturation as
// the meaning of "cropped" and the single output register are this design's
// choices. Latency 1 cycle.
module tansig_addr #(
  parameter int MA_W   = 32,
  parameter int BIAS_W = 20,
  parameter int SHP    = 0,
  parameter int SHN    = 6,
  parameter int AW     = 14
) (
  input  logic                     clk,
  input  logic signed [MA_W-1:0]   ma,
  input  logic signed [BIAS_W-1:0] bias,
  output logic        [AW-1:0]     addr
);

  localparam int SW = MA_W + 1;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << AW) - 1);

  logic signed [SW-1:0] p, n, t, a;
  logic        [AW-1:0] addr_d;

  always_comb begin
    p = SW'(ma >>> SHP);
    n = p + SW'(bias);
    t = n >>> SHN;
    a = t + SW'(1 << (AW - 1));
    if (a < 0)         addr_d = '0;
    else if (a > MAXV) addr_d = '1;
    else               addr_d = a[AW-1:0];
  end

  always_ff @(posedge clk) addr <= addr_d;

endmodule
