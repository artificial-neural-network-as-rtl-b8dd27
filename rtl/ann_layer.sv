// ann_layer: one layer of the pipelined network.
//
// N_NEURONS neurons see the same N_IN inputs x, each with its own row of
// coefficients and its own bias. Behind every neuron a tansig_addr unit forms
// the table address. With TANSIG = 1 the addresses of neurons 2m and 2m+1 are
// the two read addresses of tansig RAM m, so ceil(N_NEURONS/2) tables serve
// the layer and y is the tansig value (latency 5 cycles from x). With
// TANSIG = 0 (the output layer) there is no table and y is the cropped signed
// value addr - 2^(AW-1) (latency 3 cycles). The pairing of neurons on one
// table follows the published design, which uses ten shared tables for the
// 12 + 8 tansig neurons.
module ann_layer #(
  parameter int N_NEURONS = 12,
  parameter int N_IN      = 16,
  parameter int A_W       = 12,
  parameter bit A_SIGNED  = 1'b0,
  parameter int B_W       = 18,
  parameter int BIAS_W    = 20,
  parameter int GROUP_W   = 30,
  parameter int SHP       = 0,
  parameter int SHN       = 6,
  parameter bit TANSIG    = 1'b1,
  parameter int AW        = 14,
  parameter int DW        = 14,
  parameter int SF        = 1536
) (
  input  logic                     clk,
  input  logic        [A_W-1:0]    x    [N_IN],
  input  logic signed [B_W-1:0]    coef [N_NEURONS][N_IN],
  input  logic signed [BIAS_W-1:0] bias [N_NEURONS],
  output logic signed [DW-1:0]     y    [N_NEURONS]
);

  localparam int N_RAM = (N_NEURONS + 1) / 2;

  logic signed [31:0]   ma   [N_NEURONS];
  logic        [AW-1:0] addr [2*N_RAM];

  for (genvar j = 0; j < N_NEURONS; j++) begin : g_neuron
    neuron #(.N_IN(N_IN), .A_W(A_W), .B_W(B_W), .A_SIGNED(A_SIGNED),
             .GROUP_W(GROUP_W), .OUT_W(32)) u_neuron (
      .clk  (clk),
      .dataa(x),
      .datab(coef[j]),
      .ma   (ma[j])
    );
    tansig_addr #(.MA_W(32), .BIAS_W(BIAS_W), .SHP(SHP), .SHN(SHN), .AW(AW)) u_addr (
      .clk (clk),
      .ma  (ma[j]),
      .bias(bias[j]),
      .addr(addr[j])
    );
  end
  if (N_NEURONS % 2 == 1) begin : g_pad
    assign addr[N_NEURONS] = '0;
  end

  if (TANSIG) begin : g_tansig
    logic signed [DW-1:0] q [2*N_RAM];
    for (genvar m = 0; m < N_RAM; m++) begin : g_ram
      tansig_ram3port #(.AW(AW), .DW(DW), .SF(SF)) u_ram (
        .clk        (clk),
        .wren       (1'b0),
        .data       ('0),
        .wraddress  ('0),
        .rdaddress_a(addr[2*m]),
        .rdaddress_b(addr[2*m+1]),
        .qa         (q[2*m]),
        .qb         (q[2*m+1])
      );
    end
    always_comb for (int j = 0; j < N_NEURONS; j++) y[j] = q[j];
  end else begin : g_linear
    always_comb for (int j = 0; j < N_NEURONS; j++) y[j] = DW'(signed'(addr[j] ^ AW'(1 << (AW - 1))));
  end

endmodule
