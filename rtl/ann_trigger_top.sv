// ann_trigger_top: pipelined 16-input 12-8-1 neural-network trigger for one
// detector channel.
//
// Every ADC sample shifts a 16-sample window (adc_shift_register). Twelve
// first-layer neurons weight the window with 18-bit coefficients, add their
// biases and pass the result through tansig tables; eight second-layer
// neurons do the same with the twelve first-layer outputs; the output neuron
// weights the eight second-layer outputs, and its cropped signed value is
// compared with a threshold (trigger_comparator). The whole network is one
// pipeline: a new window is evaluated every clock, and net_out/net_valid
// appear ann_pkg::NET_LAT + 1 = 14 cycles after the sample that completed the
// window, trigger one cycle later. Ten tansig RAMs, each read by two neurons,
// hold the transfer function. Coefficients and biases come from coef_bank,
// loaded word by word while the network runs and switched over in one cycle
// by coef_commit; windows in flight during that cycle are computed partly
// with the old and partly with the new set.
// The layer sizes are parameters so that the other three-layer shapes
// studied for this trigger (e.g. 12-10-1) can be built; IDX_W is derived.
// Network shape, number formats, shift factors and table sharing follow the
// published design; the valid flag, latencies, coefficient word order and
// threshold input are this design's choices.
module ann_trigger_top
  import ann_pkg::ADC_W, ann_pkg::L1_BIAS_W, ann_pkg::L1_COEF_W, ann_pkg::L1_GROUP_W,
         ann_pkg::L1_SHN, ann_pkg::L1_SHP, ann_pkg::L23_BIAS_W, ann_pkg::L23_COEF_W,
         ann_pkg::L23_GROUP_W, ann_pkg::L2_SHN, ann_pkg::L2_SHP, ann_pkg::L3_SHN,
         ann_pkg::L3_SHP, ann_pkg::NET_LAT, ann_pkg::N_L3, ann_pkg::TANSIG_SF,
         ann_pkg::T_AW, ann_pkg::T_DW, ann_pkg::act_t, ann_pkg::coef_word_t,
         ann_pkg::l1_bias_t, ann_pkg::l1_coef_t, ann_pkg::l23_bias_t, ann_pkg::l23_coef_t,
         ann_pkg::sample_t;
#(
  parameter int N_IN  = 16,   // window length, first-layer inputs
  parameter int N_L1  = 12,   // first-layer neurons
  parameter int N_L2  = 8,    // second-layer neurons
  parameter int IDX_W = $clog2(N_L1 * (N_IN + 1) + N_L2 * (N_L1 + 1) + N_L3 * (N_L2 + 1) + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ADC samples
  input  logic                  sample_valid,
  input  sample_t               sample,
  // coefficient stream from the processor
  input  logic                  coef_wr_en,
  input  coef_word_t            coef_wr_data,
  input  logic                  coef_commit,
  input  logic                  coef_restart,
  output logic [IDX_W-1:0]      coef_wr_count,
  // decision
  input  act_t                  threshold,
  output act_t                  net_out,
  output logic                  net_valid,
  output logic                  trigger
);

  sample_t   taps [N_IN];
  logic      taps_valid;

  l1_coef_t  l1_coef [N_L1][N_IN];
  l1_bias_t  l1_bias [N_L1];
  l23_coef_t l2_coef [N_L2][N_L1];
  l23_bias_t l2_bias [N_L2];
  l23_coef_t l3_coef [N_L3][N_L2];
  l23_bias_t l3_bias [N_L3];

  act_t y1 [N_L1];
  act_t y2 [N_L2];
  act_t y3 [N_L3];
  logic [T_DW-1:0] x2 [N_L1];
  logic [T_DW-1:0] x3 [N_L2];

  adc_shift_register #(.TAPS(N_IN), .ADC_W(ADC_W)) u_window (
    .clk, .rst_n, .sample_valid, .sample, .taps, .taps_valid
  );

  coef_bank #(.N_IN(N_IN), .N_L1(N_L1), .N_L2(N_L2)) u_coef (
    .clk, .rst_n,
    .wr_en   (coef_wr_en),
    .wr_data (coef_wr_data),
    .commit  (coef_commit),
    .restart (coef_restart),
    .wr_count(coef_wr_count),
    .l1_coef, .l1_bias, .l2_coef, .l2_bias, .l3_coef, .l3_bias
  );

  ann_layer #(.N_NEURONS(N_L1), .N_IN(N_IN), .A_W(ADC_W), .A_SIGNED(1'b0),
              .B_W(L1_COEF_W), .BIAS_W(L1_BIAS_W), .GROUP_W(L1_GROUP_W),
              .SHP(L1_SHP), .SHN(L1_SHN), .TANSIG(1'b1),
              .AW(T_AW), .DW(T_DW), .SF(TANSIG_SF)) u_layer1 (
    .clk, .x(taps), .coef(l1_coef), .bias(l1_bias), .y(y1)
  );

  always_comb for (int j = 0; j < N_L1; j++) x2[j] = y1[j];

  ann_layer #(.N_NEURONS(N_L2), .N_IN(N_L1), .A_W(T_DW), .A_SIGNED(1'b1),
              .B_W(L23_COEF_W), .BIAS_W(L23_BIAS_W), .GROUP_W(L23_GROUP_W),
              .SHP(L2_SHP), .SHN(L2_SHN), .TANSIG(1'b1),
              .AW(T_AW), .DW(T_DW), .SF(TANSIG_SF)) u_layer2 (
    .clk, .x(x2), .coef(l2_coef), .bias(l2_bias), .y(y2)
  );

  always_comb for (int j = 0; j < N_L2; j++) x3[j] = y2[j];

  ann_layer #(.N_NEURONS(N_L3), .N_IN(N_L2), .A_W(T_DW), .A_SIGNED(1'b1),
              .B_W(L23_COEF_W), .BIAS_W(L23_BIAS_W), .GROUP_W(L23_GROUP_W),
              .SHP(L3_SHP), .SHN(L3_SHN), .TANSIG(1'b0),
              .AW(T_AW), .DW(T_DW), .SF(TANSIG_SF)) u_layer3 (
    .clk, .x(x3), .coef(l3_coef), .bias(l3_bias), .y(y3)
  );

  // valid flag travelling alongside the data
  logic [NET_LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[NET_LAT-2:0], taps_valid};
  end

  assign net_out   = y3[0];
  assign net_valid = vpipe[NET_LAT-1];

  trigger_comparator #(.DW(T_DW)) u_cmp (
    .clk, .rst_n,
    .in_valid (net_valid),
    .value    (net_out),
    .threshold(threshold),
    .trigger  (trigger)
  );

endmodule
