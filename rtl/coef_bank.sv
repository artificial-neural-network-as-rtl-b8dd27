// coef_bank: double-buffered coefficient and bias registers of the network.
//
// The processor that trains the network sends its fixed-point results one
// word per wr_en strobe. Words go to a set of temporary registers at an
// internal index that starts at 0 and counts up; the final registers, which
// drive the multipliers, are not touched while loading, so the network keeps
// running with the old set. A commit pulse copies all temporary registers to
// the final registers in a single clock cycle and restarts the index;
// restart only restarts the index. Both follow the published scheme of
// sequential loading into temporary registers and a one-cycle reload.
// The word order is this design's choice (see ann_pkg): for each neuron of
// layer 1, then layer 2, then the output neuron, its coefficients for input
// 0, 1, ... followed by its bias. Each word is a sign-extended WR_W-bit value;
// the final registers keep the low bits of the field width (18/20 bits in
// layer 1, 16 bits in layers 2 and 3). The layer sizes are parameters
// (default 16 inputs, 12 and 8 neurons); L1_W, L2_W, WORDS and IDX_W are
// derived from them and are not meant to be set. Timing: a written word is in the
// temporary set on the next cycle; after a commit edge the outputs show the
// new set. Reset clears both sets.
module coef_bank
  import ann_pkg::N_L3, ann_pkg::coef_word_t, ann_pkg::l1_coef_t, ann_pkg::l1_bias_t,
         ann_pkg::l23_coef_t, ann_pkg::l23_bias_t;
#(
  parameter int N_IN  = 16,
  parameter int N_L1  = 12,
  parameter int N_L2  = 8,
  parameter int L1_W  = N_L1 * (N_IN + 1),
  parameter int L2_W  = N_L2 * (N_L1 + 1),
  parameter int WORDS = L1_W + L2_W + N_L3 * (N_L2 + 1),
  parameter int IDX_W = $clog2(WORDS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  coef_word_t            wr_data,
  input  logic                  commit,
  input  logic                  restart,
  output logic [IDX_W-1:0]      wr_count,
  output l1_coef_t              l1_coef [N_L1][N_IN],
  output l1_bias_t              l1_bias [N_L1],
  output l23_coef_t             l2_coef [N_L2][N_L1],
  output l23_bias_t             l2_bias [N_L2],
  output l23_coef_t             l3_coef [N_L3][N_L2],
  output l23_bias_t             l3_bias [N_L3]
);

  coef_word_t tmp [WORDS];
  coef_word_t fin [WORDS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_count <= '0;
      for (int i = 0; i < WORDS; i++) begin
        tmp[i] <= '0;
        fin[i] <= '0;
      end
    end else begin
      if (wr_en && (int'(wr_count) < WORDS)) begin
        tmp[wr_count] <= wr_data;
        wr_count      <= wr_count + 1'b1;
      end
      if (commit) begin
        for (int i = 0; i < WORDS; i++) fin[i] <= tmp[i];
        wr_count <= '0;
      end else if (restart) begin
        wr_count <= '0;
      end
    end
  end

  // Final registers -> per-layer fields.
  always_comb begin
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) l1_coef[j][k] = l1_coef_t'(fin[j*(N_IN+1) + k]);
      l1_bias[j] = l1_bias_t'(fin[j*(N_IN+1) + N_IN]);
    end
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) l2_coef[j][k] = l23_coef_t'(fin[L1_W + j*(N_L1+1) + k]);
      l2_bias[j] = l23_bias_t'(fin[L1_W + j*(N_L1+1) + N_L1]);
    end
    for (int j = 0; j < N_L3; j++) begin
      for (int k = 0; k < N_L2; k++) l3_coef[j][k] = l23_coef_t'(fin[L1_W + L2_W + j*(N_L2+1) + k]);
      l3_bias[j] = l23_bias_t'(fin[L1_W + L2_W + j*(N_L2+1) + N_L2]);
    end
  end

  // The stream must not run past the last word before a commit.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 wr_en && !commit && !restart |-> int'(wr_count) < WORDS);

endmodule
