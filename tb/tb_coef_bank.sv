// tb_coef_bank: loads two full random coefficient streams. While the second
// stream is being written the outputs must still show the first set; one
// cycle after commit every field must hold the new word from its place in
// the stream (coefficients then bias, neuron by neuron, layer by layer). Also
// checks the word counter, restart, and that reset clears everything.
module tb_coef_bank;
  import ann_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0, commit = 1'b0, restart = 1'b0;
  coef_word_t wr_data = '0;
  logic [COEF_IDX_W-1:0] wr_count;
  l1_coef_t  l1_coef [N_L1][N_IN];
  l1_bias_t  l1_bias [N_L1];
  l23_coef_t l2_coef [N_L2][N_L1];
  l23_bias_t l2_bias [N_L2];
  l23_coef_t l3_coef [N_L3][N_L2];
  l23_bias_t l3_bias [N_L3];
  int checks = 0, failures = 0;
  int words [COEF_WORDS];

  coef_bank dut (.*);  // default sizes, equal to the ann_pkg constants used here

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  // sign-extend the low w bits of v
  function automatic int sx(int v, int w);
    return (v << (32 - w)) >>> (32 - w);
  endfunction

  task automatic check_fields(bit zero);
    int w;
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) chk(int'(l1_coef[j][k]), zero ? 0 : sx(words[j*(N_IN+1)+k], L1_COEF_W), "l1_coef");
      chk(int'(l1_bias[j]), zero ? 0 : sx(words[j*(N_IN+1)+N_IN], L1_BIAS_W), "l1_bias");
    end
    w = L1_WORDS;
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) chk(int'(l2_coef[j][k]), zero ? 0 : sx(words[w+j*(N_L1+1)+k], L23_COEF_W), "l2_coef");
      chk(int'(l2_bias[j]), zero ? 0 : sx(words[w+j*(N_L1+1)+N_L1], L23_BIAS_W), "l2_bias");
    end
    w = L1_WORDS + L2_WORDS;
    for (int k = 0; k < N_L2; k++) chk(int'(l3_coef[0][k]), zero ? 0 : sx(words[w+k], L23_COEF_W), "l3_coef");
    chk(int'(l3_bias[0]), zero ? 0 : sx(words[w+N_L2], L23_BIAS_W), "l3_bias");
  endtask

  task automatic load(int seed_mod, bit check_old);
    int old [COEF_WORDS];
    old = words;
    for (int i = 0; i < COEF_WORDS; i++) begin
      @(negedge clk);
      wr_en   = 1'b1;
      wr_data = coef_word_t'(sx(int'($urandom), WR_W) / seed_mod);
      @(posedge clk); #1;
      words[i] = int'(wr_data);
      chk(int'(wr_count), i + 1, "wr_count");
      if (check_old && (i % 50 == 0)) begin
        int keep [COEF_WORDS];
        keep = words; words = old;
        check_fields(1'b0);
        words = keep;
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < COEF_WORDS; i++) words[i] = 0;
    repeat (2) @(posedge clk);
    #1 check_fields(1'b1);
    rst_n <= 1'b1;
    // first set
    load(1, 1'b0);
    #1 check_fields(1'b1);               // not yet committed: still zero
    @(negedge clk) commit = 1'b1;
    @(posedge clk) #1;
    commit = 1'b0;
    chk(int'(wr_count), 0, "count after commit");
    check_fields(1'b0);
    // second set, written while the first drives the outputs
    load(3, 1'b1);
    @(negedge clk) commit = 1'b1;
    @(posedge clk) #1;
    commit = 1'b0;
    check_fields(1'b0);
    // restart in the middle of a stream
    @(negedge clk) wr_en = 1'b1; wr_data = '0;
    @(negedge clk) wr_en = 1'b0;
    chk(int'(wr_count), 1, "partial count");
    @(negedge clk) restart = 1'b1;
    @(negedge clk) restart = 1'b0;
    chk(int'(wr_count), 0, "count after restart");
    check_fields(1'b0);                  // final set unchanged
    // reset clears
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < COEF_WORDS; i++) words[i] = 0;
    check_fields(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
