// ann_net_check: drives one ann_trigger_top of shape N_IN-N_L1-N_L2-1 with a
// synthetic ADC trace after loading one random coefficient set, and compares
// every output with a bit-exact model (own window, $tanh-based table, 64-bit
// integers, 30-bit layer-1 group sums). Reports its counts when done is high.
module ann_net_check
  import ann_pkg::*;
#(
  parameter int N_IN      = 16,
  parameter int N_L1      = 12,
  parameter int N_L2      = 8,
  parameter int N_SAMPLES = 800
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int L1W   = N_L1 * (N_IN + 1);
  localparam int L2W   = N_L2 * (N_L1 + 1);
  localparam int WORDS = L1W + L2W + N_L2 + 1;
  localparam int IDX_W = $clog2(WORDS + 1);
  localparam int LAT   = SHIFT_LAT + NET_LAT;

  logic rst_n = 1'b0, sample_valid = 1'b0;
  sample_t sample = '0;
  logic coef_wr_en = 1'b0, coef_commit = 1'b0, coef_restart = 1'b0;
  coef_word_t coef_wr_data = '0;
  logic [IDX_W-1:0] coef_wr_count;
  act_t threshold = '0, net_out;
  logic net_valid, trigger;

  ann_trigger_top #(.N_IN(N_IN), .N_L1(N_L1), .N_L2(N_L2)) dut (.*);

  int cf [WORDS];
  int win [N_IN];
  longint cycle = 0;
  typedef struct { int value; longint at; } exp_t;
  exp_t q [$];

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  always @(posedge clk) cycle <= cycle + 1;

  function automatic longint wrap(longint v, int w);
    longint m = (longint'(1) << w) - 1;
    v = v & m;
    if (v >= (longint'(1) << (w - 1))) v -= (longint'(1) << w);
    return v;
  endfunction

  function automatic int ref_tansig(int i);
    real v;
    int r;
    v = 8192.0 * $tanh(real'(i - 8192) / 1536.0);
    r = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    if (r > 8191) r = 8191;
    if (r < -8192) r = -8192;
    return r;
  endfunction

  function automatic int crop(longint a);
    if (a < 0) return 0;
    if (a > 16383) return 16383;
    return int'(a);
  endfunction

  function automatic longint nsum(int x [], int c [], int gw);
    longint g, s;
    s = 0;
    for (int gi = 0; gi < (x.size() + 3) / 4; gi++) begin
      g = 0;
      for (int i = 4 * gi; i < 4 * gi + 4 && i < x.size(); i++) g += longint'(x[i]) * longint'(c[i]);
      s += wrap(wrap(g, 32), gw);
    end
    return wrap(s, 32);
  endfunction

  function automatic int model();
    int x1 [], c1 [], y1 [], c2 [], y2 [], c3 [];
    longint n;
    x1 = new[N_IN]; c1 = new[N_IN]; y1 = new[N_L1]; c2 = new[N_L1]; y2 = new[N_L2]; c3 = new[N_L2];
    for (int k = 0; k < N_IN; k++) x1[k] = win[k];
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) c1[k] = cf[j*(N_IN+1)+k];
      n = nsum(x1, c1, L1_GROUP_W) + longint'(cf[j*(N_IN+1)+N_IN]);
      y1[j] = ref_tansig(crop((n >>> L1_SHN) + 8192));
    end
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) c2[k] = cf[L1W+j*(N_L1+1)+k];
      n = (nsum(y1, c2, L23_GROUP_W) >>> L2_SHP) + longint'(cf[L1W+j*(N_L1+1)+N_L1]);
      y2[j] = ref_tansig(crop((n >>> L2_SHN) + 8192));
    end
    for (int k = 0; k < N_L2; k++) c3[k] = cf[L1W+L2W+k];
    n = (nsum(y2, c3, L23_GROUP_W) >>> L3_SHP) + longint'(cf[L1W+L2W+N_L2]);
    return crop((n >>> L3_SHN) + 8192) - 8192;
  endfunction

  function automatic real rreal(real mag);
    return mag * (2.0 * real'($urandom_range(0, 1000000)) / 1.0e6 - 1.0);
  endfunction

  always @(posedge clk) begin
    if (rst_n && net_valid) begin
      checks++;
      if (q.size() == 0) failures++;
      else begin
        exp_t e;
        e = q.pop_front();
        if (int'(net_out) != e.value || cycle - e.at != longint'(LAT)) begin
          failures++;
          if (failures < 5) $display("%0d-%0d-1: net_out %0d want %0d", N_L1, N_L2, net_out, e.value);
        end
      end
    end
  end

  initial begin
    int bump = 0, amp = 0, s;
    exp_t e;
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) cf[j*(N_IN+1)+k] = to_fixed(rreal(1.0 / 64.0), L1_SFS, L1_SFL);
      cf[j*(N_IN+1)+N_IN] = to_fixed(rreal(4.0), L1_SFX, L1_SFB);
    end
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) cf[L1W+j*(N_L1+1)+k] = to_fixed(rreal(1.0), L2_SFS, L2_SFL);
      cf[L1W+j*(N_L1+1)+N_L1] = to_fixed(rreal(1.0), L2_SFX, L2_SFB);
    end
    for (int k = 0; k < N_L2; k++) cf[L1W+L2W+k] = to_fixed(rreal(0.25), L3_SFS, L3_SFL);
    cf[L1W+L2W+N_L2] = to_fixed(rreal(0.125), L3_SFX, L3_SFB);
    for (int k = 0; k < N_IN; k++) win[k] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      coef_wr_en = 1'b1;
      coef_wr_data = coef_word_t'(cf[i]);
    end
    @(negedge clk) coef_wr_en = 1'b0;
    coef_commit = 1'b1;
    @(negedge clk) coef_commit = 1'b0;
    for (int n = 0; n < N_SAMPLES; n++) begin
      @(negedge clk);
      s = 50 + int'($urandom_range(0, 6)) - 3;
      if (bump == 0 && $urandom_range(0, 29) == 0) begin bump = 4; amp = int'($urandom_range(100, 3000)); end
      if (bump > 0) begin s += amp >> (4 - bump); bump--; end
      if (s > 4095) s = 4095;
      sample_valid = 1'b1;
      sample = sample_t'(s);
      for (int k = N_IN - 1; k > 0; k--) win[k] = win[k-1];
      win[0] = s;
      @(posedge clk);
      e.value = model();
      e.at = cycle;
      q.push_back(e);
    end
    @(negedge clk) sample_valid = 1'b0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    done = 1'b1;
  end
endmodule
