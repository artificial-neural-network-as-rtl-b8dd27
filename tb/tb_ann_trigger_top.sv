// tb_ann_trigger_top: end-to-end test of the 12-8-1 trigger at its default
// sizes.
//
// A synthetic ADC trace (pedestal, noise, short muon-like bumps, long
// spread-out signals, saturated samples, and gaps in sample_valid) is fed
// to the network while two random coefficient sets are loaded through the
// coefficient stream: the first before the run, the second while the run
// goes on. A bit-exact reference model in this file (own window, own tansig
// from $tanh, 64-bit integer arithmetic with the 30-bit group width of
// layer 1) predicts net_out for every window; every net_valid output is
// compared with it, and its latency (14 cycles from the sample) is checked.
// Windows still in flight when the coefficients switch are not compared.
// The test counts, and fails if it never saw: first-layer addresses cropped
// low, cropped high and in range; trigger high and low; outputs computed
// with the old set while the new one was being loaded; outputs with the new
// set after commit; and stalls of the sample stream.
module tb_ann_trigger_top;
  import ann_pkg::*;

  localparam int N_SAMPLES = 3000;
  localparam int LAT = SHIFT_LAT + NET_LAT;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sample_valid = 1'b0;
  sample_t sample = '0;
  logic coef_wr_en = 1'b0, coef_commit = 1'b0, coef_restart = 1'b0;
  coef_word_t coef_wr_data = '0;
  logic [COEF_IDX_W-1:0] coef_wr_count;
  act_t threshold = '0, net_out;
  logic net_valid, trigger;

  ann_trigger_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference model ----------------
  int active [COEF_WORDS];   // committed set
  int pending [COEF_WORDS];  // set being loaded
  int win [N_IN];
  int n_low = 0, n_high = 0, n_mid = 0;

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

  // sum of products in groups of four, group sums cut to gw bits, total to 32
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

  function automatic int model(int w [N_IN], int cf [COEF_WORDS], bit count);
    int x1 [], c1 [], y1 [N_L1], x2 [], c2 [], y2 [N_L2], c3 [];
    int a;
    longint n;
    x1 = new[N_IN];
    c1 = new[N_IN];
    for (int k = 0; k < N_IN; k++) x1[k] = w[k];
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) c1[k] = cf[j*(N_IN+1)+k];
      n = nsum(x1, c1, L1_GROUP_W) + longint'(cf[j*(N_IN+1)+N_IN]);
      a = crop((n >>> L1_SHN) + 8192);
      if (count) begin
        if (a == 0) n_low++; else if (a == 16383) n_high++; else n_mid++;
      end
      y1[j] = ref_tansig(a);
    end
    x2 = new[N_L1];
    c2 = new[N_L1];
    for (int k = 0; k < N_L1; k++) x2[k] = y1[k];
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) c2[k] = cf[L1_WORDS+j*(N_L1+1)+k];
      n = (nsum(x2, c2, L23_GROUP_W) >>> L2_SHP) + longint'(cf[L1_WORDS+j*(N_L1+1)+N_L1]);
      y2[j] = ref_tansig(crop((n >>> L2_SHN) + 8192));
    end
    c3 = new[N_L2];
    for (int k = 0; k < N_L2; k++) c3[k] = cf[L1_WORDS+L2_WORDS+k];
    n = (nsum(y2, c3, L23_GROUP_W) >>> L3_SHP) + longint'(cf[L1_WORDS+L2_WORDS+N_L2]);
    return crop((n >>> L3_SHN) + 8192) - 8192;
  endfunction

  // ---------------- random coefficient sets ----------------
  // Floating-point weights as training software would deliver them, turned
  // into fixed point with the per-layer factors of ann_pkg (value / SFS * SFL
  // for coefficients, value / SFX * SFB for biases). Their ranges put typical
  // windows inside the tansig tables while large bumps crop them.
  function automatic real rreal(real mag);
    return mag * (2.0 * real'($urandom_range(0, 1000000)) / 1.0e6 - 1.0);
  endfunction

  task automatic make_set(ref int s [COEF_WORDS]);
    for (int j = 0; j < N_L1; j++) begin
      for (int k = 0; k < N_IN; k++) s[j*(N_IN+1)+k] = to_fixed(rreal(1.0 / 64.0), L1_SFS, L1_SFL);
      s[j*(N_IN+1)+N_IN] = to_fixed(rreal(4.0), L1_SFX, L1_SFB);
    end
    for (int j = 0; j < N_L2; j++) begin
      for (int k = 0; k < N_L1; k++) s[L1_WORDS+j*(N_L1+1)+k] = to_fixed(rreal(1.0), L2_SFS, L2_SFL);
      s[L1_WORDS+j*(N_L1+1)+N_L1] = to_fixed(rreal(1.0), L2_SFX, L2_SFB);
    end
    for (int k = 0; k < N_L2; k++) s[L1_WORDS+L2_WORDS+k] = to_fixed(rreal(0.25), L3_SFS, L3_SFL);
    s[L1_WORDS+L2_WORDS+N_L2] = to_fixed(rreal(0.125), L3_SFX, L3_SFB);
  endtask

  // ---------------- expected-output queue ----------------
  typedef struct { int value; longint at; bit skip; bit loading; } exp_t;
  exp_t q [$];
  longint last_commit = -1000;
  bit loading = 1'b0;
  int n_checked = 0, n_old_while_loading = 0, n_new_after_commit = 0;
  int n_trig = 0, n_notrig = 0, n_stall = 0, n_skipped = 0;
  int commits = 0;

  // output monitor
  always @(posedge clk) begin
    if (rst_n && net_valid) begin
      if (q.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cycle);
      end else begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (cycle - e.at != longint'(LAT)) begin
          failures++;
          if (failures < 10) $display("latency %0d, want %0d", cycle - e.at, LAT);
        end
        if (e.skip) n_skipped++;
        else begin
          checks++;
          n_checked++;
          if (int'(net_out) != e.value) begin
            failures++;
            if (failures < 10) $display("cycle %0d: net_out %0d want %0d", cycle, net_out, e.value);
          end
          if (e.loading) n_old_while_loading++;
          else if (commits > 1) n_new_after_commit++;
        end
      end
    end
  end

  // trigger monitor: trigger is the comparison of the previous cycle's output
  logic pv = 1'b0;
  act_t pout = '0;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (trigger != (pv && (pout > threshold))) begin
        failures++;
        if (failures < 10) $display("trigger mismatch at cycle %0d", cycle);
      end
      if (pv) begin
        if (trigger) n_trig++; else n_notrig++;
      end
    end
    pv   <= net_valid;
    pout <= net_out;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  int bump_left = 0, bump_amp = 0, long_left = 0;
  int load_idx = -1;

  function automatic int next_sample();
    int s;
    s = 50 + int'($urandom_range(0, 6)) - 3;
    if (bump_left == 0 && long_left == 0) begin
      case ($urandom_range(0, 59))
        0, 1: begin bump_left = 4; bump_amp = int'($urandom_range(100, 3000)); end
        2:    long_left = int'($urandom_range(30, 120));
        default: ;
      endcase
    end
    if (bump_left > 0) begin
      s += bump_amp >> (4 - bump_left);
      bump_left--;
      if (bump_amp > 2500 && bump_left == 3) s = 4095;   // saturated sample
    end else if (long_left > 0) begin
      s += int'($urandom_range(20, 200));
      long_left--;
    end
    if (s > 4095) s = 4095;
    return s;
  endfunction

  task automatic send_word(int v);
    coef_wr_en   = 1'b1;
    coef_wr_data = coef_word_t'(v);
  endtask

  initial begin
    int s;
    bit v;
    exp_t e;
    for (int i = 0; i < COEF_WORDS; i++) active[i] = 0;
    for (int k = 0; k < N_IN; k++) win[k] = 0;
    threshold = act_t'(0);
    // conversion examples worked by hand: 0.5/2*131072, -1.5/8*524288, 0.3/4*32768
    checks += 3;
    if (to_fixed(0.5, L1_SFS, L1_SFL) != 32768) failures++;
    if (to_fixed(-1.5, L1_SFX, L1_SFB) != -98304) failures++;
    if (to_fixed(0.3, L2_SFS, L2_SFL) != 2458) failures++;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // first set, loaded with the sample stream idle
    make_set(pending);
    for (int i = 0; i < COEF_WORDS; i++) begin
      @(negedge clk) send_word(pending[i]);
    end
    @(negedge clk) coef_wr_en = 1'b0;
    coef_commit = 1'b1;
    @(negedge clk) coef_commit = 1'b0;
    active = pending;
    commits = 1;
    checks++;
    if (coef_wr_count != 0) failures++;

    // run
    for (int n = 0; n < N_SAMPLES; n++) begin
      @(negedge clk);
      coef_wr_en = 1'b0;
      coef_commit = 1'b0;
      // second set: start loading at sample 1000, one word per clock, commit at the end
      if (n == 1000) begin make_set(pending); load_idx = 0; loading = 1'b1; end
      if (load_idx >= 0 && load_idx < COEF_WORDS) begin
        send_word(pending[load_idx]);
        load_idx++;
      end else if (load_idx == COEF_WORDS) begin
        coef_commit = 1'b1;
        load_idx = -1;
      end
      // sample stream with occasional stalls
      v = !((n % 400) >= 390);
      if (!v && (n % 400) == 390) n_stall++;
      sample_valid = v;
      if (v) begin
        s = next_sample();
        sample = sample_t'(s);
        for (int k = N_IN - 1; k > 0; k--) win[k] = win[k-1];
        win[0] = s;
      end
      @(posedge clk);
      if (coef_commit) begin
        active = pending;
        commits++;
        loading = 1'b0;
        last_commit = cycle;
        // windows pushed within the last LAT cycles are in flight: do not compare
        foreach (q[i]) if (q[i].at > cycle - LAT) q[i].skip = 1'b1;
      end
      if (v) begin
        e.value   = model(win, active, 1'b1);
        e.at      = cycle;
        e.skip    = coef_commit;
        e.loading = loading;
        q.push_back(e);
      end
    end
    @(negedge clk) sample_valid = 1'b0;
    coef_wr_en = 1'b0;
    coef_commit = 1'b0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end

    $display("compared %0d outputs, %0d skipped at the switch", n_checked, n_skipped);
    $display("layer-1 addresses: cropped low %0d, in range %0d, cropped high %0d", n_low, n_mid, n_high);
    $display("trigger high %0d, low %0d; old set while loading %0d; new set after commit %0d; stalls %0d",
             n_trig, n_notrig, n_old_while_loading, n_new_after_commit, n_stall);
    checks += 8;
    if (n_low == 0) failures++;
    if (n_mid == 0) failures++;
    if (n_high == 0) failures++;
    if (n_trig == 0) failures++;
    if (n_notrig == 0) failures++;
    if (n_old_while_loading == 0) failures++;
    if (n_new_after_commit == 0) failures++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
