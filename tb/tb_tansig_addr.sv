// tb_tansig_addr: the address units of the three layers (SHP/SHN = 0/6,
// 14/1, 13/1) get random sums and biases, with extremes that must saturate
// at 0 and 16383; addresses are compared one cycle later with
// crop(((ma >>> SHP) + bias) >>> SHN + 8192) in 64-bit integers. Counts how
// often each of the three cases (low crop, in range, high crop) was seen.
module tb_tansig_addr;
  logic clk = 1'b0;
  logic signed [31:0] ma;
  logic signed [19:0] b1;
  logic signed [15:0] b2, b3;
  logic [13:0] ad1, ad2, ad3;
  int checks = 0, failures = 0;
  int n_low = 0, n_mid = 0, n_high = 0;

  tansig_addr #(.BIAS_W(20), .SHP(0),  .SHN(6)) dut1 (.clk, .ma, .bias(b1), .addr(ad1));
  tansig_addr #(.BIAS_W(16), .SHP(14), .SHN(1)) dut2 (.clk, .ma, .bias(b2), .addr(ad2));
  tansig_addr #(.BIAS_W(16), .SHP(13), .SHN(1)) dut3 (.clk, .ma, .bias(b3), .addr(ad3));

  always #5 clk = ~clk;

  function automatic int ref_addr(longint m, longint b, int shp, int shn);
    longint a;
    a = (((m >>> shp) + b) >>> shn) + 8192;
    if (a < 0) a = 0;
    if (a > 16383) a = 16383;
    return int'(a);
  endfunction

  task automatic chk(int got, int want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d", what, got, want);
    end
    if (want == 0) n_low++; else if (want == 16383) n_high++; else n_mid++;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e1, e2, e3;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      case (n % 4)
        0: ma = 32'($urandom);
        1: ma = 32'(int'($urandom_range(0, 1 << 21)) - (1 << 20));
        2: ma = 32'(int'($urandom_range(0, 1 << 27)) - (1 << 26));
        default: ma = (n % 8 == 3) ? 32'sh7fff_ffff : -32'sh8000_0000;
      endcase
      b1 = 20'($urandom);
      b2 = 16'($urandom);
      b3 = 16'($urandom);
      e1 = ref_addr(longint'(ma), longint'(b1), 0, 6);
      e2 = ref_addr(longint'(ma), longint'(b2), 14, 1);
      e3 = ref_addr(longint'(ma), longint'(b3), 13, 1);
      @(posedge clk); #1;
      chk(int'(ad1), e1, "layer1");
      chk(int'(ad2), e2, "layer2");
      chk(int'(ad3), e3, "layer3");
    end
    $display("cases: low %0d, in range %0d, high %0d", n_low, n_mid, n_high);
    checks++;
    if (n_low == 0 || n_mid == 0 || n_high == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
