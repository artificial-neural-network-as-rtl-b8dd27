// tb_trigger_comparator: random signed values and thresholds (with equal
// pairs), random valid; the trigger is checked one cycle later against
// valid & (value > threshold).
module tb_trigger_comparator;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [13:0] value = '0, threshold = '0;
  logic trigger;
  int checks = 0, failures = 0, fired = 0;

  trigger_comparator #(.DW(14)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit e;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      value     = 14'($urandom);
      threshold = (n % 5 == 0) ? value : 14'($urandom);
      if (n % 13 == 0) threshold = value - 14'sd1;
      e = in_valid && (int'(value) > int'(threshold));
      @(posedge clk); #1;
      checks++;
      if (trigger != e) begin failures++; if (failures < 10) $display("v=%0d t=%0d got %0b", value, threshold, trigger); end
      if (trigger) fired++;
    end
    checks++;
    if (fired == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
