// tb_adc_shift_register: random samples with random gaps in sample_valid;
// a queue model of the window is compared with every tap after every clock,
// and taps_valid is checked to follow sample_valid by one cycle.
module tb_adc_shift_register;
  localparam int TAPS = 16, ADC_W = 12;
  logic clk = 1'b0, rst_n = 1'b0, sample_valid = 1'b0;
  logic [ADC_W-1:0] sample = '0;
  logic [ADC_W-1:0] taps [TAPS];
  logic taps_valid;
  int checks = 0, failures = 0;
  int model [TAPS];

  adc_shift_register #(.TAPS(TAPS), .ADC_W(ADC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit v;
    for (int k = 0; k < TAPS; k++) model[k] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      v = ($urandom_range(0, 3) != 0);
      sample_valid = v;
      sample = ADC_W'($urandom);
      @(posedge clk);
      if (v) begin
        for (int k = TAPS - 1; k > 0; k--) model[k] = model[k-1];
        model[0] = int'(sample);
      end
      #1;
      for (int k = 0; k < TAPS; k++) begin
        checks++;
        if (int'(taps[k]) != model[k]) begin
          failures++;
          if (failures < 10) $display("tap %0d: got %0d want %0d", k, taps[k], model[k]);
        end
      end
      checks++;
      if (taps_valid != v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
