// adc_shift_register: the sample window of the neural-network trigger.
//
// A chain of TAPS registers, ADC_W bits each. On every clock with
// sample_valid high the new sample enters taps[0] and every other register
// takes the value of its predecessor, so taps[k] holds the sample taken k
// strobes ago. All first-layer neurons read the whole window in parallel
// (taps[k] drives neuron input k). taps_valid is sample_valid delayed by the
// one register stage, i.e. it marks the cycle in which the taps show a newly
// shifted window. Sixteen taps of 12 bits follow the published design;
// reset to zero and the sample_valid gate are this design's choices.
module adc_shift_register #(
  parameter int TAPS  = 16,
  parameter int ADC_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample_valid,
  input  logic [ADC_W-1:0] sample,
  output logic [ADC_W-1:0] taps [TAPS],
  output logic             taps_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) taps[k] <= '0;
      taps_valid <= 1'b0;
    end else begin
      taps_valid <= sample_valid;
      if (sample_valid) begin
        taps[0] <= sample;
        for (int k = 1; k < TAPS; k++) taps[k] <= taps[k-1];
      end
    end
  end

endmodule
