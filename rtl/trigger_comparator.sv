// trigger_comparator: the decision at the end of the network.
//
// The output neuron has no transfer function; its signed value is compared
// with a threshold and the trigger is raised for one cycle per window whose
// value exceeds it: trigger = in_valid & (value > threshold), registered
// (latency 1). That a plain comparator ends the network follows the
// published design; the strict "greater than", the run-time threshold input
// and the register are this design's choices.
module trigger_comparator #(
  parameter int DW = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] value,
  input  logic signed [DW-1:0] threshold,
  output logic                 trigger
);

  always_ff @(posedge clk) begin
    if (!rst_n) trigger <= 1'b0;
    else        trigger <= in_valid && (value > threshold);
  end

endmodule
