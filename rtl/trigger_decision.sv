// trigger_decision -- level-1 accept from the two output neurons.
//
// The trained network ends in a two-class softmax read with a 0.5 cut. Since
// softmax is monotonic, that cut is the same as asking which of the two raw
// output values is larger, so no exponential is computed: accept is 1 when
// the signal neuron (label 1) is strictly larger than the dark-noise neuron
// (label 0), and 0 on a tie or when valid is low. Combinational; both inputs
// come straight from the output neurons' final adder registers.
module trigger_decision #(
  parameter int unsigned W = 42
) (
  input  logic                valid,
  input  logic signed [W-1:0] y_noise,
  input  logic signed [W-1:0] y_signal,
  output logic                accept
);

  assign accept = valid && (y_signal > y_noise);

endmodule
