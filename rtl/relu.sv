// relu -- rectified linear unit on a two's complement number.
//
// Looks only at the sign bit: when it is 1 the value is negative and the
// output is 0, otherwise the value passes unchanged (max(0, din)). Purely
// combinational; in the trigger it sits between a hidden neuron's last adder
// register and the operand registers of the output-layer multipliers, so it
// adds no clock cycle.
module relu #(
  parameter int unsigned W = 25
) (
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout
);

  assign dout = din[W-1] ? '0 : din;

endmodule
