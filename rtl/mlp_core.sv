// mlp_core -- the 20x20x2 network and the trigger decision.
//
// Twenty hidden neurons (ReLU) each weigh the 20 hit counts; two output
// neurons (no activation) each weigh the 20 hidden values; trigger_decision
// accepts when output neuron 1 (signal) beats output neuron 0 (dark noise).
// All 462 weights and biases are sliced out of the single PARAMS constant
// (layout in mlp_pkg), so retraining only means changing that constant.
// Hidden values keep their full 25 bits into the output layer.
//
// Timing: the hits are sampled on the first clock edge after they are
// presented with in_valid; accept and out_valid appear 16 edges after it
// (3 + 5 per layer, twice) and one inference can start every clock. The
// probe outputs show the 20 hidden and 2 output neuron values of the same
// inference (hidden values are 8 cycles older on the probes than the output
// values beside them, as they sit in the pipeline).
module mlp_core
  import mlp_pkg::*;
#(
  parameter params_t PARAMS = DEFAULT_PARAMS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  hit_t hits [N_INPUT],
  output logic out_valid,
  output logic accept,
  output hid_t hidden_probe [N_HIDDEN],
  output out_t output_probe [N_OUTPUT]
);

  function automatic param_t field(int unsigned k);
    return param_t'(PARAMS[W_PARAM*k +: W_PARAM]);
  endfunction

  logic hid_valid [N_HIDDEN];
  hid_t hid       [N_HIDDEN];
  logic out_vld   [N_OUTPUT];
  out_t out_y     [N_OUTPUT];

  for (genvar n = 0; n < N_HIDDEN; n++) begin : g_hidden
    param_t w [N_INPUT];
    for (genvar i = 0; i < N_INPUT; i++) begin : g_w
      assign w[i] = field(hidden_idx(n, i));
    end
    neuron #(
      .N_IN(N_INPUT), .W_X(W_HIT), .W_W(W_PARAM), .RELU(1'b1),
      .TREE_IN(TREE_IN), .M_STAGES(MULT_STAGES)
    ) u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .x         (hits),
      .w         (w),
      .b         (field(hidden_idx(n, N_INPUT))),
      .out_valid (hid_valid[n]),
      .y         (hid[n])
    );
  end

  for (genvar m = 0; m < N_OUTPUT; m++) begin : g_output
    param_t w [N_HIDDEN];
    for (genvar i = 0; i < N_HIDDEN; i++) begin : g_w
      assign w[i] = field(output_idx(m, i));
    end
    neuron #(
      .N_IN(N_HIDDEN), .W_X(W_HID), .W_W(W_PARAM), .RELU(1'b0),
      .TREE_IN(TREE_IN), .M_STAGES(MULT_STAGES)
    ) u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (hid_valid[0]),
      .x         (hid),
      .w         (w),
      .b         (field(output_idx(m, N_HIDDEN))),
      .out_valid (out_vld[m]),
      .y         (out_y[m])
    );
  end

  trigger_decision #(.W(W_OUT)) u_decision (
    .valid    (out_vld[0]),
    .y_noise  (out_y[0]),
    .y_signal (out_y[1]),
    .accept   (accept)
  );

  assign out_valid    = out_vld[0];
  assign hidden_probe = hid;
  assign output_probe = out_y;

endmodule
