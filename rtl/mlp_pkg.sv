// mlp_pkg -- sizes, types and the default parameter constant of the
// 20x20x2 multi-layer-perceptron level-1 trigger.
//
// The network takes the number of fired PMTs in each of 20 consecutive
// clock cycles (8-bit two's complement each), passes them through 20 hidden
// ReLU neurons and 2 output neurons, and accepts the event when the "signal"
// output neuron is larger than the "dark noise" one. All 462 weights and
// biases are 12-bit two's complement and live in one 5544-bit constant.
//
// Layout of the constant (this design's choice, the order inside it is not
// published): 12-bit field k occupies bits [12k+11:12k].
//   hidden neuron n (0..19): k = 21n + i, i = 0..19 weight of input i, i = 20 bias
//   output neuron m (0..1) : k = 420 + 21m + i, same order
// so the hidden layer fills the low 5040 bits and the output layer the top
// 504 bits. Output neuron 0 scores dark noise (label 0), neuron 1 scores
// signal (label 1).
//
// The trained weights are not published. DEFAULT_PARAMS is a stand-in that
// makes the network a plain hit-count threshold: hidden neuron 0 sums the 20
// hit counts, the signal neuron copies it, the noise neuron holds a bias of
// DEFAULT_THRESHOLD, every other weight and bias is zero. Override the
// PARAMS parameter of the top with real, quantised weights.
package mlp_pkg;

  localparam int unsigned N_INPUT  = 20;   // hits of 20 clock cycles
  localparam int unsigned N_HIDDEN = 20;
  localparam int unsigned N_OUTPUT = 2;
  localparam int unsigned W_HIT    = 8;    // hit count per clock, two's complement
  localparam int unsigned W_PARAM  = 12;   // weight / bias, two's complement

  localparam int unsigned TREE_IN     = 32;  // adder tree leaves
  localparam int unsigned TREE_LEVELS = 5;   // log2(TREE_IN), one register each
  localparam int unsigned MULT_STAGES = 3;   // DSP pipeline depth

  // Datapath widths, full precision all the way.
  localparam int unsigned W_HID_PROD = W_HIT + W_PARAM;             // 20
  localparam int unsigned W_HID      = W_HID_PROD + TREE_LEVELS;    // 25
  localparam int unsigned W_OUT_PROD = W_HID + W_PARAM;             // 37
  localparam int unsigned W_OUT      = W_OUT_PROD + TREE_LEVELS;    // 42

  localparam int unsigned NEURON_LATENCY = MULT_STAGES + TREE_LEVELS;  // 8
  localparam int unsigned MLP_LATENCY    = 2 * NEURON_LATENCY;         // 16

  localparam int unsigned PARAMS_PER_NEURON = N_INPUT + 1;           // 21
  localparam int unsigned N_PARAMS   = (N_HIDDEN + N_OUTPUT) * PARAMS_PER_NEURON;  // 462
  localparam int unsigned W_PARAMS   = N_PARAMS * W_PARAM;           // 5544
  localparam int unsigned OUT_BASE   = N_HIDDEN * PARAMS_PER_NEURON; // 420

  localparam int unsigned DEFAULT_N_EVENTS = 500;           // stored test events
  localparam int unsigned W_EVENT  = N_INPUT * W_HIT;       // 160

  typedef logic signed [W_HIT-1:0]   hit_t;
  typedef logic signed [W_PARAM-1:0] param_t;
  typedef logic signed [W_HID-1:0]   hid_t;
  typedef logic signed [W_OUT-1:0]   out_t;
  typedef logic [W_PARAMS-1:0]       params_t;

  localparam int DEFAULT_THRESHOLD = 250;  // total hits in the 20-cycle window

  // Index of a parameter field in the constant.
  function automatic int unsigned hidden_idx(int unsigned n, int unsigned i);
    return n * PARAMS_PER_NEURON + i;
  endfunction

  function automatic int unsigned output_idx(int unsigned m, int unsigned i);
    return OUT_BASE + m * PARAMS_PER_NEURON + i;
  endfunction

  function automatic params_t default_params();
    params_t p = '0;
    for (int unsigned i = 0; i < N_INPUT; i++)
      p[W_PARAM*hidden_idx(0, i) +: W_PARAM] = W_PARAM'(1);
    p[W_PARAM*output_idx(1, 0) +: W_PARAM]       = W_PARAM'(1);
    p[W_PARAM*output_idx(0, N_INPUT) +: W_PARAM] = W_PARAM'(DEFAULT_THRESHOLD);
    return p;
  endfunction

  localparam params_t DEFAULT_PARAMS = default_params();

endpackage
