// mlp_ref_pkg -- reference model and test helpers for the trigger testbenches.
//
// ref_* compute the 20x20x2 network in plain 64-bit integer arithmetic,
// reading the 12-bit fields of a parameter constant with the layout given in
// mlp_pkg, independently of the pipelined RTL. random_params builds a
// parameter constant from a small linear-congruential generator so that it
// can serve as a compile-time parameter value.
package mlp_ref_pkg;
  import mlp_pkg::*;

  function automatic longint field(params_t p, int unsigned k);
    logic signed [W_PARAM-1:0] v;
    v = p[W_PARAM*k +: W_PARAM];
    return longint'(v);
  endfunction

  // Value of hidden neuron n after ReLU.
  function automatic longint ref_hidden(params_t p, longint hits [N_INPUT], int unsigned n);
    longint acc = field(p, hidden_idx(n, N_INPUT));
    for (int unsigned i = 0; i < N_INPUT; i++)
      acc += field(p, hidden_idx(n, i)) * hits[i];
    return (acc < 0) ? 0 : acc;
  endfunction

  // Raw value of output neuron m.
  function automatic longint ref_output(params_t p, longint hits [N_INPUT], int unsigned m);
    longint acc = field(p, output_idx(m, N_HIDDEN));
    for (int unsigned j = 0; j < N_HIDDEN; j++)
      acc += field(p, output_idx(m, j)) * ref_hidden(p, hits, j);
    return acc;
  endfunction

  function automatic bit ref_accept(params_t p, longint hits [N_INPUT]);
    return ref_output(p, hits, 1) > ref_output(p, hits, 0);
  endfunction

  // Weights uniform in [-32, 31] (6-bit values); hidden biases in
  // [-128, 127]; output biases in [-2048, 2047].
  function automatic params_t random_params(int unsigned seed);
    params_t p = '0;
    int unsigned s = seed;
    for (int unsigned k = 0; k < N_PARAMS; k++) begin
      int v;
      bit is_bias = ((k % PARAMS_PER_NEURON) == N_INPUT);
      s = s * 32'd1664525 + 32'd1013904223;
      if (!is_bias)           v = int'(s[23:18]) - 32;
      else if (k < OUT_BASE)  v = int'(s[23:16]) - 128;
      else                    v = int'(s[23:12]) - 2048;
      p[W_PARAM*k +: W_PARAM] = W_PARAM'(v);
    end
    return p;
  endfunction

endpackage
