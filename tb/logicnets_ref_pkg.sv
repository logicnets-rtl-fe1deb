// logicnets_ref_pkg -- arithmetic reference model of a LogicNets network,
// for the testbenches.
//
// The RTL never computes a neuron at run time: each neuron is a truth table
// filled while elaborating. This package recomputes the same neurons
// directly, as integer multiply-accumulate, bias, shift and clamp, so that a
// testbench can compare the tables (and the wiring and pipelining around
// them) with an independent calculation. It shares only the parameter
// generators of logicnets_pkg (the weights, bias, quantizer step and the
// random connection lists), which play the role of a trained model.
package logicnets_ref_pkg;
  import logicnets_pkg::*;

  typedef int unsigned act_arr_t [];

  // One neuron on FANIN unsigned inputs xs[0..fanin-1].
  function automatic int unsigned ref_neuron(input int unsigned seed, input int unsigned layer,
                                             input int unsigned neuron, input int unsigned in_bits,
                                             input int unsigned fanin, input int unsigned out_bits,
                                             input int unsigned xs [MAX_FANIN]);
    longint acc;
    longint q;
    longint ymax;
    acc = longint'(neq_bias(seed, layer, neuron, in_bits, fanin));
    for (int k = 0; k < int'(fanin); k++)
      acc += longint'(neq_weight(seed, layer, neuron, k)) * longint'(xs[k]);
    // floor division by 2^s, written without a shift
    q = acc;
    for (int i = 0; i < int'(neq_shift(in_bits, fanin, out_bits)); i++)
      q = (q >= 0) ? q / 2 : -((-q + 1) / 2);
    ymax = (longint'(1) << out_bits) - 1;
    if (q < 0)    q = 0;
    if (q > ymax) q = ymax;
    return 32'(q);
  endfunction

  // One layer: out[n] for every neuron n from the previous activations prev.
  function automatic act_arr_t ref_layer(input int unsigned seed, input int unsigned layer,
                                         input int unsigned out_count, input int unsigned in_bits,
                                         input int unsigned fanin, input int unsigned out_bits,
                                         input act_arr_t prev);
    act_arr_t    res;
    idx_vec_t    idx;
    int unsigned xs [MAX_FANIN];
    res = new[out_count];
    for (int n = 0; n < int'(out_count); n++) begin
      idx = conn_indices(seed, layer, n, fanin, prev.size());
      for (int k = 0; k < int'(MAX_FANIN); k++) xs[k] = (k < int'(fanin)) ? prev[idx[k]] : 0;
      res[n] = ref_neuron(seed, layer, n, in_bits, fanin, out_bits, xs);
    end
    return res;
  endfunction

  // Whole network: feature vector in, output-layer activations out.
  function automatic act_arr_t ref_forward(input int unsigned seed, input int unsigned input_bits,
                                           input int unsigned num_layers,
                                           input layer_vec_t neurons, input layer_vec_t bits,
                                           input layer_vec_t fanin, input act_arr_t feat);
    act_arr_t    a;
    int unsigned ib;
    a  = feat;
    ib = input_bits;
    for (int l = 0; l < int'(num_layers); l++) begin
      a  = ref_layer(seed, l, neurons[l], ib, fanin[l], bits[l], a);
      ib = bits[l];
    end
    return a;
  endfunction

endpackage
