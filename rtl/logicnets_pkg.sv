// logicnets_pkg -- constants, types and elaboration-time functions shared by
// the truth-table network.
//
// A LogicNets circuit is a netlist of truth tables: every neuron has a small,
// quantized fan-in, so its whole input/output behaviour fits in an X:Y table
// (X input bits, Y output bits) that FPGA LUTs implement directly. Nothing in
// this package becomes hardware by itself. It supplies what the generator
// needs while elaborating:
//
//   * conn_indices()  - the fixed random sparse connectivity: for each neuron,
//                       FANIN distinct activations of the previous layer.
//   * neq_weight(),
//     neq_bias(),
//     neq_shift()     - the parameters of the neuron model (integer weights,
//                       a bias that stands for the folded batch norm, and the
//                       quantizer step of the quantized ReLU).
//   * lut_cost()      - the analytical 6:1-LUT cost model, Y/3*(2^(X-4)-(-1)^X).
//
// The topology, bit widths, fan-ins, the registers between layers and the
// cost model follow the LogicNets paper. The trained weights of its networks
// are not published, so the neuron parameters here are drawn from a seeded
// hash: the circuit has the paper's structure and sizes, but computes a
// stand-in function, not the trained classifier. Replace neq_weight/neq_bias
// (or hand each NEQ its own table) to load trained values.
package logicnets_pkg;

  // Largest number of layers and largest per-neuron fan-in the generator
  // handles (the paper's networks use up to 6 layers and gamma <= 7).
  localparam int unsigned MAX_LAYERS = 8;
  localparam int unsigned MAX_FANIN  = 16;

  // Per-layer parameter vector (neurons, bits or fan-in of each layer).
  typedef int unsigned layer_vec_t [MAX_LAYERS];
  // Source indices of one neuron's inputs.
  typedef int unsigned idx_vec_t [MAX_FANIN];

  // Salts that keep the hash streams of different quantities apart.
  localparam int unsigned SALT_CONN   = 32'h1f3a_5c27;
  localparam int unsigned SALT_WEIGHT = 32'h6b2e_90d1;
  localparam int unsigned SALT_BIAS   = 32'h3c85_e44b;

  // 32-bit integer mixer (xor-shift / multiply); wraps modulo 2^32.
  function automatic int unsigned mix32(input int unsigned v);
    int unsigned x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Hash of (seed, salt, layer, neuron, k).
  function automatic int unsigned hash5(input int unsigned seed, input int unsigned salt,
                                        input int unsigned layer, input int unsigned neuron,
                                        input int unsigned k);
    int unsigned h;
    h = mix32(seed ^ salt);
    h = mix32(h ^ (layer * 32'h9e37_79b9));
    h = mix32(h ^ neuron);
    h = mix32(h ^ (k * 32'h85eb_ca6b));
    return h;
  endfunction

  // Fixed random sparsity: FANIN distinct source indices in [0, in_count)
  // for one neuron. Candidates come from the hash stream and repeats are
  // rejected; unused slots are 0. Requires fanin <= in_count.
  function automatic idx_vec_t conn_indices(input int unsigned seed, input int unsigned layer,
                                            input int unsigned neuron, input int unsigned fanin,
                                            input int unsigned in_count);
    idx_vec_t    idx;
    int unsigned found;
    int unsigned attempt;
    int unsigned cand;
    bit          dup;
    for (int unsigned i = 0; i < MAX_FANIN; i++) idx[i] = 0;
    found   = 0;
    attempt = 0;
    while (found < fanin && found < in_count) begin
      cand = hash5(seed, SALT_CONN, layer, neuron, attempt) % in_count;
      dup  = 1'b0;
      for (int unsigned j = 0; j < MAX_FANIN; j++)
        if (j < found && idx[j] == cand) dup = 1'b1;
      if (!dup) begin
        idx[found] = cand;
        found++;
      end
      attempt++;
    end
    return idx;
  endfunction

  // Largest |sum of w*x| the neuron can reach: 7 * (2^in_bits - 1) * fanin.
  function automatic int unsigned neq_acc_max(input int unsigned in_bits, input int unsigned fanin);
    return 7 * ((1 << in_bits) - 1) * fanin;
  endfunction

  // Signed integer weight in [-7, 7] of input k of a neuron.
  function automatic int neq_weight(input int unsigned seed, input int unsigned layer,
                                    input int unsigned neuron, input int unsigned k);
    return int'(hash5(seed, SALT_WEIGHT, layer, neuron, k) % 15) - 7;
  endfunction

  // Bias (batch-norm shift folded into the sum) in [-acc_max/4, acc_max/4].
  function automatic int neq_bias(input int unsigned seed, input int unsigned layer,
                                  input int unsigned neuron, input int unsigned in_bits,
                                  input int unsigned fanin);
    int unsigned r;
    r = neq_acc_max(in_bits, fanin) / 4;
    return int'(hash5(seed, SALT_BIAS, layer, neuron, 0) % (2 * r + 1)) - int'(r);
  endfunction

  // Quantizer step of the quantized ReLU, as a right shift (batch-norm scale
  // folded into it): the output spans the upper quarter of the sum's range.
  function automatic int unsigned neq_shift(input int unsigned in_bits, input int unsigned fanin,
                                            input int unsigned out_bits);
    int unsigned lg;
    lg = $clog2(neq_acc_max(in_bits, fanin) + 1);
    return (lg > out_bits + 2) ? lg - out_bits - 2 : 0;
  endfunction

  // Analytical cost model: number of 6:1 LUTs of an X:Y truth table,
  // Y/3 * (2^(X-4) - (-1)^X), valid for X >= 4; rounded to nearest.
  function automatic longint unsigned lut_cost(input int unsigned x, input int unsigned y);
    longint t;
    t = (longint'(1) << (x - 4)) - ((x % 2 == 0) ? 1 : -1);
    return longint'((longint'(y) * t + 1) / 3);
  endfunction

endpackage
