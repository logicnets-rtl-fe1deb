// neq_hbb -- Neuron Equivalent turned into its Hardware Building Block.
//
// A neuron with FANIN inputs of IN_BITS bits and an OUT_BITS-bit output has
// only 2^X distinct inputs (X = FANIN*IN_BITS), so it can be replaced by an
// X:OUT_BITS truth table. This module does that conversion while elaborating:
// the function build_table() evaluates the neuron model of logicnets_pkg
// (integer weights, a bias standing for the folded batch norm, and a
// quantized ReLU) on every input word and packs the results into the TABLE of
// one hbb_lut. After elaboration only the table is left: the hardware is a
// ROM, not a multiply-accumulate datapath.
//
// Input word layout: input k (k = 0 .. FANIN-1, in the order the layer's
// connection list gives) occupies in_word[k*IN_BITS +: IN_BITS], each an
// unsigned quantized activation. out_act is the unsigned quantized output.
// Purely combinational; zero cycles.
//
// From the paper: the NEQ structure (weighted sum, batch norm, quantized
// ReLU, Fig. 5 of the paper) and the lossless enumeration of all 2^X inputs
// into the truth table. This design's choice: the weights, bias and
// quantizer step come from a seeded hash (see logicnets_pkg), because the
// trained values are not published; the neuron is identified to that hash
// by (SEED, LAYER, NEURON).
module neq_hbb
  import logicnets_pkg::*;
#(
  parameter int unsigned IN_BITS  = 2,
  parameter int unsigned FANIN    = 3,
  parameter int unsigned OUT_BITS = 2,
  parameter int unsigned SEED     = 1,
  parameter int unsigned LAYER    = 0,
  parameter int unsigned NEURON   = 0
) (
  input  logic [IN_BITS*FANIN-1:0] in_word,
  output logic [OUT_BITS-1:0]      out_act
);

  localparam int unsigned X = IN_BITS * FANIN;

  // Inputs 0 .. FL-1 form the low address half (XL bits), the rest the high
  // half (XH bits).
  localparam int unsigned FL = FANIN / 2;
  localparam int unsigned XL = FL * IN_BITS;
  localparam int unsigned XH = X - XL;

  // Enumerate the neuron over all 2^X input words:
  //   y = clamp((sum_k w_k*x_k + b) >>> s, 0, 2^OUT_BITS - 1).
  // The weighted sum splits into a low-half and a high-half partial sum,
  // each tabulated once, so every word costs one addition.
  function automatic logic [(2**X)*OUT_BITS-1:0] build_table();
    logic [(2**X)*OUT_BITS-1:0] t;
    int                         w [FANIN];
    int                         lo [2**XL];
    int                         hi [2**XH];
    int                         b;
    int unsigned                s;
    int                         acc;
    int                         ymax;
    int unsigned                x;
    b    = neq_bias(SEED, LAYER, NEURON, IN_BITS, FANIN);
    s    = neq_shift(IN_BITS, FANIN, OUT_BITS);
    ymax = (1 << OUT_BITS) - 1;
    for (int unsigned k = 0; k < FANIN; k++) w[k] = neq_weight(SEED, LAYER, NEURON, k);
    for (int unsigned a = 0; a < (1 << XL); a++) begin
      lo[a] = 0;
      for (int unsigned k = 0; k < FL; k++) begin
        x     = (a >> (k * IN_BITS)) & ((1 << IN_BITS) - 1);
        lo[a] = lo[a] + w[k] * int'(x);
      end
    end
    for (int unsigned a = 0; a < (1 << XH); a++) begin
      hi[a] = b;
      for (int unsigned k = FL; k < FANIN; k++) begin
        x     = (a >> ((k - FL) * IN_BITS)) & ((1 << IN_BITS) - 1);
        hi[a] = hi[a] + w[k] * int'(x);
      end
    end
    for (int unsigned a = 0; a < (1 << X); a++) begin
      acc = (lo[a & ((1 << XL) - 1)] + hi[a >> XL]) >>> s;
      if (acc < 0)    acc = 0;
      if (acc > ymax) acc = ymax;
      t[a*OUT_BITS +: OUT_BITS] = OUT_BITS'(acc);
    end
    return t;
  endfunction

  localparam logic [(2**X)*OUT_BITS-1:0] TABLE = build_table();

  hbb_lut #(
    .X    (X),
    .Y    (OUT_BITS),
    .TABLE(TABLE)
  ) u_hbb (
    .in_bits (in_word),
    .out_bits(out_act)
  );

endmodule
