// logicnets_top -- a complete LogicNets network: a fully unrolled, fully
// pipelined multilayer perceptron made only of truth tables and registers.
//
// Data flow: in_features (NUM_INPUTS quantized features of INPUT_BITS bits)
// -> input register -> layer 0 -> register -> layer 1 -> register -> ...
// -> layer NUM_LAYERS-1 -> register -> out_act. Every layer is a
// sparse_layer: LAYER_NEURONS[l] neurons, each an LAYER_FANIN[l]*bits-input
// truth table (neq_hbb / hbb_lut) wired to randomly chosen activations of the
// layer before, producing LAYER_BITS[l]-bit activations. The last layer is the
// output layer (for the jet-substructure task: 5 class scores). There is no
// control path: every clock a new sample may enter, and every clock one
// result leaves.
//
// Interface: in_valid/in_features in, out_valid/out_act out. Feature i sits
// at in_features[i*INPUT_BITS +: INPUT_BITS]; output neuron j at
// out_act[j*OUT_BITS +: OUT_BITS]. Both are unsigned quantized values.
// Timing: latency NUM_LAYERS+1 clocks from in_* to out_* (input register
// plus one register per layer), initiation interval 1, no back-pressure.
//
// The default parameters are the JSC-S network of the paper (16 inputs;
// hidden layers of 64, 32, 32, 32 neurons; 5 outputs; beta = 2 bits per
// activation; gamma = 3 inputs per neuron, so every neuron is a 6:2 table).
// The other networks the paper reports are selected by the parameters alone
// (see the README). From the paper: the layer structure, the sparse fan-in,
// the registers at the input, between layers and at the output. This design's
// own choices: the valid bit, the reset, the port packing, and the
// pseudo-random neuron functions that stand in for trained weights.
module logicnets_top
  import logicnets_pkg::*;
#(
  parameter int unsigned NUM_INPUTS    = 16,
  parameter int unsigned INPUT_BITS    = 2,
  parameter int unsigned NUM_LAYERS    = 5,
  parameter layer_vec_t  LAYER_NEURONS = '{64, 32, 32, 32, 5, 0, 0, 0},
  parameter layer_vec_t  LAYER_BITS    = '{2, 2, 2, 2, 2, 0, 0, 0},
  parameter layer_vec_t  LAYER_FANIN   = '{3, 3, 3, 3, 3, 0, 0, 0},
  parameter int unsigned SEED          = 1,
  // Derived: the output vector.
  localparam int unsigned OUT_COUNT = LAYER_NEURONS[NUM_LAYERS-1],
  localparam int unsigned OUT_BITS  = LAYER_BITS[NUM_LAYERS-1]
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic [NUM_INPUTS*INPUT_BITS-1:0] in_features,
  output logic                             out_valid,
  output logic [OUT_COUNT*OUT_BITS-1:0]    out_act
);

  if (NUM_LAYERS == 0 || NUM_LAYERS > MAX_LAYERS) begin : g_bad_layers
    $error("logicnets_top: NUM_LAYERS must be in 1..MAX_LAYERS");
  end

  // Input register.
  logic                             in_valid_q;
  logic [NUM_INPUTS*INPUT_BITS-1:0] in_features_q;

  always_ff @(posedge clk) in_features_q <= in_features;

  always_ff @(posedge clk) begin
    if (!rst_n) in_valid_q <= 1'b0;
    else        in_valid_q <= in_valid;
  end

  // Chain of layers; each ends in its own register stage, the last one being
  // the output register.
  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned N_OUT = LAYER_NEURONS[l];
    localparam int unsigned B_OUT = LAYER_BITS[l];

    logic                   vld;
    logic [N_OUT*B_OUT-1:0] act;

    if (l == 0) begin : g_first
      sparse_layer #(
        .IN_COUNT (NUM_INPUTS),
        .IN_BITS  (INPUT_BITS),
        .OUT_COUNT(N_OUT),
        .OUT_BITS (B_OUT),
        .FANIN    (LAYER_FANIN[l]),
        .LAYER    (l),
        .SEED     (SEED)
      ) u_layer (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (in_valid_q),
        .in_act   (in_features_q),
        .out_valid(vld),
        .out_act  (act)
      );
    end else begin : g_next
      sparse_layer #(
        .IN_COUNT (LAYER_NEURONS[l-1]),
        .IN_BITS  (LAYER_BITS[l-1]),
        .OUT_COUNT(N_OUT),
        .OUT_BITS (B_OUT),
        .FANIN    (LAYER_FANIN[l]),
        .LAYER    (l),
        .SEED     (SEED)
      ) u_layer (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (g_layer[l-1].vld),
        .in_act   (g_layer[l-1].act),
        .out_valid(vld),
        .out_act  (act)
      );
    end
  end

  assign out_valid = g_layer[NUM_LAYERS-1].vld;
  assign out_act   = g_layer[NUM_LAYERS-1].act;

endmodule
