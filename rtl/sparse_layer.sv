// sparse_layer -- one layer of a LogicNets network plus its register stage.
//
// The layer holds OUT_COUNT neurons, each one an neq_hbb truth table. Neuron n
// does not see the whole previous layer: it reads exactly FANIN of the
// IN_COUNT incoming activations, chosen once, at random, when the network is
// generated (fixed random sparsity). The choice is made by
// logicnets_pkg::conn_indices() from (SEED, LAYER, n), so the connections are
// plain wires and cost no logic. This sparse fan-in is what keeps each table
// at X = FANIN*IN_BITS inputs, and its LUT cost bounded. An activation that
// no neuron happens to pick is simply left unconnected (lint reports its
// bits as unused); as in the paper, synthesis then prunes the logic that
// produced it.
//
// The table outputs are captured in a register stage, so every layer is one
// pipeline stage: one level of truth tables between two registers. A valid bit
// travels alongside the data.
//
// Interface:
//   in_act   IN_COUNT activations of IN_BITS bits, activation i at
//            in_act[i*IN_BITS +: IN_BITS]; in_valid marks a sample.
//   out_act  OUT_COUNT activations of OUT_BITS bits, neuron n at
//            out_act[n*OUT_BITS +: OUT_BITS]; out_valid marks a sample.
// Timing: out_* are in_* one clock later; a new sample may enter every clock
// (initiation interval 1); there is no back-pressure.
//
// From the paper: neurons with gamma inputs picked by fixed random sparsity,
// and registers inserted between every layer. This design's choices: the
// valid bit and its synchronous active-low reset (the data registers are not reset, as
// they carry no state beyond one sample), the hash used for the random
// choice, and the order of inputs inside a neuron's table address (connection
// k at address bits [k*IN_BITS +: IN_BITS]).
module sparse_layer
  import logicnets_pkg::*;
#(
  parameter int unsigned IN_COUNT  = 16,
  parameter int unsigned IN_BITS   = 2,
  parameter int unsigned OUT_COUNT = 64,
  parameter int unsigned OUT_BITS  = 2,
  parameter int unsigned FANIN     = 3,
  parameter int unsigned LAYER     = 0,
  parameter int unsigned SEED      = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [IN_COUNT*IN_BITS-1:0]   in_act,
  output logic                          out_valid,
  output logic [OUT_COUNT*OUT_BITS-1:0] out_act
);

  // Each neuron needs FANIN distinct sources.
  if (FANIN > IN_COUNT || FANIN > MAX_FANIN || FANIN == 0) begin : g_bad_fanin
    $error("sparse_layer: FANIN must be in 1..min(IN_COUNT, MAX_FANIN)");
  end

  logic [OUT_COUNT*OUT_BITS-1:0] neq_out;

  for (genvar n = 0; n < OUT_COUNT; n++) begin : g_neuron
    localparam idx_vec_t IDX = conn_indices(SEED, LAYER, n, FANIN, IN_COUNT);

    logic [FANIN*IN_BITS-1:0] word;

    // Sparse connections: gather the FANIN chosen activations.
    for (genvar k = 0; k < FANIN; k++) begin : g_conn
      assign word[k*IN_BITS +: IN_BITS] = in_act[IDX[k]*IN_BITS +: IN_BITS];
    end

    neq_hbb #(
      .IN_BITS (IN_BITS),
      .FANIN   (FANIN),
      .OUT_BITS(OUT_BITS),
      .SEED    (SEED),
      .LAYER   (LAYER),
      .NEURON  (n)
    ) u_neq (
      .in_word(word),
      .out_act(neq_out[n*OUT_BITS +: OUT_BITS])
    );
  end

  // Register stage between layers.
  always_ff @(posedge clk) out_act <= neq_out;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  // The valid bit is a one-cycle delay of in_valid: no sample is lost or
  // duplicated inside the stage.
  a_valid_delay : assert property (@(posedge clk) disable iff (!rst_n)
                                   $past(rst_n) |-> out_valid == $past(in_valid))
    else $error("sparse_layer: out_valid is not in_valid delayed by one clock");

endmodule
