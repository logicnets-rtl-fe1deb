// hbb_lut -- Hardware Building Block: an X-input, Y-output truth table.
//
// This is the only kind of logic a LogicNets network contains. The table is a
// read-only memory of 2^X words of Y bits, given as the packed parameter
// TABLE: the word for input value a sits at TABLE[a*Y +: Y]. There is no
// multiply, add or compare in the circuit; whatever function the table holds
// (in this design, an enumerated quantized neuron, see neq_hbb) is what the
// block computes, and the synthesis tool is left to map the ROM onto 6:1 LUTs
// (and wider muxes) and to minimise it.
//
// Interface: in_bits (X bits) -> out_bits (Y bits), purely combinational, no
// clock. Timing: zero cycles; registers live in sparse_layer.
//
// From the paper: the X:Y truth table as a ROM filled by enumeration and left
// to synthesis to map. This design's choice: the ROM is written as an indexed
// constant vector instead of a case statement (the two describe the same
// table), and the bit order of the address is fixed by the caller.
module hbb_lut #(
  parameter int unsigned X = 6,                          // input bits (fan-in)
  parameter int unsigned Y = 1,                          // output bits
  parameter logic [(2**X)*Y-1:0] TABLE = '0              // word a at [a*Y +: Y]
) (
  input  logic [X-1:0] in_bits,
  output logic [Y-1:0] out_bits
);

  always_comb out_bits = TABLE[in_bits*Y +: Y];

endmodule
