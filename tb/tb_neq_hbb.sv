// tb_neq_hbb -- checks the enumerated neuron tables against direct arithmetic.
//
// Instance A is a 6:2 neuron (3 inputs of 2 bits, as in JSC-S), checked at all
// 64 input words. Instance B is a 12:3 neuron (4 inputs of 3 bits, as in
// JSC-M), checked at 3000 random words. Instance C is a 14:2 neuron (7 inputs
// of 2 bits, as in the NID networks), checked at 3000 random words. The
// expected value is the neuron computed by multiply-accumulate in
// logicnets_ref_pkg, not read from any table. The test also checks that each
// neuron's output takes more than one value, so a constant table cannot pass.
module tb_neq_hbb;
  import logicnets_pkg::*;
  import logicnets_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned SEED = 7;

  logic [5:0]  wa; logic [1:0] ya;
  logic [11:0] wb; logic [2:0] yb;
  logic [13:0] wc; logic [1:0] yc;

  neq_hbb #(.IN_BITS(2), .FANIN(3), .OUT_BITS(2), .SEED(SEED), .LAYER(0), .NEURON(11))
    dut_a (.in_word(wa), .out_act(ya));
  neq_hbb #(.IN_BITS(3), .FANIN(4), .OUT_BITS(3), .SEED(SEED), .LAYER(2), .NEURON(5))
    dut_b (.in_word(wb), .out_act(yb));
  neq_hbb #(.IN_BITS(2), .FANIN(7), .OUT_BITS(2), .SEED(SEED), .LAYER(1), .NEURON(42))
    dut_c (.in_word(wc), .out_act(yc));

  int checks = 0, failures = 0;

  function automatic int unsigned expect_of(input int unsigned layer, input int unsigned neuron,
                                            input int unsigned in_bits, input int unsigned fanin,
                                            input int unsigned out_bits, input int unsigned word);
    int unsigned xs [MAX_FANIN];
    for (int k = 0; k < int'(MAX_FANIN); k++)
      xs[k] = (k < int'(fanin)) ? (word >> (k * in_bits)) % (1 << in_bits) : 0;
    return ref_neuron(SEED, layer, neuron, in_bits, fanin, out_bits, xs);
  endfunction

  task automatic check(input string name, input int unsigned got, input int unsigned exp,
                       input int unsigned word);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s word %0h: got %0d expected %0d", name, word, got, exp);
    end
  endtask

  initial begin
    bit seen_a [4], seen_b [8], seen_c [4];
    int distinct;
    wa = '0; wb = '0; wc = '0;
    for (int w = 0; w < 64; w++) begin
      wa = 6'(w);
      #1;
      check("A", ya, expect_of(0, 11, 2, 3, 2, w), w);
      seen_a[ya] = 1'b1;
    end
    for (int i = 0; i < 3000; i++) begin
      wb = 12'($urandom);
      wc = 14'($urandom);
      #1;
      check("B", yb, expect_of(2, 5, 3, 4, 3, wb), wb);
      check("C", yc, expect_of(1, 42, 2, 7, 2, wc), wc);
      seen_b[yb] = 1'b1;
      seen_c[yc] = 1'b1;
      if (i % 64 == 0) @(posedge clk);
    end
    distinct = 0; foreach (seen_a[v]) distinct += seen_a[v];
    checks++; if (distinct < 2) begin failures++; $display("FAIL A output is constant"); end
    distinct = 0; foreach (seen_b[v]) distinct += seen_b[v];
    checks++; if (distinct < 2) begin failures++; $display("FAIL B output is constant"); end
    distinct = 0; foreach (seen_c[v]) distinct += seen_c[v];
    checks++; if (distinct < 2) begin failures++; $display("FAIL C output is constant"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
