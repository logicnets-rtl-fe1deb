// tb_sparse_layer -- checks one layer: its random sparse wiring, its neuron
// tables and its one-clock register stage.
//
// The layer under test has 16 inputs of 2 bits feeding 24 neurons of fan-in
// 3 with 2-bit outputs (the first layer of JSC-S, narrowed to 24 neurons).
// Every clock a random activation vector is applied with a random valid bit.
// The expected outputs are computed by logicnets_ref_pkg (direct arithmetic
// on the activations the connection lists select) and compared one clock
// later, which also checks the latency of one cycle and that out_valid
// follows in_valid exactly. The connection lists themselves are checked to
// hold FANIN distinct, in-range sources.
module tb_sparse_layer;
  import logicnets_pkg::*;
  import logicnets_ref_pkg::*;

  localparam int unsigned IN_COUNT = 16, IN_BITS = 2, OUT_COUNT = 24, OUT_BITS = 2;
  localparam int unsigned FANIN = 3, LAYER = 0, SEED = 3;
  localparam int unsigned N_SAMPLES = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                          rst_n;
  logic                          in_valid;
  logic [IN_COUNT*IN_BITS-1:0]   in_act;
  logic                          out_valid;
  logic [OUT_COUNT*OUT_BITS-1:0] out_act;

  sparse_layer #(
    .IN_COUNT(IN_COUNT), .IN_BITS(IN_BITS), .OUT_COUNT(OUT_COUNT), .OUT_BITS(OUT_BITS),
    .FANIN(FANIN), .LAYER(LAYER), .SEED(SEED)
  ) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    act_arr_t prev, exp;
    bit       exp_valid;
    idx_vec_t idx;
    bit       ok;
    int       valid_seen = 0;

    // Connection lists: FANIN distinct sources in range, and not all neurons
    // wired the same way.
    ok = 1'b1;
    for (int n = 0; n < int'(OUT_COUNT); n++) begin
      idx = conn_indices(SEED, LAYER, n, FANIN, IN_COUNT);
      for (int k = 0; k < int'(FANIN); k++) begin
        if (idx[k] >= IN_COUNT) ok = 1'b0;
        for (int j = 0; j < k; j++) if (idx[j] == idx[k]) ok = 1'b0;
      end
    end
    checks++;
    if (!ok) begin failures++; $display("FAIL connection lists not distinct/in range"); end

    rst_n = 1'b0; in_valid = 1'b0; in_act = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    exp_valid = 1'b0;
    prev = new[IN_COUNT];
    for (int s = 0; s < int'(N_SAMPLES); s++) begin
      // apply a new input just after the edge
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < int'(IN_COUNT); i++) begin
        prev[i] = $urandom % (1 << IN_BITS);
        in_act[i*IN_BITS +: IN_BITS] = IN_BITS'(prev[i]);
      end
      exp = ref_layer(SEED, LAYER, OUT_COUNT, IN_BITS, FANIN, OUT_BITS, prev);
      exp_valid = in_valid;
      @(posedge clk);
      #1;
      // one clock later the registered result must be there
      checks++;
      if (out_valid !== exp_valid) begin
        failures++;
        $display("FAIL sample %0d: out_valid %0b expected %0b", s, out_valid, exp_valid);
      end
      if (exp_valid) begin
        valid_seen++;
        for (int n = 0; n < int'(OUT_COUNT); n++) begin
          checks++;
          if (int'(out_act[n*OUT_BITS +: OUT_BITS]) != int'(exp[n])) begin
            failures++;
            if (failures < 20)
              $display("FAIL sample %0d neuron %0d: got %0d expected %0d",
                       s, n, out_act[n*OUT_BITS +: OUT_BITS], exp[n]);
          end
        end
      end
    end
    checks++;
    if (valid_seen == 0) begin failures++; $display("FAIL no valid sample seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (N_SAMPLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
