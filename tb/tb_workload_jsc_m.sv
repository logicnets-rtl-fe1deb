// tb_workload_jsc_m -- runs the JSC-M network of the paper end to end and
// checks the analytical LUT cost model against the paper's numbers.
//
// JSC-M: 16 features of 3 bits; layers of 64, 32, 32, 32 neurons and a
// 5-neuron output layer; beta = 3 bits, gamma = 4 inputs per neuron, so every
// neuron is a 12:3 truth table of 4096 words. The network is driven with a
// random stream (back-to-back samples, bubbles and a reset with samples in
// flight) and every result is compared with direct arithmetic and checked
// to arrive NUM_LAYERS+1 = 6 clocks after its sample.
//
// The cost model Y/3*(2^(X-4)-(-1)^X) is checked against the per-table and
// per-network model-LUT figures the paper quotes: 170 LUTs for a 12:2 table,
// 21760 for the 128-neuron example of 12:2 tables, 682 for a 14:2 table, and
// the Model LUT column of JSC-S (330), JSC-M (42075), NID-S (473308) and
// NID-M (754292), counting the output layer (5 neurons for JSC, 1 for NID).
module tb_workload_jsc_m;
  import logicnets_pkg::*;
  import logicnets_ref_pkg::*;

  // JSC-M topology.
  localparam int unsigned NUM_INPUTS = 16;
  localparam int unsigned INPUT_BITS = 3;
  localparam int unsigned NUM_LAYERS = 5;
  localparam layer_vec_t  NEURONS    = '{64, 32, 32, 32, 5, 0, 0, 0};
  localparam layer_vec_t  BITS       = '{3, 3, 3, 3, 3, 0, 0, 0};
  localparam layer_vec_t  FANIN      = '{4, 4, 4, 4, 4, 0, 0, 0};
  localparam int unsigned SEED       = 1;
  localparam int unsigned OUT_COUNT  = NEURONS[NUM_LAYERS-1];
  localparam int unsigned OUT_BITS   = BITS[NUM_LAYERS-1];
  localparam int unsigned LATENCY    = NUM_LAYERS + 1;
  localparam int unsigned N_CYCLES   = 1500;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic                             rst_n;
  logic                             in_valid;
  logic [NUM_INPUTS*INPUT_BITS-1:0] in_features;
  logic                             out_valid;
  logic [OUT_COUNT*OUT_BITS-1:0]    out_act;

  logicnets_top #(
    .NUM_INPUTS(NUM_INPUTS), .INPUT_BITS(INPUT_BITS), .NUM_LAYERS(NUM_LAYERS),
    .LAYER_NEURONS(NEURONS), .LAYER_BITS(BITS), .LAYER_FANIN(FANIN), .SEED(SEED)
  ) dut (.*);

  // Model LUTs of a network whose layers all use the same X:Y table.
  function automatic longint unsigned net_cost(input int unsigned neurons, input int unsigned x,
                                               input int unsigned y);
    return longint'(neurons) * lut_cost(x, y);
  endfunction

  task automatic check_cost(input string what, input longint unsigned got,
                            input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL cost model %s: %0d, paper says %0d", what, got, exp);
    end
  endtask

  initial begin
    check_cost("12:2 table", lut_cost(12, 2), 170);
    check_cost("Fig. 4 example, 128 x 12:2", net_cost(128, 12, 2), 21760);
    check_cost("14:2 table", lut_cost(14, 2), 682);
    check_cost("JSC-S", net_cost(64 + 32 + 32 + 32 + 5, 6, 2), 330);
    check_cost("JSC-M", net_cost(64 + 32 + 32 + 32 + 5, 12, 3), 42075);
    check_cost("NID-S", net_cost(593 + 100 + 1, 14, 2), 473308);
    check_cost("NID-M", net_cost(593 + 256 + 128 + 128 + 1, 14, 2), 754292);
  end

  typedef struct {
    act_arr_t outs;
    int       cycle;
  } pending_t;

  pending_t queue [$];
  int       cycle = 0;
  int       checks = 0, failures = 0;
  int       n_back_to_back = 0, n_bubbles = 0, n_resets_in_flight = 0, n_full_pipe = 0;
  int       n_results = 0, in_flight = 0;
  bit       prev_valid = 1'b0;

  // Output monitor: compares every result with the oldest outstanding sample.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      pending_t p;
      checks++;
      if (queue.size() == 0) begin
        failures++;
        $display("FAIL cycle %0d: result with no sample outstanding", cycle);
      end else begin
        p = queue.pop_front();
        n_results++;
        checks++;
        if (cycle - p.cycle != int'(LATENCY)) begin
          failures++;
          $display("FAIL cycle %0d: latency %0d, expected %0d", cycle, cycle - p.cycle, LATENCY);
        end
        for (int j = 0; j < int'(OUT_COUNT); j++) begin
          checks++;
          if (int'(out_act[j*OUT_BITS +: OUT_BITS]) != int'(p.outs[j])) begin
            failures++;
            if (failures < 20)
              $display("FAIL cycle %0d output %0d: got %0d expected %0d",
                       cycle, j, out_act[j*OUT_BITS +: OUT_BITS], p.outs[j]);
          end
        end
      end
    end
  end

  initial begin
    act_arr_t feat;
    pending_t p;
    feat = new[NUM_INPUTS];
    rst_n = 1'b0; in_valid = 1'b0; in_features = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < int'(N_CYCLES); c++) begin
      // a reset in the middle of the stream, twice
      if (c == N_CYCLES / 3 || c == 2 * N_CYCLES / 3) begin
        if (queue.size() > 0) n_resets_in_flight++;
        rst_n = 1'b0; in_valid = 1'b0;
        queue.delete();
        @(posedge clk);
        #1 rst_n = 1'b1;
        prev_valid = 1'b0;
      end
      // long bursts of back-to-back samples, with random gaps
      in_valid = ((c / 50) % 2 == 0) ? 1'b1 : (($urandom % 3) == 0);
      for (int i = 0; i < int'(NUM_INPUTS); i++) begin
        feat[i] = $urandom % (1 << INPUT_BITS);
        in_features[i*INPUT_BITS +: INPUT_BITS] = INPUT_BITS'(feat[i]);
      end
      if (in_valid) begin
        p.outs  = ref_forward(SEED, INPUT_BITS, NUM_LAYERS, NEURONS, BITS, FANIN, feat);
        p.cycle = cycle;
        queue.push_back(p);
        if (prev_valid) n_back_to_back++;
      end else if (prev_valid) begin
        n_bubbles++;
      end
      prev_valid = in_valid;
      if (queue.size() >= int'(LATENCY)) n_full_pipe++;
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(posedge clk);
    checks++;
    if (queue.size() != 0) begin
      failures++;
      $display("FAIL %0d samples never produced a result", queue.size());
    end
    checks += 4;
    if (n_back_to_back == 0)     begin failures++; $display("FAIL no back-to-back samples"); end
    if (n_bubbles == 0)          begin failures++; $display("FAIL no bubbles"); end
    if (n_resets_in_flight == 0) begin failures++; $display("FAIL no reset with samples in flight"); end
    if (n_full_pipe == 0)        begin failures++; $display("FAIL pipeline never full"); end
    $display("results=%0d back_to_back=%0d bubbles=%0d resets_in_flight=%0d full_pipeline=%0d",
             n_results, n_back_to_back, n_bubbles, n_resets_in_flight, n_full_pipe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (N_CYCLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
