// tb_logicnets_top -- end-to-end test of the whole network at its default
// size (the JSC-S topology: 16 x 2-bit features, layers of 64, 32, 32, 32 and
// 5 neurons, fan-in 3, 2-bit activations).
//
// A stream of random feature vectors is pushed through the pipeline. For
// each accepted sample the expected 5 outputs are computed by direct
// arithmetic (logicnets_ref_pkg) and queued together with the clock cycle the
// sample entered. Each result that leaves must match the head of the queue
// and must arrive exactly NUM_LAYERS+1 = 6 clocks after its sample entered.
// The stimulus makes each behaviour of the pipeline happen and counts it:
//   * back-to-back samples on consecutive clocks (initiation interval 1),
//   * bubbles (in_valid low between samples),
//   * a reset in the middle of a stream, which must drop the samples in
//     flight and emit no result for them,
//   * a full pipeline: NUM_LAYERS+1 samples in flight at once.
// A behaviour that never happened counts as a failure.
module tb_logicnets_top;
  import logicnets_pkg::*;
  import logicnets_ref_pkg::*;

  // Mirror of the top's default parameters.
  localparam int unsigned NUM_INPUTS = 16;
  localparam int unsigned INPUT_BITS = 2;
  localparam int unsigned NUM_LAYERS = 5;
  localparam layer_vec_t  NEURONS    = '{64, 32, 32, 32, 5, 0, 0, 0};
  localparam layer_vec_t  BITS       = '{2, 2, 2, 2, 2, 0, 0, 0};
  localparam layer_vec_t  FANIN      = '{3, 3, 3, 3, 3, 0, 0, 0};
  localparam int unsigned SEED       = 1;
  localparam int unsigned OUT_COUNT  = NEURONS[NUM_LAYERS-1];
  localparam int unsigned OUT_BITS   = BITS[NUM_LAYERS-1];
  localparam int unsigned LATENCY    = NUM_LAYERS + 1;
  localparam int unsigned N_CYCLES   = 3000;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic                             rst_n;
  logic                             in_valid;
  logic [NUM_INPUTS*INPUT_BITS-1:0] in_features;
  logic                             out_valid;
  logic [OUT_COUNT*OUT_BITS-1:0]    out_act;

  logicnets_top dut (.*);

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
