// tb_hbb_lut -- exhaustive test of the truth-table building block.
//
// Two tables are checked at every address: a 6:2 table (the size of one JSC-S
// neuron) and a 5:1 table, each filled with a fixed pseudo-random pattern.
// The expected word is taken from the pattern by shifting, independently of
// how the block indexes it. Purely combinational; a clock only paces the
// stimulus and drives the watchdog.
module tb_hbb_lut;
  localparam int unsigned X1 = 6, Y1 = 2;
  localparam int unsigned X2 = 5, Y2 = 1;
  localparam logic [(2**X1)*Y1-1:0] T1 = 128'h9c3e_71a5_0f5d_e2b6_4a18_c7f3_d29e_5b07;
  localparam logic [(2**X2)*Y2-1:0] T2 = 32'hb4e1_96d3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [X1-1:0] a1;
  logic [Y1-1:0] y1;
  logic [X2-1:0] a2;
  logic [Y2-1:0] y2;

  hbb_lut #(.X(X1), .Y(Y1), .TABLE(T1)) dut1 (.in_bits(a1), .out_bits(y1));
  hbb_lut #(.X(X2), .Y(Y2), .TABLE(T2)) dut2 (.in_bits(a2), .out_bits(y2));

  int checks = 0, failures = 0;

  initial begin
    logic [(2**X1)*Y1-1:0] s1;
    logic [(2**X2)*Y2-1:0] s2;
    a1 = '0; a2 = '0;
    for (int a = 0; a < 2**X1; a++) begin
      a1 = X1'(a);
      a2 = X2'(a % (2**X2));
      @(posedge clk);
      s1 = T1 >> (a * Y1);
      s2 = T2 >> ((a % (2**X2)) * Y2);
      checks += 2;
      if (y1 !== s1[Y1-1:0]) begin
        failures++;
        $display("FAIL 6:2 addr %0d: got %0d expected %0d", a, y1, s1[Y1-1:0]);
      end
      if (y2 !== s2[Y2-1:0]) begin
        failures++;
        $display("FAIL 5:1 addr %0d: got %0d expected %0d", a % (2**X2), y2, s2[Y2-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
