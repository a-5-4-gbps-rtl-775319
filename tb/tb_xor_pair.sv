// tb_xor_pair: self-checking test of the pairwise XOR stage.
//
// Random ADC beats with random gaps in in_valid are driven on the falling
// edge. After each rising edge the testbench checks that out_valid equals
// the in_valid of that edge (one-cycle latency) and that every output word
// equals the XOR of lanes 2p and 2p+1, the reference being formed bit by bit
// as (a | b) & ~(a & b) so that it does not reuse the design's expression.
// A watchdog ends the run with a failure if it hangs.
module tb_xor_pair;
  import qrng_pkg::*;

  localparam int unsigned PAIRS = LANES / 2;
  localparam int unsigned BEATS = 2000;

  logic clk;
  logic rst;
  logic [LANES-1:0][ADC_W-1:0] in_samples;
  logic                        in_valid;
  logic [PAIRS-1:0][ADC_W-1:0] out_words;
  logic                        out_valid;

  int checks = 0;
  int failures = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  xor_pair dut (
    .clk        (clk),
    .rst        (rst),
    .in_samples (in_samples),
    .in_valid   (in_valid),
    .out_words  (out_words),
    .out_valid  (out_valid)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (BEATS + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ADC_W-1:0]            a, b, e;
  logic [PAIRS-1:0][ADC_W-1:0] expected;
  logic                        exp_valid;
  int                          n_valid;

  initial begin : stimulus
    n_valid    = 0;
    rst        = 1'b1;
    in_valid   = 1'b0;
    in_samples = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < BEATS; n++) begin
      for (int l = 0; l < LANES; l++) in_samples[l] = ADC_W'($urandom);
      // A few beats use extreme codes.
      if (n % 97 == 5) in_samples = '1;
      if (n % 89 == 7) in_samples[0] = '0;
      in_valid  = ($urandom_range(0, 3) != 0);
      exp_valid = in_valid;
      for (int p = 0; p < PAIRS; p++) begin
        a = in_samples[2*p];
        b = in_samples[2*p+1];
        e = (a | b) & ~(a & b);
        expected[p] = e;
      end
      @(posedge clk);
      #1;
      check(out_valid == exp_valid, "out_valid one cycle after in_valid");
      if (exp_valid) begin
        n_valid++;
        for (int p = 0; p < PAIRS; p++)
          check(out_words[p] == expected[p], $sformatf("pair %0d XOR", p));
      end
      @(negedge clk);
    end
    check(n_valid > BEATS / 2, "enough valid beats exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
