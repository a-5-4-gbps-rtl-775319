// tb_qrng_1gbit: streams one gigabit through the extractor at its default
// size (8 lanes, m = 6, 32-bit words), the length of the sequences fed to
// statistical test suites.
//
// Beats come from tb_pd_adc_model without pauses; tb_stream_checker checks
// every output word and its timing against the bit-level reference. The
// testbench counts the ones in the whole gigabit and requires the bias to be
// within 0.0002 of one half (about 13 standard deviations for 10^9 fair
// bits), and requires exactly 24 bits per clock on average, which is
// 5.4 Gbit/s at 225 MHz.
module tb_qrng_1gbit;
  import qrng_pkg::*;

  localparam longint unsigned NBITS = 64'd1_000_000_000;
  localparam longint unsigned BEATS = NBITS / (64'(LANES) / 64'd2 * 64'(M_LSB)) + 64'd1;

  logic clk;
  logic rst;
  logic enable;
  logic [LANES-1:0][ADC_W-1:0] samples;
  logic                        valid;
  logic [OUT_W-1:0]            rnd_word;
  logic                        rnd_valid;

  int checks;
  int failures;
  longint ones;
  longint beats;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  tb_pd_adc_model #(.ADC_W(ADC_W), .LANES(LANES)) u_src (
    .clk (clk), .enable (enable), .samples (samples), .valid (valid)
  );

  qrng_top dut (
    .clk (clk), .rst (rst), .adc_samples (samples), .adc_valid (valid),
    .rnd_word (rnd_word), .rnd_valid (rnd_valid)
  );

  tb_stream_checker #(.NBITS(64'd10_000_000)) chk (
    .clk (clk), .rst (rst), .samples (samples), .valid (valid),
    .word (rnd_word), .word_valid (rnd_valid)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (int'(BEATS) + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (valid) beats <= beats + 1;
    if (rnd_valid) ones <= ones + longint'($countones(rnd_word));
  end

  initial begin : stimulus
    real bias, per_clk;
    checks = 0; failures = 0; ones = 0; beats = 0;
    rst = 1'b1; enable = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    enable = 1'b1;
    while (chk.bits_seen < longint'(NBITS)) @(posedge clk);
    @(negedge clk);
    enable = 1'b0;
    repeat (4) @(posedge clk);
    bias = real'(ones) / real'(chk.bits_seen) - 0.5;
    per_clk = real'(chk.bits_seen) / real'(beats);
    $display("%0d bits from %0d beats: %f bits/clock = %f Gbit/s; fraction of ones - 0.5 = %e",
             chk.bits_seen, beats, per_clk, per_clk * real'(CLK_HZ) / 1.0e9, bias);
    checks += chk.checks;
    failures += chk.failures;
    check(chk.bits_seen >= longint'(NBITS), "one gigabit delivered");
    check(per_clk > 23.99 && per_clk <= 24.0, "24 bits per clock (5.4 Gbit/s at 225 MHz)");
    check(bias < 0.0002 && bias > -0.0002, "output bits balanced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
