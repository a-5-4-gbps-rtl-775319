// tb_qrng_top: end-to-end test of the randomness extractor at its default
// size (8 lanes of 12-bit samples, m = 6, 32-bit output words).
//
// Phase 1 drives random ADC beats with random pauses in adc_valid. Phase 2
// streams ten million output bits (the length of the sequences the source
// was characterised with) back to back and measures the sustained rate,
// which must be 24 bits per clock, i.e. 5.4 Gbit/s at the 225 MHz clock
// that carries 1.8 GS/s on 8 lanes.
//
// Reference model: for each valid beat, pair p contributes bits 0..M-1 of
// sample[2p] != sample[2p+1], appended to a bit queue along with the index of
// the beat they came from. A word must leave exactly two clocks after the
// beat that brings the queue to OUT_W bits, and must equal the next OUT_W
// queued bits. The test also counts how often each mechanism of the design
// occurs (pauses in the ADC stream, XOR changing both samples, upper bits
// being discarded, an output word spanning two beats) and fails if any of
// them never happened.
module tb_qrng_top;
  import qrng_pkg::*;

  localparam int unsigned PAIRS      = LANES / 2;
  localparam int unsigned BITS_BEAT  = PAIRS * M_LSB;
  localparam int unsigned GAP_BEATS  = 5000;
  localparam longint unsigned STREAM_BITS = 64'd10_000_000;
  localparam int unsigned RATE_BEATS = int'((STREAM_BITS + 64'(BITS_BEAT) - 1) / 64'(BITS_BEAT));

  logic clk;
  logic rst;
  logic [LANES-1:0][ADC_W-1:0] adc_samples;
  logic                        adc_valid;
  logic [OUT_W-1:0]            rnd_word;
  logic                        rnd_valid;

  int checks;
  int failures;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  qrng_top dut (
    .clk         (clk),
    .rst         (rst),
    .adc_samples (adc_samples),
    .adc_valid   (adc_valid),
    .rnd_word    (rnd_word),
    .rnd_valid   (rnd_valid)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (GAP_BEATS + RATE_BEATS + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference bit queue and the beat each bit came from.
  bit model_q[$];
  int beat_q[$];
  int beat_no;
  // Expected rnd_valid for the next two clock edges.
  bit [1:0] emit_pipe;

  // Mechanism counters.
  int n_idle;       // beats without adc_valid
  int n_xor_mix;    // pairs whose XOR differs from both samples
  int n_truncate;   // pairs whose discarded upper bits were not all zero
  int n_straddle;   // output words holding bits of two or more beats
  longint bits_out;
  longint words_total;

  task automatic beat(input bit valid);
    logic [ADC_W-1:0] a, b;
    for (int l = 0; l < LANES; l++) adc_samples[l] = ADC_W'($urandom);
    adc_valid = valid;
    if (valid) begin
      beat_no++;
      for (int p = 0; p < PAIRS; p++) begin
        a = adc_samples[2*p];
        b = adc_samples[2*p+1];
        if (a != 0 && b != 0 && a != b) n_xor_mix++;
        for (int k = M_LSB; k < ADC_W; k++)
          if (a[k] != b[k]) begin n_truncate++; break; end
        for (int k = 0; k < M_LSB; k++) begin
          model_q.push_back(a[k] != b[k]);
          beat_q.push_back(beat_no);
        end
      end
    end else begin
      n_idle++;
    end
    emit_pipe = {emit_pipe[0], 1'b0};
    // A word completed by this beat leaves two clocks later.
    if (model_q.size() - (emit_pipe[1] ? OUT_W : 0) >= OUT_W) emit_pipe[0] = 1'b1;
    @(posedge clk);
    #1;
    check(rnd_valid == emit_pipe[1], "rnd_valid two clocks after word completes");
    if (rnd_valid && emit_pipe[1]) begin
      bit ok = 1'b1;
      int first_beat = beat_q[0];
      bit straddle = 1'b0;
      for (int k = 0; k < OUT_W; k++) begin
        bit e = model_q.pop_front();
        int bn = beat_q.pop_front();
        if (bn != first_beat) straddle = 1'b1;
        if (rnd_word[k] != e) ok = 1'b0;
      end
      check(ok, "random word equals XOR/m-LSB reference");
      if (straddle) n_straddle++;
      bits_out += longint'(OUT_W);
      words_total++;
    end
    @(negedge clk);
  endtask

  initial begin : stimulus
    longint start_bits;
    real bits_per_clk, gbps;
    checks = 0; failures = 0; beat_no = 0; emit_pipe = '0;
    n_idle = 0; n_xor_mix = 0; n_truncate = 0; n_straddle = 0;
    bits_out = 0; words_total = 0;
    rst = 1'b1; adc_valid = 1'b0; adc_samples = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    // Phase 1: ADC stream with pauses.
    for (int n = 0; n < GAP_BEATS; n++) beat($urandom_range(0, 3) != 0);
    // Phase 2: continuous stream, rate measurement.
    start_bits = bits_out;
    for (int n = 0; n < RATE_BEATS; n++) beat(1'b1);
    bits_per_clk = real'(bits_out - start_bits) / real'(RATE_BEATS);
    gbps = bits_per_clk * real'(CLK_HZ) / 1.0e9;
    $display("sustained: %0d bits in %0d clocks = %f bits/clock = %f Gbit/s at %0d Hz",
             bits_out - start_bits, RATE_BEATS, bits_per_clk, gbps, CLK_HZ);
    check(bits_out - start_bits >= STREAM_BITS - 64'(2 * OUT_W), "ten million bits delivered");
    check(gbps > 5.399 && gbps < 5.401, "5.4 Gbit/s sustained output rate");
    $display("mechanisms: idle beats %0d, XOR mixes %0d, upper bits discarded %0d, words spanning beats %0d",
             n_idle, n_xor_mix, n_truncate, n_straddle);
    check(n_idle > 0, "ADC pause exercised");
    check(n_xor_mix > 0, "XOR of two samples exercised");
    check(n_truncate > 0, "m-LSB truncation exercised");
    check(n_straddle > 0, "output word spanning two beats exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
