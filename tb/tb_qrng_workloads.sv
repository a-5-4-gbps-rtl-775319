// tb_qrng_workloads: the extractor configurations the source was evaluated
// with, run side by side on a modelled photodetector signal.
//
// Four extractors keep m = 2, 4, 6 and 8 bits per XORed word; all take the
// same 8-lane beats from tb_pd_adc_model (a correlated Gaussian intensity,
// far from uniform at the ADC). Each has a tb_stream_checker that checks
// every output word and its timing against a bit-level reference, and
// gathers statistics over the first ten million output bits of that
// extractor: the normalised min-entropy H_min(l)/l for l = 1..8 and, for
// m = 6, the autocorrelation for delays 1..100 bits. The run goes on until
// the m = 2 extractor, the slowest, has produced ten million bits.
//
// Checks: all words equal the reference; each extractor sustains 4*m bits
// per clock; every H_min(l)/l is above 0.98 (a uniform source estimated from
// ten million bits gives about 0.99 at l = 8, because of sampling noise);
// every autocorrelation is within 0.003 of zero (about nine standard
// deviations for ten million bits). The raw ADC min-entropy is printed to
// show that the input itself is far from uniform.
module tb_qrng_workloads;
  import qrng_pkg::*;

  localparam longint unsigned NBITS = 64'd10_000_000;
  localparam int unsigned MAX_BEATS = 1_300_000;

  logic clk;
  logic rst;
  logic enable;
  logic [LANES-1:0][ADC_W-1:0] samples;
  logic                        valid;

  logic [OUT_W-1:0] w2, w4, w6, w8;
  logic             v2, v4, v6, v8;

  int checks;
  int failures;
  longint beats;
  longint raw_hist [4096];
  longint raw_total;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  tb_pd_adc_model #(.ADC_W(ADC_W), .LANES(LANES)) u_src (
    .clk (clk), .enable (enable), .samples (samples), .valid (valid)
  );

  qrng_top #(.M(2)) u_m2 (.clk(clk), .rst(rst), .adc_samples(samples), .adc_valid(valid), .rnd_word(w2), .rnd_valid(v2));
  qrng_top #(.M(4)) u_m4 (.clk(clk), .rst(rst), .adc_samples(samples), .adc_valid(valid), .rnd_word(w4), .rnd_valid(v4));
  qrng_top #(.M(6)) u_m6 (.clk(clk), .rst(rst), .adc_samples(samples), .adc_valid(valid), .rnd_word(w6), .rnd_valid(v6));
  qrng_top #(.M(8)) u_m8 (.clk(clk), .rst(rst), .adc_samples(samples), .adc_valid(valid), .rnd_word(w8), .rnd_valid(v8));

  tb_stream_checker #(.M(2), .NBITS(NBITS)) c2 (.clk(clk), .rst(rst), .samples(samples), .valid(valid), .word(w2), .word_valid(v2));
  tb_stream_checker #(.M(4), .NBITS(NBITS)) c4 (.clk(clk), .rst(rst), .samples(samples), .valid(valid), .word(w4), .word_valid(v4));
  tb_stream_checker #(.M(6), .NBITS(NBITS), .ACF(1'b1)) c6 (.clk(clk), .rst(rst), .samples(samples), .valid(valid), .word(w6), .word_valid(v6));
  tb_stream_checker #(.M(8), .NBITS(NBITS)) c8 (.clk(clk), .rst(rst), .samples(samples), .valid(valid), .word(w8), .word_valid(v8));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (MAX_BEATS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Raw ADC statistics.
  always @(posedge clk) begin
    if (valid) begin
      beats++;
      for (int l = 0; l < LANES; l++) begin
        raw_hist[samples[l]]++;
        raw_total++;
      end
    end
  end

  task automatic report(input int m, input real h [1:8], input longint bits, input int ck, input int fl);
    string line = "";
    for (int l = 1; l <= 8; l++) line = {line, $sformatf(" %0.5f", h[l])};
    $display("m=%0d  bits=%0d  H_min(l)/l for l=1..8:%s", m, bits, line);
    checks += ck;
    failures += fl;
    for (int l = 1; l <= 8; l++)
      check(h[l] > 0.98, $sformatf("m=%0d normalised min-entropy at l=%0d", m, l));
    check(bits >= longint'(NBITS), $sformatf("m=%0d produced ten million bits", m));
    // Rate: all four see the same beats; bits must track 4*m per beat.
    check(bits <= beats * 4 * m && bits >= beats * 4 * m - 2 * OUT_W,
          $sformatf("m=%0d sustains %0d bits per clock", m, 4 * m));
  endtask

  initial begin : stimulus
    real h [1:8];
    real raw_h, mean_acf, max_acf, a;
    longint top;
    checks = 0; failures = 0; beats = 0; raw_total = 0;
    for (int k = 0; k < 4096; k++) raw_hist[k] = 0;
    rst = 1'b1; enable = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    enable = 1'b1;
    while (c2.bits_seen < longint'(NBITS)) @(posedge clk);
    @(negedge clk);
    enable = 1'b0;
    repeat (4) @(posedge clk);

    top = 0;
    for (int k = 0; k < 4096; k++) if (raw_hist[k] > top) top = raw_hist[k];
    raw_h = -$ln(real'(top) / real'(raw_total)) / $ln(2.0);
    $display("raw ADC: %0d samples, min-entropy %0.3f of %0d bits per sample", raw_total, raw_h, ADC_W);
    check(raw_h < 11.0, "modelled ADC signal is not uniform");

    for (int l = 1; l <= 8; l++) h[l] = c2.hmin_norm(l);
    report(2, h, c2.bits_seen, c2.checks, c2.failures);
    for (int l = 1; l <= 8; l++) h[l] = c4.hmin_norm(l);
    report(4, h, c4.bits_seen, c4.checks, c4.failures);
    for (int l = 1; l <= 8; l++) h[l] = c6.hmin_norm(l);
    report(6, h, c6.bits_seen, c6.checks, c6.failures);
    for (int l = 1; l <= 8; l++) h[l] = c8.hmin_norm(l);
    report(8, h, c8.bits_seen, c8.checks, c8.failures);

    mean_acf = 0.0; max_acf = 0.0;
    for (int d = 1; d <= 100; d++) begin
      a = c6.acf(d);
      mean_acf += a / 100.0;
      if ((a < 0.0 ? -a : a) > max_acf) max_acf = (a < 0.0 ? -a : a);
    end
    $display("m=6 autocorrelation over delays 1..100: mean %e, largest magnitude %e", mean_acf, max_acf);
    check(max_acf < 0.003, "m=6 autocorrelation within 0.003 of zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
