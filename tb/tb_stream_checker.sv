// tb_stream_checker: passive reference model and statistics for one
// extractor instance, used by the workload testbench.
//
// It watches the extractor's ADC input and random-word output. The reference
// is a queue of single bits: per valid beat, bits 0..M-1 of
// sample[2p] != sample[2p+1] for each pair p. The extractor has two register
// stages, so the output seen at clock edge t must reflect the beats up to
// edge t-2: whenever those beats fill the queue to OUT_W bits a word must be
// valid and equal the next OUT_W queued bits, and otherwise no word may be
// valid.
//
// Over the first NBITS output bits it also estimates, as the source was
// characterised, the normalised min-entropy H_min(l)/l for block lengths
// l = 1..8 (H_min = -log2 of the most frequent l-bit pattern's frequency) and,
// if ACF is set, the autocorrelation for bit delays 1..100.
module tb_stream_checker #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned LANES = 8,
  parameter int unsigned M     = 6,
  parameter int unsigned OUT_W = 32,
  parameter longint unsigned NBITS = 64'd10_000_000,
  parameter bit          ACF   = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [LANES-1:0][ADC_W-1:0] samples,
  input  logic                        valid,
  input  logic [OUT_W-1:0]            word,
  input  logic                        word_valid
);

  localparam int unsigned PAIRS  = LANES / 2;
  localparam int unsigned MAXLAG = 100;

  int checks;
  int failures;
  longint bits_seen;
  longint words_seen;

  bit q[$];
  logic [1:0][LANES-1:0][ADC_W-1:0] s_pipe;
  logic [1:0]                       v_pipe;

  // Min-entropy histograms, one per block length l (pattern < 2**l).
  longint hist [1:8][256];
  int     pat  [1:8];
  int     plen [1:8];

  // Autocorrelation: agreements per delay.
  bit [MAXLAG-1:0] past;
  longint agree [1:MAXLAG];
  longint acf_n;

  function automatic void tally(input bit b);
    for (int l = 1; l <= 8; l++) begin
      pat[l] = (pat[l] << 1) | int'(b);
      plen[l]++;
      if (plen[l] == l) begin
        hist[l][pat[l]]++;
        pat[l]  = 0;
        plen[l] = 0;
      end
    end
    if (ACF) begin
      if (bits_seen >= longint'(MAXLAG)) begin
        for (int d = 1; d <= MAXLAG; d++) if (past[d-1] == b) agree[d]++;
        acf_n++;
      end
      past = {past[MAXLAG-2:0], b};
    end
  endfunction

  initial begin
    checks = 0; failures = 0; bits_seen = 0; words_seen = 0; acf_n = 0;
    past = '0; s_pipe = '0; v_pipe = '0;
    for (int l = 1; l <= 8; l++) begin
      pat[l] = 0; plen[l] = 0;
      for (int k = 0; k < 256; k++) hist[l][k] = 0;
    end
    for (int d = 1; d <= MAXLAG; d++) agree[d] = 0;
  end

  // Working variables of the checking process.
  bit exp_valid;
  bit ok;
  bit e;

  always @(posedge clk) begin
    if (rst) begin
      v_pipe <= '0;
    end else begin
      if (v_pipe[1]) begin
        for (int p = 0; p < PAIRS; p++)
          for (int k = 0; k < M; k++)
            q.push_back(s_pipe[1][2*p][k] != s_pipe[1][2*p+1][k]);
      end
      exp_valid = (q.size() >= OUT_W);
      checks++;
      if (word_valid != exp_valid) begin
        failures++;
        if (failures < 5) $display("FAIL m=%0d: word_valid=%0d expected %0d at %0t",
                                   M, word_valid, exp_valid, $time);
      end
      if (word_valid && exp_valid) begin
        ok = 1'b1;
        for (int k = 0; k < OUT_W; k++) begin
          e = q.pop_front();
          if (word[k] != e) ok = 1'b0;
          if (bits_seen < longint'(NBITS)) tally(word[k]);
          bits_seen++;
        end
        words_seen++;
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 5) $display("FAIL m=%0d: word %0d differs from reference", M, words_seen);
        end
      end
      s_pipe <= {s_pipe[0], samples};
      v_pipe <= {v_pipe[0], valid};
    end
  end

  function automatic real hmin_norm(input int l);
    longint total = 0, top = 0;
    for (int k = 0; k < (1 << l); k++) begin
      total += hist[l][k];
      if (hist[l][k] > top) top = hist[l][k];
    end
    if (total == 0) return 0.0;
    return -($ln(real'(top) / real'(total)) / $ln(2.0)) / real'(l);
  endfunction

  function automatic real acf(input int d);
    if (acf_n == 0) return 0.0;
    return 2.0 * real'(agree[d]) / real'(acf_n) - 1.0;
  endfunction

endmodule
