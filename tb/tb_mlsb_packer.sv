// tb_mlsb_packer: self-checking test of the m-LSB truncation and packing.
//
// Random 12-bit words are driven with random gaps in in_valid. The reference
// model keeps a queue of single bits: for each valid beat it appends bit
// 0..M-1 of word 0, then of word 1, and so on. Whenever the queue reaches
// OUT_W bits the next clock must present an output word; its bits are popped
// and compared one at a time, so both the bit order and the cycle on which
// each word leaves are checked. A second phase drives valid beats back to
// back and checks the sustained rate: WORDS*M bits per clock.
module tb_mlsb_packer;
  import qrng_pkg::*;

  localparam int unsigned WORDS = LANES / 2;
  localparam int unsigned M     = M_LSB;
  localparam int unsigned BEATS = 3000;
  localparam int unsigned RATE_BEATS = 400;

  logic clk;
  logic rst;
  logic [WORDS-1:0][ADC_W-1:0] in_words;
  logic                        in_valid;
  logic [OUT_W-1:0]            out_word;
  logic                        out_valid;

  int checks;
  int failures;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  mlsb_packer dut (
    .clk       (clk),
    .rst       (rst),
    .in_words  (in_words),
    .in_valid  (in_valid),
    .out_word  (out_word),
    .out_valid (out_valid)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (BEATS + RATE_BEATS + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit  model_q[$];
  bit  exp_emit;
  int  words_out;
  int  bits_in;

  // Drive one beat, then check the clock edge that follows it.
  task automatic beat(input bit valid);
    for (int w = 0; w < WORDS; w++) in_words[w] = ADC_W'($urandom);
    in_valid = valid;
    if (valid) begin
      for (int w = 0; w < WORDS; w++)
        for (int b = 0; b < M; b++) model_q.push_back(in_words[w][b]);
      bits_in += WORDS * M;
    end
    exp_emit = (model_q.size() >= OUT_W);
    @(posedge clk);
    #1;
    check(out_valid == exp_emit, "word leaves on the clock after it is complete");
    if (out_valid && exp_emit) begin
      bit ok = 1'b1;
      for (int b = 0; b < OUT_W; b++) begin
        bit e = model_q.pop_front();
        if (out_word[b] != e) ok = 1'b0;
      end
      check(ok, "packed word equals next OUT_W kept bits");
      words_out++;
    end
    @(negedge clk);
  endtask

  initial begin : stimulus
    int start_words;
    checks    = 0;
    failures  = 0;
    words_out = 0;
    bits_in   = 0;
    rst       = 1'b1;
    in_valid  = 1'b0;
    in_words  = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < BEATS; n++) beat($urandom_range(0, 2) != 0);
    // Sustained rate with back-to-back beats.
    start_words = words_out;
    bits_in = 0;
    for (int n = 0; n < RATE_BEATS; n++) beat(1'b1);
    check((words_out - start_words) * OUT_W <= bits_in + OUT_W &&
          (words_out - start_words) * OUT_W >= bits_in - OUT_W,
          "sustained rate of WORDS*M bits per clock");
    $display("rate: %0d words of %0d bits for %0d beats (%0d bits/clock expected)",
             words_out - start_words, OUT_W, RATE_BEATS, WORDS * M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
