// mlsb_packer: the m-LSB step of the randomness extractor, followed by a
// gearbox that packs the kept bits into a dense stream of OUT_W-bit words.
//
// From each XORed word only the M least significant bits are kept; the upper
// ADC_W-M bits are discarded. The paper keeps m = 6 of 12 bits: the measured
// min-entropy of an XORed word is 9.59 bits, so at most 9 could be kept, and
// 6 balances randomness against rate and the capacity of the host link.
// The kept bits form one continuous bit sequence: word 0 of a beat comes
// first, and inside a word bit 0 comes first. Bit i of the sequence ends up in
// bit (i mod OUT_W) of output word floor(i / OUT_W). The gearbox (packing
// into fixed OUT_W-bit words) is this design's own choice; the paper only
// says that the random bits are sent to a PC.
//
// Interface: in_words/in_valid as produced by xor_pair (WORDS words per
// beat). out_word/out_valid carry the packed stream; there is no back-
// pressure, the stream is real time and the consumer must take every word.
// WORDS*M must not exceed OUT_W, so that at most one word leaves per clock.
//
// Timing: the word that is completed by a beat is presented one clock after
// that beat (registered output). The buffer holds fewer than OUT_W bits
// between words, so bits wait at most until OUT_W of them have gathered. With
// the defaults (4 words x 6 bits = 24 bits per beat, OUT_W = 32) three output
// words leave for every four input beats: 24 bits per clock, 5.4 Gbit/s at
// 225 MHz. Reset (synchronous) empties the buffer.
module mlsb_packer #(
  parameter int unsigned ADC_W = qrng_pkg::ADC_W,
  parameter int unsigned WORDS = qrng_pkg::LANES / 2,
  parameter int unsigned M     = qrng_pkg::M_LSB,
  parameter int unsigned OUT_W = qrng_pkg::OUT_W
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [WORDS-1:0][ADC_W-1:0]   in_words,
  input  logic                          in_valid,
  output logic [OUT_W-1:0]              out_word,
  output logic                          out_valid
);

  localparam int unsigned IN_BITS = WORDS * M;
  // Largest fill: OUT_W-1 bits left over plus one full beat.
  localparam int unsigned BUF_W   = OUT_W - 1 + IN_BITS;
  localparam int unsigned FILL_W  = $clog2(BUF_W + 1);

  if (M < 1 || M > ADC_W) begin : g_bad_m
    $error("mlsb_packer: M must lie in 1..ADC_W");
  end
  if (IN_BITS > OUT_W) begin : g_bad_width
    $error("mlsb_packer: WORDS*M must not exceed OUT_W");
  end

  // M-LSB truncation: concatenate the kept bits, word 0 in the low bits.
  logic [IN_BITS-1:0] kept;
  always_comb begin
    for (int w = 0; w < WORDS; w++) begin
      kept[w*M +: M] = in_words[w][M-1:0];
    end
  end

  logic [BUF_W-1:0]  buf_q;    // gathered bits, bit 0 is the oldest
  logic [FILL_W-1:0] fill_q;   // number of valid bits in buf_q

  logic [BUF_W-1:0]  merged;
  logic [FILL_W-1:0] total;

  always_comb begin
    merged = buf_q;
    total  = fill_q;
    if (in_valid) begin
      merged = buf_q | (BUF_W'(kept) << fill_q);
      total  = fill_q + FILL_W'(IN_BITS);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      buf_q     <= '0;
      fill_q    <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (total >= FILL_W'(OUT_W)) begin
      out_word  <= merged[OUT_W-1:0];
      out_valid <= 1'b1;
      buf_q     <= merged >> OUT_W;
      fill_q    <= total - FILL_W'(OUT_W);
    end else begin
      out_valid <= 1'b0;
      buf_q     <= merged;
      fill_q    <= total;
    end
  end

  // Bits above the fill level are always zero, which lets new bits be ORed in.
  a_clean_buffer: assert property (@(posedge clk) disable iff (rst)
    (fill_q >= FILL_W'(BUF_W)) || ((buf_q >> fill_q) == '0));
  a_fill_bound: assert property (@(posedge clk) disable iff (rst)
    fill_q < FILL_W'(OUT_W));

endmodule
