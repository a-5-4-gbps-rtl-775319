// qrng_top: real-time randomness extractor of the laser phase-noise QRNG.
//
// The photodetector signal is digitised by a 12-bit, 1.8 GS/s ADC outside
// this design; its samples arrive here LANES at a time. Extraction follows the
// paper in two steps: every two consecutive samples are XORed (xor_pair), and
// the M least significant bits of each XOR result are kept (mlsb_packer),
// which also packs them into OUT_W-bit words for the host link. With the
// paper's numbers (1.8 GS/s, pairs, m = 6) the output is 5.4 Gbit/s; with
// 8 lanes that is 24 bits per 225 MHz clock. The lane count, clock, word
// width and the absence of back-pressure are this design's own choices.
//
// Interface: adc_samples[l] is the l-th sample of a beat (lane 0 earliest),
// adc_valid qualifies the beat. rnd_word/rnd_valid is the packed random bit
// stream, bit 0 of a word being the earliest bit. Reset is synchronous,
// active high.
//
// Timing: two register stages. A beat's bits leave, at the latest, in the
// word presented two clocks after the beat that completes that word.
module qrng_top #(
  parameter int unsigned ADC_W = qrng_pkg::ADC_W,
  parameter int unsigned LANES = qrng_pkg::LANES,
  parameter int unsigned M     = qrng_pkg::M_LSB,
  parameter int unsigned OUT_W = qrng_pkg::OUT_W
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [LANES-1:0][ADC_W-1:0]   adc_samples,
  input  logic                          adc_valid,
  output logic [OUT_W-1:0]              rnd_word,
  output logic                          rnd_valid
);

  localparam int unsigned PAIRS = LANES / 2;

  // The measured min-entropy of an XORed word (9.59 bits) allows at most
  // 9 kept bits; keeping more would pass on bits that are not fully random.
  if (M > qrng_pkg::M_MAX_SAFE) begin : g_m_too_large
    $warning("qrng_top: M exceeds the min-entropy bound of the source");
  end

  logic [PAIRS-1:0][ADC_W-1:0] xor_words;
  logic                        xor_valid;

  xor_pair #(
    .ADC_W (ADC_W),
    .LANES (LANES)
  ) u_xor (
    .clk        (clk),
    .rst        (rst),
    .in_samples (adc_samples),
    .in_valid   (adc_valid),
    .out_words  (xor_words),
    .out_valid  (xor_valid)
  );

  mlsb_packer #(
    .ADC_W (ADC_W),
    .WORDS (PAIRS),
    .M     (M),
    .OUT_W (OUT_W)
  ) u_mlsb (
    .clk       (clk),
    .rst       (rst),
    .in_words  (xor_words),
    .in_valid  (xor_valid),
    .out_word  (rnd_word),
    .out_valid (rnd_valid)
  );

endmodule
