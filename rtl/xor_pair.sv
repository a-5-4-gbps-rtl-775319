// xor_pair: the XOR step of the randomness extractor.
//
// Every two consecutive ADC samples are combined by a bitwise XOR into one
// word, halving the word rate (1.8 GS/s in, 0.9 G words/s out). XORing two
// samples flattens the bias of the raw, non-uniform intensity distribution;
// the pairing of non-overlapping consecutive samples follows the paper, and
// it is the pairing that makes 1.8 GS/s / 2 x 6 bits equal 5.4 Gbit/s.
//
// Interface: in_samples carries LANES samples per clock, lane 0 being the
// earliest in time. LANES must be even; lanes 2p and 2p+1 form pair p, so no
// pair spans two clock cycles. in_valid qualifies a beat (the ADC bus may
// pause); out_words[p] = in_samples[2p] ^ in_samples[2p+1].
//
// Timing: one register stage. out_valid is in_valid delayed by one clock,
// and out_words then holds the XORs of the beat sampled on that edge. Reset
// is synchronous and clears out_valid only; out_words is a plain data
// register.
module xor_pair #(
  parameter int unsigned ADC_W = qrng_pkg::ADC_W,
  parameter int unsigned LANES = qrng_pkg::LANES
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic [LANES-1:0][ADC_W-1:0]      in_samples,
  input  logic                             in_valid,
  output logic [LANES/2-1:0][ADC_W-1:0]    out_words,
  output logic                             out_valid
);

  localparam int unsigned PAIRS = LANES / 2;

  if (LANES < 2 || (LANES % 2) != 0) begin : g_bad_lanes
    $error("xor_pair: LANES must be even and at least 2");
  end

  logic [PAIRS-1:0][ADC_W-1:0] xored;

  always_comb begin
    for (int p = 0; p < PAIRS; p++) begin
      xored[p] = in_samples[2*p] ^ in_samples[2*p+1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
    end
    if (in_valid) begin
      out_words <= xored;
    end
  end

endmodule
