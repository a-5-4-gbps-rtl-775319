// qrng_pkg: constants shared by the randomness-extraction datapath.
//
// The laser phase-noise QRNG samples its photodetector with a 12-bit ADC at
// 1.8 GS/s, XORs every two consecutive samples and keeps the m = 6 least
// significant bits of each XOR result, which gives 0.9 G words/s x 6 bits =
// 5.4 Gbit/s. ADC_W, M_LSB and the sample rate are the paper's numbers.
// The FPGA cannot clock at 1.8 GHz, so the ADC bus is taken in parallel:
// LANES samples per clock (8 lanes at 225 MHz carry 1.8 GS/s). LANES, the
// clock and the output word width OUT_W are this design's own choices.
package qrng_pkg;

  // ADC resolution in bits (12-bit ADC12D1800).
  localparam int unsigned ADC_W        = 12;
  // ADC sample rate in samples per second.
  localparam longint unsigned SAMPLE_RATE = 64'd1_800_000_000;
  // Samples delivered per fabric clock; must be even so that pairs never
  // straddle two clock cycles.
  localparam int unsigned LANES        = 8;
  // Fabric clock that carries SAMPLE_RATE with LANES samples per cycle.
  localparam longint unsigned CLK_HZ   = SAMPLE_RATE / 64'(LANES);   // 225 MHz
  // Number of least significant bits kept from each XORed word.
  localparam int unsigned M_LSB        = 6;
  // Largest m that the measured min-entropy (9.59 bits per XORed word)
  // supports.
  localparam int unsigned M_MAX_SAFE   = 9;
  // Width of the packed random-bit words handed to the host link.
  localparam int unsigned OUT_W        = 32;

  // One ADC sample.
  typedef logic [ADC_W-1:0] sample_t;

endpackage
