# Real-time randomness extractor for a 5.4 Gbit/s laser phase-noise QRNG

A laser run just above threshold has a phase that wanders randomly because of
spontaneous emission, which is a quantum process. The generator this RTL belongs to
turns that phase noise into intensity noise with a single fibre beam splitter. One
input of a 2x2 50/50 splitter takes the laser light. One output goes to a photodetector.
The other output feeds a 4 m fibre loop (20 ns per round trip) that closes back onto
the second input. The detector therefore sees the laser interfering with delayed
copies of itself, and the intensity follows the phase differences. A 12-bit ADC
samples the detector at 1.8 GS/s.

The ADC codes are not uniformly distributed: the intensity has a bell-shaped
distribution around the mean. Two cheap operations turn them into random bits in
real time:

1. **XOR of sample pairs.** Every two consecutive samples are combined by a bitwise
   XOR into one 12-bit word. This halves the word rate to 0.9 G words/s and flattens
   the distribution. The min-entropy of one XORed word was measured at about
   9.59 bits, so at most 9 of its bits may be kept.
2. **m-LSB.** Only the m least significant bits of each XORed word are kept. The
   generator keeps m = 6. This trades some margin below the 9-bit bound for rate,
   and suits the link to the host.

0.9 G words/s x 6 bits = **5.4 Gbit/s**. This repository holds that extraction
datapath as synthesizable SystemVerilog, plus testbenches. The optics, the
detector, the ADC and the host link are not logic, and they are not part of the RTL.

## Signal path and what is in RTL

```
 laser -> splitter/delay loop -> photodetector -> ADC (12 bit, 1.8 GS/s)
                                                     |  LANES samples per clock
                                                     v
                                  qrng_top:  xor_pair -> mlsb_packer -> 32-bit words
```

| file | what it is |
|---|---|
| `rtl/qrng_pkg.sv` | shared constants: `ADC_W = 12`, `LANES = 8`, `M_LSB = 6`, `OUT_W = 32`, sample rate and clock |
| `rtl/xor_pair.sv` | XOR of lanes 2p and 2p+1, one register stage |
| `rtl/mlsb_packer.sv` | keeps M LSBs of each word and packs the bit stream into OUT_W-bit words |
| `rtl/qrng_top.sv` | the two stages wired together; ADC bus in, random words out |

## Carrying 1.8 GS/s in an FPGA: lanes and clock

No FPGA fabric runs at 1.8 GHz, so the ADC bus is taken in parallel: `LANES`
samples arrive per clock, lane 0 being the earliest. The default of 8 lanes needs a
225 MHz clock for 1.8 GS/s. `LANES` must be even, so that pairs always sit inside one
clock beat: lanes 0/1, 2/3, 4/5 and 6/7 are XORed. The XOR stage then delivers
4 words per clock, and the m-LSB stage 4 x 6 = 24 bits per clock. At 225 MHz that is
5.4 Gbit/s. The lane count and the clock are this implementation's own choices, not
taken from the published design. Any even lane count works if the clock is scaled to
match (for example 4 lanes at 450 MHz).

## The packer: how kept bits become output words

This is the one part with state, and so the one to understand before changing
anything.

The kept bits form a single continuous sequence:
- word 0 of a beat comes first;
- inside a word, bit 0 comes first.

Bit *i* of the sequence is placed in bit *i mod 32* of output word *floor(i / 32)*.
24 bits per beat do not divide 32, so a 56-bit buffer holds the leftover bits:

- each valid beat ORs its 24 new bits in above the `fill` bits already held;
- when `fill + 24 >= 32`, the low 32 bits go out as a word, and the rest shift down.

The buffer never holds 32 or more bits after a clock, so at most one word leaves
per clock. With continuous input, three words leave for every four beats. The
parameters must satisfy `WORDS*M <= OUT_W`; the module stops elaboration otherwise.
Two assertions guard the invariants:
- the fill level stays below OUT_W;
- no bits are set above the fill level.

There is no back-pressure. The source is a continuous physical process, and the
consumer must accept a word on every clock that `rnd_valid` is high. A host link
that cannot keep up needs its own FIFO; one is not included here.

## Interface and timing of `qrng_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | fabric clock, 225 MHz for the default 8 lanes |
| `rst` | in | 1 | synchronous, active high; clears the valid bits and the packer buffer |
| `adc_samples` | in | LANES x 12 | one beat of ADC codes, lane 0 earliest |
| `adc_valid` | in | 1 | the beat is valid (the ADC stream may pause) |
| `rnd_word` | out | OUT_W | 32 random bits, bit 0 the earliest |
| `rnd_valid` | out | 1 | `rnd_word` is new on this clock |

There are two register stages. A beat sampled on clock edge *k* is XORed on edge
*k*. On edge *k+1* it enters the packer. If it completes a word, that word is
visible after edge *k+1*. Upper ADC bits only feed the XOR of bits that are later
dropped, so synthesis trims the datapath to M bits per pair.

Parameters of `qrng_top`: `ADC_W` (12), `LANES` (8), `M` (6), `OUT_W` (32).
Elaboration gives a warning if `M` exceeds 9, the bound set by the measured
min-entropy.

## Where this RTL goes beyond, or departs from, the published design

Taken from the published design:
- 12-bit samples at 1.8 GS/s;
- XOR of every two consecutive samples;
- m = 6 least significant bits kept, with 9 as the upper bound;
- 5.4 Gbit/s output.

Choices made here, because the published design does not state them:
- **Pairing.** Pairs do not overlap: samples (0,1), (2,3), and so on. "XOR every 2
  samples" could also be read as a sliding pair. Only non-overlapping pairs give the
  stated 5.4 Gbit/s, so that reading was used.
- **Parallel bus.** 8 lanes at 225 MHz.
- **Bit order.** The order of the output sequence and the 32-bit word packing.
- **Handshake and reset.** No back-pressure; synchronous active-high reset.
- **m is fixed at build time.** It is a parameter, not a run-time register. The
  published evaluation compares m = 2, 4, 6 and 8 but runs with m = 6.

Not modelled: the laser and its driver, the splitter and delay loop, the
photodetector, the ADC (a commercial part whose interface the design does not
describe) and the link to the PC. The offline randomness analysis (min-entropy,
autocorrelation, NIST-STS, Diehard) is software and not hardware. The testbenches
reproduce the first two on simulated data.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. Each one
computes its reference independently of the RTL (bit by bit, from the ADC samples).

| testbench | what it shows |
|---|---|
| `tb/tb_xor_pair.sv` | every XOR word and the one-clock latency, with random pauses in the input |
| `tb/tb_mlsb_packer.sv` | every packed bit against a bit queue; the exact clock each word leaves; 24 bits/clock sustained |
| `tb/tb_qrng_top.sv` | default build end to end: 5,000 beats with pauses, then 10^7 bits back to back. Measures 24 bits/clock = 5.4 Gbit/s. Fails if a mechanism never occurred: an ADC pause, an XOR mixing two samples, upper bits being dropped, a word spanning two beats |
| `tb/tb_qrng_workloads.sv` | m = 2, 4, 6, 8 side by side on a simulated detector signal (details below) |
| `tb/tb_qrng_1gbit.sv` | 10^9 bits through the default build, every word checked, bias of ones below 2e-4, 24 bits/clock exactly |

`tb_qrng_workloads` in more detail:
- **Source.** `tb_pd_adc_model` produces correlated Gaussian codes around mid-scale,
  with a raw min-entropy of about 9.1 of 12 bits.
- **Measurements.** Over 10^7 output bits it computes H_min(l)/l for block lengths
  l = 1..8 and, for m = 6, the autocorrelation over delays 1..100.
- **Results on the model source.** All H_min(l)/l values are above 0.99, and they
  fall slowly with l. At l = 8 this fall is largely the estimator's own sampling
  noise at 10^7 bits. The largest autocorrelation is about 1e-3.

The source model is an assumption made for testing. It is not measured detector
data, so these figures show that the datapath keeps the right bits. They say
nothing about the real physical source.

Simulating with Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qrng_pkg.sv tb/tb_qrng_top.sv --top-module tb_qrng_top
./obj_dir/Vtb_qrng_top
```

Replace `tb_qrng_top` with any testbench name above. `tb_qrng_1gbit` runs for
about a minute; the others run in seconds.

## Changing the design

- **Different m.** Override `M` on `qrng_top`. The output rate becomes
  LANES/2 x M bits per clock. Keep `LANES/2*M <= OUT_W`, or widen `OUT_W`.
- **Different ADC demultiplexing.** Set `LANES` (even) to the number of samples per
  clock, and scale the clock to match.
- **A host link with flow control.** Put a FIFO after `rnd_word`, sized for the
  longest stall the link can have. Dropping or pausing the stream is a policy
  decision this design leaves to the integrator.
