# A2SCL: an asymmetric adaptive SCL decoder and a Polar-code emulation platform

Measuring the frame error rate (FER) of a Polar code down to 10^-8 or lower
takes billions of frames. A list decoder (SCL) reaches those error rates,
but it is several times larger and slower than a plain successive-cancellation
(SC) decoder. At the signal-to-noise ratios of interest, an SC decoder
already decodes almost every frame correctly: a CRC attached to the
information bits shows which of its frames failed. So the decoder here is
*asymmetric*. Many small SC decoders take every frame. Only the frames whose
CRC fails go to one shared SCL decoder. Its throughput is that of the SC bank,
and its error rate is close to that of SCL decoding alone.

The RTL wraps the decoder in a complete link-level emulator:

```
 setting_controller (register port) ---------------------------------------------+
        | cfg                                                                     |
  9 x [ enc_modulator ] -> 9 x [ awgn_channel ] -> input_scheduler (1:2)          |
   random_data -> crc_insert -> frozen_insert -> polar_encoder                   |
                                                      |                          |
                                   +------------------v-------------------+      |
                                   | a2scl_decoder                        |      |
                                   |  18 x sc_decoder --CRC fail--> fail_ |      |
                                   |                               scheduler    |
                                   |                                 |          |
                                   |                      scl_decoder (L<=8)    |
                                   +------------------+-------------------+      |
                                                      v                          |
                                                fer_statistic -------------------+
```

The top module is `a2scl_platform`. It has nine transmit chains, nine
channels and eighteen SC decoders, and supports code lengths up to
N = 1024, list sizes up to 8 and CRCs up to 24 bits.

## Polar coding in this design

* **Code.** A frame of N = 2^n bits (n = 5..10) is c = u·F^{⊗n} with
  F = [1 0; 1 1]. It is in natural bit order, with no bit reversal.
  Recursively, enc(a‖b) = enc(a) ⊕ enc(b) ‖ enc(b).
* **Sub-channel table.** Which positions of u are frozen (type 0),
  information (type 1) or parity-check (type 2) comes from a run-time table
  `cfg.sub_type`, with 2 bits per position. Code construction is therefore
  the host's job, and any reliability order can be used.
* **K.** K counts the information bits *including* the CRC. K − crc_len
  random bits are drawn per frame. The CRC is appended MSB first, with zero
  initial value and no reflection. Its length (≤ 24) and polynomial are
  registers. The reset default is the 24-bit polynomial 0xB2B117 (CRC24C).
* **Parity-check bits.** These follow the 5G rule: a 5-bit cyclic register
  is rotated at every position. An information bit is XORed into its y0, and
  a parity-check position takes y0.

## SC decoding schedule (`sc_core`)

The LLR memory is laid out as a heap:

* Stage s (2^s LLRs) lives at addresses [2^s, 2^{s+1}).
* The channel LLRs are at [N, 2N).
* Stage 0 is the decision.

Decoding bit i:

1. It starts at stage ctz(i), where ctz is the number of trailing zeros of i.
   That stage is computed with g; i = 0 starts at the top.
2. Every stage below it is computed with f.
3. The decision is made.

P = 16 processing elements compute one stage slice per cycle, and a
sub-decoder at stage s takes ⌈2^s/P⌉ cycles.

* f is the min-sum rule sign(a)·sign(b)·min(|a|,|b|).
* g is b ± a, saturated, with the sign taken from the partial sum.
* The partial sums are kept as a second heap of bits, `bl`.
* After bit i is decided, `psum_update` merges the finished right children
  upward while bit t of i is 1. It stores the result as the new left child
  at the first stage t where bit t of i is 0. This update is one combinational
  step per decoded bit.

Decode time for a length-N frame is Σ_s (N/2^s)·⌈2^s/16⌉ + N + 1 cycles:

| N    | SC/SCL decode | LLR load |
|------|---------------|----------|
| 1024 | 3329          | 64       |
| 512  | 1633          | 32       |
| 256  | 801           | 16       |

Frozen bits are forced to 0 and parity-check bits take the register value.
Both still advance the partial sums. A bit-serial CRC runs over the
information bits as they are decided. `crc_ok` is valid with `done`.

## List decoding (`scl_core`)

The list decoder runs the same schedule for up to L_MAX = 8 paths in lock
step:

* Each path has its own LLR heap, partial-sum heap, PC register and CRC
  register.
* At an information bit every live path is split in two. The penalty |LLR| is
  added to a path metric (PM) when the chosen bit disagrees with the hard
  decision.
* The 2L candidates are ranked by PM, with ties going to the lower candidate
  index. The best `list_size` survive.
* A survivor copies its parent's whole state. This is simple, but it is the
  largest part of the core.

PMs are 20 bits and saturate. The decoder returns the lowest-PM path whose
CRC is zero. If there is none, it returns the lowest-PM path, with
`crc_ok` = 0. Because all paths are processed at once, a frame takes the same
number of cycles as in `sc_core` plus one selection cycle, whatever L is.

## Fixed point

| quantity | format |
|---|---|
| channel sample | 16-bit signed, 11 fraction bits; BPSK ±1.0 = ±2048 |
| SC decoder LLR | sample >>> 6, saturated to 8 bits |
| SCL decoder LLR | sample >>> 2, saturated to 12 bits |
| noise scale `sigma` | Q4.12 standard deviation (0x1000 = 1.0) |

The LLR is proportional to the received value. The constant 2/σ² is
dropped, which changes nothing for min-sum decoding.

## Gaussian noise (`urng`, `gauss_gen`, `awgn_channel`)

**Uniform words.** `urng` produces 32-bit uniform words. It XORs two sources:

* a 43-bit LFSR (x^43+x^41+x^20+x+1, 32 steps per word);
* a 37-bit cellular-automaton register (rule 90, with rule 150 at cell 28).

**Inverse CDF.** `gauss_gen` turns a uniform word into a normal sample with
a piecewise-linear inverse CDF:

* Bit 31 is the sign.
* t = ~u[30:0] is the distance into the tail.
* The 64 segments of one half are placed per octave of t: four segments per
  octave for 15 octaves, and the last four cover t < 2^-15.
* The 12 bits below the segment index are the offset inside the segment.
* A 64-entry table (`rtl/icdf_rom.hex`) holds each segment's start value and
  its rise, both Q.11.
* The magnitude is start + rise·offset/4096, then scaled by `sigma`.

The pipeline is three stages. Measured over 20k samples, the variance is
within 3% of 1 and the 3σ tail is 0.27%. The octave placement is what makes
the tail right: equal-width segments give a variance of about 1.2.

**Channel.** `awgn_channel` has 16 generators with different seeds. It
modulates one coded frame and emits it as N/16 beats of 16 noisy samples.
The matching 16 reference bits ride in the same beat (`pkt_beat_t`).
Reference bits travel with the packet all the way to the decoders, so every
decoder can check its own result without a global lookup.

## Transmit chain (`enc_modulator`)

The transmit chain is `random_data` → `crc_insert` → `frozen_insert` →
`polar_encoder`. Stages hand over whole frames with valid/ready:

* `random_data` makes 32 bits per cycle.
* `crc_insert` handles 32 bits per cycle.
* `frozen_insert` places 32 positions per cycle.

The encoder first encodes each 32-bit slice as a length-32 code with a fixed
XOR network (N/32 cycles). It then runs the remaining n − 5 butterfly levels
over 32-bit words, one word pair per cycle (N/64 cycles per level). This
gives 112 cycles at N = 1024. A 4-deep FIFO keeps each frame's information
bits for the reference path. An assertion checks that it never overflows.

## Scheduling and the asymmetric decoder

**Input scheduler.** `input_scheduler` statically gives channel c the SC
decoders 2c and 2c+1. Each packet goes to whichever of the two is free,
alternating when both are.

**SC decoder.** An `sc_decoder` receives a packet into its LLR buffer, which
keeps the raw 16-bit samples, and its reference buffer. It quantizes the
samples to 8 bits while loading the core, decodes, and reports
`res_valid`/`res_err`. If the CRC fails, it reports nothing. It instead
offers the *raw* packet on its forward port and stays blocked (`sc_stall`)
until the packet has been taken.

**Fail scheduler.** `fail_scheduler` picks one blocked SC decoder round
robin and streams its whole packet to the SCL decoder.

**SCL decoder.** `scl_decoder` has a two-packet buffer, so one failed packet
can wait while another is being decoded. It re-quantizes the samples to
12 bits, decodes with `list_size` paths, and reports the result.

A frame's result therefore comes either from its SC decoder (CRC passed) or
from the SCL decoder. Never both, never neither. `fer_statistic` counts:

* frames;
* frame errors (the decoded information differs from the reference);
* SC hand-overs;
* frames whose SCL output still fails the CRC.

## Register port (`setting_controller`)

A host writes the registers through `reg_wr/reg_addr/reg_wdata`. Read data
on `reg_rdata` is combinational from `reg_addr`. Unlisted addresses below 0x10
read back the written registers.

| addr | R/W | content |
|---|---|---|
| 0x000 | W | CTRL: bit0 start (clears the counters, reloads the seeds), bit1 stop |
| 0x001 | W | n = log2 N (5..10) |
| 0x002 | W | K (information + CRC bits) |
| 0x003 | W | CRC length (0..24) |
| 0x004 | W | CRC polynomial (without the top bit) |
| 0x005 | W | list size (1..8) |
| 0x006 | W | noise sigma, Q4.12 |
| 0x007 | W | seed (the 80-bit seed is this word replicated and XORed with a constant) |
| 0x008 | W | TARGET: number of frames in a run |
| 0x100+w | W | sub-channel types of positions 16w..16w+15, 2 bits each |
| 0x010 | R | STATUS: bit0 running, bit1 done |
| 0x011/0x012 | R | frames, low/high word |
| 0x013/0x014 | R | frame errors, low/high word |
| 0x015 | R | SC CRC failures handed to the SCL decoder |
| 0x016 | R | SCL outputs that still fail the CRC |
| 0x017 | R | frames issued by the transmit side |

The reset defaults are N = 1024, K = 512, CRC24C, L = 8 and σ = 0.5. The
sub-channel table resets to all frozen. A run releases exactly TARGET frames
into the channels. STATUS.done and the `done` pin rise when all TARGET
results have been counted.

## Throughput

Each SC decoder spends about N/16 load cycles plus its decode time per
frame:

* N = 1024: about 3.4k cycles per frame, so 18 decoders finish one frame
  every ~190 cycles.
* The transmit side is far faster: nine chains, each producing one frame
  per 112 cycles.

So the SC bank sets the rate, and the SCL decoder only has to keep up with
the CRC failures. The SCL decoder is not faster than an SC decoder, because
it processes all L paths in parallel. So the hand-over rate it can absorb is
about 1/18 of the frames. With many more failures, SC decoders stall waiting
for the fail scheduler. This is visible on `sc_stall` and is counted by the
end-to-end testbenches.

## Departures from the published design

* **No acceleration in the SC decoder.** The published SC decoders use
  syndrome-check acceleration, decoded-bit recovery and a two-packet
  pipelined ("double-packet") mode. The published list decoder is
  decision-aided. The published cycle counts are much lower than here: 221
  cycles for an SC frame and 1073 for an SCL frame at (1024, 512). None of
  these speed-ups is built. The cores are plain semi-parallel SC and SCL
  with P = 16.
* **Full LLR heap.** The published cores keep intermediate LLRs only for
  pairs of neighbouring stages, to save memory. Here every stage has its own
  slice of a 2N-entry heap, which is simpler to schedule but larger.
* **List-size control.** The published list decoder supports L = 2, 4 or 8.
  Here any list size from 1 to 8 can be set.
* **Single-frame encoder.** The encoder holds one frame. The second XOR
  operand is read through a second memory read port, not from a separate
  half-length buffer. The published encoder pipelines up to three frames.
* **No rate matching.** Shortening, puncturing and repetition are not
  built. Only mother-code lengths 32..1024 can be emulated, with any
  construction loaded into the sub-channel table.
* **Host side.** The PCI-E link and the host are replaced by the register
  port.
* **Own choices.** These are not specified by the publication:
  * the schedulers' grouping and arbitration;
  * the register map;
  * the random-generator taps and cellular-automaton rule;
  * the noise-table segmentation;
  * the LLR scaling shifts;
  * the packet beat format.

## Files

* `rtl/a2scl_pkg.sv` holds the shared types and constants, the
  configuration struct, the f/g, CRC and partial-sum functions.
* Every other `rtl/*.sv` holds one module named like its file.
* `rtl/icdf_rom.hex` is the noise table. It is read by a path relative to
  the project root, so run simulations from there.
* `tb/polar_ref_pkg.sv` holds the bit-true reference models used by the
  testbenches:
  * code construction by a simple weight ranking;
  * CRC and PC-bit placement;
  * a recursive encoder;
  * a recursive min-sum SC decoder.
* `tb/tb_<module>.sv` is the self-checking testbench of each module. Each
  prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

The end-to-end testbenches:

* `tb_a2scl_platform` runs the full top at its default parameters with
  N = 128, K = 64, CRC-11, three PC bits and heavy noise. It checks that
  every mechanism happens: SC success, hand-over, SCL recovery, SC stall and
  channel back-pressure.
* `tb_a2scl_full` runs the defaults at full size: N = 1024, K = 512, CRC24C,
  1000 frames, about 10 s of simulation.

## Simulating

With Verilator 5, from the project root:

```
verilator --binary --timing --assert -j 8 --top-module tb_a2scl_full \
  -y rtl -y tb +libext+.sv rtl/a2scl_pkg.sv tb/polar_ref_pkg.sv tb/tb_a2scl_full.sv
./obj_dir/Vtb_a2scl_full
```

Replace `tb_a2scl_full` with any other testbench name. The top builds in
about 40 s.

## Trust

* **Cores.** Each core is compared bit-exactly against the reference SC
  decoder on random frames, noiseless and noisy. The list decoder is checked
  to decode at least as well as SC, and to rescue frames that SC loses.
* **Other blocks.** The encoder, CRC, PC insertion and noise statistics are
  checked against independent models.
* **Fault copies.** Every testbench was also run against a deliberately
  broken copy of its module and failed.
* **Not checked.** No FER curve has been measured against floating-point
  simulation.
* **Synthesis.** The design has not been synthesized for an FPGA. The
  list-decoder path-state copy (8 × (2N LLRs + N partial sums) words per
  split) is the part most in need of a memory-based implementation.
