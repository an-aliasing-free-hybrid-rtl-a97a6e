# BFO: a two-voice additive-synthesis oscillator chip in SystemVerilog

A classic problem of digital synthesisers is aliasing. A sawtooth or pulse
wave drawn sample by sample contains harmonics far above half the sample rate,
and those fold back into the audible band as inharmonic noise. The BFO ("big
Fourier oscillator") avoids the problem by not drawing the waveform at all. It
adds the waveform up from its partials, one sinusoid at a time, and leaves out
every partial that would lie at or above fs/2. No partial is ever aliased,
so the output is alias-free by construction.

The cost is arithmetic. One oscillator sums up to K = 1024 partials for every
sample at fs = 96 kHz. The chip runs every oscillator at K·fs = 98.304 MHz and
gives each partial one clock cycle: in each clock, one CORDIC rotator turns one
(a_k, b_k) pair into one term of the sum. A chip holds two voices (L and R) of
four such oscillators each, so it computes 8192 partials per sample. The four
oscillators of a voice are summed, the two voices pass through a 2×2 mixing
matrix, and the result leaves the chip over I2S (24 bits) or through two 1-bit
PDM outputs. All coefficients and settings are written over SPI.

This repository holds synthesisable RTL for the whole digital chip. The design
follows the published BFO ASIC ("An Aliasing-Free Hybrid Digital-Analog
Polyphonic Synthesizer"): its number formats, its argument trick, its CORDIC
structure, its oscillator, voice and mixer organisation, and its extra features
(subwaves, alias band, bit and rate crushers, PDM, clipping flags). The
published description leaves some things open: the memory map, the interface
formats, the internal word lengths and the exact timing. These were chosen
here, and each choice is stated below and in the header comment of the module
concerned.

## 1. What one oscillator computes

Each oscillator produces

    x[l] = Σ_{k ∈ S}  a_k·cos(2π·(f/fs)·n_k·l) + b_k·sin(2π·(f/fs)·n_k·l)

where S holds the partials whose frequency f·n_k lies inside the allowed band
(by default below fs/2). The parameters per oscillator are:

| quantity | format {sign, int, frac} | meaning |
|---|---|---|
| a_k, b_k | {s,0,31} | cosine and sine amplitude of partial k |
| n_k | {u,16,16} | frequency multiplier of partial k |
| f/fs | {u,0,32} | base frequency relative to fs (22.4 µHz steps at 96 kHz) |
| f_HP, f_LP | {u,0,32} | alias band: sum partials with f_HP ≤ (f/fs)·n_k < f_LP |
| v_1..v_4 | {s,1,30} | weights of the four subwaves |
| bit mask | 32 bits | bit-crusher mask |
| rate | {u,0,32} | rate-crusher hold rate relative to fs |

The multiplier n_k does not have to be an integer. It has 16 fraction bits, so
one oscillator can produce harmonic, inharmonic (bell-like) and subharmonic
spectra as well as ordinary waveforms. The formats of a_k, b_k, n_k and f/fs
are the published ones. The formats of the weights and of the rate register
are this design's, chosen so that a weight of exactly 1.0 exists and v_1 = 1
reproduces the sum unchanged.

## 2. One argument for all 1024 partials

This is the part of the design that is least obvious, and the part that makes
the oscillator cheap.

The phase of partial k at sample l, counted in turns (1 turn = 2π), is
θ_k[l] = frac((f/fs)·n_k·l). Two obvious ways to compute it are both
expensive. Multiplying by l directly needs a very wide l, because the
oscillator must never visibly restart. Keeping a running phase per partial,
θ_k ← θ_k + (f/fs)·n_k, needs a second 1024-entry memory that is read and
written every clock.

The BFO keeps a single base argument θ = (f/fs)·l instead, and forms every
partial's phase as θ_k = frac(θ·n_k), with one multiplication per partial. The
catch is that θ cannot be kept modulo 1. Take θ = 1 and n_k = 1.5:
frac(θ)·n_k = 0, but θ·n_k = 1.5 has fraction 0.5. Dropping the integer part of
θ loses information whenever n_k has a fraction.

θ must keep some integer bits, and the number it needs is finite. If θ is kept
modulo m, the error in θ·n_k is a multiple of m·n_k. If m·n_k is an integer,
that error disappears modulo 1. n_k has 16 fraction bits, so n_k·2^16 is always
an integer, and m = 2^16 is enough:

    θ ← (θ + f/fs) mod 2^16            (θ in {u,16,32}, 48 bits)
    θ_k = frac(θ · n_k)                 exact for every representable n_k

In hardware the modulo costs nothing: θ is a 48-bit register that is allowed to
wrap (`arg_accumulator`). The product θ·n_k is 48 × 32 bits, and only its
fraction is needed. `partial_arg_mult` keeps the top 32 fraction bits (it
truncates the 16 below them) and feeds them to the CORDIC as θ_k in {u,0,32}.
Integer partial frequencies would need only m = 1. The 16 integer bits exist
for the fractional ones. `tb_arg_accumulator` runs θ through more than one
full wrap. `tb_partial_arg_mult` checks the product against an exact
reference for random θ and n_k, and for cases of the kind shown above.

θ advances once per sample, after the last partial of the sample has read it.
It starts at 0 when the oscillator leaves reset.

## 3. The CORDIC: sine and cosine in turns

A single rotation by the angle θ_k does all the work for a partial. The vector
(a_k, −b_k) is rotated by 2π·θ_k, and the first component of the result is
a_k·cos + b_k·sin, which is exactly one term of the sum. `cordic` computes this
rotation without multipliers:

1. **Quadrant correction.** The top two bits of θ_k choose an exact rotation by
   0°, 90°, 180° or 270°, done with swaps and negations. The remaining angle is
   below a quarter turn.
2. **M = 26 micro-rotations.** Stage m rotates by ±atan(2^-m). Each stage uses
   only shifts and additions, and the sign comes from the angle still left
   over. The angles atan(2^-m) are stored in turns rather than radians. The
   remaining angle therefore has the same unit as θ_k, and no 2π ever appears.
   The table `CORDIC_ATAN` in `bfo_pkg` holds round(atan(2^-m)/(2π)·2^36).
3. **Scaling** by the constant gain correction κ = Π(1 + 2^-2m)^-1/2
   (`CORDIC_KAPPA`, 0.6073 in {u,0,32}), then rounding to {s,2,31}.

The pipeline is fully unrolled: one stage per micro-rotation, a new partial
every clock, and a latency of M + 2 = 28 clocks. A tag travels alongside the
data. It carries the partial index, the first and last flags of a sample, and
the alias decision. Internally the datapath uses 40-bit words with 36 fraction
bits and a 38-bit angle with 36 fraction bits. These guard bits keep the
rounding of 26 stages well below the target accuracy of about 24 fraction bits.
The quadrant correction, M = 26 and turn-based angles are the published
structure. The word lengths, rounding and pipeline registers are this design's
own. `tb_cordic` compares 20 000 random rotations and the quadrant boundaries with
a double-precision model. It requires errors below 2^-24, and the worst error
it measures is 3.8·10^-8.

## 4. The oscillator pipeline

`oscillator` chains the blocks below. After reset every stage advances by one
partial each clock, without stalls:

```
 S0  partial counter k = 0..K-1 ─► coef_regfile (K × 96 bits: a_k, b_k, n_k)
 S1  word read; θ·n_k (partial_arg_mult); (f/fs)·n_k vs [f_HP, f_LP) (alias_control)
 S2  θ_k, a_k, b_k, pass/first/last/k ─► cordic (28 clocks)
     ─► sample_accumulator: add partial into subwave sum 1..4 if pass
     ─► osc_output: Σ v_i·x_i, round, clip, bit-crusher, rate-crusher ─► y
```

* A new sample leaves every K clocks (`sample_valid`). The first one appears
  K + 32 clocks after reset. The 32 is the pipeline depth: read, multiply,
  CORDIC, accumulate and output.
* θ advances when the last partial of a sample passes the multiplier, so the
  next partial sees the new θ, with no bubble.
* Each sample's subwave sums are 44 bits wide (a 34-bit partial plus log2 K
  bits of growth). They cannot overflow, even with all 1024 partials at full
  scale.
* All eight oscillators leave reset together and never stall, so they run in
  lock step. The mixer uses the `sample_valid` of oscillator 0 for all of
  them, and an assertion in `bfo_top` checks that they agree.
* The register file has one write port (from SPI) and one synchronous read
  port (to the pipeline). A write takes effect the next time that partial is
  read. Rewriting coefficients while the oscillator runs is allowed. Changing
  them too quickly can produce spectral content of its own, which the alias
  rule cannot prevent.

## 5. Which partials are summed: the alias band

`alias_control` multiplies (f/fs)·n_k exactly, giving a 64-bit product in
{u,16,48}. It passes the partial only if f_HP ≤ (f/fs)·n_k < f_LP. Both
limits are in [0, 1), and their reset values are 0 and 0.5. The reset setting
is the alias-free rule: only partials below fs/2 are summed. Other settings
act as an ideal band-pass filter. Raising f_LP above 0.5 lets aliasing back in
on purpose, and raising f_HP removes low partials. The decision is made again
for every partial of every sample. A pitch change therefore removes or restores
partials at the exact sample where they cross the limit.

The band test is the published feature. Computing it with a full-width
multiplier beside the θ·n_k multiplier is this design's choice.

## 6. Subwaves

The K partials of an oscillator can be split into up to four groups that are
summed separately (x_1..x_4). The output is y = v_1·x_1 + … + v_4·x_4. For
example, four wavetables of 256 partials each can be blended in one oscillator
and cross-faded by changing the weights, which gives 16 per voice. The groups
are contiguous ranges of the partial index, set by three boundary registers:
partial k (0-based) belongs to subwave 1 if k < BOUND1, to subwave 2 if
k < BOUND2, to subwave 3 if k < BOUND3, and to subwave 4 otherwise. All
boundaries reset to K, and the weights reset to v_1 = 1 and v_2..4 = 0. An
oscillator therefore starts as one plain 1024-partial waveform.

The published design gives four disjoint groups with one weight each, but not
how the groups are selected. Contiguous ranges are this design's choice. The
weights are also the only per-oscillator gain. The voice sum itself is
unweighted.

## 7. Output effects and clipping

`osc_output` runs once per sample:

* **Clipping.** The weighted sum is rounded to {s,0,31} and saturated to 32
  bits. Whenever saturation happens, `clip_osc[o]` is high for that sample
  period. The same holds for `clip_mix[1:0]` after the mixer. On the original
  board these pins drive LEDs.
* **Bit-crusher.** y & mask. Bits whose mask bit is 0 are forced to 0. The
  reset mask is all ones, which means off. Clearing the low bits reduces the
  resolution, and any other pattern is allowed.
* **Rate-crusher.** A sample-and-hold. A {u,0,32} phase accumulator adds `rate`
  (the hold rate divided by fs) once per sample. The held value takes a new
  sample only when the accumulator wraps, which gives any hold rate in
  (0, fs). The crusher is enabled by bit 0 of CTRL. The phase-accumulator form
  is this design's reading of "sub-sampling rate set in the range (0, fs)".

## 8. Voices, mixer and outputs

`mixer` adds oscillators 0-3 into L and oscillators 4-7 into R ({s,2,31}).
It then forms out_l = m00·L + m01·R and out_r = m10·L + m11·R with {s,1,30}
coefficients, rounds the results, and clips them. The identity matrix (the
reset value) gives two independent voices. All four coefficients at 0.5 give
a mono mix.

**I2S** (`i2s_tx`) sends each pair of mixed samples as one Philips-format
frame:

* 64 bit clocks per frame. The bit clock is the core clock divided by
  SCLK_DIV = K/64 = 16, which gives 6.144 MHz, and word select runs at 96 kHz.
* Word select is low for the left slot and high for the right.
* Each slot holds the 24 MSBs, with data starting one bit clock after the
  word-select edge.
* Data and word select change on the falling edge of the bit clock.

One frame lasts exactly one sample period, so the stream needs no FIFO. The
24-bit width is the published one. The frame format, the clock ratio and the
truncation of the 32-bit samples are this design's choices.

**PDM** (`pdm_modulator`, one per output) is a first-order sigma-delta
modulator clocked at the core clock, so it oversamples 1024 times. The sample
is converted to offset binary and added every clock to a 32-bit accumulator.
The carry of that addition is the output bit. Filtered by a simple
second-order sinc decimator, a 1 kHz sine at −6 dBFS reaches 71 dB SINAD. The
published chip measured 75 dB THD+N after an analog filter. The two numbers
are not directly comparable.

## 9. Programming the chip: SPI and the memory map

`spi_slave` receives 48-bit commands: a 16-bit address followed by 32 bits of
data, MSB first, in SPI mode 0 (sampled on the rising SCLK edge, framed by
CS_N low). Several commands may follow each other within one CS_N frame.
Raising CS_N throws away an incomplete command. All three pins pass through
two-flip-flop synchronisers, so each SCLK phase must last at least three core
clocks. At 13 Mb/s a phase lasts about 3.8 core clocks. At that rate a
complete 1024-partial waveform (3072 commands) loads in 11.3 ms. The port
is write-only.

`config_regs` decodes the address (the layout is this design's):

| address (binary) | target |
|---|---|
| `0ooo ffkk kkkk kkkk` | coefficient k (0-based) of oscillator o; field f: 0 = a_k, 1 = b_k, 2 = n_k |
| `1000 0000 0ooo rrrr` | register r of oscillator o (table below) |
| `1000 0001 0000 00ij` | mixer coefficient m_ij |

Oscillators 0-3 form voice L and 4-7 form voice R. The oscillator registers:

| r | name | reset | meaning |
|---|---|---|---|
| 0 | DELTA | 0 | f/fs, {u,0,32} |
| 1 | FHP | 0 | lower band edge f_HP |
| 2 | FLP | 0x8000_0000 (0.5) | upper band edge f_LP |
| 3-5 | BOUND1-3 | K | first partial of subwaves 2, 3 and 4 |
| 6-9 | V1-V4 | 1.0, 0, 0, 0 | subwave weights, {s,1,30} |
| 10 | MASK | 0xFFFF_FFFF | bit-crusher mask |
| 11 | RATE | 0 | rate-crusher rate / fs |
| 12 | CTRL | 0 | bit 0: rate-crusher enable |

The coefficient register files reset to nothing; they power up with whatever
they hold. A sine at 1 kHz from oscillator 0 is three writes: `0x0400 ← 0x4000_0000`
(b_1 = 0.5), `0x0800 ← 0x0001_0000` (n_1 = 1.0), and
`0x8000 ← round(1000/96000·2^32)`. Every other partial of that oscillator also
needs a_k = b_k = 0.

## 10. Module map

| module | role |
|---|---|
| `bfo_pkg` | formats, register numbers, reset values, CORDIC tables |
| `bfo_top` | chip top: SPI, configuration, 8 oscillators, mixer, I2S, 2×PDM |
| `spi_slave`, `config_regs` | command reception and memory-map decode |
| `oscillator` | one oscillator: the pipeline of section 4 |
| `coef_regfile` | K × 96-bit coefficient memory |
| `arg_accumulator`, `partial_arg_mult` | θ and θ_k (section 2) |
| `alias_control` | band test (section 5) |
| `cordic` | rotation (section 3) |
| `sample_accumulator`, `osc_output` | subwave sums, weights, clipping, crushers |
| `mixer`, `i2s_tx`, `pdm_modulator` | voice mixing and outputs |

Parameters default to the published sizes (K = 1024, M = 26,
SCLK_DIV = K/64). The testbenches shrink K to keep the runs short. K must be a
power of two. A single oscillator is tested from K = 16 up. The whole chip is
tested at K = 128 and at K = 1024. It needs SCLK_DIV = K/64 ≥ 2, so that an
I2S frame still lasts exactly one sample period.

## 11. Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M`, and each has a watchdog. The most
important ones:

* `tb_cordic` tests random and edge-case rotations against a real-number
  model, and checks the latency.
* `tb_oscillator` (K = 16) checks whole samples against a model of the Fourier
  sum. The cases include fractional n_k, the alias cut and band, subwaves,
  clipping, the bit-crusher, the rate-crusher, and coefficient rewrites while
  running. It also checks the K + 32 latency and the K-clock period.
* `tb_bfo_top` (K = 128) drives only the chip pins, through an SPI host model
  (`spi_host`) and an I2S/PDM receiver and checker (`bfo_checker`). It counts
  each mechanism separately:
  * alias cut and deliberate aliasing
  * rate-crusher hold lengths
  * band-pass
  * bit mask
  * subwave weights
  * coefficient rewrite
  * oscillator and mixer clipping flags
  * mono matrix
  * PDM density
  * exact I2S frame length
* `tb_bfo_full` runs the same checker on `bfo_top` at its default size,
  K = 1024 with eight full oscillators.
* `tb_osc_workloads` runs one oscillator at K = 1024 and measures SINAD
  against a double-precision model over 960 samples. The model uses the same
  quantised coefficients and an exact phase.

| waveform (f = 20 Hz unless noted, 1024 partials) | SINAD here | published chip |
|---|---|---|
| sine 1 kHz (−6 dBFS) | 155.3 dB | THD+N −137 dB |
| sine | 153.2 dB | 134.0 dB |
| sawtooth | 155.4 dB | 135.3 dB |
| triangle | 155.4 dB | 133.3 dB |
| pulse (all a_k equal) | 138.7 dB | 109.4 dB |
| PDM, 1 kHz sine, sinc² decimator | 71.2 dB | 75 dB (analog) |

The published figures compare the chip's output with a floating-point model
of the waveform. The figures here compare the RTL with an ideal sum of the
same quantised coefficients, so they are not directly comparable. Both sets show the arithmetic to be far below the
24-bit output resolution. The published table also lists "super-saw" and
"rect-saw" waveforms. Their coefficients are not defined anywhere, so they are
not reproduced here.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -y rtl -y tb rtl/bfo_pkg.sv tb/tb_bfo_top.sv --top-module tb_bfo_top
./obj_dir/Vtb_bfo_top
```

Replace `tb_bfo_top` with any other testbench name. `tb_bfo_full` takes
about 15 s and `tb_osc_workloads` about 20 s. The others finish in seconds.

## 12. What follows the published design, and what is chosen here

Taken from the published design:

* two voices of four oscillators, each with K = 1024 partials and one partial
  per clock at 98.304 MHz for fs = 96 kHz
* the number formats of a_k, b_k, n_k, f/fs and θ
* θ kept modulo 2^16 with θ_k = frac(θ·n_k)
* the CORDIC with quadrant correction, 26 micro-rotations and angles in turns
* the K × 96-bit register file per oscillator
* the alias rule and the f_HP/f_LP band, with defaults 0 and 0.5
* four weighted subwaves
* the bit-crusher mask and the sample-and-hold rate-crusher
* clipping flags per oscillator and after the mixer
* the summed voices and the 2×2 mixer
* the 24-bit I2S output
* the first-order PDM at 1024× oversampling
* SPI commands of 16 address and 32 data bits

Chosen here, because the published description does not specify them:

* the memory map and all reset values other than f_HP and f_LP
* the SPI mode, bit order and synchronisers
* the I2S frame format and the 24-bit truncation
* the internal word lengths of the CORDIC (40 bits with 36 fraction bits) and
  the rounding points
* the 44-bit subwave sums
* the {s,1,30} format of the weights and the mixer coefficients
* truncation of θ_k to 32 bits
* contiguous index ranges for the subwaves
* the phase-accumulator rate-crusher with its enable bit
* the full multiplier in the band test
* a clipping flag that lasts one sample period rather than latching
* the pipeline depth, and so the K + 32 latency

Not part of this RTL:

* the microcontroller firmware that turns MIDI and knob settings into
  coefficients
* the audio DAC, the analog filter and amplifier boards and the control-voltage
  DACs
* power, pads and the 65 nm implementation
* the four-chip arrangement that gives the full instrument 32 768 partials;
  one chip is described here, and four instances of `bfo_top` would form the
  full instrument
