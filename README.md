# Overlap-channel polyphase synthesis filter bank (OC-PSB)

This design is a frequency-comb synthesizer for reading out large arrays of
microwave kinetic inductance detectors (MKIDs). Each detector is a resonator
probed by its own tone, so the readout must produce a single complex waveform
that holds up to 2048 tones. Every tone has its own frequency, amplitude and
phase, and each can be retuned while the synthesizer runs. Any tone must be
placeable anywhere in the band, with a resolution of a few hertz.

A direct approach would sum 2048 sinusoids at the full sample rate. That needs
2048 oscillators, each running at the DAC rate. This design instead builds
each tone at a low rate and lets a polyphase synthesis filter bank move it to
its place in the band:

* The band `fs` is divided into channels.
* For each channel, one complex sample per *frame* of `P = 1024` clocks
  describes that channel's tone at baseband. The tone's offset from the
  channel centre is set by how fast the sample's phase turns from frame to
  frame.
* An inverse DFT and a polyphase FIR filter interpolate all channels at once.
  They stack the channels side by side, giving one output sample per clock.

## Why the channels overlap

In a plain critically sampled synthesis bank with `P` channels, the channel
width equals the channel spacing, `fs/P`. A tone near a channel edge then
falls in the filter's transition band: it is attenuated and leaks into the
neighbouring channel. Keeping the edges usable needs a very sharp prototype
filter, so many taps per path.

The overlap-channel bank uses `2P = 2048` channels, spaced `fs/(2P)` apart and
each `fs/P` wide. It is built from a `2P`-point IDFT whose output drives
`P` polyphase paths:

* The even channels form the ordinary `P`-channel bank.
* The odd channels are the same bank shifted by half a channel.

A tone that would sit at the edge of an even channel can be placed near the
centre of the odd channel that overlaps it. No tone therefore needs the
channel edges, and 16 taps per path (`16 × 1024` prototype taps) are enough.

Each channel carries at most one tone. A tone in channel `k`, whose phase
advances by `dphi` (a 16-bit fraction of a turn) per frame, appears at:

    f = (k/2 + dphi/65536) · fs/P        (channels k ≥ P stand for negative frequencies)

Example: `fs = 256 MHz`, channel 80, `dphi = 16384` (a quarter turn per
frame, i.e. "input bin 256 of 1024") gives 10.0625 MHz. An RF DAC with a
500 MHz NCO would put that at 510.0625 MHz.

One phase step is `250 kHz / 65536 = 3.8 Hz`, so this is the frequency
resolution of the whole comb.

## Data path

    cfg port ─► tone_gen ×2 ─► odd_bin_flip ─► ifft2048 ─► reorder_buffer ─► pfb_fir ─► out_re/out_im
                (CORDIC, TDM)   (sign of odd    (2048-pt     (periodic           (1024 paths ×
                                 bins)           IDFT)        extension ×8)       16 taps)
                                                                               ▲
                                                                   pfb_coeff_rom (windowed sinc)

Everything runs at one clock `fs`. One sample moves per clock at the output,
and two samples per clock move between the tone generators and the IFFT,
because 2048 channels must pass in a frame of 1024 clocks.

### Tone generators (`tone_gen`, `cordic_rotator`)

Two generators are time-multiplexed over 1024 channels each:

* generator 0 serves channels `0..1023`;
* generator 1 serves channels `1024..2047`.

At count `c` of a frame, they deliver channels `c` and `c+1024`. Each
generator holds two memories:

* a settings table: phase step `dphi` and initial vector `(i0, q0)`;
* a phase accumulator per channel.

In its slot, a channel's accumulated phase is fed with its initial vector to a
pipelined CORDIC rotator. The rotator rotates the vector by that angle and
returns `v · e^{j·acc}`, one channel per clock. The CORDIC has:

* a quadrant pre-rotation;
* 16 micro-rotations with three guard bits;
* a constant multiply that removes the CORDIC gain;
* rounding and saturation to 16 bits.

The accumulator is then advanced by `dphi`. A change of frequency therefore
keeps the phase continuous. The initial vector sets amplitude and phase, and
a zero vector switches the channel off.

Writing the table (`cfg_we`, `cfg_addr`, `cfg_data`) takes effect in the
channel's next slot. For one frame after reset, both memories are cleared,
the output is zero and `cfg_ready` is low.

### Odd-bin rotation (`odd_bin_flip`)

The odd channels are offset by half a channel, i.e. by `fs/(2P)`. An offset
that small makes their part of each `2P`-sample IDFT block turn by half a
revolution from one frame (`P` samples) to the next. To keep consecutive
blocks coherent, the odd-bin inputs are rotated by 180° on alternate frames.
This block:

* negates the odd bins in even frames `m = 0, 2, 4, …`;
* counts the first frame after reset as `m = 0`.

Negation saturates, so −32768 becomes +32767.

### IFFT (`ifft2048`, `fft_stage`)

The IFFT is a streaming 2048-point inverse FFT: 11 radix-2
decimation-in-frequency stages, taking two input samples per clock in natural
order.

Each stage holds one frame in a ping-pong buffer. It reads the pair
`(a, a+span)` as soon as both are present, instead of waiting for the frame to
end. That makes the whole transform's latency `N/2 + 5·log2(N) − 1 = 1078`
clocks. Without early reading it would be 11 frames.

The transform is unscaled, so the word grows from 16 to 28 bits. Twiddles are
18 bits with unit value `2^16`, and products are rounded back after each
multiply. The result leaves in bit-reversed order, each sample tagged with its
time index.

### Periodic extension (`reorder_buffer`)

Each 16-tap path needs, for every frame, the 2048-point IDFT block repeated
8 times. Tap `t` of path `p` uses sample `x[(t·P + p) mod 2P]`. That is
`x[p]` for even taps and `x[p+P]` for odd taps.

The buffer:

1. collects one bit-reversed IFFT frame in one half of a ping-pong RAM;
2. once the frame is complete, reads `x[p]` and `x[p+P]` in path order,
   one path per clock;
3. hands the filter all 16 lanes at once.

### Polyphase filter and overlap-add (`pfb_fir`, `pfb_coeff_rom`)

This is the hardest part to follow. A synthesis bank's path `p` is a FIR
filter running at the frame rate. The output sample of frame `m` at path `p`
is:

    y(mP + p) = Σ_{d=0..15} h(dP + p) · x_{m−d}((dP + p) mod 2P)

Instead of storing 16 past IDFT blocks, the filter computes all 16 products
for the current block at once and keeps a running sum. For each path it holds
a vector `A` of 16 partial sums, which is the state for that path. When path
`p` of frame `m` arrives:

    S_t   = A_t + h(tP + p) · x_m((tP + p) mod 2P)     t = 0..15
    out   = S_0
    A_t  ← S_{t+1},  A_15 ← 0

So lane 0 is complete and leaves as the output sample, and the other lanes
move down one place. The product of block `m` that lands in lane `t` therefore
reaches lane 0 exactly `t` frames later, as the equation requires.

The 16 state vectors (16 lanes × 16 bits each, real and imaginary) live in a
RAM indexed by path. Each path's vector is read and written once per frame.

The coefficient ROM holds `h(n)` for `n = 0..16383` as 16 banks of 1024, read
by path. `h` is a windowed sinc:

* the sinc's first zeros are at `±P` samples;
* the window is the 4-term Blackman–Harris window `(0.35875, 0.48829, 0.14128, 0.01168)`;
* coefficients are scaled to a peak of `2^17 − 1` and rounded to 18 bits.

The table is computed in SystemVerilog when the memory is initialised, so no
data file is involved.

Products are rounded by `2^−17`, and products and sums saturate to 16 bits.
`out_sat` flags an output whose path saturated, in any lane. A flagged lane
may belong to a later output sample, so the flag is a warning that the comb
is too loud, not an exact per-sample marker.

## Fixed-point summary

| Point | Format | Note |
|---|---|---|
| Tone settings | `dphi` 16 bit unsigned, `i0`, `q0` 16 bit signed | full turn = 65536 |
| CORDIC output | 16 bit signed, saturated | gain ≈ 1 |
| IFFT output | 28 bit signed | unscaled, cannot overflow |
| Coefficients | 18 bit signed | peak 131071 |
| Filter state and output | 16 bit signed, saturated | products × 2^−17 |

With these choices, the bank has unity gain: a single tone with initial
vector of magnitude `A` gives an output tone of amplitude about `A`. Many tones must share the 16-bit output. For all 2048 channels
with random phases, each tone needs an amplitude of about 180 to keep a
crest-factor margin of 4. As with any comb synthesizer, the per-tone amplitude
has to be reduced as the number of tones grows.

## Timing

| Quantity | Clocks | At 256 MHz |
|---|---|---|
| Frame | 1024 | 4 µs |
| CORDIC | 19 | |
| IFFT | 1078 | 4.2 µs |
| Reorder buffer | one frame plus 2 | |
| Filter | 2 | |
| Table write to first affected output | 2124 (measured) | 8.3 µs |

The output is valid every clock once the pipeline has filled. After an edit,
the old tone fades out and the new one settles over the following 16 frames,
as the overlap-add state flushes.

## Where this RTL departs from the published design

* **Filter state memory.** The published filter keeps its partial sums in a
  FIFO of one frame's depth. Here they sit in a RAM addressed by the path
  number. For a continuous stream this is the same thing. It also makes the
  path-to-state pairing explicit, and the published pipeline delays
  (multiplier and adder registers) are not copied: one register per stage
  is used.
* **IFFT.** The published design uses a vendor streaming IFFT. This is a
  plain radix-2 design with its own word growth and latency.
* **Word widths, rounding and saturation.** The published design fixes only
  the 16-bit output and the 16-bit filter lanes. All other widths, the
  product scaling, the rounding and the saturation are choices of this RTL.
* **Control interface.** A simple table-write port replaces the processor
  and network link that loads tone settings in a real system. Clocking,
  the RF DAC and its NCO are outside the RTL.
* **Bandwidth.** One output sample per clock is produced, so the synthesized
  bandwidth equals the clock rate (256 MHz at a 256 MHz clock). A wider
  version needing four samples per clock (1.024 GHz) is not built.
* **Reset.** Reset behaviour is this design's own: one clearing frame, and
  zero partial sums in the first filter frame.

## Modules

| Module | Role |
|---|---|
| `psb_pkg` | widths, `tone_cfg_t` settings struct, rounding/saturation helpers |
| `cordic_rotator` | pipelined vector-rotation CORDIC |
| `tone_gen` | per-channel settings table, phase accumulators, CORDIC |
| `odd_bin_flip` | sign of odd IDFT bins on alternate frames |
| `fft_stage` | one radix-2 DIF stage with early-start ping-pong buffer |
| `ifft2048` | 11 stages plus bit-reversed position tags |
| `reorder_buffer` | frame buffer and periodic extension to 16 lanes |
| `pfb_coeff_rom` | windowed-sinc prototype, 16 × 1024 |
| `pfb_fir` | 16-lane multiply, overlap-add state RAM, block shift |
| `oc_psb_top` | the whole synthesizer |

Each module opens with a comment on its interface and its timing.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each testbench
compares the outputs against an independent floating-point model and ends
with a line of the form `TB_RESULT checks=… failures=…`.

The end-to-end test, `tb_oc_psb_top`, runs the synthesizer at its full size
for 36 frames. It:

* programs five tones, including channel 80 / bin 256;
* retunes one tone and switches one off while running;
* finally drives every tone to full scale, to force saturation;
* checks every output sample against the filter-bank equation (within
  64 LSB) until that point;
* checks that an edit reaches the output in under 20 µs.

A second full-size test, `tb_all_channels`, turns on all 2048 channels at
their centres (a comb with `fs/2048` spacing), each with amplitude 180 and a
random phase. It checks four settled frames against the same equation, with a
96 LSB tolerance, because rounding in the IFFT grows when every bin is busy
(about 68 LSB worst case seen). The peak output is about 20,000, with no
saturation.

Build and run any testbench with Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_oc_psb_top \
        -y rtl -y tb +libext+.sv rtl/psb_pkg.sv tb/tb_oc_psb_top.sv -o sim
    ./obj_dir/sim

The full-size run takes a few seconds. The unit testbenches for `tone_gen`,
`odd_bin_flip` and `pfb_fir` override the sizes to smaller ones. The others
run at the default sizes.
