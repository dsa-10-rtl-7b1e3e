# SNAP board signal processing for the DSA-10 fast radio burst array

DSA-10 is a ten-dish radio interferometer that looks for fast radio bursts
(millisecond flashes of radio emission) and pinpoints where on the sky they came
from. It does this in two ways at once. Sensitive detection needs only the
*power* of the signal, added over all antennas without regard to phase (the
"incoherent sum"). Localisation needs the *voltages* of every antenna, kept long
enough to be correlated and imaged once a burst is found. The digital front end
therefore turns each antenna signal into a spectrum and sends two streams to the
computers:

* a **raw stream**: every channel of every input, requantised to 4+4 bit
  complex numbers. It feeds the ring buffers that are written to disk on a
  trigger, and the online correlator used for calibration.
* an **integrated stream**: one power spectrum per board, summed over the
  board's four inputs and over 16 consecutive spectra. It feeds the burst
  search.

Ten dual-polarisation antennas give 20 signals. They are digitised by five SNAP
boards, four signals per board. This repository holds SystemVerilog for the
logic inside one board's FPGA. It takes four ADC inputs and produces both
streams.

## Numbers at a glance

| quantity | value |
|---|---|
| ADC sample rate, width | 500 MS/s, 8 bit signed |
| FPGA clock | 250 MHz, two samples per input per clock |
| inputs per board | 4 (two ADC chips, two inputs each) |
| filterbank | 4-tap polyphase FIR, 4096 points per tap, then a real 4096-point FFT |
| channels | 2048 of 122.07 kHz; one spectrum every 2048 clocks = 8.192 us |
| channel data | 18 bit real + 18 bit imaginary |
| raw output | 4+4 bit per channel per input: 32 bits per clock = 8 Gb/s |
| integration | 16 spectra = 131.072 us, 64-bit accumulators |
| integrated output | one 16-bit word per channel per integration, about 250 Mb/s |
| coarse delay | 0 to 1023 clocks in 4 ns steps |

## Block diagram

```
             +--------+     +--------------+     +-----+     +---------+   raw stream
 ADC x4 ---->| coarse |---->| pfb          |--+->| req-|---->| 4 x 4+4 |---> (10 GbE)
  (2 smp/clk)| delay  |     |  pfb_fir     |  |  | uant|     +---------+
     |       |  x4    |     |  fft_real    |  |  +-----+
     |       +--------+     |    x4        |  |
     |                      +--------------+  |  +-----------+  +------------+  +------------+
     +--> adc_snapshot x2          ^          +->| power_sum |->| integrator |->| bit_select |--> integrated
                                   |             | |x|^2, sum |  | 16 x 64 b  |  | x u16, 16b |    stream
 PPS, arm --> sync_gen ------------+ sync        +-----------+  +------------+  +------------+
```

`snap_fpga_top` wires these together. The ADC chips, the 10 GbE transmitters and
the register bus to the board's control computer are not part of the RTL. Their
data and registers are plain ports of the top.

## Stream conventions

Every stage works on a continuous stream with no back-pressure and no gaps: one
word per clock, every clock. Frames are marked by a **sync pulse**, a one-clock
strobe on the first word of a frame. Each stage delays the sync by its own
latency, so the pulse stays with the data it marks. On each sync, a stage with a
frame counter (FIR, FFT stages, requantiser gain address, integrator) resets the
counter to zero. After that the counter runs freely, modulo the frame length. A
sync may therefore come once, or on any later frame boundary. The filterbank
emits one output sync per input sync, not one per frame. This matters for the
integrator: each sync it sees restarts its count of spectra.

`sync_gen` makes the first sync. Software raises `arm`. On the next rising edge
of the pulse-per-second input, seen through a two-stage synchroniser, one sync
pulse is issued. All five boards receive the same clock and PPS, so they start
on the same sample.

## Coarse delay

Each input has its own circular buffer of 1024 words of two samples each. The
input is written at a free-running pointer. The output is read `delay` words
behind it. Delays are set in whole clocks, which is 2 samples or 4 ns. They
cancel the differing cable and electronics delays of the antennas. The
alignment checked by the end-to-end test is built this way: inputs arriving 5,
0, 12 and 3 clocks late, with delays of 7, 12, 0 and 9, produce identical
spectra.

## The filterbank (the hard part)

### Polyphase FIR (`pfb_fir`)

Write P = 4096 and T = 4. The FIR weights the current sample and the samples P,
2P and 3P earlier:

    y[n] = sum_{t=0..3} h[(3-t)*P + (n mod P)] * x[n - t*P]
    h[i] = round((2^17 - 1) * (0.54 - 0.46 cos(2 pi i / (T P - 1))) * sinc(i/P - T/2))

That is a Hamming-windowed sinc over 16384 points, quantised to 18 bits. The
table is computed during elaboration (`initial` with `$cos`/`$sin`). It is
organised as `coef[tap][lane][m]`, since two samples (lanes) arrive on each
clock m of the 2048-clock frame. The three older frames are kept in one RAM of
2048 words, 48 bits wide. At address m, each clock reads {frame-1, frame-2,
frame-3} and writes back {current, frame-1, frame-2}. Each lane is the sum of
four 8x18-bit products. It is shifted right by 8 and saturated to 18 bits.

### Real FFT (`fft_real` = `fft_sdf_stage` x 11 + `fft_real_split`)

The filterbank must produce 2048 channels from 4096 real samples. Those samples
arrive two per clock and must leave as one complex channel per clock. The design
uses the classic packing trick:

1. **Pack**: z[n] = x[2n] + i x[2n+1], n = 0..2047, which is one complex word
   per clock.
2. **2048-point complex FFT**: a radix-2 *single-path delay feedback* (SDF)
   pipeline of 11 stages (`fft_sdf_stage`). Stage s has a feedback RAM of D =
   1024 >> s words. For the first D words of each 2D block, the stage stores the
   input and outputs the stored difference of the previous block, multiplied by
   the twiddle exp(-2 pi i m / 2D). For the next D words, it outputs the sum of
   the stored word and the input, and stores their difference. Each stage adds
   D + 2 clocks of latency. The pipeline's output is in bit-reversed order.
3. **Split** (`fft_real_split`): a double buffer of 2 x 2048 words. One half
   is written at bit-reversed addresses while the other half is read in natural
   order. Each clock it reads Z[k] and Z[2048-k] and forms

       X[k] = ( A + W^k (-i) B ) / 2,   A = Z[k] + conj(Z[2048-k]),
                                         B = Z[k] - conj(Z[2048-k]),
                                         W = exp(-2 pi i / 4096)

   This gives channels 0..2047 of the real 4096-point transform, in order. The
   Nyquist channel is not produced.

Scaling: bit s of `shift` (11 bits, one per stage) halves both outputs of stage
s, truncating. With a stage's bit clear, its outputs are saturated to 18 bits
instead. The default, all ones, divides by 2048 in total: a tone of amplitude A
at the FFT input gives |X| = A in its channel, and nothing can overflow. `ovf`
pulses whenever any stage or the split saturates. Twiddles are 18-bit signed,
scaled to 2^17 - 1, and products are rounded to nearest.

Latency from the FIR output to the FFT output is 2047 + 22 + 2048 + 3 = 4120
clocks. Adding the FIR's 2 clocks gives 4122 clocks from sync to channel 0
for the whole `pfb`.

## Raw stream: requantiser (`requant`)

A RAM of 2048 x 4 gains holds one gain per input and channel, written through
`gain_we/gain_input/gain_chan/gain_data`. Each gain is an unsigned 16-bit number
with 12 fractional bits, so 4096 means 1.0. Real and imaginary parts are each
multiplied by the gain and rounded to an integer, with ties going to the even
value. The result is clamped to -8..+7. Any clamp sets that input's bit of
`sat_flag`, which stays set until `sat_clr`. The gains are meant to bring each
channel to unit rms before the 4-bit cut.

## Integrated stream

* `power_sum`: computes re^2 + im^2 for each input and adds the four inputs.
  The result is 39 bits, at full precision.
* `integrator`: an accumulator RAM of 2048 x 64 bits, read, added to and
  written back every clock. On the first spectrum of a period the value is
  replaced rather than added to. On the 16th spectrum the sum goes out with
  `valid` and its channel number, and `sync_out` marks channel 0.
* `bit_select`: multiplies each value by the unsigned 16-bit `int_scalar`,
  keeps the low 64 bits and outputs bits [16*sel+15 : 16*sel]. Values 0 to 3 of
  `sel` select paper-numbered bits 1-16, 17-32, 33-48 and 49-64.

## ADC snapshots

There is one `adc_snapshot` per ADC chip. A trigger records the next 1024
clocks of both inputs, undelayed, as 32-bit words: {B1, B0, A1, A0}. Software
then reads them back by address.

## Interface of `snap_fpga_top`

| port | dir | meaning |
|---|---|---|
| `adc[4][2]` | in | samples; [input][0 = earlier, 1 = later] |
| `pps`, `arm`, `armed` | in/in/out | start control |
| `delay[4]` | in | coarse delay per input, in clocks |
| `fft_shift` | in | 11-bit stage shift schedule |
| `gain_we`, `gain_input`, `gain_chan`, `gain_data` | in | requantiser gain write |
| `sat_clr`, `sat_flag[4]`, `fft_ovf` | in/out/out | status |
| `int_scalar`, `int_sel` | in | integrated-stream scale and slice |
| `snap_trig[2]`, `snap_addr[2]`, `snap_data[2]`, `snap_busy`, `snap_done` | | snapshots |
| `raw_valid`, `raw_sync`, `raw_chan`, `raw_data[4]` | out | raw stream |
| `int_valid`, `int_sync`, `int_chan`, `int_data` | out | integrated stream |

Timing at the default size:

* The PPS edge to `sync` takes 3 clocks.
* `sync` to raw channel 0 takes 4125 clocks.
* The raw stream then runs without gaps.
* Every 32768 clocks (16 spectra), the integrated stream sends 2048
  consecutive values.

## What comes from the paper and what does not

These follow the paper:

* the block structure
* 8-bit samples demultiplexed by two
* the PPS-armed start
* the BRAM coarse delay in 4 ns steps
* a 4-tap, 4096-point PFB with a Hamming window, 18-bit coefficients and
  18+18-bit data
* per-input, per-channel requantiser gains (2048 x 4)
* round-half-to-even, clamping and a saturation flag
* squaring and summing the inputs
* 16-spectrum, 64-bit integration
* a u16 scalar and a choice of four 16-bit slices
* two snapshot blocks

These are this design's own choices:

* **FFT architecture** (SDF pipeline, packing and split), the truncating shift
  schedule, and saturation. The paper uses a library FFT and does not give its
  insides. Results therefore match a floating-point DFT to within a few LSB,
  not bit for bit against any particular library.
* **FIR coefficient formula and output scaling** (`>>> 8`). The paper names
  only the window.
* **Gain format** (u16, 12 fractional bits); clamping to +7/-8; the flag
  being sticky with a clear input.
* **Delay depth** (1024 clocks); snapshot depth and word layout.
* **The bit-select product** is truncated to 64 bits, and the slice is not
  saturated.
* **The stream/sync convention** and all pipeline latencies.
* **No packetiser.** The paper does not give the Ethernet packet format, so
  the streams stop at ports.

One figure in the paper is inconsistent. The text says bit selection reduces
the integrated stream "from 8 Gbps per SNAP board to 2 Gbps". The processing
figure's capture rate (5 x 250 Mbps) and the arithmetic (2048 x 16 bits every
131.072 us, about 250 Mb/s) both point to 250 Mb/s. The RTL does what the text
describes, and its rate is about 250 Mb/s.

Not in the RTL: the analogue receiver chain, the ADC chips and their digital
gain, the 10 GbE cores, the control computer, and all server-side processing.
The server side includes capture, corner turn, correlation, RFI excision, the
pulse search and the combining of the five boards' spectra.

## Simulating

Every module is in `rtl/<name>.sv`. Shared types and constants are in
`rtl/dsa_pkg.sv`, which must come first. Each block has a self-checking
testbench, `tb/tb_<name>.sv`, which prints `TB_RESULT checks=N failures=M`.
For example:

```
verilator --binary --timing -Irtl rtl/dsa_pkg.sv tb/tb_snap_fpga_top.sv \
  --top-module tb_snap_fpga_top -y rtl +libext+.sv
./obj_dir/Vtb_snap_fpga_top
```

`tb_snap_fpga_top` runs the whole board at full size for about 76 000 clocks
(a few seconds).

1. It aligns four delayed copies of one signal through the coarse delays.
2. It checks one 4096-point spectrum against an FIR + DFT reference computed in
   the testbench.
3. It checks every raw sample against its own requantisation of the spectrum,
   and every integrated value against its own accumulation of |x|^2.
4. It exercises saturation, flag clearing, a slice change and a snapshot.

The unit testbenches run smaller sizes (FFT of 256 points, FIR of 64 points per
tap, 16 channels), set through parameters.

`tb_dsa10_array` builds the digital side of the whole array: five boards (20
inputs) on one clock and one PPS line, at 256 points. Boards armed at different
times before a PPS edge must start on that edge together and send identical
streams for identical inputs. A board armed after the edge must start exactly
one PPS period later. The testbench also forms the sum of the boards'
integrated spectra, as the central node would.

How far to trust it:

* The filterbank is checked against floating-point references, within a few
  LSB.
* Everything after the filterbank is checked bit for bit.
* Nothing has been run on hardware or timed for 250 MHz.
* Memories are written as arrays with asynchronous reads in places (FIR
  history, FFT feedback, split buffer). A vendor flow may map these to
  distributed RAM or need a register added before block RAM can be used.
* `ovf` and `sat_flag` can fire in the first frames after reset, while the
  filter history still holds arbitrary data. Clear them after start-up.

## Changing it

* Sizes live in `dsa_pkg` and in module parameters: `N` (FFT length), `NA`
  (spectra per integration), `FIR_SHIFT`, `DDEPTH` and `SNAP_D` on the top.
* The FFT length must be a power of two, at least 8. The FIR and FFT
  coefficient tables follow it.
* To use a different window, edit the function `h()` in `pfb_fir.sv`.
