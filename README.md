# Frequency-multiplexed MKID readout core

Microwave kinetic inductance detectors (MKIDs) are superconducting resonators.
Each one sits at its own frequency, and absorbed photons shift that frequency
and change its dissipation. One coaxial line can therefore carry up to 1400
resonators. A comb of probe tones is sent in, one tone per resonator, and the
returning comb is digitised. The complex transmission (I, Q) at each tone is
measured continuously.

This repository holds the digital core of such a readout, in synthesizable
SystemVerilog. It does two jobs:

* **Transmit.** It builds the drive comb from a tone table and sends it to a
  pair of DACs (I and Q).
* **Receive.** It splits the ADC stream into 2^19 frequency points in two
  stages: a 1024-channel polyphase filterbank, then a 512-point CORDIC
  down-conversion inside each channel. For every tone it produces one
  complex value per 2^19-sample window. Cosmic-ray glitches are removed from
  each tone's stream before it is summed (co-added).

The numbers follow a space readout concept:

* 5 GS/s complex sampling.
* 1400 tones per chain: 1008 science and 392 blind or calibration.
* A 10 kHz tone-placement requirement, which gives 2^19 = 5 GS/s / ~10 kHz.
* A 1024-channel filterbank followed by a 2^9-point fine stage.
* A filterbank built as a chain of four multipliers with a polyphase
  coefficient ROM.

Everything else is specific to this implementation, and is marked as such
below and in each file's header:

* how many tones are handled per clock
* how the fine stage is organised
* the glitch algorithm details
* word widths and scaling

## Frequency plan

| quantity | value |
|---|---|
| sample rate Fs (complex) | 5 GS/s, one complex sample per clock in the RTL |
| coarse channels K | 1024, spacing Fs/K = 4.883 MHz |
| fine points per channel NF | 512, spacing Fs/2^19 = 9.537 kHz |
| window | K·NF = 524288 samples = 104.9 µs |
| tones | 1400, in two lanes of 700 |

A tone is placed by two numbers, which are the same on the transmit and
receive sides:

* its coarse bin `b` (0..1023)
* its fine index `k` (0..511)

Its frequency is `(b + k/512)` channel widths. A fine index of 256..511 is a
negative offset of `k-512`. Because the two sides share one grid, a tone that
is sent with fine index `k` lands, after the analysis filterbank, in bin `b`
as a complex exponential turning by `2π·k/512` per frame. Rotating it back and
summing 512 frames gives one bin of a 512-point DFT of that channel. Together
with the 1024-point FFT in front, this is a 2^19-point transform evaluated
only where tones are.

## Signal path

```
 tone table ──► tone_synth ──► synthesis_pfb ────────────────────────► DAC I/Q
 (cfg_*)        CORDIC per      inverse FFT (R2SDF) → bit-reverse
   │            tone per frame  reorder → pfb_fir (synthesis rows)
   │
   └──────────► fine_ddc ◄──── coarse_channelizer ◄────────────────── ADC I/Q
                 frame buffer   pfb_fir (analysis rows) → FFT (R2SDF)
                 per lane:      │
                 CORDIC         └─► chan_* (coarse channel stream)
                 → cosmic_ray_filter → coadd_accum ──► res_* (per tone, per window)
```

The top module `mkid_readout_top` wires the two chains to one tone table. The
DAC output can therefore be looped back into the ADC input, and each tone
then comes back where the receive side looks for it. The testbenches use this
loopback.

The separate I and Q chains of a dual-channel board are merged here into one
complex datapath: the real part is I and the imaginary part is Q. One complex
polyphase filterbank therefore serves both converters, and no second copy is
needed.

## The polyphase filter section (`pfb_fir`)

This is the part that most needs care. A critically sampled polyphase
filterbank is a prototype low-pass filter `h` of `4K` taps. It is split into
`K` branches, and each branch is followed by a K-point FFT. The hardware form
is a transposed FIR:

* Each input sample is broadcast to four multipliers.
* Multiplier `j` takes its coefficient from ROM column `j`. The column holds
  `h[jK .. jK+K-1]`.
* The products are chained through three `z^-K` delays and adders. The
  product of column `j` passes through `j` delays.

Because the delay equals the frame length, every `z^-K` is a K-entry memory
addressed by the branch index `r = n mod K`. Writing the memories needs no
separate pointer. Four multipliers per component serve all 1024 branches at
full rate.

**The direction in which each column is read matters.** With both the column
order and the row order fixed, exactly one reading makes the branch sums a
true convolution with the prototype:

* **Analysis side** (`ANALYSIS=1`, the default). Branch `r` reads row `K-1-r`:
  `y[n] = Σ_j h[jK + K-1-r] · x[n - jK]`. Here the window index plus the time
  index is constant across the four terms.
  * Reading row `r` instead applies the four window segments in reverse
    order but each segment forwards. That is a broken window.
  * With it, a tone a quarter channel off centre leaked into every channel
    at -13 dB. With the correct reading, all channels two or more away stay
    below -64 dB.
* **Synthesis side** (`ANALYSIS=0`). Branch `r` reads row `r`:
  `x[mK + r] = Σ_j h[jK + r] · v_{m-j}[r]`. This is the interpolator that
  up-samples the inverse-FFT frames `v_m` and filters them with `h`.

**The prototype.** It is a Hamming-windowed sinc with its cutoff at half a
channel:

* `h[i] = w[i]·sinc((i-(4K-1)/2)/K)`, with `w[i] = 0.54 - 0.46·cos(2πi/(4K-1))`.
* It is scaled so that its coefficients sum to `K`, which gives every branch
  unit DC gain.
* It is quantised to 18 bits with 16 fractional bits.

The table is computed at elaboration by a constant function. No data file is
needed. Its measured response at full size (`tb_coarse_crosstalk`):

| tone position relative to the centre of channel 326 | channel 326 | channel 327 | any channel ≥2 away |
|---|---|---|---|
| 0 | 0 dB | -50.2 dB | < -68 dB |
| +0.25 channel | 0 dB | -21.3 dB | < -69 dB |
| +0.5 channel (crossover) | -6 dB | -6 dB | < -64 dB |

A cross-talk of about -48 dBc between adjacent channels was the target for
this filterbank. Tone at channel centre: -50 dB in the neighbour.

**Limits of critical sampling.** Channels are spaced exactly one output rate
apart, so:

* The response falls to -6 dB at the channel edge. A tone near an edge is
  attenuated. Over the full 1400-tone loopback, tones within a quarter
  channel of a centre come back with 0.82..1.03 of nominal gain.
* A tone also leaks into the neighbouring channel (-21 dB at a quarter
  channel off centre, -50 dB at the centre). Because each channel is sampled
  at exactly the channel spacing, the leaked copy lands on the same fine
  index `k` in bin `b±1`. Two tones with the same fine index in adjacent
  bins therefore see each other; giving neighbours different fine indices,
  or keeping tones near channel centres, avoids it.

An oversampled (WOLA) filterbank would remove both effects, and it is the
intended final form of the filterbank. It is not built here, because its
oversampling ratio and window were not specified.

Timing: `out_valid` follows `in_valid` by one clock. During the first frame
after reset the delay memories are masked to zero, so they need no clearing.

## FFT (`fft_r2sdf`, `fft_sdf_stage`)

The FFT is a radix-2 single-path delay-feedback pipeline with decimation in
frequency. It takes one sample per clock and has `log2 N` stages.

Stage `s` has a feedback memory of `N/2^(s+1)` words:

* In the first half of each block it passes the memory out and stores the
  input.
* In the second half it outputs `a+b` and stores `(a-b)·W`.

Twiddles are 18-bit and computed at elaboration.

Scaling and output:

* The FFT is unscaled. Each stage adds one bit, and one guard bit is added
  for the `√2` growth of a rotation. Output width is `IW + log2 N + 1`.
* Output is in bit-reversed order. `out_bin` carries the bin number of each
  output.
* After reset, the first `N-1` outputs (pipeline fill) are suppressed. After
  that, the first output of a frame appears `N + log2 N - 1` clocks after the
  first input of that frame when the input is gap-free.
* `INVERSE=1` conjugates the twiddles. There is no 1/N scaling.

## Coarse channelizer (`coarse_channelizer`)

This is `pfb_fir` (12-bit in, 16-bit out) followed by the 1024-point FFT. The
result is a stream of channel values `(chan_bin, chan_re, chan_im)`, 27 bits
each, in bit-reversed bin order, one per clock. For a complex tone of
amplitude `A` ADC codes at a channel centre, the value has magnitude
`K·A` = 1024·A.

The same stream is available at the top as `chan_*`. That is where
pulse-detection or tone-tracking logic would attach.

## Fine down-conversion (`fine_ddc`)

**Frame buffer.** A ping-pong buffer of 2 × 1024 complex words is written at
the FFT's bit-reversed `out_bin`. When the FFT has delivered a whole frame,
the halves swap, and a sweep over the tone table starts on the finished
half.

**Lanes.** 1400 tones do not fit in a 1024-clock frame at one tone per clock.
The table is therefore split into `TONE_LANES = 2` lanes: tone `t` is slot
`t/2` of lane `t mod 2`.

* Each lane handles one tone per clock, so a sweep takes 700 clocks plus
  about 25 clocks of pipeline.
* A sweep that is still running when the next frame completes sets the
  sticky `overrun` flag.

Each lane does the following for each tone:

1. Reads `X_m[b]` from the frame buffer.
2. Rotates it in `cordic_rotator` by `-2π·k·m/512`. The phase is formed
   exactly as `-(k·m mod 512)` scaled to the 16-bit phase word.
3. Passes the result through `cosmic_ray_filter`.
4. Adds it in `coadd_accum`.

The frame counter `m` runs 0..511 from reset, and frame 511 closes a window.

**CORDIC (`cordic_rotator`).**

* Rotation mode, 18 iterations, with a quadrant pre-rotation so that any
  angle converges.
* 3 guard bits on the data and 4 on the angle.
* The gain is removed by one constant multiply.
* The output is one bit wider than the input. Error is within 2 LSB.
* Latency is 20 clocks.

**Results.** At the end of a window every enabled tone emits a record on its
lane: `res_valid[l]`, `res_tone[l]` (tone number), `res_i[l]`, `res_q[l]`
(37-bit sums) and `res_glitches[l]` (samples replaced in this window). In
loopback, a tone of table amplitude `a` returns about `512·1024·a` times the
end-to-end filter gain: 1.0 at a channel centre and 0.5 at the edge.

## Cosmic-ray removal (`cosmic_ray_filter`)

A cosmic-ray hit appears in a tone's down-converted stream as a fast step
followed by a slow recovery. The filter works on each tone's first
difference `d[n] = x[n]-x[n-1]`, in which a steady tone is zero:

1. It correlates `d` with a programmable 4-tap template (`cr_tmpl`, signed
   8-bit) separately for I and Q.
2. It flags a sample when `|Re c| + |Im c|` exceeds `cr_threshold`.
3. A flagged sample is replaced by the tone's last unflagged sample. The
   co-add therefore still sums 512 samples, and `res_glitches` tells the
   user how many were substituted.

Per-tone state is held in 700-entry memories, read and written in the same
clock: the previous sample, three past differences and the last good sample.
It is restarted at the first frame of every window.

Two practical notes:

* **Template and threshold are run-time settings.** The detection algorithm
  was still open when this was written: matched filtering against a glitch
  model was the stated approach, with no template given. The template
  length, the difference pre-filter, the |Re|+|Im| measure and the
  hold-last-good replacement are choices of this implementation.
* **Bin-mates leak into the differences.** Another tone in the same coarse
  bin does not rotate to DC. After the down-conversion it is a residual
  tone, and its frame-to-frame differences are not zero. The threshold must
  sit above that beat. The end-to-end testbench sets it with its bin-mates
  switched off.

## Co-add (`coadd_accum`)

This is a per-slot accumulator (700 entries per lane):

* `in_first` loads the sample.
* Other samples add to the sum.
* `in_last` emits the sum and the glitch count one clock later.

Sums are 37 bits wide, so no overflow is possible over 512 samples.

## Tone synthesis (`tone_synth`, `synthesis_pfb`, `bitrev_reorder`)

For frame `m`, bin `b` must hold `Σ a_t · exp(+i·2π·k_t·m/512)`, summed over
the enabled tones in that bin.

`tone_synth` sweeps the same tone table in the same two lanes. A CORDIC
rotates `(a_t, 0)` by `2π·k_t·m/512`, and the result is added into a
per-lane bin buffer. There are two banks:

* While one bank collects frame `m+1`, the other is read out in bin order,
  one bin per clock, with the lanes summed.
* Each word is cleared as it is read.

The first three frames after reset carry no tones: two clear the buffers and one is being generated. An assertion checks that the sweep
plus the CORDIC latency fits in a frame.

`synthesis_pfb` works as follows:

1. It runs the frame through the unscaled inverse FFT.
2. `bitrev_reorder` puts the samples back in time order. It is a ping-pong
   buffer written at the bit-reversed index and read in natural order.
3. The samples pass through `pfb_fir` with `ANALYSIS=0`.
4. The output is rounded and saturated to 12 bits for the DACs.

A tone of table amplitude `a` appears at the DAC with amplitude about `a`
LSB, times the filter gain. Keep the sum of `|a|` over all tones well under
2047 to avoid clipping. The full-size test uses ±3 for 1400 tones.

## Top-level interface (`mkid_readout_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `adc_valid`, `adc_i`, `adc_q` | in | 1, 12, 12 | complex ADC sample, one per clock |
| `dac_valid`, `dac_i`, `dac_q` | out | 1, 12, 12 | complex DAC sample, every clock after reset |
| `cfg_we`, `cfg_addr`, `cfg_tone` | in | 1, 11, `tone_cfg_t` | tone table write |
| `cr_tmpl[4]`, `cr_threshold` | in | 8 each, 32 | glitch template and threshold |
| `chan_valid`, `chan_bin`, `chan_re`, `chan_im` | out | 1, 10, 27, 27 | coarse channel stream |
| `res_valid[2]`, `res_tone[2]`, `res_i[2]`, `res_q[2]`, `res_glitches[2]` | out | 1, 11, 37, 37, 10 per lane | one record per tone per window |
| `glitch[2]` | out | 1 per lane | a sample was replaced this clock |
| `frame_tick`, `window_tick` | out | 1 | frame sweep start; last frame of a window |
| `overrun` | out | 1 | sticky: a sweep did not finish within a frame |

`tone_cfg_t` is defined in `mkid_pkg`:

```
typedef struct packed {
  logic               en;    // tone on
  logic [9:0]         bin;   // coarse bin b
  logic [8:0]         fine;  // fine index k (two's complement offset if >= 256)
  logic signed [15:0] amp;   // drive amplitude (DAC LSB before filter gain)
} tone_cfg_t;
```

Both sides read the table. A change takes effect on the next frame sweep.
Records for the window in progress may then mix old and new settings.

All sizes are parameters with the full-size values as defaults:

* `LOG2C = 10`
* `LOG2F = 9`
* `NTONES = 1400`
* `LANES = 2`

Package constants hold the word widths. The testbenches run small instances
(for example 32 channels × 16 fine points) for speed, and two testbenches run
the defaults.

## Word widths

| signal | width | notes |
|---|---|---|
| ADC, DAC | 12 | the DAC part was described both as 12-bit and as 14-bit; 12 is used |
| filter coefficients | 18 (16 fractional) | unit DC gain per branch |
| filter output | 16 | same scale as the input, rounded and saturated |
| coarse channel value | 27 | 16 + 10 FFT growth + 1 guard |
| after CORDIC | 28 | |
| co-add | 37 | 28 + 9 |
| phase | 16 | full turn = 2^16 |

## Verification

Every testbench checks itself, stops on a watchdog and ends with a line
`TB_RESULT checks=N failures=M`. Run any of them with plain Verilator from
the repository root:

```
verilator --binary --timing -Irtl -Itb rtl/mkid_pkg.sv tb/tb_mkid_readout_top.sv \
          --top-module tb_mkid_readout_top -y rtl +libext+.sv
./obj_dir/Vtb_mkid_readout_top
```

| testbench | size | what it checks |
|---|---|---|
| `tb_pfb_fir` | K=16 | both column directions bit-exact against a direct sum; one-clock latency |
| `tb_fft_r2sdf` | N=32 | forward and inverse against a DFT; bin order; latency |
| `tb_cordic_rotator` | default | 3000 random rotations within 2 LSB; latency |
| `tb_cosmic_ray_filter` | default | bit-exact against a model, with injected glitches |
| `tb_coadd_accum` | default | window sums and glitch counts against a model |
| `tb_coarse_channelizer` | K=32 | every channel value against a floating-point filterbank; isolation ≥ 40 dB |
| `tb_coarse_crosstalk` | **K=1024** | adjacent-channel response as a tone is stepped across channels 326/327 |
| `tb_fine_ddc` | 16×16, 6 tones | records against a DFT of the injected frames; shared bins; lanes |
| `tb_tone_synth` | 32×16, 7 tones | bin values against the exponential sum; buffer clearing |
| `tb_synthesis_pfb` | K=32 | DAC samples against a floating-point synthesis bank (within 4 LSB) |
| `tb_mkid_readout_top` | 32×16, 8 tones | loopback over 10 windows (details below) |
| `tb_mkid_readout_full` | **all defaults** | loopback of 1400 tones (details below) |

`tb_mkid_readout_top` covers:

* record magnitudes
* a shared bin
* a disabled tone
* reconfiguration
* injected glitches, counted per tone and per window

It counts frames, windows, records and glitches.

`tb_mkid_readout_full` loops back 1400 tones of amplitude ±3 with distinct
(bin, fine) pairs, with 376 bins holding two tones. It checks one record per
tone in the second window, with magnitude within 0.7..1.3 of the nominal
value (measured: 0.82..1.03), no glitch and no overrun. It runs in about 20 s.

## Departures and open points

* **Critically sampled, not oversampled.** The intended final filterbanks,
  analysis and synthesis, are oversampled WOLA designs. Their oversampling
  factor and window were not given, so both are critically sampled. This
  causes the edge attenuation and the weak adjacent-bin aliasing described
  above.
* **Throughput.** One complex sample per clock. Real-time operation at
  5 GS/s would need about 10–16 samples per clock at FPGA clock rates. That
  means a parallel (multi-path) FFT and filter, which is not done here. All
  per-frame budgets (700-tone sweeps in 1024 clocks) scale with it.
* **Not included.** The parts below are not in this core:
  * **Pulse detection and tone tracking.** They are planned for a later
    mission. No algorithm was specified. The coarse stream `chan_*` and the
    per-tone records are exposed for them.
  * **The SpaceWire link.** The records are exposed for it.
  * **The RF front end and the converter devices themselves.**
* **Glitch removal is this design's own.** See the section above.
* **Inconsistent source values and how they were resolved:**
  * **DAC width.** The DAC was called 14-bit while naming a 12-bit part.
    12 bits are used.
  * **Coarse channel width.** It was once labelled 488 kHz. 5 GHz / 1024 is
    4.88 MHz, which is used.
  * **2^19.** It was once printed as 542288. The correct 524288 is used.
  * **Bandwidth.** It is quoted as both ≤2.4 GHz and 2.5 GHz. The complex
    5 GS/s band covers both.
