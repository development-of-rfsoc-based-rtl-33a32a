# RFSoC direct-sampling readout for microwave SQUID multiplexers — RTL

A microwave SQUID multiplexer reads hundreds of cryogenic detectors over one
coaxial line. Each detector is coupled to a superconducting resonator with its
own resonance frequency somewhere in 4–6 GHz. The readout sends one probe tone
per resonator down the line, measures each returning tone, and follows each
resonance as it moves. The detector signal is not read from the resonance
directly. A common "flux ramp" sweeps every SQUID periodically, so each
resonance swings back and forth at the flux-ramp rate. The detector signal
then appears as the *phase* of that periodic swing.

The design here is the digital core of such a readout built on an RFSoC, a
device with multi-GHz ADCs and DACs next to programmable logic. The RF band is
sampled directly: there are no analog mixers. Everything from the converter
samples to the demodulated detector phases is digital:

```
            receive                                               transmit
ADC 4.9152 GS/s ─► NCO mixer ─► ÷8 ─► analysis   ─► baseband  ─► synthesis ─► ×10 ─► NCO mixer ─► DAC 6.144 GS/s
  (8 samples/clk)  (band centre)      filter bank    processor    filter bank        (band centre)  (10 samples/clk)
                                      512 channels,  two cores,
                                      2x over-       per-channel
                                      sampled        tracking and
                                                     demodulation
```

The full design has two readout blocks. Each block covers 4–6 GHz in four
500 MHz bands centred at 4.25, 4.75, 5.25 and 5.75 GHz, so the two blocks
together use eight ADCs and eight DACs. Every band is an independent closed
chain as drawn above. The channel and tone counts, the rates, the factors and
the band centres follow the published system. The internals of the filter
banks and of the processor are not published; this implementation supplies
simple, complete versions of them (see *Departures* below).

## Numbers

| quantity | value | note |
|---|---|---|
| readout blocks | 2 | `smurf_rfsoc_top.N_BLOCKS` |
| bands per block | 4, 500 MHz each | `N_BANDS` |
| band centres (NCO) | 4.25, 4.75, 5.25, 5.75 GHz | same on receive and transmit |
| ADC rate | 4.9152 GS/s | 8 samples per clock |
| DAC rate | 6.144 GS/s | 10 samples per clock |
| baseband rate | 614.4 MS/s complex | one sample per clock: 4.9152/8 = 6.144/10 |
| channels per band | 512 | `N_CHAN`; channel spacing 1.2 MHz |
| channel sample rate | 2.4 MHz | twice oversampled: every channel is visited once per 256 clocks |
| total tones | 2 × 4 × 512 = 4096 | |

One clock domain runs everything, at the baseband rate: 614.4 MHz in the
device. The converters deliver and accept their samples as parallel lanes:
8 ADC samples and 10 DAC samples per clock per band. Because of that, no
block needs a second clock.

## The band chain, stage by stage

**Receive mixer (`ddc_mixer`).** A 32-bit phase accumulator runs at the band
centre: its step is `f_centre / f_ADC · 2^32`. Lane *l* of a clock uses phase
`base + l·step`, and the accumulator advances by `8·step` per clock. Each real
sample *x* becomes `x·exp(−jφ)`. The sine table has 1024 entries and is
computed at elaboration from `$sin`/`$cos`. The band centre lies above the ADC
rate's first Nyquist zone, so the NCO works on the aliased digital frequency.
The step formula handles that by itself, because it is taken modulo 2^32.

**Decimator (`decimator`).** Takes the mean of the 8 lanes: one complex sample
per clock. This is a one-stage CIC filter. Its sinc response droops by about
1% at ±50 MHz.

**Analysis filter bank (`analysis_filter_bank`).** The bank has 512 channels
spaced 1.2 MHz apart, and each channel is sampled at 2.4 MHz, so it is twice
oversampled. It is built from two lanes. Each lane is a streaming radix-2
single-path delay-feedback FFT (`fft_r2sdf`, built from nine
`fft_sdf_stage`s) followed by a ping-pong reorder buffer (`bitrev_reorder`,
2×512 words). The FFT takes one sample per clock, divides by 2 per stage, and
emits bins in bit-reversed order; the buffer puts them in natural order.
Lane 0 transforms the 512-sample blocks starting at samples 0, 512, 1024, ….
Lane 1 sees the same stream but starts 256 samples later, so its blocks
overlap lane 0's by half. A block that starts half a block late has an extra
factor (−1)^k on channel *k*. Lane 1 removes that factor, so the samples of a
steady tone keep a continuous phase from one 256-sample hop to the next.
In every clock the two lanes emit channels *k* and *k* xor 256: always one
from each half of the channel range. Channel *k* is centred at `k · 1.2 MHz`
from the band centre. Channels 256–511 are the negative offsets. A tone of amplitude *A* centred on
a channel comes out with amplitude *A*. A real RF tone of amplitude *A* comes
out with amplitude *A/2*, because real-to-complex mixing halves it. Lane 0's
latency is two blocks (1024 clocks) plus about 11 clocks; lane 1 follows 256
clocks later. The stream advances only on `valid`, so the last block sits
inside the pipeline until more samples push it out.

**Baseband processors (`baseband_processor`).** Described in their own
section below. Each band has two cores of 256 channels: core 0 owns channels
0–255, core 1 owns channels 256–511. Because the two analysis lanes always
carry one channel from each half, each core gets exactly one channel sample
per clock. It sees its channels in order and returns one tone value per
channel in the same order. It also reports per-channel results.

**Synthesis filter bank (`synthesis_filter_bank`).** The inverse of the
analysis bank. A toggle in the band wrapper gathers the tones from the two
cores into two lanes of complete frames 0…511. Lane 1 runs 256 clocks behind
lane 0. In each lane, a frame of 512 tone values becomes 512 time samples
through an unscaled inverse FFT. The inverse FFT is the forward FFT with I and
Q swapped at its input and output. Lane 1 first multiplies channel *k* by
(−1)^k, for the same reason as on the analysis side. The two lanes' blocks
overlap by half, so each output sample is the sum of two blocks, halved. A
channel value of amplitude *A* becomes a tone of amplitude *A*. The tones of one band add up, and sums beyond 16 bits
saturate. Software must therefore keep the sum of the amplitudes in a band
below full scale.

**Interpolator (`interpolator`).** Linear interpolation from each sample to the
next gives 10 outputs per clock. The sinc² droop is 0.5% at 24 MHz and 6% at
86 MHz.

**Transmit mixer (`duc_mixer`).** Works like the receive mixer at the DAC rate.
Each lane outputs `Re(iq·exp(+jφ))`, saturated to 16 bits.

## The baseband processor: tracking and flux-ramp demodulation

This is the part that closes the loop through the cryostat. A core is one
time-interleaved pipeline serving 256 channels; a band has two. Each of a
core's channels *k* arrives once per *frame* of 256 clocks, which is the
2.4 MHz channel rate. Its configuration and state live in memories indexed by
*k*:

| memory | width | meaning |
|---|---|---|
| `center_m` | 24 | programmed tone frequency inside the channel, in DDS units (2^24 = the channel sample rate, 2.4 MHz) |
| `amp_m` | 16 | tone amplitude, Q1.15 |
| `eta_m` | 2×16 | complex calibration η, Q1.15 |
| `phs_m` | 24 | DDS phase of the channel's tone |
| `b_m`, `ac_m`, `as_m` | 32 | tracking coefficients, DDS units with 8 fractional bits |

The flux-ramp phase θ (16 bits, one turn = 2^16) is common to all channels. It
steps by `LMS_INC` at the end of every frame. When the external flux-ramp
reset strobe comes, θ instead restarts at 0 at the next frame boundary. Since
a frame lasts 1/2.4 MHz, a flux-ramp harmonic at `f_LMS` needs
`LMS_INC = f_LMS / 2.4 MHz · 2^16`. For example, 20 kHz gives 546. Each of
the two cores of a band keeps its own θ. They step at the same clock once
both analysis lanes run, and they agree from the first flux-ramp reset on.

On each visit to channel *k* the pipeline does the following:

1. **Tracked frequency**, which is the frequency-table entry:
   `f = center + (b + ac·cos θ + as·sin θ)` when feedback is on, else
   `f = center`.
2. **Tone.** The processor emits `amp·exp(jφ)` to the synthesis bank and
   stores `φ + f` as the new phase.
3. **Frequency error.** The received channel sample *x* is the tone of an
   earlier frame after it passed through the resonator. It is rotated back by
   that tone's phase: `y = x·exp(−j(φ − REF_DLY·f))`. `REF_DLY` is the loop
   delay in frames. The error is `e = Im(η·y)`. η is chosen per channel, for
   example from a resonator scan. It turns the resonator response so that,
   near resonance, the imaginary part is proportional to
   `f_resonance − f_tone`.
4. **LMS update** (when feedback is on), with gain `2^−LMS_GAIN`:
   `b += e·g`, `ac += e·g·cos θ`, `as += e·g·sin θ`. The tone thus follows a
   resonance of the form `f_res(θ) = F0 + Δ·cos(θ + ψ)`.
5. **Demodulation.** A 16-iteration CORDIC converts the fitted harmonic into
   its phase, `ψ = atan2(−as, ac)`. That phase is the detector signal.

Pipeline timing: the tone leaves 4 clocks after the channel sample arrives;
the demodulated record (`demod_t`: channel, ψ, *f*, *e*) leaves 22 clocks
after. State is written back 1 clock (phase) and 5 clocks (coefficients) after
it is read. A channel is read again only 256 clocks later, so there is no
hazard. N must be at least 8.

Things to know when using it:

* **The loop delay leads the phase.** A frequency formed in frame *m* is
  measured in frame *m+1*. The fit therefore locks to the resonance one
  flux-ramp step ahead, and ψ reads `LMS_INC` larger than the physical phase.
  This offset is constant, so it drops out of a detector time stream.
* **η sets the sign and scale of the loop.** A wrong η rotation makes the loop
  unstable. After reset η is 1.
* **Loop gain** per frame is `amplitude·(slope of Im(S21))·2^−LMS_GAIN`. The
  closed-loop test uses amplitude 8000, a slope of 1/60000 per DDS unit and
  `LMS_GAIN = 2`. That settles in a few hundred frames and tracks to 0.5% of
  the swing.
* **Reset.** After reset each core clears all its memories, one channel per
  clock. `ready_o` rises after 256 clocks, and configuration writes made
  before then are ignored.

## Configuration interface

The host writes `cfg_i` (`smurf_pkg::cfg_wr_t`): `we`, `blk`, `band`, `chan`,
`sel`, `data`. A write takes effect one clock later.

| `sel` | scope | data |
|---|---|---|
| `CFG_CENTER` | channel | tone frequency word, signed, 24 bits, 2^24 = 2.4 MHz |
| `CFG_AMP` | channel | amplitude, Q1.15 |
| `CFG_ETA` | channel | `{re[31:16], im[15:0]}`, Q1.15 |
| `CFG_CLEAR` | channel | clears the DDS phase and the tracking coefficients |
| `CFG_FB_EN` | band | bit 0: tracking feedback on |
| `CFG_LMS_INC` | band | flux-ramp phase step per frame |
| `CFG_LMS_GAIN` | band | right shift of the LMS gain (reset value 4) |
| `CFG_REF_DLY` | band | loop delay in frames (reset value 1) |

Channel writes go to the core that owns the channel; band writes go to both
cores of the band. The top's other ports are the converter sample arrays with
their valid signals, the flux-ramp reset strobe, `ready_o`, and per band
`demod_o` (two records per clock, one per core),
`fb_active_o` (a tracking update happened) and `fr_applied_o` (a flux-ramp
reset took effect).

## Departures from the published system

* **Filter banks.** Like the published banks, the banks here are twice
  oversampled: 512 channels, each sampled at 2.4 MHz. The published banks
  also include a "tone filtering" prototype filter, whose taps are not
  published. The banks here use a rectangular window instead: blocks of 512
  samples at a hop of 256. Leakage between neighbouring channels is therefore
  much higher than with a polyphase filter. A tone that is off a channel
  centre is synthesised with a small phase step at each hop. This is the main
  simplification.
* **Converter-tile filters.** In the device, the decimators and interpolators
  are hard blocks with sharp half-band filters. Here they are a boxcar mean
  and linear interpolation. The mixing image is suppressed only by the
  boxcar's sinc response, so its alias can reach other channels of the band.
* **Processor details.** The eta-rotated discriminator, the single-harmonic LMS
  model, the CORDIC readout, all fixed-point formats and the register map are
  this implementation's choices. The published system names these functions
  and shows η, a reference phase delay and an LMS frequency in its software
  plots, but does not give their arithmetic.
* **Out of scope.** Converters, RF front end, clocking (PLL/MMCM), timing
  receiver, host links and flux-ramp generation are outside this RTL. The
  flux-ramp reset arrives as a strobe. The results leave as a per-band record
  stream, with no packing for a data link.
* **Sample-rate conflict.** One passage of the source gives the ADC rate as
  4.9512 GS/s; elsewhere it is 4.9152 GS/s. 4.9152 GS/s is used because it is
  the only value consistent with the 614.4 MS/s baseband shared with the
  6.144 GS/s, ×10 transmit side.

## Verification

Every testbench is self-checking. Each compares the block against an
independent floating-point model, has a watchdog, and ends with a
`TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_ddc_mixer` | every lane against `x·cos φ`, `−x·sin φ` (4.25 GHz at 4.9152 GS/s); 3-clock latency |
| `tb_duc_mixer` | every lane against `I·cos φ − Q·sin φ` (5.75 GHz at 6.144 GS/s); 3-clock latency |
| `tb_decimator` | exact rounded mean of 8 lanes, one per clock |
| `tb_interpolator` | all 10 phases on the line between consecutive samples, within 1 LSB |
| `tb_analysis_filter_bank` | both lanes, each channel of 64-point blocks (noise plus positive- and negative-frequency tones) against a DFT/N of its half-offset block within 12 LSB, with the (−1)^k term on lane 1; channel order; lane pairing; lane 1 N/2 clocks behind; latency 2N+6 |
| `tb_synthesis_filter_bank` | each time sample against a floating-point overlap-add of the two lanes' inverse DFTs within 24 LSB; latency |
| `tb_baseband_processor` | closed loop with a resonator model whose resonance swings with the flux ramp: feedback off gives f = centre; tone amplitude and phase advance; tracking error < 2% of the swing; demodulated phase equals the model's ψ per channel; per-channel η undoes a rotated response; every flux-ramp reset applied |
| `tb_readout_block` | one block at 64 channels: an RF tone at 5.25 GHz + 5 channels read back at the expected level in the right band only; a programmed tone leaves on the right DAC at the expected frequency and level and nowhere else; flux-ramp resets in every band |
| `tb_smurf_rfsoc_top` | whole design at its default size: RF tones on two blocks and both channel signs, read back through η = 1 and η = j; DAC lock-in at 4.75 GHz + 20 channels (amplitude 6000 ± 5%, nothing five channels away, silence in an unprogrammed band); feedback on; three flux-ramp resets in all eight bands; channel clear; demodulated records from both processor cores of every band, each only for its own half of the channels |

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/smurf_pkg.sv tb/tb_smurf_rfsoc_top.sv \
          --top-module tb_smurf_rfsoc_top -o sim && ./obj_dir/sim
```

The full-size top-level test simulates about 10 000 clocks and runs in under a
minute. The testbenches sample outputs on the falling clock edge and drive
inputs on the rising edge. Because two-state simulation starts memories at
random values, every memory that is read is either reset or gated by a valid
flag.

## Files

* `rtl/smurf_pkg.sv`: shared types (`cplx_t`, `cfg_wr_t`, `demod_t`),
  rates and the NCO step function.
* `rtl/smurf_rfsoc_top.sv`: two readout blocks.
* `rtl/readout_block.sv`: four band chains.
* Band stages: `ddc_mixer`, `decimator`, `analysis_filter_bank`,
  `baseband_processor`, `synthesis_filter_bank`, `interpolator`, `duc_mixer`.
* Helpers: `nco_sincos` (sine table), `fft_r2sdf` and `fft_sdf_stage`
  (streaming FFT), `bitrev_reorder`, `cordic_atan2`.
* `tb/`: one testbench per stage and the end-to-end test.
