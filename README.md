# CosmoCube spectrometer back end in SystemVerilog

CosmoCube is a CubeSat (12U or 16U) meant for lunar orbit. On the far side of the Moon it is shielded
from Earth's radio interference, and there it tries to measure the faint, sky-averaged 21-cm
hydrogen signal from the cosmic Dark Ages. That signal is redshifted into 10-100 MHz. The
radiometer samples the whole 0-128 MHz band directly with the ADC of a Xilinx RFSoC (ZCU111
board). The programmable logic then turns the 2048 MSPS sample stream into power spectra of
2048 channels, 62.5 kHz wide. It averages many spectra on chip, because the downlink is far
too slow for raw data, and writes the result to DDR4 for the processor to send home.

The instrument also calibrates itself. In calibration mode one DAC of the same chip plays a
known waveform into the front end. Two more ADCs sample the incident and reflected waves at a
pair of directional couplers, and the ratio of their powers gives the reflection coefficient.

This repository holds RTL for the programmable-logic part of that system. It covers the
receive chain from ADC samples to spectra in memory, the calibration waveform chain up to the
DAC samples, the coupler power meters and the register file through which the processor
controls it all. The analog parts, the converters themselves, DDR4 and the processor software
lie outside the RTL. The converter and memory buses are ports of the top module,
`cosmocube_spectrometer`.

## The numbers that fix the architecture

Everything follows from three figures: a 2048 MSPS sample rate, a 256 MHz fabric clock and a
4096-point FFT.

| quantity | value | how it arises |
|---|---|---|
| ADC / DAC sample rate | 2048 MSPS | converter setting |
| fabric clock | 256 MHz | converter-matched clock |
| samples per clock on a converter bus | 8 | 2048 / 256 (`LANES`) |
| rate after decimation | 256 MSPS, 1 sample per clock | decimate by 8 |
| observed band | 0-128 MHz | Nyquist of 256 MSPS |
| FFT length | 4096 | |
| bin width | 62.5 kHz | 256 MHz / 4096 |
| bins kept per spectrum | 2048 | the input is real, so the upper half mirrors the lower one |
| PFB taps per branch | 20 | 81920 coefficients / 4096 branches |
| ADC / DAC resolution | 12 / 14 bits | |
| output stream width | 32 bits | |
| frame rate | 62 500 frames/s | 256 MSPS / 4096 |

The design never needs more than one sample per clock after the decimator. So every block
from the PFB to the accumulator is a plain streaming pipeline with no parallel lanes.

## Receive chain

```
adc_spec[8] -> nco_mixer -> decimator -> pfb_fir -> fft_r2sdf -> bram_fifo -> frame_conv -> axis_dma -> AXI4 (DDR4)
 2048 MSPS     (bypass)      /8, LPF     4096x20     4096-pt      4096 deep    |X|^2, sum     ring buffer
```

* **nco_mixer** multiplies each lane by a cosine carrier from a 32-bit phase accumulator. It
  is bypassed after reset. When it is enabled the sky band is shifted, because a real mix
  puts a tone at f into f - f_nco and f + f_nco.
* **decimator** computes one output per clock from the newest 128 input samples. It uses a
  128-tap low-pass filter: a Kaiser-windowed sinc with cut-off at 128 MHz, flat within 0.03 dB
  to 100 MHz and 54 dB down from 156 MHz. The result is 256 MSPS. It keeps 4 extra fraction bits,
  so a 12-bit input becomes a 16-bit output (x16).
* **pfb_fir** and **fft_r2sdf** together form the channelizer, described in the next section.
* **bram_fifo** buffers the FFT output (bin number, real part, imaginary part: 76 bits).
* **frame_conv** turns FFT frames into integrated power spectra. See "Integration and the
  spectrum format".
* **axis_dma** writes the 32-bit spectrum words to memory, one AXI4 single-beat write per
  word, into a ring buffer of programmable base and length.

## The channelizer: polyphase filter bank and FFT

A bare FFT has poor channel isolation. Its sinc-shaped bin response leaks strong sky or
interference power into neighbouring channels. A polyphase filter bank (PFB) fixes this. It
applies a long prototype low-pass filter, 20 frames long, before a 4096-point FFT. The
response of every channel then approaches that prototype's flat top and steep skirts.

**Polyphase FIR (`pfb_fir`).** A commutator counter `k = 0..4095` deals samples to 4096
branches in turn. Branch `k` is a 20-tap FIR that runs once per frame:

```
y[m*P + k] = sum_{t=0..19} h[(19 - t)*P + k] * x[(m - t)*P + k]        P = 4096
```

The window must lie over the newest 20 frames in time order, so the sample t frames back
takes weight h[(19 - t)P + k]. Reversing only the tap order (h[tP + k]) still gives clean
peaks for tones centred on a bin. But the window is then broken into pieces, and tones between
bins leak almost fully into the neighbouring channel. Only a sweep across a channel shows the
difference; the workload test below runs one.

The 19 past samples of every branch sit in 19 delay memories, each 4096 deep and addressed by
`k`. Every clock reads one word from each memory, shifts the chain by one and stores the new
sample. The prototype has 81920 coefficients:

```
h[n] = sinc((n - (P*T - 1)/2) / P) * (0.54 - 0.46 cos(2 pi n / (P*T - 1))),   T = 20
```

They are quantised to 18 bits (Q1.17) and computed when the coefficient memories are
initialised, so no table file is needed. Each branch then has a DC gain of about 1. The delay
memories are not cleared after power-up, so the first 19 frames carry undefined history.

**FFT (`fft_r2sdf`, `fft_sdf_stage`).** The FFT is a radix-2 single-path delay-feedback
pipeline, decimation in frequency, with 12 stages. Stage `s` has a feedback memory of depth
D = 2048 >> s. Each stage works on blocks of 2D samples:

* While the first D samples of a block arrive, the stage stores them. It outputs what its
  memory held: the differences of the previous block, times the twiddle exp(-j 2 pi n / 2D).
* While the second D samples arrive, the stage outputs the sums a + b and stores the
  differences a - b.

A stage thus delays the data by D samples. The whole pipeline delays it by 4095 samples plus
one register per stage. It reads one sample and writes one per clock without a gap. The
output comes out in bit-reversed order, and `out_bin` gives the true bin of each output.
Nothing downstream reorders the data: the accumulator is addressed by bin, so the order costs
nothing.

**Fixed point.** The arithmetic is fixed point throughout. The FFT is unscaled: 18-bit input
with 12 bits of growth fits in the 32-bit internal width, so it cannot overflow. Twiddles are
Q2.16 in 18 bits, and products are rounded. The 32-bit words end up dominated by the larger
rounding noise of the earlier stages, not by overflow.

## Integration and the spectrum format

`frame_conv` keeps bins 0..2047. For each one it adds re^2 + im^2 (64 bits) into an
accumulator memory addressed by bin. The first frame of an integration overwrites the stored
value; later frames add to it with saturation. After `navg` frames (reset value 250;
250/500/2500 are typical) the two halves of the double-buffered accumulator swap. The
finished half is then streamed out in natural bin order while the next integration fills the
other half.

One spectrum is 4096 32-bit words: the low word, then the high word, of the 64-bit sum for
bin 0, then for bin 1, and so on. The last word carries `tlast`. In memory, bin `b` of a
spectrum starting at address A sits at A + 8b (low word) and A + 8b + 4 (high word). The
value is the sum over the integration, not the mean. Divide by `navg` in software if the mean
is wanted.

Integration starts at the first frame boundary after `run` is set and stops at the first
boundary after it is cleared. Suppose an integration ends while the previous spectrum is
still being sent. Writing a spectrum takes at least 3 clocks per word, 12 288 clocks or three
frames, so this happens only with integrations of three frames or fewer, or with slow memory. The new
spectrum is then dropped, the `overflow` pulse sets a sticky status bit, and integration
starts again.

At the default of 250 frames a spectrum leaves every 4 ms. That is 16 KiB per spectrum, about
4 MB/s. Headroom: a full-scale tone gives about 4.5e15 per bin and frame, and 2500 frames of
that still fit in 64 bits.

## Calibration chain and coupler power

```
wave_lut (256 MSPS) -> interpolator (x8) -> nco_mixer -> dac_data[8] (2048 MSPS, 14 bit)
adc_inc[8] -> power_meter -> incident power      adc_ref[8] -> power_meter -> reflected power
```

* **wave_lut** is a 4096 x 14-bit pattern table. The processor writes it through two
  registers (address, then data). It plays out entries 0..`len-1` cyclically, one per clock,
  whenever calibration mode is on, whether or not acquisition runs. The tone has therefore
  settled before a spectrum is taken. After initialisation the table holds one sine period,
  which is a 62.5 kHz tone with the full length. A 64-entry sine gives a 4 MHz tone.
* **interpolator** upsamples by 8. It is the zero-insertion-and-low-pass scheme, written
  polyphase so that the zero products are never formed: output lane p takes taps p, p+8,
  ..., p+120 of the same 128-tap filter as the decimator. The result is multiplied by 8 to
  restore the gain lost to the zeros.
* **nco_mixer** (transmit instance) can move the waveform up in frequency before the DAC.
* **power_meter** sums x^2 over all 8 lanes for `window` clocks, then latches the 64-bit sum.
  The incident-to-reflected ratio is 1/|Gamma|^2.

In detection mode (`cal_mode` = 0) the DAC bus is held at zero with `dac_valid` low, and the
power meters are idle. In calibration mode the power meters measure only while `run` is set.
The spectrum chain runs in both modes, so a loopback of the DAC into the spectrum ADC shows
the calibration tone in the spectrum. `cal_mode_o` is brought out for
the front-end switch that selects antenna or calibrator.

## Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] run, [1] cal_mode, [2] receive NCO enable, [3] transmit NCO enable, [4] clear (self-clearing: DMA index and counters, sticky bits) |
| 0x04 | NAVG | rw | frames per integration (reset 250; 0 counts as 1) |
| 0x08 | DMA_BASE | rw | ring buffer byte address |
| 0x0C | DMA_LEN | rw | ring buffer length in 32-bit words (reset 4096 = one spectrum) |
| 0x10 | ADC_FTW | rw | receive NCO step, f = FTW / 2^32 x 2048 MHz |
| 0x14 | DAC_FTW | rw | transmit NCO step |
| 0x18 | PM_WIN | rw | power-meter window in clocks (reset 4096) |
| 0x1C | LUT_LEN | rw | waveform length (0 = 4096) |
| 0x20 | LUT_ADDR | rw | waveform write address |
| 0x24 | LUT_DATA | rw | writing stores the word at LUT_ADDR |
| 0x30 | STATUS | ro | [0] spectrum dropped (sticky), [1] DMA write error (sticky) |
| 0x34 | SPECTRA | ro | integrations completed |
| 0x38 | DMA_FRM | ro | spectra written to memory |
| 0x3C/0x40 | PM_INC | ro | incident power, low/high word |
| 0x44/0x48 | PM_REF | ro | reflected power, low/high word |
| 0x4C | PM_CNT | ro | power measurements completed |

A write is taken when address and data are valid together. Reads return one clock after the
address.

## Timing

| block | latency |
|---|---|
| nco_mixer, decimator, pfb_fir, interpolator, wave_lut | 1 clock |
| fft_r2sdf | 4095 valid samples + 12 clocks |
| frame_conv | spectrum readout starts 1 clock after the last frame of an integration; 2 words per bin |
| axis_dma | 3 clocks per word with a zero-wait memory |

Every block moves `valid` along with its data. A bubble at the input moves through the
receive chain without breaking frame alignment, because all counters advance only on valid
samples. Reset is asynchronous and active low. It clears control state but not memory
contents.

## What comes from the paper and what is this design's own

Taken from the published description: the block chain (ADC, decimation, PFB, FFT, block-RAM
FIFO, frame conversion, DMA to DDR4; LUT, interpolation, NCO, DAC); the 2048 MSPS rate and
256 MHz clock; the 4096-point FFT with 81920 PFB coefficients and 62.5 kHz bins; fixed-point
arithmetic; the 12-bit ADC and 14-bit DAC; the 32-bit stream; on-chip averaging over
250-2500 frames; detection and calibration modes with two coupler ADCs; AXI-Stream inside the
fabric and AXI-Lite to the processor.

This design's own choices, because the description does not go that deep:

* The decimation factor of 8 and the interpolation factor of 8 are derived from the rates.
  Both use one filter, a 128-tap Kaiser-windowed sinc, which is chosen here.
* The PFB prototype window (Hamming x sinc) and all bit widths.
* The FFT architecture (R2SDF), its unscaled 32-bit arithmetic and the twiddle format.
* What "frame conversion" does: power, integration as a sum, double buffering, the word order
  and the drop-on-overflow policy.
* The DMA protocol (single-beat AXI4 writes, ring buffer).
* The whole register map and its reset values.
* The power detector (sum of squares over a window).
* Real-only NCO mixing. On the transmit side the order LUT, interpolator, NCO follows the
  block diagram. The prose puts the NCO first and the interpolation after it.
* Where the FIFO sits. The block diagram hangs the block-RAM FIFO off the FFT with a dashed
  line. The prose says the data is stored in it after the transform. Here it sits in series
  between the FFT and frame conversion, which is one reading of both.
* The NCO. The block diagram draws one NCO between the DAC and the ADC, serving both. On the
  RFSoC that oscillator belongs to the converter tiles. Here each chain has its own NCO mixer
  in the fabric, with its own frequency register, so the RTL is complete without the tiles.
* The description multiplies "2048 samples" by the number of averaged frames to get the
  integration time. Here 2048 is read as the number of bins kept from each 4096-point frame.
  With that reading, 2500 frames at 62 500 frames/s is 40 ms of sky time.

Described but not in this RTL: the RF-ADC and RF-DAC tiles (including the 20 mA / 32 mA DAC
output modes), the balun board, the analog front end (antenna, Dicke switch, couplers, VGA,
anti-aliasing filter), DDR4 and its controller, and the processor's DMA driver and TCP/IP
link. A 65536-point configuration (4 taps per branch) is described only as a comparison.
`FFT_LEN` and `TAPS` are parameters, but that size was not simulated.

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| tb_nco_mixer | bypass; carrier at fs/16 and 3fs/64 against a floating-point cosine |
| tb_decimator | every output against the FIR sum; DC gain x16 |
| tb_pfb_fir | 8 branches x 4 taps: every output against the formula, with the prototype computed independently |
| tb_fft_r2sdf | 64-point frames of random data, with and without input gaps, against a direct DFT; bit-reversed bin numbers; one output per clock |
| tb_bram_fifo | random traffic against a queue model, full and overflow |
| tb_frame_conv | 16-bin frames, 3-frame integrations, random back-pressure: each word against computed power sums; overflow |
| tb_axis_dma | ring addressing, data, counters, with a randomly stalling memory |
| tb_ctrl_regs | reset values, write/read-back, strobes, status counters |
| tb_power_meter | window sums against computed sums of squares |
| tb_wave_lut | initial sine, pattern write and cyclic playback |
| tb_interpolator | all 8 lanes against the zero-stuffed filtered stream |
| tb_cosmocube_spectrometer | the whole design at full size: see below |
| tb_spectrometer_workloads | the channelizer measurements, at full size: see below |

The system test uses all defaults: 4096-point FFT, 20 taps, 8 lanes. It drives the ADCs from
the bench and uses `axi_mem_model` as DDR4. It runs four phases:

1. A 6.25 MHz tone must peak in bin 100, with every bin more than 4 away at least 80 dB
   lower. In practice the isolation is about 95 dB.
2. With the receive NCO at 2 MHz, peaks must appear in bins 68 and 132.
3. In calibration mode, with the DAC looped back to the ADCs, a 64-entry LUT sine must peak
   in bin 64, with every bin more than 4 away at least 70 dB lower (84 dB in practice). The
   power meters must report the 16:1 incident/reflected ratio set by the
   bench.
4. One-frame integrations against a slow memory must set the overflow bit.

It also counts integrations, DMA ring wraps, mode switches, NCO use, LUT writes, power results
and overflows, and fails if any of them never happened. It runs in about a second.

`tb_spectrometer_workloads` repeats, in simulation, the two measurements that characterise the
channelizer itself. Both run with default parameters.

* **Channel sweep.** A tone is stepped in 6.25 kHz steps across channel 560 (35 MHz), from 1.25
  channels below to 1.25 channels above. The channel's response is flat within 0.03 dB out to a
  quarter channel. It is -6.0 dB at the half-channel crossover, and -52.7 dB or lower from 0.6
  of a channel outwards, falling to -70 dB at 1.2 channels. These values match the response of
  the ideal floating-point filter bank to within 0.05 dB.
* **Noise against integration length.** Noise is integrated over 250, 500 and 2500 frames. The
  bin-to-bin scatter falls as 1/sqrt(2 navg): 0.045, 0.032 and 0.015 measured, against 0.045,
  0.032 and 0.014 expected. The level per frame agrees between the three runs within 0.5 %.

It simulates 3200 frames and takes about 20 seconds.

To simulate with Verilator, for example the system test:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/spec_pkg.sv \
    tb/tb_cosmocube_spectrometer.sv --top-module tb_cosmocube_spectrometer -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace the testbench name to run another one. The package `spec_pkg` must come first. The
testbenches reset everything they read, so random initial values (`+verilator+rand+reset+2`)
are fine.

## Limits worth knowing

* The decimator and interpolator filter (128 taps) is flat within 0.03 dB up to 100 MHz. It
  is 54 dB down from 156 MHz, the lowest frequency that folds back onto the science band. It
  sits where the RFSoC would use the converter tiles' own decimation and interpolation
  filters. At 128 multiplies per clock in each direction, it is the largest multiplier user in
  the design. Both filters are symmetric, so folding the pairs would halve that; this is not
  done here.
* Synthesised at the defaults, the design holds about 3.5 Mbit of memory. The filter bank
  takes 2.4 Mbit: 19 delay memories and 20 coefficient memories, each 4096 words. The FFT
  feedback memories take 0.4 Mbit, and the FIFO and the accumulator 0.26 Mbit each. The
  ZCU111's device has about 39 Mbit of block RAM, so this is roughly 9 % of it.
* The coefficient and twiddle memories are filled by initialisation code that uses real
  arithmetic. FPGA tools accept this for ROM contents, but a tool that cannot evaluate it
  would need the tables supplied another way.
* The PFB delay lines hold undefined data for 19 frames after power-up. Discard the first
  spectrum after starting, or wait at least 20 frames before setting `run` (the system test waits 21).
