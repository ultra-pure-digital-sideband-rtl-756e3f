# Calibrated digital sideband separation: spectrometer RTL

A sideband-separating (2SB) heterodyne receiver mixes the sky signal down in two
mixers fed 90 degrees apart, giving two IF outputs, I and Q. An IF hybrid
recombines them so that the upper sideband (USB) comes out of one port and the
lower sideband (LSB) out of the other. How well the unwanted sideband is
suppressed (the sideband rejection ratio, SRR) depends on how well the two
analog paths match in gain and phase. Analog receivers reach 10-20 dB. Above
about 500 GHz such receivers are hard to build at all.

This design removes the analog IF hybrid. Both IF signals are digitised, split
into 2048 spectral channels each by a polyphase filter bank, and combined
**per channel** with complex constants:

    LSB[k] = C1[k]·I[k] + C2[k]·Q[k]
    USB[k] = C3[k]·I[k] + C4[k]·Q[k]

The constants are not the fixed values of an ideal hybrid (1, ±i). They are
measured on the real receiver, so in every channel they cancel whatever gain
and phase imbalance the analog front end has. The result is an SRR limited by
the digital side (ADC linearity, arithmetic precision, calibration resolution)
rather than by the analog parts. With an ALMA Band 9 (602-720 GHz) front end,
an instrument of this kind measured about 45 dB on average.

The RTL here implements the spectrometer that does this. It contains the
sideband-separating spectrometer and the calibration spectrometer the
constants are measured with. The analog receiver, the ADC chips and the host
computer are outside the RTL.

## Signal flow

```
 ADC I ─┐            ┌─ pfb (I) ─┬──────────► C1 ──┐
        ├─ adc_if ───┤           │                 ├─(+)─► |.|² ─► vacc ─► lsb_dump
 ADC Q ─┘   (sync)   └─ pfb (Q) ─┼──┬───────► C2 ──┘
                                 │  │
                                 └──┼───────► C3 ──┐
                                    │              ├─(+)─► |.|² ─► vacc ─► usb_dump
                                    └───────► C4 ──┘
            pfb (I), pfb (Q) ─► cal_xspec ─► 4 × vacc ─► cal_pow_i, cal_pow_q,
                                                         cal_cross_re, cal_cross_im
```

| Stage | Module | Data |
|---|---|---|
| ADC interface | `adc_if` | 8-bit offset binary in, 8-bit two's complement out, frame sync |
| Polyphase filter bank | `pfb` = 8 × (`pfb_fir` + 512-point `fft_r2sdf`) + `fft_lane_combine` | 4096-sample frames in, 8 samples per clock; 2048 channels of 18+18 bits out, 4 per clock |
| Calibration multipliers C1..C4 | `cal_cmult` | 18+18 bits × 18+18-bit constant (16 fraction bits) → 21+21 bits |
| Complex adders | `cadd` | 22+22 bits, exact |
| Power | `power` | 48 bits, exact |
| Vector accumulators | `vacc` | 64-bit signed sums, 2048 per stream (512 in each of 4 lanes) |
| Calibration products | `cal_xspec` | \|I\|², \|Q\|², Re and Im of I·conj(Q), 37 bits |
| Shared types and sizes | `sbs_pkg` | |

Each ADC delivers 8 samples per clock, so a 250 MHz clock carries the
2 GS/s of the real converters. The filter banks turn each group of 8 samples
into 4 channels. Everything after the filter banks exists 4 times, once per
**output lane**. Lane j carries channels 512·j to 512·j+511, one per clock;
the drawing above shows one lane.

Every stream between the blocks carries one channel per clock and lane. Each
value has three tags: `valid`, `first` (first beat of a spectrum) and `chan`
(its channel number within the lane). A block never has to know the channel
order. It only looks at the tags.

## The digital IF hybrid and how it is calibrated

This is the part of the design that matters most. It is also the part easiest
to get wrong when the RTL is used.

**Sign convention.** With the FFT defined as X[k] = Σ x[n]·e^(−2πikn/N), a tone
whose Q copy lags I by 90 degrees (Q = sin, I = cos) gives Q[k] = −i·I[k].
This design calls such a tone upper sideband. An ideal hybrid for that
convention is C1 = C3 = 1, C2 = −i, C4 = +i. Those are the values the
constant memories hold after configuration. If your front end has the opposite
convention, the two outputs swap until you load measured constants. Loading
measured constants makes the convention irrelevant.

**Calibration procedure (host side).** Put a test tone in the USB at channel k.
Integrate, then read `cal_pow_i[k]` = Σ|I|² and the cross product
X = `cal_cross_re[k]` + i·`cal_cross_im[k]` = Σ I·conj(Q). The front end's ratio
for that sideband is R_usb = Q/I = conj(X)/Σ|I|². Repeat with the tone in the
LSB to get R_lsb. To make each output blind to the other sideband, choose

    C1 = 1,  C2 = −1/R_usb      (LSB output cancels the USB tone)
    C3 = 1,  C4 = −1/R_lsb      (USB output cancels the LSB tone)

that is, C2 = −Σ|I|²·(X_re + i·X_im)/|X|², and the same with the LSB
measurement for C4. Sweep the tone across the band and repeat. Write the
constants as 18-bit two's-complement numbers with 16 fraction bits, so the
range is [−2, 2). Use the `cal_wr` port: `sel` 0..3 picks C1..C4 and `addr` is
the constant index. A write takes effect on the next clock, and it can be made
while the spectrometer runs.

**Calibration resolution.** There are 1024 constants per multiplier for 2048
channels. Channel k uses constant k/2, so one constant covers two adjacent
channels (about 1 MHz at a 1 GHz band). The host should average the
measurements of the two channels or take the one nearer the pair's centre. The
error this adds depends on how fast the front end's gain and phase vary
across the band. For slopes under 3 dB/GHz and 90°/GHz it is of order 70 dB,
below the roughly 55 dB that the ADCs' spurious-free dynamic range allows.

**What limits the result.** The residual image is set by the ADC's spurious
content and by how accurately the constants were measured. It is also set by
the front end's stability after calibration. The 18-bit datapath limits SRR
to roughly 100 dB, far away. The end-to-end testbench shows the mechanism: a
front end with a 20% gain error and a 15-25° phase error gives 13-15 dB of
rejection with the ideal constants. After one calibration step it gives
57-66 dB.

## Polyphase filter bank

A frame is 4096 samples; with 8 per clock it lasts M = 512 clocks. Sample
8·m + l of a frame arrives on lane l at clock m.

`pfb_fir` is the polyphase FIR front end, one per lane. It holds the last
TAPS = 4 frames in three memories (512 words each in a lane) that are read
and rewritten at the same address each clock. For frame position p it forms

    y[p] = Σ_{t=0..3} h[(3−t)·4096 + p] · x_{k−t}[p]

Here h is a 16384-point windowed sinc (4 channel widths, Hamming window). It
is quantised to 18 bits, with the peak at 2^17−1, and computed at elaboration.
Lane l holds only the coefficients of its positions p = 8·m + l (parameters
`STRIDE` and `LANE`). The sum is scaled by 2^−8 with rounding and saturation
to 18 bits. A full-scale 8-bit input therefore uses about half the 18-bit range.

**Parallel transform.** The 4096-point DFT is split as 4096 = 8 × 512. Each
lane runs its own 512-point FFT over its 512 filtered samples, giving Y_l[k1].
`fft_lane_combine` then finishes the transform:

    X[k1 + 512·k2] / 4096 = (1/8) · Σ_l W_8^(l·k2) · W_4096^(l·k1) · Y_l[k1]

where W_K = e^(−2πi/K). The first stage rotates lane l by W_4096^(l·k1), using
18-bit twiddles from a table computed at elaboration. The second stage is an
8-point DFT across the lanes, written as sums of constant products, and
divides by 8. All lanes deliver the same k1 in the same clock, so this is a
purely combinational step per clock, with two register stages. Only
k2 = 0..3 are produced; for a real input these are channels 0..2047.

`fft_r2sdf` is a radix-2, decimation-in-frequency, single-path delay-feedback
FFT with log2(N) stages (9 for the 512-point lane transforms). Stage s has a feedback memory of N/2^(s+1)
words. It halves its results (rounded), so the output is X[k]/N and cannot
overflow. The one exception is the twiddle rotation: it saturates if a
difference near full scale in both real and imaginary parts is rotated by
about 45 degrees. This cannot happen in the first stage, whose input is real.
Later stages have already been halved. The output comes in **bit-reversed
order**: output sample p of a frame is X[bitrev(p)].

`pfb` feeds the FIR outputs as the real part with a zero imaginary part. It
keeps only channels 0..2047, because the input is real and its spectrum is
conjugate-symmetric. A spectrum arrives over 512 clocks, 4 channels per
clock: output lane j carries channel k1 + 512·j. k1 runs in bit-reversed order
(0, 256, 128, 384, ...) and comes out as `chan`. Nothing downstream reorders:
the constant memories and the accumulators are addressed by `chan`.

With `LANES = 1` the same module becomes a serial filter bank: one 4096-point
FFT and one sample per clock. It then keeps the even output positions of the
FFT, which hold channels 0..2047. The top does not use this form.

## Integration and readout

`vacc` keeps one 64-bit signed sum per channel. The first spectrum of an
integration overwrites the sums and later ones add to them. During the last
one (spectrum `acc_len`−1) the finished sums leave on the dump port and are
not stored. The next spectrum therefore starts a new integration without a
gap. `acc_len` is read at each integration boundary.

A dump is 512 beats on each of the 4 lanes at once, with `valid`, `first` on
the first beat, `chan` and `data`, in the order the spectrum arrived. The
top turns `chan` into the global channel number (512·j + k1). At 2 GS/s one
spectrum takes 2.048 µs. The 134 ms integrations used with the real instrument are therefore
`acc_len` = 65536. The largest possible power is 2^43. Integrated over 2^16
spectra it stays below 2^59, well inside the accumulator.

There are six accumulated streams in the top, each with one accumulator per
lane: LSB, USB, |I|², |Q|², Re and Im of I·conj(Q). They all share `acc_len` and start on the same spectrum, so their
dumps describe the same integration.

## Top-level interface (`sbs_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `arm` | in | 1 | rising edge aligns the 4096-sample frames; needed once after reset |
| `adc_i`, `adc_q` | in | 8 × [8] | 8 offset-binary samples per ADC per clock; element l is sample 8·n + l |
| `acc_len` | in | 32 | spectra per integration (≥ 1) |
| `cal_wr` | in | `cal_wr_t` | constant write: `we`, `sel` (C1..C4), `addr` (0..1023), `re`, `im` |
| `lsb_dump`, `usb_dump` | out | `acc_dump_t` × [4] | integrated sideband power spectra, one stream per lane |
| `cal_pow_i`, `cal_pow_q`, `cal_cross_re`, `cal_cross_im` | out | `acc_dump_t` × [4] | integrated calibration products, per lane |
| `integrations`, `cal_integrations` | out | 32 | dumps begun (sideband / calibration) |
| `frames` | out | 32 | frames since `arm` |

`acc_dump_t` (in `sbs_pkg`) is `{valid, first, chan[10:0], data[63:0]}`;
`chan` is the global channel number. Constant a lives in lane a/256; the top
decodes `cal_wr.addr` accordingly, so the host sees one flat table of 1024
constants.

**Latency.** `adc_if` takes 1 clock. The FIR takes 2 clocks, the lane FFTs
512−1+9 clocks and the lane combiner 2. The `pfb` output register adds 1
clock. A frame's first channels therefore leave the filter banks 526 clocks
after its first samples enter `adc_if`. After that, the multipliers take 2 clocks, the adder 1, power
1 and the accumulator 2. The calibration path takes 1 + 2 clocks after the
filter banks. The rate is 8 samples per ADC per clock, continuous. There is
no back-pressure anywhere, as in any real-time spectrometer.

## Sizes

All defaults in `sbs_pkg` and in the module parameters are those of the
instrument described: 8-bit ADCs, 2048 channels, 18+18-bit FFT data, 1024
calibration points, 48-bit power and 64-bit accumulators. This design chose
the following values itself: 8 lanes (`LANES`, a 250 MHz clock for 2 GS/s), 4 filter taps, a Hamming window, 18-bit filter
coefficients and twiddles, the constant format Q2.16, and the 21/22-bit
widths between the multipliers and the power block. Every module can be
instantiated at smaller sizes (e.g. `N = 64`), and the unit testbenches do so.

## Departures from the instrument described

- **Parallel structure.** The real instrument digitises at 2 GS/s, and its
  FPGA must process several samples per clock. How many, and how its wideband
  filter bank is organised, is not documented. This design takes 8 lanes and
  the lane-FFT-plus-combiner structure described above. It has not been
  taken through FPGA place-and-route, so whether a given device reaches
  250 MHz with it is open. Other lane counts are a parameter (`LANES`, a power
  of two).
- **Filter-bank internals.** Tap count, window, coefficient quantisation, FFT
  architecture, rounding and scaling schedule are this design's own. The real
  transform is computed with a complex FFT of full length, and half its output
  slots are idle. This is simple, but it costs twice the FFT memory of a
  real-input FFT.
- **Calibration spectrometer.** The instrument has one, but what it computes is
  not documented. Here it is the auto and cross products of I and Q at full
  channel resolution, sharing the sideband spectrometer's filter banks.
  Reducing to 1024 calibration points is left to the host.
- **Host interface.** Constants, `acc_len` and the dumps are plain ports. There
  is no register bus or readout memory for a particular board.
- **Power-up constants** (ideal hybrid) and the `arm`/`sync` frame alignment
  are this design's choices.
- Placement-level work that made the real design fast enough (manual
  floorplanning of the FPGA) has no counterpart in RTL.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `adc_if_tb` | offset-binary conversion on 4 lanes, one sync per arm edge, frame count |
| `pfb_fir_tb` | 16-branch, 4-tap filter against a direct sum with the same prototype (±1) |
| `fft_r2sdf_tb` | 64-point FFT against a direct DFT/N, random and tone frames, latency N−1+log2 N |
| `pfb_tb` | 64-point filter bank with 4 input lanes against FIR + DFT, channel tags on both output lanes, tone peak, latency |
| `cal_cmult_tb` | products with power-up, random and rewritten constants; constant sharing; 2-clock latency |
| `cadd_tb`, `power_tb`, `cal_xspec_tb` | exact results including extreme operands; a 90° test for the cross product |
| `vacc_tb` | exact sums over 3, 1 and 4 spectra; acc_len change; ignored lead-in; dump timing |
| `sbs_top_tb` | the whole design at full size (below) |
| `sbs_sweep_tb` | full-band calibration and rejection sweep at full size (below) |

`sbs_top_tb` runs the default configuration: 4096-point transform, 8 lanes,
2048 channels, 1024 constants. It models an imbalanced front end with two test
tones, at channels 100 and 1234, each with its own gain and phase error. It
first checks a bypass configuration (C1 = C4 = 1, C2 = C3 = 0): the LSB and
USB dumps must equal the |I|² and |Q|² dumps bit for bit. It then measures
rejection with the ideal constants (12.7-15.3 dB). Next it runs the
calibration procedure above, changes the integration length, and measures
again. The result must exceed 40 dB in both sidebands (57-66 dB is reached).
It also checks that every dump holds every channel once. It takes about
20 s to build and a few seconds to run.

`sbs_sweep_tb` repeats the calibration over the whole band, as it would be
done on the receiver. Its front-end model has an imbalance that changes with
frequency: the Q gain runs from -1.5 dB to +1.5 dB across the band and the
phase error is 10 + 12·sin(2π·1.2·f) degrees (f in GHz). Eight tones are
applied at a time and quantised to 8 bits. Calibration tones sit at the even
channels, one per constant (channel 1 stands in for DC). The rejection is
then measured with tones at all 1024 odd channels, which lie between the
calibration points. Results:

- ideal constants: 21.4 dB average in each sideband;
- calibrated: 61.1 dB average in each sideband, with all tones above 40 dB
  (the lowest is 40.0 dB).

The test fails if the calibrated average is below 45 dB, if fewer than 93% of
the tones exceed 40 dB, or if the uncalibrated average is 25 dB or more. It
takes about 2 million clocks, under a minute of simulation.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/sbs_pkg.sv tb/sbs_top_tb.sv --top-module sbs_top_tb
./obj_dir/Vsbs_top_tb
```

Replace `sbs_top_tb` by any other testbench name. `-y rtl` lets Verilator find
the modules by file name.
