# KID readout DSP: a 400-tone comb generator and analyzer with a 65520-sample period

Microwave kinetic inductance detectors (MKIDs) are superconducting resonators. Hundreds of them
share one feedline, each tuned to its own frequency. They are read out by driving the line with a
comb of tones, one tone per resonator, and measuring the complex amplitude (I/Q) of each tone
after it has crossed the array. This RTL is the digital part of such a readout for one feedline:
it synthesises a comb of 400 tones covering 0–1 GHz, and it analyses the returning 0–1 GHz signal
into 400 I/Q streams of about 3.8 kHz each.

Two ideas make this design different from a plain direct-digital-synthesis (DDS) and
down-conversion readout:

1. **Everything repeats every 65520 samples.** The tone phase accumulators and the averaging
   windows of the analyzers all wrap after 65520 clocks, not after 2^16. The section
   *Why 65520* explains why this removes spurs in the measured data.
2. **Demodulation by square waves.** Each tone analyzer does not multiply by a sine and a cosine.
   It flips the sign of the input sample according to the sign bits of its tone's own CORDIC
   output. This needs no multipliers, so 400 tones use no DSP slices for demodulation.

The CORDIC is also cut down to a 6-bit output with 3 iterations.

## Block diagram

```
 fcw[b][t], gain_sel[b][t], band_gain[b]
        |
        v
 +-------------- band manager b (x10) ---------------+
 | 40 x tone manager                                 |
 |   tone generator: phase acc (mod 65520) -> CORDIC |
 |      -> attenuator (I, Q) --------------------+   |
 |   tone analyzer: sign flip by CORDIC MSBs      |   |
 |      -> 48-bit window sum -> I/Q (32 bit)      |   |
 | pipelined adder (I), pipelined adder (Q) <----+   |
 |   -> band gain -> 16-bit band I/Q @ 250 MSPS      |
 +---------------------------------------------------+
        | band I/Q                       ^ 12-bit channel b
        v                                |
   down_shifter (-62.5 MHz)              |
   up_sampler (x8, 8 lanes/clock)        |
   band_shifter (+50+100b MHz, 40-entry table)
        |                                |
        v                                |
   band_adder (sum of 10 bands) --> dac_out (to the DAC interface)
                                      |
               loopback_en ? dac_out : adc_in   (one register)
                                      |
                                      v
                         polyphase_filter_bank --> 10 channels
```

Everything runs in one clock domain at 250 MHz. The 0–1 GHz streams (`dac_out`, `adc_in`) carry
2 GS/s complex samples as 8 lanes per clock. Lane 0 is the oldest sample of the clock and lane 7
the newest.

## Module list

| Module | Role | Latency (clocks) |
|---|---|---|
| `concerto_pkg` | sizes, types, 40-entry sine table, CORDIC arctangent table | – |
| `phase_accumulator` | `phase <= (phase + fcw) mod MODULUS` | 1 |
| `cordic` | phase to cos/sin, rotation mode, one iteration per stage | ITER+2 = 5 |
| `digital_attenuator` | magnitude shifted right by `gain_sel` (6 dB per step) | 1 |
| `tone_generator` | phase accumulator + CORDIC + two attenuators | 7 |
| `tone_analyzer` | sign-flip mixer + 48-bit window accumulator | result 2 after window end |
| `tone_manager` | one generator and its analyzer | – |
| `avg_window_counter` | shared 0..65519 counter marking the last sample of a window | – |
| `pipelined_adder` | registered adder tree over the 40 tones | ceil(log2 40) = 6 |
| `band_gain` | left shift by 0..15 with saturation to 16 bits, clip flag | 1 |
| `band_manager` | 40 tone managers, two adders and the band gain | – |
| `down_shifter` | multiply by (−j)^n: shift by −62.5 MHz | 1 |
| `up_sampler` | linear interpolation ×8 | 1 |
| `band_shifter` | multiply by exp(j·2π·(1+2b)·k/40) per 2 GS/s sample | 1 |
| `band_adder` | sum of all bands, divided by 16 | 1 |
| `polyphase_filter_bank` | simplified channelizer, 10 real 12-bit channels | 3 |
| `kid_readout_dsp` | top: all of the above plus the loopback multiplexer | – |

## Frequency plan

Each band manager makes its 40 tones at 250 MS/s as `cos + j·sin` of the phase. A tone with
frequency word `fcw` sits at about `fcw/65536 · 250 MHz`. A band's tones are meant to lie
between 12.5 and 112.5 MHz. The chain then moves that 100 MHz slice to its place in the comb:

* **down_shifter** multiplies by (−j)^n, a shift of −fs/4 = −62.5 MHz. The slice is now centred
  at 0 Hz (−50 … +50 MHz). At a quarter of the sample rate this rotation only swaps and negates
  I and Q, so no multiplier is needed.
* **up_sampler** raises the rate by 8 to 2 GS/s. Lane k of the clock is
  `((7−k)·previous + (k+1)·current) / 8`, a linear interpolation between two 250 MS/s samples.
  Its images at multiples of 250 MHz are suppressed by the sinc² response of the interpolator.
* **band_shifter** multiplies band b by a complex exponential at 50 + 100·b MHz. At 2 GS/s this
  is (1+2b)/40 of a turn per sample, so the 40-entry sine table is stepped by `1+2b` per sample
  and the cosine is read a quarter table (10 entries) ahead. With 8 lanes per clock the table
  base moves by `8·(1+2b) mod 40` per clock. Its pattern repeats every 5 clocks (40 samples).
  The table holds `round(32767·sin(2πk/40))`. Products are rounded by 2^−15 and clamped.
* **band_adder** adds the 10 bands lane by lane and divides by 16 to return to 16 bits.

Band b then occupies 100·b … 100·(b+1) MHz of the comb.

## Why 65520

If every tone's phase accumulator wraps at 2^16, each tone repeats after at most 2^16 samples.
But the band shifter's table repeats every 40 samples at 2 GS/s, which is 5 clocks. A period of
2^16 is not a multiple of 5, so the whole comb only repeats after 2^16 · 5 clocks (2^16 · 8 · 5
samples at 2 GS/s). Folded back through the filter bank and the analyzers, that longer structure
shows up as spurs at 250 MHz / (2^16 · 5) ≈ 763 Hz and its harmonic at 1526 Hz. They sit inside
the 3.8 kHz output band. An averaging window of 2^16 samples has its zeros at multiples of
3815 Hz, so it does not remove them.

65520 = 2^4 · 3^2 · 5 · 7 · 13 is the closest number below 2^16 that is a multiple of both 5 (the
table period in clocks) and 8 (the lanes). In this design:

* `phase_accumulator` computes `phase + fcw`, compares it with 65520 and subtracts 65520 when
  it is not below. The phase of tone n at clock k is `k·fcw mod 65520`, which repeats after
  65520 clocks for any `fcw`.
* The phase is given unchanged to the CORDIC, whose full turn is 2^16 codes. Values 65520–65535
  are never reached. So at each wrap the waveform skips 16/65536 of a turn. This keeps the
  CORDIC a plain power-of-two design. The price is a small distortion of the tone, which
  repeats every 65520 clocks, so the analyzer's window rejects it like everything else.
* The band shifters, up-samplers and down-shifters repeat every 5 and 4 clocks, and both divide
  65520. So the whole comb, and in loopback the whole analysis input, repeats every 65520 clocks.
* Each analyzer sums over exactly 65520 samples (`avg_window_counter`). Anything periodic in
  65520 clocks lands on a frequency bin of that window. Everything except the bin at 0 Hz is
  removed exactly.

The price is a compare-and-subtract in each of the 400 accumulators instead of a free binary
wrap. The output rate becomes 250 MHz / 65520 = 3815.6 Hz instead of 3814.7 Hz.

## Square-wave demodulation

A conventional digital down-converter multiplies the channel by cos and −sin of the tone and
low-pass filters the products. Here `tone_analyzer` takes the sign bits (MSBs) of the tone's own
CORDIC cosine and sine:

```
mix_i = cos_msb ? −x : x        mix_q = sin_msb ? −x : x
acc_i += mix_i                  acc_q += mix_q      (48 bits, cleared each window)
```

A ±1 square wave at the tone frequency f is (4/π)·(cos 2πft − cos(3·2πft)/3 + …). Its
fundamental brings the tone to 0 Hz with gain 2/π (per quadrature, relative to a unit-amplitude
multiply). So a tone of amplitude A gives a window sum of about (2/π)·A·65520 in magnitude.
The odd harmonics also move other tones, and the tone's own images, to 3f, 5f, … away. When all
of these land on multiples of 250 MHz / 65520, the 65520-sample sum rejects them. Which
frequencies are safe is a matter of the tone plan. A tone plan with tones on that grid, well away
from the harmonics of other tones, should be used.

The references are taken before the tone's attenuator. So a muted tone is still analysed, which
is how a resonator is measured with the excitation off. The results are bits [31:0] of the
48-bit sums. A 12-bit input summed over 65520 samples needs at most 28 bits.

All 400 analyzers share one window counter. Every 65520 clocks all sums are presented on
`iq_i`/`iq_q` with a one-clock `iq_valid`, and the accumulators restart in the same clock with
no gap.

## CORDIC

`cordic` turns the 16-bit phase into cosine and sine, one sample per clock:

1. Stage 0 adds an eighth of a turn. It takes the top two bits as the quadrant and leaves a
   residual angle in −45° … +45°.
2. ITER micro-rotation stages follow. Stage i (i = 1 … ITER) rotates by ±atan(2^−i), with the
   sign taken from the remaining angle. The arctangents are in `concerto_pkg::ATAN_LUT`, as
   `round(atan(2^−i)·65536/2π)`. The classic 45° first step is skipped, because the residual
   is already within ±45°. Three steps cover ±47.7° and leave at most atan(1/8) = 7.1° of
   error, instead of 14° if the 45° step were spent.
3. A final stage rotates by the quadrant (swap/negate), rounds away the 3 guard bits and clamps
   to ±(2^(OUT_W−1)−1).

The start vector is `(2^(OUT_W−1)−1)·2^GUARD / K`, with K the CORDIC gain for ITER stages. So the
output amplitude is about 31 for 6 bits. `OUT_W=10, ITER=10` gives the finer generator of the
original firmware.

Measured over all 65536 angle codes (`tb_cordic_quality`):

| Configuration | SINAD | SFDR |
|---|---|---|
| 6 bits, 3 iterations (default) | 22.9 dB | 29.1 dB |
| 10 bits, 7 iterations | 46.8 dB | 56.1 dB |
| 10 bits, 10 iterations | 59.0 dB | 74.0 dB |

The largest error of the default is 4 LSB of 31. The coarse tone is acceptable for the
readout. Its distortion falls on harmonics of the tone itself. Like the tone, they repeat every
65520 clocks. So in every analyzer they either fall on zeros of the averaging window or add a
constant offset to the result. They add no noise and no spur.

The published study of this trade-off reports about 16 dB SINAD and 26 dB SFDR for 6 bits and
3 iterations. Its CORDIC internals are not known, so the testbench only checks that this CORDIC
does at least as well.

## Channelizer (simplified)

`polyphase_filter_bank` must deliver, for each band, that band's 100 MHz slice at 250 MS/s, in
the same 12.5–112.5 MHz frame in which its tones were generated. Only then can each analyzer use
its own tone as the reference. Per band b it:

1. multiplies the 8 lanes by the conjugate of the band shifter's exponential (same table, same
   step `1+2b`). This brings the band centre to 0 Hz.
2. sums the 8 lanes. This is an 8-tap boxcar low-pass filter and decimation by 8 in one step.
3. multiplies by (+j)^m, +62.5 MHz, to undo the down-shifter. It keeps the real part, scales it
   by 2^−7 and clamps it to 12 bits.

The channel is real, as the analyzers take one 12-bit input. Its negative-frequency image is
harmless: each tone's references only correlate with positive-frequency content.

**Limits.** The boxcar is a poor filter. The droop of the boxcar and of the linear interpolator
together is D(f)^3, with D(f) = sin(8πf/2 GHz) / (8·sin(πf/2 GHz)) for an offset f from the band
centre. So tones near a band edge (±50 MHz) come out about 0.82 of a centre tone. The rejection
of the neighbouring band is weak, with about 0.76 gain at 100 MHz from the centre. Tones of one
band therefore leak into the neighbour's channel. They do no harm only when they do not fall on
a neighbour's tone or its harmonics. A real design would put a designed prototype filter here,
split into 8 polyphase branches.

## Digital loopback

`loopback_en = 1` routes `dac_out` back into the analyzer through one register, in place of
`adc_in`. This tests the whole digital chain without converters or analog parts, and is the
configuration in which the spur-free behaviour can be checked bit-exactly. With
`loopback_en = 0` the design analyses `adc_in`, which an ADC interface would drive.

## Interface of `kid_readout_dsp`

| Port | Dir | Type | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 250 MHz clock; asynchronous active-low reset, everything to 0 |
| `fcw[NB][NT]` | in | 16 | frequency word per tone, must be < 65520 (asserted) |
| `gain_sel[NB][NT]` | in | 3 | tone attenuation, 6 dB per step; 5–7 mute a 6-bit tone |
| `band_gain[NB]` | in | 4 | band gain as a left shift 0–15, saturating |
| `loopback_en` | in | 1 | 1: analyse `dac_out`; 0: analyse `adc_in` |
| `dac_out` | out | `wb_iq_t` | comb, 8 lanes × (I, Q) × 16 bits per clock |
| `adc_in` | in | `wb_iq_t` | samples from the ADC, same format |
| `iq_i/iq_q[NB][NT]` | out | 32 | window sums per tone, held until the next window |
| `iq_valid` | out | 1 | one clock per 65520 clocks |
| `band_sat[NB]` | out | 1 | a band gain clipped in this clock |
| `phase_wrap` | out | 1 | band 0 tone 0's accumulator wrapped |

Configuration inputs are used as they are. The host link and its register file are outside
this RTL. Parameters: `NB` (bands, 10), `NT` (tones per band, 40), `MODULUS` (65520), `OUT_W`
(CORDIC bits, 6), `ITER` (CORDIC iterations, 3). With `MODULUS = 65536` the design becomes a
2^16-period design for comparison. The window counter then uses the same length. 800 tones per
feedline would be `NT = 80`. The 10-band plan would then hold 80 tones per 100 MHz.

## Choices made here, not by the source design

* Attenuator and band-gain laws (power-of-two shifts) and their widths (3 and 4 bits).
* The interpolation filter (linear) and the channelizer (boxcar, described above).
* Wideband word width of 16 bits; band adder scaling by 1/16; filter-bank scaling by 2^−7.
* I = cosine and Q = sine. One drawing of the original firmware labels the sine sum as I; the
  written description says I is the cosine, which is followed here.
* Output bits [31:0] of the 48-bit sums; a single shared window counter; reset values of zero.
* The 16/65536-turn skip at the phase wrap (see *Why 65520*).

## Verification

Each module has a self-checking testbench in `tb/` named `tb_<module>`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The checks compare each module
with values computed independently in the testbench: a bit-exact model, or the ideal math within
a stated tolerance (CORDIC against `$cos`/`$sin`, the shifters against complex rotations, and the
analyzer against (2/π)·A·65520).

`tb_kid_readout_dsp` runs the full design at its default size: 10 bands × 40 tones, the
65520-sample period, and a 6-bit, 3-iteration CORDIC. One tone per band plays and the other 39
are muted. In loopback it checks:

* that the results arrive every 65520 clocks;
* that each playing tone reads its predicted magnitude within 12 % (observed within about 3 %);
* that muted tones read below 8 %.

It also checks that the next window returns bit-identical sums for all 400 tones. This shows
that the comb and the averaging window share one period, so no spur is left in loopback.
It then switches to the ADC input held at zero and expects zero results. It also forces a band
to clip. It counts that phase wraps, windows, both input modes, clipping and sign flips all
occurred. The run takes about 1.5 minutes to build and 20 s to run with Verilator.

`tb_cordic_quality` runs the three CORDIC configurations through a 65536-point FFT written in
the testbench, and checks their SINAD and SFDR.

`tb_period_comparison` builds the same design with `MODULUS = 65536` (10 bands of 8 tones) in
loopback. It checks that the results then change from window to window and repeat exactly
every 5 windows. That ripple is the 763 Hz spur and its 1526 Hz harmonic in the output streams,
which the 65520 period removes.

To run a testbench:

```
verilator --binary --timing --assert -Irtl --top-module tb_kid_readout_dsp \
    rtl/concerto_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/tb_kid_readout_dsp.sv
./obj_dir/Vtb_kid_readout_dsp
```

The package must come first. Every register read is reset, so the result does not depend on
Verilator's random initial state.

## Known limits

* The channelizer is a boxcar, not a designed polyphase filter. Adjacent-band leakage and
  band-edge droop (above) limit which tone plans can be measured accurately.
* The up-sampler's linear interpolation leaves images of each band at ±250 MHz multiples,
  attenuated only by its sinc² response.
* The DAC and ADC interfaces, converters, analog front end and host link are not part of this
  RTL. `dac_out` and `adc_in` are where the converter interfaces attach.
* The phase-wrap assertion in `phase_accumulator` uses the reset in its `disable iff`. Some
  linters report this as a reset used both synchronously and asynchronously. It has no effect
  on the logic.
