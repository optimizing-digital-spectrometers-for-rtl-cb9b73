# Spectral-domain calibration of a time-interleaved ADC (COMCA)

## The problem

A wide-band FFT spectrometer that samples at 8 GS/s cannot do it with one
converter. Instead, M = 8 converter cores each sample at 1 GS/s, each
clocked 1/8 of a period after the one before. This arrangement is a
time-interleaved ADC (TIADC). The cores are never identical. Each has its
own gain, phase and band-pass response, and these differences change with
frequency. Because core m's error repeats every M samples, every real signal
at frequency f gets faint copies ("mirrors") at m·fs/M ± f. In a spectrometer
such a mirror looks like a spectral line that is not in the sky.

A correction applied at a single frequency fixes the mismatch only near that
frequency. Over several GHz of bandwidth, the correction has to depend on
frequency.

## The idea

Write the N-point spectrum of the interleaved signal as a combination of the
M spectra, of N' = N/M points each, that the individual cores produce.
Channel k of the full spectrum then depends only on bin k mod N' of each
core:

    b_k = sum over m of  a_{k mod N', m} · c_{k,m}

The coefficient is

    c_{k,m} = H_{k,m} · exp(-2πi·m·k/N)

Here H_{k,m} is the inverse of core m's measured response at channel k. The
exponential is the twiddle factor that an FFT's final radix-M stage would
apply. Two consequences follow:

* **No large FFT is needed.** Instead of one N-point FFT, the spectrometer runs
  one N'-point FFT per core. This is how the existing FFT pipeline already
  handles parallel data. The full spectrum is then made by one complex
  multiply per core and channel, followed by a sum. The twiddle factors and
  the calibration collapse into one coefficient table, so correcting the
  mismatch costs nothing beyond the last FFT stage it replaces.
* **The correction is exact for any frequency-dependent mismatch** that the
  table can describe. Its cost is M complex multiplies per output channel, and
  memory for M·N/2 coefficients.

## What this RTL contains

`comca_top` is the calibration datapath of one spectrometer input. It sits
between the per-core FFTs and the spectrometer's power detection and
integration, which are not part of this design.

```
 fft_bins[P][M] ──┬──────────────► comca ─────────────► cal_bin / cal_chan / cal_ok
 (M per-core FFTs,│             M·P COMCA cores           (M·P channels per clock)
  P bins per clk) │               ▲ coefficients
                  │               │
                  │       coef_loader ◄── coef_data[7:0], coef_ready, coef_reset
                  │
                  └──► mismatch_meter ──► fix2float ×2 ──► meas_rd_re / meas_rd_im
```

Default parameters:

| Parameter | Default | Meaning |
|---|---|---|
| LANES (M) | 8 | converter cores per input |
| PAR (P) | 2 | FFT bins per core per clock |
| NFFT (N) | 32768 | full FFT length, giving 16384 output channels |
| INTERP (I) | 4 | coefficient interpolation factor |

At the defaults, N' = 4096, and each per-core FFT delivers its 2048 useful
bins in 1024 clocks. At 250 MHz that takes 4.1 µs, which is exactly one
spectrum's worth of 8 GS/s input. A second input (the board has two) uses a
second instance.

Modules, bottom-up:

| Module | Role |
|---|---|
| `comca_pkg` | widths and packed complex types: 28-bit FFT bins, Q2.14 coefficients, 32-bit corrected outputs, 64-bit accumulators |
| `coef_loader` | 8-bit host bus to coefficient writes |
| `coef_store` | the even/odd coefficient banks of one core, with interpolation addressing |
| `coef_interp` | linear interpolation between two stored coefficients |
| `cplx_mult` | registered complex multiply (helper) |
| `comca_core` | one COMCA core: fetch, interpolate, multiply M bins, sum |
| `channel_map` | final channel number ("flip and shift") and the unreconstructable flag |
| `comca` | the M·P cores and their channel numbering |
| `mismatch_meter` | integrates a_m·conj(a_0) for measuring the mismatches |
| `fix2float` | signed integer to IEEE-754 single |
| `comca_top` | the above, wired together |

## Reconstructing the spectrum from half-spectra

This is the part that is easiest to get wrong.

Each per-core FFT has a real input, so it computes only its first half:
bins k' = 0 … N'/2−1. The other half follows from symmetry:
a_{N'−k'} = conj(a_{k'}). Bin k' of the cores therefore feeds two families of
output channels:

* **direct:** k = k' + N'·j, using a_{k'}
* **mirrored:** k = N' − k' + N'·j, using conj(a_{k'})

Split the N/2 output channels into M blocks of N'/2 channels each.

* Even blocks b = 2j hold channels N'j … N'j + N'/2 − 1. They are the
  direct family, in the same order as k'.
* Odd blocks b = 2j+1 hold channels N'j + N'/2 … N'(j+1) − 1. They are the
  mirrored family, in reverse order of k'.

As k' runs 0, 1, 2, …, an odd block's channels come out as:

* first, the slot for k' = N'/2, which is never computed;
* then k' = N'/2−1 down to 1.

That is the source's "flip, then shift right by one". For N' = 8 and M = 4,
the channel sequence within the blocks becomes:

```
k' stream        0 1 2 3 | 0 1 2 3 | 0 1 2 3 | 0 1 2 3
channel offset   0 1 2 3 | 0 3 2 1 | 0 1 2 3 | 0 3 2 1   (odd blocks: 0 = unreconstructable)
```

The channels N'/2 + N'·j cannot be reconstructed, because their bin
a_{N'/2} equals its own conjugate and was never computed. There are M/2 of
them per spectrum. For an odd block at k' = 0, `channel_map` outputs the
slot's channel number with `chan_ok = 0`. The core still computes a value
for that slot, but it is meaningless.

Parallelism: each clock delivers bins k' = P·t + p, for p = 0 … P−1, from all
M cores. Core number c = b·P + p serves block b for stream p. Cores of odd
blocks conjugate their bins on entry (parameter `CONJ`). Every clock, all
M·P cores each produce one channel. Together they emit the N/2 channels of a
spectrum in N'/(2P) clocks.

Each core carries the channel number (`cal_chan`) alongside its result. The
channels come out in the order above, not in frequency order. The intended
consumer is the spectrometer's integration memory, which writes each channel
at its `cal_chan` address. No reorder buffer is built.

The source says each core is responsible for N/(P·M) channels. With only
half-spectra computed, the count works out to N/(2·P·M) per spectrum: 1024
at the defaults. The 2 is the mirrored half that the flip-and-shift mapping
folds into the same cores.

## Coefficient memory and interpolation

Each core serves DEPTH = N'/(2P) channel addresses. Storing every coefficient
would take M·N/2 words per input, which for two inputs is 8 Mibit of block
RAM. Coefficients vary slowly with frequency, so only every I-th one is
stored, and the ones in between are interpolated linearly.

For core-local address k:

```
k0 = 2I·floor(k/2I + 1/2)      even multiple of I nearest to k   → even bank
k1 = 2I·floor(k/2I) + I        odd multiple of I around k        → odd bank
K' = |I − (k mod 2I)|,   K'' = I − K'
c' = (K'·c_k0 + K''·c_k1) / I  (division by shift; I a power of two)
```

k0 and k1 are always the two stored grid points on either side of k, and they
always lie in different banks. So one read of both banks, each one word per
lane, gives both endpoints in a single clock. Splitting the memory this way
doubles its read width without raising its clock. K' is the weight of c_k0.
At k = 0 mod 2I, c' = c_k0 exactly. At k = I mod 2I, c' = c_k1 exactly.

For I = 4 the indexing runs as follows:

| k mod 8 | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| K' | 4 | 3 | 2 | 1 | 0 | 1 | 2 | 3 |
| k0 | k | k−1 | k−2 | k−3 | k+4 | k+3 | k+2 | k+1 |

`coef_store` keeps DEPTH/I + 1 grid points per core and lane. Entry j holds
the coefficient for address j·I. The extra last entry, at address DEPTH,
lies one grid step past the core's last channel and is only an end point for
interpolation. Its value should be the coefficient of the channel that would
continue the core's sequence. The grid is per core, so the input stores
16·257 = 4112 words per lane. A single global grid would store 4097. Read
latency is one clock. With I = 1 the interpolation reduces to a copy.

At the defaults, one input stores 16 cores × 257 entries × 8 lanes × 32 bits
= 1028 Kibit, against 4096 Kibit without interpolation.

## Datapath of one COMCA core

`comca_core` is a four-stage pipeline. Valid, address and channel tag travel
with the data.

1. Read both banks. Register the M bins, conjugated if `CONJ`.
2. Interpolate the M coefficients.
3. Do M complex multiplies: 28-bit × 16-bit per part, four real products each.
4. Sum the M products at full width. Round half up by 2⁻¹⁴. Saturate to
   32 bits per part.

Result: `cal_*` appears 4 clocks after `fft_*`.

Number formats:

* Coefficients are Q2.14: 16 bits, range [−2, 2), with 1.0 = 0x4000. Two
  integer bits let the calibration amplify a core whose gain is low.
* Bins are treated as integers.
* The output is bin·coef sum scaled back by 2¹⁴.

## Loading coefficients

The host writes coefficients a byte at a time through an 8-bit register bus:

* `coef_ready` marks a valid byte on `coef_data`. The byte is stored at the
  current pointer, and the pointer advances.
* `coef_reset` returns the pointer to the start.
* `coef_full` rises when every coefficient has been written. After that,
  further bytes are ignored until the next reset.

Stream layout, slowest to fastest:

```
core c = 0 … M·P−1   (c = b·P + p)
  entry j = 0 … DEPTH/I
    lane m = 0 … M−1
      bytes: re[7:0], re[15:8], im[7:0], im[15:8]
```

At the defaults this is 16·257·8·4 = 131 584 bytes per input. The write
reaches the bank one clock after the fourth byte. Loading while spectra flow
is allowed, but a channel may then be computed with a mix of old and new
coefficients.

To fill in the table, the host needs each channel's number. Entry j of core
(b, p) belongs to address t = j·I, and therefore to bin k' = P·t + p. Its
channel k comes from the mapping above. The host stores c_{k,m} there.

## Measuring the mismatches

The coefficients come from a measurement. A test tone is stepped across the
band. At each step, the cross product h'' = a_m · conj(a_0) of every core m
against core 0 is integrated over many spectra. This gives each core's gain
and phase relative to core 0, with the noise averaged out. The host then
takes the peak bin of each step, removes the phase that the clock offsets
alone would cause, and inverts the mismatch to get H.

`mismatch_meter` does the integration on the same FFT stream:

* `meas_start` arms it.
* It waits for the next spectrum start (`fft_idx == 0`).
* It integrates `meas_num_spectra` spectra into one 64-bit complex
  accumulator per bin and core. The first spectrum overwrites old sums.
* It raises `meas_done`. Lane 0 holds |a_0|².

A read (`meas_rd_en` with stream, position and lane) returns the sum as two
IEEE-754 singles two clocks later. `fix2float` converts by leading-one
detection and truncates the mantissa.

The meter reuses the spectrometer's FFT. Its spectra therefore have the
calibration's resolution, which is 4096-point per core at the defaults.
The measurement method itself only needs a coarser FFT; 2048 points is
typical.

## Where this design departs from the source, and what it leaves out

* **P = 2.** The calibration's resource estimate assumes P = 2, and the
  default follows it. Elsewhere P = 4 is called typical. Both work through
  the parameter.
* **Conventions chosen here.** The source leaves these open:
  * bin width as 28 bits per real part;
  * Q2.14 coefficients;
  * rounding and saturation;
  * the coefficient stream order;
  * per-core interpolation grids;
  * the meter's start/stop control;
  * float truncation.
* **Measurement in the same design.** In the source, the measurement is a
  separate FPGA configuration. Here it is built into the calibration design,
  as the source recommends.
* **Not built.** The per-core FFTs, the spectrometer's power integration and
  readout, the converters, clocking, serial links, the Ethernet controller,
  and the host software that turns measurements into coefficients. They are
  outside the design, and the top's ports stand where they connect.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog. The
reference values are computed in the testbench, from the formulas above,
using functions in `tb/comca_ref_pkg.sv`. With Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/comca_pkg.sv tb/comca_ref_pkg.sv tb/comca_top_tb.sv --top-module comca_top_tb
./obj_dir/Vcomca_top_tb
```

(`-Wno-fatal` keeps width warnings in the testbench reference code from stopping the build.) Substitute any other testbench name. The block testbenches cover one module
each:

* `coef_store_tb` checks the interpolation indexing table cell by cell.
* `channel_map_tb` checks the N' = 8 reordering example and the full-size
  inverse mapping.
* `comca_core_tb` checks latency, conjugation and saturation.

`comca_top_tb` runs the whole design at M = 8, P = 2, N = 256, I = 4, in this
order:

1. a partial load;
2. a pointer reset;
3. a full load;
4. three spectra, with every channel checked;
5. a two-spectrum measurement, with all sums read back.

It counts pointer resets, full flags, direct, conjugated, interpolated and
flagged channels, measurements and float reads. A mechanism that never
happens is a failure.

`comca_top_full_tb` runs the same sequence on the default-size top (N = 32768)
with two spectra. It makes about 168 000 checks, and runs in seconds.

`comca_top_interp_tb` runs the same sequence at full size with I = 1 and
I = 2, through two instances of `comca_top_run` running side by side. It
makes about 400 000 checks. The I = 1 run also confirms that a table holding
every coefficient (131 200 words per input) loads and applies correctly.

To change the size, override `LANES`, `PAR`, `NFFT` and `INTERP` on
`comca_top`. The constraints:

* N must be divisible by 2·M·P.
* I must be a power of two that divides N/(2·M·P).
