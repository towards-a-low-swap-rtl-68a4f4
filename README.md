# A multiplierless 32-beam digital receive beamformer

A uniform linear array of N antennas can form N simultaneous, orthogonal beams by
taking, for every time sample, the N-point DFT *across the antennas*: output bin k
collects the plane wave whose phase advances by 2πk/N from one element to the
next. Done with an FFT this costs O(N log N) complex multiplications per sample, and
multipliers dominate the area and power of such a beamformer.

This RTL implements the digital back-end of a 32-element, 32-beam receiver that
replaces the DFT by a 32-point **approximate DFT (ADFT)** whose matrix holds only
the values 0, ±1, ±j and ±1±j. A fast algorithm factors that matrix into eight
sparse stages with entries in {0, ±1, ±j}, so the whole transform is 348 real
additions and subtractions, with no multiplier, shift or constant. The beams keep
the DFT's main-lobe shapes and pointing directions; what the approximation costs
is higher side lobes (largest side lobe about −11 dB instead of −13.3 dB).

The design follows the 32-beam, 5.8 GHz sub-system described by Madanayake et al.
in *Towards a Low-SWaP 1024-beam Digital Array: A 32-beam Sub-system at 5.8 GHz*.
There, 32 of these sub-systems (row-wise and column-wise on a 32×32 aperture) are
proposed as the way to reach 1024 beams. The RTL here covers the one sub-system.

## Signal chain

```
 element n (n = 0..31)                                      beam k (k = 0..31)
 ADC 8 bit ─► hilbert_fir ─I,Q─► iq_calib ─I,Q─┐          ┌─► energy_calc ─► energy[k]
  (real,        (31-tap FIR)     (× c[n])       ├─► adft32 ┤
   low IF)                                      │ (8 sparse│
 ... 32 channels ...                    ────────┘  stages) └─► beam_re/im[k]
```

`beamformer32` is the top. Per element it holds one Hilbert filter and one
calibration multiplier; one `adft32` forms the beams; per beam one energy
integrator measures the received power.

1. **`hilbert_fir`: real IF to complex.** The receivers mix each antenna signal down
   to a low IF (10 MHz in the reference set-up) and the ADCs sample it as a real
   signal (8 bit, 200 MS/s). A spatial DFT needs complex samples, so a Hilbert FIR
   produces the quadrature component Q, and I is the input delayed to match.
2. **`iq_calib`: channel equalisation.** Each receiver chain has its own gain and
   phase. Because the system is narrowband, one complex coefficient per channel,
   measured against a reference channel, corrects both. It is applied as a complex
   multiplication after the Hilbert filter. These are the only multipliers in the
   signal path, and they are per channel, not per beam.
3. **`adft32`: the beams.** The 32 calibrated samples of one instant form a
   snapshot. The core computes X = F̂₃₂·x on it, one snapshot per clock.
4. **`energy_calc`: measurement.** Each beam's power |X_k|² is summed over a window
   of `int_len` snapshots. In the reference system a control processor reads these
   energies to plot beam patterns.

## The approximate DFT core

### The matrix

F̂₃₂ is the 32×32 matrix the authors obtained as `round(β·F₃₂)` (F₃₂ the exact
DFT matrix). β was picked from a Pareto search over several error measures, with
real and imaginary parts limited to {0, ±1, ±2, ±½}. The selected matrix uses only
{0, ±1}. Row k of F̂₃₂ is a coarsely quantised e^{−j2πkn/32}. Beam k therefore
still points at spatial frequency 2πk/32, and its response differs from a DFT bin
mainly in the deep side lobes.

### The factorization, and how a stage is built

F̂₃₂ = W₈·W₇·W₆·W₅·W₄·W₃·W₂·W₁ (a decimation-in-frequency-style factorization).
`rtl/adft_pkg.sv` holds the published factors as the table `W_TABLE`. For each
stage and output row, it lists up to three (coefficient, source-index) pairs. The
coefficients are +1, −1, +j or −j. The product of the eight tables reproduces
F̂₃₂ entry for entry.

`adft_stage` turns one table into hardware. Output row r is the sum of its listed
terms. Multiplying by ±j is just a swap of real and imaginary parts plus a sign:

| coefficient | real part of term | imaginary part of term |
|-------------|-------------------|------------------------|
| +1          | +re               | +im                    |
| −1          | −re               | −im                    |
| +j          | −im               | +re                    |
| −j          | +im               | −re                    |

The stages are W₁ to W₇, which are real (butterfly-like sums and differences, some
rows with three terms in W₅ and W₆), and W₈, the only stage with ±j. They cost
60, 60, 28, 28, 60, 28, 24 and 60 real additions: 348 in total, against 1984 for a
direct product with F̂₃₂ and 388 additions plus 68 multiplications for a
split-radix FFT.

### Word lengths

Inputs are 8 bits, as in the published design. The core never rounds. The largest
row L1-norm of any partial product W_s⋯W₁, written out for real arithmetic, is 48.
So 6 extra bits (48 < 64) are enough everywhere: the datapath and outputs are 14
bits, and no input can overflow them. The testbench checks this with full-scale
vectors signed to maximise each bin.

### Timing

Each stage output is registered. The core takes one snapshot per clock and returns
its 32 beams **8 clocks** later (`ADFT_LATENCY`). A `valid` bit travels with the
data. Only the valid bits are reset. The published core reached a 0.86 ns critical
path in a 45 nm library, but the text does not say where its registers are. One
register per stage is this design's choice; with the table-driven stage it is easy
to move registers.

## Interfaces and timing of the top

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | single clock (the ADC sample clock), synchronous active-low reset |
| `adc_valid` | in | 1 | a new snapshot from the 32 ADC channels |
| `adc_data[32]` | in | 8 signed | real IF samples, element 0..31 |
| `cal_re[32]`, `cal_im[32]` | in | 12 signed | calibration coefficients, 10 fraction bits (1.0 = 1024) |
| `int_len` | in | 24 | integration window in snapshots; 0 stops integration |
| `beam_valid`, `beam_re[32]`, `beam_im[32]` | out | 1, 14 signed | the 32 beams |
| `energy_valid`, `energy[32]` | out | 1, 52 | one-clock pulse and held energies of the last window |

- **Latency.** A snapshot's beams leave 11 clocks after its `adc_valid`: 2 in the
  Hilbert filter, 1 in calibration and 8 in the ADFT. On top of that, the Hilbert
  filter delays the signal by 15 samples (its group delay).
- **Throughput.** One snapshot, and so one sample of each of the 32 beams, per
  clock. At the published 200 MHz clock, each beam is a 200 MS/s complex stream.
- **Energy windows.** `energy_valid` rises 2 clocks after the last beam sample of a
  window, and the next window starts with the next sample. `int_len` is taken with
  each sample, so a new length applies from the next sample on.
- **Control.** Calibration coefficients and `int_len` are plain inputs. In the
  reference system a processor writes them over its own register bus, which is not
  described and is not part of this RTL.

## The supporting blocks in detail

**Hilbert filter.** The published design specifies only "an FIR filter implementing
the Hilbert transform". This one has 31 taps and approximates h[n] = 2/(πn) for odd
n, under a Hamming window. Its coefficients are

H[m] = round(2¹¹ · 2/(π(2m+1)) · (0.54 + 0.46·cos(π(2m+1)/15))), m = 0..7

which gives 1291, 396, 201, 110, 58, 28, 12 and 7. The filter is odd-symmetric, so
each coefficient multiplies the difference of two taps. Its gain is 0.98 at 0.05 of
the sample rate (the 10 MHz IF), and within 0.5 % of 1 from 0.1 to 0.4 of the
sample rate. The residual image of a tone is (1−G)/2 of its amplitude, about 1 %
at the 10 MHz IF. Q is rounded half up and saturated to 8 bits.

**Calibration.** out = sat₈(round((I + jQ)·(c_re + j·c_im) / 2¹⁰)). The
coefficients are expected to be 1/g·e^{−jφ} for a channel with gain g and phase φ
relative to the reference. They are magnitudes below 2, so a channel gain can be
corrected down to about 0.5.

**Energy.** E_k = Σ (re² + im²) over the window. The accumulator is 2·14 + 24 =
52 bits, so even a full window (2²⁴ − 1 samples) of full-scale beams cannot wrap.

## What follows the published design and what does not

Taken from the published design:
- the matrix F̂₃₂ and its eight sparse factors, which set the ADFT core's adders;
- 8-bit inputs, 32 elements and beams;
- the chain ADC → Hilbert transform → complex calibration multiplier → 32-point
  ADFT → per-beam energy integrator, with one clock shared by ADCs and logic.

This design's own choices, where the description is silent:
- the pipeline registers and the 14-bit datapath of the core;
- the Hilbert filter's length, window, coefficients and rounding;
- the calibration coefficient format (12 bits, 10 fraction bits), rounding and
  saturation;
- the energy integrator's insides, its programmable window and the `int_len = 0`
  stop;
- reset behaviour, valid signals and all port names.

One point is inconsistent in the source. Its list of subsystems names the
calibration stage before the Hilbert filter. But its calibration section and its
block diagram place the complex multiplier *after* the Hilbert transform. This
design follows the latter: a complex multiplier needs I and Q.

Not included:
- the antennas, RF receivers, LO distribution, ADC cards and the control
  processor, which are analog or off-the-shelf parts;
- the exact fixed-point FFT core used as a comparison;
- the 32×32, 1024-beam array. That array would apply the same transform along
  rows and then columns of the aperture. It is proposed as future work, and the
  published 2D patterns were computed off-line from 1D measurements.

No FPGA or ASIC timing closure has been done on this RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_adft32` | 496 snapshots compared with a direct product by F̂₃₂, read from `tb/adft32_fhat.hex` (not from the factorization): impulses on every element, full-scale overflow vectors, random data, back-to-back and with gaps. Checks latency = 8 and one result per clock. |
| `tb_hilbert_fir` | bit-exact against a model that recomputes the coefficients from their formula, including saturation. A 0.05·fs tone must come out as cos/sin of equal amplitude. Latency = 2. |
| `tb_iq_calib` | bit-exact complex products with random coefficients, rotations by 0/±90/180°, saturation, latency = 1. |
| `tb_energy_calc` | windows of 1, 7, 16, 100 and 4096 samples; a change of length; `int_len = 0`; full-scale sums above 32 bits; exact timing of `energy_valid`. |
| `tb_beamformer32` | whole chain at the default parameters (see below). |
| `tb_adft_sidelobe` | the 32 filter-bank responses of the core, measured bit-true with 8-bit complex exponentials at 2048 spatial frequencies. Every beam must peak at its centre, and the largest side lobe must be −11.03 dB ± 0.25 dB. The measured value is −11.02 dB, against −13.3 dB for an exact DFT. |

The end-to-end test models the front end. For a plane wave from the direction of
each beam k0 = 0..31, element n receives a 10 MHz-equivalent tone with spatial
phase 2πk0·n/32. Each element also gets a random gain error (0.8 to 1.2) and a
random phase error. The test programs the matching calibration coefficients and
integrates 200-sample windows. It then checks that:
- every reported energy equals the Σ|beam|² it observes itself;
- the strongest beam is k0, for all 32 directions;
- all 32 energies agree with a floating-point model of F̂₃₂ within 1 % of the peak
  (observed: 0.14 %). The model includes the Hilbert filter's gain and image.
- the main beam loses energy with calibration switched off;
- `int_len = 0` stops the windows;
- the first beams arrive 11 clocks after the first snapshot.

`tb_beam_sweep` sweeps the arrival angle across the ±72° azimuth range, for the
array's 0.6λ element spacing, and checks the resulting beam patterns against the
model of F̂₃₂ at angles between the beam centres.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/adft_pkg.sv \
    tb/tb_beamformer32.sv --top-module tb_beamformer32
./obj_dir/Vtb_beamformer32
```

Replace the last file and the top module to run another testbench. The
testbenches read `tb/adft32_fhat.hex` by a path relative to that directory.

## Changing the design

- **Word length.** `ADC_W` in `adft_pkg` sets the input width everywhere. The core
  and the top derive their output widths from it (`+ ADFT_GROWTH`).
- **Pipelining.** The register sits in `adft_stage`. To merge two stages into one
  clock, make the register optional with a parameter. `ADFT_LATENCY` in the package
  and the latency checks in the testbenches then need the new value.
- **Another matrix.** Any transform written as a product of sparse {0, ±1, ±j}
  matrices with at most three terms per row fits `W_TABLE`. `N_STAGES`,
  `MAX_TERMS` and `ADFT_GROWTH` (log2 of the largest row L1-norm of any partial
  product) must follow. Regenerate `tb/adft32_fhat.hex` from the product matrix:
  one hex digit per entry, real part in bits 3:2 and imaginary part in bits 1:0,
  each coded 0 → 0, 1 → +1, 3 → −1.
- **Hilbert filter.** For a different IF or sample rate, replace the eight
  coefficients with the formula above for a new length (`TAPS`, `NC`) and recheck
  the gain at the IF.
