# Data frame correction for IEC 61850 merging units

A merging unit (MU) in a digital substation samples each power-line waveform
256 times per 50 Hz period (20 ms) and streams the samples to protection and
monitoring devices. The samples are taken late by a small, varying
*measurement delay* Δt, so every value in the frame is the signal at the wrong
instant. This design removes that error in hardware, without a reference
signal:

1. it measures Δt directly, as the time from its own sampling checkpoint to
   the MU's end-of-frame strobe (DRDY), counted in 10 ns clocks, and
2. it re-samples the stored frame at the shifted instants with 15-point
   Lagrange interpolation, A(x) = A_measured(x + Δt).

The divisions of Lagrange interpolation are replaced by a table of
precomputed weights W(i,m) = 1/(i − m), all arithmetic is fixed point with 12
fraction bits, and the 15 basis polynomials are evaluated in parallel.

The structure and numbers follow the paper "FPGA-based Implementation of a New
Data Frame Correction System for Merging Units" (M. Hashemi, B. Alizadeh). The
RTL here is an independent implementation of it; the points where this code
had to choose for itself are listed under *Departures and own choices*.

## Top level

```
             DRDY                              measured samples
 MU ──────────┬──────────────────────────────────────┐
              ▼                                      ▼
   ┌─────────────────────┐  meas_delay   ┌──────────────────────┐
   │ mdc_block           │──────────────▶│ interpolation_block  │──▶ A(x), x = 0..255
   │  scg_block  (SP)    │  delay_valid  │                      │
   │  primary_counter    │──────────────▶│                      │
   │  sync_block         │               └──────────────────────┘
   └─────────────────────┘
 GPS 1PPS ──▶ sync_block ──▶ sync_status ──▶ SCADA
              primary_counter ──▶ data_lost ──▶ SCADA
```

`dfc_top` has plain ports: `clk` (100 MHz), `rst` (synchronous, active high),
`drdy`, `mu_valid`/`mu_data` (one signed Q3.12 sample per strobe), `pps`, and
outputs `sync_status`/`status_valid`, `data_lost`, `sp`, `meas_delay`/
`delay_valid`, and the corrected stream `actual_valid`/`actual_idx`/
`actual_data`, plus `busy`. The MU, the GPS receiver and the supervisory
system (SCADA) are outside the design.

## Measuring the delay (mdc_block)

Three small circuits, all counting the same 100 MHz clock:

* **Sampling checkpoint generator** (`scg_block`). A 21-bit counter and a wide
  AND of the bits B7, B10, B15, B17, B18, B19, B20 – exactly the 1-bits of
  2,000,000. Because the pulse clears the counter, the AND fires first (and
  only) at 2,000,000, giving the one-clock Sampling Pulse SP every 20 ms. The
  clear loads 1, not 0, so that the period is exactly 2,000,000 clocks.
* **Primary counter path** (`primary_counter_block`). SP sets an SR flip-flop
  that enables a 25-bit counter; DRDY clears it, copies the count into
  Register_1 (`meas_delay`, one clock after DRDY, with a one-clock
  `delay_valid`) and resets the counter. A DRDY d clocks after SP reads d. If
  no DRDY comes within a frame (2,000,000 counted clocks), the counter's carry
  is registered as `data_lost` and the counter restarts while the flip-flop
  stays set, so the next frame is measured normally.
* **Synchronization check** (`sync_block`). A 6-bit counter counts SPs and is
  cleared by the GPS 1PPS edge. At that edge the status flip-flop stores
  XOR(AND(B1,B4,B5), 1PPS). B1+B4+B5 = 50, so with 1PPS high the stored value
  is 0 when 50 SPs were seen in the last second and 1 otherwise: a fault flag
  for SCADA. As drawn in the paper the AND uses only those three bits, so 51,
  54, 55, 58, 59, 62 and 63 also pass; the 1PPS edge has to fall after the
  50th SP of its second.

## Re-framing the samples (interpolation_block)

Positions are measured in *sample steps* (1 step = 20 ms / 256 = 78.125 µs =
7,812.5 clocks). `time_tag_mapper` converts the delay: steps = clocks × 256 /
2,000,000 = clocks × 0.000128, computed as a multiplication by a 44-bit
fraction constant and rounded to Q8.12, modulo 256 steps.

For each output index x the block evaluates A(x) = Σ y_i · ℓ_i(x + Δt) over a
window of 15 stored samples. This is the part that needs the most care:

* **Window.** With u = x + Δt (Q9.12), the points are the 15 samples at
  absolute positions x_m = ⌊u⌋ − 7 + m, m = 0..14; u always lies between the
  8th and 9th point. Addresses wrap modulo 256: the frame is one whole period,
  so sample 256 is sample 0 of the same waveform. Because the points are one
  step apart, W(i,m) = 1/(i − m) does not depend on where the window sits.
* **Sub-coefficients** (`lagrange_subcoef`): Z(i,m) = ((x + Δt) − x_m) ·
  W(i,m), one adder, one subtractor, one multiplier. The difference lies in
  [−7, 8); Z is signed Q5.12.
* **Coefficients** (`lagrange_coef`, 15 instances): ℓ_i = Π_{m≠i} Z(i,m). The
  15 slots (slot i set to 1.0) plus one 1.0 pad go through a balanced tree of
  8, 4, 2 and 1 multipliers, adjacent slots paired. Every product is rounded
  to 12 fraction bits in a 32-bit word.
* **W lookup table** (`w_lut`): a 15×15 ROM of round(4096/(i − m)), filled at
  elaboration time.
* **Memory divider** (`memory_divider`): a 256-word frame store written in MU
  order (a pointer cleared by DRDY) with 15 registered read ports returning
  the window samples to Multiplier_0..14.
* **Multipliers and adder block** (`adder_block`): y_i · ℓ_i rounded to Q.12,
  summed in full width and saturated to the 16-bit sample format.

### Timing

Everything is pipelined at one sample per clock. `delay_valid` (one clock after
DRDY) starts a run of x = 0..255; the first corrected sample leaves
`INTERP_LATENCY` = 9 clocks after the start pulse (10 clocks after DRDY) and
the last 255 clocks later. A frame thus takes 265 clocks (2.65 µs), well
inside the 78 µs before the MU's next sample can overwrite the frame store. A
new start pulse restarts the run.

Pipeline (clock after start):

| clock | stage |
|---|---|
| 1 | x issued, u = x + Δt, window base |
| 2 | Z(i,m) registered (15 × 15 sub-coefficient blocks) |
| 3–6 | multiplier layers 1–4 → ℓ_i; frame store read in parallel |
| 7 | Multiplier_i: y_i · ℓ_i |
| 8 | adder block → `actual_data` valid at clock 9 |

### Number formats

| quantity | format |
|---|---|
| measured / corrected sample | signed Q3.12, 16 bits |
| delay in clocks | unsigned, 25 bits |
| delay in steps | unsigned Q8.12 |
| x + Δt | unsigned Q9.12 |
| W(i,m) | signed Q1.12 |
| Z(i,m) | signed Q5.12 |
| tree products, ℓ_i, y_i·ℓ_i | signed Q19.12, 32 bits |

### Accuracy

With every product rounded to 12 fraction bits, the corrected output of a
full-scale sine is within 2.9·10⁻³ of the true waveform (interpolation test)
and 3.2·10⁻³ in the full-size test. On a frame with a partial-discharge dip
and a delay of about 1 ms, the errors at the sine peak and along the dip are
0.6–3.9·10⁻³. The paper reports 0.98·10⁻³ for its
implementation with 12-bit fractions; it does not say where its rounding
happens, and the small Z factors (as low as 1/14) lose most of the relative
error budget here. `FRAC` in `dfc_pkg` sets the fraction bits of every
format; the testbenches' reference conversions assume 12.

## Departures and own choices

* **15 points, not 16.** The paper's coefficient-block figure, multiplier
  figure and text use 15 coefficient blocks, while its degree analysis says
  N = 16 and one equation sums 17 terms. The RTL follows the block diagrams:
  15 points, 14 factors per coefficient, a 16-slot four-layer tree.
* **Counter labels.** In the paper's MDC schematic the "25 bit (Primary
  Counter)" and "6 bit (Synchronization Counter)" labels sit on the opposite
  counters from what the text and the printed bit ranges describe; the RTL
  follows the text.
* **Data-lost carry** fires after one frame period (text), not at the 2^25
  overflow a bare 25-bit counter would give.
* **Throughput.** The paper reports 2.1 ms per frame on 20 DSP slices, which
  implies time-multiplexed arithmetic it does not describe. This RTL builds
  the fully parallel structure of the block diagrams (15 × 15 sub-coefficient
  multipliers, 15 × 8 tree multipliers, 15 output multipliers), one sample
  per clock. That is roughly 465 multipliers, far more than the 80 DSP slices
  of the Spartan-7 part the paper reports using.
* **Own choices where the paper is silent:** sample width and format, the
  window placement and modulo-256 wrap, the MU write interface, all pipeline
  registers, rounding to nearest, adder saturation, the start/valid
  handshake, synchronous reset, inputs assumed synchronous to `clk` (no
  synchronizers on DRDY or 1PPS), a single frame buffer.

## Files

* `rtl/dfc_pkg.sv` – constants, formats, rounding multiply, W formula.
* `rtl/scg_block.sv`, `primary_counter_block.sv`, `sync_block.sv`,
  `mdc_block.sv` – delay measurement.
* `rtl/time_tag_mapper.sv`, `w_lut.sv`, `lagrange_subcoef.sv`,
  `lagrange_coef.sv`, `memory_divider.sv`, `adder_block.sv`,
  `interpolation_block.sv` – re-framing.
* `rtl/dfc_top.sv` – the system.
* `tb/tb_<module>.sv` – one self-checking testbench per module;
  `tb/tb_ref_pkg.sv` holds the double-precision Lagrange reference;
  `tb/tb_dfc_top_full.sv` runs one frame at full size and
  `tb/tb_workload_pd_frame.sv` the partial-discharge accuracy frame.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself (a
watchdog counts a failure if it hangs). With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/dfc_pkg.sv tb/tb_ref_pkg.sv -y rtl +libext+.sv \
  tb/tb_dfc_top.sv --top-module tb_dfc_top -o sim
./obj_dir/sim
```

Replace `tb_dfc_top` by any other testbench. The testbenches are:

| testbench | what it shows |
|---|---|
| `tb_scg_block` | SP exactly every 100 and every 2,000,000 clocks |
| `tb_primary_counter_block` | delays 0, 1, 7, 49; data lost; restart after loss |
| `tb_sync_block` | status after 50, 49, 52, 0, 51 SPs |
| `tb_mdc_block` | 12 frames, one lost, one good and one early 1PPS |
| `tb_time_tag_mapper` | clocks→steps against the real formula |
| `tb_w_lut` | all 225 weights |
| `tb_lagrange_subcoef` | 5,000 random Z values |
| `tb_lagrange_coef` | 3,000 positions × 4 coefficient blocks, latency |
| `tb_memory_divider` | windows wrapping both frame ends |
| `tb_adder_block` | sums and saturation |
| `tb_interpolation_block` | six delays up to a full frame, latency, rate |
| `tb_dfc_top` | ten shortened frames end to end, every mechanism counted |
| `tb_dfc_top_full` | one frame at full size (about 2.1 M clocks) |
| `tb_workload_pd_frame` | a sine frame with a partial-discharge dip and a normally distributed delay; errors at five corners |

`tb_dfc_top` shortens the frame to 76,800 clocks and the second to 4 frames
so that ten frames, a lost frame, two on-time 1PPS pulses and an early one
all fit in a few seconds of simulation. The full-size test does not reach a
1PPS pulse (that takes 100 M clocks); the one-second check is covered at
reduced size only.
