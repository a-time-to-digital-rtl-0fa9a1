# Fine-time correction of area-integrated charge

A common way to measure the charge of a photomultiplier pulse is to shape it
into a slow, quasi-Gaussian pulse, sample it with an ADC and add up the
samples. Two things limit how well this works. Dead time keeps the number of
added samples small, so the sum stops before the pulse's tail is back at
baseline. And the ADC clock is not locked to the pulse, so where the first
sample lands on the waveform is random, anywhere within one ADC period. Between
them, the measured charge of identical pulses depends on their arrival phase
by a few per mille.

This RTL implements the FPGA side of a correction for that error. A TDC that
already exists for timing gives the pulse's **fine time**: the phase of the
discriminator crossing inside the ADC period, in 48 bins of 333 ps. The charge
is multiplied by a coefficient looked up by fine time (and by charge, because
the discriminator's time walk depends on amplitude):

    Q_corrected = Q_i x C,   C = mean(Q) / Q(fine time)    from calibration

The numbers follow the LHAASO-WCDA front-end electronics for which the method
was published: a 12-bit ADC at 62.5 Msps, 27 summed samples, and a TDC made
of four 375 MHz clocks 45 degrees apart.

## Signal chain

```
 discriminator ──hit──► tdc ──fine_valid (enable), fine_time──┐
                         ▲                                    ▼
 PLL ──clk_fast[3:0]─────┘                          charge_correction ── dual_lut_correction
                                                    (pairing, alg select) └ sectional_lut_correction
 ADC ──adc_data──► waveform_integrator ──charge_valid, charge──┘
                   (self-triggered, 27 samples)               │ {fine time, corrected charge}
                                                              ▼
                                  data_packager ──pkt_valid/pkt_data/pkt_ready──► data interface
```

`charge_meas_top` wires these together. The analog front end, ADC, PLL and
the data link are outside the FPGA logic and enter as ports.

| module | role |
|---|---|
| `charge_meas_pkg` | widths, table ids, `cfg_wr_t`, `meas_t`, `corr_alg_e` |
| `tdc` = `tdc_sampler` + `tdc_fine_encoder` | multi-phase TDC: fine time 1..48 |
| `waveform_integrator` | self-triggered 27-sample sum and dead time |
| `dual_lut_correction` | time-walk LUT, mod-48 index correction, common 48-entry coefficient LUT |
| `sectional_lut_correction` | one 48-entry coefficient LUT per charge section |
| `charge_zone_finder`, `coef_multiplier` | helpers shared by both algorithms |
| `charge_correction` | pairs each charge with a fine time, runs both algorithms, selects one |
| `data_packager` | one-word output buffer with valid/ready |
| `charge_meas_top` | the whole FPGA chain |

## The fine time

The PLL gives four 375 MHz clocks at 0, 45, 90 and 135 degrees. Each clock
samples the discriminator output on both edges, so there are eight sampling
instants per 2.67 ns fast period, 333 ps apart. Six fast periods make one 16 ns
ADC period, which gives 48 bins. `tdc_sampler` keeps each of the eight sample
streams in a 6-bit shift register clocked by its own edge. At every clk_sys
edge it hands over the 48 samples of the past period in time order:

    samples[8*f + p] = hit at T1 + (8*f + p) * 333 ps,   f = 0..5, p = 0..7

Here T1 is the previous clk_sys edge, and clk_fast[0] must rise together with
clk_sys. `tdc_fine_encoder` adds the first sample of the next window, which is
the sample taken exactly at T2. It reports the first s in 1..48 where the
level goes 0 → 1. A threshold crossing at T_th in (T1, T2] then gives

    T_fine = floor((T_th - T1) / 333 ps) + 1 ∈ 1..48

Only the first rising edge in a period is reported. The report
(`fine_valid`, one cycle) appears in the cycle that begins at the third
clk_sys edge after T2. It can be one bin off only when the crossing lands
within a flip-flop's aperture of a sampling instant. No coarse time stamp is
built.

## Why the charge depends on the fine time, and the two tables

Take one pulse shape and delay it by a fraction of an ADC period. The 27
samples move later on the waveform, so the sum loses some of the tail and
gains nothing: the charge falls as the fine time grows. Once the delay reaches
a full period, the first summed sample moves by one period and the sum jumps
back up. The jump happens where the sampling grid wraps relative to the
trigger, and time walk moves that point: small pulses cross the threshold
later. The result is a sawtooth of charge against fine time, with a jump point
that depends on amplitude.

**Dual-LUT algorithm** (`dual_lut_correction`). This assumes the sawtooth
keeps its shape across amplitudes and only shifts.

1. LUT I: the charge picks one of `ZONES` (4) zones. Each zone holds a time
   walk `dt` in bins, 0..47. The zones should be chosen narrow enough that the
   time walk changes by less than one bin inside a zone.
2. `k = i - dt`, wrapped modulo 48 into 1..48.
3. LUT II: 48 coefficients `C_k`. The output is `Q_i x C_k`.

**Sectional-LUT algorithm** (`sectional_lut_correction`). This drops that
assumption. The same kind of charge sections each get their own 48
coefficients `C_{s,i}`, indexed by the uncorrected fine time. It needs 4 × 48
coefficients instead of 48 + 4, and it corrects changes in curve shape as well
as shifts. In the original measurements it gave the better resolution: 1.26‰
against 1.80‰ at 2.0 V, from 2.31‰ uncorrected.

Both use `charge_zone_finder`. Zone k ends at `bound[k]` inclusive, for
k = 0..ZONES-2, and the last zone is everything above. Bounds must be
ascending. Both multiply in `coef_multiplier`. Coefficients are unsigned
16-bit numbers with 15 fraction bits (1.0 = 32768, range [0, 2)), and the
product is rounded half up into 18 bits, which holds every product. Both
pipelines take 3 clocks and accept one measurement per clock.

### Where the table contents come from

The tables are calibration results and are loaded at run time. This design
does not compute them:

* Zone and section bounds come from a calibration in which the time walk is
  measured against a trigger reference over many amplitudes. Charge is then
  assigned to time-walk classes by a minimum-risk (Bayesian) decision between
  Gaussian fits of each class's charge histogram.
* For one section with test amplitudes A_1..A_n and normalised charges
  m_{a,k} at fine time k, the coefficients that minimise the summed variance
  are

      C_k = Σ_a m_{a,k} / Σ_a (m_{a,k}^2 / mean_a)

  With a single amplitude this reduces to `C_k = mean(Q) / Q_k`.

Tables are written through one port, `cfg` (`cfg_wr_t`). It carries `we`,
`table_sel`, `addr` and `data`:

| table_sel | contents | addr |
|---|---|---|
| `TBL_DUAL_THRESH` | LUT I zone upper bounds | zone 0..2 |
| `TBL_DUAL_WALK` | LUT I time walk, bins 0..47 | zone 0..3 |
| `TBL_DUAL_COEF` | LUT II `C_k` | k-1, 0..47 |
| `TBL_SECT_THRESH` | section upper bounds | section 0..2 |
| `TBL_SECT_COEF` | `C_{s,i}` | s*48 + i-1, 0..191 |

The tables sit in plain registers (distributed RAM). Reset does not clear
them, so load them before use.

## Event flow and timing

The integrator and the TDC run independently of each other. There is no
trigger path from the TDC to the integrator, which matches the block
diagram of the original design. This independence is what makes the
correction necessary and possible. The summation window follows the
waveform, and through it the pulse's true start time. The fine time follows
the discriminator, which crosses its threshold later for small pulses.

**Integration trigger.** The integrator starts on the first ADC sample above
`trig_threshold`, provided it is idle and armed. That sample is the first of
27. After a sum it re-arms only once a sample is back at or below the
threshold, so a long tail cannot start a second sum. Samples above threshold
during a sum are ignored: that is the dead time.

**Pairing.** The TDC's report (`fine_valid`, the enable signal) goes to
`charge_correction`. That block keeps the first fine time reported after each
charge and uses it for the next charge. Reports after that come from pulses
piled up on the one being summed, and they are dropped. A report that
arrives in the same cycle as a charge is kept for the following charge.
If a sum starts with no report since the previous charge (for example,
a pulse too small for the discriminator), the last kept fine time is used.

All counts below are clk_sys (62.5 MHz) cycles:

| when | event |
|---|---|
| W+3, for a crossing in the period starting at edge W | `fine_valid` |
| n | first ADC sample above threshold (with the front end's path delay this comes near W+3) |
| n .. n+26 | the 27 summed samples; `dead_time` high in n+1 .. n+26 |
| n+27 | `charge_valid`, raw charge Q_i (17 bits) |
| n+30 | corrected result leaves `charge_correction` |
| n+31 | `pkt_valid` with `pkt_data = {fine_time[5:0], charge[17:0]}` |

**Algorithm select.** `alg` is sampled together with `charge_valid` and
travels down the pipeline. Switching it never mixes the two results of one
measurement.

**Output.** `data_packager` holds one word until `pkt_ready`. A result that
arrives while the word is still waiting is dropped and counted in
`drop_count` (saturating). Results come at most once every 27 cycles, so a drop
means the receiver stalled for at least that long.

## What follows the published design and what does not

Taken from the published design: the block structure (TDC, waveform
integral, correction block with coefficient LUTs and a multiplier, data
packaging); four 375 MHz phase clocks used for 333 ps bins; the fine-time
formula; 48 bins; 12-bit samples and 27 summation points; the two table
schemes with the mod-48 fine-time correction; four charge zones, the number of
time-walk classes found in calibration; and the product Q × C.

Choices made here, where the description is silent:

* The TDC deserializer is written as plain shift registers in place of the
  FPGA's input-serializer primitive. It has no synchronizer and no coarse
  time.
* The integrator triggers on a digital threshold with re-arm. It has no
  pre-trigger delay and no baseline subtraction.
* Fine time and charge are paired by keeping the first report after each
  charge.
* Table formats, bound encoding, coefficient width and rounding, the write
  port, and the 3-stage pipelines.
* Both algorithms are built side by side behind a run-time select. The
  original hardware used them as separate FPGA builds.
* The fine time travels with the charge through the correction pipeline
  instead of going straight to packaging.
* The packet layout, the one-word buffer, the valid/ready handshake and drop
  counting.
* One inconsistency in the description: it gives the ADC period once as
  48 ns, but 62.5 Msps and 48 × 333 ps both mean 16 ns. 16 ns is used.

Not built: the analog chain (pre-amplifier, (RC)² shaper with 40 ns time
constant, discriminator), the ADC, the PLL, the White Rabbit data interface,
and the offline calibration. FPGA resource use was not compared with the
published figures.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares against
a reference written from the behaviour described above, checks exact cycle
timing, and ends with `TB_RESULT checks=N failures=M`.

* `tb_tdc`: one crossing in every one of the 48 bins, shuffled, with clocks
  built from exact 333/333/334 ps steps (`tdc_clkgen`). Also a pulse that
  stays high across a period boundary.
* `tb_waveform_integrator`: random runs of codes above and below the
  threshold, the dead time, re-arming and full-scale sums.
* `tb_dual_lut_correction`, `tb_sectional_lut_correction`: random tables,
  every zone, mod-48 wrap, and bound edge cases.
* `tb_charge_correction`: both algorithms, switching in flight, dropped
  piled-up reports, and a report in the same cycle as a charge.
* `tb_data_packager`: random back-pressure, holds and drops.
* `tb_charge_meas_top`: the whole chain at default sizes. A behavioural front
  end makes shaped pulses, `A·(t/80 ns)²·exp(2 − t/40 ns)` after a 30 ns
  delay, with ±1 code noise, pile-up and amplitude-dependent time walk. Part A
  compares every output word and the drop counter cycle by cycle with a
  reference model. It also requires that each of these happened: dead-time
  samples, dropped piled-up reports, receiver hold and drop, algorithm
  switches, mod-48 wrap, and every zone of both algorithms. Part B
  calibrates the sectional LUT at one amplitude (3500 codes peak) with
  `C_i = mean(Q)/Q_i` and runs the same pulses again. In this model the
  spread falls from about 0.48‰ to 0.15‰ RMS/mean. The model
  has no timing jitter, so these numbers are not comparable with hardware
  measurements.
* `tb_amplitude_sweep`: amplitudes 1.0 to 2.0 V in 0.1 V steps (2.0 V taken
  as 3500 codes), with a discriminator time walk of 3000/A ns. Three passes
  go through the unchanged hardware: raw, dual-LUT and sectional-LUT.
  Calibration between passes happens in the testbench. Sections are four
  amplitude groups. Each section's coefficients are the least-squares optimum
  `C_k = Σ m_k / Σ m_k²` over its normalised curves. The dual-LUT time walk of
  a zone is the cyclic shift that best matches its curve to the first zone's.
  Mean RMS/mean over the sweep in this model:

  | uncorrected | dual-LUT | sectional-LUT |
  |---|---|---|
  | 0.571‰ | 0.231‰ | 0.208‰ |

  The ordering is the same as in the published measurements. The calibrated
  time walks include a wrap (47, that is −1 bin).
* `tb_nsum_sweep`: three integrators, summing 27, 29 and 31 samples, get the
  same noise-free pulses at all 48 phases. Every sum is checked, and so is the
  trend: the phase-dependent spread falls as the window grows. In this model
  the RMS/mean values are 0.475‰, 0.462‰ and 0.461‰.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
        -Irtl -y rtl -y tb +libext+.sv \
        rtl/charge_meas_pkg.sv tb/tb_charge_meas_top.sv --top-module tb_charge_meas_top
    ./obj_dir/Vtb_charge_meas_top

Swap in any other `tb_*` name to run that testbench. `tb_tdc`,
`tb_charge_meas_top` and `tb_amplitude_sweep` need `tb/tdc_clkgen.sv`, which
`-ytb` finds. Each runs in under half a minute.

To change sizes, edit `charge_meas_pkg` (`N_SUM`, `N_ZONES`, coefficient
format) or override the module parameters. `waveform_integrator` takes `N_SUM`
directly: the charge width follows it, and 31 samples still fit 17 bits.
