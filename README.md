# H3DFact in SystemVerilog: a three-tier compute-in-memory resonator factorizer

## The problem and the idea

A holographic (vector-symbolic) representation stores an object made of F
attributes as one bipolar vector `s = x1 ⊙ x2 ⊙ … ⊙ xF`. Each `xf` is
picked from a code book of M random vectors in `{-1,+1}^D`, and `⊙` is the
element-wise product ("binding"). Recovering the factors means searching
M^F combinations. A *resonator network* avoids that search. It keeps one
estimate per factor and updates all of them in parallel:

```
u_f     = s ⊙ Π_{g≠f} est_g            (unbind the other factors)
a_f     = act( X_fᵀ · u_f )             (similarity to every code vector)
est_f  <- sign( X_f · a_f )             (projection back onto the code book)
```

`X_f` is the D×M matrix whose columns are the code vectors of factor f.
Nearly all of the work is in the two matrix-vector products (MVMs). The
design therefore puts both MVMs into resistive-RAM (RRAM) crossbars, which
compute a whole MVM in one analog read. It stacks three tiers:

| tier | technology | contents |
|------|------------|----------|
| tier 3 | RRAM | F **similarity** subarrays, D rows × COLS columns, code vector m in column m |
| tier 2 | RRAM | F **projection** subarrays, COLS rows × D columns, holding the transposed code book |
| tier 1 | logic | unbinding XNORs, -1 counters, one SAR ADC per bit line, bipolar adders, activation units, column register file, SRAM buffers, controller |

The point that shapes the whole RTL is this: the two RRAM tiers **share the
same vertical word lines and bit lines**, so one set of tier-1 ADCs serves
both. That only works if at most one RRAM tier draws current at a time. The
controller switches tier power so that one tier is ACTIVE while the other
is in STANDBY or SHUTDOWN. It also buffers a whole batch in tier-1 SRAM, so
each tier is switched on once per iteration instead of once per item.

The device noise of RRAM reads acts like the random perturbation that helps a
resonator network escape limit cycles. The array model therefore has an
optional noise source.

## Default configuration

| parameter | default | meaning |
|-----------|---------|---------|
| `D` | 256 | vector dimension = rows of a similarity subarray (d in the paper) |
| `F` | 4 | factors = subarrays per RRAM tier (f) |
| `COLS` | 256 | code vectors per factor (columns of a similarity subarray) |
| `BATCH` | 100 | items buffered in tier-1 SRAM |
| `ADC_BITS` | 4 | SAR ADC resolution |
| `ACT_BITS` | 4 | activation width (the value tier 2 receives on its word lines) |
| `NOISE_AMP` | 2 | read noise, ± cell currents, when enabled |

With these sizes there are 4 × 256 = 1024 ADCs. The vertical wiring adds up
to 2 tiers × 4 subarrays × (256 WL + 256 BL + 128 SL) = 5120 connections.
Source lines are not modelled as signals.

## Bipolar arithmetic on unipolar cells

A bit is stored as 1 for +1 and 0 for −1. Binding and unbinding are
therefore XNOR (`xnor_unbind`).

An RRAM cell either conducts (it stores +1) or does not. A word line is
either driven (the input element is +1) or not. A similarity column
therefore delivers a count, not a dot product:

```
P = #{ i : u_i = +1 and x_i = +1 }
```

Two cheap digital counts turn P back into the bipolar dot product:

- `neg`, the number of −1 elements on the word lines (`neg_counter`), and
- `W`, the number of +1 cells in the column. `column_regfile` records it
  when the column is programmed.

Then

```
u · x = 4P + 2·neg − 2·W − D        (bipolar_adder)
```

The 4-bit ADC quantises P. Its LSB is `2^(log2 D − ADC_BITS − 1)`, which is
8 cell currents at D = 256. The 16 codes therefore span P from 0 to D/2, and
D/2 is the count a perfectly matching code vector produces. The adder uses
the middle of the ADC bin:

```
P̂ = code·LSB + LSB/2
```

A calibration offset (`cfg_adc_offset`) is subtracted before conversion,
in both the 4-bit mode and the projection compare mode.
Currents above the top of the range saturate at code 15.

## Activation and projection

The activation unit turns the similarity into a non-negative 4-bit
coefficient. Only the first `cfg_num_codes` columns take part:

```
act_m = (m < num_codes && sim_m > threshold) ? min(15, sim_m >>> (log2 D − 4)) : 0
```

These coefficients drive the word lines of the projection subarray as
multi-level inputs. Bit line j of that subarray then collects

```
Q_j = Σ_m act_m · [x_mj = +1]
```

The sign of `Σ_m act_m·x_mj` equals the sign of `2Q_j − Σ act`. The new
estimate bit is therefore `Q_j ≥ ceil(Σ act / 2)`. The ADC works out this
compare in a one-step "compare" mode, against a reference that the
activation unit computes and stores next to the activations. A tie goes to
+1. Estimates with all activations zero become all +1.

The threshold, the shifts and this sign reference are this design's choices.
The paper gives the 4-bit similarity results and the 1-bit projection
outputs, but not the formulas.

## Schedule and tier power

The controller (`h3d_controller`) runs one iteration over the batch in two
phases:

```
similarity phase   tier 3 ACTIVE, tier 2 SHUTDOWN
  per item:  S_RD (read s, est from SRAM) → S_ARR (XNOR + array read)
             → S_ADC (start) → S_WAIT (ADC_BITS+1 cycles) → write act to SRAM
switch cycle       both tiers STANDBY
projection phase   tier 2 ACTIVE, tier 3 SHUTDOWN
  per item:  P_RD → P_ARR → P_ADC (compare mode) → P_WAIT (2 cycles)
             → write new estimates
switch cycle       both tiers STANDBY
```

One iteration takes `cfg_batch · (ADC_BITS + 9) + 2` cycles. That is 13
cycles per item, and 1302 cycles for a batch of 100. All F factors and all
columns are processed in parallel. The estimates of an iteration are all
computed from the previous iteration's estimates, because the similarity
phase of the whole batch ends before any estimate is overwritten.

A concurrent assertion checks that the two tiers are never ACTIVE together.
An RRAM array drives its bit lines only while ACTIVE, which models the
word-line level shifters being unpowered. Programming a code vector takes
two cycles, one per tier. In each cycle only the tier being written is in
STANDBY; the other stays in SHUTDOWN.

## Host interface

Commands use a valid/ready handshake (`cmd_valid`, `cmd_ready`, `cmd_op`,
`cmd_factor`, `cmd_idx`, `cmd_data`):

| op | effect |
|----|--------|
| `CMD_PROG_CODE` | write code vector `cmd_idx` of factor `cmd_factor` into both tiers and the register file |
| `CMD_LOAD_S` | store object vector `cmd_idx` of the batch |
| `CMD_LOAD_EST` | store the initial estimate of factor `cmd_factor` for item `cmd_idx` (for example the superposition of the code book) |
| `CMD_START` | run `cfg_iters` iterations over `cfg_batch` items |
| `CMD_READ_EST` | return an estimate on `rsp_data`, with `rsp_valid` one cycle after the command is accepted |

`busy` is high during a run. `done` pulses at its end. `iter_count`
counts the iterations completed. `tier2_pwr` and `tier3_pwr` expose the
power modes. Keep `cfg_threshold`, `cfg_num_codes`, `cfg_noise_en` and
`cfg_adc_offset` stable during a run.

## Where the RTL departs from the paper or goes beyond it

- **RRAM arrays, SAR ADCs and power modes are behavioural models.** They
  are `rram_array` and the conversion timing of `sar_adc`. The sensing
  path (voltage regulation, current-sense resistor, target voltage), the
  high-voltage program isolation, the TSVs and hybrid bonds, the bias, decap
  and clock buffers are not modelled. A cell is ideal binary, and the
  noise is uniform, not the measured distribution of a real test chip.
- **Not rebuilt:** the paper's clock rate and throughput figure (185 MHz,
  1.41 TOPS). The cycle schedule here is conservative and of this design's
  own making: 13 cycles per item, with the SRAM reads, the array read and
  the SAR conversion in sequence and not pipelined.
- **Not included:** the neural network front end of the perception
  experiment. The design takes product vectors from the host.
- **Own choices:** the ADC range and offset, the activation function and
  threshold, the projection reference, the command set and the
  one-cycle switch between tiers.
- **Subarray use:** every START reads all F subarrays of a tier together,
  one subarray per factor. The paper also allows any subset of subarrays to
  be enabled, and subarrays to serve several inputs in parallel. Neither is
  built: there is no per-subarray enable, and a problem with fewer factors
  gives its spare subarray an identity code book (all +1).
- **Code-book size:** code books with more than 256 vectors do not fit,
  because each factor owns exactly one subarray. This excludes the
  M = 512 rows of the accuracy study.
- **Accuracy:** the RTL reproduces a resonator network bit for bit against
  an independent model, but it does not reproduce the accuracy table.
  The larger problems need 10^2 to 10^6 iterations, far beyond simulation.
  In the short runs that can be simulated, F = 4 problems started from the
  superposition state converge slowly. The testbenches therefore report the
  number of items whose factors decode correctly (by largest similarity),
  and do not require convergence. In the default-size workload test, with
  threshold 0 and no noise, 13 of 100 F = 3, M = 16 items decode correctly
  after 10 iterations. F = 4, M = 16 reaches about 1 of 100 after 30
  iterations. The paper reports 99 % in 5 and 33 iterations. The likely
  causes are in this design's number formats. At D = 256 the 4-bit ADC
  resolves the similarity only in steps of 32. The activation rule also maps
  every similarity below 16 to zero. Early in a run almost every similarity
  lies below 16, so most activations are zero. Changing `LSB_SHIFT`,
  `ACT_SHIFT` or the activation function in `h3dfact_top` is the place to
  start if accuracy matters.

## Files

`rtl/` (one module or package per file):

| file | role |
|------|------|
| `h3d_pkg.sv` | sizes, power-mode and command enums |
| `xnor_unbind.sv` | unbinding of all factors |
| `neg_counter.sv` | −1 counter of a word-line vector |
| `rram_array.sv` | behavioural RRAM crossbar with power gating and read noise |
| `sar_adc.sv` | SAR ADC, conversion and 1-bit compare modes |
| `bipolar_adder.sv` | column count → bipolar similarity |
| `activation_unit.sv` | thresholded 4-bit activations and projection reference |
| `column_regfile.sv` | +1 count per programmed column |
| `sram_buffer.sv` | tier-1 SRAM buffer (object vectors, estimates, activations) |
| `h3d_controller.sv` | command decoding, programming and the iteration schedule |
| `h3dfact_top.sv` | the three tiers wired together |

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Then
`tb_h3dfact_top.sv` runs end to end at a reduced size (D = 64, 16 code
vectors, batch of 6). `tb_h3dfact_full.sv` runs at the full default size.
`tb_workload_table1.sv` runs accuracy-study style problems with F = 3 and
F = 4 at the default size. `h3d_tb_common.svh` holds the shared reference
model and host tasks. Every testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

The end-to-end testbenches count and require these mechanisms:

- both power-mode hand-overs;
- programming of both tiers;
- ADC saturation;
- zero and clipped activations;
- threshold rejection;
- noisy reads;
- read-back.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module tb_h3dfact_top rtl/h3d_pkg.sv tb/tb_h3dfact_top.sv
./obj_dir/Vtb_h3dfact_top
```

The block testbenches take seconds. The reduced-size end-to-end test takes
about two minutes. The full-size test and the workload test take a few
minutes each. To change the size, override the top's parameters. The
derived widths and shifts follow from `D`, `COLS` and `ADC_BITS`.
