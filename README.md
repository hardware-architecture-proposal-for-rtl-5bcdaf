# A streaming TEDA anomaly detector in SystemVerilog

TEDA (Typicality and Eccentricity Data Analytics) decides whether each new
sample of a data stream is normal or anomalous. It needs no model of the
process, no training set and no assumed distribution. For every incoming
vector `x_k` it updates the running mean and running variance of everything
seen so far. From these it computes how *eccentric* the new sample is, and
compares that with a threshold derived from Chebyshev's inequality. Every
quantity is recursive, so the detector stores only a few numbers, whatever
the length of the stream.

This RTL implements the hardware architecture proposed in *"Hardware
Architecture Proposal for TEDA algorithm to Data Streaming Anomaly
Detection"* (da Silva, Coutinho, Santos, Santos, Guedes, Ruiz, Fernandes).
That architecture is a short pipeline of floating-point operators built
directly from the equations. It accepts one sample vector per clock and
delivers its classification three clock periods after the sample is
applied. The block structure, register placement and pipeline timing follow
that architecture. The number format, the operator internals, the data-valid
handshake and the reset behaviour are choices made here and are marked as
such below.

## What is computed

For sample `k` (1, 2, 3, ...) with `N` elements:

```
mu_k      = x_k                                   (k = 1)
mu_k      = (k-1)/k * mu_{k-1} + x_k / k          (k > 1)     per element
d_k       = || x_k - mu_k ||^2                                uses the NEW mean
s_k       = 0                                     (k = 1)
s_k       = (k-1)/k * s_{k-1} + d_k / k           (k > 1)     variance
xi_k      = 1/k + d_k / (k * s_k)                             eccentricity
zeta_k    = xi_k / 2                                          normalised eccentricity
outlier_k = zeta_k > (m^2 + 1) / (2k)
```

With the default `m = 3` the threshold is `5/k`. An eccentricity above it
means the sample lies further from the mean than Chebyshev's bound allows
for "3 sigma", whatever the distribution of the data.

Two properties of these equations show up in the hardware:

* `d_k` measures the distance to the mean *including* the current sample.
  So the variance stage must wait for the mean stage, and the eccentricity
  can reuse `d_k` and `1/k` from the variance stage instead of computing
  them again.
* The eccentricity is undefined while the variance is zero. This is always
  the case at `k = 1`, and also for a stream that has been perfectly
  constant so far. The hardware does not special-case this. The division
  `0/0` yields NaN, and the final comparator treats NaN as "not greater",
  so such samples are classified normal. This matches the algorithm, which
  does not classify the first sample at all.

## The pipeline

```
            cycle c              cycle c+1                       cycle c+2
 x_k ──┬──► MEAN lane n ─► MREGn ─► mu_k ─┐
       │   (MCOMP, MMUX,                  ├─► VSUBn, VMULT1_n, VSUM1 ─► d_k ─► EREG3 ─┐
       └──────────────────► VREG1_n ─ x_k ┘        VDIV1 ─► 1/k ───────────► EREG4 ─┤
 k ────┬──────────────────► VREG2 ──── k ──► VMULT2, VMULT3, VSUM2, VMUX1 ─► VREG1 ─ s_k ─┤
       ├──────────────────► EREG1 ────────────────────► EREG2 ──── k ───────────────────┤
       │                                                   EMULT1, EDIV1, ESUM1 ─► xi_k
       └──────────────────► OREG1 ────────────────────► OREG2 ──── k ─► ODIV1, OSUM1,
                                                                        OMULT1, ODIV2,
                                                                        OCOMP1 ─► outlier
```

The box names (`MREGn`, `VSUM2`, `EDIV1`, ...) are those of the published
block diagrams, and the instance names in the RTL follow them. The
pipeline has only two register ranks in the datapath, so three clock
periods pass from input to output:

| period | what happens |
|---|---|
| c   | `x_k` and `k` are at the inputs. Each MEAN lane computes the new mean combinationally. At the end of the period `MREGn` loads `mu_k`, and `VREG1_n` and `VREG2` capture `x_k` and `k`. |
| c+1 | VARIANCE sees `x_k` and `mu_k` together. It forms `d_k` and `1/k`, and updates the variance. `VREG1` loads `s_k`; `EREG3` and `EREG4` load `d_k` and `1/k`. |
| c+2 | ECCENTRICITY reads `s_k` (from `VREG1`), `d_k`, `1/k` and the twice-delayed `k`, and produces `xi_k`. OUTLIER turns it into `zeta_k`, the threshold and the decision in the same period. `out_valid` is 1. |

A new sample may enter every period, so after the three-period start-up one
result leaves per clock. The architecture's throughput claim rests on this:
an initial delay of `3 t_c` and then one classification every `t_c`. `t_c`
is the critical path, which is long here, because each stage is a chain of
complete floating-point operators with no internal pipelining. The
published implementation reports `t_c = 138 ns` (7.2 Msamples/s) on a
Virtex-6. This RTL keeps the same structure, so expect a critical path of
the same order on an FPGA. The long paths are intentional: they come from
the architecture, not from a fault in the RTL.

### How `k` stays aligned

There is one counter, and every module receives the *current* `k`, the
index of the sample now at the input. Each later stage delays it by its own
registers: `VREG2` (one period) in VARIANCE, `EREG1`/`EREG2` (two periods)
in ECCENTRICITY, and `OREG1`/`OREG2` (two periods) in OUTLIER. These delay
registers load on every clock. Only the two state registers, `MREGn` and
`VREG1`, are qualified by the valid flag. This matters when the input
stream has gaps. The counter advances only on accepted samples, and the
delay lines carry the value that was current when the sample entered.
Idle cycles therefore neither corrupt the recursion nor shift `k`
relative to the data.

### Valid handshake (a choice of this design)

The published architecture assumes a sample on every clock and has no
handshake. Here `in_valid` marks clocks that carry a sample:

* The counter increments only when `in_valid` is 1.
* `MREGn` loads only when `in_valid` is 1.
* A one-bit flag travels with `VREG2` and qualifies `VREG1`.
* The flag is registered once more next to `EREG3`/`EREG4` and leaves as
  `out_valid`.

There is no back-pressure: the pipeline never stalls, and the consumer must
accept every result that has `out_valid` set. When `in_valid` is held at 1,
the design behaves exactly like the unqualified original.

## Floating-point arithmetic

The source states only that the datapath is floating point. This RTL uses
IEEE-754 binary32 layout, parameterised by exponent width `EW` (8) and
fraction width `MW` (23). Thirty-two-bit words also fit the source's
register count: the 13 architectural registers for `N = 2`, at 32 bits
each, make 416 bits, against 414 reported. All operators are combinational
and share the following conventions:

* Rounding is to nearest, ties to even.
* Subnormal numbers are not supported. A zero exponent field reads as
  zero, and results that would be subnormal become a signed zero. For this
  application this only matters for variances below about 1e-38.
* Overflow gives a signed infinity.
* NaN results use the canonical quiet NaN `0x7FC00000`. `inf - inf`,
  `0 * inf`, `0/0` and `inf/inf` are NaN; `x/0` is infinity.

| module | used for | how |
|---|---|---|
| `fp_add` | `MSUMn`, `VSUBn`, `VSUM1`, `VSUM2`, `ESUM1`, `OSUM1` | Orders the operands by magnitude, aligns with guard, round and sticky bits, adds or subtracts, renormalises with a leading-zero count, rounds. |
| `fp_mul` | `MMULT1n`, `MMULT2n`, `VMULT1_n`, `VMULT2`, `VMULT3`, `EMULT1`, `OMULT1` | One 24x24-bit significand product, at most one normalising shift, rounds. |
| `fp_div` | `MDIVn`, `VDIV1`, the `(k-1)/k` boxes, `EDIV1`, `ODIV1`, `ODIV2` | One integer division of the shifted dividend significand. The remainder becomes the sticky bit. |
| `fp_cmp_gt` | `OCOMP1` | Sign and magnitude comparison. A NaN operand gives 0. |
| `uint_to_fp` | every place where `k` enters the datapath | Leading-one detect, shift, round. `k` is exact up to 2^24. |
| `teda_kratio` | the `(k-1)/k` boxes | Two conversions and one division. |

Each operation is correctly rounded, so the whole pipeline is
deterministic. A software model that performs the same binary32 operations
in the same order reproduces the outputs bit for bit. The testbenches rely
on this. The order matters: `VSUM1`, the N-input adder, is a left-to-right
chain (`((d1^2 + d2^2) + d3^2) + ...`), and a tree would round differently.

Precision note: `(k-1)/k * mu + x/k` does not reproduce a constant input
exactly in binary32. After a few dozen samples of the same value, the mean
can differ from it by a few units in the last place. Such drift is far
below any threshold of interest, but it means a "constant" stream has a
tiny non-zero variance after a while, and then a defined eccentricity.

## Modules

| file | block | contents |
|---|---|---|
| `rtl/teda_pkg.sv` | - | Default widths (`FP_EW`, `FP_MW`, `K_W`), `N_DEFAULT = 2`, `M2_DEFAULT = 9.0`. |
| `rtl/teda_counter.sv` | sample counter | `k`: resets to 1, increments per accepted sample, saturates at `2^KW - 1`. |
| `rtl/teda_mean.sv` | MEAN (one lane per element) | `MCOMPn`, `MMUXn`, `MREGn`, `MMULT1n`, `MMULT2n`, `MSUMn`, `MDIVn`, `(k-1)/k`. |
| `rtl/teda_variance.sv` | VARIANCE | `VREG1_n`, `VREG2`, `VSUBn`, `VMULT1_n`, `VSUM1`, `VDIV1`, `VMULT2`, `VMULT3`, `VSUM2`, `VCOMP1`, `VMUX1`, `VREG1`. |
| `rtl/teda_eccentricity.sv` | ECCENTRICITY | `EREG1`-`EREG4`, `EMULT1`, `EDIV1`, `ESUM1`. |
| `rtl/teda_outlier.sv` | OUTLIER | `OREG1`, `OREG2`, `ODIV1`, constant `m^2`, `OSUM1`, `OMULT1`, `ODIV2`, `OCOMP1`. |
| `rtl/teda_top.sv` | whole detector | Counter, `N` MEAN lanes, the three later stages, and a two-stage delay of `k` for `k_out`. |
| `rtl/fp_*.sv`, `rtl/uint_to_fp.sv`, `rtl/teda_kratio.sv` | operators | See above. |

As in the source, each MEAN lane has its own `1/k` divider and its own
`(k-1)/k` unit, and VARIANCE computes both again from the delayed `k`. The
duplicates hold identical values and could be shared to save area. They
are kept because that is how the architecture is drawn, and because it
keeps each lane self-contained.

## Interface of `teda_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; everything is rising-edge |
| `rst_n` | in | 1 | asynchronous active-low reset: `k = 1`, mean and variance 0, pipeline empty |
| `in_valid` | in | 1 | `x` holds a sample this period |
| `x[N]` | in | N x 32 | sample vector, binary32 |
| `out_valid` | out | 1 | outputs below belong to a sample (two edges after it was accepted) |
| `outlier` | out | 1 | 1 = anomalous |
| `xi` | out | 32 | eccentricity `xi_k` |
| `zeta` | out | 32 | normalised eccentricity `xi_k / 2` |
| `threshold` | out | 32 | `(m^2 + 1) / (2k)` |
| `k_out` | out | 32 | index of the sample the outputs belong to |

Parameters: `N` (elements per sample, default 2), `KW` (counter width,
default 32), `EW`/`MW` (number format, default binary32), and `M2` (m^2 as a
floating-point word, default `32'h41100000` = 9.0, i.e. m = 3). Because `M2`
is a float, non-integer `m` values are possible. To change m, compute
m^2 in binary32; for example, m = 2 gives `32'h40800000`.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=... failures=...` line and has a watchdog.
`tb/teda_tb_pkg.sv` supplies the reference arithmetic:

* Conversion between binary32 and double.
* One-operation binary32 functions. Each computes in double and rounds
  once. This is exact for `+ - * /`, because a double has more than twice
  the binary32 precision.
* `teda_model`: a full TEDA model in both binary32 (operator by operator,
  in circuit order) and plain double precision.

| testbench | what it establishes |
|---|---|
| `fp_add_tb`, `fp_mul_tb`, `fp_div_tb`, `fp_cmp_gt_tb` | 20k-43k random and corner-case operations, each bit-exact against correct rounding: ties, cancellation, overflow, underflow, inf/NaN rules, `1/k` for k = 1..3000. |
| `teda_counter_tb` | Reset to 1, counting only accepted samples, saturation (4-bit instance). |
| `teda_mean_tb` | Register contents after every edge, bit-exact; hold during idle cycles; asynchronous reset; mean of 1..200 = 100.5. |
| `teda_variance_tb` | `d_k`, `1/k` and the variance register cycle by cycle with N = 3 (exercises the adder chain); idle cycles; reset. |
| `teda_eccentricity_tb` | `xi` with the exact one- and two-period alignment of its inputs; NaN for zero variance; a hand-worked case (k = 2 gives `xi = 1.5`). |
| `teda_outlier_tb` | `zeta`, threshold (= 5/k exactly), decision on both sides of and exactly on the threshold; NaN input. |
| `teda_top_tb` | End to end at default size. Every output is checked bit-exact at exactly its slot, three periods after input. `xi` agrees with the double-precision equations to 1e-3, and decisions agree except within 1e-3 of the threshold. Covers idle cycles, a mid-stream reset, the zero-variance stretch, the `k = 1` path and injected anomalies, counting each. |
| `teda_workload_tb` | Full-size scenarios modelled on the DAMADICS actuator benchmark used to validate the architecture (see below). |

The architecture was validated on the DAMADICS sugar-factory benchmark:
two process variables of actuator 1, with faults at known sample numbers
and `m = 3`. The benchmark data are not included here. `teda_workload_tb`
generates two signals at the levels and noise of the published traces
(about 35 and 49). It injects a fault over each of the seven actuator-1
fault windows of the benchmark's fault list:

* bypass valve (f18): samples 58800-59800, 58830-58930, 58520-58625,
  54600-54700
* positioner supply pressure drop (f16): samples 57275-57550, 56670-56770
* unexpected pressure drop (f17): samples 37780-38400

For each it streams from reset to 600 samples past the window (37,000 to
60,000 samples, one per clock). It checks:

* bit-exact agreement with the model
* one result per clock
* the three-period latency
* that at least half of the in-window samples are flagged
* that at most 1 % are flagged before the window

Results of the seven runs:

* 72 % to 98 % of the fault-window samples flagged (e.g. 967 of 1001 for
  the long bypass fault)
* false alarms: at most 0.07 % of the samples before the window

The whole testbench (about 390,000 samples) runs in about a second.

These figures come from synthetic data and show that the detector behaves
as intended at full scale. They are not a reproduction of the published
curves.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/teda_pkg.sv tb/teda_tb_pkg.sv tb/teda_top_tb.sv --top-module teda_top_tb
./obj_dir/Vteda_top_tb
```

Replace `teda_top_tb` with any other testbench name. All of them finish in
well under a second.

## Where this RTL departs from, or goes beyond, the source

* **Number format**: binary32 without subnormals, round to nearest even.
  The source says only "floating point".
* **Operator insides**: the source shows each adder, multiplier, divider
  and comparator as a box. The implementations here are plain
  single-cycle combinational ones.
* **`k` to floating point**: the source feeds `k`, `k-1` and `2k` to
  floating-point operators without describing a conversion.
  `uint_to_fp` does it. The `(k-1)/k` box is a conversion and a division.
* **Handshake and reset**: `in_valid`/`out_valid`, the valid-gated state
  registers, the asynchronous active-low reset and the saturating counter
  are additions. The reset values (mean and variance 0) are the initial
  conditions of the recursion.
* **`k_out`**: an extra two-stage delay of `k`, for convenience. Without it
  and the two valid flags, the register count for `N = 2` is 416 bits,
  close to the 414 reported for the original.
* **Multipliers**: the design contains 3N + 4 floating-point multipliers
  (10 for `N = 2`). The original reports 27 DSP multiplier blocks, which
  matches a vendor floating-point multiplier spanning two to three DSP
  slices. This could not be checked here.
* **Not reproduced**: the clock period (138 ns) and the resource figures
  depend on the FPGA and its vendor tools.
