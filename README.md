# Fixed-point robust residual generator with a chi-squared fault test

A residual generator detects faults in a plant by comparing what the plant
outputs with what an identified model of it predicts. If the model is right
and nothing is broken, the difference (the *residual*) is only noise. A fault
adds something to it that is not noise. The residuals are whitened, their
squares are summed over a window and compared with a chi-squared threshold.
That threshold is chosen so that noise alone crosses it with a small,
known probability α (the false-alarm rate, FAR).

This RTL implements that detector for the single-input, single-output case
with a static gain:

    y(k) = d·u(k) + e(k) + f(k)        e: white noise, f: fault

The gain `d` is identified beforehand as `dhat`. Everything runs in
fixed-point arithmetic with six fractional bits, a precision chosen so that
the false-alarm rate stays near 0.5 %. The design takes one sample pair
`(u(k), ym(k))` at a time and returns, for every sample, the test statistic
τ(k) and an alarm bit.

## How the statistic works

For every sample the design forms

| step | quantity | formula |
|---|---|---|
| 1 | residual | `r(k) = ym(k) − dhat·u(k)` |
| 2 | window | the last N residuals, N = 10 |
| 3 | window energy | `r_sq_sum = Σ r(i)²` |
| 3 | window mean | `r_avg = Σ r(i) / N` |
| 3 | window variance | `r_var = Σ (r(i) − r_avg)² / N` |
| 4 | test statistic | `τ(k) = r_sq_sum / r_var` |
| 5 | alarm | `τ(k) > γ` |

The key to understanding the detector is the ratio in step 4. The variance
removes the window mean, but the energy does not. Write the window mean as
`m` and the variance as `v`. Then `r_sq_sum = N·(v + m²)`, so

    τ = N · (1 + m² / v)

With a correct model and no fault, `m` is close to zero and τ stays close
to N (10, plus a small random term). An additive fault of size F shifts
every residual in the window by F. This leaves `v` at the noise variance
but makes `m ≈ F`. With unit noise and F = 10, τ rises to about 1000. A
poorly identified gain does the same thing on a smaller scale: it adds the
constant bias `(d − dhat)·u` to the mean. This is why the quality of the
identification (the SNR of the identification data) controls the
false-alarm rate more than the window length does.

The threshold γ is the upper α-point of the chi-squared distribution with
N − 1 degrees of freedom. For N = 10 and α = 0.5 % it is 23.59, code 1510
in u17.6. γ is an input port, so α or N can change without a rebuild.

## Number formats

Every signal is a plain integer code equal to its value times 2⁶. `sW.6` is
signed with W bits in total, and `uW.6` is unsigned. The word lengths are
those of the fixed-point design that the detector comes from. They are
collected in `rrg_pkg`.

| signal | format | range |
|---|---|---|
| `ym` measured output | s12.6 | −32 … 31.98 |
| `u` plant input | u2.0 | 0 … 3 |
| `dhat` identified gain | u8.6 | 0 … 3.98 |
| `r` residual | s12.6 | −32 … 31.98 |
| `r_sq` | u17.6 | 0 … 2047.98 |
| `r_sq_sum` | u17.6 | 0 … 2047.98 |
| `r_sum` | s14.6 | −128 … 127.98 |
| `r_avg`, `r − r_avg` | s11.6 | −16 … 15.98 |
| `(r − r_avg)²` | u14.6 | 0 … 255.98 |
| `Σ (r − r_avg)²` | u15.6 | 0 … 511.98 |
| `r_var` | u12.6 | 0 … 63.98 |
| `chi_sq` (τ) | u17.6 | 0 … 2047.98 |
| `count` | u11.0 | 0 … 2047 |

This design makes two choices for every step that narrows a value:

- **Rounding is floor.** Low bits are dropped. Products are formed exactly
  and then floored to six fractional bits. Divisions floor, including for
  negative sums.
- **Overflow saturates** at the limits of the target format. Sums are kept
  in 24-bit accumulators and saturated once, at the end of their loop.

A window with zero variance makes `τ = r_sq_sum / 0`. The divider returns
the largest code, 2047.98, and raises `chi_sat`. A quotient above the u17.6
range also saturates.

## Blocks and schedule

```
             +-------------+   r   +------------+  win[0..N-1]  +------------------+
 ym,u,dhat ->| rrg_residual|------>| rrg_window |-------------->| rrg_window_stats |
             +-------------+       +------------+               +------------------+
                                                                  | r_sq_sum, r_var
                                   +---------------+  tau  +-------------+
                  alarm, chi_sq <--| rrg_threshold |<------| rrg_divider |
                                   +---------------+       +-------------+
```

`rrg_top` chains the units. Only one sample is in flight at a time:

| clock edge (after take) | event |
|---|---|
| 1 | `rrg_residual` registers `r` |
| 2 | `rrg_window` shifts `r` in; the statistics start one edge later |
| 3 … 2N+5 | `rrg_window_stats`: loop 1 over i (sum, energy), one step for the mean, loop 2 (squared deviations), one step for the variance |
| 2N+6 … 2N+23 | `rrg_divider`: takes the operands, then 17 clocks of restoring division, one quotient bit per clock |
| 2N+24 | `rrg_threshold` compares; `out_valid`, `chi_sq` and `alarm` appear |

Each loop reads one window entry per clock and has one multiplier (`r²` in
loop 1, `(r − r_avg)²` in loop 2). Latency from the accepting edge to
`out_valid` is `2N + 24` clocks: 44 at N = 10. When the divider saturates,
it is `2N + 7`. `in_ready` is low from the accepting edge until the clock
after `out_valid`. A sample offered during that time stalls.

Before N samples have arrived, the window still holds zeros from reset, and
the statistic is computed over them. `window_full` marks the results that
use N real samples.

## Top-level interface (`rrg_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `in_valid`, `in_ready` | in/out | 1 | a sample is taken when both are high |
| `ym`, `u`, `dhat` | in | 12, 2, 8 | sample and identified gain |
| `gamma` | in | 17 | threshold, u17.6 |
| `out_valid` | out | 1 | one-clock pulse per sample |
| `chi_sq`, `alarm` | out | 17, 1 | τ(k) and `τ(k) > gamma` |
| `r_avg`, `r_var` | out | 11, 12 | window mean and variance |
| `window_full`, `count` | out | 1, 11 | window holds N samples; samples taken (saturates at 2047) |
| `res_sat`, `chi_sat` | out | 1 | `r` or τ was clipped |

The one parameter is `N` (default 10, allowed range 2 … 127). The window
index takes `$clog2(N+1)` bits, which is 4 at N = 10. The top-level inputs
`dhat` and `gamma` come from outside the design. The gain must be
identified beforehand, by least squares over recorded data:
`dhat = Σ y·u / Σ u·u`.

## Verification

Each unit has a self-checking testbench. It compares every output with
64-bit integer arithmetic written separately in `tb/tb_rrg_ref_pkg.sv`, and
also checks the latency. For each unit, a copy with one deliberate bug
makes its testbench fail.

| testbench | what it runs |
|---|---|
| `tb_rrg_residual` | random and clipping operands |
| `tb_rrg_window` | random pushes with idle clocks; every slot, `fill`, `full` |
| `tb_rrg_window_stats` | noise-like, full-range, large-offset and constant windows; latency 2N+3 |
| `tb_rrg_divider` | random, zero divisor and boundary quotients; latency 18 or 1 |
| `tb_rrg_threshold` | equal, ±1 and random operands |
| `tb_rrg_top` | default parameters, end to end (see below) |
| `tb_rrg_l20` | N = 20, 1000 samples, fault on samples 400–699, γ = 38.6, dhat = 1.99 |
| `tb_rrg_sweep` | 16 fault-free runs: N = 10, 20, 40, 100 × four gain estimates |

`tb_rrg_top` runs 2000 samples of `y = 2·2 + e + f`, with e approximately
N(0,1), dhat = 2.04 (code 131), and a fault f = 10 on samples 800–1199.
γ = 23.59. It then drives residuals that clip and a run of equal residuals
(zero variance). It continues until the sample counter saturates. It
counts stalls, clipping of `r` and τ, alarms, the window filling and the
counter saturating, and fails if any of them never happens. In a typical
run, every one of the 390 samples whose window is entirely faulty raises
the alarm. 1.3 % of the fault-free samples raise a false alarm.

`tb_rrg_sweep` uses the gain errors `d − dhat` of 0.002, 0.01, −0.10 and
−0.65. These correspond to identification at 40, 20, 0 and −20 dB SNR. It
prints the false-alarm rate (%) for each window length:

| N | 40 dB | 20 dB | 0 dB | −20 dB |
|---|---|---|---|---|
| 10 | 0.85 | 1.61 | 2.21 | 68.1 |
| 20 | 0 | 0 | 0.25 | 91.1 |
| 40 | 0 | 0 | 0 | 97.7 |
| 100 | 0 | 0 | 0 | 100 |

Longer windows help only when the gain is well identified. A gain error
that shifts the residual mean by more than about one noise standard
deviation makes τ exceed the threshold almost always, whatever the window
length. Gains identified at −40 dB (9.69) and −60 dB (−139.89) fall outside
the u8.6 range of `dhat` and cannot be loaded.

## Where this RTL departs from, or goes beyond, its source

- **Structure.** Only the arithmetic of the detector is fixed by its
  source: the variables, their formats, division by N and N = 10. The
  following are choices of this design: the sequential two-loop schedule,
  the restoring divider, the handshake, floor rounding, saturation, reset
  behaviour and the threshold port.
- **Latency.** The published fixed-point implementation needs 36 clocks
  per sample (at 136 MHz); this one needs 44. That implementation's
  schedule is not known, so the figure was not matched. Its resource counts
  (4 multipliers, 26 adders, 577 register bits in one version; 1056 FF and
  2036 LUT in another) are not matched either. This design has 2
  multipliers, 1 divider and about 390 flip-flop bits.
- **False-alarm rate.** The published fixed-point result keeps α below
  0.5 % "with some false alarms". Here, at N = 10 with a 0.5 % threshold
  for 9 degrees of freedom, the rate is 0.9 to 1.6 %. The statistic
  `N·(1 + m²/v)` is not exactly chi-squared with N − 1 degrees of freedom.
  The difference may come from the noise model, the fault size and the
  seed, or from an expression for τ that differs from
  `r_sq_sum / r_var`: that expression is inferred from the variable list,
  not printed. The threshold is an input, so it can be raised if needed.
- **Not built.** The source describes the general multi-input,
  multi-output generator only mathematically. That generator forms the
  residual with matrix–vector products of Markov-parameter matrices stored
  in block RAM, and whitens it with the inverse square root of the
  residual covariance. No sizes, formats or square-root method are given
  for it, and the evaluated hardware is the scalar case built here. The
  single-precision floating-point version, the offline gain
  identification and the host processor are not part of this RTL either.
- **Table value.** `count` is sized as in the source (11 bits), but its
  use there is not described. Here it counts samples and saturates.

## Simulating

All files are SystemVerilog 2017. Packages must come first. For example,
the end-to-end test:

    verilator --binary --timing --assert --top-module tb_rrg_top -Irtl -Itb \
        -y rtl -y tb +libext+.sv rtl/rrg_pkg.sv tb/tb_rrg_ref_pkg.sv tb/tb_rrg_top.sv
    ./obj_dir/Vtb_rrg_top

Each testbench ends with `TB_RESULT checks=<n> failures=<m>`. The simulator
has two states, so all registers read by the logic are reset.

**Changing the window length.** Override `N` on `rrg_top`. Also change
`gamma` to the chi-squared point for N − 1 degrees of freedom. N up to 127
keeps the 24-bit accumulators exact.

**Changing a word length.** Edit `rrg_pkg`. The saturation limits follow
the widths, and the reference functions in `tb_rrg_ref_pkg` take the widths
as arguments, so keep the two in step.
