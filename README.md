# Time-domain digital backpropagation with short learned dispersion filters

An optical fiber distorts a signal in two ways. Chromatic dispersion (CD) is
linear and smears the pulses in time. The Kerr effect is nonlinear: it rotates
the phase of each sample in proportion to the sample's power. Digital
backpropagation (DBP) undoes both at the receiver. It runs the fiber equation
backwards with the split-step method, alternating a linear dispersion step and
a nonlinear phase step for every span of fiber.

This RTL implements time-domain DBP (TD-DBP). Each dispersion step is a short
FIR filter rather than an FFT. The filters are much shorter than filters
designed one step at a time, because the coefficients of all steps are trained
together, offline, as one deep network. That training also prunes the filters
to 15 taps and quantizes them to 6 bits. The hardware therefore only has to
apply 33 short, programmable filters, each followed by a cheap nonlinear step.
It does so on 96 samples per clock cycle, so at 416.7 MHz it handles
40 GSa/s: a 20 GBd single-polarization signal at 2 samples per symbol.

The algorithm, the word lengths, the lane count, the filter length and the
33-step chain follow a published ASIC study of this scheme. That study reports
synthesis results for one step, not RTL. The parallel filter architecture, the
pipeline, the register interface and a few internal word lengths are this
design's own. They are listed under "Departures and own choices" below.

## The chain of steps (`tddbp`)

```
 in (96 x complex 9 bit) ─► step 0 ─► step 1 ─► ... ─► step 31 ─► step 32 ─► out
                            FIR+NL     FIR+NL           FIR+NL     FIR only
```

One step corresponds to one 100-km span. A 3200-km link has 32 spans and uses
33 steps in the symmetric split-step arrangement: the first and last linear
half-steps are folded into full filters, and the last step has no nonlinear
part. In RTL, `tddbp_step` with `HAS_NL = 0` omits that logic entirely. Every
step has its own register set, so every step can hold a different filter.
That is necessary because the training optimizes all 33 filters jointly and
they are not identical.

Samples travel as blocks of `LANES` = 96 complex values. Each value has a
9-bit two's complement real part and a 9-bit imaginary part, and lane 0 holds
the oldest sample. `in_valid` marks a block. Gaps between blocks are allowed
and simply pass down the chain.

## One step (`tddbp_step`)

```
 9 bit ─► fir_sym_par ─► 20 bit ─► sig_quant ─► 9 bit ─┬──────────────► x ─► sig_quant ─► 9 bit
                                  (>> fir_shift)       │                ▲       (>> 7)
                                                       └─► nl_step: Q5 ─► |x|^2 ─► 1 + j·γ|x|^2
```

A step is the CD filter, a requantizer back to 9 bits, and the nonlinear step.
There are two register stages: one at the filter output and one at the step
output. The latency is therefore 2 cycles per step, 66 cycles for the chain.

Per step and per block, the `clip_fir` and `clip_nl` flags report whether any
lane saturated. They are aligned with the block leaving that step. They help
when choosing the filter shift for a new set of coefficients.

## The block-parallel symmetric filter (`fir_sym_par`)

This is the largest part of the design: 96 lanes × 8 complex multipliers per
step.

**Symmetry.** The CD transfer function depends only on ω², so its impulse
response is even in time: h(−k) = h(k). With T = 2K+1 = 15 taps, only h(0)
to h(7) are stored. The two samples that share a coefficient are added before
the multiplication:

    y[n] = h(0)·x[n] + Σ_{k=1..7} h(k)·(x[n−k] + x[n+k])

This takes 8 complex multiplications per output instead of 15. Each complex
product uses four real multipliers.

**Block processing.** The filter is non-causal (it needs x[n+k]). It is made
causal by delaying every output K = 7 samples. Every cycle, the filter builds a
window of 2K + 96 = 110 samples: the last 14 samples of the previous block,
kept in a history register, followed by the new block. Output lane i is the
filter centred on window position i + K. That is input sample i − 7 of the
current block, which may fall in the previous block. As a result:

* Each step shifts the stream by 7 samples, and the chain shifts it by
  33 × 7 = 231 samples. A block leaving the chain therefore holds samples that
  entered up to three blocks earlier. Samples before the first block after
  reset count as zero.
* The history advances only on valid blocks. A gap in the input does not break
  the filter's memory.
* `LANES` must be at least 2K, since the history is taken from one block.

**Precision.** The pre-added pair has 10 bits and each product has
10 + 6 bits. A complex part adds one more bit, and the sum of 8 terms adds
three, which gives 20 bits. No bit is dropped inside the filter. Scaling
happens only in the requantizer that follows.

## Word lengths and requantization (`sig_quant`)

Every reduction of word length uses the same rule, which matters because the
errors of 33 cascaded steps add up:

1. Add half a unit of the *target* LSB (2^(shift−1)).
2. Truncate: an arithmetic shift right by `shift`, i.e. floor.
3. Clip to the target two's complement range.

Halfway values therefore always round up: +1.5 → 2 and −1.5 → −1. Plain
truncation would bias every step downwards. Clipping is accepted because the
signal is roughly Gaussian: clipping a rare peak costs less than the extra bit
needed to avoid it. Scale factors are powers of two, so every rescaling is a
shift.

| point | width | scaling |
|---|---|---|
| step input / output | 9 + 9 bit | — |
| filter coefficient h(k) | 6 + 6 bit | programmable |
| filter result | 20 + 20 bit | full precision |
| after filter | 9 bit | `>> fir_shift` (register) |
| copy for \|x\|² | 5 bit | `>> 4` |
| \|x\|² | 10 bit unsigned | — |
| γ·\|x\|² factor f | 8 bit, 7 fractional | `>> 9` (`NL_SHIFT`) |
| x·(1 + j·f) | 17 bit ("9 + a") | — |
| step output | 9 bit | `>> 7` |

`fir_shift` is a register rather than a constant, because each loaded impulse
response has its own gain and needs its own power-of-two scale.

## The nonlinear step in fixed point (`nl_step`)

The exact nonlinear step is x·exp(jφ|x|²). The datapath uses its first-order
Taylor expansion, x·(1 + jφ|x|²), where φ = γδ is the fiber nonlinearity times
the step length. The power is computed from a 5-bit copy of the sample, which
is enough for a phase correction. The factor is 1 + j·f. Its real part "1" is
the constant 2^7, so the multiplication needs only the two products with f:

    re' = re·2^7 − im·f        im' = im·2^7 + re·f

The result is requantized back to 9 bits. The coefficient `gamma` is signed
(8 bits), and its sign sets the direction of rotation.

With `NL_SHIFT` = 9, f = γ·|x|²/512 stays within ±1 rad (±128/128) even at
full-scale power. So the factor requantizer never clips at these widths. Its
flag is kept for other settings. The 5-bit copy can clip, but only at the
positive end (+255 rounds to +16). The output can also clip, when the rotation
pushes a large sample outside the 9-bit range.

## Programming a step (`step_cfg`)

Writes use `cfg_we`, `cfg_step` (the step number), `cfg_addr` and the 32-bit
`cfg_wdata`. A write takes effect from the next clock cycle:

| `cfg_addr` | contents |
|---|---|
| 0 … 7 | h(addr): bits [5:0] real, bits [11:6] imaginary |
| 8 | `fir_shift`, bits [4:0] |
| 9 | `gamma`, bits [7:0], signed |

Other addresses are ignored. Reset clears everything, so an unprogrammed step
outputs zeros. Rewriting coefficients while data flows is legal, but a block
then sees the new values only in the steps already written. The testbenches
drain the chain (66 idle cycles) before reprogramming it.

## Sizes for the published configurations

| configuration | fits the default parameters? |
|---|---|
| learned filters, 15 taps, 6-bit coefficients, 9-bit signal | yes, exactly (the main configuration) |
| learned, 5-bit coefficients and/or 8-bit signal | values fit (sign-extended); set `COEF_W=5` / `SIG_W=8` for the narrower hardware and its clipping points |
| least-squares baseline, 25 taps, 8/9-bit coefficients | no; set `TAPS=25`, `COEF_W=8` or `9` (tested in `tb_table_configs`) |
| 3200 km = 32 spans, 33 steps | yes (`STEPS=33`) |
| 20 GBd, 2 samples/symbol = 40 GSa/s | 96 lanes need 416.7 MHz; the clock rate is not verified here |

## Departures and own choices

* **Parallel architecture.** The source says only that each step is a
  reconfigurable parallel FIR filter that exploits tap symmetry. The
  window/history arrangement, with one full filter per lane, is the simplest
  form of that. There is no sharing of subexpressions between lanes.
* **Pipeline.** There are two registers per step. The source gives no
  pipeline, and whether this meets 416.7 MHz in 28-nm CMOS at 0.6 V has not
  been checked. A synthesized version would probably need more stages around
  the multipliers.
* **Filter output width.** The published system model shows 18 bits after the
  filter. It uses 8-bit coefficients and probably counts only one product.
  Here the sum is kept at full precision (20 bits for 6-bit coefficients), and
  `fir_shift` selects the 9 bits kept.
* **Factor width "a" and γ scaling.** The published model leaves the factor
  width as a symbol. This design uses 8 bits with 7 fractional bits, an 8-bit
  signed `gamma` and a shift of 9.
* **Sign of the phase.** The exact step is written with exp(−jγδ|x|²), but its
  Taylor form with +j. Both are available through the sign of `gamma`.
* **Register interface, reset values and clip flags** are this design's own.
* **Not included.** The chain begins with the input already at 9 bits, so the
  first quantizer of the system model is not part of it. Also left out: the
  optical link and amplifiers, the receiver front end (low-pass filter and
  downsampling), the matched filter and phase recovery that follow, and the
  offline training that produces the coefficients. The trained coefficient
  values are not published, so the testbenches use random filters.

## Files

| file | contents |
|---|---|
| `rtl/tddbp_pkg.sv` | default sizes and word lengths |
| `rtl/sig_quant.sv` | round-half-up, shift and clip |
| `rtl/fir_sym_par.sv` | block-parallel symmetric complex FIR |
| `rtl/nl_step.sv` | Taylor-expanded nonlinear step, one sample |
| `rtl/step_cfg.sv` | registers of one step |
| `rtl/tddbp_step.sv` | one step, 96 lanes |
| `rtl/tddbp.sv` | top: 33-step chain |
| `tb/tddbp_ref_pkg.sv` | bit-true reference model, sample by sample over a whole stream |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_table_configs.sv`, `tb/tb_step_config_run.sv` | one step in each of the eight published table configurations (15/25 taps, 5/6/8/9-bit coefficients, 8/9-bit signal), 32 lanes |

## Verification

Each testbench compares the RTL bit for bit with `tddbp_ref_pkg`. The
reference model processes the whole stream sample by sample, without blocks or
history registers, so it does not share the hardware's structure. The
testbenches also check latency, include input gaps and reprogramming, and
count that every clipping point and halfway rounding actually occurs. Each
prints `TB_RESULT checks=N failures=M`. `tb_tddbp` runs the full default
design: 33 steps × 96 lanes, 10 blocks, reprogrammed half way. It needs about
two minutes to build and one second to run.

```
verilator --binary --timing --assert -j 4 \
  rtl/tddbp_pkg.sv tb/tddbp_ref_pkg.sv rtl/sig_quant.sv rtl/fir_sym_par.sv \
  rtl/nl_step.sv rtl/step_cfg.sv rtl/tddbp_step.sv rtl/tddbp.sv \
  tb/tb_tddbp.sv --top-module tb_tddbp
./obj_dir/Vtb_tddbp
```

The other testbenches build the same way, with their module's files. The data
are random (`$urandom`), with no data files.
