# Error-backpropagation background calibration for a time-interleaved ADC

A time-interleaved ADC (TI-ADC) reaches very high sample rates by running M
slower sub-ADCs in turn. The price is mismatch. Each interleave m has its own
gain, DC offset, sampling instant and bandwidth, and the mismatch shows up as
spurs and noise that a coherent receiver cannot tell from the signal.

The idea implemented here is to calibrate the TI-ADC in the background with
the one error signal a receiver already has: the slicer error at the symbol
decisions. That error lives at the far end of the receiver DSP, after
dispersion compensation, the 2×2 polarisation equaliser and decimation to the
symbol rate. It cannot drive a filter at the ADC directly. Instead, the error
is **backpropagated**. The linear DSP between the ADC and the slicers is
described as a 4×4 MIMO FIR Γ. The gradient of the slicer MSE with respect to
a sample at the ADC output is the slicer error passed backwards through Γ:

    ê_i[n] = Σ_j Σ_l Γ[j][i][l] · e_j[n+l]

Here i and j are the four real signal components (I and Q of two
polarisations). e_j is the slicer error, up-sampled to the ADC rate by
inserting zeros. With ê at the ADC rate, every mismatch parameter gets a
plain LMS gradient.

Two variants share this machinery:

* **All-digital.** A compensation equaliser (CE) sits right after the ADC.
  It subtracts an M-periodic offset estimate and applies an M-periodic
  L_g-tap FIR, with one coefficient set per interleave. The update is
  `g_m[l] -= μ·ê[n]·w[n−l]`, where m = n mod M.
* **Mixed-signal.** The CE is bypassed. The same gradients move the analog
  knobs of the TI-ADC instead: a gain code per interleave,
  `γ -= μ·ê[n]·w[n]`, and an offset code per interleave. A delay-cell code
  uses the MMSE timing gradient, `τ -= μ·ê[n]·(w[n+1] − w[n−1])`.

Because the mismatch drifts slowly, nothing here runs at full rate. One
block of N = 8192 consecutive samples is taken out of every D_B blocks,
backpropagated and used for the updates, while the data path keeps
streaming.

## Data path

```
adc_data[4] ─► ce_filter ×4 ─► rx_dsp_mimo ─► pam_slicer ─► sym, slicer_err
               (offset, FIR)   (Γ, ↓2)         (8/16-PAM)
                    │ w                              │ e
                    ▼                                ▼
                ebp_capture  (one block of N w's and e's every D_B blocks)
                    │
                ebp_engine   (ê = Γᵀ e, window of w, phase n mod M, gear)
                    │
            ┌───────┴────────┐
         ce_lms          ms_cal_lms
   (g, ô → ce_filter)  (gain/delay/offset codes → analog TI-ADC)
```

The design processes one sample per clock on each of the four components.
The top is `ebp_calib_top`. `cfg_mode` selects the variant:
`CAL_DIGITAL` adapts the CE, and `CAL_MIXED` bypasses the CE and adapts the
analog codes, which leave as ports.

Every sample carries an **index tag**: the ADC sample count, 24 bits, which
wraps. The tag travels with the sample through the CE, the DSP model and the
slicer. It serves three purposes:

* the phase n mod M is always the tag's low bits;
* the DSP model keeps only even tags, which is the decimation to the symbol
  rate;
* the capture buffer places w and e at their tag's address in the block, so
  a slicer error lines up with the CE input of the same instant however long
  the pipeline is.

This makes the calibration independent of the pipeline latency. Pipeline
stages can be added without touching the EBP side.

| stage | latency | module |
|---|---|---|
| ADC → w (offset removed) | 1 cycle | `ce_filter` |
| ADC → x (CE output) | 2 cycles | `ce_filter` |
| x → u (DSP model, even samples) | 2 cycles | `rx_dsp_mimo` |
| u → decision and error | 1 cycle | `pam_slicer` |

## The backpropagation engine

`ebp_capture` watches the tags. A block starts at a tag that is a multiple
of N, and only every D_B-th such boundary is used. It fills two buffers per
component:

* w, 8192 × 12 bits;
* the slicer error, 4096 × 16 bits. Only even samples are stored, and the
  read port returns zero for odd addresses. This is the zero-stuffing of the
  up-sampled error, and it costs no memory.

When both halves of the block are in, `blk_ready` rises. It stays high until
the engine answers with `blk_done`. A block boundary that arrives in the
meantime is counted in `blk_skipped` and dropped.

`ebp_engine` walks the block serially, one output sample n at a time. Each
sample takes K = max(L_g+1, L_Γ) issue cycles plus 2 pipeline cycles:

* cycle c reads e[n+c] and w[n+1−c];
* each returning error word is multiplied by Γ[j][i][c] for all 16 (j, i)
  pairs, which gives four accumulators;
* each returning w word fills a window w[n+1] … w[n−L_g+1].

The engine then emits one gradient sample: the phase n mod M, ê_i[n] for the
four components, and the window. Samples whose window or error support falls
outside the block are not used, so n runs from L_g−1 to N−L_Γ.

With the defaults (L_g = L_Γ = 7) a block takes (8192−12)·10 + 2 ≈ 82,000
cycles. It arrives in 8192 cycles. The engine therefore keeps up only with
D_B ≥ 10. Below that, blocks are skipped, which lowers the update rate but
does not bias it. This trade is deliberate. It uses one MAC slice per
component instead of a block-parallel engine, and that is enough because
the updates may be slow.

**Gear shifting.** After every `cfg_gear_period` processed blocks, `gear`
rises by one, up to `cfg_gear_max`. The gear is added to every step-size
shift. Steps are large while the loop converges and then halve, which lowers
the steady-state noise of the coefficients.

## The updates

All step sizes are powers of two: `μ = 2^−(shift + gear)`, with the
fixed-point scales below folded in. Each accumulator holds 16 more
fractional bits than the value it drives, so even small steps move it.

**CE (ce_lms).** For each gradient sample and each component i:

* the phase m = n mod M gets `g_m[l] -= μ_g·ê[n]·w[n−l]` for l = 0 … L_g−1;
* the offset of the sample at the CE's reference tap gets `ô += μ_o·ê[n]`.
  That sample is w[n−l_d], so its phase is (n − l_d) mod M.

One of the 4M coefficient sets, component 0 and phase 0, is never updated.
It stays a pure delay δ(l − l_d), with l_d = (L_g+1)/2. Without that anchor
the CE and any adaptive equaliser in the DSP could trade gain and delay back
and forth without bound. At reset every set is that pure delay and every
offset is zero.

**Mixed-signal (ms_cal_lms).**

* Gain: `gain_code[m] -= …ê[n]·w[n]`, where gain = 1 + code/512.
* Delay: `tau_code[n mod M_TAU] -= …ê[n]·(w[n+1] − w[n−1])`, in delay-cell
  steps, clamped to ±192 steps. With 260 fs steps that is the ±50 ps range
  of the cells the method was demonstrated with.
* Offset: `ofs_code[m] += …ê[n]`, in quarter LSBs, subtracted in front of the
  ADC.

M_TAU is the number of independent delay cells. In a two-rank
(hierarchical) TI-ADC only the M_1 first-rank switches set the sampling
instant, so M_TAU = M_1 while the gains and offsets stay per sub-ADC.

**Signs.** The analog model behind this design has w = y − ô, and the
mixed-signal offset code is subtracted as well. The MSE gradient with
respect to the offset is then −ê, and the descent step is `+μ·ê`. The
original formulation writes a minus sign, which would match an offset that
is added. Gain and delay follow the original signs. A positive delay code
samples later.

**Stale errors inside a block.** The slicer errors of a block were all
produced with the coefficients that were valid when the block was captured.
Inside a block one interleave phase receives up to N/M = 512 updates per
component, all computed from the same error snapshot. The effective step per
block is therefore a few hundred times μ, and μ must be chosen for that.
With 128 interleaves, a phase receives 8 times fewer updates per block, so
its shift can be 3 smaller.

For the end-to-end test, a sample rms of about 150 quarter-LSB needs shifts
of about 10 for the CE coefficients and offsets, 15 for gain, 14 for delay
and 10 for the analog offset. A shift of 5 already makes the digital loop
diverge.

## Number formats

| quantity | bits | scale |
|---|---|---|
| ADC sample y | 8 | LSB |
| w = y − ô, CE output x | 12 / 14 | ¼ LSB |
| CE coefficient g | 16 | Q2.14 |
| offset estimate ô, offset code | 12 | ¼ LSB |
| Γ | 12 | Q2.10 |
| slicer input u, error e | 16 | ¼ LSB |
| backpropagated error ê | 18 | ¼ LSB |
| gain code | 8 | gain = 1 + code/512 |
| delay code | 9 | delay-cell steps, ±192 |
| LMS accumulators | 32 | 16 bits below the output LSB |

The slicer decides between the levels (2k+1)·A, with A = 2^`cfg_a_shift` in
¼ LSB. It uses 8 levels per component for 64-QAM and 16 levels for 256-QAM
(`cfg_qam256`). Products are rounded half-up and saturated with the package
helpers `rshift_rnd` and `sat`.

## Where this departs from the method as published

* **Streaming, not parallel.** The target system runs at 192 GS/s and would
  need a parallel data path of about 128 lanes. Here there is one sample per
  clock. In the parallel form each lane holds a fixed interleave phase; here
  the coefficient set is picked by the tag's phase instead.
* **The receiver DSP is a fixed model.** `rx_dsp_mimo` is the 4×4 FIR Γ with
  decimation by two. The real DSP is dispersion compensation, an adaptive
  MIMO FFE, and timing and carrier recovery; it is not built. Γ is a
  configuration input and should be loaded with the current response of that
  DSP.
* **Offset sign and phase**, as described above.
* **Block handling.** Capture alignment, block edges, the skip policy when
  the engine is busy, and the gear schedule are this design's own choices.
* **Word widths and step sizes** are this design's own; the method is
  specified in real arithmetic.

The analog parts are not part of the RTL: the sub-ADCs, track-and-hold,
delay cells, PGAs, clock generation, LVDS output and configuration
registers. Their control codes are ports of the top.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against a
reference model written independently in the testbench, and ends with a
`TB_RESULT checks=… failures=…` line. All testbenches use plain `$urandom`
stimulus and a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ce_filter` | offset removal and periodic FIR against a direct sum; latency 2; bypass; index wrap |
| `tb_rx_dsp_mimo` | MIMO FIR against a direct sum; even-sample decimation; latency 2 |
| `tb_pam_slicer` | exhaustive nearest-level search, both constellations, several spacings |
| `tb_ebp_capture` | buffer contents, zero-stuffed odd errors, D_B spacing, skipped blocks (N = 64) |
| `tb_ebp_engine` | ê, windows and phases sample by sample; block length in cycles; gear (N = 64) |
| `tb_ce_lms` | accumulators bit-exact, frozen reference set, enable gaps |
| `tb_ms_cal_lms` | accumulators bit-exact, M_TAU = 4 delay cells, delay clamp |
| `tb_ebp_calib_top` | whole design, default parameters, closed loop (below) |
| `tb_ebp_hier_tiadc` | closed loop, mixed-signal, 128 sub-ADCs behind 16 first-rank switches |
| `tb_ebp_ce13` | closed loop, all-digital, 13-tap CE correcting timing errors too |

`tb_ebp_calib_top` runs the full-size design (M = 16, L_g = 7, N = 8192)
around a channel model. The model has:

* four random PAM streams, over-sampled by two with linear interpolation;
* a polarisation rotation (cos 0.8, sin 0.6) between components 0/2 and 1/3,
  undone by Γ, so errors must be backpropagated across components;
* a 16-way TI-ADC with per-interleave gain, offset and timing errors, 8-bit
  rounding and clipping. In mixed mode the ADC model also applies the
  design's gain, delay and offset codes.

The test has two phases:

1. **All-digital, 64-QAM.** Gain errors are ±10 % and offsets ±3 LSB; D_B = 2
   forces skipped blocks. The slicer MSE falls from about 121 to 1.7
   (¼ LSB)², which is near the quantisation floor. No symbol errors remain,
   the offset estimates match the offsets, and the reference set is
   untouched.
2. **Mixed-signal, 256-QAM, after a reset.** Gain errors are ±5 %, offsets
   ±1.5 LSB and sampling errors ±4 % of Ts. The MSE falls from about 35 to
   1.9 and no symbol errors remain. The gain, delay and offset codes of every
   calibrated interleave cancel the model's errors within 1 %, 2.5 delay
   steps and ¾ LSB.

The test fails if any of these mechanisms never happens: blocks captured,
blocks processed, blocks skipped, gear steps, engine busy, CE bypass and
both slicer modes. It takes about 15 s of simulation.

Two more closed-loop benches use the same channel model at other sizes:

* `tb_ebp_hier_tiadc` builds the top with `M = 128` and `M_TAU = 16`. This
  models a two-rank converter: each of 16 first-rank switches has its own
  timing error (±5 % of Ts), and each of the 128 sub-ADCs has its own gain
  error (±6 %) and offset (±3 LSB). With 64-QAM the MSE falls from about 83
  to 2.0 (¼ LSB)². The 128 gain codes and offsets and the 16 delay codes
  cancel the errors of the even interleaves.
* `tb_ebp_ce13` builds the top with `LG = 13`. In the all-digital mode it
  adds timing errors of ±4 % of Ts to the gain and offset errors. With no
  delay cells in that mode, the CE has to interpolate them out. The MSE falls
  from about 140 to 1.7. Because l_d = 7 is odd, this bench puts the Γ
  rotation on tap 1 so that decisions stay on symbol instants.

With the Γ used there, only even-phase interleaves are observable. Γ has a
single even tap, so ê is zero at odd samples, and the test checks only even
phases. A DSP response with odd taps, as a real FFE has, reaches all phases.

Two caveats apply to the test results:

* The CE taps themselves are not compared. With an over-sampled input the
  gain correction may spread over neighbouring taps, so only the result is
  checked.
* With 16-PAM at 4 LSB per level, starting errors above about half a
  decision distance can lock the decision-directed loop on a wrong point.
  The 256-QAM case therefore starts from smaller errors.

To run one testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_ebp_calib_top \
  -y rtl rtl/ebp_pkg.sv tb/tb_ebp_calib_top.sv -o sim
./obj_dir/sim
```

The package goes first on the command line, and `-y rtl` lets Verilator find
the modules. Replace the top-level name to run a unit testbench.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 16 | TI-ADC interleaves, coefficient and offset sets per component |
| `M_TAU` | M | independent delay cells (first-rank switches of a two-rank TI-ADC) |
| `LG` | 7 | CE taps (odd) |
| `LGM` | 7 | taps of the DSP model Γ |
| `N` | 8192 | block size |

Other configurations are a matter of parameters:

* a 13-tap CE: `LG = 13`;
* a 128-way two-rank TI-ADC with 16 first-rank switches: `M = 128`,
  `M_TAU = 16`;
* a 32-way test chip with 4 first-rank switches: `M = 32`, `M_TAU = 4`.

The engine's cycles per sample grow with max(LG+1, LGM), and the capture
memory grows with N.
