# Adaptive split-step equalizer with on-chip backpropagation

This is an equalizer for a dual-polarization coherent optical receiver. Its
structure mirrors the fiber link it undoes. A long fiber link can be modelled
by the split-step method: linear steps (polarization rotation, differential
group delay, dispersion) alternate with Kerr steps, in which each sample
picks up a phase that grows with its own power. The equalizer runs the same
recipe backwards, with three layers:

```
din ─► Kerr FP 0 ─► Linear FP 1 ─► Kerr FP 2 ─► Linear FP 3 ─► Kerr FP 4 ─► Linear FP 5 ─► MF FP ─► y
```

* A **Kerr step** multiplies the Jones vector `u = (ux, uy)` by
  `exp(j·γ̄·‖u‖²)`. It has no trainable parameters. The run-time input `γ̄`
  stands for `8/9·γ·L`: the fiber's nonlinearity coefficient times the
  step length.
* A **linear step** is a real-valued 2×2 MIMO FIR filter with 5 taps. It acts
  on the real parts and, separately with the same taps, on the imaginary
  parts of the two polarizations. That gives 20 taps per step and 60
  trainable taps in all.
* The **matched filter** (MF) is a fixed root-raised-cosine filter. It
  reduces the 2 samples/symbol stream to one symbol per clock.

The equalizer is more than a filter chain because it trains itself. Known
pilot symbols are compared with the output. The mean squared error over a
batch of B = 21 symbols is differentiated through every layer by the chain
rule, in hardware, in a second pipeline that runs the other way. Each linear
layer's taps then take one stochastic-gradient step per batch. So the
equalizer keeps tracking a channel that drifts, such as a turning
polarization, while it keeps equalizing.

The RTL is SystemVerilog-2017. The forward and backward paths, the gradient
layers, the delay lines and the top all simulate with Verilator. Each block
has a self-checking testbench.

## The backward pipeline

Each training layer gets the loss gradient with respect to its output. It
sends on the gradient with respect to its input. To do that it needs the
forward signal it saw at the same sample. Complex gradients are written
`g = ∂L/∂Re v + j·∂L/∂Im v`.

```
pilot ─► [delay] ─┐
y ───────────────► Loss BP ─► MF BP ─► Linear BP 0 ─► Kerr BP 1 ─► Linear BP 2 ─► Kerr BP 3
                                  │             │              │             │              │
                                  ▼             ▼              ▼             ▼              ▼
                             Gradient 0     (Kerr SR 1)    Gradient 2    (Kerr SR 3)    Gradient 4
                             taps of LFP5                  taps of LFP3                 taps of LFP1
```

| block | computes | notes |
|---|---|---|
| `loss_bp` | `e = (y − x)/B` | Division by B uses a sum of fixed right shifts, one per set bit of `round(2¹⁶/B)`. For B = 21 these are 2⁻⁵+2⁻⁶+2⁻¹¹+2⁻¹²+2⁻¹⁶. The factor 2 of the squared error's derivative is folded into the learning rate. |
| `mf_bp` | `d[n] = Σ_t f[2t−n]·e[t]` | Zero-stuffs the symbol-rate error back onto the sample grid and passes it through the time-reversed MF. Sample `2τ+i` needs errors up to `e[τ+16]`, so the block waits 16 symbols. |
| `linear_bp` | `d_q[n] = Σ_p Σ_k h[p][q][k]·g_p[n+k]` | The transposed filter. It looks ahead 2 frames. It shares the taps of the forward layer it belongs to. |
| `kerr_bp` | `w_p = g_p·e^{−jφ}`; `s = Σ_p (Im w_p·Re u_p − Re w_p·Im u_p)`; `d_p = w_p + 2γ̄·s·u_p` | The first term undoes the rotation. The second carries the dependence of φ on the power. φ is recomputed from the delayed forward input. `e^{−jφ}` uses 5th-order Taylor polynomials clamped to ±1, so no table is needed. |
| `gradient` | `∂L/∂h[p][q][k] = Σ_n (Re g_p[n]·Re u_q[n−k] + Im g_p[n]·Im u_q[n−k])` | Exact 40-bit accumulators over B frames. Then `h ← h − round(grad·2^−(4+lr_shift))`. |

The backward chain ends at Kerr BP 3. Its output is the gradient at the
output of Linear FP 1, the first trainable layer, so nothing below it is
needed. The Kerr SRs are the delay lines that bring each Kerr layer's forward
input to its backward block. The Gradient SRs bring each linear layer's
forward input to its gradient block.

## Timing: lining up the two directions

Getting the timing right is the hardest part of the design. One frame (two
samples, one symbol) enters per clock, and every register in the design
advances only when `en` is high. So all timing below is counted in *enabled*
clocks. Every block is pipelined. Some backward blocks must wait for future
values: the MF BP needs 16 later errors, and a linear BP needs 2 later
frames. As a result, the backward gradient of a sample reaches each layer
many clocks after that sample's forward value has moved on.

`ml_equalizer` derives every delay-line depth from the block latencies in
`eq_pkg`. Changing a latency, the number of taps or the MF length
recomputes all of them.

Latencies and look-aheads, in clocks:

| Kerr FP | Linear FP | MF FP | Loss BP | MF BP | Linear BP | Kerr BP |
|---|---|---|---|---|---|---|
| 2 | 1 | 1 | 1 | 1 + 16 look-ahead | 1 + 2 look-ahead | 3 |

For frame τ, the table below gives the clock (counted from its entry) at
which its forward value appears at each node, and the clock at which its
backward gradient reaches the same node. Each delay line holds the
difference.

| node | forward | backward | delay line | depth |
|---|---|---|---|---|
| Kerr FP 0 output (input of LFP1) | 2 | 40 | Gradient SR 4 | 38 |
| Linear FP 1 output (input of Kerr FP 2) | 3 | 37 | Kerr SR 3 | 34 |
| Kerr FP 2 output (input of LFP3) | 5 | 34 | Gradient SR 2 | 29 |
| Linear FP 3 output (input of Kerr FP 4) | 6 | 31 | Kerr SR 1 | 25 |
| Kerr FP 4 output (input of LFP5) | 8 | 28 | Gradient SR 0 | 20 |
| MF output y | 10 | | pilot delay | 21 |

**Pilot alignment.** The filters add group delay: each identity-initialised
5-tap filter delays by one symbol, and the 33-tap MF by eight. So `y` at
clock `t` estimates the symbol that entered `11 + 10 = 21` clocks earlier.
The pilot input is therefore delayed by `Y_LATENCY + GD_FRAMES = 21` clocks
inside the top. The user supplies the pilot in the same clock as the frame
whose even sample is that symbol's centre.

**Stale taps.** A tap update reflects samples that entered up to about 40
clocks before it. Meanwhile the forward path has already used the old taps
on newer samples. With B = 21, that is a delay of about two batches. This is
standard delayed SGD. It sets how fast the loop can track.

**Batch framing.** Each gradient block counts its own B frames from reset.
The three layers therefore update in the same clock, but over windows offset
by their backward latencies. The loss of a batch is not tied to fixed symbol
positions. Only the sum over B consecutive frames at each layer matters.

## Number formats

All five word lengths are those of the reference design. Where the binary
point sits is this design's own choice.

| quantity | bits | format | range |
|---|---|---|---|
| samples, symbols (forward) | 14 | signed Q2.11 | ±4 |
| backward gradients | 14 | signed Q-2.15 | ±0.25 |
| γ̄ | 16 | unsigned Q0.16 | 0 … 1 |
| Kerr angle φ | 12 | unsigned Q2.10, saturating | 0 … 4 rad |
| linear taps, gradient words | 14 | signed Q1.12 / Q-2.16 | ±2 / ±0.125 |
| MF taps | 12 | signed Q0.11 | ±1 |
| cos/sin table values | 14 | signed Q1.12 | ±2 |

Results are rounded to nearest and saturated at every word boundary.

**Choosing the signal scale.** The angle range was chosen for the reference
design's operating point. A 10 dBm launch power on 100 km spans with
γ = 1.2 rad/W/km gives a mean phase of about 1.07 rad per step, and peaks up
to about three times that. Because γ̄ is below 1, scale the input so that
`γ̄·mean‖u‖²` equals the wanted mean phase. For that case, `mean‖u‖²` should
be about 1.1 to 1.5.

The forward Kerr step reads an exact cos/sin table. The table has 4096
entries and is filled at elaboration by an integer rotation recurrence, in
steps of 2⁻¹⁰ rad. The backward Kerr step uses Taylor polynomials. Above
about 1.5 rad these are only approximate.

## Interface of `ml_equalizer`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock. Asynchronous active-low reset: taps return to identity and accumulators clear. |
| `en` | in | a frame is present. When low, the whole design holds. Use it for gaps in the stream. |
| `din` (`frame_t`) | in | samples 2k and 2k+1. Each is a `samp_t {xr, xi, yr, yi}`. |
| `pilot` (`samp_t`) | in | known symbol k, given with the frame whose even sample is its centre. |
| `y` (`samp_t`) | out | equalized symbol k − 11, valid 10 enabled clocks after its frame. |
| `e_mon` | out | `(y − pilot)/B`: the loss gradient, useful as an error monitor. |
| `train_en` | in | tap updates on or off. Accumulation always runs. |
| `lr_shift[3:0]` | in | learning rate `2^−lr_shift` in tap units per batch. |
| `gamma_bar[15:0]` | in | `8/9·γ·L`, at the input signal scale. |
| `cfg_we`, `cfg_layer`, `cfg_idx`, `cfg_data` | in | Write one tap. `cfg_layer` 0/1/2 selects Linear FP 1/3/5. Index `10p + 5q + k`. The value is Q1.12. A write wins over a training update in the same clock. An assertion flags out-of-range writes. |
| `taps_o[0..2]`, `grad_o[0..2]`, `upd_o[0..2]` | out | Current taps, last gradient words and update pulses of Linear FP 1/3/5. |

Typical use:

1. Reset.
2. Set `gamma_bar` for the launch power, and choose `lr_shift`.
3. Either start from identity taps, or load a precomputed channel inverse
   through the cfg port.
4. Stream frames with pilots, with `train_en` high.
5. To run inference only, drop `train_en`. The last taps are kept.

## Verification

Every testbench generates its own stimulus. It compares the outputs with a
floating-point or integer model written independently of the RTL, and prints
`TB_RESULT checks=N failures=M`. Each testbench was also run against a copy
of its block with one deliberate error, for example: the sine sign flipped
in the Kerr step, the taps transposed, the power term dropped from the Kerr
backward step, or the pilot delay one short. Every such copy failed between
about 200 and 3100 checks.

| testbench | what it checks |
|---|---|
| `tb_kerr_fp` | rotation against `exp(jφ)` over the whole angle range, within 3 LSB. Also the latency. |
| `tb_linear_fp`, `tb_linear_bp` | exact integer model of the filter and its transpose, with the look-ahead. |
| `tb_mf_fp`, `tb_mf_bp` | RRC tap values, filtering and decimation, the zero-stuffed transpose. |
| `tb_loss_bp` | `(y−x)/B` within 1 LSB. |
| `tb_kerr_bp` | the chain rule against the same Taylor polynomials (4 LSB), and against the exact exponential for φ < 0.25. |
| `tb_gradient` | exact batch sums, rounding, the update rule, random stalls, `train_en` off, cfg writes. |
| `tb_delay_sr` | depth and stall behaviour. |
| `tb_ml_equalizer` | whole design at default parameters (see below). |
| `tb_eq_workloads` | time-varying channels and batch sizes (see below). |

**End to end (`tb_ml_equalizer`, default parameters).** Run 1 uses a clean
link with training off. It checks that `y` is the transmitted symbol k − 11
exactly 10 clocks after its frame, and that `e_mon` equals `(y − pilot)/21`.
It also checks that a cfg write swapping the polarizations in Linear FP 5
swaps them at the output.

Run 2 uses 6000 symbols through three rotating spans with Kerr phase and
noise. It starts from identity taps and has random stall clocks. It trains
for 5000 symbols and then freezes the taps. The effective SNR (signal power
over mean squared error) rises from 5.6 dB in the first 100 symbols to
26.0 dB in the last 1500. Each mechanism is counted: stalls, updates of all
three layers, batches with training off, and configuration writes.

**Channels that change (`tb_eq_workloads`).** This testbench runs three
equalizers with B = 13, 17 and 21 on the same 40960-symbol streams at
32 GBd. Each of the three spans applies a polarization rotation, a
differential group delay of 2.17 ps (0.2 ps/√km over 100 km), and a Kerr
phase. A final rotation and noise follow. All four rotation angles turn
together. SNR is measured
over the last quarter of each run:

| channel | B = 13 | B = 17 | B = 21 |
|---|---|---|---|
| static, mean Kerr phase 0.13 rad | 30.8 dB | 30.8 dB | 30.1 dB |
| 1e5 rad/s | 30.3 dB | 30.0 dB | 29.7 dB |
| 3e5 rad/s | 28.7 dB | 28.1 dB | 29.1 dB |
| 9e5 rad/s | 26.0 dB | 25.9 dB | 25.3 dB |
| static, mean Kerr phase 1.06 rad (10 dBm equivalent), learning rate ÷8 | 23.8 dB | 24.3 dB | 21.7 dB |

Tracking costs less than 0.5 dB at 1e5 rad/s and 4 to 5 dB at
9e5 rad/s. The reference design reports the same behaviour. The
learning-rate step is 2^−3 for B = 13 and 17 and 2^−2 for B = 21. Smaller
batches update more often, so they need a smaller step. Because of this,
the comparison between batch sizes reflects the power-of-two step sizes
more than the batch size itself.

The test link is simpler than a real one. Its group delay is a first-order
fractional-delay approximation. It has no chromatic dispersion and no
receiver low-pass filter, and its
noise is set per sample rather than from a launch power. Absolute SNR values
are therefore not comparable to measurements.

## Departures from the reference design and limits

* **Throughput.** One symbol per clock. The reference design states no
  parallelism; this rate is inferred from its multiplier counts. At a
  50 MHz FPGA clock that is 50 MBd, far below a 32 GBd line. A real-time
  version would need many parallel copies of the forward path, with
  training on a subset.
* **No time multiplexing in the backward path.** The reference design
  shares arithmetic units in its backward layers, but does not say which
  ones. Here every backward block and every gradient block processes a full
  frame per clock. This costs more multipliers. The maths is the same.
* **Inner structure.** The following are this design's own constructions:
  the Kerr step's table, the Taylor order and clamping in the Kerr backward
  step, the MF length of 33 taps, the binary-point positions, the
  power-of-two learning rate, identity reset taps, the cfg port, and all
  pipeline depths. All of them follow from the stated function and word
  lengths.
* **Precision limits.** Backward gradients saturate at ±0.25 (Q-2.15).
  With large errors early in training and small B, the first updates are
  clipped. This slows but did not prevent convergence in the tests. The
  Kerr backward rotation loses accuracy beyond about 1.5 rad.
* **Not modelled.** The link simulator and the FPGA board are not part of
  the RTL. Resource use has not been measured on an FPGA.

## Simulating and changing it

With Verilator 5, from the repository root:

```sh
# end-to-end test at default parameters
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/eq_pkg.sv tb/tb_ml_equalizer.sv --top-module tb_ml_equalizer -Mdir obj_top
./obj_top/Vtb_ml_equalizer

# any block test, e.g. the Kerr backward step
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/eq_pkg.sv tb/tb_kerr_bp.sv --top-module tb_kerr_bp -Mdir obj_kbp
./obj_kbp/Vtb_kerr_bp
```

`eq_pkg.sv` must come first because every module imports it. `-y rtl` finds
the modules by file name. Each run takes well under a minute. The workload
testbench takes a few seconds.

What to change, and where:

* **B**: the parameter of `ml_equalizer`. The loss shift set and the
  counters follow it.
* **Word lengths and binary points**: `WL_*` and `FRAC_*` in `eq_pkg`.
* **Tap count**: `NTAPS` in `eq_pkg`. The look-aheads, group delay and delay
  lines follow it.
* **MF**: the `MF_COEF` parameter of `ml_equalizer`. Its length is set by
  `MF_TAPS`. The default is a truncated RRC with roll-off 0.1, and the
  formula is in `eq_pkg`.
* **Block latencies**: `LAT_*` in `eq_pkg`. If you change a block's
  pipeline, change its `LAT_*` constant too. All delay lines are derived
  from these constants.

Files:

* `rtl/eq_pkg.sv`: formats, types and latencies.
* One file per block: `kerr_fp`, `linear_fp`, `mf_fp`, `loss_bp`, `mf_bp`,
  `linear_bp`, `kerr_bp`, `gradient`, `delay_sr`.
* `rtl/ml_equalizer.sv`: the top.
* `tb/`: one testbench per block, plus `tb_ml_equalizer` and
  `tb_eq_workloads`.
