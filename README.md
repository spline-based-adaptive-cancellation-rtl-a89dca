# Wiener spline canceller for even-order intermodulation in FDD transceivers

In a frequency-division-duplex transceiver the transmitter's own signal leaks
through the duplexer into the receiver. The receiver's nonlinearity (mainly
the LNA and the mixer) squares that leakage. The result is a baseband
interference of the form γ₁|h∗x|² + γ₂|h∗x|⁴ + …, which lands on top of the
wanted signal. Here x is the transmit baseband, h the unknown leakage path,
and γ_k are unknown complex coefficients that can differ between I and Q.

The canceller in this repository builds a replica of that interference from
the known transmit samples and subtracts it from the received baseband. It
uses a *Wiener spline adaptive filter* (WSAF), which has three parts in a row:

1. An adaptive complex FIR filter `w` (16 taps) estimates the leakage path:
   `s[n] = wᵀ v[n]`.
2. A fixed nonlinearity turns that into the envelope power `r[n] = |s[n]|²`.
3. An adaptive spline `φ(r)`, defined by 20 control points `q`, turns the
   power into the interference. It models any smooth even-order polynomial
   without knowing its degree.

All of `w` and `q` are learned together by a normalised stochastic gradient
step, once per sample. With complex control points, the spline has separate
real and imaginary parts. The I and Q interference can then come from
independent nonlinearities; this is the *CIO* form (complex input, complex
output). A second form, *CI*, uses real control points. It models the Q-path
interference as a scaled copy of the I-path one, with the scale learned by a
single-tap estimator.

```
 x_i,x_q ─► tap line ─► DCT·P^-½ ─► w ─► |·|² ─► segment ─► spline (q_I, q_Q) ─► delay K_G ─► ŷ
                                   ▲                           ▲                             │
                                   └──── normalised SGD ◄──────┴──────── e = y − ŷ ◄─────────┘
 y_i,y_q ─────────────────────────────────────────────────────────────────────────► e = canc_i/q
```

## One sample through the datapath

`cio_wsaf_top` takes one sample per `in_valid` strobe. It evaluates the
whole algorithm for that sample, including the parameter update, within that
clock cycle:

| step | block | what happens |
|---|---|---|
| tap line | `cio_wsaf_top` | `x[n] … x[n-15]`, complex, Q15.24 |
| transform | `sct_transform` | `v = P^-½ · D · x`. D is the orthonormal DCT-II and `P^-½` is one gain per DCT bin (port `pnorm`). It whitens a correlated transmit signal so that the gradient converges evenly. `TD_EN=0` bypasses it. |
| linear filter | `lin_filter` | `s = Σ w_k v_k` (no conjugate) |
| fixed nonlinearity | `fixed_nonlin` | `r = re(s)² + im(s)²` |
| segment map | `segment_map` | `u = (r − r0)/Δr`, `ι = ⌊u⌋`, `ν = u − ι`, with knots at `r0 = −0.1` and spacing `Δr = 0.05` |
| control points | `ctrl_points` | reads `q[ι−2 … ι]` (complex) |
| spline | `spline_eval` ×2 | `φ = νᵀ B q` for the real and imaginary parts, plus the derivative `d = ν′ᵀ B q` and the basis weights `c = Bᵀν` |
| output filter | `output_delay` | `ŷ[n] = φ[n − K_G]` |
| error | `cio_wsaf_top` | `e = y − ŷ`; this is the cancelled receive signal |
| update | `norm_sgd`, `norm_limiter` | new `q` window and new `w` |

The outputs `canc_*` (the cleaned receive signal) and `yhat_*` (the replica)
are registered. They appear one clock after `in_valid`, together with
`out_valid`.

## The spline: segments, basis and clamping

The spline input `r` is cut into uniform segments of width Δr. With 20
control points and a quadratic B-spline (Q_sp = 3), segment ι uses the three
points `q[ι−2], q[ι−1], q[ι]`. Inside the segment, the value is a quadratic
in ν:

```
        ⎡ ν² ⎤ᵀ ⎡ ½ −1  ½ ⎤ ⎡q[ι−2]⎤
  φ  =  ⎢ ν  ⎥  ⎢−1  1  0 ⎥ ⎢q[ι−1]⎥        c = Bᵀ[ν² ν 1]ᵀ,   Σ c_j = 1
        ⎣ 1  ⎦  ⎣ ½  ½  0 ⎦ ⎣q[ι]  ⎦
```

`spline_eval` first forms the three basis weights `c`, then takes the dot
product with the window. The weights are needed anyway, because they are
exactly the gradient of φ with respect to the window. The matrix is built at
elaboration from real constants: B-splines of order 1 to 4 and the
Catmull-Rom spline (`SPLINE = SPL_CATMULL_ROM`, `Q_SP = 4`) are available.
The weights sum to one (partition of unity), so writing the same value into
every control point gives a constant spline.

The knot `r0 = −0.1` lies below zero so that the first valid segment
(ι = Q_sp−1 = 2) starts at r = 0. The largest power that is covered is
`r0 + N_sp·Δr = 0.9`. An `r` outside that range is clamped to the
first or last segment (ν = 0 or ν → 1), and `ev_clip` reports it. The weight
norm limiter below is there to keep `r` inside the range.

## The normalised gradient step

The update moves `q` and `w` against the gradient of |e|². Its step size is
normalised so that one step cannot overshoot:

```
  μ[n] = μ / ( 2·h_g²/Δr² · r·‖v‖²·|d|²  +  τ·‖c‖²  +  ξ )

  q_window += τ·μ[n]·e·c                        (complex, per control point)
  w_k      += μ[n]·(2/Δr)·(e_I·d_I + e_Q·d_Q)·s·v_k*
```

- `d = d_I + j·d_Q` is the derivative of the spline at the current ν.
- `s·v*` is the Wirtinger derivative of `r = |s|²`.
- `τ` balances how fast the spline adapts against how fast the filter adapts.
- `ξ` bounds the step when the gradients vanish.

`norm_sgd` computes the denominator with one exact division. A
non-positive denominator gives no update.

The update always uses the quantities of the sample whose output is being
corrected. With an output delay `K_G > 0`, the top therefore carries the
set `{s, r, v, c, d, ι}` through a `K_G`-deep pipeline. The update then works
on sample `n − K_G`, while the error belongs to sample `n`. This is the
pipelined variant; it costs a little convergence speed.

## Weight norm limiter

The product of `w` and the spline is ambiguous. Scaling `w` by `a` and
reshaping the spline over `a²r` gives the same output. If nothing holds
`‖w‖` down, `r` drifts out of the spline's domain. `norm_limiter` computes
`‖w[n−1]‖₁ = Σ|w_k|` (exact square roots; `NORM_P = 2` gives `Σ|w_k|²`).
When that reaches `rho_w` (3 in the evaluated setting), the freshly updated
weights are halved with a shift. The spline then re-learns the shrunk input
within a few hundred samples. The decision is made from `w[n−1]` in parallel
with the update, so it adds no cycle.

## Real-output form with Q-path scaler (`ci_mode`)

With `ci_mode = 1` the same datapath runs the CI form:

- Only the real parts of the control points are used and updated.
- The spline output `ŷ_saf` drives only the I path.
- The gradient uses only `e_I`.
- The Q-path replica is `w_cpl · ŷ_saf`.

`cpl_scaler` estimates `w_cpl` with an exponentially weighted single-tap
least-squares fit, `w_cpl = r_yŷ / r_ŷŷ`, with forgetting factor `lambda_cpl`
(0.9998). The module also has a one-tap N-LMS mode (`MODE_NLMS`), which is
tested on its own.

With the Q parts at zero, the complex gradient reduces to the real one,
except for the step of the control points, which is twice as large in the
real derivation; the top doubles it in this mode. Switch `ci_mode` only
together with `init`.

## Control and ports

| port | meaning |
|---|---|
| `init` | one clock: loads `w_init`, clears the control points and the scaler |
| `adapt_en` | 0 freezes `w` and `q` while cancellation continues, e.g. around OFDM symbol boundaries, where the bandwidth jump causes large errors |
| `mu, tau, xi, rho_w, lambda_cpl` | run-time tuning, Q15.24. The published evaluation re-tunes μ, τ and ξ for each leakage power. |
| `pnorm[16]` | `P^-½`: the inverse RMS of each DCT bin of the transmit signal. It is computed off-line from the signal's autocovariance. |
| `q_wr_*` | direct write of one control point, e.g. to preload a known spline shape |
| `ev_update, ev_limit, ev_clip, w_norm, w_cpl` | status for the sample on `out_valid` |

Samples are Q1.15 (16 bit); the outputs saturate. Internally all values are
40-bit Q15.24. Products are truncated toward −∞ and saturated. The Q15.24
format has room for `r`, `1/Δr` and `τ` up to several thousand.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `Q_LIN` | 16 | taps of the linear filter |
| `N_SP` | 20 | control points |
| `Q_SP` | 3 | spline order (3 = quadratic) |
| `SPLINE` | `SPL_BSPLINE` | basis type |
| `R0`, `DELTA_R` | −0.1, 0.05 | first knot and knot spacing |
| `K_G` | 0 | output delay in samples (2 = pipelined variant) |
| `TD_EN` | 1 | DCT and power normalisation on/off |
| `NORM_P` | 1 | limiter norm |

## Where this RTL departs from the published algorithm

- The DCT is a direct 16×16 constant matrix product. The published
  complexity figures assume the sliding (recursive) cosine transform for
  delay-line inputs, which needs far fewer multipliers. The result is the
  same.
- The output filter can only be a pure delay (`h_g = 1`). A general FIR
  `h_out`, such as a channel-select filter in front of the canceller, is not
  built.
- The fixed nonlinearity is `|s|²` only; the `|s|` option is not built.
- The exact norm-constraint gradient `ε·g_c` is not built. Only the
  shift-based halving heuristic is, which is the one used in the published
  evaluation.
- Division and square root are exact combinational units. The published
  text leaves them open and suggests table-based approximations.
- The LS recursion of the Q-path scaler is written in the published text as
  `r[n] = r[n−1] + λ·y·ŷ`, while the text calls it exponentially weighted.
  This RTL uses `r[n] = λ·r[n−1] + y·ŷ`.
- The N-LMS form of the scaler uses the a-priori `w_cpl[n−1]` in its error.
- Out-of-range `r` is clamped; control points start at zero.
- The whole sample is computed in one clock cycle. This is a behavioural
  datapath: long multiplier and divider chains that a real implementation at
  30.72 MS/s or more would pipeline. The `K_G = 2` variant shows how the
  algorithm absorbs two such pipeline stages.

## Verification

Every block has a self-checking testbench in `tb/` that compares its outputs
with a real-valued model computed in the testbench. The end-to-end tests use
a three-tap complex leakage path and an IMD2 + IMD4 nonlinearity with
different complex coefficients on I and Q.

`tb_cio_wsaf_top` runs all defaults, and `tb_cio_wsaf_pipe` runs `K_G = 2`.
`tb_cio_wsaf_cr` runs the cubic Catmull-Rom spline with `Q_SP = 4` and
`R0 = −0.15`.
Each test goes through these phases:

1. **Adaptation.** The first 400 replica samples must match a floating-point
   model of the complete algorithm to within 10⁻³ rms. The residual then has
   to fall below −15 dB of the interference; it reaches about −17 dB after
   6000 samples, starting from weights near the leakage path.
2. **Freeze** with `adapt_en = 0`.
3. **Clipping burst.**
4. **Forced limiter halving** and recovery.
5. **Control-point writes**, which must saturate the replica.
6. **Re-initialisation.**
7. **CI mode** on a scaled-Q interference: the scaler must find the scale
   (−0.5), and the residual must fall below −12 dB; it reaches about −15 dB.

The test also counts each mechanism and fails if any of them never happened.

From random weights the algorithm needs a few 10⁴ samples, as expected for
this kind of gradient method. The tests therefore start near the solution to
stay short.

## Simulating

Everything is plain SystemVerilog with a shared package `wsaf_pkg`. For
example:

```
verilator --binary --timing -Irtl -Itb -y rtl --top-module tb_cio_wsaf_top \
    rtl/wsaf_pkg.sv tb/tb_cio_wsaf_top.sv -o sim && obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` at the end. The
top test builds in about two minutes and runs in about 15 seconds.
