# A dataflow engine for online kernel support vector regression

This RTL speeds up the matrix work of an online, primal, kernel support vector
regression (SVR). The SVR tracks the implied volatility surface of an options
market tick by tick. Each tick is a strike and a maturity, mapped to the
feature vector `x = (k, k^2, tau, k*tau)`, together with its implied
volatility `y`. The model is a dictionary of support vectors `s`, each with a
weight `S[s]`, plus an intercept `b`. A prediction is
`f(x) = sum_s S[s] K(s, x) + b`, where `K` is the Gaussian kernel
`exp(-gamma |x - s|^2)`.

For every tick the online loop does four things:

1. It predicts `f(x)` for the tick.
2. It discounts every weight by `1 - 1/(t + omega)`.
3. It decides how the dictionary changes:
   * The tick is a **new pattern** if the current support vectors cannot
     represent it. The test is the *local fitness*
     `J = k^T K^-1 k / k_xx < rho`. Here `k` holds the tick's kernel values
     against the support vectors, `K^-1` is the inverse of the support
     vectors' kernel matrix, and `k_xx = K(x, x)`. A new pattern is added to
     the dictionary.
   * Otherwise the tick is a **changed pattern** if its prediction error is
     larger than `epsilon`. The dictionary then drops the support vector with
     the smallest `S[s]^2 K(s,s)` (*budget maintenance*) and takes in the
     tick.
4. Once per reopening interval it predicts the whole surface.

`t` is the step counter. It restarts at 1 at the start of each reopening
interval.

`K^-1` must be kept up to date through every addition and every removal. The
dictionary can hold up to 20,000 support vectors. At that size the cost lies
in a few dense vector-matrix products. The engine computes four of them:

| step | formula | kernel |
|---|---|---|
| prediction | `p[i] = sum_j S[j] K[i,j]` | `predict_kernel` |
| local fitness | `I = K^-1 k`, then `c = I . k`; `J = c / k_xx` | `fitness_kernel` |
| addition | `z = 1/(k_xx - c)`, `Y = -z I`, `X = K^-1 - I Y^T`, then `K_{n+1}^-1 = [[X, Y], [Y^T, z]]` | `fitness_kernel`, then `rank1_update_kernel` with `s = 1` |
| removal | `K_n^-1 = X - Y Y^T / z`. `Y` is the removed column and `z` its diagonal entry. | `rank1_update_kernel` with `s = 1/z` |

All other work belongs to the host CPU:

* keeping the order book and solving Black-Scholes for the implied volatility;
* evaluating the kernel;
* keeping the dictionary and choosing which support vector to remove;
* arranging matrices into rows ("serialisation") and bordering or shrinking
  `K^-1`.

The host is not part of this RTL.

## The engine: `svr_dfe`

```
 host writes ──► vector memories (S, k_{S,x}, u, v)   one N_MAX x 64-bit array each
                     │           │          │
 input stream ──► [manager] ─► predict ─ fitness ─ rank1_update ─► [manager] ──► output stream
 (LANES x 64 b/beat)           kernel    kernel    kernel                     (LANES x 64 b/beat)
                                           │
                              fit_c, fit_new_pattern, fit_z, read-back of I and Y
```

A host command sets `op`, `n_len`, `rho`, `kxx` and `scale`, and pulses
`start`. The manager then sends the input stream to the kernel that `op`
selects, and puts that kernel's results on the output stream. The big
matrices (`K^-1`, rows of kernel values) always stream through the engine.
Only vectors stay on chip. The vectors are written before the stream starts,
through `wr_en / wr_sel / wr_addr / wr_data`. This split of matrices and
vectors follows the source design. Running only one kernel at a time is this
design's own choice.

| `op` | input stream | output stream | end |
|---|---|---|---|
| `OP_PREDICT` | one row `K[i,0..n-1]` per sample, any number of rows | one beat per row: `p[i]` in lane 0, other lanes 0, `out_last = 1` | runs until the next `start` |
| `OP_FITNESS` | `n` rows of `K^-1` | none | `done` pulses; `fit_c`, `fit_new_pattern`, `fit_z` and `fit_z_err` hold; `i_rd` and `y_rd` return `I[y_addr]` and `Y[y_addr]` |
| `OP_UPDATE` | `n` rows of `M` | `n` rows of `M - scale * u v^T`. `out_last` marks the last beat of a row. | `done` pulses when the last input beat is taken |

A row of `n` elements takes `ceil(n / LANES)` beats. The unused lanes of the
last beat are ignored on input and are zero on output. Both streams use
valid/ready handshakes. When the output is not taken, the input stalls.
`start` may only come while `busy` is low; an assertion checks this.

**Adding a support vector** takes these host steps:

1. Write `k` to `VEC_KSX` and run `OP_FITNESS`.
2. If `fit_new_pattern` is set, read `I` and `Y` back. Write them to `VEC_U`
   and `VEC_V`.
3. Run `OP_UPDATE` with `scale = 1.0`.
4. Border the result with `Y` and `fit_z`.

**Removing support vector `r`** takes these host steps:

1. Stream `K^-1` with row `r` and column `r` left out.
2. Set `u = v` = column `r` without its diagonal entry.
3. Set `scale = 1 / K^-1[r][r]`.

`tb/tb_svr_dfe.sv` carries out exactly these sequences, so it doubles as a
worked example of the host side.

## The lane engine, and how it folds

Prediction and the first step of the fitness product are the same operation:
a streamed row times a stored vector. `row_dot_kernel` does it with `LANES`
multipliers, one adder across the lanes, and an accumulator that collects the
`ceil(n/LANES)` beats of a row. The source design draws this with one
multiplier per support vector, for 3 support vectors. Setting
`LANES = N_MAX` gives that fully parallel form; `tb_predict_kernel` runs it at
3 / 3. The default folds up to 20,000 elements onto 16 multipliers. The source
does not give its multiplier count, so 16 is this design's choice. It keeps
the input at 16 x 64 bits per beat.

The second fitness step, `c = sum_i I[i] k[i]`, takes one `I[i]` for every
row. It therefore needs only one multiply-accumulate, fed as each `I[i]`
leaves the lane engine. Each `I[i]` is also stored in an on-chip buffer. The
host reads `I` and `Y = -z I` from it for the rank-1 update.

`rank1_update_kernel` computes `t = s * u[i]` once per row. For each beat it
then forms `M[i][j] - t * v[j]` in all lanes at once. Addition and removal
differ only in which vectors and scalar the host loads. The source design
shares one dataflow between them in the same way.

Timing at one beat per clock:

* prediction: `ceil(n/16)` cycles per sample;
* fitness: `n * ceil(n/16)` cycles, plus about 70 cycles for the reciprocal;
* update: `n * ceil(n/16)` cycles, with one cycle of latency.

At `n = 20000` a fitness or update pass is 25 M cycles.

## Numbers

Every value is signed fixed point, Q32.32 in 64 bits (`svr_pkg`). Products are
summed at their full 128-bit width. Each dot product is truncated once, by an
arithmetic shift (towards minus infinity). The source design gives no number
format. A 32-bit Q16.16 format was tried first and is not enough. Here is why:

* Each addition and removal recursively updates `K^-1`.
* When two support vectors lie close together, the kernel matrix becomes
  ill-conditioned. Entries of `K^-1` in the thousands are then common.
* With 16 fraction bits and closely spaced features (neighbouring strikes
  1/8 apart), the kept inverse was lost, with absolute errors of hundreds,
  within 150 ticks.

Q32.32 behaves as follows:

* **Spread features.** With strikes 1/4 apart and maturities 0.75 apart, as
  in `tb_svr_dfe`, the relative error of the kept inverse stays below 2e-7
  through about 120 removals.
* **Drift on closely spaced features.** On the closely spaced features above,
  Q32.32 also drifts. The relative error passes 1e-4 once entries of `K^-1`
  reach the hundreds, and grows to order 1 over 150 ticks. Removal
  ("downdating") is the weak point. The source design has no remedy, and none
  is built here. A host can rebuild `K^-1` from scratch now and then, using
  additions only.
* **Near-singular `z`.** `fx_recip` computes `z` as floor(2^64 / |d|). It
  saturates at about 2^31 and flags `d = 0`. The source argues that `d` cannot
  reach 0 for a new pattern when `rho < 1`. A changed pattern is inserted
  whatever its fitness, so `d` can get close to 0.

## What follows the source design and what does not

These parts follow the source design:

* which four steps run in hardware;
* which data streams and which stays on chip;
* the two-step fitness product;
* one shared update for addition and removal;
* the formulas;
* the default capacity of 20,000 support vectors, the size at which the source
  measured its FPGA build.

These parts are this design's own choices:

* the command and stream interface, and one kernel at a time;
* the lane count;
* the number format;
* the local-fitness comparison `c < rho * k_xx`, done on chip;
* the divider that forms `z`, and the on-chip `I` buffer with the `Y = -z I`
  read-back;
* `p` is returned without `b`, as in the source's pseudo code;
* synchronous active-low reset.

The source built its engine on a commercial FPGA dataflow platform. The
platform's PCIe link, off-chip memory, host library and the CPU program are
not reproduced. The engine's plain stream and write ports are where they would
attach.

Storage at the defaults is 5 x 20,000 x 64 bits (6.4 Mbit) of vector memory.
`K^-1` never sits on chip. The engine therefore handles the source's 200-point
surface grid (at most 200 support vectors; 104-120 in the main runs) and its
20,000-vector scaling study. At `n = 20000` an addition produces a 20,001-row
inverse, which the engine can no longer take in as a matrix. The four surfaces
(call/put, bid/ask) are separate models. They share the engine one after
another, since the host holds each model's inverse.

## Files

* `rtl/svr_pkg.sv`: number format, the `op_e` and `vec_sel_e` encodings, and
  the fixed-point helpers.
* `rtl/fmem_vector_rom.sv`: on-chip vector memory. The host writes it. It has
  a lane-chunk read port and a single-element read port.
* `rtl/row_dot_kernel.sv`: lane multipliers, lane adder and row accumulator.
* `rtl/predict_kernel.sv`: `S` memory plus the lane engine.
* `rtl/fitness_kernel.sv`: `k` memory, lane engine, `c` accumulator, `I`
  buffer, the `J < rho` test and `z` via `fx_recip`.
* `rtl/fx_recip.sv`: restoring divider; `1/d` in 68 cycles.
* `rtl/rank1_update_kernel.sv`: `M - s u v^T` with the `u` and `v` memories.
* `rtl/svr_dfe.sv`: top and manager.

Testbenches in `tb/` all check themselves, and each ends with a `TB_RESULT`
line:

* `tb_<module>`: one per module.
* `tb_svr_dfe`: the end-to-end online loop, with a small engine
  (`N_MAX = 12`, `LANES = 4`). It generates ticks on a 40 x 5 grid with the
  source's hyper-parameters: `rho = 0.3`, `lambda = 0.75`, `omega = 7`,
  `epsilon = 0.01`, `gamma = 0.25`. For 160 ticks it checks:
  * every engine output, bit for bit, against an integer reference;
  * the engine-kept inverse against a Gauss-Jordan inverse in real arithmetic;
  * that each of these occurred at least once: new pattern, changed pattern
    with removal, full dictionary, tick within epsilon, back-pressure, partly
    filled beat, reopening.
* `tb_svr_dfe_full`: the top at its default parameters. It runs prediction
  against a full 20,000-vector dictionary, then fitness and update with
  `n = 2000`. `+n=20000` runs them at full size, which takes tens of minutes.
* `svr_ref_pkg`: the reference arithmetic.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/svr_pkg.sv tb/svr_ref_pkg.sv tb/tb_svr_dfe.sv --top-module tb_svr_dfe
./obj_dir/Vtb_svr_dfe
```

To build a different engine, change `N_MAX` and `LANES` on `svr_dfe`. To use
a different number format, change `DATA_W` and `FRAC_W` in `svr_pkg`. The
reference package follows the package automatically.
