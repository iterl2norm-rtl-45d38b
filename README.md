# IterL2Norm: layer normalisation without division or square root

Layer normalisation maps a vector `x` of length `d` to

    z_i = gamma_i * (x_i - mean(x)) / sigma + beta_i,   sigma = sqrt(||x - mean||^2 / d)

A direct implementation needs a square root and a division per vector.
This macro avoids both. It finds the inverse norm `a = 1/||y||` of the
mean-shifted vector `y = x - mean(x)` with a few steps of a fixed-point
iteration that uses only multiplications and additions:

    a  <-  a + lambda * m * a * (1 - m * a^2),        m = ||y||^2

The fixed point of this step is `a = 1/sqrt(m)`. The step is one Euler step
of a dynamical system that converges there. The normalised output then
needs only multiplications:

    z = gamma * (sqrt(d) * a * y) + beta

`sqrt(d)` and `1/d` depend only on the configured length. They are supplied
with the configuration and never computed on chip.

The RTL is parameterised over the floating-point format. FP32 is the
default (`EXP_W=8, MAN_W=23`). FP16 (`5, 10`) and BFloat16 (`8, 7`) are
parameter settings. It handles `d` up to 1024, and several shorter vectors
can be queued in one buffer load.

## Making the iteration fast

Two choices make five steps enough.

**Initial guess from the exponent.** Write `m = s * 2^e` with `1 <= s < 2`,
where `e` is the unbiased exponent. The start value is

    a0 = 2^-((e + 1) >> 1)

This is one increment, one arithmetic shift and one negation of the
exponent field. No multiplier is needed. Because the shift truncates,
`a0 * sqrt(m)` lies between about 0.71 (odd `e`) and 1.41 (even `e`).
So `a0` always starts within a factor of sqrt(2) of the answer.

**Step size from the same exponent.** The step size is

    lambda = 0.4 * 2^-e

so `lambda * m = 0.4 * s` lies in [0.4, 0.8). The iteration converges
quickly without overshooting into divergence. Any `lambda > 0.345 * 2^-e`
is enough for the convergence argument. The constant 0.4 is the one the
original design uses.

**The update as a cubic.** With `omega = 1 + lambda*m` and
`delta = -lambda*m^2`, the step becomes

    a <- omega * a + delta * a^3

`omega` and `delta` are computed once per vector. Each step then costs
four multiplications and one addition.

**Residual error.** The worst start is `m` just below an even power of two,
where `a0` is 41% too large. There, five steps leave up to about 2% error
in `a`. Elsewhere they reach full precision. The average error over random
inputs is therefore small, but it varies with `d` (see *Precision*).

## Architecture

    x, gamma, beta ──► input controller ──► buffer controller ──► Input / gamma / beta buffers
    (3 valid/ready channels,                (beat → bank,row;     (8 banks × 16 rows × 8 elements each)
     8 elements per beat)                    write-back arbitration)          │ one 64-element row (chunk) per read
                                                                              ▼
           main controller ──phase──►  request mux  ◄── mean / shift / m / output controllers
                                             │
                                 ┌───────────┴───────────┐
                                 ▼                       ▼
                       Mul block (64 multipliers)   Add block (8 × 8-input L1 trees + 8-input L2 tree)
                                 │                       │
                                 └──► partial sum buffer (16 entries) ◄──┘
                                          iteration unit (initialise + update, own arithmetic)

### Buffers and chunks

Each of the three buffers (`input_buffer` for x, `param_buffer` for gamma
and beta) has 8 banks. Each bank has 16 rows of 8 elements. A *row* across
all 8 banks is a *chunk* of 64 elements, and the datapath always works on one
chunk per cycle. A vector of length `d` occupies `C = ceil(d/64)` rows.

A load beat carries 8 elements, which is one bank row. Beat `k` goes to
bank `k mod 8`, row `k div 8`, so 8 beats fill one chunk. Lanes beyond `d`
in the last chunk are masked in every sum.

Up to `N = floor(16 / C)` vectors fit at once. Each vector starts on a chunk
boundary, at row `v*C`. For `d` a multiple of 64 this equals
`floor(1024/d)`. After mean subtraction, `y` is written back over `x`
in place.

The Partial sum buffer holds up to 16 chunk sums, one per chunk of the
current vector.

### The shared datapath

There is exactly one Add block and one Mul block. Every phase uses them.

- **Mul block** (`mul_block`): 64 lane-wise multipliers with two pipeline
  registers, so the latency is 2 cycles.
- **Add block** (`add_block`), latency 2 cycles, has two modes:
  - *accumulate*: the eight L1 trees each reduce 8 lanes. The L2 tree
    reduces the eight L1 results to one sum. `nlanes` masks unused lanes.
  - *element-wise*: the first adder level adds `a[i] + b[i]` per lane. This
    is used to subtract the mean and to add beta.

Each phase controller produces a request record (`dp_req_t` in
`iterl2norm_pkg`) every cycle. The record holds buffer read and write
enables with row numbers, Mul and Add issue strobes, operand selects, a
broadcast scalar, the lane count and partial sum buffer controls. The top
forwards the request of the controller that owns the current phase.

Operands are chosen by enumerated selects:
- Mul A: buffer row, Mul output, or scalar.
- Mul B: same as A, scalar, or gamma row.
- Add A: buffer row, Mul output, or partial sums.
- Add B: scalar or beta row.

Because the phases never overlap, no arbitration is needed. Concurrent
assertions in the top check that every write-back, partial-sum store and
output coincides with valid Add output, and every chain from the Mul into
the Add with valid Mul output.

### Phase schedules

The main controller runs, per vector, MEAN → SHIFT → M → ITER → OUT. It
starts each phase controller with a pulse and waits for its `done`. In the
tables below, `t` counts cycles from the phase's start and `C` is the chunk
count. The pipelines are kept full: a new chunk enters every cycle, except
in OUT.

**MEAN** (`mean_controller`)

| t | action |
|---|---|
| 0 .. C−1 | read row `base+t` |
| 1 .. C | Add, accumulate chunk `t−1` |
| 3 .. C+2 | store the chunk sum in the partial sum buffer |
| C+3 | Add, accumulate the C partial sums |
| C+5 | Mul total × `1/d` |
| C+7 | mean ready |

**SHIFT** (`shift_controller`)

| t | action |
|---|---|
| 0 .. C−1 | read |
| 1 .. C | Add, element-wise with `−mean` broadcast |
| 3 .. C+2 | write `y` back over the same row |

**M** (`m_controller`)

| t | action |
|---|---|
| 0 .. C−1 | read |
| 1 .. C | Mul `y·y` |
| 3 .. C+2 | Add, accumulate the Mul output directly |
| 5 .. C+4 | store the chunk sum |
| C+5 | reduce the partial sums |
| C+7 | `m` ready |

**ITER** (`iteration_controller`): runs on its own arithmetic, not the
shared blocks.

| cycles | action |
|---|---|
| 4 | initialise: `a0`, `lambda`, `lambda·m`, `delta`, `omega` |
| 1 | load `a0` |
| 4 per step | one update step |
| 1 | multiply by `sqrt(d)` |

It takes `4·n_iter + 7` cycles in all.

**OUT** (`output_controller`): each chunk needs the Mul block twice, so a
new chunk starts every two cycles. For chunk `k`, with `t0 = 2k`:

| t | action |
|---|---|
| t0 | read `y` |
| t0+1 | Mul `y × scale` gives `ŷ` |
| t0+4 | Mul `ŷ × gamma` (`ŷ` is held one cycle at the Mul output) |
| t0+6 | Add `+ beta` |
| t0+8 | `z` of chunk `k` leaves on `z_valid` / `z_data` |

The Mul issues of successive chunks interleave on odd and even cycles.

### Iteration unit

- `iter_init` takes `m`. From its exponent field it derives `a0` and
  `2^-e`. It then computes, one registered stage each:
  - `lambda = 0.4 · 2^-e`
  - `lambda·m`
  - `delta = (lambda·m)·(−m)` and `omega = 1 + lambda·m`
- `iter_update` holds `a`. A multiplexer loads `a0`. Each step computes
  `omega·a`, `delta·a` and `a·a` in parallel, then `(delta·a)·(a·a)`, then
  the sum. That is three registered stages with four multipliers and one
  adder.
- `iteration_controller` sequences these and forms `scale = a·sqrt(d)`.

### Interface

| signal | meaning |
|---|---|
| `cfg_valid`, `cfg_d[10:0]`, `cfg_d_inv`, `cfg_d_sqrt`, `cfg_nvec[4:0]`, `cfg_n_iter[3:0]` | one-cycle configuration: length, `1/d` and `sqrt(d)` in the working format, vector count, iteration steps (1–15) |
| `x_*`, `g_*`, `b_*` (`valid`, `ready`, `data[8·W]`) | input channels. `x` takes `N·C·8` beats (each vector padded to whole chunks). `gamma` and `beta` take `C·8` beats each. Channels may be driven concurrently. |
| `z_valid`, `z_data[64·W]`, `z_vec`, `z_chunk`, `z_nlanes` | one 64-element output chunk per valid cycle, in vector and chunk order. Lanes at or beyond `z_nlanes` are don't-care. |
| `busy`, `done` | `done` stays high after the last chunk until the next configuration |
| `mean`, `m`, `a_inf` | the current vector's statistics, for observation |

Gamma and beta are shared by all vectors of a load. Loading the next set
of vectors requires a new configuration after `done`.

### Latency

The last `z` of the first vector appears `5C + 4·n_iter + 41` cycles after
the last `x` beat. Each further vector takes `5C + 4·n_iter + 40` cycles.
With five steps this is 66 cycles at `d = 64` and 141 at `d = 1024`. In
every case it grows by 5 cycles per chunk: one each in MEAN, SHIFT and M,
and two in OUT.

The original macro is reported at 116 cycles (`d = 64`) to 227 cycles
(`d = 1024`) for the same five steps, which is about 7.4 cycles per chunk
on top of a fixed 109. Both scale linearly in the chunk count. This implementation's per-phase pipelining is its own, so its
absolute figures are lower. The published internal schedule is not
available to compare cycle by cycle.

## Number formats

`fp_add` and `fp_mul` are combinational and generic in `EXP_W` and
`MAN_W`. Their conventions:

- rounding is round-to-nearest-even;
- subnormal inputs and results are flushed to zero;
- overflow gives infinity;
- NaN is not handled;
- an exact zero result is +0.

These conventions are this design's choice. The original work specifies only
that the adders and multipliers are format-specific with the same two-cycle
latency.

Storage for the default FP32 build:

| buffer | size |
|---|---|
| x, gamma, beta | 3 × 1024 × 32 bit = 96 kib |
| partial sums | 16 × 32 bit = 0.5 kib |
| total | 96.5 kib |

For the 16-bit formats the total is 48.25 kib.

## Precision

For inputs uniform in (−1, 1), gamma = 1, beta = 0 and five steps, the
average absolute error against exact layer normalisation is measured by
the testbenches:

| format | lengths | average error | reported for the original |
|---|---|---|---|
| FP32 | 64 … 1024, every multiple of 64 | 4.6e-4 | 2.23e-4 |
| FP16 | 64 … 1024 | 4.4e-4 | 5.26e-4 |
| BFloat16 | 128 … 896 | 5.8e-3 | 3.07e-3 |

In FP32 the average error is strongly length dependent, from 1e-7 up to
7e-3 at `d = 384`. The cause is the start-value effect described above:
for uniform inputs `m ≈ d/3`, so `d = 384` puts `m` right at 128, the worst
place. More steps remove it: the end-to-end test's ten-step run stays
within 3e-7 of exact layer normalisation.

## Departures from the original design

- **`delta` is computed as `(lambda·m)·(−m)`**, not `lambda·(−m²)`. It is
  the same value. But `m²` overflows FP16 once `m ≥ 256`, which random
  vectors reach from about `d = 768`. The reordering also saves a
  multiplier.
- **Start value.** The start-value exponent `(e+1)/2` is truncated by a
  shift. The original's stated bound `0.7 < a0·sqrt(m) < 1` would require a
  half-integer power of two, which its own "one add, one subtract, one
  shift" description cannot produce. This design follows the shift; the
  resulting bound is 0.71 … 1.41.
- **`y-hat` path.** In the output phase, `y-hat = scale·y` is fed directly
  from the Mul output back into the Mul block, held one cycle. It is not
  re-buffered.
- **Configuration port.** The original block diagram carries `d`, `1/d`,
  `sqrt(d)` and `N` on the same input channel as `x`. Here they arrive as
  a separate configuration word, together with the step count.
- **Own choices.** The following are this design's own: the channel
  protocol and width, the configuration interface, the supply of `1/d` and
  `sqrt(d)` as inputs, the per-phase schedules and hence the absolute
  latency, and the floating-point corner-case conventions.
- **Vector packing.** Vectors are packed on chunk boundaries. For `d` not a
  multiple of 64, fewer than `floor(1024/d)` vectors fit.

## Files

Package: `iterl2norm_pkg.sv` holds the request record, the operand
select enums, the phase enum and the chunk lane-count function.

| module | role |
|---|---|
| `fp_add`, `fp_mul` | floating-point adder and multiplier |
| `input_buffer`, `param_buffer`, `partial_sum_buffer` | storage |
| `add_block`, `mul_block` | shared datapath |
| `iter_init`, `iter_update`, `iteration_controller` | inverse-norm iteration |
| `input_controller`, `buffer_controller` | loading |
| `mean_controller`, `shift_controller`, `m_controller`, `output_controller` | phase schedules |
| `main_controller` | phase sequencing |
| `iterl2norm_top` | the macro |

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and ends with `$finish`. Each has a
watchdog.

Block-level testbenches (`tb_fp_units`, `tb_input_buffer`,
`tb_param_buffer`, `tb_partial_sum_buffer`, `tb_add_block`, `tb_mul_block`,
`tb_iteration`, `tb_input_controller`, `tb_buffer_controller`,
`tb_phase_controllers`, `tb_main_controller`) compare against independent
models. Those models are real-valued reference arithmetic with explicit
rounding (`fp_tb_pkg`), or expected schedules.

End-to-end testbenches:

- `tb_iterl2norm_top` runs the default FP32 macro on several shapes:
  `d` = 64, 96, 200, 384, 576, 768 and 1024, one to four vectors per load,
  and 3, 5 or 10 iteration steps. It checks:
  - `mean`, `m` and `a_inf` against a double-precision model of the
    iteration;
  - every output element;
  - the error against exact layer normalisation;
  - output order;
  - the exact cycle count.

  It also counts partial last chunks, more than eight partial sums,
  multi-vector loads, non-default step counts and buffer write-backs. It
  fails if any never happens.
- `tb_precision_sweep` sweeps FP32 over `d = 64 … 1024`.
- `tb_formats` builds the macro for FP16 and BFloat16.
- `tb_convergence` measures the error against the step count (1 to 10)
  at `d = 1024` in all three formats. FP16 and BFloat16 reach their
  rounding floor within five steps. FP32 goes from 4e-2 after one step to
  2e-7 after five and 5e-8 after ten.

These last three use `ln_harness.sv`, a reusable driver module.

Build and run with Verilator 5. The package must come first:

    RTL="rtl/iterl2norm_pkg.sv rtl/fp_add.sv rtl/fp_mul.sv rtl/input_buffer.sv rtl/param_buffer.sv \
         rtl/partial_sum_buffer.sv rtl/add_block.sv rtl/mul_block.sv rtl/iter_init.sv rtl/iter_update.sv \
         rtl/iteration_controller.sv rtl/input_controller.sv rtl/buffer_controller.sv rtl/mean_controller.sv \
         rtl/shift_controller.sv rtl/m_controller.sv rtl/output_controller.sv rtl/main_controller.sv \
         rtl/iterl2norm_top.sv"
    verilator --binary --timing --assert -Wno-fatal --top-module tb_iterl2norm_top \
        $RTL tb/fp_tb_pkg.sv tb/tb_iterl2norm_top.sv -Mdir obj_top
    ./obj_top/Vtb_iterl2norm_top

    verilator --binary --timing --assert -Wno-fatal --top-module tb_formats \
        $RTL tb/fp_tb_pkg.sv tb/ln_harness.sv tb/tb_formats.sv -Mdir obj_fmt
    ./obj_fmt/Vtb_formats

Block testbenches need only the package, `fp_tb_pkg.sv`, the modules they
instantiate and their own file. All of them finish in seconds.

To change the format, set `EXP_W`/`MAN_W` on `iterl2norm_top`. To change
capacity, set `NB`/`HB`/`WB`. The controllers derive lane and row counts
from these parameters. The packed request record fixes the row index at
4 bits and the lane count at 7 bits, so larger buffers require widening
`dp_req_t`.
