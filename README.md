# LSMR least-squares accelerator for ADMM neural-network training

Training a feed-forward network with the Alternating Direction Method of
Multipliers (ADMM) replaces back-propagation with a sequence of closed-form
sub-problems, one set per layer. Almost all of the run time goes into two of
them, and both are linear least-squares solves with many right-hand sides:

* **weight_update**: find `W_l` such that `W_l x_{l-1} ≈ z_l`. This is
  `A = x_{l-1}^T` (samples × inputs), with one right-hand side per neuron.
* **activation_update**: find `x_l` from `(γI + β W^T W) x_l = γ h(z_l) + β W^T z_{l+1}`.
  This is a small square system (hidden × hidden), with one right-hand side
  per training sample.

Each right-hand side is solved with LSMR. LSMR is an iterative Krylov method
that needs only products with `A` and `A^T`: no matrix inversion, and no
factorisation. The two solves of a layer do not depend on each other. This
RTL therefore builds a small system of four LSMR compute units:

* two units for weight_update and two for activation_update;
* each pair splits its right-hand sides (columns of `B`) between the two units;
* all arithmetic is 32-bit fixed point with 18 fraction bits;
* all vectors are kept in on-chip memory;
* the matrix is streamed from external memory.

The host keeps everything else: the ADMM loop, the output and Lagrange
multiplier updates, and the float-to-fixed conversion.

```
               job 0 (weight_update)            job 1 (activation_update)
                      |                                  |
                 col_dispatch                       col_dispatch
                 /          \                       /          \
          lsmr_cu 0     lsmr_cu 1            lsmr_cu 2     lsmr_cu 3
              |             |                    |             |
        mem port 0    mem port 1           mem port 2    mem port 3   -> external memory
```

## Number format: fixed<32,18>

Every value is a signed 32-bit two's-complement number with 18 fraction bits
(`fxp_pkg`). One unit is `0x40000`. The range is about ±8192, and the
resolution is 2^-18.

* **Multiply.** The full 64-bit product is formed. It is then rounded to
  nearest, with ties going up: add 2^17, then shift right arithmetically by
  18. Finally it is saturated to `[0x80000000, 0x7FFFFFFF]`.
* **Add and subtract.** These saturate.
* **Dot products.** Terms accumulate in a 64-bit saturating accumulator and
  are rounded only once, at the end. This keeps the error of a row of a
  matrix-vector product at half an LSB. It does not grow with the row length.
* **Divide.** The result is `(a << 18) / b`, truncated toward zero and
  saturated. Division by zero returns 0. As a result, a zero right-hand side
  produces exactly `x = 0`, not garbage.
* **Norm.** The sum of squares of Q18 values is a Q36 integer. Its exact
  integer square root is therefore the norm in Q18. No floating point is
  involved.

Using round-to-nearest inside the solver matters. With truncation, the small
LSMR coefficients drift, and the accuracy of the trained network suffers.

## The LSMR recurrence as built

For each column `b` of `B`, a compute unit runs `min(m, n)` iterations of
the following:

```
init : β = ||b||, u = b/β;  α = ||A^T u||, v = A^T u/α
       h = v, h̄ = 0, ᾱ = α, ζ̄ = αβ, ρ = ρ̄ = c̄ = 1, s̄ = 0, x = 0
iter : u = A v − α u ;  β = ||u|| ;  u = u/β
       v = A^T u − β v ;  α = ||v|| ;  v = v/α
       (c, s, ρ')     = sym(ᾱ, β) ;      ᾱ = c α
       (c̄', s̄', ρ̄')  = sym(c̄ ρ', s α)
       ζ = c̄' ζ̄ ;  ζ̄ = −s̄' ζ̄
       h̄ = h − (s̄ ρ'² / (ρ ρ̄)) h̄
       x = x + (ζ / (ρ' ρ̄')) h̄
       h = v − (s α / ρ') h
```

`sym(a, b)` is the Givens rotation `(c, s, r)` with `r = sqrt(a² + b²)`. It
is computed without squaring the larger operand:

* If `|b| > |a|`, then `τ = a/b`, `s = sign(b)/sqrt(1+τ²)`, `c = sτ`, and
  `r = b/s`.
* Otherwise the same formulas apply with the roles of `a` and `b` swapped.
* `sign(0)` is taken as +1.

The second rotation uses the **new** `ρ'` from the first. This is the
standard LSMR recurrence. A listing that feeds the old `ρ` into the second
rotation would disagree with the `h̄` update, which uses the new one; this
RTL follows the standard recurrence throughout.

There is no early-exit convergence test. The unit always runs `min(m, n)`
iterations.

## Compute unit (`lsmr_cu`)

One unit solves the columns `offset … offset+p−1` of one call. Per iteration
it makes three streaming passes over external memory. Around them, a short
scalar phase runs on shared arithmetic units.

1. **Transpose (once per call).** `A` is read row by row and written, transposed,
   into the unit's own internal buffer. After that, `A v` and `A^T u` both
   stream rows in address order.
2. **MVU pass.** This pass computes `u = A v − α u` and streams `A` row-major.
   `fused_mv` multiplies each element by `v[j]` from on-chip memory and
   accumulates. At the end of a row it subtracts `α·u[i]`, rounds, and also
   adds the rounded result into a running sum of squares. The next `u` and
   `||u||²` are therefore both ready when the pass ends.
3. **Normalise.** The unit takes the square root (32 cycles). It then divides
   every `u[i]` by `β` through the pipelined divider, one element per cycle.
4. **MVV pass and normalise.** The same steps run for `v = A^T u − β v`, over
   the internal buffer.
5. **Scalar phase.** This phase performs two `sym` rotations (`sym_unit`) and
   three scalar divisions that give the coefficients of the vector updates.
6. **H pass.** `h̄`, `x` and `h` are updated in one loop. `x` is read from the
   output buffer, updated and written back. `h` and `h̄` stay on chip.

The vectors `u`, `v`, `h` and `h̄` are held in four two-read-port
`local_ram`s. `u` has `MAX_M` entries and the others have `MAX_N`.

Every streaming loop issues one read per granted cycle and consumes one word
per returned datum. With memory that grants every cycle, an iteration
therefore costs about `2mn + m + 2n` cycles of streaming plus about 700
cycles of scalar latency: the divider is 52 deep, a root takes 32 cycles, and
`sym` takes about 190 cycles. For small systems the scalar part dominates.
For the IRIS activation solve (8×8), one column takes about 7500 cycles.

### Memory layout and port protocol

All addresses are word addresses of 32-bit words.

| buffer | content | layout |
|---|---|---|
| input (`base_input`) | `A` (m×n), then `B` (m×p) | `A` row-major; `B` column-major, `m` words per column |
| internal (`base_at`) | `A^T` (n×m), written by the unit | row-major; one private buffer per unit |
| output (`base_output`) | `X` (n×p) | column-major: `x[j]` of column `c` at `base_output + c·n + j` |

The output buffer must be zeroed before a call, because `x` is accumulated
in place.

The read port works as follows:

* The unit raises `rd_req` with `rd_addr`. The request is taken in a cycle
  where `rd_gnt` is high.
* Data comes back in request order on `rd_valid`/`rd_data`, after any
  latency.
* There is no back-pressure. The unit never has more reads outstanding than
  it can absorb.

The write port (`wr_req`, `wr_addr`, `wr_data`) is accepted every cycle.

A call starts with a one-cycle `start` carrying `cu_args_t`: `m`, `n`, `p`,
`offset` and the three bases. `done` pulses after the last `x` is written.
The limits are `1 ≤ m ≤ MAX_M` and `1 ≤ n ≤ MAX_N`.

## Arithmetic blocks

* **`fxp_div`**: a restoring divider with one quotient bit per stage (50
  stages), plus an input and an output register. It has a latency of 52
  cycles and accepts one division per cycle. A tag travels with each division
  so that the caller can match results to requests. The MVU/MVV normalisation
  uses the tag as the element index.
* **`fxp_sqrt`**: a digit-by-digit square root of a 64-bit radicand. It
  produces one result bit per cycle, so `done` comes 32 cycles after `start`.
  It is used for both vector norms and for `sqrt(1+τ²)` inside `sym`.
* **`sym_unit`**: the rotation. It runs three divisions (`τ`, `1/sqrt`, and
  `r`) and one square root in sequence, and has its own divider and root
  unit.
* **`fused_mv`**: the row multiply-accumulate with the subtracted `scale·w`
  term, a single rounding, and the running squared norm. A row result appears
  one cycle after the last term.

## Pairs and the column split (`col_dispatch`, `lsmr_accel`)

A job carries `m`, `n`, `p`, the input and output bases, and one internal
buffer base per unit. `col_dispatch` starts both units in the same cycle:

* the first unit gets `ceil(p/2)` columns at offset 0;
* the second gets the remaining `floor(p/2)` columns at offset `ceil(p/2)`;
* a unit with no columns is not started;
* `done` follows the slower unit.

`lsmr_accel` holds two dispatchers and four units. Job 0 goes to units 0 and
1, and job 1 to units 2 and 3. Each unit's memory port is a separate top-level
port (index `2·pair + unit`), so the memory system and its arbitration stay
outside.

Defaults: `NUM_CU = 4`, `MAX_M = 4096`, `MAX_N = 64`. Of these, only the
number of units comes from the original design. The two size limits are this
design's choice:

* `MAX_N = 64` covers hidden sizes up to 56 and the 28 input features of
  HIGGS.
* `MAX_M` bounds the number of samples in one weight_update call.

## Where this differs from the original design

* **Square root.** The original used a vendor floating-point square root in
  its final versions. Here the exact integer square root of the earlier
  versions is used throughout. The vendor core is not described, so it could
  not be reproduced.
* **Accumulation.** In its last optimisation step, the original replaced the
  saturating accumulation with a plain add. This RTL keeps saturation.
* **Column split.** The original split columns in host software, with two
  kernel launches per call. Here a small hardware dispatcher does it from one
  job command.
* **Division.** The original division routine shifts the quotient right a
  second time, by the fraction width. That is wrong for a quotient that
  already has 18 fraction bits, so the quotient is only saturated here.
* **Memory system.** Memory layouts, the memory port protocol, the vector
  memory sizes, division by zero, `sign(0)` and the rounding tie rule are
  this design's own choices.
* **Not built.** The host program (ADMM loop, data conversion, buffer upload
  and download) and the board's PCIe/DMA/DDR infrastructure are not built.
  External memory appears only as a behavioural model in the testbenches.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_fxp_pkg`, `tb_fxp_div`, `tb_fxp_sqrt`, `tb_sym_unit` and `tb_fused_mv`
  compare against integer reference arithmetic, on edge cases and on random
  operands. `tb_fxp_div` and `tb_fxp_sqrt` also check latency and throughput.
* `lsmr_ref_pkg` is a bit-exact software model of the whole solver. It uses
  the same rounding, saturation, division and square root as the RTL.
* `tb_lsmr_cu` runs single units against it. It covers a memory that grants
  every cycle, with the cycle count checked against the streaming schedule.
  It also covers a memory with random stalls and latency, and a non-zero
  column offset.
* `tb_lsmr_accel` is the end-to-end test, at the top's default parameters:
  * it runs a weight_update (12×4, 5 columns) and an activation_update (5×5,
    12 columns) at the same time;
  * every `x` must equal the reference model bit for bit, and lie within 0.05
    of the exact solution;
  * it counts, and requires, four busy units at once, an uneven column split,
    memory stalls, and a zero right-hand side that must give exactly 0.
* `tb_wl_iris` runs the same test at IRIS layer sizes: 150 samples, 4
  features, hidden size 8. It takes about 0.6 M cycles.
* `tb_wl_higgs` runs the same test at HIGGS hidden-size-28 sizes: 28
  features and 101 samples. The true subset size is not known. It takes about
  3.7 M cycles.

`gmem_model` is the external-memory model. It grants randomly with a given
stall percentage and returns data after a fixed latency.

To simulate a testbench with Verilator, list the packages first:

```
verilator --binary --timing --assert --top-module tb_lsmr_accel \
  rtl/fxp_pkg.sv rtl/lsmr_pkg.sv tb/lsmr_ref_pkg.sv \
  rtl/fxp_div.sv rtl/fxp_sqrt.sv rtl/sym_unit.sv rtl/fused_mv.sv \
  rtl/local_ram.sv rtl/lsmr_cu.sv rtl/col_dispatch.sv rtl/lsmr_accel.sv \
  tb/gmem_model.sv tb/tb_lsmr_accel.sv
./obj_dir/Vtb_lsmr_accel
```

For the workload runs, add `tb/tb_wl_iris.sv` or `tb/tb_wl_higgs.sv` and
make it the top module.

Synthesised with the default parameters, the four-unit system has about 11k
generic cells and 52k flip-flop bits, plus about 0.55 Mbit of vector memory.
Most of that memory is the four `u` buffers of `MAX_M` words each.
