# Linearized Bregman iterations for trend-break detection, in RTL

This design finds level shifts ("trend breaks") in a noisy sampled signal.
It solves a sparse problem. The signal `y` of length N is modelled as
`y = A·beta`, where `A` is the N×N lower-triangular matrix of ones. So
`beta_j` is the size of the step that starts at sample `j`. The solver
looks for a `beta` with few non-zero entries:

    minimise  lambda·|beta|_1 + ½·|beta|_2²   subject to  A·beta = y

The solver is the linearized Bregman iteration (LBI). Iteration `i` uses
one row `k = ((i-1) mod N) + 1` of `A`:

    e   = y_k − (beta_1 + … + beta_k)          error of row k
    d   = e / k                                 step (row k has k ones)
    v_j = v_j + d,  beta_j = shrink(v_j, lambda)   for j = 1..k

Here `shrink(v, lambda) = sign(v)·max(|v| − lambda, 0)`. The inner
products only need sums of prefixes of `beta`, so `A` is never stored.
The iteration count L is fixed; there is no stopping test. The result is
`beta`. Its non-zero entries mark the breaks. Two steps stay outside the
core:

- scaling `y` by its maximum before loading;
- a least-squares refit on the support that was found, after the run.

The hardware follows one idea. The three vectors `beta`, `v` and `y` are
spread over M dual-port block RAMs ("lanes"). So M consecutive entries,
called a *parallel row*, can be read or written in one clock cycle. Each
iteration then costs about `3·ceil(k/M)` cycles instead of `O(k)`.

## Files

| file | block |
|---|---|
| `rtl/lbi_pkg.sv` | word formats (`word_t`, `mu_t`) |
| `rtl/lbi_core.sv` | top level |
| `rtl/lbi_slice.sv` | one lane: BRAM, PAT input multiplexer, v adder, shrink, write-back register |
| `rtl/lbi_bram.sv` | dual-port block RAM, 1024 × 20 bit |
| `rtl/lbi_pat_mux.sv` | PAT input multiplexer (value or 0) |
| `rtl/lbi_pat.sv` | pipelined adder tree (PAT) |
| `rtl/lbi_pmt.sv` | pipelined multiplexer tree (PMT) that picks `y_k` |
| `rtl/lbi_err_sub.sv` | accumulating subtractor `e = y_k − Σbeta` |
| `rtl/lbi_mult.sv` | `d = e·mu_k` |
| `rtl/lbi_v_add.sv` | `v + d` |
| `rtl/lbi_shrink.sv` | soft threshold |
| `rtl/lbi_cordic_recip.sv` | pipelined CORDIC for `mu_k = 1/k` |
| `rtl/lbi_iter_ctrl.sv` | iteration control: k, unary code, row counters, read phase |
| `rtl/lbi_store_ctrl.sv` | writing unit: store phase |
| `rtl/lbi_main_ctrl.sv` | run control: start, CORDIC pre-fill, hand-over, L, done |

Every `tb/tb_<module>.sv` tests its module and prints
`TB_RESULT checks=… failures=…`. `tb/tb_lbi_core.sv` runs the whole core
end to end at small sizes. `tb/tb_lbi_core_full.sv` runs it at the
default size. Both use the bit-true software model in
`tb/tb_lbi_ref_pkg.sv` and the harness in `tb/tb_lbi_core_h.sv`.

## Memory layout

Entry `j` (1-based) of each vector is stored in lane `m = (j−1) mod M`,
row `t = (j−1) div M`. Each BRAM is split into three equal address
slices:

| vector | base address (default) |
|---|---|
| beta | `BETA_AP = 0` |
| v | `V_AP = DEPTH/3 = 341` |
| y | `Y_AP = 2·DEPTH/3 = 682` |

So N can be at most `M·floor(DEPTH/3)`, which is 349,184 at the
defaults. With M = 1024 a 10,000-point signal takes 10 rows.

## Number formats

- **Data words** (`y`, `v`, `beta`, `e`, `d`, `lambda`): 20-bit two's
  complement, with 16 fraction bits. This covers −8 … +8.
- **Adders**: wrap around, as plain 20-bit adders do. Scaling `y` to
  |y| ≤ 1 keeps the prefix sums in range.
- **`mu_k`**: unsigned, 20 bits, with 19 fraction bits.
- **Multiplier**: rounds to nearest (ties upward) and saturates.

The 20-bit width comes from the source. The integer/fraction split, the mu
format and the rounding rule are this design's choices.
`tb_lbi_ref_pkg` states each rule as a small function. Changing a rule
means changing the RTL and that function together.

## One iteration, cycle by cycle

One iteration takes

    C_T = 3·(ceil(k/M) + 2) + ceil(log2 M)

cycles. This is the cycle model this architecture was published with,
and the RTL matches it exactly. Write `R = ceil(k/M)` for the number of
parallel rows that hold `beta_1..beta_k`, and `D = ceil(log2 M)` for the
depth of the trees. The cycles are:

1. **NEW ITER (1 cycle).** `lbi_main_ctrl` pulses `new_iter`.
   `lbi_iter_ctrl` advances k, the lane `(k−1) mod M`, the last-row index
   `t_hat = (k−1) div M` and the unary code. The CORDIC pipeline moves by
   one, so its output now holds `1/k`.

2. **Read phase (R + D + 2 cycles, `lbi_iter_ctrl`).**
   - In cycles `r = 0..R−1`, port A of every lane reads beta row `r`.
     Port B reads the y row `t_hat`, which holds `y_k`.
   - One cycle later the rows are on the BRAM outputs. In the last row,
     the PAT input multiplexers replace the lanes beyond column k by 0.
   - The adder tree has a register after each of its D levels. It accepts
     one row per cycle.
   - The multiplexer tree also has D levels. So `y_k` leaves it in the
     same cycle as the first row sum.
   - `lbi_err_sub` loads `y_k − sum(row 0)`, then subtracts each later
     row sum. It is a 20-bit adder with the second operand inverted and
     carry-in 1.
   - One cycle after the last row sum, `e` is final. In the next cycle
     the multiplier registers `d`.

3. **Hand-over (1 cycle).** `lbi_main_ctrl` pulses `store_start`. From
   here `lbi_store_ctrl` drives the BRAM addresses.

4. **Store phase (2R + 2 cycles, `lbi_store_ctrl`).** Each row takes two
   cycles, and consecutive rows overlap:

   | cycle s | port B | lane datapath | port A |
   |---|---|---|---|
   | 2t | read v row t | – | (beta of row t−1) |
   | 2t+1 | read v row t again | `v+d`, shrink with λ = 0 → new v | – |
   | 2t+2 | read v row t+1 | `v+d`, shrink with λ → new beta | write new v, row t |
   | 2t+3 | … | … | write new beta, row t |

   - The shrink is the identity when λ = 0. So one shrink unit per lane,
     and one write port, serve both writes.
   - In the last row only the lanes marked by the unary code are
     written. This keeps `v_j` and `beta_j` unchanged for `j > k`.

A run adds a fixed overhead of F = 21 cycles:

- 1 cycle to clear the counters;
- 19 cycles to pre-fill the 20-stage CORDIC with k = 1..19;
- 1 done cycle.

The total is therefore

    C = 21 + Σ_{i=1..L} [ 3·(ceil(k_i/M) + 2) + ceil(log2 M) ],   k_i = ((i−1) mod N) + 1

`busy` is high for exactly C cycles.

## Iteration control: k, t_hat and the unary code

The hardest part to follow is how the control knows which lanes of the
last row take part. For the current k, `lbi_iter_ctrl` keeps:

- `k`, which counts 1..N and returns to 1 after N;
- `lane = (k−1) mod M`, the column of `y_k`, which drives the PMT;
- `t_hat = (k−1) div M`, the last row that contributes;
- `unary`, a thermometer code with `lane+1` ones. It is a shift register
  that takes in a '1' at each new iteration. When all M positions are
  full, it restarts at a single '1' and `t_hat` increments. When k wraps
  at N, everything restarts (k = 1, t_hat = 0, one '1').

During the read phase a row counter `t` runs from 0 to `t_hat`. Each PAT
input multiplexer gets select `1` when `t ≠ t_hat`, and `unary[m]` when
`t = t_hat`. An address is the slice's base pointer plus `t`. The store
phase reuses `unary` as a per-lane write enable for row `t_hat`.

## mu_k = 1/k

`lbi_cordic_recip` divides 1 by k with a linear-mode, non-restoring
CORDIC. Stage i looks at the sign of the residual. It then subtracts or
adds `k·2^−i`, and adds or subtracts `2^−i` to the quotient. The residual
is an exact integer. With 20 stages the result is within `2^−19` of 1/k.

The pipeline only moves when it is told to. The controller pushes 19
values of k before the first iteration and one more at each new
iteration. So the output is always `1/k` for the current iteration, and
the divider never adds latency to an iteration.

## Interface of `lbi_core`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset of the control state |
| `host_we`, `host_lane`, `host_addr`, `host_wdata` | in | write a word through port B while `busy` is low |
| `host_rdata` | out | word at (`host_lane`, `host_addr`) of the previous cycle |
| `n_len`, `l_iters`, `lambda` | in | N, L, λ; hold them stable during a run |
| `start` | in | one-cycle pulse while idle |
| `busy`, `done` | out | run in progress; last cycle of the run |
| `iter_cnt`, `k_cur` | out | progress |

A run goes like this:

1. Write `y_j` to (lane `(j−1) mod M`, address `Y_AP + (j−1) div M`).
2. Write the start values of `v` and `beta`, normally 0, to their slices
   in the same way.
3. Pulse `start` and wait for `done`.
4. Read `beta` back from its slice.

Parameters: `M` (lanes, default 1024), `DEPTH` (words per BRAM, default
1024) and `STAGES` (CORDIC stages, default 20). The address pointers and
widths are derived from these.

## Verification

Every module has a self-checking testbench. The end-to-end tests compare
the cycle count of each run with the cycle formula and with published
counts. They also compare every `beta` and `v` word with a bit-true
software run of the algorithm.

| testbench | M | N / L | cycles measured = expected |
|---|---|---|---|
| `tb_lbi_core` | 4 | 10/10, 10/100, 100/100, 100/1000, 1000/1000 | 155, 1361, 4721, 47021, 384521 |
| `tb_lbi_core` | 128 | 1000/1000 | 26269 |
| `tb_lbi_core` | 2048 | 15000/15000 | 442989 |
| `tb_lbi_core_full` | 1024 (default) | 5000/5000, 10000/10000, 15000/15000, 2100/2500 | 124301, 321781, 592461, formula |

`tb_lbi_core` and `tb_lbi_core_full` also fail if any of these mechanisms
never happens:

- k wrapping around at N;
- t_hat moving to a new row;
- masked PAT inputs;
- masked writes;
- CORDIC pre-fill;
- zero and non-zero shrink outputs.

With the cycle formula, the processing times of the larger FPGA runs can
be reproduced (N = 10,000, L = 6.5·10⁶). With 1024 lanes the formula
gives 209,144,021 cycles, which is 1.90 s at 109.9 MHz. With 512 lanes it
gives 297,804,021 cycles, which is 1.78 s at 166.97 MHz. These runs are
too long to simulate.

To simulate with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
        -y rtl -y tb -Irtl -Itb rtl/lbi_pkg.sv tb/tb_lbi_ref_pkg.sv \
        tb/tb_lbi_core.sv --top-module tb_lbi_core -o sim
    ./obj_dir/sim

`-Wno-fatal` is needed because Verilator stops on its width warnings by
default. These come from mixed-width integer arithmetic in the testbench
reference model. `-y` lets Verilator find the other modules by file name.
For another testbench, replace `tb_lbi_core` in the last line with its
name. `tb_lbi_core_full` takes about a minute to build and several minutes
to run.

## Where this design goes beyond the source description

The source gives the block structure, the memory layout, the port roles,
the store schedule and the cycle model. This design adds its own choices
where the source is silent:

- **Number formats and rounding**: the integer/fraction split, the mu
  format and the rounding rule; see above.
- **CORDIC**: the variant and the number of stages. 20 stages were chosen
  because they give the published overhead of 21 cycles.
- **Accumulation and y timing**: the accumulation of row sums in the
  error subtractor, and reading the `y_k` row first so that `y_k` is on
  time.
- **Write masking**: masking the writes of the last row with the unary
  code.
- **Hand-over cycles**: the handshake between read and store phase is
  one `new_iter` cycle and one hand-over cycle.
- **Clocking**: the unary register is clocked by the system clock with
  `new_iter` as enable, not by a gated clock.
- **Address split**: the split into three equal slices and the host
  load/read port.
- **Address ports**: the iteration control drives only the beta reads
  on port A and the y read on port B. The writing unit forms the v and
  beta addresses of the store phase. In the source's drawing, a single
  offset multiplexer of beta, v and y pointers feeds port A.
- **Prefix sum**: the sum runs over `beta_1..beta_k`, the ones in row k
  of `A`. One formula of the source writes the upper limit as k+1.
- **Iteration count**: a run performs exactly L iterations, which is
  what the published cycle counts imply.

The linear-trend term of the original algorithm, its stopping criterion,
the data scaling and the least-squares refit are not part of the core.
