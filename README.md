# A parallel Hamiltonian-Monte-Carlo Ising annealer in SystemVerilog

An Ising annealer looks for a spin configuration `s ∈ {-1,+1}^n` of low energy

    E(s) = -Σ_{i<j} J_ij s_i s_j - Σ_i h_i s_i

which is how max-cut, spin-glass and satisfiability problems are usually handed to
annealing hardware. Classic simulated annealing flips one spin at a time. This design
instead gives every spin a continuous position `x_i` (the spin is `sgn x_i`) and a momentum
`v_i`, and lets the whole vector slide over the energy landscape under Hamiltonian dynamics:

    H(x, v) = β·E(sgn x) + ½ xᵀx + ½ vᵀv

    dx_i/dt = v_i
    dv_i/dt = β · d(sgn x_i)/dx_i · I_i  -  x_i,      I_i = Σ_j J_ij sgn(x_j) + h_i

The derivative of the sign function does not exist, so `sgn x` is smoothed to `tanh(γx)` and
its derivative `γ(1 - tanh²(γx))` is replaced by a quadratic polynomial. The update of
coordinate `i` needs only its own `x_i`, `v_i` and the local field `I_i`. That is what makes the
method parallel: every coordinate follows the same recipe, so the hardware streams all
coordinates through shared pipelines.

The equations are integrated with the explicit step

    x ← x + ε·v
    v ← v + ε·(β·f1(x)·I(sgn x) - x)

repeated `L` times per *run*. Each run starts from fresh random momenta at the position the
previous run ended on. The best spin configuration seen over all runs is the answer.

The RTL follows a published FPGA annealer of this kind, the Parallel HMC Ising Annealer
(PHIA). That prototype handled up to 200 spins on one mid-range FPGA at 100 MHz. Its block
structure, formulas and state list are reproduced here. Where that description stops, this
design makes its own choices. Those choices are marked below as **design choices**.

## Number formats

| quantity | width | format |
|---|---|---|
| `x`, `v`, `β`, `ε`, FUNC1 coefficients | 16 | signed, 10 fraction bits (Q5.10, range ±32) |
| `J_ij`, `h_i` | 16 | signed Q5.10 |
| local field `I_i`, momentum derivative | 24 | signed, 10 fraction bits |
| energies `E`, `H` | 40 | signed, 10 fraction bits |

Products are shifted right by 10 with floor rounding and saturated to the destination width.
The original states only that it uses fixed-point arithmetic, so that integer and fractional
couplings can both be handled. All the widths above are **design choices**. They live in
`rtl/phia_pkg.sv`.

## Blocks

```
             j_wr/h_wr                      cfg_*            start
                |                             |                |
   +--------+   |   +--------+        +---------------+   +---------+
   | j_rom  |<--+-->| h_rom  |        | momentum_rng  |   |phia_fsm |  5 states
   +--------+       +--------+        +---------------+   +---------+
       |32 J            | h_i               | 2 v/clk          | state, β
       v                v                   v                  v
   +--------+      +-----------+     +-----------------------------------+
   | func2  |----->|  f_mem[N] |---->|  phase sequencer + x/v/x0 arrays   |
   |MULTI±1 |      | (fields)  |     |                                   |
   |ADDER32 |      +-----------+     |  vdot_block: FUNC1, MULTI β·I,    |
   |ADDER2  |                        |     MULTI, Inverter, ADDER2       |
   +--------+                        |  integral (x) / integral (v)      |
                                     |  hamiltonian: SQUAREs, ADDER2,    |
                                     |     running sums, β·E, H          |
                                     +-----------------------------------+
```

The arithmetic is built from a few primitives. These are the names the original uses:

* **ADDER2** (`adder2`): a two-input adder with one output register.
* **ADDER32** (`adder32`): 32 inputs summed by a binary tree of 31 ADDER2s in 5 pipeline
  stages (16, 8, 4, 2 and 1 registers). It accepts a new set of 32 operands every clock.
* **SQUARE** (`square`) and **MULTI** (`multi`): registered fixed-point squarer and multiplier.
* **Inverter** (`inverter`): the `-x` term. It is a registered negation, sign-extended first.
* **INTEGRAL** (`integral`): one step `state + ε·deriv`, built as a MULTI and then a saturating
  add. It takes 2 clocks.

These primitives make up the datapath blocks:

* **FUNC1** (`func1`): the quadratic `a2·u² + a1·u + a0` with `u = |x|`. It uses one SQUARE, two
  MULTIs and two ADDER2s, as in the original, and takes 4 clocks. Evaluating it on `|x|` and
  clamping the result at 0 are **design choices**. The function it stands in for is even and
  non-negative. `γ` is folded into the run-time coefficients. With `a0 = 1, a1 = -0.25,
  a2 = -0.35`, the output is within 0.125 of `1 - tanh²(x)` for `|x| ≤ 1.2` (checked in
  `func1_tb`).
* **FUNC2** (`func2`): the local field. Each clock it takes one 32-column slice of a row of `J`
  and the 32 matching signs. It multiplies by ±1 (a conditional negation), sums the products in
  ADDER32 and adds `acc_in` in an ADDER2. It takes 7 clocks.
* **Gradient block** (`vdot_block`): `vdot_i = (β·I_i)·FUNC1(x_i) + (-x_i)`, one spin per clock,
  6 clocks. This is the original's data flow. FUNC2 and INTEGRAL sit beside it in the top,
  because FUNC2 runs in its own pass over `J`.
* **Hamiltonian block** (`hamiltonian`): `H` and `E(sgn x)` from one streamed pass over the spins.
* **J-ROM / H-ROM** (`j_rom`, `h_rom`): the coefficient memories. Each has one registered read
  port and a write port for loading a problem. The write port is a **design choice**. The
  original only says the coefficients sit in ROM.
* **Momentum generator** (`momentum_rng`): a 32-bit xorshift that gives two uniform momenta in
  about [-1, 1) per clock. The original says only that momenta are random. The generator and the
  uniform distribution are **design choices**. Textbook HMC draws Gaussian momenta.
* **Controller** (`phia_fsm`): the five-state machine described in the next section.
* **Top** (`phia_top`): the state arrays `x`, `v`, `x0` and `f`, plus the phase sequencer that
  runs the passes of each state.

## The computation of the local field

The local field is the hardest part of the design to follow, and it dominates the run time.
`I_i = Σ_j J_ij sgn(x_j) + h_i` is an n×n matrix-vector product with a ±1 vector. Doing it for
every `i` each clock would need n² coefficients per clock. The design reads one 32-coefficient
slice of one row per clock instead.

`J` is stored slice-major. With `C = ceil(N/32)`, word `c·N + i` of the J-ROM holds
`J[i][32c .. 32c+31]`, with coefficient `k` in bits `[16k +: 16]`. Columns past `N` in the last
slice must be written as zero. A GRAD pass walks `c = 0..C-1` on the outside and rows
`i = 0..N-1` on the inside, followed by two empty clocks per slice. For each read:

* The 32 sign bits of slice `c` come straight from the sign bits of `x_mem`.
* FUNC2's ADDER2 adds `h_i` on the first slice. On later slices it adds the partial field that
  slice `c-1` left in `f_mem[i]`.
* The result is written back to `f_mem[i]` 8 clocks after the read was issued.

Row `i` of slice `c+1` is read `N+2` clocks after row `i` of slice `c`. So the chain is safe
whenever `N + 3 > 9`, that is for `N ≥ 8`. The top checks this bound at elaboration. The pass
takes `C·(N+2) + 10` clocks. That matches the `(n+2)·⌊n/32⌋` term in the original's timing
estimate, which suggests the same slice-by-slice organisation. The original writes `⌊n/32⌋`;
this design uses `⌈N/32⌉`, so a partial last slice is included. Chaining the partial sums
through FUNC2's ADDER2 is a **design choice**.

The energy needs `sᵀJs`. The original draws a second ADDER32 fed from the J-ROM for it. This
design reuses the row sums instead: `sᵀJs = Σ_i s_i·(f_i − h_i)`, where `f` already holds
`I(sgn x)` for the current `x`. This saves a second pass over `J`. It fits the original's
remark about sharing blocks between operations, but it is a departure from its figure.
`E = −½·sᵀJs − hᵀs` assumes that `J` is symmetric with a zero diagonal. Load `J` that way.

## Controller states and passes

The original lists five states. Their order and the work done in each follow it. The
transitions, counters and decisions are **design choices**.

| state | name | passes | clocks (C = ⌈N/32⌉) |
|---|---|---|---|
| 1 | `ST_INIT` | draw `v` (and `x` on the first run after `start`), 2 spins per clock; copy `x → x0` | `⌈N/2⌉ + 3` |
| 2 | `ST_VFIRST` | GRAD, then VUPD (`v ← v + ε·vdot(x)`) | `C(N+2) + N + 23` |
| 3 | `ST_ITER` | `L` times: XHAM (`H`, `E` at `(x,v)`, then `x ← x + ε·v`), GRAD, VUPD | `L·(C(N+2) + 2N + 30)` |
| 4 | `ST_ACCEPT` | HAM at the end point; accept or restore `x ← x0`; `β ← min(β + β_step, β_max)` | `N + 10` |
| 5 | `ST_BEST` | keep the lowest `E` and its spins; stop on target or after `cfg_max_runs` runs | `3` |

For `N = 200` and `L = 10`, one run takes 20,393 clocks, which is about 204 µs at 100 MHz.
The original's estimate for the same size is
`(2L+1)n + 15 + 25L + (L+1)(n+2)⌊n/32⌋ = 17,797` clocks. The difference comes mainly from
the seventh, partial slice (`⌈200/32⌉ = 7` against `⌊200/32⌋ = 6`). The per-state formulas in
the table are exact for this RTL, and `phia_top_tb` checks them clock for clock.

**Acceptance (state 4).** HMC in exact arithmetic accepts every trajectory. The original still
lists an acceptance rate in state 4 without giving a rule. Here a run counts as accepted when
`H_end − H_start ≤ cfg_accept_tol`. `H_start` is taken in the first XHAM of the run, that is,
after the first momentum update. A rejected run puts `x` back to where the run started.

* A large tolerance gives the always-accept behaviour.
* A tolerance of 0 gives a greedy filter.

`acc_count` counts the accepted runs.

**Temperature (state 4).** `β` starts at `cfg_beta0` and rises by `cfg_beta_step` after every
run, up to `cfg_beta_max`. This is a linear schedule.

**Stop test (state 5).** "Has the optimum been found" is read as "best energy ≤
`cfg_target_energy`", enabled by `cfg_use_target`. Without a target, annealing ends after
`cfg_max_runs` runs.

## Using `phia_top`

1. Hold `rst_n` low for a clock.
2. Write `C·N` words of `J` through `j_wr_en`, `j_wr_addr` and `j_wr_data`, using the layout
   above. Write `N` values of `h` through `h_wr_*`.
3. Set the `cfg_*` inputs and keep them stable while `busy` is high.
4. Pulse `start`. `done` rises when annealing ends.
5. Read the results:
   * `best_energy`: `E` of the best configuration, with 10 fraction bits.
   * `best_spins[i]`: 1 means `s_i = −1`.

   `state`, `run`, `acc_count`, `beta`, `step_done`, `run_accepted`, `best_updated` and
   `run_energy` are there for monitoring.

Problems smaller than `N` are loaded with zero couplings for the unused spins. Each unused
spin then adds nothing to `E`. A max-cut instance with edge weights `w_ij` maps to
`J_ij = −w_ij`, `h = 0`. The cut weight is then `(Σ_{i<j} w_ij − E)/2`.

The annealing settings are inputs, and the original gives no values for them. The
testbenches use the following:

* `a0 = 1`, `a1 = −0.25`, `a2 = −0.35` for FUNC1, which is `γ = 1`.
* On the benchmark instances of `phia_top_sk_tb`: `ε = 0.25`, `β` held at 0.5, `L = 10`, and
  every run accepted. This found the exact ground state of every instance. Colder settings,
  with `β` ramped to 1 or more, left the instances with random fields in local minima.
* In `phia_top_tb`: `ε = 0.125`, `β` from 0.25 to 1.0 in steps of 0.25, `L = 8`.

## Sizes

`N = 200` is the default. It is the largest prototype size the original reports. At that size
the J-ROM holds 1400 words of 512 bits, which is 717 kbit. All the benchmark families the
original uses fit at `n ≤ 200`: max-cut (dense and degree-3), SK with {0,1}, ±1 and U(0,1)
couplings, NAE-3-SAT, and a random-field spin model with U(−1,1) couplings and fields. The
conditions are `|J|, |h| < 32` and fractional coefficients quantised to 2⁻¹⁰. A dense problem
of 200 spins produces fields up to ±199, well inside the 24-bit field format. The software
experiments of the original go up to `n = 1024`. Those need `N = 1024`, which is 16.8 Mbit of
J-ROM and no other change to the RTL.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block against
reference arithmetic written independently in `tb/fx_model_pkg.sv`, and checks the latency of
every pipeline:

* `adder2_tb`, `adder32_tb` (5-clock pipeline, new operands every clock), `square_tb`,
  `multi_tb` (including saturation), `inverter_tb` and `integral_tb`.
* `func1_tb`: exact fixed-point reference, plus a check against `1 − tanh²`.
* `func2_tb`: slices with random gaps, 7-clock latency.
* `vdot_block_tb`: 6-clock latency.
* `hamiltonian_tb`: `E` from a direct double sum over `i < j`, `H`, and `done` 6 clocks after
  the last element.
* `j_rom_tb` and `h_rom_tb`.
* `momentum_rng_tb`: against a reference xorshift.
* `phia_fsm_tb`: the state path, the counters and the β schedule.
* `phia_top_tb`: the whole annealer at `N = 40`, which has two slices, one of them partial. It
  loads a planted problem (`J_ij = w_i w_j`, whose ground states are `±w`). It checks four
  things. Annealing reaches the ground energy and stops early. The reported energy equals the
  energy the testbench computes from `best_spins`. Every state takes exactly the clocks in the
  table. With an impossible tolerance, every run is rejected and `β` saturates. Each mechanism
  (all five states, accepted and rejected runs, the β cap, a best update and the early stop) is
  counted and must occur.
* `phia_top_full_tb`: the same test on `phia_top` with its default parameters (`N = 200`). It
  runs in seconds.
* `phia_top_sk_tb`: small instances (`n = 16`) of three benchmark families: SK with ±1
  couplings, a random-field model with couplings and fields uniform in (−1, 1), and max-cut on
  a 3-regular graph. Each result is compared with the exact ground state from an exhaustive
  search over all 2¹⁶ configurations. The test requires that the ground state is reached, and
  that the reported energy matches the reported spins.

Any testbench runs with plain Verilator, for example:

    verilator --binary --timing --assert -Wno-fatal --top-module phia_top_tb \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/phia_pkg.sv tb/fx_model_pkg.sv tb/phia_top_tb.sv
    ./obj_dir/Vphia_top_tb

Each testbench ends with a `TB_RESULT checks=… failures=…` line.

## How far to trust it

The block structure, the formulas and the state list are those of the original. The annealer
finds the ground state of the planted problems. The following were not in the original and
were chosen here:

* the fixed-point widths and scale
* the slice order and partial-sum chaining in the J-ROM
* the FUNC1 domain and clamp
* the random generator
* the acceptance rule, temperature schedule and stop test
* the order of the passes

The quality of the annealing on hard instances depends on `ε`, the β schedule and the FUNC1
coefficients. The original gives none of these, and no tuning was done here. The design has
not been placed and routed on an FPGA. Its clock rate and resource use are unknown.
