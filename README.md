# A compute-in-memory annealer that only evaluates what changes

This design searches for low-energy states of an Ising model. Many combinatorial problems
map onto one, Max-Cut being the usual example. Given a symmetric coupling matrix `J`, it looks
for spins `σ ∈ {−1,+1}^n` that minimise

    E = σᵀ J σ

It uses simulated annealing: flip a few spins, judge the change, keep or drop the trial, and
slowly cool. A conventional annealer pays for each trial twice:

- it recomputes the full energy of the trial state, a product with n² terms;
- it evaluates `exp(−ΔE/T)` to decide whether to accept an uphill move.

This design removes both costs.

1. **Only the change is computed.** If the flipped set `F` has a fixed size, the energy
   difference reduces to `(n−|F|)·|F|` products. That is linear in n.
2. **Temperature becomes a voltage.** The exponential is replaced by a simple fractional
   factor `f(T)`. That factor is applied as the back-gate voltage of double-gate ferroelectric
   FETs (DG FeFETs) that store `J`. One analog read of the crossbar then yields the product of
   spins, couplings and temperature factor, and the result is compared directly against a
   random number.

The RTL here is complete down to the crossbar's analog boundary. The FeFET array, the
back-gate DAC, the source-line multiplexer and the ADC are behavioural models that use `real`
currents and voltages. Everything digital is synthesizable SystemVerilog: the encoders,
shift-and-add units, sums, buffer, controller, random source, flip selector, temperature
schedule and acceptance logic.

## 1. From ΔE to a product of two sparse vectors

Let `σ_new` be the trial state, and let `σ_f` be a 0/1 mask of the flipped spins. Split
`σ_new` into two disjoint vectors:

    σ_c = σ_new ∘ σ_f        (only the flipped spins, others 0)
    σ_r = σ_new ∘ (1 − σ_f)  (only the unflipped spins, others 0)

The terms of `σᵀJσ` fall into three kinds:

- **Both spins unflipped.** The term does not change.
- **Both spins flipped.** Both signs change, so the product does not change either.
- **Exactly one spin flipped.** Only these terms change. `J` is symmetric, so they pair up,
  and the energy change is

      ΔE = E_new − E = 4 · σ_rᵀ J σ_c

The annealer never forms `ΔE` itself. It computes

    E_inc = σ_rᵀ J σ_c · f(T),   f(T) = 1/(−0.006·T + 5) − 0.2

`f` stands in for the Boltzmann factor, and the constant 4 is absorbed. A trial is accepted if
`E_inc ≤ 0` (the energy does not rise). Otherwise it is accepted if `E_inc ≤ r`, with `r`
drawn uniformly from [0, 1).

`σ_c` has only `|F|` non-zero entries. Only `|F|` columns of `J` take part, so a crossbar that
can multiply a ternary row vector, a stored matrix and a ternary column vector computes
`E_inc` in one pass.

## 2. The four-input cell and how a signed product is assembled

This is the least obvious part of the design. It lives in `cim_crossbar` and its sub-blocks.

**The cell.** A DG FeFET has four terminals:

- front gate (FG), driven per row;
- data line (DL), driven per column;
- back gate (BG), common to the whole array;
- source line (SL), one per column, where the current is read.

The cell stores one bit `G` as a low or high threshold voltage. Its source-line current is

    I_SL = x · G · y · z

- `x` is the binary FG level.
- `y` is the binary DL level.
- `z` is set by the back-gate voltage.

With the back gate swept from 0.7 V to 0 V, the "on" current of a cell storing '1' follows
the curve of `f(T)` closely enough to stand in for it. `dgfefet_array` models the cell as
`I_SL = 9 µA · f(1000·V_BG)` when FG, G and DL are all 1, and 0 otherwise. The column currents
of the cells simply add.

**Bit slicing.** Each `J_ij` is a K-bit two's-complement number (K = 8). It occupies K
adjacent cells of row `i`, one bit per cell. Column `j*K + b` holds bit `b` of column `j` of
`J`, so an n×n matrix needs an n × n·K array: 3000 × 24,000 cells at the default size.

**Groups.** The K columns of one `J` column form a group. Each group has its own chain:

1. a K-to-1 MUX (`sl_mux`);
2. one ADC (`adc`);
3. a shift-and-add unit (`shift_add`);
4. a Sum register (`group_sum`).

All of these are grouped in `readout_group`. The MUX presents the K bit columns to the ADC one
after another. The S&A weights code `b` by `2^b`, and it uses `−2^(K−1)` for the sign bit, so
the group's result is the signed `Σ_i x_i·J_ij·f(T)`. All n groups run in lock-step.
`output_buffer` adds the n group results into `E_inc`.

**Sign phases.** Gates and data lines only take 0/1 levels, but `σ_r` and `σ_c` are in
{−1, 0, +1}. The controller (`crossbar_ctrl`) therefore runs four phases. In each phase the
spin encoder drives only the entries that have the phase's signs:

| phase | FG driven for σ_r = | DL driven for σ_c = | sign of product | Sum |
|---|---|---|---|---|
| PP | +1 | +1 | + | add |
| PN | +1 | −1 | − | subtract |
| NP | −1 | +1 | − | subtract |
| NN | −1 | −1 | + | add |

A row with `σ_r = 0` (a flipped spin) and a column with `σ_c = 0` (an unflipped spin) are
never driven. A group's DL is driven in at most two of the four phases, the two that match
the sign of its flipped spin.

**Gating.** Only groups whose data lines are driven start their ADC. A computation therefore
makes exactly `2·K·|F|` conversions, whatever the array width. This is the point of the
scheme: ADC activity scales with the number of flipped spins, not with n.

**Schedule.** All times are in clock cycles after the `start` cycle:

- Each phase:
  - one cycle to drive and settle the lines;
  - then, K times: a cycle in which the MUX selects a bit and the ADC samples, followed by a
    cycle in which the S&A accumulates;
  - one cycle to add the S&A result into the Sum with the phase's sign.
- After the four phases: one cycle to load the output buffer.

`done` pulses `4·(2K+2)+2 = 74` cycles after `start`, with `einc` valid. The back-gate code is
latched at `start` and holds for all four phases.

**ADC scale.** The ADC quantises with an LSB of 1/16 of the full cell current
(`ADC_FRAC = 4`). It rounds to nearest and saturates. At n = 3000 its code is 17 bits wide, so
a column with every cell on does not clip.

`E_inc` is carried as a signed fixed-point value with 4 fraction bits, in units of one cell's
full current (9 µA). It is 40 bits wide at the default size. Quantisation is per bit column:
the result equals the ideal `σ_rᵀJσ_c·f(T)` within half an LSB times `Σ 2^b` per active
group and phase.

## 3. Temperature, back-gate voltage and f(T)

The temperature is an integer `T = 1000·V_BG`, running from 700 down to 0 in steps of 10 (one
10 mV step of the back gate).

- `temp_scheduler` holds T.
- `bg_encoder` turns T into a 7-bit code `round(T/10)`, clamped to 70.
- `bg_driver` converts the code to volts (0.01 V per code).
- The array reads `f(T)` off that voltage.

| T (= mV on the back gate) | 700 | 500 | 300 | 100 | 0 |
|---|---|---|---|---|---|
| f(T) | 1.05 | 0.30 | 0.113 | 0.027 | 0 |

The schedule holds each temperature for `iters_per_step` iterations, a run-time input. A run
therefore has `70 · iters_per_step` iterations, at T = 700, 690, …, 10. When the back gate
reaches 0 V the run ends. No iteration is spent at T = 0, where `f = 0` would make every
trial acceptable.

**Note on the direction of the rule.** The acceptance test compares `E_inc = (ΔE/4)·f(T)`
with `r`, and `f(T)` shrinks as T falls. Near the end of a run, an uphill move of a given size
is therefore *more* likely to pass `E_inc ≤ r`, not less. The design implements the rule
exactly as specified and does not correct this. Users who want the classical behaviour, with
fewer uphill moves as the run cools, should change the comparison in `annealing_logic`.

## 4. One iteration

`annealing_logic` sequences the iteration; its FSM is `A_INIT → (A_SELECT → A_WAIT →
A_COMPUTE → A_DECIDE → A_NEXT)* → A_DONE`.

1. **Start.** The state `σ` is filled with random bits, 32 spins per cycle. The random source
   `rng` is a 32-bit xorshift generator with shifts 13, 17 and 5, seeded from `seed` (a seed
   of 0 becomes 1).
2. **Select.** `flip_selector` draws |F| = `T_FLIP` = 2 distinct spin indices below
   `n_active` as `(rnd[15:0] · n_active) >> 16`, one draw per cycle. A repeated index is
   redrawn. This produces `σ_f`.
3. **Form the vectors.** `σ_new` is `σ` with those spins inverted. `σ_r` and `σ_c` are formed
   combinationally as `tspin_t {nz, neg}` vectors, and the crossbar is started.
4. **Decide.** When the crossbar is done:
   - if `E_inc ≤ 0` the trial is accepted;
   - otherwise it is compared with a 4-bit random fraction `r ∈ {0, 1/16, …, 15/16}` and
     accepted if `E_inc ≤ r`.
   
   An accepted trial is copied into `σ`. The temperature scheduler is then stepped.
5. **Repeat** until the scheduler reports that the back gate has reached 0 V. Then `done` is
   raised and `busy` falls.

An iteration takes about 80 cycles, 74 of which are the crossbar computation. The full
3000-spin run with 100,000 iterations is therefore about 8 million cycles.

## 5. Top-level interface (`cim_annealer`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `prog_we`, `prog_row`, `prog_col`, `prog_data[K-1:0]` | in | write one K-bit two's-complement entry `J[row][col]` per cycle; ignored while `busy` |
| `start`, `seed[31:0]` | in | start a run; seed of the random source |
| `iters_per_step[31:0]` | in | iterations per 10 mV temperature step (0 is treated as 1) |
| `n_active[$clog2(N):0]` | in | number of spins of the loaded problem, 2…N; spins at or above it are never flipped |
| `busy`, `done` | out | run in progress; one-cycle pulse at the end |
| `sigma[N-1:0]` | out | current state, 1 = +1 |
| `temp[9:0]` | out | current temperature |
| `obs_valid` | out | one cycle per decided iteration |
| `obs_accept`, `obs_uphill`, `obs_redraw`, `obs_temp_dec` | out | qualifiers of that iteration |
| `obs_einc`, `obs_flip_idx[T]` | out | E_inc and the flipped indices of that iteration |
| `iter_count`, `accept_count` | out | counters of the current run |

Using the annealer:

- Load `J` while idle. Write both `J_ij` and `J_ji` for a symmetric problem.
- The array starts all-zero after power-up. Problems smaller than N leave the unused rows and
  columns at zero and set `n_active`.
- For Max-Cut with edge weights `w_ij`, write `J_ij = w_ij`. Minimising `σᵀJσ` then maximises
  the cut.

## 6. Module map

| module | kind | role |
|---|---|---|
| `annealer_pkg` | package | sizes, `tspin_t`, `phase_e`, width functions, `f(T)`, ADC transfer |
| `cim_annealer` | RTL | top: annealing logic + crossbar |
| `annealing_logic` | RTL | iteration FSM, σ register, σ_r/σ_c, acceptance |
| `rng` | RTL | xorshift32 random source |
| `flip_selector` | RTL | draws |F| distinct indices below `n_active` |
| `temp_scheduler` | RTL | iterations per step, T from 700 to 0, end of run |
| `cim_crossbar` | RTL | crossbar with peripherals, one `E_inc` per start |
| `crossbar_ctrl` | RTL | phase and bit schedule, strobes |
| `spin_encoder` | RTL | σ_r/σ_c and phase to FG/DL levels |
| `bg_encoder` | RTL | T to back-gate code |
| `bg_driver` | behavioural | code to back-gate voltage |
| `dgfefet_array` | behavioural | cell storage, write port, SL currents |
| `readout_group` | RTL (wrapper of the chain) | MUX, ADC, S&A and Sum of one group, with gating |
| `sl_mux` | behavioural | analog K-to-1 multiplexer |
| `adc` | behavioural | current to code, one cycle |
| `shift_add` | RTL | bit-weighted accumulation, negative MSB |
| `group_sum` | RTL | signed phase accumulation |
| `output_buffer` | RTL | sum over groups, holds `E_inc` |

The FG and DL drivers are only level shifters. Their logic lives in `spin_encoder`, and the
array model takes its levels directly.

## 7. What the models leave out

The behavioural models are ideal:

- no device-to-device variation;
- no wire resistance or sneak currents;
- no ADC offset or nonlinearity;
- no settling time beyond one clock.

The cell current follows `f(T)` exactly, rather than the measured curve that only
approximates it. No power, energy or physical timing is modelled, and the clock rate is
free. The analog models use `real` signals. They simulate in Verilator and are accepted by
synthesis front ends, but they are meant to be replaced by the real macros.

## 8. Where this design had to choose

The published description fixes the algorithm, the cell equation, the crossbar organisation
(one MUX, ADC, S&A and Sum per K columns, sign-separated computation, output buffer), the
K-to-1 sharing with K = 8, the back-gate range of 0.7 V to 0 V in 0.01 V steps, `f(T)`, and
the 3000-spin size. The following are this design's own choices:

- |F| = 2 flipped spins per iteration. The source example flips two; any constant is allowed.
- The four-phase sign scheme, two's-complement bit slices with a negative MSB weight, and the
  cycle schedule of `crossbar_ctrl`.
- ADC resolution (LSB = 1/16 cell current), rounding and saturation.
- The linear map `T = 1000·V_BG`, and the 9 µA cell-current scale.
- The random source (xorshift32), the index draw with redraw of repeats, the 4-bit `r`, and
  the bit-by-bit random initialisation.
- The J write port, the `n_active` and `iters_per_step` inputs, and the observation outputs.
- Full `σ_r` and `σ_c` vectors drive the encoder each iteration. The description speaks of
  sending only the updated spins to the encoder. That is an optimisation of the
  encoder-to-driver traffic, and it does not change the result.
- `r` is a fraction in [0, 1) with 4 bits, where the source says `r ∈ [0,1]`.
- The acceptance rule is used as specified, including its direction with respect to T
  (section 3).

## 9. Sizes and workloads

Defaults: `N_SPINS = 3000`, `K_BITS = 8`, `T_FLIP = 2`, `VBG_MAX_CODE = 70`, `ADC_FRAC = 4`.
The Max-Cut benchmark sets the design targets all fit the default array with `n_active` set
to the instance size. Their ±1 weights fit in 8-bit entries.

| instance size | iterations per run | `iters_per_step` | iterations actually run |
|---|---|---|---|
| 800 | 700 | 10 | 700 |
| 1000 | 1000 | 14 or 15 | 980 or 1050 |
| 2000 | 10,000 | 143 | 10,010 |
| 3000 | 100,000 | 1429 | 100,030 |

The run length is always a multiple of 70.

## 10. Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/annealer_pkg.sv tb/tb_ref_pkg.sv tb/<tb>.sv --top-module <tb>
    ./obj_dir/V<tb>

`-Irtl` lets Verilator find the modules by name. `tb_ref_pkg` holds the reference models the
testbenches compare against: `f(T)`, the voltage, cell current and ADC code computed
independently, and a software xorshift.

| testbench | what it checks |
|---|---|
| `tb_rng` | sequence against a software xorshift, seed 0 handling |
| `tb_bg_encoder`, `tb_bg_driver` | every temperature and code |
| `tb_sl_mux`, `tb_adc` | selection and enable; ADC rounding, saturation, one-cycle latency |
| `tb_shift_add`, `tb_group_sum`, `tb_output_buffer` | signed accumulation against integer references |
| `tb_spin_encoder` | FG/DL levels for every phase and random ternary vectors |
| `tb_crossbar_ctrl` | strobe sequence and the 74-cycle latency |
| `tb_dgfefet_array` | writes and column currents for random patterns and voltages |
| `tb_flip_selector` | distinct indices below `n_active`, redraw |
| `tb_temp_scheduler` | step lengths, T sequence, end of run |
| `tb_cim_crossbar` | `E_inc` exact against a bit-level reference and within rounding of the ideal value; latency; exactly `2·K·|F|` ADC conversions |
| `tb_annealing_logic` | the iteration FSM with the crossbar replaced by a stand-in that returns random `E_inc` values after random delays: initial state, σ_r/σ_c split, acceptance, σ update, temperature sequence, run length |
| `tb_cim_annealer` | 16 spins, 210 iterations end to end: every `E_inc` against a reference, every accept decision, and that downhill, uphill and rejected trials, redraws, all four phases and negative couplings all occur |
| `tb_cim_annealer_full` | the default 3000-spin build, no parameter changes: a 60×50 toroidal ±1 instance for 70 iterations, the same checks |
| `tb_maxcut_workload` | the default 3000-spin build on an 800-node random Max-Cut instance (19,176 edges) with `n_active = 800` and 700 iterations; checks every iteration, that no spin outside the problem flips, and prints the cut before and after |

The two full-size testbenches each take about two minutes, mostly to compile; the array
model alone holds 72 million cells. Every iteration is checked against a software reference, so the reference is tied to
the rule as written, including its direction.
