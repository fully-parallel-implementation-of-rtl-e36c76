# A fully parallel digital memcomputing solver for 3-SAT

This design solves Boolean satisfiability problems in 3-CNF form by
integrating a dynamical system, not by searching. Each Boolean variable
becomes a continuous value `v_n` in [-1, 1]. Each clause gets two memory
variables: a short memory `x_s` in [0, 1] and a long memory `x_l` in
[1, 10^4 M]. The equations are built so that the system drifts towards states
whose signs satisfy every clause. Once the signs of all `v_n` satisfy the
formula, the run stops and the signs are the answer.

The hardware has no sequencing over clauses or variables. Every clause and
every variable has its own arithmetic, and a single strobe advances all
N + 2M state variables by one forward-Euler step at once. A step takes a
fixed number of clocks, whatever the problem size. The default is 12 clocks,
which is 96 ns at 125 MHz. The default size is N = 150 variables and M = 645
clauses (a clause-to-variable ratio of 4.3). That is the largest problem the
original FPGA board could hold.

The equations, constants, integer scaling, step time, status pin and UART
link follow the published memcomputing solver on a Virtex UltraScale+
VU9P. The number widths, clocking, stop logic, UART format and the
built-in test instance are this design's own choices. The section
*Where this design makes its own choices* lists them.

## The dynamics

`q_{n,m}` is +1 when variable n appears plain in clause m, and −1 when it
appears negated. With that, the clause function is

    C_m = 1/2 · min over the clause's three literals of (1 − q v)

`C_m` is 0 when some literal is fully true. It is 1 when all three literals
are fully false. Two terms per clause act on each of its variables:

* **Gradient term:** `G_{n,m} = 1/2 · q_{n,m} · min(1 − q_j v_j, 1 − q_k v_k)`,
  where j and k are the clause's other two variables. It pushes v_n towards
  satisfying the clause, and pushes harder when the other two literals are
  false.
* **Rigidity term:** `R_{n,m} = 1/2 · (q_{n,m} − v_n)`. It is non-zero only
  for the literal that sets `C_m` (the one closest to true). It holds that
  literal in place.

The full system is

    dv_n/dt  = Σ_m [ x_l x_s G_{n,m} + (1 + ζ x_l)(1 − x_s) R_{n,m} ]
    dx_s/dt  = β (x_s + ε)(C_m − γ)
    dx_l/dt  = α (C_m − δ)

with α = 4, β = 16, γ = 1/4, δ = 819/2^14 ≈ 0.05, ε = 2^-10 and ζ = 2^-10.
The time step is dt = 1/16.

The two memories work together. While a clause stays badly violated
(C > γ), its short memory rises towards 1. That moves the clause's weight
from holding its current literal to pulling its variables. While a clause
stays violated at all (C > δ), its long memory keeps growing. Clauses that
are hard to satisfy therefore gain weight over time. Once a clause is
satisfied, both memories fall back.

## Integer arithmetic

The hardware uses only integers. Every state variable is stored multiplied
by 2^14:

| quantity | real range | stored as | width |
|---|---|---|---|
| v_n | [-1, 1] | V_n in [-16384, 16384] | 16-bit signed |
| x_s | [0, 1] | X_s in [0, 16384] | 16-bit signed |
| x_l | [1, 10^4 M] | X_l in [16384, 10^4·M·16384] | 40-bit unsigned |
| one clause's term of dV_n/dt, and a variable's sum | — | — | 48-bit signed |

The constants are powers of two wherever the model allows. Most products
with a constant are therefore shifts. These are the update rules a clause
unit and a variable unit apply. Every `>>` is an arithmetic right shift, which
rounds towards minus infinity.

    a_s   = 16384 − q_s V_s                       (one per literal, 0 … 32768)
    C'    = min(a_0, a_1, a_2) >> 1
    G'_s  = q_s · (min of the other two a) >> 1
    R'_s  = (q_s·16384 − V_s) >> 1   if a_s = min(a_0, a_1, a_2), else 0
    wG    = (X_l · X_s) >> 14
    wR    = ((16384 + (X_l >> 10)) · (16384 − X_s)) >> 14
    term_s = (wG · G'_s) >> 14 + (wR · R'_s) >> 14

    X_s ← clip( X_s + ((16·(X_s + 16)·(C' − 4096)) >> 18), 0, 16384 )
    X_l ← clip( X_l + ((4·(C' − 819)) >> 4), 16384, 10^4·M·16384 )
    V_n ← clip( V_n + (Σ term >> 4), −16384, 16384 )

The `>> 18` is the `>> 14` of the scaled product combined with the `>> 4` of
dt = 1/16. A variable is read as TRUE when V_n ≥ 0.

Each clause needs nine multiplications: two weights, three G products,
three R products and one X_s product. A DSP-based FPGA build would map them to
roughly 9–10 DSP slices per clause. That is about 43 per variable at
M/N = 4.3, the DSP count reported for the original board.

## Architecture

```
              v_init[N]                       start
                 │                              │
   ┌─────────────▼───────────┐      ┌───────────▼──────────┐
   │ variable_unit × N       │◄─────┤ solver_controller    │── status_pin
   │  V_n register, Euler    │ load │  step every          │── done, steps
   └─────┬───────────▲───────┘ step │  STEP_CYCLES clocks  │
         │ V[N]      │ dv_sum[N]    └──────▲───────┬───────┘
   fixed routing     │                     │all_sat│tx_start
   (literal → V)     │ summation network   │       ▼
   ┌─────▼───────────┴───────┐             │  ┌──────────────┐
   │ clause_unit × M         │─── sat[M] ──┘  │ solution_uart│── uart_txd
   │  C, G, R, X_s, X_l      │                └──────────────┘
   └─────────────────────────┘
```

* **`clause_unit`** (one per clause) holds X_s and X_l. It computes, every
  clock, `C'`, the three terms for its variables and a `sat` flag. The
  three literal signs are a parameter (`NEG`). The unit itself never sees
  variable indices.
* **Routing and summation network** (in `memc_solver_top`). The instance is
  fixed when the design is elaborated. Literal s of clause m reads
  `V[idx]`, and its term is added into `dv_sum[idx]`. Because the indices
  are constants, this is plain wiring plus, for each variable, an adder
  tree over the clauses that contain it. Logic therefore grows linearly
  with M, as the LUT count of the original FPGA build did.
* **`variable_unit`** (one per variable) holds V_n, applies the Euler step
  and clips the result.
* **`solver_controller`** runs the schedule. It also owns the status pin,
  which is low while a run is in progress and is meant for an external
  timer or data-acquisition input.
* **`solution_uart`** sends the answer to a host.
* **`memc_pkg`** holds the formats, the constants and the instance
  generator.

### One integration step

All state lives in three register sets: V (N registers), X_s and X_l (M
each). Everything between them is combinational. That covers the clause
functions, the multiplications, the summation network and the clip logic.
The controller strobes `step` once every `STEP_CYCLES` clocks, so this
logic has the whole step period to settle. When the design is
implemented it must be constrained as a multicycle path of `STEP_CYCLES`
cycles. Pipelining the path instead would change when each unit sees the
others' values, and so would change the dynamics.

A run goes as follows:

1. `start` (from idle or done) produces a one-clock `load`. It sets
   V = `v_init`, X_s = 0.5 and X_l = 1, and the status pin goes low.
2. At the end of every period of `STEP_CYCLES` clocks, the controller looks
   at `all_sat`, the AND of every clause's `sat`.
   * If all clauses are satisfied, the run ends: `done` rises, the status
     pin goes high, `steps` holds the step count and `tx_start` pulses.
   * Otherwise `step` pulses. Every register takes its next value, and
     `steps` increments.
3. A run that needs k steps keeps the status pin low for exactly
   (k + 1) · `STEP_CYCLES` clocks. Wall time is therefore linear in the step
   count. At 12 clocks and 125 MHz, this is 96 ns per step plus one step
   period for the final check.

There is no step limit. A formula with no solution keeps the solver busy
until the next `start` or reset.

### Solution transfer

After a solved run, `solution_uart` sends ceil(N/8) bytes, byte 0 first.
Byte k holds variables 8k…8k+7, with variable 8k+j in data bit j. The
padding bits of the last byte are zero. Each byte is a standard 8N1 frame,
LSB first, with `CLKS_PER_BIT` clocks per bit. The default of 1085 gives
115200 baud from 125 MHz. The step count is not sent; it is available on
the `steps` port.

## The problem instance

A problem is wired into the hardware, as it is compiled into an FPGA
bitstream. By default, `memc_solver_top` builds its instance at elaboration
from `memc_pkg::planted_lit(SEED, N, m, s)`. This is a stateless generator of
random planted 3-SAT, and works as follows:

* It hashes (SEED, m, attempt) with a 32-bit integer mixer to draw three
  distinct variables per clause.
* A hidden assignment gives variable n the value
  `planted_value(SEED, n)`.
* The clause's sign pattern is drawn uniformly from the seven patterns the
  hidden assignment satisfies.

Every instance is therefore satisfiable. The published evaluation used
Barthel instances, another planted construction with hardness tuned near the
phase transition. Those instances are usually harder than the ones built here.

To solve another formula, replace the body of `build_instance()` in
`memc_solver_top.sv` with a function that returns your clauses. Each literal
is an `lit_t` with `idx` (0-based variable) and `neg` (1 = negated); entry
3m+s is literal s of clause m. Then set `N` and `M` to match. Keep
`10^4·M·2^14 < 2^40` (M up to about 6700) and N < 2^15.

## Parameters of `memc_solver_top`

| parameter | default | meaning |
|---|---|---|
| `N` | 150 | variables |
| `M` | 645 | clauses (4.3 N) |
| `SEED` | 1 | selects the built-in planted instance |
| `STEP_CYCLES` | 12 | clocks per integration step (96 ns at 125 MHz) |
| `CLKS_PER_BIT` | 1085 | UART bit time |
| `STEPW` | 32 | width of the step counter |

Ports: `clk`, `rst_n` (asynchronous, active low), `start`, `v_init[N]`
(initial V, scaled), `busy`, `done`, `status_pin`, `steps`, `assignment[N]`,
`uart_txd`, `uart_busy`. There are also `xs[M]` and `xl[M]`, which expose the
memories for observation.

## Where this design makes its own choices

These points are not fixed by the published description:

* **Rounding.** Every division by a power of two is an arithmetic shift,
  which rounds down. The two Euler-step shifts of X_s are merged.
* **Sums in Eq. (1).** Both the gradient and the rigidity term are summed
  over clauses.
* **Ties in the rigidity condition.** R is active for every literal that
  attains the minimum, ties included.
* **Sign of zero.** V = 0 reads as TRUE.
* **Initial state.** V comes from `v_init`. X_s starts at 0.5 and X_l at
  1. The testbenches draw V uniformly in [-1, 1].
* **Widths.** All the widths in the table above are this design's choice,
  and products are formed in 64-bit arithmetic.
* **Clock and step.** The clock is assumed to be 125 MHz, with 12 clocks
  per step and a multicycle datapath. The original only states the 96 ns
  step.
* **Stop rule.** The run stops on the first check in which every clause is
  satisfied by the signs. Checks happen once per step period, before the
  update.
* **UART.** The framing, byte order and baud rate are this design's.
* **Test instances.** The planted-instance generator is used in place of
  Barthel instances.

## Simulation

Every file is plain SystemVerilog-2017. The package must be read first, and
the modules are found by file name. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
        rtl/memc_pkg.sv -y rtl tb/tb_memc_solver_top.sv --top-module tb_memc_solver_top
    obj_dir/Vtb_memc_solver_top

Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_clause_unit` | C', all three terms, `sat` and both memory updates against an independent reference model (floor division by `/`, `%`), clock by clock. Includes ties, ±1 inputs, X_s at both bounds and X_l at both bounds (M = 1 makes the upper bound reachable). |
| `tb_variable_unit` | Euler step, both clip limits, load, hold without step, Boolean reading. |
| `tb_solver_controller` | Load on start, step spacing of exactly `STEP_CYCLES` (12 and 5), step count, one `tx_start` per run, status pin low for (k+1)·`STEP_CYCLES` clocks, restart. |
| `tb_solution_uart` | Frame bits, byte order, padding, frame timing, busy length, `send` ignored while busy. |
| `tb_memc_solver_top` | N = 20, M = 86, four runs: answer satisfies the instance, UART stream equals the answer, status-pin time, and that steps, V clipping, X_s at 0 and 1, X_l growth and X_l returning to 1 all occur. |
| `tb_memc_solver_full` | The same checks with every parameter at its default (N = 150, M = 645, real UART rate). |
| `tb_memc_workloads` | One solver each for N = 20, 40, 60, 80, 100, 130 at M = round(4.3 N), all run together; checks each answer and the status-pin time and prints the step counts. |

Typical results: the default instance (N = 150) is solved in 505 steps
(about 48 µs at 96 ns per step). The smaller sizes take tens to a few hundred
steps. These planted instances are easier than the Barthel instances of the
original study, which needed about 10^4 steps at N = 150. Simulation is fast.
Compilation dominates: about a minute for the full-size design and a few
minutes for the six-size workload bench.

## Limits

* The datapath is one long combinational path per step. It relies on a
  multicycle constraint, and its clock rate has not been checked on any
  FPGA.
* Each problem needs its own elaboration. There is no way to load a problem
  at run time.
* A run is judged solved by the signs of V alone, checked once per step
  (the state only changes at a step). No step limit stops an unsolvable
  problem.
