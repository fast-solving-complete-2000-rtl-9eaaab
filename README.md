# SC-SA: a stochastic-computing simulated annealer for 2000-spin Ising problems

This is synthesizable SystemVerilog for an annealing engine that searches for
low-energy states of an Ising model, and through it for good solutions of
MAX-CUT and similar combinatorial problems. It implements *stochastic-computing
simulated annealing* (SC-SA): each spin is a probabilistic bit whose `tanh`
response is replaced by a saturating up-down counter, and the "temperature" is
the size of that counter. By default the core holds a complete graph of 2000
spins with couplings in {-1, 0, +1}, the size of the K2000 MAX-CUT benchmark
(2,000 vertices, 1,999,000 edges).

The algorithm is taken from the published description of SC-SA; the hardware
organisation around it (time-shared spin gates, memories, sequencer, host
interface, noise source, word widths) is this design's own and is marked as
such below.

## The problem and the update rule

An Ising model has spins `sigma_i` in {-1, +1}, biases `h_i` and symmetric
couplings `J_ij`. Its energy is

    H = - sum_i h_i sigma_i  -  1/2 sum_{i != j} J_ij sigma_i sigma_j

For MAX-CUT on a graph with edge weights `w_ij`, set `h = 0` and `J = -w`: then
`H = (weight of uncut edges) - (weight of cut edges)`, so the lowest energy is
the largest cut. Spins at +1 form one side of the cut, spins at -1 the other.

SC-SA updates **all spins at once** every annealing cycle `t`:

    I_i(t+1)     = h_i + sum_j J_ij sigma_j(t) + n_rnd * r_i(t)      r_i(t) = +1 or -1 at random
    Itanh_i(t+1) = I0 - 1                 if Itanh_i(t) + I_i(t+1) >= I0
                 = -I0                    if Itanh_i(t) + I_i(t+1) <  -I0
                 = Itanh_i(t) + I_i(t+1)  otherwise
    sigma_i(t+1) = +1 if Itanh_i(t+1) >= 0, else -1

`Itanh_i` is a counter with `2*I0` states that integrates the local field. With
a small `I0` a single cycle of contrary field flips the spin; with a large `I0`
the counter is deep and spins settle. `I0` therefore plays the role of an
inverse temperature, and it is swept:

    I0 starts at I0min; every tau cycles I0 <- I0 / beta (clamped to I0max);
    one step after I0 has reached I0max it restarts at I0min.

Each rise from `I0min` to `I0max` is one *iteration*; the energy typically
falls during an iteration and jumps up when `I0` restarts, which lets the search
leave a local minimum. `tau`, `I0min`, `I0max`, `1/beta` and the noise
magnitude `n_rnd` are run-time settings. Published settings for the benchmarks
this core is sized for:

| problem | nodes | edges     | weights | tau | I0max | n_rnd |
|---------|-------|-----------|---------|-----|-------|-------|
| G6      | 800   | 19,176    | ±1      | 500 | 64    | 4     |
| G14     | 800   | 4,694     | +1      | 1   | 512   | 2     |
| G18     | 800   | 4,694     | ±1      | 500 | 32    | 4     |
| K2000   | 2,000 | 1,999,000 | ±1      | 500 | 1024  | 32    |

`I0min` and `beta` are not published; `I0min = 1` and `1/beta = 2` (doubling)
are used throughout the testbenches.

## The spin gate

One spin update is a small circuit, the *spin gate*:

* **multiplexers** form `J_ij * sigma_j` without a multiplier: select `J_ij`
  when `sigma_j = +1`, `-J_ij` when `sigma_j = -1`
  (`rtl/local_field_adder.sv`);
* **one binary adder** sums the products, the bias and the noise term;
* a **saturated up-down counter** applies the `Itanh` step, and the **sign**
  of its new value is the new spin (`rtl/updown_counter.sv`).

A fully parallel machine would need 2000 gates, each with a 2000-input adder.
This design instead **time-shares `GATES` spin gates** (`rtl/spin_gate.sv`)
over the spins and feeds each `LANES = 100` couplings per clock. Gate `g`
serves spins `g, g+GATES, g+2*GATES, ...`; by default `GATES = 1`, one gate
for all spins. Spin `i` takes `n/LANES` clocks in its gate: the gate
accumulates the partial sums of the row chunks and, on the row's last chunk,
adds `h_i` and the noise, steps the counter and produces `sigma_i(t+1)`. The
counter value of every spin is stored in a memory word between its turns. The
arithmetic is exactly that of the equations above; only the order in which the
terms are added differs.

Each gate has its own bank of coupling, bias and counter memory, so the gates
never compete for a port. They all read the same chunk of the spin vector in a
given clock, because the `GATES` spins they handle together form one group
`GATES*q .. GATES*q+GATES-1` and visit the chunks in the same order.
`GATES` must divide `LANES`; `GATES = LANES = N` is the fully parallel
arrangement of the algorithm, one gate and one adder per spin.

## Keeping the update synchronous

Every spin of cycle `t+1` must see the states of cycle `t`, but the shared
gate produces new states one at a time. `rtl/spin_state.sv` therefore keeps two
spin vectors: the gates read chunks of the *current* vector and write the new
states, `GATES` bits at a time, into the *next* vector; when the last spin of
the cycle has been
written back, the sequencer swaps them in one clock. The result is bit-for-bit
the synchronous update of the equations, which the testbenches check against a
plain integer model.

## Block diagram and data flow

```
            host: j_we/j_row/j_chunk/j_wdata, h_we/h_addr/h_wdata, cfg, start
                 |                      |
           +-----v------+         +-----v-----+        +-------------+
           | J store    |         | h store   |        | Itanh store |<----+
           | N*N/LANES  |         | N x 16b   |        | N x 16b     |     |
           | x LANES*2b |         +-----+-----+        +------+------+     |
           (each store split into GATES banks, one per spin gate)          |
           +-----+------+               |                     |            |
                 | J chunk              | h_i                 | Itanh_i(t) |
 sweep_ctrl -----+----------------------+---------------------+            |
 (row, chunk)    v                      v                     v            |
           +------------------------------------------------------------+  |
 spin_state| spin_gate x GATES: mux x LANES -> adder -> acc, +h +noise  |  |
 sigma(t)->|            -> saturated up-down counter (I0) -> sgn        |--+
 chunk     +------------------------------------------------------------+ Itanh_i(t+1)
                 | sigma_i(t+1)                ^ n_rnd*r_i    ^ I0
                 v                             |              |
           spin_state next vector         noise_gen      i0_scheduler
           (swap at end of cycle)         (LFSR)         (tick per cycle)
```

Pipeline: in clock 0 the sequencer (`rtl/sweep_ctrl.sv`) issues `(group q,
chunk k)`; each gate's J word, `h_i` and `Itanh_i`, and the shared spin chunk,
are read synchronously. In clock 1 the gates sum the chunk; on the last chunk
they write `Itanh_i(t+1)` and `sigma_i(t+1)` back and the noise generator
advances by `GATES` draws. After the last group the sequencer waits two clocks
for the write-back, swaps the spin vectors and ticks the I0 scheduler.

**Timing.** With `n = n_chunks * LANES` spins in use, one annealing cycle takes
`(n/GATES) * n_chunks + 2` clocks (the first cycle after start one more). At
the default `GATES = 1`:

| problem size        | n_chunks | clocks per cycle |
|---------------------|----------|------------------|
| 2000 spins (K2000)  | 20       | 40,002           |
| 800 spins (Gset)    | 8        | 6,402            |
| 100 spins           | 1        | 102              |

The run of 100,000 cycles reported for K2000 is thus 4.0e9 clocks at
`GATES = 1`. Throughput scales linearly with `LANES` (coupling-store word
width, adder width) and with `GATES` (number of gates and memory banks).

## Modules

| file | role |
|------|------|
| `rtl/sc_sa_pkg.sv` | default sizes, widths, run-configuration struct `sc_sa_cfg_t`, LFSR polynomial |
| `rtl/local_field_adder.sv` | LANES multiplexers and one adder: partial local field of a chunk |
| `rtl/updown_counter.sv` | saturated up-down counter step and sign, combinational |
| `rtl/spin_gate.sv` | one time-shared spin gate: chunk accumulation, bias, noise, counter, sign |
| `rtl/noise_gen.sv` | `n_rnd * r_i(t)` for `GATES` spins, signs from a 32-bit Galois LFSR |
| `rtl/i0_scheduler.sv` | saw-tooth geometric I0 schedule in fixed point |
| `rtl/ram_1r1w.sv` | synchronous 1-read 1-write memory; used for J, h and Itanh |
| `rtl/spin_state.sv` | double-buffered spin vector: chunk read, group write |
| `rtl/sweep_ctrl.sv` | group/chunk sequencer, cycle counting, start/done |
| `rtl/sc_sa_top.sv` | the core: gates and their memory banks, wiring, configuration latch, host interface |

## Using the core

Parameters of `sc_sa_top`: `N` (spins, default 2000), `LANES` (couplings
per clock per gate, default 100) and `GATES` (spin gates, default 1); `N`
must be a multiple of `LANES`, and `LANES` of `GATES`. Widths are in
`sc_sa_pkg`: couplings `JW = 2` bits, field/counter/I0 `IW = 16` bits, I0
fraction `I0_FRAC = 8` bits.

1. While `busy` is low, write the couplings: one word per `(j_row, j_chunk)`,
   where bits `[2k+1:2k]` of `j_wdata` hold `J[j_row][j_chunk*LANES + k]` in
   two's complement. Write each bias with `h_we`. J must be symmetric with a
   zero diagonal for the energy above to be the one minimised; the core does
   not check this. Stores keep their contents across runs.
2. Set `cfg` (`sc_sa_cfg_t`): `n_chunks` (problem of `n_chunks*LANES` spins,
   using rows and columns `0..n-1`; unused couplings must be 0),
   `num_cycles`, `tau`, `i0_min`/`i0_max` (unsigned, 8 fraction bits: 1.0 =
   `24'h000100`), `inv_beta` (Q8.8: 2.0 = `16'h0200`), `n_rnd`, `seed`.
3. Pulse `start`. The settings are latched; all counters start at 0 and all
   spins at +1. `iter_end` pulses each time I0 restarts. `done` pulses with the
   last cycle; `sigma` (bit 1 = +1) then holds the result. The core keeps the
   last state, not the best one seen, so a host that wants the best cut should
   read `sigma` after each cycle (`cycle_count` increments) and evaluate it.

To map a problem smaller than a chunk multiple, pad it with spins that have no
couplings; they then fluctuate on their own and do not affect the others.

## Verification

Every module has a self-checking testbench in `tb/`. The two system-level
tests use `tb/sc_sa_model_pkg.sv`, an integer model of the update rule, the
noise LFSR and the I0 schedule, and compare the whole spin vector and `I0`
with it after **every** annealing cycle:

* `tb/tb_sc_sa_top.sv` (N = 12, LANES = 4, GATES = 2): the 5-vertex example graph (edges
  1-2, 1-3, 2-4, 3-4, 3-5, 4-5) on an 8-spin problem, and a complete 12-vertex
  graph with random ±1 weights and two non-zero biases. In both, the best cut
  seen must equal the optimum found by exhaustive search (5 for the example
  graph), and the test counts that counter saturation at
  both bounds, both noise signs, multi-chunk rows, a reduced problem size, the
  first-cycle counter clear, an I0 restart, a restart of the core and two
  gates finishing spins in the same clock all occur.
* `tb/tb_sc_sa_full.sv` runs the core at its default parameters: 2000 spins,
  a random complete graph with ±1 weights (1,999,000 edges, drawn with a fixed
  seed), `n_rnd = 32`, `I0max = 1024`, and `tau = 10` so that one whole I0
  ramp fits into 110 cycles (4.4 million clocks, about 20 s in Verilator).
  It checks the cycle length and requires a final cut of at least 30,000; the
  run reaches about 31,100.

* `tb/tb_sc_sa_gset.sv` runs three 800-vertex sparse problems at the default
  size (`n_chunks = 8` of 20) for 1,000 cycles each, with the published
  settings of G6, G14 and G18 and random graphs of the same vertex count, edge
  count and weight set (about 70 s). Spins 800 to 1999 must stay untouched.
  The best cuts reached are about 2,000, 3,330 and 470; they are not
  comparable with published Gset scores because the graphs differ: the
  published G14 and G18 are toroidal and planar graphs, not random ones.

Run any of them with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sc_sa_pkg.sv tb/sc_sa_model_pkg.sv rtl/*.sv tb/tb_sc_sa_full.sv \
    --top-module tb_sc_sa_full
./obj_dir/Vtb_sc_sa_full
```

Each prints `TB_RESULT checks=<n> failures=<m>`.

## Where this design departs from, or goes beyond, the algorithm description

* **Time-shared spin gates.** The algorithm is described with one gate per
  spin and a single adder over all neighbours; here `GATES` gates (one by
  default) serve all spins, `LANES` couplings per clock each. The results are
  identical; the speed is `(n/GATES)*n_chunks + 2` clocks per cycle instead of
  one.
* **Counter state in memory**, reset to 0 by treating the stored value as 0 in
  the first cycle of a run rather than by clearing the memory.
* **Initial spins** are all +1 (the sign of a zeroed counter); the original
  description does not state the initial state.
* **Noise**: `r_i(t)` is taken as a random sign with equal probability, drawn
  from one 32-bit LFSR in spin order. Spins updated in sequence therefore see
  consecutive LFSR bits; with several gates the LFSR takes `GATES` steps per
  clock, so the stream, and the result of a run, does not depend on `GATES`.
* **I0 schedule**: the restart rule (restart one step after reaching I0max)
  and the clamp to I0max are choices; the description shows only the saw-tooth
  shape and the rule `I0(t+tau) = I0(t)/beta`.
* **Sign convention of J.** The worked 5-vertex example in the source gives J
  as the plain adjacency matrix (+1 on edges). With the energy as written, that
  choice makes the ground state the *minimum* cut; this design loads
  `J = -w` for MAX-CUT. The same example names a cut of 4 ({1,5} against
  {2,3,4}) as the solution, but the graph has cuts of 5 (for example {1,4}
  against {2,3,5}); the testbench requires 5.
* **Word widths** (2-bit couplings, 16-bit fields and counters, 8 fraction
  bits for I0, 8-bit `n_rnd`, 16-bit `tau`, 32-bit cycle count) are chosen to
  hold the published settings with margin.
* **No best-solution register and no energy or cut evaluator.** Cut values
  and energies quoted in the testbenches are computed by the testbenches.

## What the published results mean for this RTL

The reported MAX-CUT scores (for example an average cut of 33,262 on K2000
after 100,000 cycles) come from software simulation of the algorithm; this RTL
implements the same update rule, but it has not been run for 100,000 cycles on
the published instances, which are not included. On a random complete graph of
the same size, one 110-cycle I0 ramp reaches a cut of about 31,100.
