# Snowball: an all-to-all Ising machine kernel in SystemVerilog

An Ising machine looks for a low-energy configuration of N binary spins
s_i ∈ {−1, +1}, where the energy is

    H(s) = −½ Σ_ij J_ij s_i s_j − Σ_i h_i s_i

Problems such as Max-Cut or graph partitioning map onto this form. Max-Cut
with edge weights w_ij, for example, uses J_ij = −w_ij and h = 0. The cut
weight is then (−Σ_{i<j} J_ij − H(s)) / 2, so a lower energy means a larger
cut.

This RTL implements the Snowball architecture. It is a digital Ising machine
with three properties:

* **Every pair of spins is coupled.** J is a dense N × N matrix held in
  off-chip memory. A problem graph never has to be embedded into a sparse
  hardware topology.
* **Couplings can be wide.** J is stored as 1-bit *bit-planes*, so each extra
  bit of precision costs one more plane of memory. The internal datapath does
  not get wider.
* **One spin changes at a time.** Each iteration picks at most one spin. Two
  selection modes share one datapath:
  * **Mode I, random-scan:** pick a spin uniformly at random and flip it with
    the Glauber probability.
  * **Mode II, roulette-wheel:** pick a spin with probability proportional to
    its flip probability, then always flip it.

  Simulated annealing lowers the temperature T from one stage to the next.

The RTL follows the Snowball paper (Hong, Jeong, Jang, "Snowball: A Scalable
All-to-All Ising Machine with Dual-Mode Markov Chain Monte Carlo Spin
Selection and Asynchronous Spin Updates for Fast Combinatorial
Optimization"). That paper gives the algorithm, the data representation and
the block structure. It gives no widths, memory organisation, interfaces or
cycle-level timing. Those are this implementation's own choices. Each one is
listed in [Departures and own choices](#departures-and-own-choices).

## The idea in one picture

```
             off-chip bit-plane memory (row-major and column-major layouts)
                 |  row i, all planes                 |  column j, all planes
                 v                                    v
      +---------------------+              +---------------------+
      | row-major buffer    |              | column-major buffer |
      +----------+----------+              +----------+----------+
                 | B_b±(i, word w)                    | B_b±(word w, j)
                 v                                    v
      +---------------------+   u_i^(J)    +-----------------------------+
      | Hamming-weight      |------------->| local-field memory u^(J)    |<--+
      | accumulator (init)  |              | bias memory h               |   |
      +----------^----------+              +--------------+--------------+   |
                 | s (word w)                             | u^(J), h         | read-modify-write
                 |                                        v                  | u_i -= 2 J_ij s_j_old
      +----------+----------+   s (word)   +-----------------------------+   |
      | spin register file  |------------->| dual-mode MCMC engine       |   |
      |                     |<-- flip j ---| 64 x logistic LUT, RNG, T_k |   |
      +----------+----------+              +--------------+--------------+   |
                 |                                        | j, s_j_old       |
                 v s_out                                  v                  |
                                           +-----------------------------+   |
                                           | incremental update unit     |---+
                                           +-----------------------------+
```

The kernel keeps the *local fields* on chip. The coupler part of the field
is u_i^(J) = Σ_{j≠i} J_ij s_j, and the full field is u_i = u_i^(J) + h_i.
Flipping spin i changes the energy by ΔE_i = 2 s_i u_i. The fields let the
engine evaluate the flip probability of all N spins without touching J at
all.

J is read at two times:

* **Initialisation:** once per row, to build u^(J) from scratch.
* **After an accepted flip of spin j:** once for column j. The change in every
  field is known exactly: u_i^(J) ← u_i^(J) − 2 J_ij s_j^old. This costs Θ(N)
  per flip, where recomputing every field from scratch would cost Θ(N²).

This is why J has two copies off chip:

* The **row-major** copy streams rows for the initialisation.
* The **column-major** copy streams the one column needed after a flip.

## Number representation

| quantity | encoding |
|---|---|
| spin s_i | bit x_i = (s_i + 1)/2, packed 64 per word (`LANES` = 64); word w holds spins 64w … 64w+63 |
| coupling J_ij | J_ij = Σ_b 2^b (B_b⁺(i,j) − B_b⁻(i,j)): sign-magnitude split into positive and negative 1-bit planes b = 0 … n_planes−1 |
| u^(J), h | 32-bit two's complement |
| flip probability p | Q1.16 unsigned, 17 bits, 65536 = 1.0 |
| temperature T, 1/T | Q16.16 unsigned, 32 bits; T = 0 means "zero temperature" |
| random variates | 32 bits |

The sign-magnitude split works like this. A coupling of +3 sets bit (i,j) in
B_0⁺ and in B_1⁺. A coupling of −2 sets the bit in B_1⁻. The number of active
planes (`cfg_n_planes`) is a runtime setting between 1 and `B_MAX` = 16. A
±1 Max-Cut instance needs one plane. A 16-bit magnitude needs 16.

## Building the local fields: the Hamming-weight accumulator

Take row i, plane b, and one 64-bit word of columns. Let P be the positive
coupler word and S the spin word, and define:

* m_P = popcount(P)
* o_P = popcount(P & S)

Among the m_P columns whose coupler bit is set, o_P spins are +1 and
m_P − o_P spins are −1. Their sum Σ s_j is therefore 2·o_P − m_P. The negative
plane gives 2·o_N − m_N in the same way, with the opposite sign. So

    u_i^(J) = Σ_b Σ_w 2^b · [ (2 o_P − m_P) − (2 o_N − m_N) ]

This needs only AND gates, popcounts and adders, with no multipliers.
`hw_accumulator` evaluates all planes of one word in one cycle. A lane mask
removes the diagonal (j = i) and the padding columns beyond N. The row takes
n_words = ⌈N/64⌉ cycles, and its result is written into the local-field
memory.

## Keeping the fields current: the incremental update unit

After spin j flips, column j of every plane arrives in the column-major
buffer. For each word of 64 rows, `incr_update_unit` rebuilds J_ij per lane
from the plane bits and applies u_i ← u_i − 2 J_ij s_j^old. Written per
plane, the rule is:

* a positive bit subtracts 2^(b+1)·s_j^old;
* a negative bit adds 2^(b+1)·s_j^old.

The fields are read, updated and written back one 64-field word per cycle.
The flipped spin's own field is left alone.

## The dual-mode MCMC engine

### Flip probability

The Glauber probability of flipping spin i is p_i = 1 / (1 + exp(ΔE_i / T)).
`logistic_pwl` computes it with a piecewise-linear table and no exponential:

1. **Form |z|.** |z| = |ΔE|·(1/T) in fixed point. 1/T is computed once per
   annealing stage by a small sequential divider (`recip_div`, 33 quotient
   bits). This avoids one divider per lane.
2. **Look up σ(−|z|).** The table holds 33 knots at |z| = 0, ½, 1, …, 16, each
   round(65536 / (1 + e^(k/2))), and interpolates linearly between them.
   Beyond |z| = 16 the result is exactly 0. The largest error against the true
   logistic is about 200/65536 ≈ 0.3 %.
3. **Apply the sign.** A negative ΔE uses 1 − σ(−|z|).
4. **T = 0.** The output is 1 for ΔE < 0, ½ for ΔE = 0 and 0 for ΔE > 0.

The exact 0 beyond |z| = 16 matters: without it Mode II's total weight could
never reach 0, and its fallback (below) would never run.

The engine has 64 of these blocks. They evaluate the 64 spins of one word in
one cycle.

### Mode I: random-scan

1. Draw u. The site is j = ⌊u·N / 2³²⌋.
2. Read j's word and form p_j.
3. Draw v. Accept the flip when the upper 16 bits of v are below p_j.

This takes 2 cycles from start to result. It is asynchronous Glauber
dynamics: the flip and its field update finish before the next iteration.

### Mode II: roulette-wheel

The engine picks spin j with probability p_j / W, where W = Σ_i p_i, and
flips it unconditionally. A rejection never happens. It works in two passes:

1. **Evaluate.** One word per cycle, n_words cycles. The engine stores each
   word's sum of p and accumulates W.
2. **Draw.** r = ⌊v·W / 2³²⌋ ∈ [0, W).
3. **Search.** Walk the stored word sums to the word whose running sum passes
   r (at most n_words cycles). Re-read that word and resolve the lane with a
   64-lane prefix sum. The chosen j satisfies Σ_{i<j} p_i ≤ r < Σ_{i≤j} p_i.

At most this takes 2·n_words + 4 cycles.

**Fallback.** If W = 0, no spin can flip at all. The same iteration then
performs one Mode I step instead and reports `fallback`. This happens at low
T in a local minimum.

**Uniformized variant** (`cfg_uniformize`). r is drawn over [0, N·65536)
instead, which is N times "probability 1". When r ≥ W the iteration is a
*null transition*: nothing flips. A flip therefore occurs with probability
W/N. With W = 0 every iteration is a null transition.

### Random numbers

Every random number is a pure function of four inputs, so there is no
generator state to update or share:

* the host's 64-bit seed;
* the annealing stage k;
* the global iteration t;
* a salt: 1 = Mode I site, 2 = Mode I acceptance, 3 = roulette position.

The function is two SplitMix64 finaliser rounds. Two instances with
different salts give Mode I its two variates in the same cycle. A run is
reproducible from its seed, and a testbench can predict every decision.

### Annealing schedule

A table of up to `K_MAX` = 1024 temperatures T_k is written by the host. A
run has `cfg_n_stages` stages of `cfg_iters_per_stage` iterations each, and
stage k uses T_k. The host can therefore program any cooling curve: linear,
cosine and so on. When the stage changes, the engine spends 35 cycles
computing 1/T_k.

## Kernel interface (`snowball_top`)

Parameters:

| parameter | default | meaning |
|---|---|---|
| `N_MAX` | 8192 | largest number of spins; must be a multiple of `LANES` |
| `LANES` | 64 | spins per word |
| `B_MAX` | 16 | largest number of bit-planes |
| `K_MAX` | 1024 | depth of the annealing schedule table |

A run goes through these steps:

1. **Idle loads.** While `busy` is low, write the biases (`h_we/h_addr/h_data`,
   one spin each), the initial spins (`spin_we/spin_waddr/spin_wdata`, 64 per
   word) and the schedule (`sched_we/sched_addr/sched_data`).
2. **Configure.** Set the `cfg_*` inputs and hold them stable until `done`:
   * N (`cfg_n_spins`);
   * the number of planes;
   * the mode (0 = random-scan, 1 = roulette-wheel);
   * uniformize;
   * the number of stages and iterations per stage;
   * the seed.
3. **Start.** Pulse `start`. `busy` rises.
4. **Initialisation.** For every row i, the kernel requests the row-major line
   i, fills the row buffer, accumulates u_i^(J) over n_words cycles and writes
   it.
5. **Sampling.** Each iteration starts the engine. On a flip, the kernel:
   1. toggles spin j;
   2. requests column-major line j;
   3. fills the column buffer;
   4. read-modify-writes all n_words field words.
6. **Finish.** `done` rises and `busy` falls. Read the spins through
   `s_out_addr/s_out_data` and the fields through
   `fld_out_addr/fld_out_data/bias_out_data`. The counters `stat_flips`,
   `stat_rejects`, `stat_fallbacks`, `stat_nulls` and `stat_cycles` describe
   the run.

With zero stages the kernel only initialises the fields. This is useful to
load a new configuration.

**Coupler-line port.** This connects to the memory that holds the two
bit-plane layouts:

* **Request.** The kernel raises `mem_req_valid` with `mem_req_col`
  (0 = row-major, 1 = column-major) and `mem_req_idx` (row or column). It
  holds them until `mem_req_ready`.
* **Response.** The memory answers with exactly 2·n_planes·n_words 64-bit
  words on `mem_rd_valid/mem_rd_ready/mem_rd_data`. The order is plane
  b = 0, 1, …, then within a plane the positive word set before the negative,
  then word w = 0 … n_words−1. Bit l of word w is column (or row) 64w + l.
* **Pacing.** Only one line is in flight at a time. Both handshakes tolerate
  stalls.

Behind this port there would be the board memory, DMA and bus interconnect
of an FPGA card. Splitting J into planes is host-side preprocessing. Neither
is part of this RTL.

## Timing

These counts assume the memory delivers one word per cycle:

| phase | cycles |
|---|---|
| initialisation, per row | 2·n_planes·n_words (line) + n_words (accumulate) + ~3 |
| Mode I iteration | ~4, plus a flip's update |
| Mode II iteration | ≤ 2·n_words + 6, plus a flip's update |
| update after a flip | 2·n_planes·n_words (column) + n_words (read-modify-write) + ~3 |
| stage change | +35 |

Measured at full size on a 2000-spin complete graph with ±1 couplings (one
plane, n_words = 32):

* initialisation: 202 k cycles;
* roulette-wheel: 155 cycles per iteration;
* random-scan: about 50 cycles per iteration.

At 300 MHz, 100 roulette iterations would take about 52 µs after
initialisation. For comparison, the paper reports 85–128 µs per 100-step run
of its FPGA prototype. Its step and timing definitions are not given in
enough detail to compare cycle for cycle.

"Step" there cannot mean one single-spin iteration. On the ±1 complete graph
the reported target is a cut of 33 000. One flip changes the cut by at most
|u_i|, which is typically around √N ≈ 45 and never more than N − 1. A hundred
flips from a random start therefore get nowhere near it. The 100-iteration
runs above reach cuts of a few thousand.

The kernel does not fix what a step is: a run may use up to `K_MAX` = 1024 stages of up to 2³²
iterations each. One sweep per stage, for example, means N iterations per
stage. For a sweep-sized run the per-iteration figures above give the time.

## What fits

With the default parameters the kernel holds up to 8192 spins and 16-bit
coupling magnitudes. The instances evaluated for Snowball are:

* the six Gset Max-Cut graphs (800 or 7000 vertices, ±1 weights, one plane);
* a complete graph with 2000 vertices and random ±1 couplings.

All of them fit: 7000 spins take 110 of the 128 words.
The evaluation also reconstructs a 64 × 64 image at 16-bit precision, but the
spin mapping is not specified. With one spin per pixel and 16 planes it would
fit: 4096 spins. With one spin per pixel bit it would not: 65536 spins, eight
times `N_MAX`. The off-chip matrix
grows as 4·n_planes·N² bits, for two layouts and two signs. For the
7000-spin graphs that is 196 Mbit at one plane.

## Departures and own choices

What follows the paper:

* the spin encoding and 64-bit word packing;
* bit-plane couplings in row-major and column-major form;
* Hamming-weight initialisation and the incremental update rule;
* on-chip u^(J) and h;
* Glauber probabilities through a piecewise-linear table;
* the two modes, with roulette selection by running sums;
* the W = 0 fallback and the optional uniformized variant with W* = N;
* a stateless RNG keyed by seed, stage, iteration and salt;
* a preloaded annealing schedule.

This design's own choices are:

* **Number formats and table.** All widths and formats, the table's range and
  knot spacing, and the exact-zero tail.
* **Reciprocal of T.** Multiplying by 1/T, computed once per stage, instead of
  dividing ΔE by T.
* **Line buffers.** Each buffer holds one whole row or column. The paper
  speaks of "tiles" without giving their size.
* **Memory organisation and port.** The field memory is organised by word and
  read combinationally. The off-chip port is a simple valid/ready line
  stream. The paper's platform reaches board memory over AXI.
* **Parallelism.** One 64-spin word per cycle throughout, with all planes of
  that word handled in the same cycle.
* **Roulette search.** It uses stored word sums and two passes.
* **No overlap.** Line fetch, accumulation, selection and update run strictly
  one after another. A higher-performance version would prefetch and overlap
  them.
* **Schedule shape.** The schedule is a list of stages, each running a fixed
  number of iterations.
* **Defaults.** N_MAX = 8192 is chosen to hold the evaluated instances.
  K_MAX = 1024.
* **Additions.** Event counters and a field readout port.

Where the paper's statements differ:

* **Diagonal term.** The paper writes u_i^(J) both as Σ_j and as Σ_{j≠i}. The
  RTL excludes j = i everywhere. The two agree when J_ii = 0.
* **Column-major buffer.** The architecture figure labels the column-major
  buffer "for local-field initialization". The text uses it for the
  incremental update, and the RTL follows the text.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| `tb_rng_stateless` | known-answer vectors, purity, key sensitivity, uniformity |
| `tb_logistic_pwl` | error against real-valued 1/(1+e^z) over a sweep of ΔE and T, symmetry, zero tail, T = 0 |
| `tb_coupler_tile_buf` | stream order, `full` timing, inactive planes read as zero, under random gaps |
| `tb_hw_accumulator` | Σ J_j s_j from random bit-planes, 1 to 16 planes, masks |
| `tb_incr_update_unit` | u − 2 J s_old per lane for 1 to 16 planes, masks |
| `tb_field_mem`, `tb_spin_regfile` | against reference arrays |
| `tb_mcmc_engine` | at T = 0 every Mode I, Mode II, fallback and null decision predicted exactly; 1/T values; latencies; at T = 1, roulette frequencies against p_j/W and random-scan acceptances against p_j over 4000 iterations |
| `tb_snowball_top` | 200 spins, 3 planes, random memory stalls; see below |
| `tb_snowball_k2000` | all parameters at their defaults; see below |
| `tb_snowball_torus` | all parameters at their defaults, sparse toroidal grids of 800 and 7000 spins; see below |

`tb_snowball_top` runs the whole kernel several times. It checks:

* the initialised fields;
* the final spins of runs in Mode I, Mode II and uniformized Mode II at T = 0,
  bit for bit against a software model of the algorithm;
* field consistency after an annealing run.

It also requires every mechanism to occur at least once: flip, rejection,
fallback, null transition, stage change, memory stall and request
back-pressure.

`tb_snowball_k2000` runs the 2000-spin ±1 complete graph, 100 iterations in
each mode. It checks all 2000 fields against a recomputation and reports the
cut and the cycle counts.

`tb_snowball_torus` builds two-dimensional wrap-around grids with random
±1 edge weights. It uses 800 vertices with 1600 edges and 7000 vertices with
14000 edges, the sizes of the torus graphs in the Gset suite. It anneals them
in both modes and checks:

* the fields, as above;
* that every roulette iteration flipped a spin;
* that the cut improved;
* that no roulette iteration exceeded its cycle bound.

At 7000 spins the measured costs are:

* initialisation: 2.34 M cycles;
* each roulette iteration: about 504 cycles.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/snowball_pkg.sv tb/tb_snowball_top.sv --top-module tb_snowball_top -o sim
./obj_dir/sim
```

The full-size tests take one to two minutes each.

How far to trust it:

* The T = 0 behaviour of both modes is checked exactly against an independent
  model.
* At T > 0, the probability table's accuracy and field consistency are
  checked. So are the one-step selection statistics on a small case.
* The long-run sampled distribution is not checked, nor is the quality of
  the annealing results.
* Nothing here has been through FPGA place-and-route.

## Files

* `rtl/snowball_pkg.sv`: shared constants, types, the random function and the
  logistic knot table.
* `rtl/snowball_top.sv`: the kernel and its sequencer.
* `rtl/mcmc_engine.sv`: the dual-mode engine and the annealing schedule.
* `rtl/logistic_pwl.sv`, `rtl/rng_stateless.sv`, `rtl/recip_div.sv`: engine
  parts.
* `rtl/hw_accumulator.sv`, `rtl/incr_update_unit.sv`: field initialisation
  and update.
* `rtl/coupler_tile_buf.sv`, `rtl/field_mem.sv`, `rtl/spin_regfile.sv`:
  on-chip storage.
* `tb/coupler_mem_model.sv`: a behavioural model of the off-chip bit-plane
  memory with random stalls, used by the kernel testbenches.
