# E-MVL: an Ising machine that anneals by sparsifying its couplings

This is synthesizable SystemVerilog for an Ising machine based on **extraction-type
majority voting logic (E-MVL)**, as described in "Quantum-inspired Ising machine
using sparsified spin connectivity" (Shimada, Awaya, Yonemoto, Zhao, Shirakashi).
The RTL is an independent implementation of that algorithm. The paper gives the
algorithm exactly. It reports an FPGA implementation but does not describe its
architecture, so the micro-architecture here (pipeline, memories, random
sources, host ports) is this implementation's own.

## The problem and the idea

The machine looks for a low-energy configuration of N Ising spins s_i in {-1, +1}:

    H = - sum_{i<j} J_ij s_i s_j - sum_i h_i s_i

The paper's benchmark is the Sherrington-Kirkpatrick (SK) model. Every spin couples
to every other spin, with J_ij either +/-1 ("SK-bimodal") or Gaussian values
quantised to signed 10-bit integers ("SK-Gaussian"), and h = 0.

A plain majority-vote update sets each spin to the sign of its local field
`h_i + sum_k J_ik s_k`. That only walks downhill into the nearest local minimum.
Simulated annealing escapes local minima with thermal noise, which costs
exponentials and random thresholds. E-MVL escapes them by **looking at only part of
the field**:

* When spin i is updated, `n(t)` of its `L = N` connections are picked at random.
  Spin i itself counts as a connection and stands for the field h_i. Only the
  picked connections enter the sum:

      I_i = [h_i if i was picked] + sum over picked k != i of J_ik s_k

* The new spin is +1 if `I_i > 0`, -1 if `I_i < 0`, and a random bit if `I_i = 0`.
* The **sparsity** `P_s(t)` is the fraction of connections left out:

      n(t) = max(1, floor((1 - P_s(t)) * L))

  `P_s` falls linearly from `P_s_init` to `P_s_fin` over `t_fin` sweeps:

      P_s(t) = P_s_init - (P_s_init - P_s_fin) * t / (t_fin - 1)

  Early on, each decision sees only a few random couplings. It is often wrong
  for the whole system, and these wrong decisions act like heat. At the end
  (`P_s = 0`) every coupling is seen, and the update becomes exact descent.
* Each sweep visits all spins once, in a fresh random order.

The paper finds the linear schedule best, with `P_s_fin = 0` and `P_s_init` in
0.2-0.4, and uses `t_fin = 1000` as a typical budget. Everything is integer
addition and comparison. There are no exponentials and no temperature.

## Architecture

```
            host ports                      +------------------+
  J write --------------------------------> | coupling RAM     |  N*N x 10 bit
  h write --------------------------------> | field RAM        |  N x 10 bit
                                            +--------+---------+
                                                     | J[i*N+k], h_i
  +------------+   i    +-------------+   k          v
  | order      |------->| extraction  |------> +----------+   +------------+
  | shuffler   |        | shuffler    |  k     | spin     |-->| majority   |-- s_i'
  +------------+        +-------------+ -----> | registers|s_k| vote       |
        ^                      ^               +----------+   +------------+
        | rnd                  | rnd                 ^  write s_i'  |
  +------------+  +------------+  +-----------+      +--------------+
  | rng order  |  | rng extract|  | rng spin  |--> initial spins, tie bit
  +------------+  +------------+  +-----------+
  +-----------------------+       +-----------------------------------+
  | sparsity scheduler    | n(t)  | controller: init, sweeps, spins,  |
  | P_s(t), n(t), t, last |------>| extraction pipeline, decisions    |
  +-----------------------+       +-----------------------------------+
```

| File | Block | What it does |
|---|---|---|
| `rtl/emvl_pkg.sv` | package | P_s fixed-point format (16 fraction bits, 1.0 = 65536), run-configuration struct, xorshift32 step |
| `rtl/emvl_top.sv` | top | wires the blocks, host ports |
| `rtl/emvl_controller.sv` | sequencer | Algorithm 1 as a state machine with a 3-stage extraction pipeline |
| `rtl/sparsity_scheduler.sv` | schedule | exact linear `P_s(t)` and `n(t)` |
| `rtl/index_shuffler.sv` | random draw | k distinct indices out of L, one per cycle (partial Fisher-Yates) |
| `rtl/majority_vote.sv` | vote | accumulates `I_i`, decides the spin |
| `rtl/coupling_memory.sv` | RAM | synchronous-read RAM, used for J and for h |
| `rtl/spin_memory.sv` | spins | N spin bits, two read ports and one write port |
| `rtl/xorshift_rng.sv` | random | 32-bit xorshift generator |

### Drawing the extracted set: the index shuffler

The paper needs "n(t) spins chosen at random among N", redrawn for every spin
update. The shuffler keeps a permutation of 0..L-1 in a table. A draw at
position `p` picks a random slot `r` in `[p, L-1]`, returns `perm[r]`, and swaps
`perm[p]` and `perm[r]`. Drawing at positions 0, 1, ..., n-1 gives n distinct,
uniformly chosen indices. This is the first n steps of a Fisher-Yates shuffle.
Any permutation is a valid starting point, so the table is never restored
between spins. It is reset to the identity only at the start of a run, which
makes runs repeatable. The slot is `r = p + floor(rnd16 * (L - p) / 2^16)`.
Its bias is below `(L - p) / 2^16`, up to about 2.4 % relative at L = 1600.

The same block, with its own generator, gives the random update order. Each
sweep draws positions 0..N-1, so every spin is visited exactly once.

### The update pipeline and its timing

For the spin i being updated, one extracted index enters the pipeline per cycle:

| cycle | stage |
|---|---|
| 0 | the extraction shuffler draws k |
| 1 | read `J[i*N + k]` from the coupling RAM and `s_k` from the spin registers; note whether k = i |
| 2 | add `+J`, `-J` or `h_i` to `I_i` |

After the last term the sign of `I_i` is written straight back to spin i.
Updates are therefore **sequential and in place**: later spins of the same
sweep already see the new value. This follows Algorithm 1 (spins visited one at
a time in random order). Eq. (5) of the paper writes `s_k(t)`, which could be
read as a synchronous update; the random visiting order only makes sense for
the in-place reading.

Cycle budget: one run takes exactly

    1 + N + 1 + sum_{t=0}^{t_fin-1} ( N * (n(t) + 5) + 1 )

cycles. This counts from the cycle in which `start` is sampled to the first
cycle with `done` high, for N >= 19. The terms are: N cycles for random
initial spins, and per spin one order draw, one index latch, n(t) extraction
draws and three cycles to drain and decide. The testbenches check this count
exactly. At N = 1600 with `P_s` going 0.4 -> 0 a sweep takes about 2.1 M
cycles, 10.3 ms at the paper's 200 MHz.

### The sparsity scheduler

`P_s` is held as an integer `ps` = P_s * 2^16. The scheduler evaluates the
paper's formula exactly, in that fixed point, without a divider per sweep. At
`start` a 17-cycle restoring divider splits `D = ps_init - ps_fin` into
`q = D div (t_fin - 1)` and `rem = D mod (t_fin - 1)`. Each sweep subtracts
`q`, plus one when an accumulated remainder wraps (Bresenham). So
`ps(t) = ps_init - floor(D t / (t_fin - 1))` at every t, and the last sweep runs
at exactly `ps_fin`. Then `n(t) = max(1, ((65536 - ps) * L) >> 16)`. Because of
the fixed point, `n` can differ by one from real-number arithmetic when
`(1 - P_s) L` lies within 2^-16 * L of an integer. `ps_init = ps_fin` gives the
**fixed-sparsity mode** the paper uses to measure equilibrium distributions.
`ps_init = 65536` gives `n = 1` at the start, the clamp of the `max(1, .)`.

### Random sources

There are three xorshift32 generators, seeded from `cfg.seed` XOR a fixed salt
each. The order generator advances once per order draw. The extraction
generator advances once per extraction draw. The spin generator advances once
per initial spin and once per decision; its top bit gives the initial spin
values and the tie bit. The paper asks only for randomness and a different
seed per trial. Because the streams are fully specified, a software model can
reproduce a run bit for bit, and the testbenches do exactly that.

## Using it

### Host interface (`emvl_top`)

| Port | Meaning |
|---|---|
| `j_we, j_waddr, j_wdata` | write `J_ik` (10-bit two's complement) at word `i*N + k`. Write both `J_ik` and `J_ki`; the diagonal is never read. |
| `h_we, h_waddr, h_wdata` | write `h_i` |
| `cfg` (`emvl_cfg_t`) | `ps_init`, `ps_fin` (P_s * 65536, `ps_init >= ps_fin`), `t_fin` (>= 1), `seed`. Sampled in the `start` cycle. |
| `start`, `busy`, `done` | start a run when idle; `done` stays high from the end of the run until the next start |
| `spin_raddr`, `spin_rdata` | read spin i (1 = +1, 0 = -1) one cycle after the address |
| `cur_t`, `cur_ps`, `cur_n` | current sweep, sparsity and extraction count |

Do not write J or h while `busy` is high; an assertion checks this. Spins are
initialised randomly at every start, so each run is an independent trial.

### Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 1600 | number of spins; also `L`, the connections per spin |
| `JW` | 10 | coupling width (the paper's 10-bit SK-Gaussian couplings) |
| `HW` | 10 | field width (the paper only uses h = 0) |

N is fixed at build time, as in the paper's FPGA builds, which are made per
problem size. To run a 100-spin problem, build with `N = 100`. Loading it into
a 1600-spin build would spread the extraction over 1600 connections.

### Simulating

Each testbench is self-checking and ends with a `TB_RESULT checks=... failures=...`
line. All of them build with warnings left fatal. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    +libext+.sv rtl/emvl_pkg.sv tb/emvl_ref_pkg.sv tb/tb_emvl_top.sv --top-module tb_emvl_top
./obj_dir/Vtb_emvl_top
```

| Testbench | What it shows |
|---|---|
| `tb_emvl_top` | N = 24, five runs (bimodal with fields, 10-bit couplings; P_s 1 -> 0, 0.4 -> 0, fixed 0.3, a single sweep). Every spin is compared with the reference model, and the run length with the cycle formula. It also counts field terms, random ties, the n = 1 clamp, fully connected sweeps, schedule carries and energy-raising flips, and each must occur. |
| `tb_emvl_top_full` | the default build (N = 1600, 10-bit): a 2.56 M-word load and a two-sweep run (n = 960, then 1600). It is bit-exact against the model, 4.1 M cycles, about 10 s of simulation. |
| `tb_emvl_sk_workload` | the benchmark in miniature: N = 16 SK-bimodal and SK-Gaussian instances, P_s 0.3 -> 0, t_fin = 1000, ten seeds each. Exact ground states come from exhaustive search. Typical result: Gaussian 10/10 exact, bimodal 5/10 exact with mean accuracy 0.975. It then runs the Gaussian instance at fixed P_s = 0.9, 0.6 and 0.3 (40 runs of 200 sweeps each) and checks that the settled energy falls as P_s falls; typical mean E/E_GS is 0.08, 0.43 and 0.78. |
| `tb_emvl_controller` | the command stream of the sequencer, against stand-in blocks |
| `tb_sparsity_scheduler` | `ps(t)` and `n(t)` against the closed forms at L = 1600, including t_fin = 1000, fixed and single-sweep schedules |
| `tb_index_shuffler` | distinctness, agreement with a Fisher-Yates model, permutation property, near-uniform single draws |
| `tb_majority_vote`, `tb_coupling_memory`, `tb_spin_memory`, `tb_xorshift_rng` | block-level behaviour |

`tb/emvl_ref_pkg.sv` holds the reference model, a class that reruns the whole
algorithm with the same random streams. It is the easiest place to try
algorithm changes before touching the RTL.

## How far to trust it, and where it departs from the paper

What the paper fixes, and this RTL follows: Eqs. (2), (5) and (6), Algorithm 1,
the linear schedule, random extraction and random order, spins as bits, 10-bit
signed couplings held in block RAM, and the largest size N = 1600.

Choices of this implementation, which the paper does not specify:

* **Sequential, in-place updates** (see above), one extracted coupling per
  cycle. The paper mentions parallelisation and pipelining on its FPGA but
  gives no structure. This design trades speed for simplicity.
* **Coupling storage** is a full N x N row-major matrix: 25.6 Mbit at
  N = 1600. The paper reports 631 BRAM36 blocks (about 23 Mbit) for that size,
  so its layout is denser, perhaps using symmetry.
* **SK-bimodal.** The paper compiles the +/-1 couplings of an instance into
  logic. Here they are loaded into the same RAM as +1/-1, so one build serves
  both problem types.
* **Arithmetic.** The paper's FPGA uses two DSP blocks. This design has four
  small multipliers: `n(t)`, two slot scalings, and the row base `i*N`.
* **Random numbers** come from xorshift32 with a 16-bit scaled slot choice
  (small bias, above). P_s is held in 16-bit fixed point.
* **Host ports** are simple synchronous write and read ports. The paper does
  not describe how its FPGA design is loaded or read.
* **Timing closure is not verified.** The shuffler reads and writes a
  1600-entry table at a random index and scales a random number in one cycle.
  At 200 MHz on an FPGA this would need distributed RAM, and perhaps a
  pipeline register on the slot product.

Not built:

* the exponential and reverse-exponential schedules, which the paper tried and
  rejected;
* the simulated-annealing, SQA and momentum-annealing baselines;
* energy evaluation, accuracy statistics and STT/STS metrics, which are host
  computations;
* the instance-specific logic encoding of bimodal couplings.

What was verified:

* Every block and the top pass their self-checking testbenches.
* The top matches an independent software model bit for bit, at N = 24 and at
  the full default size N = 1600.
* Small SK instances reach their exact ground states.

Full paper-length runs at N = 1600 (about 2e9 cycles each) were not simulated.
