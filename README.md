# HA-SSA: a memory-efficient stochastic simulated annealing processor

This is synthesizable SystemVerilog for an annealing processor that solves
combinatorial optimization problems, such as MAX-CUT, once they are written as
an Ising model. It implements *hardware-aware stochastic simulated annealing*
(HA-SSA), as described in "Memory-Efficient FPGA Implementation of Stochastic
Simulated Annealing" (Shin, Onizawa, Gross, Hanyu). The RTL is an independent
rendering of that design. It is not the authors' code.

The idea, in two parts:

* **Every spin is a p-bit built from stochastic-computing logic.** Each spin
  has a small saturating counter. Every clock cycle it adds the spin's bias,
  the signed weights of its neighbours, a random plus or minus noise term, and
  its own previous state. The sign of the counter is the spin. All spins update
  in parallel once per cycle. No energy is computed.
* **Only the spins produced at the coldest point are stored.** The
  pseudo-inverse temperature `I0` rises step by step within each "iteration"
  (low `I0` means hot and noisy, high `I0` means cold and stable). The
  processor writes spin vectors to memory only while `I0` is at its maximum.
  That is where good solutions appear. With the reference settings this stores
  1 cycle in 6, so the result memory is six times smaller than storing every
  cycle. A whole trial then fits in on-chip block RAM.

The host reads back the stored vectors and keeps the best one, for example the
one with the largest cut.

## Block structure

```
               cfg_we/addr/wdata                       hp, start
                      |                                     |
             +--------v---------+                 +---------v----------+
             | bias_weight_regs |                 |  hassa_controller  |
             |  h[N], J[E]      |                 |  I0 schedule,      |
             +--------+---------+                 |  iterations/trials |
                      | h, J                      |  write/read/stall  |
 +--------------+     v                           +--+---+---+---+-----+
 | xorshift_rng | r  +----------------------+  en,clr,I0,nrnd |   |
 |  N bits/cyc  +--->|   spin_gate_array    |<----------------+   |wr,rd
 +------^-------+    |  N x spin_gate       |                     |
        | en         |  (torus wiring)      +-- m[N] -->+---------v------+
        +------------+                      |           |  result_fifo   |--> res_data
                     +----------------------+           |  N x DEPTH     |
                                                        +----------------+
```

| Module | Role |
|---|---|
| `hassa_pkg` | Widths, hyperparameter struct `hyper_t`, graph-topology functions |
| `spin_gate` | One p-bit: multiplexers, adder, saturating counter, sign, two registers |
| `spin_gate_array` | N spin-gates wired on a torus (4 or 8 neighbours) |
| `xorshift_rng` | One noise bit per spin per cycle |
| `bias_weight_regs` | 4-bit signed `h` per spin and `J` per edge, with a write port |
| `hassa_controller` | Temperature schedule, run sequencing, FIFO write/read, stall |
| `result_fifo` | Block-RAM FIFO of N-bit spin vectors |
| `hassa_top` | The processor: all of the above |

Defaults: 800 spins on a 20 x 40 torus with 4 neighbours and 1,600 weight
registers. The result FIFO is 16,384 x 800 bits, about 13.1 Mbit. This matches
the build for the G11-class problems. Setting `TOPO = TOPO_KING8` gives the
8-neighbour build for a King's-graph problem, with 3,200 weight registers.

## The spin-gate (p-bit)

Spins and noise use the bit-stream convention: logic 1 means +1 and logic 0
means -1. On every enabled cycle, spin *i* computes

```
I      = h_i + sum_k (m_k ? +J_ik : -J_ik) + (r_i ? +n_rnd : -n_rnd) + Itanh_i
Itanh_i <= I0-1   if I >= I0
           -I0    if I <  -I0
           I      otherwise
m_i    <= (Itanh_i >= 0)            -- uses the Itanh value before this edge
```

The saturating counter with bounds `[-I0, I0-1]` is the stochastic-computing
approximation of `tanh`. It is a finite-state machine with `2*I0` states, and
the spin is its upper half. A larger `I0` means a deeper counter. The spin then
needs a stronger and more persistent input to flip, which is how "cooling"
works here.

**Two register stages.** The counter output is registered (`itanh`). Its sign
goes through a second register to give `m`. The counter feeds back from the
first register, while the neighbours see the second one. So a spin's
neighbours see its sign one cycle later than its own counter does. This
pipeline is part of the architecture, and the controller accounts for it when
it tags which vectors to store (below). `en` low freezes both registers. `clr`
resets the counter to 0 and the spin to +1.

**Multiplexer polarity.** The update equation adds `J_ij * m_j`, so
`m_j = +1` (logic 1) selects `+J_ij`. That is what this RTL does. The published
block diagram labels the multiplexer the other way round: input 0 is `J`,
input 1 is `-J`. Read literally, that would flip the sign of every coupling.
The equation was taken as authoritative. If you need the other convention,
negate the weights when you load them.

Internal width: `ST_W = 12` bits signed. That is enough for `I0` up to 255 plus
8 neighbours of weight -8 and the largest noise magnitude, with no overflow
before saturation.

## Temperature schedule and what gets stored

The controller generates `I0` with a shift instead of a divider:
`I0(t + tau) = I0(t) << beta`, clamped to `I0max`. One **iteration** runs

```
I0min for tau cycles, I0min<<beta for tau cycles, ..., I0max for tau cycles
```

and then the next iteration starts again at `I0min`. Spin states carry over
from one iteration to the next. The run length is counted in whole iterations
(`mshot` per trial, `trials` trials), never in raw cycles, so the last
iteration always reaches `I0max`.

With the reference hyperparameters:

| n_rnd | I0min | I0max | tau | beta | mshot | trial |
|---|---|---|---|---|---|---|
| 2 | 1 | 32 | 100 | 1 | 150 | 100 |

`I0` takes the values 1, 2, 4, 8, 16, 32, so an iteration is 6 x 100 = 600
cycles. A trial is 150 iterations, which is 90,000 cycles or 0.9 ms at
100 MHz. It stores 150 x 100 = 15,000 vectors, 12 Mbit in all. Storing every
cycle would take 72 Mbit.

**Write alignment.** A vector sampled at `I0max` reaches the `m` register two
enabled cycles after the counter was updated with that `I0`. The controller
therefore delays an "at I0max" tag through two stages that advance with `en`,
in step with the spin-gate registers. The FIFO write strobe is `en & tag2`. It
captures the `m` vector currently in the array, at the same edge that
overwrites it. Exactly `tau` vectors are stored per iteration: the last `tau`
counter states of the cold step, in order. After the last iteration of a trial
the controller runs two drain cycles to flush these writes. It then clears the
array for one cycle and starts the next trial. A trial of `S` temperature steps
therefore occupies `1 + mshot*S*tau + 2` busy cycles, plus any stall cycles.

**Back-pressure.** If the FIFO is full when a write is due, the controller
holds `en` low (`stall`). The array, the noise generator and the schedule
freeze together, so a stall changes neither the results nor their order. It
only delays them. At the reference settings one trial fits in the FIFO, so a
trial never stalls if the host empties the FIFO between trials. The
equivalent store-everything design would have to pause every 28 iterations.

## Graph wiring and weight storage

The connections are fixed when the array is built, as they are in the
published hardware. Spin *i* sits at row `i / COLS`, column `i % COLS` of a
torus. Neighbour *k* is a fixed grid offset:

| k | 4-neighbour (`TOPO_TORUS4`) | 8-neighbour (`TOPO_KING8`) |
|---|---|---|
| 0 | right | right |
| 1 | down | down |
| 2 | left | down-right |
| 3 | up | down-left |
| 4..7 | | left, up, up-left, up-right |

Each edge has one weight register, shared by both spins it joins. Spin *i*
owns its first `DEG/2` directions, and the others are the mirror images owned
by the neighbour. So edge `i*DEG/2 + k` is spin *i*'s edge in direction *k*.
This gives N*DEG/2 registers: 1,600 or 3,200 for 800 spins, the published
register counts. Neighbour and edge indices are computed at elaboration time
by `nbr_index()` and `edge_index()` in `hassa_pkg`, so there is no table to
load.

**Loading a problem** (`cfg_we`, `cfg_addr`, `cfg_wdata`, one 4-bit signed
value per clock):

* addresses `0 .. N-1`: bias `h[addr]`
* addresses `N .. N+E-1`: weight of edge `addr - N`

For MAX-CUT with edge weights `w_ij`, load `J_ij = -w_ij` and `h_i = 0`. The
cut of a stored vector `s` is the sum of `w_ij` over the edges with
`s_i != s_j`.

## Running it

1. Hold `rst_n` low, then release it. All registers clear and the noise lanes
   are seeded from `SEED`.
2. Write `h` and `J` through the configuration port.
3. Drive `hp` (a `hyper_t` struct) and pulse `start` for one cycle while
   `busy` is low.
4. While `res_count != 0`, pulse `res_req`. The vector appears on `res_data`
   with `res_valid` on the next clock. Vectors come out in the order they were
   produced: trial by trial, iteration by iteration, cycle by cycle.
5. `done` pulses for one cycle after the last trial, and `busy` falls with it.

`tau`, `mshot` and `trials` of 0 behave as 1. `beta` should be at least 1
unless `I0min >= I0max` (with `beta = 0` and `I0min < I0max` the temperature
never rises and the iteration never ends). `I0` must be at least 1.

`iter_idx`, `trial_idx`, `stall` and the live `spins` vector are provided for
observation.

## Noise generator

`xorshift_rng` builds `ceil(N/32)` Marsaglia xorshift32 lanes
(`x ^= x<<13; x ^= x>>17; x ^= x<<5`). Lane *l* is seeded with
`SEED + l*0x9E3779B9`. Their states are concatenated to give the N noise bits,
and all lanes step once per enabled cycle. The published design specifies an
XOR-shift generator that is as wide as the spin array. The lane structure, the
shift triple and the seeding are choices of this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against
a reference written independently in the testbench and prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_spin_gate` | 20,000 random cycles (random `I0`, weights, noise, enable, clear) against an integer model; hits both saturation limits |
| `tb_spin_gate_array` | 4 x 5 torus and 4 x 5 King's graph, random symmetric weights, full spin vector against a network model every cycle |
| `tb_xorshift_rng` | 100-bit generator against the recurrence, hold on `en` low, bit balance |
| `tb_bias_weight_regs` | reset, address map, ignored out-of-range writes, write timing |
| `tb_result_fifo` | random traffic against a queue, registered read, full/empty/count |
| `tb_hassa_controller` | `I0` per enabled cycle against the schedule, 600- and 500-cycle iterations, shift-by-2 with clamping, write alignment, stall under random back-pressure, clear and done counts |
| `tb_hassa_top` | small MAX-CUT problem, 2 trials, 16-entry FIFO read slowly: every stored vector against a bit-exact model of the whole processor; busy-cycle count; each mechanism (temperature step, iteration, trial, stall, FIFO full, read) must occur |
| `tb_hassa_top_full` | default build (800 spins, 16,384-entry FIFO), reference hyperparameters, one trial: all 15,000 stored vectors against the model, 90,003 busy cycles, no stall, best and average cut of a random +-1 800-vertex toroidal MAX-CUT instance >= 500 |
| `tb_hassa_top_trials` | default build, three back-to-back trials at the reference hyperparameters, host draining the FIFO during the run: all 45,000 vectors against the model, no stall, 3 x 90,003 busy cycles |
| `tb_hassa_top_king` | 8-neighbour build (`TOPO_KING8`, 800 spins, 3,200 weights), King's-graph +-1 MAX-CUT instance, one trial at the reference hyperparameters: all 15,000 vectors against the model, no stall, cuts >= 700 |

In the full-size 4-neighbour run the best stored cut was 592, and the average over all
15,000 stored vectors was about 590. A random partition of that graph cuts
about 0. In the 8-neighbour run the best cut was 786 and the average about 783.
Both instances are random and generated by the testbenches. They are not the
published benchmark graphs, so these cut values cannot be compared with
published ones.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/hassa_pkg.sv tb/tb_hassa_top_full.sv --top-module tb_hassa_top_full
./obj_dir/Vtb_hassa_top_full
```

Verilator finds the other modules by file name in `rtl/`. The full-size test
builds in about 20 s and simulates in under 10 s.

## Where this RTL departs from, or adds to, the published design

* **Host link.** The published board talks to a PC over a UART. Its protocol
  (framing, command set, how the 800-bit vectors are serialized) is not
  described, so it is not included. The top exposes the parallel ports such a
  link would drive: configuration writes, the hyperparameter struct,
  start/done and the FIFO read port.
* **Multiplexer polarity** follows the update equation, not the diagram's
  labels (see above).
* **Register after the sign.** Written as equations, the p-bit update lets
  neighbours see the sign of the counter state of the same cycle. The
  published circuit has a register after the sign function as well, which
  adds one cycle of delay between a counter and its neighbours. This RTL
  builds the circuit. Removing that register would change the stored vectors.
  The controller's two-stage write tag would then have to become one stage.
* **Graph shape.** The grid dimensions (20 x 40) and the edge numbering are
  choices of this RTL. Only the vertex count, the neighbour count and the
  weight-register count are published. The torus wrap-around follows from the
  published edge counts. If a target problem is a torus of another shape,
  change `ROWS`/`COLS`. A graph that is not a torus needs a different
  `nbr_index()`.
* **Own choices where the description is silent:** register widths;
  clear-to-zero at the start of each trial; the two-stage store tag and the
  drain cycles; clamping `I0` at `I0max`; the stall on a full FIFO; the
  registered FIFO read; the configuration address map; the noise-generator
  lanes and seeds.
* **Not modelled:** FPGA-specific mapping (block-RAM primitives, the 100 MHz
  timing closure) and the published LUT/FF/BRAM counts.
