# An asynchronous p-computer: 800 ring-oscillator-clocked p-bits on a Chimera lattice

This is synthesizable SystemVerilog for a probabilistic Ising machine. It has 800
probabilistic bits (p-bits) coupled as a Chimera graph. It is meant to find low-energy
states of Ising problems such as planted spin glasses, using simulated annealing.

Its main idea is that **no global clock or schedule decides when a p-bit updates**. Each
p-bit is clocked by one of ten free-running ring oscillators, which run at ten different
frequencies between 5.6 and 16.7 MHz. The p-bits therefore update at their own rates and
with drifting phases. This mimics a network of stochastic magnetic tunnel junctions, where
every device flips on its own. A synchronous p-computer that does exact chromatic Gibbs
sampling has to make sure that coupled p-bits never update together. Here that is not
guaranteed: two coupled p-bits on different oscillators sometimes sample in the same
instant, or one samples while its neighbour is changing. These "collisions" make the
sampling inexact. The design accepts this in exchange for having no clock engineering at
all.

The architecture, the p-bit equation, the ring-oscillator construction, the clock
distribution rule and the annealing schedule follow a published FPGA design. Everything
the publication leaves open (number formats, LFSR polynomial, table form, load port,
reset behaviour, counter design) is this implementation's own choice. Those choices are
marked as such below and in each file's header.

## 1. The p-bit

Each p-bit i holds a state m_i = ±1. A 1 in the RTL means +1 and a 0 means −1. On every
rising edge of its clock the p-bit resamples

    I_i = h_i + Σ_j J_ij m_j                  (local field, combinational: synapse.sv)
    m_i = sgn( tanh(β·I_i) − r )              (activation: pbit.sv, tanh_lut.sv)

Here r is uniform in [−1, 1) and comes from the p-bit's own 32-bit LFSR. With this rule
P(m_i = +1) = (1 + tanh βI_i)/2, which is exactly Gibbs sampling of spin i given its
neighbours at inverse temperature β.

The datapath, with the formats from `pbit_pkg.sv`:

| signal | format | notes |
|---|---|---|
| J_ij, h_i | signed 10 bit, 8 fraction bits | covers the normalised range [−1, +1] |
| I_i | signed 13 bit, 8 fraction bits | 6 neighbours + bias, cannot overflow |
| β | unsigned 8 bit, 4 fraction bits | 0.5 … 7.0 in steps of 0.5 are exact |
| β·I | signed 21 bit, 12 fraction bits | full product, no rounding |
| tanh(β·I) | signed 12 bit, 10 fraction bits | from a 256-entry table |
| r | LFSR bits [31:21] as a signed 11-bit fraction | uniform on [−1, 1) |

The 10-bit weight width is the published one. How those bits split between integer and
fraction is chosen here.

The **tanh table** covers |β·I| from 0 to 8 in steps of 1/32. Larger arguments saturate.
Entry k is round(1024·tanh(k/32)), capped at 1023. The sign of the argument is applied
afterwards. The table is not stored as data: `pbit_pkg::make_tanh_table` computes it at
elaboration with integer arithmetic only. It evaluates e^(−2k/32) as a repeated Q30
product and then forms (1−e)/(1+e). This keeps it synthesizable and free of real numbers.

The **LFSR** is a Fibonacci register with polynomial x^32 + x^22 + x^2 + x + 1. It shifts
one bit per activation, and its seed is a hash of the p-bit index. Two consequences are
worth knowing. First, successive r values of one p-bit are shifted copies of each other,
so they are correlated even though each value is uniform. Second, a p-bit updates only
when its clock ticks and `run` is high.

## 2. Ring-oscillator clocks (`rosc.sv`)

A ring oscillator here is an odd ring of inverters. Each inverter is followed by a delay
made of one flip-flop on the 300 MHz master clock. This "registered inverter" makes the
stage delay long and regular, independent of routing. A single transition runs round the
ring, so

    f = f_clk / (2 · RING_SIZE · DELAY_FF)

Ring k of the top level has RING_SIZE = 9 + 2k:

| ROSC | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|---|
| ring size | 9 | 11 | 13 | 15 | 17 | 19 | 21 | 23 | 25 | 27 |
| f (MHz) | 16.67 | 13.64 | 11.54 | 10.00 | 8.82 | 7.89 | 7.14 | 6.52 | 6.00 | 5.56 |

The mean is 9.38 MHz. A p-bit therefore updates on average once every 32 master cycles.

Reset loads an alternating pattern so that exactly one edge circulates. A combinational
ring settles from any start, but a ring of registered inverters does not: from an all-zero
start it would toggle every master cycle. `DELAY_FF` is a parameter, as the "controllable
delay" of the original. The frequencies above assume one flip-flop per inverter.

Because every ring is built from master-clock flip-flops, the oscillators are
frequency-diverse but not truly independent of the master clock. Their relative phases
drift, since the periods 18, 22, …, 54 master cycles share few common factors. However,
coincidences between two oscillators happen at master-clock granularity. The
`freq_counter.sv` block counts rising edges of a selected oscillator over a gate of
`GATE_CYCLES` master cycles (default 30000, i.e. 100 µs), so the count reads directly in
10 kHz units.

## 3. Lattice, clock assignment and collisions (`chimera_array.sv`)

The lattice is a ROWS × COLS grid (10 × 10) of Chimera tiles. Each tile holds 8 spins
coupled as a complete bipartite K4,4. Spin index = (row·COLS + col)·8 + k:

* k = 0..3 is the *vertical* shore. A vertical spin also couples to spin k of the tiles
  above and below.
* k = 4..7 is the *horizontal* shore. A horizontal spin also couples to spin k of the
  tiles left and right.

Every spin therefore has six neighbour slots:

| slot | neighbour |
|---|---|
| 0..3 | the 4 spins of the opposite shore in the same tile |
| 4 | tile above (vertical) or to the left (horizontal) |
| 5 | tile below (vertical) or to the right (horizontal) |

Slots that fall off the edge of the lattice are disabled in the synapse. Which shore runs
along columns is chosen here; the source only draws the tiles.

Chimera is bipartite: partition = shore XOR ((row + col) mod 2). The clock rule from the
original is that no oscillator drives spins of both partitions, and that the clocks are
spread evenly. A shared clock would otherwise update coupled spins in lockstep every time.
Here partition 0 gets ROSC 0, 2, 4, 6, 8 (ring sizes 9 … 25) and partition 1 gets ROSC 1,
3, 5, 7, 9 (ring sizes 11 … 27). Within a partition the spins are dealt round-robin, 80 per
clock (`pbit_pkg::clock_of`). The exact deal is chosen here.

Coupled spins still sit on clocks of different frequencies. Their edges coincide now and
then, and both then sample each other's old state. Those coincidences are the collisions
described above. The 2 × 2-tile end-to-end test counts about 20,000 of them in six short
trials.

Clock-domain crossings are deliberate and unsynchronised:

* Neighbour states feed the combinational synapse straight from other domains. This is
  the asynchronous behaviour under study. A p-bit may capture a field that is settling,
  which is the "incomplete I_i" error the original design accepts.
* β and the weights are written from the master domain and change only at β steps or
  between trials.
* Only `run` passes a 2-flop synchroniser per oscillator domain, so that a trial starts
  and stops cleanly.

In an ASIC or FPGA flow, the ring outputs must be declared as generated clocks. The paths
between p-bits of different domains are false paths by intent.

## 4. Weights and bias (`coupling_mem.sv`)

All synapses read their weights in parallel, so J and h are registers, not RAM:
800 × (6 + 1) words of 10 bits. The host writes one word per cycle:

    cfg_addr = { p-bit index (10 bits), slot (3 bits) }   slot 0..5 = J to that neighbour, 6 = h

J is symmetric, and the host writes both J_ij (slot of j as seen from i) and J_ji. Reset
clears everything. Spins a problem does not use therefore stay uncoupled, which is how
smaller problems run on the full 800-spin machine (a k × k corner of tiles).

## 5. Annealing (`anneal_ctrl.sv`)

A start pulse runs one trial. β starts at 0.5 and rises linearly to 7.0 in steps of 0.5
(14 values). Each value is held for HOLD_CYCLES = 29984 master cycles. That is 937 sweeps
at the mean p-bit rate of 9.375 MHz (937 × 300/9.375 = 29984). A trial lasts 14 × 29984
cycles = 1.399 ms, the published annealing time of 1.4 ms. At the end `run` falls, the
p-bits freeze within two cycles of their own clocks, and `done` pulses. The host then reads
`m`. The source gives the schedule in sweeps. Timing it in master cycles is this design's
equivalent. Assertions in the module check that `done` is a one-cycle pulse that ends the
trial and that β stays within the schedule. The frequency counter likewise asserts a
one-cycle `valid` and a selected oscillator that exists.

## 6. Top level (`pcomputer_top.sv`)

| port | dir | width | use |
|---|---|---|---|
| clk, rst_n | in | 1 | 300 MHz master clock, asynchronous active-low reset |
| cfg_we, cfg_addr, cfg_wdata | in | 1, 13, 10 | weight/bias writes (section 4) |
| start | in | 1 | start a trial |
| busy, done | out | 1 | trial running, end-of-trial pulse |
| beta | out | 8 | current β (4 fraction bits) |
| m | out | 800 | spin states, 1 = +1 |
| fc_sel, fc_start | in | 4, 1 | choose an oscillator and start a measurement |
| fc_count, fc_valid | out | 16, 1 | rising edges in the gate, result strobe |
| rosc_clks | out | 10 | the oscillator outputs (observation) |

The main parameters are ROWS = COLS = 10, N_ROSC = 10, RING_BASE = 9, DELAY_FF = 1,
N_STEPS = 14, HOLD_CYCLES = 29984 and GATE_CYCLES = 30000. The master-clock source and the
host (instance generation, result collection) are outside this RTL.

## 7. The workload and what the simulations show

The design was evaluated with planted frustrated-loop Ising instances. Loops of length
4–8 are found by non-backtracking random walks on the lattice, with 0.4·n loops for n
spins. A random planted state s is drawn. Each loop adds s_a·s_b to its couplings, except
one coupling chosen at random, which gets the opposite sign. The couplings are then scaled
to [−1, +1]. The planted state is a ground state, so its energy is known.

Instances were built on k × k tiles for k = 2 … 10 (32 to 800 spins). The testbench
package `tb/planted_pkg.sv` generates such instances inside the simulation. It accepts a
loop if its length is in [l_min, l_max]. The source states this range once as inclusive
and once as "> l_min"; the inclusive reading is used.

With the default parameters and the full 1.4 ms schedule, one run of `planted_sizes_tb`
gave the following (energies are in integer coupling units, E = −Σ J_ij m_i m_j):

| spins | 32 | 72 | 128 | 200 | 288 | 392 | 512 | 648 | 800 |
|---|---|---|---|---|---|---|---|---|---|
| residual energy after one trial | 0 | 0 | 0 | 0 | 8 | 16 | 8 | 4 | 8 |
| planted energy | −38 | −80 | −140 | −216 | −306 | −430 | −526 | −694 | −864 |

Small problems reach the ground state in single trials. Large ones usually end a few
unsatisfied bonds above it. This is the qualitative trend of the published time-to-solution
curve. Measuring time-to-solution itself needs hundreds of trials per instance and was not
attempted in simulation.

## 8. Files and how to simulate

`rtl/` holds one unit per file:

* `pbit_pkg` holds the formats, the lattice, clock and seed functions, and the tanh table.
* `rosc`, `freq_counter`, `lfsr32`, `tanh_lut`, `synapse`, `pbit`, `coupling_mem`,
  `anneal_ctrl` and `chimera_array` are the blocks.
* `pcomputer_top` is the top level.

`tb/` holds one self-checking testbench per block (`<block>_tb.sv`), plus three more:

| testbench | what it runs |
|---|---|
| `pcomputer_top_tb` | end to end on 2 × 2 tiles with a short schedule. Planted instance, six trials. Checks oscillator frequencies, trial length, β sequence, freezing and energies. Counts every mechanism: oscillator edges, β steps, trials, collisions, frequency measurements, ground-state hits. |
| `pcomputer_full_tb` | one full trial at the default size and schedule |
| `planted_sizes_tb` | the nine problem sizes above |

`planted_pkg.sv` is the testbench-side instance generator. Every testbench prints
`TB_RESULT checks=N failures=M`.

With Verilator 5:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/pbit_pkg.sv tb/pcomputer_top_tb.sv --top-module pcomputer_top_tb -o sim
    ./obj_dir/sim

Approximate run times: `pcomputer_top_tb` takes under a second, the full-size trial about
11 s, and `planted_sizes_tb` about 2 minutes. The simulation uses two-state logic; all
state that is read is reset.

## 9. Departures and limits

* **Clock independence.** The ring oscillators here are master-clock shift registers, as
  in the original FPGA design. Their edges fall on master-clock edges, so collisions are
  exact coincidences rather than near-misses. Analogue jitter and frequency variation
  between devices are not modelled.
* **Choices not fixed by the source:**
  * the fixed-point split (8 fraction bits in J, 4 in β, 10 in tanh)
  * tanh by table at 1/32 resolution
  * the LFSR polynomial, seeds and which bits form r
  * the weight-load port and address map
  * which shore couples along rows or columns
  * which oscillators serve which partition
  * the `run` synchroniser
  * the frequency-counter design
  * reset values
* **Not included.** The synchronous, phase-shifted chromatic-Gibbs machine and the CPU
  Gibbs sampler served only as baselines and are not part of this design. Neither are the
  master-clock generator or the host software.
* **Synthesis.** The 800 parallel tanh tables and 56,000 weight flip-flops are what the
  architecture implies; an FPGA maps the tables to LUT ROMs. The full top is large for
  generic synthesis tools and takes long to elaborate.
