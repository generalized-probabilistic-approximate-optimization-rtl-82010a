# A p-bit sampler with on-chip annealing

This is synthesizable SystemVerilog for the probabilistic computer ("p-computer") that runs the
sampling half of the Probabilistic Approximate Optimization Algorithm (PAOA), in the form that
algorithm is given in *Generalized Probabilistic Approximate Optimization Algorithm*
(Abdelrahman, Chowdhury, Morone, Camsari).

PAOA has two loops. In the outer loop a host computer proposes an annealing schedule, a list of
inverse temperatures β₁…β_p. In the inner loop a sampler runs that schedule many times on an Ising
problem, and the host scores the schedule by the mean energy of the final states. A
derivative-free optimiser then adjusts the schedule. This RTL is the inner loop. It holds a problem
(couplings J and biases h on a 3D cubic lattice) and a schedule. It then runs a batch of
independent annealing experiments entirely on chip and keeps the final state of every experiment
in block memory for the host to read. Between the host's write of the schedule and its read of
the samples, the host takes no part.

At the default size the design holds 10 independent replicas of a periodic 6×6×6 lattice, for
2160 p-bits in all. Every p-bit is updated once per Monte Carlo sweep (MCS). A schedule may have
up to 15 layers. The sample memory holds 10⁴ experiments of all 10 replicas, that is 10⁵ samples.

## The p-bit

Each lattice site i is a binary stochastic neuron with a state m_i ∈ {0, 1}. When it updates, it
draws

    m_i = 1  if  tanh(β · I_i) > r,  r uniform in [-1, 1)
    I_i = Σ_j J_ij m_j + h_i          (sum over the 6 lattice neighbours)

so P(m_i = 1) = (1 + tanh βI_i)/2. The hardware for one site is three blocks in a row:

* **synapse** (`synapse.sv`): one 2:1 multiplexer per neighbour passes J_ij when m_j = 1 and 0
  when m_j = 0, and an adder adds the bias. Since the states are 0/1, this is not the ±1-spin
  local field of the Ising model.
* **multiplier** (`dsp_mult.sv`): β · I_i at full precision. On an FPGA this is one DSP slice.
* **neuron** (`bsn.sv`): a tanh lookup table (`tanh_lut.sv`), a xoshiro128+ generator
  (`xoshiro128p.sv`) and a comparator.

### Loading an Ising problem

Because the synapse sums only the neighbours whose state is 1, an Ising problem
E(s) = −Σ_{i<j} J_ij s_i s_j − Σ_i h_i s_i with spins s = 2m − 1 has to be loaded in transformed
form:

    J'_ij = 2 J_ij
    h'_i  = h_i − Σ_j J_ij

With these values the synapse output Σ_j J'_ij m_j + h'_i equals the Ising field Σ_j J_ij s_j + h_i
exactly. A ±1 spin glass therefore becomes J' = ±2 and |h'| ≤ 6. The host does this mapping, and
all testbenches use it.

### Number formats

| quantity | format | range / resolution |
|---|---|---|
| β, J', h' | s{4}{5}: sign, 4 integer bits, 5 fraction bits (10 bits) | [−16, 16) in steps of 1/32 |
| I_i | 13 bits, 5 fraction bits | the sum of 7 terms cannot overflow |
| β·I_i | 23 bits, 10 fraction bits | exact |
| tanh table address | β·I rounded down to 1/32 and clipped to [−8, 8) | 512 entries |
| tanh value, random number r | signed 16-bit fractions (Q1.15) | r is the top 16 bits of the xoshiro output |

The s{4}{5} format for β and J is the original design's. The other widths are this design's
choices. The table holds round(32767 · tanh(k/32)) for k = −256…255 and is computed during
elaboration, so no data file is needed. Because the address is clipped at ±8, where tanh is within
10⁻⁶ of ±1, clipping changes no probability that 16-bit random numbers can resolve. A saturated
entry 32767 still loses to one random value in 65536, so a p-bit is never fully deterministic.

## Chromatic sweeps

Gibbs sampling is valid only if coupled p-bits do not update at the same moment. The 3D cubic
lattice with even L is bipartite. Colour 0 is the sites with x+y+z even and colour 1 the others,
and no two sites of one colour are coupled. So a whole colour can update in the same cycle.
`colour_sequencer.sv` enables colour 0 in one cycle and colour 1 in the next, so one sweep of all
2160 p-bits takes two clock cycles. Each p-bit's generator steps only on its colour's cycles.

The original machine gives each colour its own phase-shifted 15 MHz clock, which is about one sweep
per 15 MHz period. Here there is one clock and a per-colour enable. With a 30 MHz clock this
design sweeps at the same rate. At that rate, 10⁴ experiments of a 5-layer schedule with 720
sweeps per layer, plus the one-sweep β = 0 layer, take 7.2·10⁷ cycles, or 2.40 s. For 10 and 15
layers the times are 4.80 s and 7.20 s. The original machine reports 2.46, 4.90 and 7.36 s,
including the host's overhead.

Sites are numbered n = x + L·y + L²·z. The boundaries are periodic. Site n stores the couplings of
its +x, +y and +z bonds (`weight_memory.sv`), and reads its −x coupling from the −x neighbour's +x
bond, and so on. J is therefore symmetric by construction. All replicas read the same couplings.

## One experiment, one batch

`annealing_unit.sv` produces the β seen by every p-bit. A layer index selects one of P_MAX+1
inputs of a multiplexer. Input 0 is the constant β = 0 and inputs 1…P_MAX are the schedule
registers. An MCS counter counts finished sweeps. After `mcs_per_layer` sweeps the layer index
advances, except in layer 0, which always lasts a single sweep. After layer p the index returns
to 0. A single experiment is therefore:

    layer 0 : β = 0     for 1 sweep                (p-bits become uniformly random)
    layer 1 : β = β_1   for mcs_per_layer sweeps
    ...
    layer p : β = β_p   for mcs_per_layer sweeps   → exp_done in the cycle of the last sweep

Every experiment starts from random states, produced by the β = 0 layer, so the experiments are
independent. One sweep is enough: at β = 0 every p-bit is a fair coin whatever its neighbours
do, so after one sweep the state is exactly uniform and independent of the previous experiment.
A longer β = 0 layer would only waste time. With it, an experiment takes p·mcs_per_layer + 1
sweeps.

`host_regs.sv` runs a batch. A *start* command restarts the annealing unit at layer 0 and clears
the sample write pointer. The machine then runs `num_runs` experiments back to back. In the cycle
after each `exp_done`, the states of all replicas (2160 bits) are written to one entry of
`sample_bram.sv`. That write captures the states before the first update of the next
experiment takes effect, so the entry holds the final states. After the last experiment `busy` falls and the p-bits stop. The host can also:

* clear the global *enable* bit, which freezes every p-bit, the colour phase and both counters.
  Setting it again resumes exactly where the machine stopped.
* issue a *snapshot*, which writes the current states to the next entry.

In cycles: a batch of R experiments with p layers takes exactly 2·R·(p·mcs_per_layer + 1) cycles
while enabled. The end-to-end testbenches check this.

## Host register map

The bus has a 24-bit address, 32-bit data, a one-cycle write strobe `host_we`, and a read strobe
`host_re`. Read data appear on `host_rdata` one cycle after `host_re`, marked by `host_rvalid`. The
address is {region[2:0], offset[20:0]}:

| region | offset | access | content |
|---|---|---|---|
| 0 CTRL | 0 | W | bit0 enable, bit1 start (pulse), bit2 snapshot (pulse) |
| | 0 | R | bit0 enable, bit1 busy |
| | 1 | RW | number of layers p (reset: P_MAX) |
| | 2 | RW | sweeps per layer (reset: 720) |
| | 3 | RW | experiments per batch (reset: 1, at most RUNS_MAX) |
| | 4 | R | samples written since start |
| | 5 | R | {REPLICAS, L, P_MAX, 32-bit words per sample}, one byte each |
| 1 SCHED | k = 1…P_MAX | W | β_k, s{4}{5} in bits 9:0 |
| 2 JBOND | {site, dir[1:0]} | W | J' of the bond from site to its +x (0), +y (1) or +z (2) neighbour |
| 3 HBIAS | site | W | h' of the site |
| 4 SAMPLE | {entry, word[6:0]} | R | 32 bits of a sample, bit b of word w = p-bit 32w+b; p-bit r·216+n is site n of replica r |

Write the schedule and the problem only while the machine is disabled or idle. The registers
accept writes at any time.

## Files

| file | block |
|---|---|
| `rtl/paoa_pkg.sv` | fixed-point types, widths, register map |
| `rtl/pcomputer_top.sv` | top: host registers, colour sequencer, annealing unit, weights, replicas, sample memory |
| `rtl/host_regs.sv` | bus decoding, enable/start/snapshot, batch control |
| `rtl/annealing_unit.sv` | schedule registers, β multiplexer, MCS and layer counters |
| `rtl/colour_sequencer.sv` | two-colour update enables, sweep tick |
| `rtl/weight_memory.sv` | J' and h' registers shared by all replicas |
| `rtl/spin_lattice.sv` | one replica: L³ sites wired as a periodic lattice |
| `rtl/synapse.sv`, `rtl/dsp_mult.sv`, `rtl/bsn.sv` | the three stages of a site |
| `rtl/tanh_lut.sv`, `rtl/xoshiro128p.sv` | activation table and random-number generator |
| `rtl/sample_bram.sv` | sample memory, 10⁴ × 2160 bits, 32-bit read port |

Top parameters: `L` = 6, `REPLICAS` = 10, `P_MAX` = 15, `RUNS_MAX` = 10000, and `MCS_W` = 16 for
the width of the sweep counter. `L` must be even. The xoshiro seed of each p-bit is a splitmix64
hash of its replica and site numbers, so no two generators are alike.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if it
hangs. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/paoa_pkg.sv tb/tb_pcomputer_top.sv \
              --top-module tb_pcomputer_top -o sim
    ./obj_dir/sim

Use the same command for any other testbench, replacing both names. The testbenches are:

* `tb_xoshiro128p`, `tb_tanh_lut`, `tb_synapse`, `tb_dsp_mult`: compared against known values or an
  independent integer model.
* `tb_bsn`: measures P(m = 1) for 11 inputs and compares it with (1 + tanh x)/2.
* `tb_colour_sequencer`, `tb_annealing_unit`: cycle-by-cycle models. This includes the
  p·mcs_per_layer + 1 sweeps of an experiment, at 720 sweeps per layer as well.
* `tb_weight_memory`, `tb_sample_bram`, `tb_host_regs`: register, memory and bus behaviour.
* `tb_spin_lattice`: a 4×4×4 replica. It checks the β = 0 and β = 1 statistics. With β near its
  maximum the updates are deterministic, and there it checks every update against a model of the
  periodic lattice.
* `tb_pcomputer_top`: the whole machine at 4×4×4 with 2 replicas. It runs a batch with a freeze
  and a snapshot, reads the samples back over the bus, and checks the cycle count, that the
  states after the β = 0 layer are random, and that a planted spin glass (J_ij = g_i g_j, ground
  energy −3N) is solved.
* `tb_pcomputer_full`: the same flow at the default size. It runs the deepest schedule (15
  layers, 720 sweeps per layer) twice on a planted 6×6×6 instance; all 20 samples reach the
  ground energy −648. It runs in a few seconds.
* `tb_workload_spinglass`: a random ±1 glass on 6×6×6 at the default size. It compares the flat
  β = 2 schedule with linear cooling schedules of 5, 10 and 15 layers (720 sweeps per layer, 20
  samples each). The deepest schedule must give the lowest mean energy, and less than −1.5 per
  spin.

## What runs here and what does not

The machine holds the 3D spin-glass experiment it was built for: 216 spins, up to 15 layers, 720
sweeps per layer, 10⁵ samples per evaluation. It supports only the single global schedule (one β
for all p-bits). It does not support per-node or two-group schedules, and it has no all-to-all
connectivity. So the SK-model, Lévy-SK, majority-gate and full-adder studies, which were run in
software, cannot run on it. The outer loop is host software and is not part of this RTL: energy
evaluation, the optimiser, and the PCIe link with its driver. So is the clock generator.

## Where this RTL departs from, or adds to, the original design

* One system clock with colour enables replaces the phase-shifted colour clocks. A sweep takes 2
  cycles.
* The state encoding is 0/1, and ±1 problems are loaded as J' = 2J, h' = h − ΣJ. This follows from
  the original's "J or zero" multiplexer. How the original machine handled the spin encoding is
  not stated.
* The xoshiro variant, the seeding, the random-number and tanh widths, and the table's range and
  depth are chosen here.
* Layer 0 (β = 0) lasts one sweep. The original does not state its length. With one sweep the
  computed batch times are 2.0–2.5 % below the reported ones; with a full-length layer they
  would be 17 % above.
* The β-select index runs 0…p and wraps, which gives p+1 multiplexer inputs with input 0 fixed at
  β = 0. The original figure labels the selecting counter "count (mod p)" and its caption
  calls the unit a p×1 multiplexer, but the figure draws the inputs 0, β₁…β_p. The RTL follows
  the drawn inputs.
* The storage of couplings (per-site +x/+y/+z bonds, one copy for all replicas), the host bus and
  its register map, the batch control, and the automatic write of a sample at the end of each
  experiment are this design's own. The write at the end of each experiment follows the
  published algorithm, which stores the states after every experiment. The host snapshot command
  follows the description of the host link.
* Periodic lattice boundaries and ±1 couplings are assumed. The original names neither the
  boundary condition nor the coupling distribution. Its reported ground energy of −360 for 216
  spins (−1.67 per spin) is above the roughly −1.78 per spin that a periodic ±1 glass of this
  size usually reaches, so it may have used another distribution or energy convention. The
  hardware does not care: any s{4}{5} couplings can be loaded.
* Reset clears all p-bits to 0, the schedule to 0 and the couplings to 0. The sample memory is not
  reset.
