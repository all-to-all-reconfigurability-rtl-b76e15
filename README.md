# A reconfigurable sparse p-bit Ising machine with 2- and 3-body interactions

Probabilistic bits (p-bits) sample the Boltzmann distribution of an Ising
energy. Each p-bit repeatedly looks at its neighbours, computes a local field

    I'_i = h_i + sum_j J2_ij s_j + sum_(j,k) J3_ijk s_j s_k          (s in {0,1})

and sets itself to 1 with probability 1/(1+exp(-I'_i)). If the interaction
graph is sparse, it can be coloured so that no two neighbours share a colour.
Every p-bit of one colour can then update at the same time without error, so
one full sweep of the network takes as many steps as there are colours (six
here), whatever the network size. That is where the speed comes from.

The price of sparsity is that the wiring is fixed to one problem. This design
gets reconfigurability back with a **master graph**. One set of p-bits holds
up to `N_INST` different sparse problem instances. Every p-bit has a
**neighbour multiplexer** and a **colour (clock) multiplexer**, both driven by
an **instance selector**. Switching instances rewires every p-bit and
reassigns its colour in one cycle. The p-bit's adder still has only as many
inputs as a sparse instance has neighbours (9 here), not as many as there are
p-bits.

The design holds `N_REPLICAS` copies of the network, the replicas of parallel
tempering. All copies follow the same instance and colour schedule. Each runs
at its own inverse temperature, which the host folds into the weights it
writes. After a block of sweeps the chip computes every replica's energy. The
host then reads states and energies, decides the replica exchanges, and
writes the exchanged states back.

The target workload is 3-regular 3-XORSAT (3R3X). Each clause `x_a ^ x_b ^ x_d
= b` is either quadratised (one auxiliary p-bit per clause, 2-body weights
only) or kept in its native cubic form (one p-bit per variable, one 3-body
weight per clause). Each p-bit has both kinds of synapse slots, so one build
runs both forms.

## Block diagram

```
                     host configuration writes (cfg_wr_t)
          +-------------------+-----------------------------+
          v                   v                             v
  +----------------+   +--------------+          +---------------------+
  | instance_tables|   | sweep_       |  run     |   phase_clock_gen   |
  |  neighbours,   |   | controller   |--------->|  6 one-hot colour   |
  |  pairs, colour |   | start/busy/  |<---------|  enables, sweep_tick|
  |  x N_INST      |   | done         |  tick    +---------------------+
  |  + selector    |   +--------------+                 | phase_en
  +----------------+          | energy_start            |
     | rows of the            v                         v
     | active instance  +-----------------------------------------------+
     +----------------->| replica 0 .. N_REPLICAS-1                     |
                        |   pbit 0 .. N_PBITS-1                         |
                        |     neighbor_mux x3 -> synapse_mac ->         |
                        |     sigmoid_lut -> (P > rnd) -> state         |
                        |     clock_mux picks the p-bit's colour enable |
                        |     xoshiro128ss advances on every update     |
                        |   energy_unit                                 |
                        +-----------------------------------------------+
                             states[r], energy[r] -> host
```

## The p-bit

`pbit.sv` is a single-cycle datapath. It is the same for every p-bit and
every replica.

1. **Neighbour multiplexers.** There are `K2` 2-body slots and `K3` 3-body
   slots. Each 3-body slot has two neighbours, a and b. Each slot reads one bit
   of the replica's state vector. The instance tables give the bit's index.
2. **Synapse (`synapse_mac.sv`).** No multipliers are needed because states
   are 0/1. A 2-body slot adds its weight when its neighbour is 1. A 3-body
   slot adds its weight when the AND of its two neighbours is 1. The bias is
   added last. The 2-body and 3-body partial sums are also output for the
   energy unit.
3. **Activation (`sigmoid_lut.sv`).** The field is saturated to [-8, 8) and
   truncated to steps of 1/16. It then addresses a 256 x 32-bit ROM holding
   `2^32 / (1+exp(-x))`. The ROM is computed at elaboration by a constant
   function in `pbit_pkg`. Why a sigmoid: with `m = 2s-1`, the binary field is
   twice the bipolar one. So `P(m=+1) = (1+tanh(beta I))/2` becomes
   `1/(1+exp(-beta I'))`.
4. **Comparator and PRNG.** The new state is `P > rnd`, an unsigned 32-bit
   compare. `rnd` comes from the p-bit's own xoshiro128** generator. The
   generator advances exactly when the p-bit updates.
5. **Clock multiplexer.** The p-bit updates only when the phase enable of its
   colour is high. The instance tables give the colour. Colour codes 6 and 7
   never fire: this parks p-bits that the active instance does not use.

Number format: weights and biases are signed s{6}{6} (13 bits, LSB = 2^-6).
The host writes them **already multiplied by the replica's beta**. The
accumulator is 18 bits, so 12 weights plus a bias cannot overflow.

## Colour phases and timing

`phase_clock_gen` steps through phases 0..5, one per system clock, while
`run` is high. Colour c updates in phase c. So a sweep takes 6 cycles, and
every p-bit of every replica updates exactly once in it. The published
system clocks each colour at 15 MHz, which corresponds here to a 90 MHz
system clock and a 66.67 ns sweep. Real phase-shifted clocks are replaced by
clock enables on one clock, which gives the same update order with ordinary
synchronous logic.

A p-bit of colour c reads its neighbours' states as registered at the end of
phase c-1. Because a proper colouring never makes two neighbours the same
colour, this is exact sequential Gibbs sampling in colour order. An
improper colouring still runs, but it no longer samples the Boltzmann
distribution. For 3-body terms the colouring must be *strong*: all three
spins of a clause must get different colours, which means colouring the
clique graph of the clauses.

`sweep_controller` handshake:

| cycle            | event                                                        |
|------------------|--------------------------------------------------------------|
| 0                | host pulses `start` with `n_sweeps` while `busy` is low        |
| 1 .. 6n          | `run` high, phases 0..5 repeat n times, `sweeps_done` counts   |
| 6n+1             | `energy_start` pulses (all replicas)                          |
| 6n+4             | `done` pulses, `busy` falls; `states`, `energy` are stable    |

With `n_sweeps = 0` the controller only measures energies (done after 4
cycles). A `start` while busy is a protocol error. Assertions catch it and
also any weight, state or instance write made while busy.

## Master graph storage and host programming

Everything is written through one port, `cfg` (`pbit_pkg::cfg_wr_t`). Each
write is one cycle and takes effect on the next edge.

| region        | index fields       | data                          | held in          |
|---------------|--------------------|-------------------------------|------------------|
| `CFG_NEIGH`   | inst, pbit, slot   | index of 2-body neighbour     | instance_tables  |
| `CFG_PAIR_J`  | inst, pbit, slot   | index of 3-body neighbour a   | instance_tables  |
| `CFG_PAIR_K`  | inst, pbit, slot   | index of 3-body neighbour b   | instance_tables  |
| `CFG_COLOR`   | inst, pbit         | colour 0..5 (6, 7 = parked)   | instance_tables  |
| `CFG_INST`    | –                  | instance number to activate   | instance_tables  |
| `CFG_J2`      | rep, pbit, slot    | beta * J2' (s{6}{6})          | pbit registers   |
| `CFG_J3`      | rep, pbit, slot    | beta * J3'                    | pbit registers   |
| `CFG_BIAS`    | rep, pbit          | beta * h'                     | pbit registers   |
| `CFG_STATE`   | rep, pbit          | state bit (initialisation, swaps) | pbit state   |

The instance tables are shared by all replicas. They are memories that are
not reset, so every entry of an instance must be written before it is
selected. Weights, biases and states reset to 0. Weights belong to one
instance at a time: when the host changes instance, it also rewrites the
weights. A slot that is not used should get weight 0. Its neighbour index is
then irrelevant.

**Converting an Ising problem.** A problem in bipolar form
`E = -sum J3 m m m - sum J2 m m - sum h m` becomes, under `m = 2s-1`:

    J3' = 8 J3      J2'_ij = 4 J2_ij - 4 sum_k J3_ijk
    h'_i = 2 h_i - 2 sum_j J2_ij + 2 sum_(j<k) J3_ijk

The host then multiplies each of these by beta. Every 2-body weight is
written at both of its p-bits, and every 3-body weight at all three. The
published conversion writes the last bias term as `sum_jk J3_ijk` with no
factor 2. That is the same thing if the sum runs over ordered pairs. The
test generator (`tb/xorsat_gen_pkg.sv`) follows the formula above.

**Energy.** `energy[r]` is `-sum_i s_i (6 h_i + 3 sum2_i + 2 sum3_i)` over
the replica's own β-scaled weights. With symmetric weights this is exactly
6·β·E_b in units of 2^-6, where E_b is the binary-form energy. E_b equals the
bipolar energy minus a constant of the instance, so energy differences, which
are all that replica exchange needs, are exact. For the exchange test the
host computes `E_r = energy[r] / (6 · 64 · beta_r)`. Because β-scaled weights
are rounded, different ground states of one instance can report energies a
few units apart. Compare with a tolerance well below one violated clause.

**A host loop**, as the workload testbench runs it:

1. Write the tables of all instances once.
2. Select an instance, write weights for every replica at its beta, and
   write random states.
3. Repeat: `start` with 100 sweeps, wait for `done`, and check every
   `energy[r]` against the known ground state. For alternating even/odd
   neighbour pairs, accept an exchange with probability
   `min(1, exp((beta_a - beta_b)(E_a - E_b)))`. Exchange by writing the two
   state vectors back swapped.

## Parameters

| parameter    | default | meaning / origin                                                      |
|--------------|---------|-----------------------------------------------------------------------|
| `N_PBITS`    | 112     | p-bits per replica; largest second-order size built on one FPGA in the published work |
| `N_REPLICAS` | 9       | replicas; the published 112-p-bit configuration used 9              |
| `N_INST`     | 100     | instances in the master graph (the 100 instances of a 3R3X size; the published FPGA held only 50 at n = 96 and 112) |
| `N_COLORS`   | 6       | colour phases; 3R3X instances need at most 6                         |
| `K2`         | 9       | 2-body slots; a 3R3X variable has 3 clauses x 3 neighbours when quadratised |
| `K3`         | 3       | 3-body slots; a spin is in at most 3 clauses (must be >= 1)          |
| `SEED`       | 0x12345678 | PRNG seed base; p-bit g gets a splitmix32 hash of SEED and g       |

Storage at the defaults: the instance tables have 100 x 112 x (9+3+3) 7-bit
indices plus colours, about 1.21 Mbit. The p-bits hold 1008 x 13 13-bit
weights (170 kbit) and 1008 x 128 PRNG state bits. One sweep of all 1008
p-bits takes 6 cycles.

Widening to other sizes is a parameter change. Instance indices are 8 bits
wide in `cfg_wr_t`, so at most 256 instances; replica fields are also 8 bits.

## What follows the published design and what does not

Follows it: the master graph idea; the neighbour and clock multiplexers
driven by an instance selector; graph-coloured parallel updates with 6
colours; the p-bit pipeline (weight muxes, AND-gated 3-body weight, sum, bias,
activation, comparator, PRNG per p-bit); s{6}{6} weights scaled by beta; a
32-bit activation table and 32-bit Xoshiro random numbers; replicas sharing
the colour schedule; 100 sweeps between exchanges; the sizes in the
parameter table; on-chip energy computation (reported there at about 56 ns;
here 2 cycles after `energy_start`).

This design's own choices:
- **Writable neighbour tables.** The published hardware hard-wires each
  p-bit's potential neighbours at synthesis and multiplexes only among them.
  Here each slot is a full N:1 multiplexer addressed from a table, which
  covers that case and can hold any sparse instance set.
- **One build for both orders.** The published work builds separate 2-body
  and 3-body designs. Here each p-bit carries both kinds of slot.
- **Colour enables** on one system clock instead of muxed phase-shifted
  clocks.
- **The activation is the logistic sigmoid.** The text calls the table a
  Heaviside function and the figures label it tanh. The sigmoid is what the
  binary update needs. The table's range and resolution (±8, 1/16) are my
  own choice.
- **xoshiro128\*\*** as the Xoshiro variant; seeds by splitmix32 hashing.
- **Host protocol.** The configuration record, the start/done handshake and
  the energy formula and scaling are all this design's.
- **Not on chip.** Replica exchange, the adaptive temperature search of APT
  (which picks the number of replicas and the beta ladder), and
  ground-state detection are host work here, as in the published system.

## Verification

All testbenches are self-checking and print one line
`TB_RESULT checks=N failures=M`.

| testbench              | what it establishes |
|------------------------|---------------------|
| `tb_xoshiro128ss`      | 2000 outputs equal a separately written xoshiro128** model; hold and reseed |
| `tb_sigmoid_lut`       | every field step in [-12, 12] against `1/(1+exp(-x))`, saturation, monotonicity |
| `tb_synapse_mac`       | random weights and spins, extreme values; AND gating of 3-body terms |
| `tb_neighbor_mux`, `tb_clock_mux` | random / exhaustive selection including out-of-range codes |
| `tb_pbit`              | update sequence bit-exact against the reference; holds off-colour; state writes; P(s=1) at I' = 1 is 0.731 ± 0.02 over 8000 updates |
| `tb_phase_clock_gen`, `tb_sweep_controller` | phase order, one tick per 6 cycles, exact run length and `done` latency 6n+4 |
| `tb_instance_tables`   | table contents per instance, selector range check |
| `tb_energy_unit`       | formula and the 2-cycle latency |
| `tb_replica`           | 12-p-bit cubic instance, 200 sweeps, bit-exact against the reference; writes for other replicas ignored |
| `tb_pcomputer_top`     | 24 p-bits x 3 replicas x 4 instances: quadratised and cubic instances, instance switches, energy-only runs, state swaps, parked p-bits; every state and energy bit-exact against the reference model after every block |
| `tb_pcomputer_full`    | the same end-to-end test at the default size (112 x 9 x 100), 100 sweeps per block |
| `tb_xorsat_apt`        | workload: a planted 32-variable 3R3X instance solved by parallel tempering in both forms (64 p-bits quadratised, 32 cubic), 5 replicas, 100 sweeps per exchange; found ground states satisfy every clause |

The reference model (`tb/pc_ref_pkg.sv`) reimplements the generator, the
activation and the colour-ordered update schedule independently of the RTL.
It does share two definitions with the RTL: the seed hash and the table
quantisation. The workload generator (`tb/xorsat_gen_pkg.sv`) builds 3-regular
instances with a planted solution. It uses the quadratisation gadget
`E_c = sum m_i m_j - 2P m_x sum m_i - P sum m_i + 2 m_x` (P = clause sign).
That gadget was derived for these tests; the published gadget weights are
not given.

Typical results for the 32-variable workload: the cubic form reaches a
ground state within about 10–20 exchange attempts (1000–2000 sweeps). The
quadratised form needs roughly 60–500. The cubic form's advantage is a
constant factor, which is the qualitative effect the published results
report.

Running with plain Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/pbit_pkg.sv tb/pc_ref_pkg.sv tb/xorsat_gen_pkg.sv tb/tb_pcomputer_top.sv \
    --top-module tb_pcomputer_top -Mdir obj && ./obj/Vtb_pcomputer_top
```

Replace the testbench name to run any other. The full-size test takes about
a minute to build and seconds to run.

## Limits

- No statistical equivalence test against a software sampler beyond the
  single-p-bit probability check and the workload runs. Bit-exactness holds
  only against the reference model, which implements the same arithmetic.
- Energies rely on symmetric weights. An asymmetric program is not detected.
- Each instance table is one memory with a word per instance (all p-bits'
  rows packed together), one field-wide write and one combinational read of
  the selected word. At the defaults that is about 1.2 Mbit. An FPGA build
  would map it to distributed RAM, add a register stage after the read, or
  replace it with the hard-wired neighbour sets of the published design.
