# A probabilistic Ising machine built from 250 magnetic tunnel junctions

An Ising problem asks for the spin vector s (each s_i = +1 or -1) that minimises

    E(s) = - sum_{i<j} J_ij s_i s_j - sum_i h_i s_i .

Many hard optimisation problems map onto this form, for example Max-Cut or integer factorisation written as a multiplier circuit. A probabilistic Ising machine solves it by Gibbs sampling. Each spin is a *p-bit*. It is drawn at random to be +1 with probability sigmoid(I_i), where

    I_i = beta * (h_i + sum_j J_ij s_j)

is computed from the current state of the other spins. An annealing schedule then raises the inverse temperature beta until the state freezes into a low-energy configuration.

Here the random draw is physical. Each p-bit is a spin-transfer-torque MTJ in series with an NMOS transistor:

- A negative supply pulse puts the MTJ into its high-resistance antiparallel (AP) state every time.
- A positive pulse then switches it to the parallel (P) state with a probability that follows a sigmoid of the transistor's gate voltage V_in.
- Reading the mid-node voltage V_out against a threshold gives the new spin.

The board has 16 processing elements (PEs) of 16 such cells, 250 of them working. It also has:

- sixteen 16-channel DACs for the V_in of every cell;
- one 16-channel bipolar DAC for the V_dd shared by the 16 cells of each PE;
- sixteen 16-channel ADCs for the V_out of every cell.

This RTL is the digital side, meant for an FPGA. It holds the problem and the state of every replica, computes each p-bit's input, turns it into a DAC code, sequences the pulses over SPI, reads the results back, keeps the energies and runs the annealing algorithms.

## One step of the machine

Everything is organised around the *step*: one new random value from every cell that takes part. `pim_seq` runs each step in this order:

1. **Reset.** All V_in codes go to zero and every PE's V_dd goes negative (`vdd_neg_code`, -1 V by default). This is held for `t_reset` cycles.
2. **Zero bias and compute.** V_dd goes to 0 V. Meanwhile `field_engine` computes h_i + sum_j J_ij s_j for every active cell, and `pbit_drive` turns the result into V_in codes.
3. **Load V_in.** The 16 V_in DACs receive their codes. V_dd is still 0, so nothing switches yet.
4. **Perturb.** V_dd goes positive (+1 V by default) and is held for `t_perturb` cycles (1000, i.e. 10 us at 100 MHz). Each AP cell may now switch to P.
5. **Read.** The 16 ADCs sample V_out while V_dd is still positive. At zero bias V_out would be 0 in both states. `vth_compare` then applies each cell's threshold: V_out > V_th means +1, so a P cell (low resistance, high V_out) reads as +1.
6. **Update.** `energy_track` updates every replica's energy from the flips, and `spin_state` stores the new spins.

The sequencer then waits until `step_period` cycles have passed since the step began. The default of 8000 cycles at a 100 MHz clock gives a fixed step rate of 12.5 kHz. With 250 cells that is 3.125 M spin flips per second.

With the default SPI clock dividers a step needs about 5,800 cycles:

| Part of the step | Cycles |
|---|---|
| Each of the four DAC loads (reset V_in, zero V_dd, V_in codes, perturb V_dd) | 817 |
| Reading 17 ADC words | 1,140 |
| Perturb hold | 1,000 |
| Reset hold | 100 |
| Energy update, one cell per cycle | 257 |

If a step does not fit in `step_period`, the next one starts at once and the step is counted in the overrun counter. Nothing is lost; the rate simply drops.

The digital-side period is a register, so the machine can be run slower or faster than 12.5 kHz. A much shorter period needs faster SPI clocks (`DAC_HALF_DIV`, `ADC_HALF_DIV`).

## Cells, replicas and slots

A single MTJ can produce the random bit for *any* spin, as long as it is given the right input. So the mapping from physical cells to logical spins is a table, not wiring. Each of the 256 cell positions has a map word `{en, rep[7:0], slot[3:0]}`:

- **en** says whether the cell is used. Broken positions are simply disabled; the prototype has 250 working cells.
- **rep** is the replica whose state this cell updates. A replica is one complete copy of the N-spin problem; up to 256 replicas are held in `spin_state` as an N_REP x N_MAX bit matrix.
- **slot** picks which of the up to 16 spins of the current step this cell updates.

The *update schedule* (`update_sched`) lists, for each step of a sweep, the spin in each of the 16 slots. This gives the two update schemes:

- **Sequential.** One spin per step (slot 0 only). Every cell is its own replica, so 250 independent replicas each update one spin per step. A sweep over N spins takes N steps.
- **Cluster parallel.** The spins are partitioned into colour classes (independent sets: no coupling inside a class), and up to 16 spins of one colour are updated in the same step. A replica then spans 16 cells, one per slot, and a sweep takes one step per colour, or more when a colour has more than 16 spins. Gibbs sampling stays correct because no two coupled spins change together.

The colouring itself is a graph problem solved by the host (a greedy colouring is good enough); the hardware only executes the table.

## The input of a p-bit

For each active cell m in replica k, updating spin i, `field_engine` computes the local field

    f_m = h_i + sum_{j != i} J_ij s_{k,j} .

It streams one row of J per slot, one column per clock cycle, and every one of the 256 cells adds or subtracts that J_ij according to its own replica's s_j. A step's fields are ready N+2 cycles after the start, whatever the number of replicas.

`pbit_drive` then forms

    I_m = beta * f_m                                        (SA)
    I_m = beta_rep(k) * f_m                                 (PT, per-replica temperature)
    I_m = beta * f_m + J_T(n) * (s_{k-1,i} + s_{k+1,i})     (SQA)

and converts I into a DAC code with the cell's own calibration:

    code = clamp(mu_m + (gain_m * I_m) >> 16),  clamped to 0..65535.

Every device has a slightly different switching curve. After characterisation the host writes, for each cell:

- `mu`, the code at which that cell switches half the time;
- `gain`, codes per unit of I in Q8.8, so that the cell's switching probability becomes the standard sigmoid(I).

With the behavioural cell model used in the testbenches (probability = sigmoid(128.8/V * (V_in - V_50)), 0-2.5 V DAC range), gain = 2.5 V / 65536 codes → 1/128.8 V per unit, i.e. about 203.5 codes, Q8.8 value 52096.

beta, J_T and gain are unsigned Q8.8. J_ij (16 bits), h_i (24 bits) and the fields (32 bits) are signed integers.

## Annealing algorithms

`anneal_sched` counts sweeps n = 0 .. Z-1. It provides:

- a linear beta ramp, beta = beta0 + n * beta_step, saturating;
- J_T(n) read from a table the host fills.

The SQA transverse coupling is a log-tanh function of n. Computing it in logic is not worth the area, so it is a table.

- **SA (replicated simulated annealing).** Every replica runs on its own. At the end `energy_track` scans all valid replicas and reports the one with the lowest energy.
- **SQA (simulated quantum annealing).** Replicas form rings of 16: replicas 16g .. 16g+15, with replica 16g+15 next to replica 16g. Each spin feels its two ring neighbours' copies of the same spin through J_T(n), which grows during the anneal and pulls the replicas together.
- **PT (parallel tempering).** Each ring of 16 replicas has a 16-entry beta ladder. After every sweep `pt_swap` compares neighbouring temperatures from cold to hot. If the colder replica has the higher energy, the two exchange temperatures. The rule is deterministic: an unfavourable exchange is never made. The result equals exchanging the states.

## Energy bookkeeping

Energies are never recomputed from scratch. Every replica starts in the all -1 state with energy 0, and energies are kept *relative to that state*. When a cell flips its spin, the replica's energy changes by

    dE = -(s_new - s_old) * f_m = -2 f_m  for -1 -> +1,  +2 f_m  for +1 -> -1,

using the same local field that drove the p-bit. `energy_track` applies the flips of a step one cell per cycle (257 cycles). In cluster mode the 16 updated spins of a replica are uncoupled, so their changes add exactly.

To get the absolute Ising energy, add E(all -1) = -sum_{i<j} J_ij + sum_i h_i.

## Board interface

`pim_top`'s pins are the FPGA's SPI lines:

- **V_in DACs.** `dac_*[15:0]` go to the V_in DACs of PEs 0..15. Each DAC gets 24-bit words `{0011, channel[3:0], code[15:0]}` ("write and update" that channel), MSB first, SPI mode 0. All 16 channels are rewritten on every load.
- **V_dd DAC.** `dac_*[16]` goes to the V_dd DAC. Its channel p is the supply of PE p. Codes are offset binary over ±2.5 V; the reset, zero and perturb codes are registers.
- **ADCs.** `adc_*[15:0]` go to the ADCs. Each read sends 17 manual-mode words, 16 bits each, selecting channels 0..15 with channel-id tagging on. The result of a word returns in the next word as `{id[3:0], sample[11:0]}`. A returned id that differs from the requested channel sets `adc_id_err`.

Cell m = 16p + c is channel c of V_in DAC p, ADC p and PE p.

Only the word lengths come from the published description: 24 bits to the DACs, 16 bits from the ADCs. The field layouts, command codes and SPI mode are the usual ones for that class of converter; check them against the actual parts before use.

## Host map

The host loads a problem and reads results through a simple memory-mapped port: a write strobe, a 24-bit address and 32-bit data. The region is `cfg_addr[23:20]`:

| region | contents | offset | data |
|---|---|---|---|
| 0 | registers | 0 mode (0 SA, 1 SQA, 2 PT), 1 N, 2 steps per sweep, 3 sweeps Z, 4 beta0, 5 beta_step, 6 t_reset, 7 t_perturb, 8 step_period, 9-11 V_dd reset/zero/perturb codes, 12 V_in zero code | value |
| 1 | h | i | signed h_i |
| 2 | cell map | cell m | {en, rep, slot} |
| 3 | calibration | cell m | {gain[31:16], mu[15:0]} |
| 4 | thresholds | cell m | V_th in ADC codes |
| 5 | schedule | {step, slot} | {valid, spin} |
| 6 | J_T table | sweep n | Q8.8 |
| 7 | PT ladder | temperature t | Q8.8 beta |
| 8 | J | {i, j} | signed J_ij |

The read port (`cfg_raddr`, combinational) gives:

- status in region 0: busy, best replica, best energy, step, sweep, overrun and exchange counters, current indices;
- replica energies in region 1;
- 32-bit words of any replica's spins in region 2.

`start` begins an anneal: spins are cleared to -1, energies to 0 and the PT ladder to identity. `done` pulses once the best replica is known.

## Sizes

| Parameter | Default | Note |
|---|---|---|
| cells | 256 positions (16 x 16) | 250 working on the prototype |
| N_MAX | 512 spins | the largest published problem, 24-bit factorisation, needs 444 |
| N_REP | 256 replicas | |
| SLOTS | 16 | spins per step in cluster mode |
| MAX_STEPS | 512 | steps per sweep |
| Z_MAX | 16384 | sweeps per anneal |

All of these are in `pim_pkg`. The J matrix is an N_MAX² x 16-bit memory with 16 read ports, one per slot. In an FPGA it would be a set of block RAMs, each bank holding a copy or a slice of J.

Max-Cut benchmarks of 100-200 nodes with 10,000 sweeps fit these sizes. Whether the coupling values of the large factorisation problems fit 16 bits depends on their encoding, which is not given here.

## How far to trust it, and where it departs

The following come from the published description of the machine:

- the step order (reset, zero bias during the matrix product, perturb, threshold read);
- the 12.5 kHz rate;
- the cell, DAC and ADC counts and the word lengths;
- sequential and colour-parallel updates with up to 16 spins per step;
- the linear beta ramp;
- the SQA input term and the ring of replicas;
- PT with exchanges after each sweep;
- choosing the best replica by its final energy.

The following are this design's own choices:

- the register map;
- the fixed-point formats;
- the incremental energy tracking;
- reading V_out during the perturb pulse;
- the overrun policy;
- the converters' command layouts;
- SQA and PT groups of exactly 16 replicas;
- the deterministic exchange rule. A Metropolis exchange, min(1, exp(-dbeta * dE)), is the usual alternative and is not built.

Three jobs stay with the host:

- characterising the devices, i.e. finding each cell's mu, gain and V_th;
- colouring the graph;
- computing J_T(n).

`mtj_pe_model` is a behavioural model of one PE for simulation, not logic. Its resistances, pulse thresholds and device spread are illustrative.

## Simulation

The testbenches are in `tb/`. Each prints `TB_RESULT checks=N failures=M`.

- Block testbenches exist for `spi_master`, `dac_ctrl`, `adc_ctrl`, `vth_compare`, `field_engine`, `pbit_drive`, `update_sched`, `anneal_sched`, `energy_track`, `pt_swap`, `spin_state`, `pim_seq` and `mtj_pe_model`. Each compares the block against values computed independently in the testbench, cycle counts included.
- `tb_pim_top` runs the whole machine at its default sizes. It builds a model of the board:
  - 16 V_in DAC models and a bipolar V_dd DAC model (`ad5767_model`);
  - 16 PE models with device-to-device spread;
  - 16 ADC models (`max11131_model`), all driven through the real SPI pins.

  It calibrates every cell from its model midpoint, disables six positions, and runs at the default 8000-cycle step period:
  - SA, sequential, 250 replicas on a random 8-spin spin glass;
  - PT and SQA on the same problem;
  - SA, cluster parallel, on a 32-spin antiferromagnetic ring;
  - a short run with a too-short step period.

  It checks that:
  - the exact ground state is found (by exhaustive search);
  - every replica's tracked energy equals the energy of its read-back spins;
  - the step counts and the step rate are right;
  - reset and perturb pulses, single-spin and multi-spin steps, SQA coupling, PT exchanges and overruns each actually occur.

Running it takes about 12 s with Verilator.

To build and run a testbench:

    verilator --binary --timing --assert -Irtl -Itb rtl/pim_pkg.sv tb/tb_pim_top.sv --top-module tb_pim_top
    ./obj_dir/Vtb_pim_top

Verilator is a two-state simulator, so every register that is read is reset or initialised.
