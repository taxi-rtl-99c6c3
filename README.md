# TAXI: a crossbar Ising macro for travelling-salesman sub-problems, in SystemVerilog

This RTL models the TAXI accelerator for the travelling salesman problem (TSP), published at DAC 2025. Big TSPs, up to tens of thousands of cities, are first broken into small clusters by hierarchical clustering on a host. Each cluster has at most 12 cities and is solved on its own by a small in-memory *Ising macro*. The macro keeps everything inside:

- the city-to-city weights;
- the current tour;
- the random source that lets the search escape local minima.

A chip therefore holds many macros that anneal independently, with no data moving between them. This repository gives the digital behaviour of one macro, cycle by cycle, and of a chip built from several macros. The analog parts of the original are replaced by their logic function:

- crossbar currents become integer counts;
- a winner-take-all circuit becomes an ArgMax;
- a current comparator becomes a threshold.

The one part that only exists as physics is the stochastic SOT-MRAM device. It is provided as a behavioural model.

## The problem, as the macro sees it

A tour of `n` cities is held as an `n x n` binary matrix `sigma[city][order]`, with exactly one 1 per column (order). The macro improves the tour one visiting order at a time. To re-decide which city should be visited at order `i`, only the cities at orders `i-1` and `i+1` matter. The best choice is the city closest to both of them.

Distances are stored inverted, so that "close" means "large". The host maps each distance to a small integer

    W_D(a,b) = round( D_min / D(a,b) * (2^B - 1) ),   W_D(a,a) = 0

where `D_min` is the smallest distance inside the cluster and `B` is the weight precision (4 bits by default). The macro then computes, for every candidate city `x`,

    D_x = sum over k of W_D(k,x) * (sigma[k][i-1] + sigma[k][i+1])

and picks a large `D_x`. Which city it picks depends on the random selection described below.

## The crossbar and its partitions

A macro is one crossbar of `N` rows (cities) by `N*(B+1)` columns, 12 x 60 at the defaults. It is split into `B+1` partitions of `N` columns each:

| partition | content | module |
|---|---|---|
| 0 (leftmost) | most significant bit of every `W_D(k,x)` (row `k`, column `x`) | `weight_xbar` |
| ... | ... | `weight_xbar` |
| B-1 | least significant bit | `weight_xbar` |
| B | spin storage: `sigma[city][order]` | `spin_storage` |

Every cell is one bit, a low- or high-resistance magnetic cell in the original. Here it is a flip-flop. The crossbar is used in two directions:

- **Superpose.** Columns `i-1` and `i+1` of the spin storage are driven. Each row returns the number of set cells it has there. `current_comparator_latch` turns "at least one" into a 1 and holds the resulting vector `v`, which marks the two neighbour cities.
- **Distance.** `v` is driven back onto the rows of the weight partitions. Column `x` of partition `p` returns `sum_k bit_p(W_D(k,x)) * v[k]`. `current_mirror` multiplies partition `p` by `2^(B-1-p)` and adds the partitions, which gives `D_x`.

All "currents" are unsigned integers in units of one cell current. Wire resistance, device ON/OFF ratio and other analog effects are not modelled.

## Random selection and the annealing schedule

Picking the largest `D_x` every time would be a greedy descent that gets stuck. Each city column has a stochastic unit: a SOT-MRAM device that is pulsed once per iteration with a write current `I_write`. It flips with a sigmoidal probability of that current. `stochastic_gate` lets through only the currents of the cities whose device flipped. If no device flipped, a NAND over all units opens every gate, and all candidates compete. `argmax_wta` then picks the largest current that got through.

`anneal_scheduler` lowers the randomness over time:

- it starts `I_write` at 420 uA, about 20 % flip probability;
- it lowers it by 50 nA after every iteration;
- it stops once it reaches 353 uA, about 1 %.

That is (420000 - 353000) / 50 = **1340 iterations**. Because the device curve is sigmoidal, the linear current ramp gives a fast drop in randomness early and a slow tail late.

`sot_rng_array` is the behavioural model of the devices. It uses

    P_sw(I) = 1 / (1 + exp(-(I - 448.9 uA) / 20.88 uA))

These two constants are fitted so that the curve passes through the two operating points above. The fitted curve is about 0 at 300 uA and about 1 at 650 uA, which matches the stochastic range of the device. The model draws fresh independent samples on every pulse. It uses `real` arithmetic and `$urandom`, so it is for simulation only.

## One iteration, cycle by cycle

One iteration re-decides one order. With a 1 ns clock its three phases take the circuit latencies reported for the macro: 3 ns, 4 ns and 2 ns. `ising_controller` produces these strobes:

| cycle | phase | what happens |
|---|---|---|
| 0-2 | superposition | `sup_act`: spin columns `i-1`, `i+1` driven; cycle 2 `latch_en` stores `v` |
| 3 | optimization | `rng_pulse`: SOT devices written with `I_write` |
| 4-5 | optimization | distance MAC, stochastic gate and ArgMax settle (combinational) |
| 6 | optimization | `opt_capture`: winner, old city of order `i` and the winner's old order registered |
| 7 | update | `upd_clr`: column(s) reset to 0 (high resistance) |
| 8 | update | `upd_wr`: one-hot column(s) written; `I_write` lowered; next order |

So one iteration takes **9 cycles**. A full run takes 1340 x 9 = **12,060 cycles**, 12.06 us at 1 GHz. `done` is visible 12,060 cycles after the cycle in which `start` was taken.

Orders are swept cyclically, one per iteration: 0, 1, ..., n-1, 0, ... So with 12 cities each order is revisited about every 12 iterations, and about 111 times per run.

## Keeping the tour a tour

This is the least obvious part of the design, and it goes beyond the source description, which only says that the optimised column is reset and then written with the ArgMax result. Written literally, that can put the same city at two orders and drop another city. This RTL adds two rules:

- **Swap (parameter `SWAP`, default 1).** If the winner `w` currently sits at order `j != i`, the city that held order `i` moves to order `j` in the same update. The spin storage therefore has a second reset/write port. The matrix stays a permutation. `SWAP = 0` gives the literal single-column write.
- **Candidate mask.** Cities at or beyond `n_cities`, the cluster size from 3 to N, never compete. In fixed-end mode, neither do the cities at the first and last order. The mask also decides what "no device flipped" means: only candidate units count.

The update rule stays greedy per order. It compares `D_x` at order `i` but does not account for what the swap does at order `j`. So a single run is not guaranteed to improve the tour. It usually does: in the testbenches the weight sum along the tours rises clearly in total. The coarse 4-bit `W_D` mapping also means a larger weight sum is not always a shorter Euclidean tour.

### Two tour modes

- `fix_ends = 0`: closed tour. Every order is optimised, and neighbours wrap around (order 0's predecessor is order n-1). This is used for the top level of the hierarchy.
- `fix_ends = 1`: open path. The first and last cities were chosen by the host and never move, and orders 1 to n-2 are optimised. This is used for every cluster below the top. The host picks, for each pair of clusters that follow each other in the upper-level tour, the closest pair of cities as exit and entry. Fixing them keeps the links between clusters short while the clusters are solved in parallel.

## The chip

`taxi_top` instantiates `NUM_MACROS` macros, 8 by default (a choice of this RTL; the source gives no count), each with its own `sot_rng_array`. One shared host write port programs them: `prog_macro` selects the macro, `w_*` writes one `W_D` value (all B bits), and `s_*` writes one spin of the initial tour. Each macro has its own `start`, `n_cities` and `fix_ends`, and reports `busy`, `done`, the iteration count and two event counters:

- iterations in which no unit flipped;
- iterations in which the tour changed.

`rd_macro`/`rd_order` -> `rd_city` reads the tours back. `rd_spin_col` gives the stored spins of that order, one bit per city; in a valid tour exactly one bit is set. Programming writes are ignored while a macro is busy.

The hierarchical flow stays on the host:

1. cluster the cities bottom-up, so that cluster centroids form the next level;
2. solve the top level as a closed tour;
3. fix entry and exit cities;
4. solve all clusters of a level in parallel, in rounds of `NUM_MACROS`;
5. concatenate the results.

`tb/tb_taxi_hier.sv` shows this on a 48-city instance.

## Files

| file | role |
|---|---|
| `rtl/taxi_pkg.sv` | default sizes, phase lengths, annealing constants, phase enum, width function |
| `rtl/spin_storage.sv` | spin partition: superpose read, column reset/write, host writes |
| `rtl/weight_xbar.sv` | B weight-bit partitions and their column sums |
| `rtl/current_comparator_latch.sv` | threshold and hold of the superposed vector |
| `rtl/current_mirror.sv` | `2^(b-1)` scaling and sum over partitions |
| `rtl/stochastic_gate.sv` | pass units with the "none flipped" NAND and candidate mask |
| `rtl/argmax_wta.sv` | winner-take-all, lowest index on ties |
| `rtl/anneal_scheduler.sv` | `I_write` ramp and end-of-run detection |
| `rtl/ising_controller.sv` | phase strobes and order sweep |
| `rtl/ising_macro.sv` | one macro: all of the above plus the swap logic |
| `rtl/sot_rng_array.sv` | behavioural model of the N stochastic SOT units |
| `rtl/taxi_top.sv` | chip of `NUM_MACROS` macros with host port |

Every module except `sot_rng_array` is synthesizable. `sot_rng_array` is for simulation only, so the chip top as a whole is too. A synthesizable chip would replace it with the real device or another random source driving `rng_sw`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 12 | cities per macro (maximum cluster size) |
| `B` | 4 | bits of `W_D` (weight partitions) |
| `T_SUP`, `T_OPT`, `T_UPD` | 3, 4, 2 | phase lengths in cycles (`T_OPT`, `T_UPD` >= 2) |
| `I_START_NA`, `I_STEP_NA`, `I_STOP_NA` | 420000, 50, 353000 | annealing ramp in nA |
| `SWAP` | 1 | keep the tour a permutation (see above) |
| `NUM_MACROS` | 8 | macros per chip |
| `THRESH` | 1 | comparator threshold in cell currents |

Widths follow from `N` and `B`. A distance current needs `clog2(N*(2^B-1)+1)` bits, 8 at the defaults. Other cluster sizes and precisions that the design was evaluated with (up to 20 cities; 2 and 3 bits) are parameter overrides.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=<n> failures=<n>`. With plain Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
      --top-module tb_ising_macro -y rtl -y tb +libext+.sv -Irtl \
      rtl/taxi_pkg.sv tb/tb_tsp_pkg.sv tb/tb_ising_macro.sv
    obj_dir/Vtb_ising_macro

Replace the testbench name to run another one. `--timescale` matters: the testbenches use `#0.1` to sample combinational outputs.

| testbench | what it shows |
|---|---|
| `tb_spin_storage` ... `tb_argmax_wta` | each block against an independent reference, with random stimulus |
| `tb_anneal_scheduler` | the exact 420 uA -> 353 uA ramp, 1340 iterations |
| `tb_ising_controller` | the 3/4/2-cycle strobe pattern, order sweep in both modes |
| `tb_sot_rng_array` | flip rates of about 20 %, 1 %, 0 and 1 at 420, 353, 300 and 650 uA |
| `tb_ising_macro` | default-size macro, 3 full runs. The testbench plays the random units and checks the spin storage against its own model of the algorithm after every iteration. It also checks the 9-cycle iteration and the `I_write` code. The checks live in `tb/ising_macro_checker.sv`, which takes `N`, `B` and `SWAP` as parameters. |
| `tb_ising_macro_configs` | the same checker on the other sizes the design was evaluated with: 14, 16, 18 and 20 cities at 4 bits; 3 and 2 bits at 12 cities; and `SWAP = 0`. This is the one testbench that overrides parameters. |
| `tb_taxi_top` | full-size chip: 8 macros in parallel (closed tours, fixed-end paths, 7 and 10 city clusters); timing, valid tours, and counts of every mechanism |
| `tb_taxi_hier` | two-level hierarchical solve of a 48-city instance, merged into one tour |

Except for `tb_ising_macro_configs`, all of them run at the default parameters. Each finishes in well under a minute.

## How far to trust it, and where it departs from the source

Taken from the published design:

- the crossbar partitioning, with the MSB leftmost and spin storage last;
- superpose, then distance MAC, then stochastic gating, then ArgMax, then column reset and write;
- the "none flipped, all pass" rule;
- the `2^(b-1)` partition gains;
- the 420 uA / 50 nA / 353 uA schedule;
- the 3/4/2 ns phase latencies;
- the 12-city, 4-bit main configuration;
- fixed first and last cities for sub-problems, and parallel macros.

Choices of this RTL, not given by the source:

- the 1 GHz clock;
- one order per iteration, swept cyclically;
- the comparator threshold;
- ArgMax ties going to the lowest index;
- the swap;
- the candidate mask and `n_cities`;
- the host port format;
- 8 macros per chip;
- reading the weight scale as `2^B - 1`;
- the fitted sigmoid of the SOT device;
- the D-latch written as an enabled register.

Not modelled:

- analog non-idealities and the winner current magnitude;
- power and energy;
- the SOT-MRAM cell circuit;
- the hierarchical clustering and its fixing step (host software);
- the memory hierarchy and data transfer around the macros.
