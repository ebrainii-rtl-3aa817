# A BCPNN cortex accelerator in SystemVerilog

This is RTL for the logic die of a Brain Computation Unit (BCU). The BCU is a 3D-stacked ASIC
that runs a human-scale Bayesian Confidence Propagation Neural Network (BCPNN) in real time.
The main difficulty of the workload is memory, not arithmetic:

- Each hypercolumn unit (HCU) owns a matrix of 10,000 rows by 100 columns of synaptic cells.
  Each cell is 192 bits, so one HCU holds 192 Mb.
- Every millisecond, each HCU updates one matrix row for every spike that reaches it.
- When one of its 100 minicolumns (MCUs) fires, the HCU also updates a whole column.

The design therefore puts the synapses in DRAM stacked directly above the logic. Four HCUs share one
DRAM vault, and the controller stores the matrix so that rows and columns are both cheap to fetch.
All state is brought up to date lazily, only when it is touched.

## Hierarchy

```
bcu                        32 H-Cubes, spike input tree, spike output tree
 ├─ spike_in_tree          1 -> 128 pipelined binary tree
 ├─ spike_out_tree         128 -> 1 binary tree with round-robin merging
 └─ hcube  (x32)           one DRAM vault and the logic under it
     ├─ ms_timer           1 ms tick (200,000 cycles at 200 MHz)
     ├─ dram_rr_scheduler  round robin among the 4 HCUs
     ├─ asmc               memory controller, row-merge address mapping
     └─ hcu_partition (x4) one HCU
         ├─ delay_queue    144 spikes, counted down per ms
         ├─ active_queue   36 spikes ready for a row update
         ├─ control_fsm    per-ms sequencer, ping-pong buffer management
         ├─ update_fsm     register file, two FPU sets, winner-take-all
         │   └─ cell_update (x2)  one FPU set: 3 mul, 2 add, 2 exp, 1 log, 1 div, 1 cmp
         │       └─ fpu_op (x10)  behavioural single-precision operator
         ├─ sram_1r1w (x3) two ping-pong buffers (200 x 192 b), j-vector SRAM (100 x 160 b)
         └─ fanout_unit    1 fired MCU -> 100 outgoing spikes
```

The package `ebrain_pkg` holds the shared types:

- the 80-bit spike: projection 6, source MCU 8, source HCU 21, delay 10, destination row 14 and
  destination HCU 21 bits;
- the 192-bit cell `{Zi2, Zj2, Eij, Pij, Tij, Wij}`;
- the i-vector entry `{Zi, Ei, Pi, Ti}`, one per row, stored in DRAM;
- the j-vector entry `{Zj, Ej, Pj, bj, epsc}`, one per column, kept on chip;
- the DRAM request words.

## One millisecond of an HCU

Each HCU sees the same rhythm every millisecond. At the tick, its `control_fsm` runs three kinds of
job, in this order:

1. **Periodic update.** The 100 j-vector entries are decayed and their support is computed as
   bias plus the weights received this ms. The largest support above the threshold wins, and that
   MCU fires.
2. **Column update (only after a firing).** The fan-out unit emits 100 spikes. The 10,000 cells of
   the fired column are updated in 100 fragments of 100 cells. Each fragment also needs the i-vector
   entries of its 100 rows.
3. **Row updates.** There is one per spike in the active queue. A row update fetches the 100 cells
   of the row and its i-vector entry. It updates the entry first, then the cells, and adds each new
   weight to the support of its column.

Row updates and column-fragment updates use two ping-pong buffers. While one buffer is being
computed, the other is written back to DRAM or refilled from it. A row is not fetched while the
other buffer still holds the same row unwritten.

A tick that comes while the previous millisecond is still busy is held and counted in `overruns`.
`last_ms_cycles` reports how long the last millisecond took.

Spikes arrive through `delay_queue`. They mature when their delay (in ms) has counted down, and
then move to `active_queue`. If more than 36 spikes are pending, the rest are dropped and counted.

### Lazy cell update

Every cell carries the time `Tij` of its last update. `cell_update` brings the cell to the current
time in one pass:

- it decays the traces with `exp(-k * dt)`;
- it adds the new spike (`inc_i` for a row update, `inc_j` for a column update);
- it computes the weight `Wij = wgain * log((Pij + eps^2) / ((Pi + eps)(Pj + eps)))`.

The rate constants are inputs (`cell_const_t`), with their negations precomputed so that each
exponent costs one multiply. The i-vector entry goes through the same engine, with a second
constant set (`icc`) in which the j terms are zero.

The 10 operators of a set run on a fixed 15-step schedule for a cell and 7 steps for a j-vector
entry. Two sets work side by side, on two cells at a time.

### Cycle budget

These counts are from simulation of the RTL:

| job | cycles |
|---|---|
| periodic update | 702 |
| row update | 1,121 |
| column fragment | 1,204 |
| worst-case ms: 36 rows + 100 fragments + periodic | about 161,000 of 200,000 |

The DRAM transfer of a job overlaps the computation of the other buffer. It therefore adds time only
when the shared vault is the bottleneck.

## Row-merge storage in the vault

If each matrix row were stored in one DRAM row, a column update would open 10,000 DRAM rows.
`asmc` instead uses row-merge mapping with X = 10. It groups the rows in tens and cuts each row
into ten blocks of ten cells. Block b of the ten rows of a group forms one DRAM row of 100 cells:

```
DRAM row  m = (i / 10) * 10 + j / 10
column    c = (i % 10) * 10 + j % 10
```

A matrix row then costs 10 DRAM activations, and a 100-cell column fragment also costs 10.

Consecutive DRAM rows of an HCU rotate over four banks:

```
bank = (h / 2) * 4 + m % 4
row  = (h % 2) * 2500 + m / 4
```

HCUs 0 and 1 use banks 0–3, and HCUs 2 and 3 use banks 4–7. The vault has eight layers with one
bank each.

The i-vector of HCU h is stored in the other bank group, starting at bank row 5000:

```
bank = ((h / 2) ^ 1) * 4 + (h % 2) * 2 + (i / 100) % 2
row  = 5000 + (i / 100) / 2
```

The controller keeps pages closed. Each DRAM row is handled as ACT, tRCD, one RD or WR per cell,
(tWR,) PRE, tRP. One 192-bit cell per 200 MHz cycle stands for the vault channel's two bursts of
4 × 48 bits at 400 MHz. The tRCD, tRP and tWR values are placeholders of three cycles each.

## Spike trees

The 128 HCUs of a BCU connect to the outside through two binary trees, with a register at every
node:

- **Input tree.** The input tree routes on the destination HCU's low seven bits, most significant
  bit first. HCU numbers of a BCU must therefore be 128-aligned. It has no back-pressure and a
  latency of 8 cycles.
- **Output tree.** At each node, the output tree merges its two children in round-robin order. A
  node takes a spike only when it is empty. The root therefore carries one spike every two cycles,
  about 100 times what 128 HCUs firing once per ms each need.

## Where this departs from the source design

- **Floating point.** `fpu_op` is a behavioural model: it computes in double precision and rounds to
  single. Synthesis needs real FP32 units in its place. The operator mix per set follows the
  source design; the step schedule is this design's.
- **Design choices.** These parts are this design's own:
  - the periodic j-vector arithmetic and the threshold winner-take-all;
  - the fan-out destination rule (next 100 HCUs, row = source number, delay 1–7 ms);
  - the column fragment size (100);
  - the buffer state machine and the DRAM job protocol;
  - the i-vector placement;
  - the DRAM timings.
- **Not built.** The DRAM dies, the TSV PHY, power gating and the wake-up FSM, the network between
  BCUs, clocks and pads are absent. The vault channels and spike ports are brought out at the top.
- **Sizes.** Only the human-scale configuration is built (10,000 × 100 cells, 4 HCUs per H-Cube). The
  rodent-scale mapping of 16 small HCUs per H-Cube is not supported.
- **Unused signals.** Lint reports a few status signals (queue occupancy, busy flags) as unused.
  They are kept for observation.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/ebrain_pkg.sv tb/tb_hcube.sv \
          --top-module tb_hcube -o sim && obj_dir/sim
```

The testbenches that exercise more than one block are these:

- **`tb_hcu_partition` and `tb_hcube`** run against `tb/dram_vault_model.sv`. This is a sparse
  behavioural vault that also checks DRAM command timing. A cell never written reads as fresh data
  (Pij = 0.01).
- **`tb_bcu`** is the end-to-end test. It builds a reduced BCU (2 H-Cubes, 30,000-cycle ms, fan-out 4)
  and feeds its output back to its input. It counts each mechanism, and fails if one never
  happened:
  - tree delivery;
  - delay-queue maturing;
  - row update;
  - firing;
  - fan-out;
  - column update;
  - output-tree stall;
  - round-robin wait;
  - active-queue drop;
  - overrun.
- **`tb_bcu_full`** runs the BCU with every parameter at its default: 128 HCUs, 32 vaults and
  200,000 cycles per ms. It drives one worst-case millisecond: 36 spikes to one HCU, and every HCU
  fires. The C++ build of this model takes about half an hour, and the run takes about 12 minutes.
