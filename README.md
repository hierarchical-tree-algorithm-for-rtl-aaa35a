# GRAPE-9 force chip with indirect memory addressing

Collisional N-body codes integrate every star with its own timestep (the Hermite
scheme), and GRAPE accelerators compute the forces for them. Earlier GRAPE chips could
only stream the *whole* particle memory through their force pipelines: every force was
a direct sum over all N particles. The GRAPE-9 card lets a Barnes-Hut tree replace most
of that sum. The host builds a tree every 1/64 time unit. It gives each group of nearby
particles an **interaction list**, which mixes single particles and tree nodes (nodes
are stored as pseudo-particles). The card then sums the force on a particle over its
group's list only.

The hardware idea is small. The lists are not stored as index arrays. Each list is a
short sequence of **runs**, each run a (start, count) pair naming consecutive records in
the card's DRAM. The host sorts the particles along a Peano–Hilbert curve and stores each
group's nodes together, so the runs are long and the lists fit in FPGA block RAM.
Hardware counters expand the runs into a stream of DRAM addresses. A predictor brings
each record to the current time. 14 force pipelines, each serving 4 i-particles in turn,
accumulate acceleration, jerk and potential for up to 56 i-particles at once.

The card is the one described by T. Fukushige and A. Kawai in "Hierarchical Tree
Algorithm for Collisional N-body Simulations on GRAPE"; below, "the paper" means that
description. This repository gives synthesizable SystemVerilog for the FPGA of one card, with a
self-checking testbench for every block. It also has an end-to-end testbench of the whole
chip at full size, and one that runs the six list sizes of the published timing table.

## Block map

```
 host ── PCIe ── interface_unit ──(start, first entry, entry count)──► indirect_memory_addressing_unit
                    │  ▲                                                 cell_counter ─► cell_index_memory
                    │  │ results                                             ▲ increment      │ (start, n)
                    │  │                                                     └── particle_index_counter
                    ▼  │                                                               │ addresses
             force_pipeline_array ◄── predictor_pipeline ◄── memory unit (DDR2, off chip) ◄┘
             (14 × force_pipeline,
              4 virtual slots each)
```

| Module | What it is |
|---|---|
| `grape9_fpga` | top: the FPGA of one card; the DDR2 memory unit and the PCIe endpoint are outside it |
| `interface_unit` | host word bus: loads records, lists and i-particles; starts the calculation; returns status and results |
| `indirect_memory_addressing_unit` | cell counter + cell-index memory + particle index counter |
| `cell_index_memory` | 98304 entries of (start 24 b, count 24 b), block RAM |
| `cell_counter` | walks the entries of one list |
| `particle_index_counter` | expands one entry into consecutive addresses |
| `predictor_pipeline` | Taylor prediction of x and v of each j-particle to the system time |
| `force_pipeline_array` | j-particle buffer with credits, the 4-slot sequencer and 14 pipelines |
| `force_pipeline` | one real pipeline: acceleration, jerk and potential on 4 virtual i-particles |
| `fp_pkg`, `grape9_pkg` | number format and arithmetic; sizes and record types |

## How a list becomes an address stream

The cell-index memory holds all interaction lists, one after the other. A list is
named by its first entry and its number of entries. For one force calculation the host
writes those two numbers and starts the chip.

* The **cell counter** loads them and reads the first entry. Each time the particle
  index counter reports *increment* (entry finished), it adds one and reads the next
  entry. It stops after the given number of entries.
* The **particle index counter** loads an entry (start, n). It offers the addresses
  start, start+1, … start+n−1 on a valid/ready port, one per accepted transfer. With the
  last one it pulses *increment*. An entry with n = 0 increments at once and produces
  nothing.

The block RAM read has a latency of one cycle, so every entry costs n + 2 cycles at the
counter. With addresses accepted every cycle, a list of entries n₁…n_k keeps the unit
busy for exactly Σ(nᵢ + 2) cycles. This is not the bottleneck: the pipelines take only
one j-particle every 4 cycles, and the buffer described below absorbs the gaps.

Sizes: the 98304 entries are the paper's figure for the Cyclone V 5CGXC9. At 48 bits an
entry, that is 4.7 Mbit of block RAM. Indices are 24 bits, enough for the 10 million
records that an 8 GB memory unit holds. Counts are 24 bits, so one entry can cover any
run. The two widths are this design's choice.

## The force pipelines and their 4 virtual slots

Each `force_pipeline` computes, for i-particle *i* and j-particle *j*,

```
dx = xj − xi,  dv = vj − vi,  r² = |dx|² + ε²,  rv = dx·dv
acc  += m dx / r³
jerk += m (dv − 3 (rv/r²) dx) / r³
pot  −= m / r
```

The pipeline has six stages: differences, then r² and rv, then 1/√r², then scale
factors, then the per-interaction terms, then accumulation. It accepts one interaction
per cycle. As on GRAPE-6, one real pipeline stands for four "virtual" ones. It holds
four i-particles (slots 0–3), and each j-particle is presented to it on four consecutive
cycles, one slot per cycle. The accumulator of a slot is therefore updated at most once
every 4 cycles, so the one-cycle read-modify-write of the accumulator never meets a
hazard.

`force_pipeline_array` presents the same j-particle to all 14 pipelines together:
14 × 4 = 56 i-particles (*n_pipe*) per calculation, and one j-particle every 4 cycles
whatever the number of i-particles loaded. This explains the main inefficiency that the
paper reports. With the tree, a calculation usually has only about 30 i-particles, yet
it takes as long as one with 56. In numbers, a list of N_int j-particles takes 4·N_int
cycles. At 98 MHz that is 4.08·10⁻⁸ s per j-particle, or 7.3·10⁻¹⁰ s per interaction
slot. The paper measures t_pipe = 7.6·10⁻¹⁰ s.

The i-particle index *i* (0–55) maps to pipeline i/4, slot i mod 4. Slots that were not
loaded still compute. Their results are not read.

A j-particle at exactly the i-particle's position with ε = 0 gives r² = 0. 1/√0 is
defined as 0 here, so such a pair adds nothing, and a group's own particles can stay in
its list. With ε > 0 the self-term adds −m/ε to the potential and nothing to the
acceleration or jerk, as a direct sum would. The host removes that term if it needs to.

## Keeping the pipelines fed: buffer and credits

The DRAM answers after an unknown, varying delay. The predictor adds 4 cycles. Neither
can stall. Between them and the pipelines sits a 16-entry j-particle buffer, guarded by
**credits**. The address generator may issue a DRAM read only while a credit is free
(`can_issue`). Each issued read takes one credit, and each j-particle taken out of the
buffer returns one. So the buffer can never overflow, and no stall signal runs back
through the predictor or the memory. If the memory answers faster than one record per
4 cycles, the credits run out and the address stream pauses. If it answers slower, the
buffer empties and the pipelines idle. The end-to-end testbench counts both cases. The
buffer, its depth and the credit scheme are this design's own: the paper does not say
how records travel from the DRAM to the pipelines.

The chip is busy while the addressing unit has entries left, while any credit is out,
while a j-particle is being presented, or while an interaction is still in a pipeline.
When `STATUS` reads 0, every result is final.

## Prediction

The memory unit holds one record per particle or tree node:

| field | meaning |
|---|---|
| x[3], v[3] | position and velocity at time t |
| a2[3] | a/2 (half the acceleration) |
| j6[3] | (da/dt)/6 |
| m, t | mass, time of the values |

With dt = t_sys − t, `predictor_pipeline` computes x + dt(v + dt(a2 + dt·j6)) and
v + dt(2·a2 + 3·dt·j6). It has four stages and takes one record per cycle. The
i-particles are predicted by the host, as in the paper. Storing a/2 and j/6 rather
than a and j saves two multiplications; the host pre-scales them when it writes the
record.

## Number format

All datapath values are 32-bit floats: 1 sign bit, an 8-bit exponent with bias 127,
and a 23-bit fraction with a hidden one, in the same layout as IEEE single precision.
The arithmetic is simpler than IEEE:

* a zero exponent means zero (no subnormals);
* there is no infinity or NaN; an overflowing result saturates at the largest value;
* every result is truncated towards zero;
* addition keeps three guard bits;
* 1/√x halves the exponent, then applies four Newton steps y ← y(3 − m y²)/2 to the
  mantissa. The steps start from the chord 1 − (m−1)/6 and use 31 fraction bits.

The functions live in `fp_pkg` and are combinational. The widths (`EXP_W`, `FRAC_W`)
are package parameters. The host data path and the testbench helpers assume 32-bit
words.

The paper says only that the pipelines are "GRAPE-6 compatible". GRAPE-6 kept positions
in 64-bit fixed point and accumulated in fixed point; none of that is in the paper, so
it is not reproduced here. With 23-bit fractions the results agree with double-precision
sums to about 10⁻⁵ of the sum of the term magnitudes. That is enough to check the
hardware, but it is coarser than a production Hermite code would want. Widening
`FRAC_W`, or moving positions to fixed point, is the first change to make for real use.

## Programming the chip

The host sees 32-bit words at word addresses. The region is `addr[31:28]`:

| region | address bits | contents |
|---|---|---|
| 0 control | `[3:0]` | 0 CMD (bit 0 = start), 1 CELL_START, 2 NUM_CELLS, 3 EPS2, 4 TSYS, 5 STATUS (bit 0 busy) |
| 1 i-particle | `[9:4]` index, `[3:0]` word | words 0–2 x, 3–5 v; committed on word 5 |
| 2 cell-index | `[17:1]` entry, `[0]` | 0 start, 1 count; committed on the count |
| 3 memory unit | `[27:4]` record index, `[3:0]` word | words 0–2 x, 3–5 v, 6–8 a2, 9–11 j6, 12 m, 13 t; committed on word 13 |
| 4 results | `[8:3]` index, `[2:0]` | 0–2 acceleration, 3–5 jerk, 6 potential |

One step of the host loop:

1. Every tree interval: write all records (particles and nodes) and all lists.
2. Write TSYS and EPS2.
3. Write the predicted x and v of up to 56 i-particles of one group.
4. Write CELL_START and NUM_CELLS for the group's list, then write 1 to CMD. A start
   also clears the accumulators. A start while busy is ignored.
5. Poll STATUS until bit 0 is 0, then read the results.

Writes take effect one cycle after the bus cycle. Reads return one cycle later, with
`host_rvalid`. The bus has no wait states. The memory unit's write port is assumed to
accept every write. The address map is this design's own.

## Interfaces of the top level

`grape9_fpga` has three groups of ports:

* **Host word bus:** `host_wr`, `host_rd`, `host_addr`, `host_wdata`, `host_rdata`,
  `host_rvalid`. A PCIe endpoint (not included) would drive it.
* **Memory-unit reads:** `mem_req_valid`/`mem_req_ready`/`mem_req_addr` (24-bit record
  index), and in-order read data `mem_rsp_valid`/`mem_rsp_data` (a 448-bit
  `jparticle_t`). Any latency is allowed. No backpressure is allowed on the data.
* **Memory-unit writes:** `mem_wr_en`/`mem_wr_addr`/`mem_wr_data`.

Reset is synchronous and active low. It clears control state only; RAM contents and data
registers are not reset.

Parameters (defaults are the paper's numbers where it gives one): `DEPTH` = 98304
cell-index entries, `NP` = 14 pipelines, `NV` = 4 virtual slots, `JBUF_DEPTH` = 16
(own choice). The register map assumes at most 64 i-particles and 2¹⁷ entries.

## How the published configurations map onto it

The paper's timing table gives, for N = 65536 and 262144 and opening angles 0.75, 0.5
and 0.3, average list lengths N_int of 5740 to 28168 and about 29–30 i-particles per
calculation. `tb_workload_table1` runs one calculation of each size on the full-size
chip and converts the cycle count into time per particle step on one card
(cycles / 98 MHz / n_i):

| N | θ | N_int | cycles | T_grape here | T_grape measured in the paper |
|---|---|---|---|---|---|
| 65536 | 0.75 | 5740 | 23 017 | 8.0·10⁻⁶ s | 8.5·10⁻⁶ s |
| 65536 | 0.5 | 11081 | 44 368 | 1.57·10⁻⁵ s | 1.6·10⁻⁵ s |
| 65536 | 0.3 | 22351 | 89 461 | 3.19·10⁻⁵ s | 3.3·10⁻⁵ s |
| 262144 | 0.75 | 6433 | 25 780 | 8.8·10⁻⁶ s | 9.2·10⁻⁶ s |
| 262144 | 0.5 | 12644 | 50 625 | 1.75·10⁻⁵ s | 1.8·10⁻⁵ s |
| 262144 | 0.3 | 28168 | 112 723 | 3.9·10⁻⁵ s | 4.0·10⁻⁵ s |

Each list is cut into runs of random length (276 to 1383 entries). Each call has n_i
rounded to 29 or 30 i-particles. The RTL is 2–6 % faster than the measurement. That is
expected: the cycle count has no PCIe, DRAM refresh or host overhead.

## Where this departs from the paper, and what is missing

Taken from the paper:

* the block structure;
* the cell-index memory of 98304 (start, count) entries;
* the cell counter / particle index counter pair, with *increment* fed back;
* 14 pipelines × 4 virtual pipelines;
* acceleration, jerk and potential with one softening length;
* tree nodes stored as pseudo-particles with the same record as particles;
* the host's sequence of steps.

This design's own choices:

* the number format and all widths;
* the record layout (a/2, j/6);
* the pipeline stage split;
* the j-particle buffer and the credits;
* the valid/ready address port;
* the host address map;
* clear-on-start and ignore-start-while-busy;
* the handling of r = 0.

Not built:

* the DDR2 SDRAM and its controller, the PCIe endpoint, the PCIe switch and the host.
  They are commercial parts or software. `tb/memory_unit_model.sv` is a behavioural
  stand-in for the memory unit, with random latency and random not-ready cycles.
* GRAPE-6 features that the paper does not mention, such as neighbour lists.
* multi-card operation. The paper splits the j-particles (j-parallel) or the groups
  (i-parallel) across cards, and the host adds the partial forces. Each card runs this
  same design unchanged.

The 98 MHz clock is the paper's figure for the FPGA. The RTL has not been
timing-analysed: its floating-point stages are single long combinational functions, and
a real implementation would split them further.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops
with `$finish`. The packages must come first on the command line. For example:

```
verilator --binary --timing --assert -Irtl \
  rtl/fp_pkg.sv rtl/grape9_pkg.sv tb/fp_ref_pkg.sv \
  rtl/force_pipeline.sv rtl/force_pipeline_array.sv rtl/predictor_pipeline.sv \
  rtl/cell_index_memory.sv rtl/cell_counter.sv rtl/particle_index_counter.sv \
  rtl/indirect_memory_addressing_unit.sv rtl/interface_unit.sv rtl/grape9_fpga.sv \
  tb/memory_unit_model.sv tb/tb_grape9_fpga.sv --top-module tb_grape9_fpga
./obj_dir/Vtb_grape9_fpga
```

| Testbench | What it shows |
|---|---|
| `tb_cell_index_memory` | random writes and reads across all 98304 entries; one-cycle read latency |
| `tb_cell_counter` | entry sequence and count, read timing, empty lists, restart |
| `tb_particle_index_counter` | address runs under random backpressure, increment timing, n = 0 and n = 1, runs across a power-of-two boundary, one address per cycle |
| `tb_indirect_memory_addressing_unit` | address streams of random lists against the table; exact Σ(n+2) busy time |
| `tb_predictor_pipeline` | predictions against double precision; 4-cycle latency |
| `tb_force_pipeline` | acceleration, jerk and potential of 4 slots against double precision; ε = 0 with a coincident particle; 6-cycle latency; clear |
| `tb_force_pipeline_array` | 40 of 56 slots; credit exhaustion and the exact 4-cycle rate; starvation with slow memory |
| `tb_interface_unit` | every region of the address map, the start rules and the read path |
| `tb_grape9_fpga` | full-size chip, four calculations (56, 29, 1 and 40 i-particles); every mechanism counted |
| `tb_workload_table1` | the six published list sizes at full size, with results and timing |

The two full-size testbenches run for a few seconds to a minute under Verilator.
