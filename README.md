# Short-range force accelerator with a multi-producer, single-consumer data flow

In molecular dynamics, most of each time step goes into the short-range
non-bonded forces. For every atom, the simulator sums the Lennard-Jones and
Coulomb forces from all atoms within a cutoff radius `rc`. A cell list keeps
this linear in the number of atoms. Space is cut into cubic cells about `rc`
wide, so the partners of an atom can only lie in the 3 x 3 x 3 block of cells
around its own "home" cell. Even so, most candidate pairs in that block are
too far apart. The cutoff sphere fills only (4/3)·π / 27 ≈ 15 % of the block,
so on average only about one candidate in seven needs a force evaluation.

That filter is what this design is built around. The distance test is cheap
and the force evaluation is expensive. If one distance calculator feeds one
force pipeline, the force pipeline sits idle most of the time, because its
producer emits a pair on only a fraction of the cycles. Here each force
pipeline is fed by **K distance calculators** whose irregular output streams
are joined by a **merging FIFO**. The distance calculators are small, so
copying them costs little, and the force pipeline receives close to one pair
per cycle. Each unit runs under its own local controller and talks to its
neighbours only through valid/ready streams and FIFOs. No global state
machine sequences them.

The RTL implements one FPGA's worth of the published configuration:
**two force pipelines, each fed by four distance calculators**
(`NUM_PE0 = 8`, `NUM_PE1 = 2`). All arithmetic is IEEE-754 single
precision.

## What one pass computes

For each atom *i*, summed over the atoms *j* in the 27 cells around *i*'s
cell with `0 < r² < rc²`, where `d = p_i − p_j` and `r = |d|`:

    F_i = Σ_j ( A / r^14  −  B / r^8  +  k · q_i · q_j / r^3 ) · d

`A`, `B` and `k` are run-time constants. `q` is the atom's charge. The first
two terms are the Lennard-Jones force and the last is the Coulomb force.
Bonded forces, the long-range part of the Coulomb force and the motion
update are left to the host.

## Block diagram (one of `NUM_PE1` copies)

```
            memory port c
                 |
     +-----------v-------------+    K pairs per cycle, one per lane
     | md_prefetch_stream      |---------+---------+---------+
     |  home banks, 2 nbr bufs |         |         |         |
     +-----------^-------------+   md_distance_calc (PE0) x K
                 | write-back            |   only pairs inside rc
     +-----------+-------------+   +-----v---------v---------v-----+
     | md_force_accum          |   | md_merge_fifo: round robin,   |
     |  one sum per home slot  |   | one pair per cycle into queue |
     +-----------^-------------+   +---------------+---------------+
                 |  pair force                     |
                 +------------ md_force_compute (PE1), 1 pair/cycle
```

`md_accelerator` instantiates `NUM_PE1` copies of this chain. It builds the
PE0s, PE1s and merge FIFOs in three `generate` loops, with
`K = NUM_PE0 / NUM_PE1`. Merge FIFO *i* joins PE0s `i*K … i*K+K−1` to PE1 *i*.
Each copy has its own memory port. Copy *c* takes the home cells whose linear
index is `c mod NUM_PE1`.

## The streaming order and the lanes

`md_prefetch_stream` runs the cell-list loop nest:

```
for each home cell of this copy:
    load its atoms into the home banks; clear the force sums
    for each of the 27 neighbor cells inside the grid:
        load its atoms into a free neighbor buffer (overlaps the stream below)
        for each group g of K home atoms:
            latch home atoms g*K .. g*K+K-1 into the K lanes
            for each neighbor atom j: one pair per lane, all lanes in one cycle
    wait until the pipelines are empty, write the K-lane sums back
```

The home-atom loop is spread across the lanes. Lane *k* always carries home
slot `g*K + k`, and the neighbor atom is broadcast to all lanes. The home
buffer is split into K banks (atom *i* in bank `i mod K`), so a whole group
is latched in one cycle. The lanes advance together. A pair is offered on the
lanes only in a cycle in which every lane with a valid home atom is ready, so
no lane runs ahead. When a group has fewer than K atoms, the unused lanes stay
idle.

A home slot index travels with every pair. This lets the force sums of up to
K home atoms interleave freely behind the merge. Because the sums are kept
per slot, order does not matter.

**Drain before write-back.** Pairs of one home cell may still be in the
distance calculators, the queue or the force pipeline when the last pair has
been sent. The streamer waits for the OR of all their `busy` flags to fall
before it reads the sums out. Only then is the next home cell loaded, and the
slots cleared.

**Memory layout** (word addresses, 128-bit words):

| region | word | contents |
|---|---|---|
| `cell_base + c` | cell `c = (cz·ny + cy)·nx + cx` | bits 31:0 first atom index, bits 63:32 atom count |
| `atom_base + i` | atom `i` (atoms sorted by cell) | x, y, z, q as fp32 (`atom_t`: x in bits 127:96, q in 31:0) |
| `force_base + i` | written by the accelerator | fx, fy, fz, 0 |

Memory ports use a valid/ready request handshake. Read data must come back in
request order, at most one word per cycle, and is always accepted.

## The processing elements

**Distance calculator (`md_distance_calc`)** has 4 stages and accepts one
pair per cycle: `d = home − nbr`, the squares, two adds, then the test
`r² < rc²`. It compares squared distances, so no square root is needed. A
pair with `r² = 0` (an atom against itself) is dropped too. A pair that fails
the test leaves no output, and the cycle is simply lost downstream. That is
the conditional output the merge exists to absorb.

**Merge FIFO (`md_merge_fifo`)** grants one valid input per cycle,
round-robin starting after the last input granted, and pushes its pair into a
16-entry queue. The force pipeline can use at most one pair per cycle, so one
push per cycle is enough. Inputs that are not granted hold their pair, which
stalls that distance calculator's pipeline. Through the lockstep lanes, it
also stalls the streamer. `contention` reports cycles with more than one
input offering.

**Force pipeline (`md_force_compute`)** has 14 stages and accepts one pair
per cycle:

| stage | work |
|---|---|
| 1 | `h = r²/2`, seed `y0 = 0x5f3759df − (bits(r²) >> 1)`, `q_i·q_j` |
| 2–7 | three Newton steps for `1/r`, 2 stages each: `t = h·y²`, then `y = y·(1.5 − t)` |
| 8–11 | `1/r²`, `k·q_i·q_j`, `1/r³`, `1/r⁴`, `1/r⁸`, `1/r⁶`, Coulomb term, `1/r¹⁴`, `B/r⁸` |
| 12–13 | `A/r¹⁴`, then the scalar sum |
| 14 | scalar × (dx, dy, dz) |

Three Newton steps bring `1/r` to single-precision accuracy. In the tests,
the pipeline's forces match a double-precision evaluation to within 2·10⁻⁵
of the summed term magnitudes.

**Force accumulator (`md_force_accum`)** keeps one (fx, fy, fz) per home slot
in a register array. An incoming force is read, added and written back in one
cycle, so forces to the same slot on consecutive cycles need no forwarding.

**Arithmetic (`md_pkg`)**: `fp_mul` and `fp_add` are combinational binary32
operators with round-to-nearest. Subnormals are flushed to zero, overflow goes
to infinity, and there is no NaN handling. The force model with `r` bounded
away from zero never reaches those cases.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_PE0` | 8 | distance calculators in the chip |
| `NUM_PE1` | 2 | force pipelines (copies). `K = NUM_PE0/NUM_PE1 = 4` |
| `MAX_ATOMS` | 256 | atom slots per cell in the home buffer, each neighbor buffer and the accumulator |
| `FIFO_DEPTH` | 16 | merge queue entries |
| `CELL_W` | 8 | bits per grid coordinate (up to 255 cells per axis) |

The published design space runs from 1 to 5 distance calculators per force
pipeline, and 4 was the best per unit of area. Any `NUM_PE0` that is a
multiple of `NUM_PE1` builds. A benchmark system of about 100,000 atoms in 700
cells averages about 143 atoms per cell, within `MAX_ATOMS`. A cell holding
more than `MAX_ATOMS` atoms is truncated and raises `stat_cell_overflow`.

## Using the top level

Hold `nx, ny, nz`, the three base addresses, `cutoff2` (= rc², fp32), `lj_a`,
`lj_b` and `k_coul` stable, and pulse `start` for one cycle. `done` rises once
both copies have written back all their home cells, and stays high until the
next `start`. Reset is asynchronous and active low. The `stat_*` outputs
pulse on the data-flow events: a dropped pair, merge contention, a streamer
stall, a produced pair force, a skipped out-of-grid neighbor cell, and a
full queue.

## Where this RTL goes beyond, or departs from, the published description

The published work names the blocks and fixes the topology, the duplication
factors, the force formula and the one-pair-per-cycle rate. The following are
choices made here:

- **Internals of the prefetch unit**: the memory layout, the banked home
  buffer, lockstep lanes, the drain-then-write-back order, and how home cells
  are shared between copies.
- **How prefetching works.** There are two neighbor buffers. A loader fills
  one with the next neighbor cell while the streamer sends pairs from the
  other, so a neighbor load is hidden behind the previous cell's stream.
  Loading the home cell and writing its sums back are not overlapped.
- **No periodic boundary.** Neighbor cells outside the grid are skipped.
  Minimum-image wrap-around is not implemented.
- **Self-pair exclusion by `r² = 0`**, no Newton's-third-law halving (every
  home atom sums over all 27 cells), and no per-atom-type A/B tables (A and B
  are global).
- **Arithmetic**: single precision, flush-to-zero, and a seed-plus-Newton
  reciprocal square root.
- **Merge policy**: round robin, one grant per cycle, with a 16-deep queue.
  Because the force pipeline never back-pressures (its sink, the accumulator,
  is always ready) and takes one pair per cycle, the queue never holds more
  than one pair. Stalls appear at the merge inputs instead. The queue is kept
  because the published architecture draws it, and because it decouples a
  consumer that could stall.
- **Platform**: the host processor, the platform's DRAM system and the HLS
  flow that generated the published PEs are not part of this RTL. The chip
  exposes plain memory ports, and the four-FPGA system would use four
  instances of `md_accelerator`.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog:

| testbench | what it checks |
|---|---|
| `md_distance_calc_tb` | cutoff decision, self-pair drop, values and order, latency 4, one pair/cycle, holding under backpressure |
| `md_merge_fifo_tb` | every item once, per-producer order, one grant per cycle, fair rotation (each of 4 inputs served 8 times in 32 loaded cycles), one item/cycle out, full queue stops grants |
| `md_force_compute_tb` | 1000 random pairs against double precision, latency 14, one pair/cycle, backpressure |
| `md_force_accum_tb` | 2000 adds with repeated slots against double-precision sums, clear |
| `md_prefetch_stream_tb` | exact set of streamed (home, neighbor) pairs, lane-to-slot mapping, this copy's share of cells, drain before write-back, truncation flag |
| `md_accelerator_tb` | default-size chip on a 3×3×2 cell system of about 200 atoms: every written force against a double-precision cell-list reference, pair count, and that dropped pairs, merge contention, streamer stalls, memory backpressure, skipped cells, empty cells and multi-group cells all occurred |

The reference values come from `tb/md_tb_pkg.sv`. It converts between
`real` and binary32 by manipulating the fields of a double, independently of
the design's arithmetic. `tb/md_mem_model.sv` is a behavioural memory with
random request backpressure and a fixed read latency.

To run one with Verilator (from the folder holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/md_pkg.sv tb/md_tb_pkg.sv tb/md_accelerator_tb.sv \
    --top-module md_accelerator_tb -Mdir obj -o sim
./obj/sim
```

In the end-to-end run, the two force pipelines are busy about 34 % of the
run's cycles. The small test system has few atoms per cell, so loading each
home cell, draining the pipelines between home cells and writing back the
sums take a large share of the time. In steady streaming the merge is
saturated. About a quarter of the candidates pass the test, and there are
four lanes, so the force pipeline is offered about one pair per cycle.
