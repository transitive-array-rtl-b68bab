# Transitive Array — a multiplication-free GEMM engine that reuses results

## The idea

Quantised weights can be cut into bit planes. Take a slice of T = 8 input
rows `x[0..7]` (each m = 32 activations wide). For 8-bit weights, every output row
then becomes a sum of eight 1-bit rows, each weighted by 2^s. One such 1-bit
row is a T-bit word, here called a **TransRow**. Its dot product with the
input slice is a plain sum of the input rows whose bit is set. No
multiplier is needed: a TransRow `1011` means `x0 + x1 + x3`.

Many TransRows in one weight tile share most of their bits. Suppose
`x0 + x1` has already been computed for TransRow `0011`. Then `1011` needs
only one more addition (`+ x3`). Call the finished row the **prefix** of the
new one. Call the bits that are still missing the **TranSparsity**: that is
`TransRow XOR prefix`, which here is `1000`. Identical TransRows cost nothing
after the first one.

The T-bit words form a lattice, the Hasse graph of the T-bit cube:
- **Level** L holds the words with L ones.
- An edge joins two words that differ in exactly one bit.

The design schedules the TransRows of a tile along this graph:
1. Sort by level.
2. Find for every TransRow a cheap prefix nearby. Where two rows are more
   than one bit apart, also compute an intermediate **path node** that no
   row asks for.
3. Split the resulting forest into T trees of roughly equal work, one tree
   per hardware lane.

Every addition is then a 12-bit add of one input element. A row costs one
add per bit of its TranSparsity, which is usually one.

## Block structure

```
              tr_* (TransRows)        in_* (inputs, per unit)
                   |                        |
            popcount_sorter                 |
                   |                        v
   ssi_* --> [static SI] <-si_static-> scoreboard (dynamic SI)
                   |   SI: prefix, lane, path-node flag per node
                   v
    +--------------------- trans_array_unit  (x NUM_UNITS = 6) ---------+
    | dispatcher --op--> trans_lane x T --result--> psum_crossbar ----> |
    |  (XOR pruning)      (m PPEs, prefix buffer)     (bank queues)     |
    |                                              ape_array (24-bit) --+--> rd_data
    +------------------------------------------------------------------+
```

One weight sub-tile is up to `MAX_ROWS` = 256 TransRows, for example 32
output rows of 8-bit weights by 8 columns of K. It is shared by six units.
Each unit has its own input sub-tile: T rows of K by 32 columns. Each unit
therefore produces a different 32-column slice of the same output rows. A
GEMM is run as a sequence of sub-tiles. Outputs accumulate in the units
until `clear_out`.

| Module | Role |
|---|---|
| `ta_pkg` | widths (8-bit inputs, 12-bit partial sums, 24-bit accumulators), popcount and bit-index functions |
| `popcount_sorter` | bitonic network that orders the TransRows by level, one stage per cycle |
| `scoreboard` | builds the Scoreboard Information (SI): prefix, lane and path-node flag for each of the 2^T nodes |
| `prefix_translator`, `suffix_translator` | decode a bitmap of one-bit neighbours into node indices |
| `dispatcher` | walks the sorted rows, forms TranSparsity = row XOR prefix, issues ops to the lanes |
| `trans_lane` | m prefix PEs plus the lane's prefix buffer; adds one input row per cycle |
| `ppe` | one 12-bit adder: prefix result + 8-bit input element |
| `psum_crossbar` | steers lane results to output banks (bank = output row mod T), queues on conflicts |
| `ape_array`, `ape` | shift-and-accumulate of the bit-level result into the 24-bit output tile |
| `trans_array_unit` | one unit: input registers, dispatcher, T lanes, crossbar, APE array |
| `transitive_array` | top: sorter, scoreboard, static/dynamic SI select, six units, event counters |
| `sync_fifo` | small FIFO used by the lanes and the crossbar |

## The Scoreboard: how the forest is built

This block is the least obvious part of the design.

The table has one entry per Hasse node (256 for T = 8):
- a **Count** of how many TransRows equal the node;
- four **prefix bitmaps**, PB1..PB4. Bit b of PBd says that clearing bit b
  gives a prefix d steps away from an existing result;
- a **suffix bitmap**, the mirror image: bit b says that setting bit b gives
  a node that uses this node as its prefix;
- a **Lane ID**.

Bitmaps make the table small. A neighbour of node v in direction b is always
`v` with bit b flipped, so T bits encode all T neighbours. The two
translator blocks turn a bitmap back into node numbers.

The fields are stored as separate arrays rather than packed words. At T = 4
they map onto the reference entry layout:

| Field | T = 4 layout | Here (T = 8) |
|---|---|---|
| node | 4 bits | 8 bits (the address) |
| Count | 8 bits | 9 bits |
| PB1 | 4 bits | 8 bits |
| PB2..4 | 12 bits | 3 × 8 bits |
| suffix bitmap | 4 bits | 8 bits |
| lane | 2 bits | 3 bits |

Count is 9 bits because a sub-tile can hold 256 identical rows.

Every pass below handles one whole level per cycle. All nodes of that level
work in parallel, one small logic slice per node in a generate loop.

1. **Record.** Each cycle, T sorted TransRows raise the Count of their nodes.
2. **Forward** (levels 1 → T). A node looks at its T one-bit-smaller
   neighbours. A neighbour with Count > 0, or the root 0, is at distance 0.
   Any other neighbour passes on its own distance plus one. The node sets bit
   b of the prefix bitmap for each distance it receives. Its distance is the
   smallest of them. Distances of 4 or more are not propagated.
3. **Backward** (levels T → 2). A present node at distance 2 or 3 needs
   intermediate nodes. It takes the *first* prefix in the bitmap of its
   distance, where first means the highest set bit. It marks itself in that
   prefix's suffix bitmap. If the prefix has Count 0, it becomes a **path
   node**: its Count is set to 1 and it is computed for reuse only. The walk
   continues from there on the next lower level.
4. **Balance** (levels 1 → T). Each lane keeps a workload: the sum of the
   Counts given to it.
   - A level-1 node with bit b set starts lane b.
   - A distance-1 node chooses, among its distance-1 prefixes, the one whose
     lane has the least work at the start of the level. Ties go to the first
     prefix. The node inherits that lane.
   - Distance 2–3 nodes keep the prefix found in the backward pass.
   - **Outliers** (distance ≥ 4) take the root as prefix, so all their bits
     are added. They also take the least-loaded lane.

Since a node always shares the lane of its prefix, a whole tree runs in one
lane. Its intermediate results therefore never have to cross between lanes.

The testbench replays the small reference example:
- Input: T = 4, TransRows 2, 5, 15, 14, 1, 7, 2.
- Forest: lanes {1, 5, 7, 15} and {2, 6, 14}.
- Path node: 6 (the prefix of 14).

The `q_node` port reads back one table entry, with its suffix list decoded.

## Dispatch and the lanes

The dispatcher walks the sorted list. For every TransRow it sends the row's
lane an op {node, prefix, TranSparsity, row index}.

Path nodes are inserted before the rows of their level. Each cycle the
dispatcher issues either one path node, or up to T rows of the same level
that go to different lanes. Rows of value 0 are dropped.

Once a node has been issued, it becomes its own prefix. A second identical
row then has TranSparsity 0, and the lane just re-reads the stored result.

If the SI names a prefix that this lane has not computed in this sub-tile,
that is an **SI miss**. It can happen with a static SI, which is computed
once and shared by many tiles. The row then starts from the root.

A lane works through its op queue:
- It starts from the prefix result. The root's result is the constant 0.
- It adds the input row of each set TranSparsity bit, one bit per cycle.
- It writes the node's result into its own prefix buffer, which has one
  32 × 12-bit entry per node.
- If the op is a real TransRow, it also hands the result to the crossbar.

Each lane picks the input row it needs with a per-column T:1 multiplexer.

## Output side

A TransRow's index encodes where its result belongs:
- index = output row × S + bit level, with S = 8 for 8-bit weights and 4
  for 4-bit weights (`wbits4`);
- the APE shifts the result left by the bit level;
- at the top bit level it subtracts instead of adding, because weights are
  two's complement.

Results go to bank `output row mod T`:
- Each lane has a 4-deep queue in the crossbar.
- Each bank accepts one lane per cycle, chosen round-robin.
- A lane whose head waits is counted as a conflict.

The output tile is `MAX_ROWS/4` rows × 32 × 24 bits per unit. That is 64 rows,
enough for 4-bit weights.

## Interface and timing of the top

All ports are plain signals; see the opening comment of
`rtl/transitive_array.sv`.

| Group | Signals |
|---|---|
| configuration | `wbits4`, `si_static` |
| weight sub-tile | `tr_we`, `tr_addr` (group of 8 row indices), `tr_val[8]`, `n_rows` |
| input sub-tiles | `in_we`, `in_unit`, `in_k`, `in_row[32]` |
| static SI | `ssi_we`, `ssi_node`, `ssi_pre`, `ssi_lane` |
| control | `ready`, `start`, `clear_out`, `busy`, `done` |
| output read | `rd_unit`, `rd_row`, `rd_data[32]` (combinational) |
| debug | `sb_q_*` Scoreboard entry port; `cnt_*` counters (cycles, PPE adds, extra multi-bit steps, reuses, path nodes, SI misses, crossbar conflicts, outliers, front-end/unit overlap cycles) |

The top is a two-slot pipeline with a double buffer between the slots.

- **Front end.** The sorter and the Scoreboard prepare a sub-tile.
- **Back end.** The six units compute one.

The protocol for each sub-tile:
1. While `ready` is high, the host writes the sub-tile:
   - TransRows, 8 per cycle (32 cycles for 256 rows);
   - input rows, one row of one unit per cycle (48 cycles).
2. The host pulses `start`.
3. The front end runs:

   | Stage | Cycles |
   |---|---|
   | sort | 39 |
   | Scoreboard (dynamic mode only) | 58 |

4. Once the units are free, a **hand-over** takes place:
   - The sorted rows and the SI are copied into registers on the unit side.
   - Each unit moves its staged input sub-tile into its working registers.
   - `ready` rises again, so the next sub-tile can be written and prepared
     while this one is computed.
5. The units take about 100–120 cycles for 256 random 8-bit rows. `done`
   pulses once all results are accumulated.

Inside a unit the prefix lanes and the accumulators already run
concurrently through the crossbar queues. The three stages (Scoreboard,
prefix adds, accumulation) therefore overlap.

Measured cost of a full 256-row sub-tile:

| Mode | Cycles per sub-tile |
|---|---|
| one after another | up to about 215 |
| streamed | about 188 |

Streaming does not save more because loading the host data and the front
end remain in series. The host may write only while the front end is idle,
so the two cannot overlap with each other.

## Where this design departs from the reference architecture

- **One double buffer.** Stages overlap through a single hand-over point.
  A new sub-tile is accepted only after the previous one has left the
  front end. This is simpler than independent buffers between every pair
  of stages, but it keeps data loading in series with sorting and
  scoreboarding.
- **No Benes network.** A multiplexer per lane does the same job. It also
  covers two lanes reading the same input row in the same cycle.
- **Large prefix buffers.** Each lane's prefix buffer covers all 256 nodes:
  12 KB per lane, 96 KB per unit. That is much more than the 18 KB
  reference budget, which implies a compact mapping of live results that is
  not described.
- **Outliers in order.** They run in their place in the level order, from
  the root. They are not deferred to the end.
- **Count width.** 9 bits instead of 8, as explained above.
- **Simple issue rule.** The dispatcher's grouping is a simple rule of this
  design.
- **Not built:**
  - the split of each 12-bit PPE into two 6-bit adders for 4-bit
    activations (4-bit activations run as 8-bit values);
  - the vector unit (dequantisation, softmax);
  - the global buffers and the DRAM interface. Sub-tiles enter through
    write ports instead.
- **Accumulator range.** The 24-bit accumulators can overflow in the worst
  case:
  - 8-bit weights: after K = 512 (64 sub-tiles of 8);
  - 4-bit weights: after K = 8192.

  Longer reductions must read the tile out and add it at higher precision.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/`:
- Each ends with `TB_RESULT checks=N failures=M`.
- Each has a cycle watchdog.
- Each computes its expected values independently of the design. Examples:
  a software forward pass for the Scoreboard, and a direct matrix product
  for the units.

`tb_transitive_array` runs the top at its default size:
- T = 8, m = 32, 256 rows, six units.
- Cases: GEMMs of two and four sub-tiles along K with 8-bit weights, a sparse
  40-row tile, 4-bit weights, and a static SI with deliberate misses.
  Three of them are also run streamed: each next sub-tile is written and
  started as soon as `ready` allows.
- It compares every output against a reference GEMM.
- It also checks that each mechanism occurs: front-end/unit overlap, path nodes, reuse of
  identical rows, multi-bit TranSparsity, outliers, crossbar conflicts,
  SI misses, 4-bit mode and static mode.

To simulate with plain Verilator (5.x):

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl \
    --top-module tb_transitive_array rtl/ta_pkg.sv tb/tb_transitive_array.sv
./obj_dir/Vtb_transitive_array
```

`-y rtl` lets Verilator find each module in its own file; only the package
is named explicitly. Other blocks work the same way with their own
testbench as the top module.
The top-level build takes about half a minute; the simulation itself is
under a second.

## Changing the design

- `T`, `M_COLS`, `MAX_ROWS` and `NUM_UNITS` are parameters of the top.
  `PSUM_W` and `ACC_W` live in `ta_pkg`.
- Prefix-buffer storage grows as 2^T: T = 8 is the practical default.
- The Scoreboard's fixed four distance bitmaps match `MAX_DIST = 4` in the
  package.
- The unit-level testbenches run at the default sizes. The Scoreboard
  testbench also uses T = 4 for the worked example.
