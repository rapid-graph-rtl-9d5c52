# RAPID-Graph compute core in SystemVerilog

RAPID-Graph computes all-pairs shortest paths (APSP) on large graphs with
phase-change memory (PCM) arrays that also do the arithmetic. Floyd-Warshall
(FW) is cubic in time and quadratic in storage, so a large graph is split
recursively:

1. the graph is cut into components of at most 1024 vertices;
2. each component gets a local FW;
3. the vertices with edges leaving their component (boundary vertices)
   form a smaller graph, which is solved the same way;
4. the boundary distances are written back into each component, and FW
   runs there again;
5. distances between components come from a min-plus product:
   `D[m,n] = min_i,j (D_C1[m,i] + DB[i,j] + D_C2[j,n])`.

Only two kernels are left: dense FW on a block of at most 1024 vertices, and
a two-stage min-plus merge. The hardware has one PCM die type for each
kernel. A logic die drives them.

This RTL models the compute core:

- the controller and the CSR-to-dense stream engines of the logic die;
- one PCM-FW tile;
- one PCM-MP tile.

The PCM arrays are modelled as register arrays. They keep the bit-plane
layout and the bit-serial in-memory arithmetic of the real design, so cycle
counts reflect the in-array algorithm. Partitioning, the storage stack, and
the links between dies stay outside: their traffic enters through ports of
the top module.

## Numbers and encoding

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `N`       | 1024    | Vertices per tile. Also the bitlines per PCM unit, i.e. the SIMD lanes. |
| `W`       | 32      | Bits per distance. |
| `R`       | 32      | Rows processed together (a window). Also the number of units in each region. |
| `GROUP`   | 32      | Width of the first level of the comparator tree. |
| `WR_LAT`  | 10      | Cycles of a PCM write. A read takes 1 cycle. |

All of these are the design's stated numbers except `R` in the MP tile.
There, the same 32-unit slab as in the FW tile is assumed.

Distances are unsigned. "No path" is `INF = 2^(W-3) - 1`. With this value,
the sum of three distances stays below `2^(W-1)`. The top bit of a
`W+1`-bit subtraction is then a correct "less than" flag, even when the
operands are INF. Edge weights must be non-negative, and sums of real path
lengths must stay below INF.

## Bit-plane storage and bit-serial arithmetic (`felix_bitserial_alu`)

A PCM unit is a 1024 x 1024 crossbar. Each **wordline holds one bit of one
matrix row**, across all 1024 columns. A `W`-bit row therefore takes `W`
wordlines, and every bitline is an independent lane.

Arithmetic works one bit position per cycle, LSB first, on all lanes at
once. For each bit:

- sum: `S = A ^ B ^ C`;
- carry: `C' = NOT(minority(A, B, C))`. This is the majority, written with
  the gates a PCM array can evaluate: NOR, NAND, minority, NOT, OR and XOR.

Subtraction inverts `B` and starts the carry at 1. After the MSB, the last
sum bit is the sign of `A - B`. That sign is the only comparison the design
uses. It becomes a **write mask**: an entry is rewritten only where the new
value is smaller. `felix_bitserial_alu` is this one-bit step for all lanes.
Its carry register plays the role of the Temp_Carry row.

## The PCM-FW tile (`pcm_fw_tile`, `fw_permutation_unit`)

At the default size, a tile has 130 units in six regions:

| Region            | Units | Content                                                        |
|-------------------|-------|----------------------------------------------------------------|
| Main_Block        | 32    | The distance matrix.                                           |
| Panel_Col         | 32    | Pivot column, mirrored: row `i` holds `D[i][k]` on every bitline. |
| Panel_Row         | 1     | Pivot row `D[k][*]`.                                           |
| Temp_Add          | 32    | Adder partials.                                                |
| Temp_Carry        | 1     | Carry rows.                                                    |
| Temp_Main_Block   | 32    | Candidates `D[i][k] + D[k][j]`.                                |

Matrix row `i` lives in unit `i mod 32`, at slot `i / 32`. The 32 rows of a
window therefore sit in 32 different units and are processed together.

`fw_permutation_unit` runs the following schedule for each pivot `k`:

1. **Prefetch.** Takes `W` cycles. It copies pivot row `k` into Panel_Row,
   one bit-plane per cycle.
2. **Permute.** Takes `W` cycles per window. It reads bit column `k` of
   each row and broadcasts it along that row's Panel_Col wordlines. This is
   what "mirroring" the pivot column means.
   - A window whose pivot-column entries are all INF cannot improve
     anything. It is **pruned**: marked dead in a reorder mask.
3. **Compute.** For a live window: `W` add cycles (Panel_Col + Panel_Row
   into Temp_Main_Block), then `W` subtract cycles (Temp_Main_Block -
   Main_Block). The subtract cycles leave one sign bit per entry. A dead
   window costs one cycle.
4. **Write-back.** The sign mask is captured at the end of the window.
   - If the mask is non-zero, a `WR_LAT`-cycle DMA write of the masked
     entries into Main_Block starts. It overlaps the next window's compute.
   - An all-zero mask means the write would change nothing. The write is
     skipped (a **futile write**).
   - If a window finishes while the previous write is still in flight, the
     FSM **stalls**.
   - The next pivot begins only after the last write has committed.

Row `k` and column `k` are never modified while `k` is the pivot, because
`D[k][k] = 0`. So the pivot needs no masking beyond excluding row `k`.

A window costs `W + 2W` cycles, plus any stall. Prefetch adds `W` per
pivot. A full 1024-vertex FW with no pruning is therefore about
`1024 x (32 + 32 x 96)`, or roughly 3.2 M cycles. Pruning shortens this on
graphs with unreachable regions.

The module keeps four counters: `n_pruned`, `n_futile`, `n_stall` and
`n_writes`.

## The PCM-MP tile and the comparator tree (`pcm_mp_tile`, `min_comparator_tree`)

The merge for one source row `m` runs in two min-plus stages:

```
Temp_Min1[j] = min_i (D_C1[m,i] + DB[i,j])
Temp_Min2[n] = min_j (Temp_Min1[j] + D_C2[j,n])
Dout[m,n]    = min(Dout[m,n], Temp_Min2[n])     (sign-gated write)
```

`DB` and `D_C2` are stored **by columns**. Each stored vector is then
exactly the set of values one output needs to reduce. Two staging buffers,
each `W` wordlines deep, hold the broadcast operand: `D_C1[m,:]` in the
first stage and `Temp_Min1` in the second.

The tile moves through these states:

| State      | Cycles           | What happens |
|------------|------------------|--------------|
| ADD1       | `(N/R)*W`        | `R` units add the staging buffer to `R` stored vectors per pass. |
| RED1       | `N + 13`         | Each sum vector enters the comparator tree, one per cycle. |
| ADD2, RED2 | same as above    | The second stage. |
| CAS        | `W`              | Subtract `Temp_Min2 - Dout[m,:]` to get the update mask. |
| WRITE      | `WR_LAT`, or 0   | Selective write. Skipped if nothing improved. |

At the default size, one row takes `1 + 2*1024 + 2*(1024+13) + 32 + 10 + 2`
cycles, about 4.2 k cycles.

`min_comparator_tree` reduces 1024 values to their minimum in 13 cycles. It
accepts a new row every cycle:

- 1 cycle to buffer the row;
- 6 cycles for 32 block trees over 32 inputs each (five compare levels plus
  a hold register);
- 6 cycles for a five-level tree over the 32 block minima (plus a hold
  register).

Each comparison is a subtraction whose sign picks the smaller value. On a
tie, the lower index wins.

## Logic die (`csr_stream_engine`, `main_controller`) and the top

Graphs arrive in CSR form: `rowptr`, then `(col, val)` pairs. A
`csr_stream_engine` turns each row into a dense row:

1. fill the row with INF;
2. set the diagonal to 0;
3. apply one non-zero per cycle; for a repeated column, keep the minimum;
4. offer the row on a valid/ready port.

A row takes `nnz + 3` cycles. The memory side has a 1-cycle read latency.

`main_controller` accepts one command at a time on a `cmd_valid`/`cmd_ready`
handshake. The command type `cmd_t` is defined in `rapid_pkg`.

| Command  | Action                                    |
|----------|-------------------------------------------|
| LOAD_FW  | Run engine 0 into the FW tile.            |
| RUN_FW   | Run FW on `arg` vertices.                 |
| LOAD_MP  | Run engine 1 into the MP region chosen by `sel`: 0 = DB columns, 1 = D_C2 columns, 2 = Dout rows. |
| RUN_MP   | Merge row `arg`.                          |

`resp_done` pulses when a command completes.

`rapid_graph_top` wires together the controller, the two engines and the
two tiles. It also brings out:

- the CSR memory ports of both engines;
- direct row read/write ports of both tiles;
- the `D_C1` row input of the MP tile;
- all statistics counters.

The direct row ports are where the scratchpad side reads FW results and
injects boundary distances.

## Where this departs from the described hardware

- **One tile of each kind.** A die in the full system holds many tiles
  working concurrently. Here, only the unit of replication is built.
- **Not built.** Partitioning and the recursion driver are host software.
  The HBM3 scratchpad, the FeNAND storage, the UCIe and ONFI links, the
  H-tree inside a tile, and the analog PCM periphery are also absent. Their
  traffic enters through the top-level ports, with ideal 1-cycle memories.
- **Panel_Col layout.** The mirrored Panel_Col broadcasts `D[i][k]` along
  row `i`. The published figure shows cyclically rotated copies; that exact
  arrangement is not reproduced, because the FW result does not depend on
  it.
- **FW scheduling.** One window computes while the previous one writes
  back. Prefetch of the next pivot does not overlap the current pivot.
- **MP scheduling.** The MP stages run one after another. The adds do not
  overlap the tree.
- **One comparator tree per tile.** The source text places the tree both
  in every unit and in the tile as a whole. This design uses one per tile.
- **Design choices.** The following are this design's own: the INF code,
  the command set, one bit position per cycle for the full-adder step, the
  tie rule in the tree, and the row-to-unit interleaving.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench ends by
printing `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_felix_bitserial_alu` | Random add and subtract results, against integer arithmetic. |
| `tb_min_comparator_tree` | Minimum and index on random and tie cases, at the default 1024 x 32-bit size, including the 13-cycle latency and back-to-back rows. |
| `tb_fw_permutation_unit` | The state sequence and cycle counts of every stage, pruning, futile writes, stalls, and the 10-cycle write. |
| `tb_pcm_fw_tile` | Random graphs against a software FW, including unreachable vertices and partial `n_vert`. Two write latencies are used, so the stall path is exercised. |
| `tb_pcm_mp_tile` | Random merges against a two-stage reference, and the exact cycle formula above. |
| `tb_csr_stream_engine` | Rows with duplicates, empty rows and back-pressure. |
| `tb_main_controller` | Random command streams against a model of the blocks, and handshake rules. |
| `tb_rapid_graph_top` | The whole recursive flow on a 24-vertex graph in two components, each with boundary vertices. The sequence is: load and FW each component; build the boundary graph and run FW on it; inject boundary distances and run FW again; then min-plus merge every cross-component row. The result is compared with APSP of the whole graph. The test counts pruned windows, futile writes, stalls, committed writes, MP updates and skipped MP writes, and fails if any of them never happens. |
| `tb_rapid_graph_top_full` | The top at its default parameters, with no overrides. All 1024 CSR rows are loaded. FW runs on a random 256-vertex graph in the first rows, and all 1024 x 1024 entries are checked. Then one min-plus merge row runs at full 1024-entry width. A full 1024-pivot FW takes about 3.2 M cycles. That is roughly half an hour in Verilator, so it is not part of the test. |

Most block tests use small parameters so they finish in seconds (for
example `N=16, W=12, R=4`). The comparator-tree test and the full-size top
test run at the default size.

Build a test with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_pcm_fw_tile \
    rtl/rapid_pkg.sv rtl/*.sv tb/tb_pcm_fw_tile.sv -o tb && ./obj_dir/tb
```

The simulator is two-state. Every testbench resets or initialises
everything it reads.
