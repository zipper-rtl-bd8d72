# ZIPPER: a tiled, multi-stream GNN accelerator in SystemVerilog

A graph neural network layer combines two kinds of work. One is dense: every vertex
embedding is multiplied by a weight matrix (GEMM). The other is sparse and irregular:
messages go along edges, and each vertex's incoming messages are reduced.

This accelerator cuts the graph's adjacency matrix into **tiles**. Each tile is a block of
edges between one source range and one destination range. Several tiles are then processed
at once, with their dense and sparse steps interleaved on separate hardware units:

- **Tile-level parallelism:** four tiles are in flight at any time.
- **Operator-level parallelism:** a GEMM of one tile runs on the matrix unit while the
  scatter or gather of another tile runs on a vector unit.

The GNN layer is written as three small programs, which are the SDE functions:

| Function | Runs | Work |
|---|---|---|
| **dFunction** | once per destination partition | loads the destination embeddings and does their dense work; waits until every tile of the partition has been gathered; finishes and stores the partition |
| **sFunction** | once per tile | loads the tile's source embeddings and transforms them (for example a GEMM) |
| **eFunction** | once per tile | does the per-edge work (scatter, edge-wise ops) and gathers into the destination embeddings |

Hardware *streams* execute these programs:
- 1 dStream;
- 4 sStreams and 4 eStreams, paired as (sStream p, eStream p).

A two-level scheduler interleaves the streams' instructions onto the units. Synchronisation
instructions hand tiles from stream to stream.

## Block diagram

```
        host: program load, start/done
                   |
             +-----v------+   resolved     +------------+  GEMM    +-------------+
             | scheduler  |--micro-ops---->| dispatcher |--------->| matrix unit |--+
             | 9 streams  |<--sync ops-----| queue of 9 |  ELW/GOP | 32x128 SA   |  |
             | FRFS issue |<--completions--|            |--------->| vector unit |  |
             +--+------+--+                |            |          | 8 x SIMD32  |  |
  metadata read |      | tile/meta loads   |            |          | vector unit |  |
             +--v------v--+                |            |  LD/ST   +-------------+  |
             | tile hub   |<---------------| memory     |<---------                 |
             | 4 slots +  |  topology      | controller |<----> off-chip memory     |
             | metadata   |--------------->|            |       (HBM, outside)      |
             +------------+  (cores read)  +-----+------+                           |
                                                 |                                  |
                           +---------------------v----------------------------------v--+
                           | unified embedding memory (UEM): 21 MiB, 16 banks, 18 ports |
                           +-----------------------------------------------------------+
```

`zipper_top` contains all of these and brings out two ports:
- the off-chip memory port (`o_*`: valid/ready request, in-order read data);
- a host port that loads the three programs and starts a run.

## Data

- **Embedding element:** 16-bit signed fixed point with 8 fraction bits (Q8.8).
- **Memory word:** 512 bits, which is 32 elements, one SIMD32 vector.
- **Embedding size:** 128, which is 4 words per vertex.
- **Arithmetic:**
  - Products are rescaled by `>>> 8`.
  - Every result saturates to 16 bits.
  - The systolic array accumulates in 32 bits and saturates once, at the end.

## Tiles and their data

The host splits the graph and stores these in off-chip memory:

- **Tile metadata:** one 160-bit record per tile (`meta_t`):
  - topology address;
  - first edge id;
  - first destination vertex;
  - destination, edge and source counts;
  - partition number.
- **Topology block of each tile:**
  - The edge list comes first, 16 entries per word. An entry is
    `{dst_local[31:16], src_local[15:0]}`, sorted by destination.
  - Next is the list of global source vertex ids, 16 per word.
  - Last are `num_dst+1` per-destination offsets into the edge list (CSC style), 16 per word.

Tiles of one partition share a destination range. The tiles are listed partition by
partition.

### Tile hub

The tile hub is an SRAM with one bank per stream pair. Each bank holds one slot of
16384 32-bit words:

| Offset | Contents |
|---|---|
| 0 | edges, up to 8192 |
| 8192 | source ids, up to 4096 |
| 12288 | destination offsets |

The hub also holds an array of 1024 metadata records. The memory controller loads it at the
start of a run.

### Unified embedding memory (UEM)

- **Size:** 344,064 words × 512 bits, which is 21 MiB.
- **Banks:** 16 banks, word interleaved.
- **Ports:** one each for the matrix unit, the memory controller and the 16 SIMD cores.
- **Arbitration:** a round-robin arbiter per bank grants one access per cycle. Read data
  arrives one cycle after the grant.
- **Layout:**
  - Pair p owns words `p*65536 ... p*65536+65535`.
  - The dStream uses the rest, starting at word 262144. At 128 dimensions that is room for
    20,480 destination vertices per partition.

## Instructions

A program is a list of `instr_t` records; each stream program memory holds up to 32.

| Field | Meaning |
|---|---|
| `op` | opcode (below) |
| `rows_sel` | how many rows the instruction covers: literal `rows_lit`, or the tile's source count, the tile's edge count, or the partition's destination count |
| `kw`, `nw` | input and output width in words (1..4 at 128 dims) |
| `bmode` | second operand per row, shared by all rows, or one scalar per row |
| `a_addr`, `b_addr`, `d_addr` | UEM addresses; with `a_rel` / `b_rel` / `d_rel` set, the pair's slot base is added at issue, so one sFunction/eFunction serves all four pairs |
| `imm` | off-chip base address for data transfers |

Opcodes:

| Class | Opcodes | Unit |
|---|---|---|
| Element-wise (ELW) | ADD, SUB, MUL, DIV, EXP, RELU, GEMV | vector unit |
| Matrix | GEMM | matrix unit |
| Graph (GOP) | GTHR.SUM, GTHR.MAX, SCTR.OUTE, SCTR.INE | vector unit (cores walk the tile's edge list) |
| Data transfer | LD.SRC, LD.DST, LD.EDGE, ST.DST | memory controller |
| Synchronisation | WAIT, SIGNAL.S, SIGNAL.E, FCH.TILE, FCH.PTT, UPD.PTT, CHK.PTT | scheduler |

Each data transfer computes its off-chip address as `imm + id*kw + w`. The id depends on
the opcode:

| Opcode | id |
|---|---|
| LD.SRC | read from the tile's source-id list, so sparse sources are gathered |
| LD.DST, ST.DST | partition's first vertex + row |
| LD.EDGE | tile's first edge + row |
| any with a literal row count | row (used for weights and bias) |

## Stream synchronisation (the hard part)

Each stream is in one of these states: idle, ready, issued, waiting, or done.

Every cycle the scheduler issues from the stream that became ready earliest
(first-ready-first-serve, by timestamp). That stream stays "issued" until its instruction
completes.

Synchronisation instructions do not compute anything. They pass through the dispatcher queue
like any other instruction, so they stay in order with the stream's earlier work. The
dispatcher then hands them back to the scheduler, which updates its state:

| Instruction | Stream | Effect |
|---|---|---|
| `FCH.PTT` | d | Ends the run if every tile has been claimed. Otherwise takes the partition of the next unclaimed tile as the current one. |
| `UPD.PTT` | d | Opens the current partition for claiming. |
| `SIGNAL.S` | d | Every idle pair asks for a tile. A *claim engine* gives out one tile per cycle while the next tile belongs to the open partition. Each claim starts the tile's topology load into the pair's hub slot and wakes the pair's sStream. |
| `WAIT` | any | Parks the stream until it is woken. An sStream also waits until its tile's topology is in the hub. |
| `SIGNAL.E` | s | Wakes the pair's eStream: the source side of the tile is ready. |
| `FCH.TILE` | e | Retires the pair's tile and claims the next one if it is in the open partition. When the last tile of the partition in flight retires, the dStream is woken. |
| `CHK.PTT` | e | Wakes the pair's sStream if the pair got a new tile. |

The result is a pipeline. While pair 0 gathers tile 5, pair 1 can be running the GEMM of
tile 6 on the matrix unit, and the dispatcher sends an ADD of the dStream to the second
vector unit.

A partition is finished and stored only after all its tiles have been gathered. Only then
does `FCH.PTT` move to the next partition.

### Dispatcher

The dispatcher queue has 9 entries, one per stream; each stream has at most one instruction
outstanding. Every cycle it issues the **oldest** queued entry whose unit is free:

- GEMM goes to the matrix unit.
- ELW and GOP go to a free vector unit.
- Transfers go to the memory controller.
- Synchronisation goes back to the scheduler.

A younger instruction therefore overtakes one whose unit is busy. At most one gather is in
flight at a time, so two vector units never read-modify-write the same destination
embeddings.

## Compute units

### Matrix unit

The matrix unit computes `D[rows x nw] = A[rows x kw] * W[kw x nw]`:
- A is 32 rows at a time in the input buffer.
- W is 128×128 in the weight buffer.
- The array is an output-stationary 32×128 systolic array of `systolic_pe`.

Operands enter with a diagonal skew. Each block takes the following cycles:

| Step | Cycles |
|---|---|
| Stage A | `2·rb·kw` |
| Stream through the array | `K + 32 + 128 − 1` |
| Write back | `rb·nw` |

Loading W takes `2·K·nw` cycles, where K = 32·kw. If a GEMM uses the same weight address
and shape as the previous one, the weight buffer is reused and W is not loaded again. The
testbench checks these counts exactly.

### Vector unit

Each vector unit has 8 SIMD32 cores that run one micro-op together. An idle core takes the
next row, which is a vertex or an edge, so rows are spread dynamically.

| Row type | What one core does |
|---|---|
| ELW row | reads its operands and writes one result word per output word |
| Scatter row | reads its edge from the hub and copies the source's (SCTR.OUTE) or destination's (SCTR.INE) embedding to the edge |
| Gather row | handles one destination: walks that destination's edge range using the hub offsets, reduces the edge embeddings by sum or max, and adds the result to the destination embedding already in the UEM, so the tiles of a partition accumulate |

Special cases:
- EXP uses a 2^x approximation with a linear fraction.
- GEMV writes a per-row dot product broadcast to all lanes.

### Memory controller

The memory controller serves three kinds of job, with this priority:
1. metadata loads at start;
2. tile topology loads into a hub slot;
3. data-transfer micro-ops.

It has one off-chip read outstanding at a time.

## Parameters (defaults)

| Module | Parameter | Default |
|---|---|---|
| `zipper_top` | `NPAIRS` | 4 |
| `zipper_top` | `NVU` | 2 |
| `zipper_top` | `NCORES` | 8 |
| `zipper_top` | `MU_ROWS` × `MU_COLS` | 32 × 128 |
| `zipper_top` | `UEM_DEPTH` | 344064 |
| `zipper_top` | `UEM_BANKS` | 16 |
| `zipper_top` | `UEM_SLOT_WORDS` | 65536 |
| `zipper_top` | `TH_SLOT_WORDS` | 16384 |
| `zipper_top` | `MAX_TILES` | 1024 |
| `zipper_top` | `PROG_DEPTH` | 32 |
| `dispatcher` | `QDEPTH` | 9 |

The streams, the unit counts, the array shape, the 21 MiB and 256 KiB memories and the queue
depth follow the published configuration. These are this design's own choices:
- number format;
- widths;
- bank count;
- slot layout;
- instruction encoding;
- exact synchronisation semantics.

## Where this design departs from the published one

- **BMM is missing.** The index-guided batched matrix multiply used by R-GCN is not built.
  GCN-, GAT-, SAGE- and GGNN-style layers can be written with the opcodes above.
- **Synchronisation is this design's own reading.** The published description names the
  instructions but not their exact effect. The claim engine, the `outstanding` tile count
  and the dStream wake-up are this design's own choices.
- **Dispatcher routing is reversed.** The published text says data-transfer instructions go
  back to the scheduler and synchronisation instructions go to the memory controller. This
  design does the opposite, which is the only reading that works.
- **Simplified memories.**
  - The tile hub is an SRAM, as the text says, although the configuration table calls it
    eDRAM.
  - eDRAM refresh is not modelled.
  - The off-chip memory is a simple in-order model. An HBM device is outside the chip.
- **Tiles per run are limited.** A run reads at most 1024 tile records. Graphs with more
  tiles, more than about 8.4 million edges at 8192 edges per tile, must be run as several
  batches of whole partitions, each with its own `meta_base`.
- **Gathers are serialised.** Only one gather is in flight at a time.
- **No compiler.** Programs are written by hand; the full-size testbench shows one for a GCN layer.

## Files

The design, in `rtl/`:

| File | Contents |
|---|---|
| `zipper_pkg.sv` | types, opcodes, helper functions |
| `banked_ram.sv` | the UEM, and the storage inside the tile hub |
| `tile_hub.sv` | the tile hub |
| `systolic_pe.sv` | one processing element of the systolic array |
| `matrix_unit.sv` | the matrix unit |
| `simd_core.sv` | one SIMD32 core |
| `vector_unit.sv` | a vector unit |
| `memory_controller.sv` | the memory controller |
| `dispatcher.sv` | the dispatcher |
| `scheduler.sv` | the scheduler |
| `zipper_top.sv` | the top level |

Testbenches, in `tb/`:

- One `tb_<block>.sv` per block, each self-checking.
- `hbm_model.sv`, the off-chip memory model.
- `tb_zipper_top.sv`, which runs one full GCN layer at default parameters:
  - 48 vertices, 576 edges;
  - 3 partitions × 6 tiles;
  - per-edge weights, self term, bias and ReLU;
  - every output lane compared with a reference computed in the testbench.

`tb_zipper_top` also counts these mechanisms and fails if any of them never happened:
- claims by SIGNAL.S;
- claims by FCH.TILE;
- dStream wake-ups;
- matrix unit / vector unit overlap;
- several tiles in flight;
- both vector units busy;
- instructions held in the queue;
- bank conflicts;
- gathers held back.

## Simulating

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/zipper_pkg.sv tb/tb_zipper_top.sv --top-module tb_zipper_top
./obj_dir/Vtb_zipper_top
```

Replace `tb_zipper_top` with any other testbench name. Every testbench ends with a line
`TB_RESULT checks=N failures=M`.
