# FlexVector: a sparse-times-dense vector engine with a flexible register file

A graph convolutional network (GCN) layer is two matrix products,
`A x (X x W)`: a sparse feature matrix `X` times small dense weights `W`, then
the very sparse, very irregular adjacency matrix `A` times the result. Both are
SpMM (sparse x dense). This RTL implements a small vector processor that runs
both products on one engine, row by row:

    output row i  =  sum over the nonzeros a(i,c) of row i  of  a(i,c) * dense row c

The dense rows are full 128-bit vectors (16 INT8 or 4 INT32 elements). Sparse
graphs touch them irregularly: a few columns ("super-nodes") are used by many
rows, most are used once. Banked vector register files handle this badly. The
design's central idea is a **flexible VRF**. It is a small register file of
whole-vector rows, split in two:

- a **fixed region** of `k` rows holds the most reused dense rows of the
  current tile for the whole tile;
- a **dynamic region** is refilled for every sparse row with the rows it
  still needs (its misses).

Software chooses `k` per tile. A second idea is a **coarse-grained
instruction set**: one instruction moves all the misses of a sparse row
(`MV_DYN`), and one computes a whole output row (`CMP`). Moves for the next
row can therefore run while the current row computes (double-VRF mode).

The default configuration is:

- 128-bit vectors, computed by 4 lanes of 32 bits;
- a 12-row VRF, used as 6 x 2 in double-VRF mode;
- a 2 KB Dense Buffer and a 256 B Sparse Buffer;
- 16 x 16 tiles;
- a vertex-cut bound of 6 nonzeros per sparse row.

All of these are built at these sizes.

## Block structure

```
            +------------------+     +--------------------+
 DRAM <---> |  bus_interface   |<--->| instr_buffer (FIFO)|---> controller (VID)
 128-bit    |  DMA has priority|     +--------------------+        | start pulses,
 valid/     +------------------+                                   | Config state
 ready        ^                                                    v
              |   +-----+  LD_S  +---------------+  words   +---------------- vex ----------------+
              +---| dma |------->| sparse_buffer |--------->| csr_decoder --> row_index_buffer     |
                  |     |  LD_D  +---------------+          |   | (scalar, col)       | bitmaps      |
                  |     |<------>| dense_buffer  |  port B  |   v                     v              |
                  +-----+  ST_D  |  port A (DMA) |<---------|  vec_unpack -> 4 x vector_lane ->     |
                                 |  port B       |  result  |      vec_pack --> result row         |
                                 +---------------+  write   +--------------------------------------+
                                     | port B read                ^ lookup by tag
                                     v                            |
                                 vrf_mover  ---- writes ---->    vrf (12 x 128 bit)
```

| Module | Role |
|---|---|
| `flexvector_top` | wires everything and counts events (`perf`) |
| `controller` | in-order issue of the coarse-grained instructions; holds the Config state |
| `instr_buffer` | 16-instruction FIFO that prefetches the program from DRAM |
| `bus_interface` | shares the one DRAM port between the DMA and the instruction fetch |
| `dma` | `LD_S`, `LD_D` and `ST_D` transfers |
| `sparse_buffer` | 64 x 32-bit words holding CSR tiles |
| `dense_buffer` | 128 x 128-bit rows, two ports |
| `vrf` | 12 x 128-bit rows, each with a tag, a valid bit, a lock and a lock group |
| `vrf_mover` | executes `MV_FIXED` and `MV_DYN`, reading Dense Buffer port B |
| `vex` | runs `CMP`: CSR decoder, row index buffer, unpack, lanes, pack |
| `csr_decoder` | walks the CSR tile for `CAL_IDX` and for `CMP` |
| `row_index_buffer` | one 16-bit miss bitmap per sparse row |
| `vec_unpack`, `vec_pack` | precision networks between VRF rows and lanes |
| `vector_lane` | 32-bit MAC lane: 4 x INT8 or 1 x INT32 per cycle |
| `fv_pkg` | constants, instruction format, bus and counter types |

## Data layout

**Dense Buffer** (128 rows of 128 bits). Software decides the regions
through instruction addresses. The layout used throughout is:

| Rows | Region | Use |
|---|---|---|
| 0-95 | rows-to-compute | six 16-row sub-buffers, one dense tile each |
| 96-111 | Result Matrix | one output tile being accumulated |
| 112-127 | Temp Matrix | partial output rows |

With six sub-buffers, DRAM loads of the next tiles overlap computation of the
current one. `Config` names the sub-buffer of the current tile. Its
`tile_base` (the sub-buffer index times 16) turns a column index `c` into
Dense Buffer row `tile_base + c`.

**Sparse Buffer** (64 words of 32 bits). A CSR tile of `R` sparse rows starts
at the word address `sb_base` given by `Config`:

```
sb_base + 0 .. sb_base + R      row pointers p[0..R] (relative, p[0] = 0)
sb_base + R + 1 + j             nonzero j:  { column[31:24], value[23:0] }
```

The value is a signed 24-bit number. INT8 computation uses its low 8 bits,
sign-extended. INT32 computation uses the 24-bit value sign-extended to 32
bits. A tile larger than the space given to it is split by software into
several loads. Because `sb_base` is free, software can split the buffer into
parts and load one part while another is being computed. The test programs
use two halves of 32 words.

## Instruction set

Instructions are 64 bits wide. The controller issues them in order, at most
one per cycle.

```
 63   60  59        58        57   54  53        30  29       16  15       0
 [ op ] [wait_dma] [wait_vex] [flags] [    a     ] [    b     ] [    c    ]
```

| op | Name | Fields |
|---|---|---|
| 1 | `CONFIG` | `a[15:0]` fixed-row mask; `b[0]` double-VRF; `b[1]` INT32; `b[4:2]` dense sub-buffer; `c[5:0]` Sparse Buffer base. Clears the VRF. |
| 2 | `LD_S` | DRAM beat `a`, Sparse Buffer word `b`, `c` beats |
| 3 | `LD_D` | DRAM beat `a`, Dense Buffer row `b`, `c` rows |
| 4 | `CAL_IDX` | decode `c` sparse rows: write each row's miss bitmap |
| 5 | `MV_FIXED` | copy the masked dense rows into VRF rows `0..k-1` |
| 6 | `MV_DYN` | copy the misses of sparse row `c` into the dynamic region; with `flags[0]`, also copy the partial-sum row at Dense Buffer row `a` |
| 7 | `CMP` | compute sparse row `c` and write the result to Dense Buffer row `b`; with `flags[0]`, first add the partial-sum row `a` |
| 8 | `ST_D` | Dense Buffer row `b` to DRAM beat `a`, `c` rows |
| 0 / 15 | `NOP` / `HALT` | `HALT` waits until every unit is idle, then raises `done` |

`k` is the population count of the fixed mask. A miss bitmap is the set of
columns a row uses, minus the fixed mask.

A tile is processed by:

1. `LD_D`, `LD_S`, `CONFIG`, `CAL_IDX`, `MV_FIXED`;
2. one `MV_DYN` + `CMP` pair per sparse row;
3. `ST_D` once the output tile is complete.

The two wait bits hold an instruction until the DMA is idle (`wait_dma`) or
until all vector units are idle (`wait_vex`). Software uses them to order a
transfer against the computation that uses its data. That is how loads of the
next tiles run under the current tile's computation, with no scoreboard in
hardware.

## The flexible VRF

This is the least obvious part of the design.

**Rows are found by content.** Every VRF row remembers which Dense Buffer row
it holds (a 7-bit tag) and whether that copy is valid. During `CMP` the lanes
do not use VRF addresses. For each nonzero they look up the tag
`tile_base + column`. The lowest valid matching row wins. Fixed and dynamic
rows are therefore reached the same way. A row that is both fixed and a miss
cannot happen, because `CAL_IDX` removed the fixed columns from the bitmaps.
A lookup that finds nothing is a software error. The element counts as zero
and the sticky `vrf_miss` output rises.

**Fixed region.** `MV_FIXED` copies the masked rows in increasing column
order into VRF rows `0..k-1`. They stay there until the next `CONFIG`, which
clears the whole VRF.

**Dynamic region as a ring.** `MV_DYN` writes rows `k, k+1, ...,
DEPTH-1`, then wraps back to `k`. The misses of consecutive sparse rows
therefore sit next to each other. Two rows' misses coexist exactly when
`k + miss(i) + miss(i+1) <= DEPTH`, which is the test the top-k selection
applies in double-VRF mode. In single-VRF mode the test is
`k + miss(i) <= DEPTH`.

**Locks.** Each `MV_DYN` writes its rows locked, under a one-bit group that
alternates from command to command. When a `CMP` ends, it releases the locks
of its group. Before writing a ring row, the mover checks its lock. If the
row is still locked, the mover stalls (`perf.lock_stalls`). This is what
makes double-VRF mode safe. `MV_DYN` of row `i+1` can start while `CMP` of
row `i` runs. It fills free ring rows at once, and it waits only for rows
that `CMP` `i` still reads. The CMP of group g releases group g. Because
`MV_DYN` and `CMP` alternate strictly per sparse row, the groups match.

**Single and double mode.** The mode is a `CONFIG` bit. In single-VRF mode
the controller does not issue `MV_DYN` while a `CMP` runs. Moving and
computing then alternate, as in a machine with only one dynamic region. In
double-VRF mode they overlap (`perf.overlap` counts the cycles). No extra
storage is involved: the second dynamic region is the rest of the ring.

**Coherence with results.** A `CMP` result is written to the Dense Buffer.
If the VRF holds a copy of that Dense Buffer row (for example a partial sum
moved in earlier), the write invalidates it.

**Read-after-write on partial sums.** `MV_DYN` may need a partial-sum row
that the running `CMP` will produce, for example the previous sub-row of a
vertex-cut node. In that case the mover waits until that `CMP` has written
the row (`perf.psum_stalls`).

## CMP, cycle by cycle

`CMP` occupies the vector unit for `nnz + 4` cycles, or `nnz + 5` with a
partial sum:

| Cycle | Action |
|---|---|
| 0 | issue; the accumulators clear; the decoder starts on the row |
| 1 | read of the row pointer |
| 2 .. nnz+1 | one nonzero per cycle: `(scalar, column)`; VRF lookup; unpack; 4 lanes MAC |
| nnz+2 | row-done flag from the decoder counter |
| (+1) | with a partial sum: that row is looked up and added through the lanes, multiplicand forced to 1 |
| last | pack; write the result row to Dense Buffer port B; invalidate its VRF copies; release the lock group |

The result write has priority on Dense Buffer port B. A mover read in the
same cycle waits one cycle (`perf.port_stalls`).

Each lane holds four 32-bit accumulators. In INT8 mode each accumulates
`int8(scalar) * int8(element)`. In INT32 mode only the first accumulates
`scalar * element`, modulo 2^32. The pack network keeps the low 8 or 32 bits
of each accumulator. Results therefore wrap at the element width. No rounding
or requantisation is done.

`CAL_IDX` takes `2 * R + nnz + 4` cycles for `R` sparse rows. It reads all
`R + 1` pointers, then walks every row's indices to build the bitmaps. It may
run while the DMA loads the dense tile.

## Controller issue rules

An instruction issues when its unit is free and these conditions hold:

| Instruction | Waits for |
|---|---|
| `LD_S`, `LD_D`, `ST_D` | DMA idle |
| `CAL_IDX` | decoder and CMP idle |
| `MV_DYN` | mover idle; in single-VRF mode, also no CMP running |
| `CONFIG`, `MV_FIXED`, `CMP` | mover, decoder and CMP all idle |
| `HALT` | everything idle |

Each rule also applies the instruction's own wait bits. `perf.issue_stalls`
counts the cycles in which a ready instruction could not issue. Because
`CMP` waits for the mover, every `MV_DYN` of a row has finished before that
row's `CMP` starts.

## Memory side

The DRAM port carries one request per cycle at most:

- a valid/ready request channel of `{we, 24-bit beat address, 128-bit data}`;
- read responses in request order, one cycle each, that cannot be refused;
- writes that get no response.

The DMA has fixed priority over instruction fetch. An 8-entry FIFO records
which master each read belongs to.

- **Loads** issue one read per cycle and write each response as it arrives.
  `n` beats take `n + latency` cycles.
- **Stores** take 3 cycles per row.
- **Instruction fetch** gets two instructions per beat. The prefetcher issues
  a read only if the FIFO can take everything already requested. `prog_len`
  (16 bits) may exceed the FIFO depth; the program streams through.

## Top-level interface

| Port | Meaning |
|---|---|
| `start`, `prog_addr`, `prog_len` | pulse `start` to run `prog_len` instructions from DRAM beat `prog_addr` |
| `done` | high after `HALT` until the next `start` |
| `vrf_miss` | sticky error: a CMP operand was not in the VRF |
| `perf` | counters, cleared by `start`: `cycles`, `issue_stalls`, `mac_cycles`, `fixed_hits`, `lock_stalls`, `psum_stalls`, `port_stalls`, `overlap` |
| `mem_*` | DRAM port (above) |

Reset is asynchronous and active low.

## Programming the engine

The end-to-end testbench (`tb/tb_flexvector_top.sv`) contains a complete,
if simple, compiler written in SystemVerilog. It shows how the engine is
meant to be used:

- **Tiling.** The matrices are cut into 16 x 16 tiles. An output tile is
  accumulated in the Result region over all column tiles (inner product
  between DRAM and the buffers), then stored with `ST_D`.
- **Vertex cut.** A sparse row with more than 6 nonzeros is split into
  sub-rows of at most 6. The most used columns are spread over the sub-rows.
  The sub-rows of one output row are chained with partial sums. Each sub-row's
  `MV_DYN` brings in the previous partial result. Its `CMP` adds it and writes
  to the Temp region if more sub-rows follow, otherwise to the Result region.
- **Top-k fixed region.** Columns are ranked by how many rows use them. The
  compiler picks the largest `k` for which the two largest per-row miss
  counts fit: `k + m1 + m2 <= 12` in double mode, `k + m1 <= 12` in single
  mode.
- **Multi-buffering.** Dense tiles rotate over the six sub-buffers. The
  Sparse Buffer is used as two halves of 32 words. Each tile is cut into
  sparse loads ("chunks") that fit one half. Right after chunk `j`'s
  `CONFIG`, `CAL_IDX` and `MV_FIXED`, the compiler issues the loads of chunk
  `j+1`: its dense tile, if new, and its sparse words into the other half.
  These loads then run while chunk `j`'s `MV_DYN`/`CMP` pairs compute. The
  `CONFIG` of chunk `j+1` carries `wait_dma`, so it never starts before its
  data is in. It also waits for all vector units to be idle, so the half it
  will overwrite next is no longer being read.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Each compares against a
model written independently in the testbench.

| Testbench | What it covers |
|---|---|
| `tb_vector_lane`, `tb_vec_unpack`, `tb_vec_pack` | arithmetic in both precisions, element order, sign handling, the multiply-by-one path |
| `tb_sparse_buffer`, `tb_dense_buffer`, `tb_row_index_buffer` | shadow-memory comparison, read latency, port-collision rule |
| `tb_vrf` | associative lookup priority, locks, group release, invalidation, clear |
| `tb_csr_decoder` | bitmaps against random CSR tiles, the streamed pairs, the row-done flag, exact cycle counts |
| `tb_vrf_mover` | fixed and ring placement, lock and partial-sum interlocks under random port grants, cycle counts |
| `tb_vex` | `CMP` results in INT8 and INT32 with and without partial sums, `nnz+4` / `nnz+5` latency, release and invalidate, `vrf_miss` |
| `tb_dma`, `tb_bus_interface`, `tb_instr_buffer` | random transfers and traffic against DRAM models with random latency and back-pressure |
| `tb_controller` | every issue rule against a reference, each cycle, over long random programs |
| `tb_flexvector_top` | the whole design at its default sizes (below) |
| `tb_gcn_workloads` | the whole design on graphs shaped like the benchmark data sets (below) |

`tb_flexvector_top` runs the unmodified top on a 32-node graph in three
phases:

1. `H = X x W` in INT8, double-VRF. Its tiles alternate between a fully
   dynamic VRF (`k = 0`) and a fixed region sized with the single-VRF bound.
   With that bound, consecutive rows can need the same dynamic slots, so the
   lock interlock must hold `MV_DYN` back;
2. `O = A x H` in INT8, double-VRF, with the top-k fixed region;
3. an INT32 product in single-VRF mode.

It drives a DRAM model with 12-cycle latency and random back-pressure. It
checks every output element and the count of MAC cycles. It also requires
each mechanism to have happened at least once:

- fixed-region hits;
- lock stalls, partial-sum stalls and port stalls;
- MV_Dyn/CMP overlap, and DMA/compute overlap;
- a Sparse Buffer load into the idle half while `CMP` runs;
- single-VRF waits;
- vertex-cut sub-rows;
- both precisions;
- all six sub-buffers.

A typical run is 471 instructions and about 3600 cycles. It records 390
fixed-region hits, 66 lock stalls, 63 partial-sum stalls, 5 port stalls,
309 overlap cycles, and 232 cycles of sparse loading under `CMP`. Over 51
random seeds every count stayed above zero, with at least 31 lock stalls and
3 port stalls.

`tb_gcn_workloads` runs one GCN layer at default sizes on five synthetic
64-node power-law graphs: first `H = X x W` with a fully dynamic VRF, then
`O = A x H` with the top-k fixed region. Each graph has the average degree
of one of the common GCN benchmark graphs. Its 64 input features have that
data set's usual feature density: about 1% for the citation graphs, 10% for
Pubmed, dense for Yelp and Reddit. The Reddit-like graph is capped at 75%
density. One run gave:

| Graph (avg. degree) | X nonzeros | A nonzeros | Instructions | Cycles | MAC-cycle share | Fixed-region share of MACs |
|---|---|---|---|---|---|---|
| CiteSeer-like (2.8) | 100 | 242 | 761 | 4770 | 10% | 39% |
| Cora-like (4.0) | 108 | 320 | 849 | 5342 | 11% | 41% |
| Pubmed-like (4.5) | 462 | 352 | 1119 | 7162 | 15% | 24% |
| Yelp-like (38.9) | 4096 | 2552 | 3845 | 31149 | 25% | 2% |
| Reddit-like (capped) | 4096 | 3136 | 4105 | 33486 | 25% | 1% |

On sparse graphs, the hub columns live in the fixed region during
aggregation. They take about half of that step's MACs (the shares above
are over the whole layer). On dense tiles the vertex cut leaves every sub-row with 6
misses. In double-VRF mode `k + 6 + 6 <= 12` then forces `k = 0` for most
chunks, and the VRF works mostly as two dynamic halves. The low MAC share
comes from the per-chunk overhead of this simple compiler. Each chunk pays
for `CONFIG`, `CAL_IDX`, `MV_FIXED`, and a drain of the vector units before
the next `CONFIG`. The hardware does not impose it.

To run one testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vex \
    -y rtl -y tb +libext+.sv -Irtl rtl/fv_pkg.sv tb/tb_vex.sv
./obj_dir/Vtb_vex
```

## How this relates to the published design

The following come from the published description:

- the block set;
- the sizes: 128-bit VRF rows, 4 x 32-bit lanes, INT8/INT32, VRF depth 6 x 2,
  2 KB Dense Buffer with six rows-to-compute buffers, 256 B Sparse Buffer,
  16 x 16 tiles, vertex-cut bound 6;
- the three Dense Buffer regions;
- the fixed/dynamic VRF split with a per-tile boundary set by `Config`;
- single and double-VRF modes;
- the instruction set and the order of instructions in a tile;
- `CAL_IDX` producing one-hot row bitmaps;
- the CSR decoder's row-done flag;
- the partial-sum flag of `CMP`, with the partial sum loaded by `MV_DYN`;
- the MAC unit's constant-1 multiplicand input.

The following are this design's own choices. The description is silent on
them.

- The instruction encoding, plus `HALT`/`NOP` and the two wait bits.
- The CSR word format and tile layout in the Sparse Buffer.
- The VRF tags, the ring form of the dynamic region, the lock groups and all
  interlocks.
- The bus protocol, the arbitration and the prefetch FIFO.
- All cycle counts.
- 32-bit accumulators with wrap-around results.
- The partial-sum row going through the lanes with multiplicand 1. The
  published MAC figure also shows a second multiplexer in front of the adder,
  whose exact use is not spelled out.
- The row index buffer being read by the data mover. The published block
  diagram draws its output towards the instruction decoder.

Not built:

- The graph preprocessing (METIS edge-cut, vertex cut) and the top-k
  compiler. These are software; the testbench contains a simple version.
- The DRAM itself.
- The alternative configurations used in the published sensitivity studies:
  64 x 64 tiles, other VRF lengths and depths, larger buffers.

Between the full GCN data sets and this design, the limit is not on chip. Any
graph is processed tile by tile. The limit is the 24-bit DRAM beat address
(256 MiB). The two large graphs with millions of edges need their program
and data split into several runs.

Parameters carry the published values as defaults. The global sizes are
constants in `fv_pkg`: `VLEN`, `NLANES`, `VRF_DEPTH`, `TILE`, `DB_ROWS`,
`SB_WORDS`. The 16-bit bitmaps, 7-bit Dense Buffer addresses and the
instruction field widths follow from them. Changing `TILE` or `VLEN` also
needs the instruction fields to be revisited.
