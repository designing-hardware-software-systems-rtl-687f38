# A many-core floating-point coprocessor for an embedded host

This is RTL for a coprocessor that sits next to an embedded processor and
runs dense and sparse linear algebra in single precision. It uses many small
cores. Each core has one fused multiply-add unit, a local memory and a short
microprogram. No core has an instruction cache or a general-purpose
pipeline.

The host writes micro instructions into a DMA engine. The DMA engine streams
operands from external memory into the cores over a broadcast bus and writes
the cores' results back to memory. The host never touches the data itself.

Two kernels are built in:

- **Block matrix multiply.** C = A·B for square matrices. Each core owns a
  y×x block of C. Elements of A are broadcast to all cores. Each core keeps
  one row of its own slice of B.
- **Sparse matrix-vector product.** y = A·x with A in compressed-column
  form. Rows are dealt to the cores round robin.

At the default parameters the design has 16 cores, each with 8192 words
(32 KB) of local memory. They are arranged as 4 clusters of 4 cores. The DMA
cache has 16 lines.

## Block diagram

```
 host instr ──► DMA ──────────────► bus (2-deep queue, broadcast) ──► cluster 0..N-1
 (rd / wr)      │  read module ──┐                                     │ local DMA (routing)
                │  write module  │◄── result words ◄── up mux ◄────────│ local PE (programming)
                │  DMA cache ◄───┘                                     │ core 0..M-1
                ▼
        external memory ports (burst read, word write)
```

Inside a core:

```
 aF FIFO ──► FMA a operand          bF FIFO ──► B-row buffer (2 banks × BBUF_X)
                │                                    │
 local memory (dual port) ── accumulator c ──► FMA ◄─┘ b operand
        ▲                                       │
        └──────────── write-back ◄──────────────┘
 local memory ──► output FIFO ──► network        configuration memory ──► controller
```

## Files

One module per file in `rtl/`:

| file | what it is |
|---|---|
| `mc_pkg.sv` | Shared types: packets, micro instructions of the core and of the DMA, performance counters |
| `fp_fma.sv` | Combinational FP32 fused multiply-add |
| `sync_fifo.sv` | Show-ahead FIFO. Used for aF, bF, the output buffer, the bus queue and the DMA instruction queues |
| `dp_ram.sv` | One-write, one-read block RAM with a registered read |
| `core_ctrl.sv` | Core sequencer: instruction fetch, the three kernels, hazard stall |
| `core.sv` | One core |
| `local_pe.sv` | Writes microprograms into the cores of its cluster and starts them |
| `local_dma.sv` | Routes packets to the cores of its cluster; multiplexes their outputs upwards |
| `cluster.sv` | Local PE, local DMA and the cores of one cluster |
| `icn_bus.sv` | Interconnect between the DMA and the clusters |
| `dma_cache.sv` | Burst cache for strided reads |
| `dma_read.sv`, `dma_write.sv`, `dma.sv` | DMA engine: independent read and write modules |
| `manycore.sv` | Top level |

Every file opens with a comment on its interface and timing.

## How a core computes

### Microprogram

A core's configuration memory holds 64-bit instructions, stored as two
32-bit words (low half first). Each instruction has a 4-bit opcode and three
20-bit fields.

| op | fields | action |
|---|---|---|
| `MATMUL` | x, y, k | for q in 0..k-1: load a B row of x words from bF; then for each of y A words from aF, do `C[r][j] += a·b[j]` for all j |
| `SPMV` | rows, cols | clear `rows` words of local memory; then for each column: read x_j and n_j from aF, then n_j pairs (row, value), and do `y[row] += value·x_j` |
| `STORE` | base, count | copy `count` local words to the output FIFO |
| `HALT` | — | pulse `done` and stop |

In the matrix kernel, C is kept in local memory as y rows of x words. It is
not cleared: `MATMUL` starts from zero on its first row of B and accumulates
after that.

`start` runs the program from instruction 0. A start that arrives while the
program is running is remembered, and the program runs again after `HALT`.

### Pipeline and rate

The core issues one multiply-add per cycle. There are three stages:

1. **Issue.** Read the accumulator from local memory and the B element from
   the B-row buffer.
2. **Multiply-add.** The FMA computes a·b+c, and its result is registered.
3. **Write back** into local memory.

There is no forwarding. An issue whose accumulator address is still in the
FMA or write-back stage waits until the write-back is done. The
`ev_raw_stall` output counts these stall cycles.

A block product revisits the same accumulator only every x·y issues.
Blocks with x·y ≥ 3 therefore never stall.

At 250 MHz, one multiply-add per cycle is 0.5 GFLOP/s per core. That matches
the peak figure the design was sized for.

### Loading B while multiplying

The B row comes through bF into a separate buffer with two banks. While the
core multiplies with row q from one bank, a loader fills row q+1 into the
other bank. The `ev_overlap` output counts these overlapped writes.

In the original description, B lives in the local memory. It was moved into
its own buffer here so that the single write port of the local memory is
free for the accumulators.

### Sparse records

One core receives one stream through aF. For each column j the stream holds:

- `x_j`;
- `n_j`, the number of nonzeros of that column in rows owned by this core;
- then `n_j` pairs of (local row index, value).

Rows are dealt to the cores round robin: global row i goes to core i mod P,
at local row ⌊i/P⌋. Each nonzero takes two cycles, because two words arrive
through one FIFO.

## Programming the array

All data and configuration reach the cores as **packets**
(`mc_pkg::down_pkt_t`). A packet has:

- a kind: A (goes to aF), B (goes to bF), CFG (next microprogram word), or
  START;
- a broadcast flag;
- a cluster number and a core number;
- one 32-bit data word.

The **local PE** of a cluster keeps one write pointer per core.

- Each CFG word goes into the addressed core's configuration memory, and the
  pointer advances.
- START pulses the core's `start` input and resets the pointer to 0.

The **local DMA** sends A and B words to the addressed core. For a
broadcast, it sends the word to every core. A broadcast moves only in a
cycle in which every targeted FIFO has room, so no core can miss a word.

The **bus** keeps a two-entry queue. A packet leaves the queue only when
every cluster accepts it or ignores it. A full core FIFO therefore holds up
the bus and, behind it, the DMA; the `net_stalls` counter counts those
cycles.

The host drives the DMA with two instruction streams.

- **Read instruction** (`dma_rd_instr_t`): kind, broadcast, cluster, core,
  addr, count, stride. It reads `count` words at addr, addr+stride, and so on,
  and sends each word as a packet.
  - Stride 1 goes out as sequential bursts of up to 16 words, through a
    32-word buffer.
  - Any other stride goes through the DMA cache.
  - A START instruction reads nothing and sends a single packet.
- **Write instruction** (`dma_wr_instr_t`): cluster, core, addr, count,
  stride. It takes `count` words from the output FIFO of the named core and
  writes them to memory at addr, addr+stride, and so on.

The two modules run independently, so results are written back while new
operands stream in. Each module counts completed instructions
(`rd_done_cnt`, `wr_done_cnt`).

### DMA cache

The cache serves strided reads, such as a column of a row-major matrix.

On a miss, it asks memory for a burst of `LINE_WORDS` words that **starts at
the requested word**, not at an aligned address. The first word of the burst
goes straight to the requester, and the rest fill the line. A later request
for any of the following `LINE_WORDS-1` addresses hits.

The cache is fully associative, with 16 lines replaced round robin. `flush`
invalidates all lines. The host must flush after writing memory that the
cache may hold.

### Matrix multiply on the array

The end-to-end testbenches run this schedule. With P cores, C is cut into
y×(xP) tiles. For each tile:

1. Broadcast the program (`MATMUL x,y,n`, `STORE 0,xy`, `HALT`), then
   broadcast START.
2. For q = 0..n-1:
   - send core p its x words of row q of B;
   - broadcast the y words of column q of A. These are strided reads through
     the cache.
3. Queue one write instruction per core and per row of its C block.

The block size that minimises traffic for L words of local memory is
x = L/(2+√(pL)) and y = √(pL). For the default L = 8192 and p = 16, that
gives x = 22 and y = 362, which fits: 7964 words of C, and a B row of 22 ≤ 64.

## Parameters of the top (`manycore`)

| parameter | default | meaning |
|---|---|---|
| `N_CLUSTERS` | 4 | clusters |
| `CORES_PER_CLUSTER` | 4 | cores per cluster (16 cores in total) |
| `LMEM_WORDS` | 8192 | local memory per core, in 32-bit words (32 KB) |
| `BBUF_X` | 64 | largest x (words per B row); the B buffer holds 2·BBUF_X words |
| `CFG_WORDS` | 32 | configuration memory words per core (16 instructions) |
| `FIFO_DEPTH` | 16 | depth of aF, bF and the output FIFO |
| `N_LINES` | 16 | DMA cache lines |
| `LINE_WORDS` | 8 | words per cache line and per cache burst |

The second published configuration has 32 cores with 16 KB each. It is
`N_CLUSTERS=8, LMEM_WORDS=4096`.

## Departures from the original design

These parts of the original system are not built:

- **Host-side parts.** The embedded processor, the DRAM controller, the I/O
  controller and the external memory are outside the coprocessor. They appear
  here as ports.
- **AXI links.** Both AXI links are replaced by plain valid/ready ports.
- **Cluster shared memory.** It is named in the original but never used by
  either kernel, so it is not built.
- **Other arithmetic functions.** The arithmetic unit can also be configured
  for add, multiply, reciprocal and (inverse) square root. Only fused
  multiply-add is built, because that is what both kernels use.

- **Per-core configuration.** The original lets each core have its own
  memory size and set of arithmetic functions. Here all cores are the same.
- **Programming the local DMA.** In the original, the local PE also
  programs the local DMA. Here the local DMA's routing is fixed by the
  packet header, so there is nothing to program.
- **Design flow.** The original generates the architecture and a system-level
  model from a parameter description. That flow is not part of this RTL; the
  parameters of `manycore` take its place.

These choices were made here because the original does not specify them:

- the local PE is a small programming sequencer, not a processor;
- the bus topology;
- the instruction formats;
- the sparse record stream;
- cache line length and replacement policy;
- all FIFO depths;
- the number of cores per cluster.

Floating point follows IEEE-754 single precision with round-to-nearest-even,
with these exceptions:

- subnormal inputs and results are flushed to zero;
- every NaN result is 0x7fc00000;
- flags are not raised.

## Simulating

Verilator 5 is enough. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself. Each one has a watchdog.

```
verilator --binary --timing --assert -Irtl -Itb rtl/mc_pkg.sv tb/tb_fp_pkg.sv \
          tb/tb_manycore.sv --top-module tb_manycore
./obj_dir/Vtb_manycore
```

| testbench | covers |
|---|---|
| `tb_fp_fma` | 25 000 random and special-case FMAs against a real-arithmetic model with RNE/FTZ rounding |
| `tb_sync_fifo`, `tb_dp_ram` | random traffic against queue/array models |
| `tb_core` | block product with store; the peak-rate cycle bound (k·x·y + small); the hazard stall; the sparse kernel; start while busy |
| `tb_local_pe`, `tb_local_dma`, `tb_cluster` | programming, routing rules, a two-core cluster doing a block product |
| `tb_icn_bus` | broadcast and addressed delivery under random back-pressure |
| `tb_dma_cache` | hits, misses, miss latency, eviction and flush |
| `tb_dma` | sequential and strided reads, writes, both at once |
| `tb_manycore` | 2×2 cores, small memories: a 16×16 matrix product and a 23×17 sparse product end to end; checks every result; counts each mechanism and fails if any never happened |
| `tb_manycore_full` | the same host program on the default 16-core top: a 32×32 product and a 61×40 sparse product |
| `tb_matmul_workload` | default 16-core top, a 352×352 product with 352×22 blocks per core (7744 of 8192 local words); checks every element and requires at least 80 % multiply-add efficiency |
| `tb_spmv_workloads` | one cluster of two cores, other parameters at default: random sparse matrices shaped like BIBD_14_7 (91×3432, 21 nonzeros per column) and Maragal_2 (555×350, about 4000 nonzeros) |

The end-to-end testbenches count these mechanisms:

- A broadcasts;
- configuration broadcasts;
- cache hits and misses;
- sequential bursts;
- B rows loaded during products;
- network back-pressure;
- reads running while writes are in flight.

They use small integers as matrix values, which makes every floating-point
sum exact. The results must then match the integer reference bit for bit.

`tb/ext_mem_model.sv` is a behavioural external memory. It has a fixed
latency, then returns one burst word per cycle, and it always accepts writes.

## How far to trust it

Every module has been simulated on its own and inside the top.

- Every module has a testbench.
- Each testbench has been checked against a deliberately broken copy of its
  module, to show that the testbench can fail.
- The whole top at default size has run matrix products up to 1024×1024,
  and all results were exact.
- Sparse products shaped like two of the original test matrices have run
  on two cores.

## Measured performance

All figures below were measured in simulation. The external memory model
has a latency of 10 clocks and serves one burst at a time.

| run | clocks | note |
|---|---|---|
| 352×352 product, 16 cores, 352×22 blocks (`tb_matmul_workload`) | 2 996 977 | 91 % of one multiply-add per core per clock |
| 1024×1024 product, 16 cores, 256×32 blocks (the same testbench with `run_matmul(1024, 32, 256, 0)`, memory model `WORDS(1 << 22)` and a longer watchdog) | 71 383 154 | 94 % efficiency; all 1 048 576 results exact; about 4 minutes of simulation |
| 352×352 product, 32 cores (`N_CLUSTERS=8, LMEM_WORDS=4096`), 352×11 blocks | 3 019 143 | 45 %: see below |
| sparse 91×3432 product, 21 nonzeros per column, 2 cores (`tb_spmv_workloads`) | about 238 000 | limited by the memory model: 16-word bursts, one at a time |

For comparison, the original evaluation reports two figures:

- about 77.8 million clocks for a 16-core matrix product of this size. The
  matrix size is not printed; 7 GFLOP/s over 0.31 s gives n ≈ 1024.
- 143 800 clocks at 100 MHz for the 91-row sparse matrix.

The 32-core run is limited by the column reads of A, not by the cores. A is
stored row-major, so each column element is a strided read. With y = 352
rows, a column touches far more lines than the cache's 16. Every element is
then a miss and costs a full burst. At 16 cores each column feeds twice as
many multiply-adds per core, which hides this cost.

A host program that stores A column-major would turn these reads into
sequential bursts. The original does not say how A is laid out.

The sparse run is bandwidth bound. Each nonzero costs two words on the single
network, so its time follows the memory system, not the cores.

This RTL comes with no timing-closure or FPGA resource figures.
