# A many-core floating-point overlay for FPGAs

This is a programmable accelerator that sits on top of an FPGA fabric (an
*overlay*). It has three parts:

- a row of small single-precision floating-point cores;
- a network between the cores whose connections can be reconfigured;
- a DMA engine that streams data between external memory and the cores.

The point is to give the throughput of a dedicated datapath to dense linear
algebra without building a new bitstream for every algorithm. Each core is
deliberately minimal: one fused multiply-add unit, a local memory, three
small buffers and a controller that runs *vector instructions*. A vector
instruction describes a whole two-level loop of identical operations, so the
core spends almost no logic on control. A host processor, such as the ARM
of a Zynq, does the rest. It loads each core's program, sets the network
switches, and queues DMA descriptors that describe which memory walk goes to
which core.

Default sizes follow the 16-core architecture the overlay was evaluated with
for matrix multiplication:

- 16 cores;
- 32 KB (8192 words) of local memory per core;
- a DMA cache of 256 one-word lines;
- an FMA and a reciprocal unit in every core. This configuration serves
  matrix multiplication, LU decomposition and FFT alike. Every core also
  has the optional square-root and inverse-square-root operators.

```
             +--------------------- overlay_top ---------------------+
  host ----> | cfg port --+--> programs / coefficients / switches    |
             |            +--> DMA descriptor queues                 |
             |                                                       |
  AXI4 <---> |  dma (+ dma_cache) == stream ==> network ==> core 0..N-1
 (DRAM ctrl) |        ^                            |  ring  |        |
             |        +======== result bus ========+<-------+        |
             +-------------------------------------------------------+
```

## The core

Each core (`core.sv`) contains:

| Part | Size | Role |
|---|---|---|
| Input buffer A, input buffer B | 32 words each | Operands arriving from the network |
| Output buffer | 32 words | Results leaving the core, each word tagged with a route |
| Local memory (`local_mem.sv`) | 8192 words | Two read ports and one write port. Built as two copies of a simple dual-port RAM that are always written together. |
| FPU (`fpu.sv`) | | Computes `±(a·b) + c`, a reciprocal, an inverse square root, a square root, or a plain move |
| Controller (`core_ctrl.sv`) | | Program memory of 64 instructions (`cfg_mem.sv`) and three address generators (`addr_gen.sv`) |

### Instruction set

An instruction (`overlay_pkg::instr_t`) is one of:

- **EXEC**: run `n_in × n_out` operations `fop(src_a, src_b, src_c)`.
  - Each source is one of: buffer A, buffer B, memory read port 0, memory
    read port 1, constant 0, constant 1.
  - Each memory port has its own address generator. Iteration (i, o) uses
    address `base + i·s_in + o·s_out`.
  - The result can be written to local memory (address from a third
    generator), sent out through the output buffer, or both.
  - A sent word carries its route: the result bus to memory, or buffer A or
    buffer B of the next core.
  - `hold_a` / `hold_b` keep the head word of a buffer for a whole inner loop
    and pop it only on the last inner iteration. This is how one broadcast
    element of A multiplies a whole row of partial products without being
    sent again.
- **LOOP**: jump back to `tgt` until the body has run `n_in` times (one
  level of program loops).
- **HALT**: stop. `core_busy` for this core falls.

Moves from a buffer into local memory are EXECs with `fop = PASS`. As a
result, every local-memory write passes through the FPU pipeline and the
memory needs only one write port.

### Issue rule and timing

The controller spends one cycle fetching an instruction and one decoding it.
After that it issues at most one operation per cycle. An operation issues
only when both of these hold:

- every buffer it reads has a word;
- the output buffer will still have room when the result arrives. The
  controller counts the words already in the output buffer plus the sent
  results still in flight.

So a core stalls rather than drops data. Back-pressure then travels back
through the network to the DMA.

Operations issue in the same cycle the local-memory reads start. Operands are
ready one cycle later. The result is written `FPU_LAT`+1 = 5 cycles after
issue.
At the end of each instruction the controller waits for the pipeline to
empty, so the next instruction may read what this one wrote. There is no
hazard logic inside an instruction: a program must not read, inside one
EXEC, a word that the same EXEC wrote within its last six operations.
The matrix and LU programs never do.

### Arithmetic

`fp32_pkg.sv` holds the arithmetic as functions; `fpu.sv` pipelines them.

**FMA**
- A true fused multiply-add with a single rounding, round-to-nearest-even.
- Subnormal inputs are read as zero.
- Results too small to be normal become zero; results too large become
  infinity.
- Any infinity or NaN input gives a quiet NaN.
- This is the usual simplification for FPGA floating point. It is not full
  IEEE-754.

**Reciprocal**
- Works on the mantissa `m ∈ [1,2)`. The top `SEG_BITS`=6 fraction bits
  select one of 64 segments.
- The segment's quadratic `c0 + c1·m + c2·m²` is evaluated as two chained
  FMAs (Horner's rule), and the exponent is then negated.
- The coefficients are not hardwired. The host writes them per segment
  (`CT_RCOEF`), so the accuracy/area trade-off is a software decision.
- The testbenches fit each segment's quadratic through its two end points and
  its midpoint. That gives about 1e-6 relative error with 64 segments.

**Inverse square root and square root**
- These use the same scheme with a second coefficient table
  (`coef_idx = {1, segment}`).
- The exponent is first made even. This puts the mantissa `m` in [1,4).
  The segment number is the exponent parity followed by the top five
  fraction bits.
- The quadratic gives `1/sqrt(m)`, and halving the exponent finishes
  `1/sqrt(a)`.
- `sqrt(a)` is computed as `a · (1/sqrt(a))`, with one more FMA.
- A negative input gives a quiet NaN.

## The network

`network.sv` has one switch per core. The switch selects, for buffer A and
for buffer B separately, whether it is fed by the DMA stream or by the output
of the core on its left. The last core's output wraps to core 0, forming a
ring.

**Words from the DMA** carry a destination core, a broadcast flag and a
buffer (A/B):
- An addressed word goes to one core.
- A broadcast word goes to every core whose switch takes that buffer from
  the DMA.
- A broadcast is accepted only when every target has room, so all cores see
  the same sequence.
- A word that no switch accepts is dropped. This keeps a misconfigured
  overlay from hanging.

**Words leaving a core** go one of two ways:
- A word routed to the neighbour moves when the neighbour's buffer has room.
- A word routed to the bus competes for the single result bus to the DMA.
  A round-robin arbiter grants one core per cycle, and the grant rotates past
  the last winner.

With these three paths, the same hardware can be set up either as a
broadcast array (matrix product) or as a linear systolic chain (LU), without
changes to the architecture.

## The DMA and its cache

`dma.sv` works from descriptors that the host queues through the
configuration port.

### Read descriptors

A read descriptor (`rdesc_t`) is a two-level strided walk:
`base + i·s_in + o·s_out`. It also says where each word goes:

- **CORE**: one core.
- **BCAST**: all cores.
- **SCATTER**: core `core + o`, one core per outer index. Scattering a row of
  B gives each core its own columns.

It also names the target buffer, and it selects one of two ways to read
memory:

- **Uncached**: consecutive addresses (`s_in`=1) are fetched as AXI INCR
  bursts of up to `MAX_BURST`=16 beats, never across a row. Strided walks use
  single beats.
- **Cached**: meant for column walks of a row-major matrix.
  - On a miss, the DMA fetches a burst of `LINE_WORDS` consecutive words
    starting at the missed address.
  - The first word is forwarded to the network at once. The line is kept in
    `dma_cache.sv`.
  - The next column walk then finds its elements in the lines fetched for
    the previous one.
  - Lines start at any address, so the cache is fully associative. It is
    replaced round-robin.
  - A descriptor may flush the cache before it starts.
  - Every DMA write invalidates the lines that hold the written address, so
    a cached read never returns stale data.

To see why the cache matters: in the matrix product, column k of A is
broadcast for every k. With y rows per block, one miss per row fills y lines
that cover the next `LINE_WORDS − 1` columns. Sizing the cache at y lines of
`LINE_WORDS` words is the sizing rule the defaults follow:

| Local memory | Lines × words per line |
|---|---|
| 32 KB per core | 256 × 1 |
| 2 KB per core | 128 × 16 |

### Write descriptors

Each core has its own small queue of write descriptors (`wdesc_t`, the same
two-level walk). When a core wins the result bus, its word is written at the
next address of that core's current descriptor. Results from several cores
may therefore interleave freely on the bus.

### AXI port

The AXI4 master supports:
- one outstanding read burst;
- single-beat writes with one outstanding response;
- 32-bit data, with word addresses shifted to byte addresses.

Assertions check two things:
- the AR channel holds steady while it waits for `arready`;
- a result-bus word arrives only for a core that has an active write
  descriptor.

## Configuring a job

The host writes `cfg_data` to `cfg_addr = {target, core, index}`. A write
takes place in a cycle where `cfg_valid` and `cfg_ready` are both high:

| target | effect | data |
|---|---|---|
| `CT_IMEM` | program word `index` of `core` | `instr_t` |
| `CT_RCOEF` | reciprocal segment `index` of `core` | `rcoef_t` {c2,c1,c0} |
| `CT_SWITCH` | switch of `core` | `switch_t` {a_left,b_left} |
| `CT_RDESC` | queue a DMA read descriptor | `rdesc_t` |
| `CT_WDESC` | queue a write descriptor for `core` | `wdesc_t` |
| `CT_START` | start every core whose bit is set | bit mask |

`cfg_ready` is low only while the addressed descriptor queue is full. A job
is finished when `core_busy` is all zero and `dma_idle` is high.

## Example programs

The two end-to-end testbenches act as the host and as the external memory
(`tb/axi_mem_model.sv`). `tb_overlay_top` uses 4 cores, an 8×8 product and an 8×8 LU;
`tb_overlay_full` uses the default 16 cores, a 352×352 product and a 128×128 LU. Each
testbench runs two programs on the same overlay, one after the other.

### Matrix multiplication, C = A·B, block algorithm

Each core owns X columns of a y-row block of C, which stays in local memory
(`2X + X·y` words). For each k:

1. The DMA scatters row k of B, X words per core, into buffer B.
2. The DMA broadcasts column k of A into buffer A. This walk goes through the
   cache.
3. Every core moves its X words of B into memory.
4. Every core runs one EXEC of `y × X` FMAs, `c[i][j] += a[i][k]·b[k][j]`,
   holding each A word for a row.

A LOOP instruction repeats steps 3 and 4 for every k. A last EXEC sends the
C block out over the result bus. The per-core write descriptors place it in
memory.

At the default sizes this fits matrices up to x ≈ 22 columns per core with
y = 256 rows (5654 of 8192 words). Bigger matrices are done as several such
blocks.

### LU decomposition on a chain (no pivoting)

Core q handles column q:
1. It takes the pivot from its left neighbour (the DMA for core 0).
2. It computes the pivot's reciprocal.
3. It scales the column below the pivot to get column q of L.
4. It updates each later column with an FMA.
5. It passes the updated columns to core q+1 over the ring.

Every core sends its L and U values over the result bus.

A matrix with more columns than there are cores is done in passes of N
columns:
1. In every pass but the last, the last core of the chain sends its updated
   trailing columns over the result bus instead of the ring.
2. Its write descriptor puts them back into the result matrix: one
   `m × (m−1)` walk covering the U word and the updated column below it.
3. The host reloads the programs for the next N columns.
4. The host streams that trailing matrix in again.

The end-to-end testbenches check C bit for bit (integer-valued operands make
the product exact) and check LU against a double-precision reference. They
also count each mechanism and fail if one of them never happened:

- DMA cache hits and misses, and uncached bursts;
- stream back-pressure and core waits;
- held operands and program loops;
- broadcast words, neighbour transfers and bus writes;
- reciprocals.

At reduced size, back-pressure and cache hits are required.
With default sizes they are only reported, because 32-word buffers rarely
fill.

Cycle counts measured:

| Run | Problem | Cores | Cycles |
|---|---|---|---|
| Reduced | 8×8 product | 4 | 1029 |
| Reduced | 8×8 LU, 2 passes | 4 | 629 |
| Default | 352×352 product, x = 22 | 16 | ≈ 3.30 M |
| Default | 128×128 LU, 8 passes | 16 | ≈ 229 k |

The published 16-core figure for the 128×128 LU is about 104 k cycles, so
this implementation is about 2.2× slower. Two likely costs:
- each instruction drains the pipeline before the next one starts;
- between passes the trailing matrix makes a round trip through external
  memory.

The 352×352 product runs at the operating point the block sizes are chosen
for. Each core owns x = 22 columns of all 352 rows, so the C block takes 7744
of its 8192 words. The ideal is 352³/16 ≈ 2.73 M cycles at one FMA per core
per cycle, so the measured run keeps the FMAs busy 83 % of the time. The
published 16-core design reports 86 %. The remaining loss is the B move and
the pipeline drain in every step of k. Smaller products (small x) lose
proportionally more.
## Simulating

Every unit has a self-checking testbench, `tb/tb_<module>.sv`, that ends by
printing `TB_RESULT checks=… failures=…`. Every testbench also has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/overlay_pkg.sv rtl/fp32_pkg.sv tb/tb_fp_pkg.sv tb/tb_ovl_pkg.sv \
  rtl/sync_fifo.sv rtl/local_mem.sv rtl/fpu.sv rtl/addr_gen.sv rtl/cfg_mem.sv \
  rtl/core_ctrl.sv rtl/core.sv rtl/network.sv rtl/dma_cache.sv rtl/dma.sv \
  rtl/overlay_top.sv tb/axi_mem_model.sv tb/tb_overlay_top.sv \
  --top-module tb_overlay_top -o sim && obj_dir/sim
```

For a unit test, replace the last testbench file and the top module with
another testbench. `tb_overlay_full` builds in about half a minute and runs
in under a minute. The simulator has two states, so the testbenches reset or
initialise everything they read.

## Where this implementation departs from the published design

**Not built**
- The crossbar and network-on-chip variants of the interconnect. Only the
  topologies the evaluated mappings need are built: broadcast or addressed
  stream, a linear chain closed into a ring, and a result bus.
- The second DMA channel that the FFT mapping uses for real and imaginary
  parts. For this reason the FFT mapping, with its pairs of cores exchanging
  operands, cannot run as described.

**Different from the published design**
- **No doubled B store.** The published matrix algorithm keeps a second B
  block in local memory so that loading overlaps computation. Here the next
  B row waits in input buffer B while the current step runs, which overlaps
  in a similar way.
- **Coefficients live in tables inside the FPU**, not in local memory, so
  they do not compete for the memory's read ports.
- **Every core has every operator.** The published design configures each
  core statically with the operators its application needs.
- **Local memory is two copies of a RAM.** This gives two reads and one write
  per cycle, and so doubles the block RAMs per core compared with the
  published resource count.
- **Cache size conflict.** The text speaks of a DMA cache of "up to 16
  lines", while the published table of cache sizes equals y lines of up to
  16 words. The table is followed here: 256 lines by default.

**This design's own choices.** The published design leaves these open:
- the instruction set and all descriptor and configuration formats;
- buffer depths and the FPU latency;
- the cache's associativity and replacement policy;
- the AXI subset;
- the arbitration policy of the result bus.
