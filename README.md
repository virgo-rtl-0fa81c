# A cluster-level matrix unit for a SIMT GPU cluster

Tensor-core-style matrix units usually sit inside each GPU core. They take
operands from the register file and return results to it. Scaling them up
therefore costs register-file bandwidth, register pressure and energy in
every core. This design moves the matrix unit out of the cores. One larger
unit serves the whole cluster:

- a 16×16 FP16 systolic array;
- its own 32 KB FP32 accumulator memory;
- a coarse-grain sequencer that runs a whole tile multiplication from a
  single command.

The unit reads its operands straight from the cluster's shared memory. Its
results stay in the accumulator memory until a DMA engine moves them out.

The SIMT cores become producers and consumers around the unit. They start
DMA copies and matrix operations with ordinary stores to memory-mapped
registers, and the cluster never blocks them for it. They poll a status
register to wait, and they meet at a cluster-wide hardware barrier. Between
those points they are free, for example to post-process the previous tile.

This repository holds synthesizable SystemVerilog for that cluster: shared
memory and its interconnect, matrix unit, DMA engine, command registers and
barrier. It also holds self-checking testbenches for every block and for the
whole cluster at full size. The SIMT cores, caches, L2 and DRAM are not part
of it. They connect through the top module's ports, and the end-to-end
testbench plays their part.

## Cluster overview

```
   core 0..3 (8 lanes each)          barrier requests
        |  word requests                    |
        v                                   v
  +---------------------------+       +--------------+
  | shared memory 128 KB      |       | synchronizer |
  |  lane filter / serialiser |       +--------------+
  |  per-subbank crossbars    |--MMIO--> mmio_regs --cmd--> matrix_unit
  |  4 banks x 16 subbanks    |                    \--cmd--> dma_engine
  +---------------------------+                              |  |   |
     ^ line read (MU)  ^ line read/write (DMA) --------------+  |   |
     |                                      accumulator port ---+   |
  matrix_unit: queue -> gemm_ctrl -> systolic_array -> acc_mem      |
                                              global memory (L2) ---+
```

Top module: `virgo_cluster` (`rtl/virgo_cluster.sv`). Its defaults are:

- 4 cores with 8 lanes each;
- 4 barrier ids;
- a 64-byte line;
- command queues 4 deep.

All shared constants and types are in `rtl/virgo_pkg.sv`.

| Module | Role |
|---|---|
| `shared_memory` (+ `lane_filter`, `smem_subbank`) | banked storage, lane filter, crossbars, MMIO routing |
| `mmio_regs` | command registers, status/fence register |
| `matrix_unit` (+ `fifo`, `gemm_ctrl`, `systolic_array`, `mesh_pe`, `acc_mem`) | the matrix unit |
| `fp_mac`, `fp32_add` | FP16×FP16+FP32 fused multiply-add, FP32 adder |
| `dma_engine` | 2-D line copies between global, shared and accumulator memory |
| `synchronizer` | cluster barrier |

## Shared memory and its interconnect

Three kinds of traffic must share one memory:

- narrow 4-byte accesses from 32 SIMT lanes;
- 64-byte line reads from the matrix unit, which must never stall;
- 64-byte DMA reads and writes.

The storage is banked in two dimensions. Word address bits `[5:2]` select
one of 16 word-wide subbanks, bits `[14:6]` the row inside the subbank, and
bits `[16:15]` one of 4 banks. A 64-byte line is therefore one row across
all 16 subbanks of a single bank. A wide request splits into 16 word
sub-requests that are served together in one cycle, and it blocks only the
one bank it touches.

Each subbank has two fixed-priority arbiters, one for reads and one for
writes. Keeping the two paths separate lets a producer write while a
consumer reads.

| Path | Priority order |
|---|---|
| read | matrix unit > DMA read > aligned lanes (core 0 first) > serialised port of each core |
| write | DMA write > aligned lanes > serialised ports |

The matrix unit's `rd_ready` is constant 1. A DMA read waits only for a
matrix-unit read of the same bank.

A full 32-lane × 64-subbank crossbar would be large. `lane_filter` calls a
lane request *aligned* when all of these hold:

- its word falls into the lane's own subbank group (`addr[4:2] == lane`);
- it is inside shared memory;
- it is not an MMIO access.

Aligned requests use the direct, small crossbar path. A lane whose address
is not aligned this way, and every MMIO access, goes through one serial
port per core, one request per cycle, lowest lane first. Kernels that move
matrix data with unit-stride word accesses are fully aligned. Irregular
accesses are still correct, only slower.

The MMIO window is 256 bytes at `0x20000`, just above the 128 KB of shared
memory. Lanes reach it with ordinary loads and stores. Lane timing: a
request is accepted when its `lane_ready` is high, and the response
(read data, or write acknowledge) arrives exactly one cycle later.

## Programming interface

Registers are word addresses `0x20000 + 4*index`:

| idx | name | meaning |
|---|---|---|
| 0x00 | `R_MU_A` | A base, shared-memory byte address (64-byte aligned) |
| 0x01 | `R_MU_B` | B base |
| 0x02 | `R_MU_C` | first accumulator row of C |
| 0x03/0x04 | `R_MU_ASTR`/`R_MU_BSTR` | row strides of A and B in bytes (multiples of 64) |
| 0x05 | `R_MU_MNK` | `{K[23:16], N[15:8], M[7:0]}`, each a multiple of 16 |
| 0x06 | `R_MU_FLAGS` | bit 0: accumulate onto C (else overwrite) |
| 0x07 | `R_MU_START` | store: enqueue the matrix command |
| 0x08/0x09 | `R_DMA_SRC`/`R_DMA_DST` | byte addresses (accumulator: row × 64) |
| 0x0A | `R_DMA_SHAPE` | `{lines per row[31:16], rows[15:0]}` |
| 0x0B/0x0C | `R_DMA_SSTR`/`R_DMA_DSTR` | row strides in bytes |
| 0x0D | `R_DMA_START` | store: enqueue DMA, data = direction (0 G→S, 1 S→G, 2 A→G, 3 G→A, 4 A→S) |
| 0x10 | `R_STATUS` | commands issued and not finished (matrix unit + DMA) |
| 0x11/0x12 | `R_MU_BUSY`/`R_DMA_BUSY` | busy flags |

Argument registers are staged. A store to a START register packs them into
one command and pushes it into that unit's 4-entry queue. The store is held
off only while the queue is full, so a warp can start work and move on.

A *fence* is a poll loop on `R_STATUS` until it reads at most *n*. With
*n* = 0 it waits for everything issued. Commands of one unit run in order.
The two units run independently of each other.

A typical tile step looks like this:

1. DMA A and B into shared memory (G→S), then fence.
2. Barrier, so that every core knows the tile is present.
3. Start the matrix command. Meanwhile the cores post-process the previous
   tile.
4. Fence, barrier.
5. DMA the result out of the accumulator memory (A→G, or A→S for SIMT
   post-processing).

## The matrix unit

### Operand layout

A and B are row-major FP16 in shared memory. A shared-memory line holds 32
FP16 values, which is two 16-wide slices of a row. The sequencer reads the
line that contains the slice it needs and keeps the proper half. For
A[m, kb-block] that is the line at `A + m*astride + (kb/2)*64`, half `kb%2`.

C is FP32 in the accumulator memory, 16 values per accumulator row. Output
element (m, n) lives in row `c_row + m*(N/16) + n/16`, column `n%16`, so a
128×64 C tile fills exactly the 512 rows (32 KB). The largest single
operation, and the tile the kernels are built around, is 128×64×128.

### Sequencing (`gemm_ctrl`)

For every output column block nb (outer loop) and K block kb (inner loop):

- **PRELOAD** reads the 16 B rows `kb*16+15` down to `kb*16` and shifts
  them into the array's *shadow* weight registers.
- **STREAM** reads the M rows of A one per cycle and sends each into the
  array with a tag: its accumulator row, plus an *overwrite* bit that is set
  for the first K block of a non-accumulating command. The first row of the
  block carries a *swap* flag.

The PE array is weight-stationary and double-buffered. The swap flag travels
with the first operand row, so each PE switches to the new weights exactly
when the new block's data reaches it. The previous block's rows further down
and to the right still use the old weights.

The next PRELOAD may start only after the swap row has left the array,
`LAT = 2*DIM-1 = 31` cycles after it entered. Otherwise new shadow weights
would overwrite weights that are still in use. A block with M ≥ 31 rows
therefore hides the preload completely.

The command finishes (`done`, queue pop) when the accumulator memory has
retired every streamed row.

### Array and arithmetic

Row k of the operand vector is delayed k cycles on the way in. The result
columns are de-skewed on the way out. One 16-wide result row leaves 31
cycles after its operand row entered, one row per cycle, together with its
tag.

Each PE computes `psum + a*w` with `fp_mac`:

- the FP16×FP16 product is exact in FP32, subnormal inputs included;
- it is added to the FP32 partial sum with a single round-to-nearest-even,
  so the PE is a true fused multiply-add;
- FP32 subnormal results are flushed to zero.

Partial sums enter each column at +0.

### Accumulator memory (`acc_mem`)

The accumulator memory is a single-banked 512 × 512-bit SRAM with one read
and one write port. A result row is read in the first stage and written back
in the second, either added with 16 `fp32_add` instances or overwritten. If
the next row goes to the same address, its old value is forwarded from the
adder output. The array therefore gets one row per cycle without stalls.

The DMA port is served only in cycles with no array row in flight.

### Throughput

The matrix unit's read port has top priority, so a 128×64×128 command runs
in 4660 cycles. Ideal is 4096 cycles of full MAC use, so that is 87.9%. It
was measured with the other three cores issuing random shared-memory traffic
at the same time.

A whole 256×256×256 GEMM, including its DMA traffic, takes 90,030 cycles.
That is 72% MAC utilisation, measured against a global memory that answers
in one cycle. It is made of 16 matrix commands, one 32 KB result store per
output tile, and a fence after every step. The source reports 66.1% for
this size on its full system. The remaining loss comes from two places:

- the result store, which cannot overlap the next tile because that tile
  needs the whole accumulator memory;
- the DMA engine, which keeps only one line in flight.

The 512 and 1024 sizes differ only in `S` in the testbench.

## DMA engine

A command copies `rows × lines` 64-byte lines. Line l of row r goes from
`src + r*src_stride + 64*l` to `dst + r*dst_stride + 64*l`. The global-memory
side is the `gmem_*` port:

- 64-byte reads with in-order responses of any latency;
- posted writes.

The accumulator side uses byte address / 64 as the row. The engine keeps one
line in flight (read, wait, write). `done` pulses when a command's last
write is accepted.

## Synchronizer

Each core raises `bar_valid` with a barrier id when its participating warps
reach the barrier. When all `NUM_CORES` cores have arrived at an id,
`bar_release[id]` pulses one cycle later and the arrival set clears. Which
warps of a core take part is decided inside the core. An assertion flags a
core that arrives twice before a release.

## Departures and open points

- **Cores per cluster.** The number of cores is taken as 4. The source's
  configuration table gives 8 for its Volta-style baseline and 4 for its
  Hopper-style baseline, and its cluster drawing shows four.
- **16 subbanks.** The source allows 8 to 16. Its shared-memory drawing
  shows 8 subbanks and 256-bit wide requests, but its text sizes a wide
  request at 4·n bytes for an n×n array. For n = 16 that is 64 bytes, so
  this design uses 16 subbanks and 512-bit wide requests, and one line
  equals one bank row.
- **One matrix unit.** The source also shows a cluster with two matrix units
  of different sizes working in parallel. It does not give their sizes, and
  only the single-unit cluster is built here.
- **Lane alignment.** The source filters out "unaligned" lane requests and
  serialises them, but does not define alignment exactly. The
  subbank-of-own-lane definition above is this design's.
- **Own choices.** The following are this design's, not given by the
  source: the register map, the outstanding-command status register, the
  2-D DMA command format, the queue depths, the loop order, the operand
  layout and the exact priorities.
- **FP32 configuration not built.** Only the FP16 configuration of the
  matrix unit (16×16 FP16) is built. The source also describes an FP32
  configuration (8×8 FP32 array), which it uses to run FlashAttention. That
  workload cannot run on this RTL.
- **Not included.** The memory coalescer belongs only to the source's
  tightly-coupled baseline and is not part of this cluster. Neither are the
  SIMT cores, L1/L2 caches and DRAM.
- **Simple arithmetic.** The floating-point units are combinational, and the
  PE registers supply the pipeline. Special values (Inf/NaN) are propagated
  but not fully IEEE-exact for NaN payloads.

## Verification

Every testbench in `tb/` is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. The floating-point
references are in `tb/fp_ref_pkg.sv`: real arithmetic with explicit RNE
rounding to FP32.

| Testbench | What it checks |
|---|---|
| `tb_fp_mac` | 22k random and corner-case FMAs against a real-arithmetic reference, bit-exact |
| `tb_systolic_array` | back-to-back blocks with double-buffered preload, every result row bit-exact, latency 31 |
| `tb_acc_mem` | random overwrite/accumulate streams with back-to-back same-row hits, DMA reads and writes |
| `tb_gemm_ctrl` | the sequencer alone: request addresses, half-line choice, swap flag, row tags, the LAT gap before a new preload, completion after the last retire |
| `tb_matrix_unit` | random M/N/K commands incl. a full 128×64×128 tile, accumulate and overwrite, read-port stalls |
| `tb_shared_memory` | 4 cores of random aligned/unaligned/MMIO traffic with concurrent matrix-unit and DMA line traffic against a reference memory |
| `tb_dma_engine` | all five directions, random shapes, strides, back-pressure and latency |
| `tb_mmio_regs` | register read-back, command packing, queue back-pressure, status count |
| `tb_synchronizer` | shuffled arrivals on several barrier ids, release timing |
| `tb_gemm_workload` | a complete 256×256×256 FP16 GEMM on the full cluster as a kernel would run it: 128×64 output tiles, K steps of 128, double-buffered operand DMA overlapping the matrix unit, one accumulator→global store per tile; every element of C checked |
| `tb_virgo_cluster` | the whole cluster at default parameters: a 128×64×128 GEMM moved in by DMA, computed with overwrite and then accumulate, moved out by A→G, A→S and S→G, with concurrent lane traffic, barriers, fences and MMIO back-pressure |

`tb_virgo_cluster` counts each mechanism it exercises and fails if any count
stays zero:

- every DMA direction used;
- overwrite and accumulate commands;
- barrier releases;
- aligned and serialised lane accesses;
- lane stalls behind wide reads;
- MMIO back-pressure.

To simulate one testbench with Verilator 5, run from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  -Irtl -Itb --top-module tb_matrix_unit \
  rtl/virgo_pkg.sv tb/fp_ref_pkg.sv tb/tb_matrix_unit.sv
./obj_dir/Vtb_matrix_unit
```

The full-size cluster test and the 256-cube GEMM each run in well under a minute.

Sizes to change are in `virgo_pkg`: `DIM`, `NUM_CORES`, `LANES`,
`NUM_BARRIERS`, `CMDQ_DEPTH`, `SMEM_BYTES`, `ACC_BYTES`. The line width is
tied to `DIM` (`LINE_BYTES = 4*DIM`), so one line always feeds one array
row.
