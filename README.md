# MACO matrix-engine fabric in SystemVerilog

MACO is a multi-core processor in which every general-purpose core has its own
loosely coupled matrix engine, the MMAE. The core does not execute matrix
instructions itself. It hands a tile GEMM (C ← A·B + C) to its engine with a
few task instructions and then carries on, or polls for the result. The engine
reads and writes memory only through the shared last-level cache on the
network-on-chip. It has its own DMA engines and a *predictive* translation
buffer, so it does not depend on the core's caches and TLB. Sixteen such
compute nodes sit on a 4×4 mesh.

This RTL implements the matrix-engine side of the chip:
- the task queues that link a core to its engine,
- the engine: controller, data engine with the predictive TLB, buffers, and a
  4×4 FP64 / 2×FP32 / 4×FP16 systolic array,
- the mesh routers and network interfaces,
- the 16-node top level.

The CPU cores, their MMUs, the coherent L3 slices, and the DDR and I/O
controllers are not included. They appear as ports of the top level
`maco`, and behavioural models stand in for them in the testbenches.

## How a task flows

1. **Issue.** The core executes an MPAIS instruction on its Master Task Queue
   (`mtq`):
   - `MA_CFG` (GEMM), `MA_MOVE`, `MA_INIT` or `MA_STASH`, with six 64-bit
     parameter registers and the process's ASID.
   - The MTQ takes a free entry and marks it Valid, not Done, owned by that
     ASID. Its index, the MAID, returns in Rd the next cycle.
   - If every entry is taken, Rd bit 63 is set and nothing is sent.
2. **Queue in the engine.** The task goes to the engine's Slave Task Queue
   (`stq`), into the slot named by its MAID. Tasks run one at a time, in
   arrival order. When one finishes, the next waiting task starts at once,
   without the core's help.
3. **Execute.** The Accelerator Controller (`accel_controller`) decodes the
   registers and schedules the work (next section).
4. **Complete.** On completion the STQ reports {MAID, exception_en,
   exception_type}, and the MTQ sets Done and the exception fields of that
   entry.
5. **Query and release.**
   - `MA_READ` returns an entry's state.
   - `MA_STATE` returns the state and, if the entry belongs to the asking
     process and is Done, frees it.
   - `MA_CLEAR` wipes an entry of the asking process, for recovery after an
     exception.
   - Every answer carries the entry's ASID and a "match" bit. A process whose
     entry was freed and reused by another process can see that it no longer
     owns the entry.

### Parameter registers (R0..R5)

| reg | bits | GEMM (`MA_CFG`) | `MA_MOVE` / `MA_INIT` / `MA_STASH` |
|-----|------|-----------------|------------------------------------|
| R0 | 47:0 | virtual address of A | source address (MOVE, STASH) |
| R1 | 47:0 | virtual address of B | destination address (MOVE, INIT) |
| R2 | 47:0 | virtual address of C | – |
| R3 | 15:0 | M (rows of A and C) | number of rows |
| R3 | 31:16 | N (columns of B and C) | 32-byte words per row |
| R3 | 47:32 | K | – |
| R3 | 49:48 | mode: 0 FP64, 1 FP32×2, 2 FP16×4 | – |
| R3 | 63:56 | log2 page size, 0 = 4 KB | same |
| R4 | 31:0 | row stride of A in bytes | source row stride |
| R4 | 63:32 | row stride of B | destination row stride |
| R5 | 31:0 | row stride of C | – |

Matrices are row-major. Rows are 32-byte aligned. N and K must be multiples
of 4·L, where L is the number of SIMD lanes (1, 2 or 4). The shape must also
fit the 64 KB buffers (next section). Otherwise the task ends at once with
exception type 2. A page-walk fault ends it with exception type 1.

## Tile GEMM on the systolic array

The array is input-stationary. Each PE holds one element of B, per SIMD lane.
Rows of A flow in from the left. Partial sums of C flow down the columns and
leave at the bottom as finished values.

The controller sequences a GEMM as follows:

1. **Load.** DMA0 loads A while DMA1 loads B. Then DMA0 loads C.
   - Each goes into its own 64 KB buffer of 2048 words of 256 bits.
   - One buffer word is one matrix row segment of 4·L elements.
2. **Passes.** One pass runs for each k-group kg (4 consecutive rows of B)
   and each column group j (4·L consecutive columns).
   - **Preload:** the 4×4(×L) sub-tile of B enters from the top in 4 cycles,
     bottom row first, plus one cycle of buffer latency.
   - **Stream:** all M rows stream through, one per cycle. Per row, the 4 A
     elements of the k-group go to the 4 array rows, each copied into every
     lane, and the C word is split over the 4 columns.
   - **Write back:** results come out ROWS+COLS−1 = 7 cycles later, aligned
     again. They are written over the same C words. The next k-group adds to
     these partial sums.
3. **Store.** DMA1 writes C back to memory.

In the SIMD modes, lane l of array column n holds matrix column
4·L·j + n·L + l. So one 256-bit word of B or C is always one row of one column
group, and no reshuffling is needed between memory and array.

The buffers limit the shape: M·K/(4L), K·N/(4L) and M·N/(4L) must each be at
most 2048 words. For example, FP64 tiles up to 64×64×64 fit.

A pass costs M + ~13 cycles for 16·L multiply-adds per cycle. In FP64 at
2.5 GHz, that gives the 80 GFLOPS peak while streaming.

Each PE contains one FP64, two FP32 and four FP16 fused multiply-add units
(`fp_fma`):
- one rounding, round to nearest even,
- subnormals are flushed to zero,
- infinities and NaNs are not treated specially.

The array has skew registers at its edges (row r of A delayed r cycles,
column n of C delayed n cycles, outputs deskewed). This lets the controller
work on whole rows.

## Predictive address translation (mATLB)

The engine works with virtual addresses, but it does not wait for a TLB miss
for each new page. At the start of every DMA transfer, the `matlb` gets the
transfer's shape: base address, number of rows, row length, row stride, and
the page size.

From the shape it lists, ahead of the DMA, every page the transfer will
touch:
- the page of each row's first byte,
- every page boundary crossed inside a row,
- skipping a page already listed for the previous row.

These page numbers go to the core's MMU as walk requests, up to 8
outstanding or buffered per DMA stream. The results return in order into a
per-stream FIFO.

The DMA looks up only the FIFO head:
- a match gives the physical address in the same cycle;
- a mismatch means the entry is stale, and it is dropped;
- only when the FIFO is empty and the prediction is finished does a lookup
  cause a walk on demand.

In normal operation the prediction covers every page the DMA touches, so
demand walks happen only when the DMA asks for something outside its own
command. Dropped entries are stale ones. For example, a new command predicts a
page again after an earlier entry for that page has already served the DMA.

## Data engine

`ade` holds two `dma_engine`s and the mATLB.
- The two engines share one memory port through a round-robin arbiter. Tag
  bit 15 tells whose response it is.
- They also share one walk port.
- A DMA engine moves whole 32-byte words, up to 16 requests outstanding. The
  tag carries the buffer address, so responses may return in any order.
- Stores read the C buffer first, so they take two cycles per word.
- `MA_INIT` stores zeros. `MA_STASH` sends stash requests, which ask the L3 to
  prefetch the data.
- A translation fault stops issuing, waits for outstanding responses, and
  reports the fault.

## Network on chip

Each node has a 5-port `noc_router` (local, N, E, S, W) with dimension-order
X-Y routing:
- Node id = 4·y + x, with y growing southward.
- Each link carries one 256-bit single-flit packet per cycle in each direction. At 2 GHz that is 64 GB/s each way, or 128 GB/s read plus write per node.
- Each link has two virtual channels: VC0 for requests to the home L3 slice,
  VC1 for responses. Each input has a 2-flit FIFO per VC.
- A sender may use a VC only while the receiver shows space on it. That flag
  is a register, so no combinational path runs from router to router.
- Each output has a round-robin arbiter.
- X-Y routing has no cyclic dependence, and requests never wait behind
  responses, so the mesh cannot deadlock.

Memory addresses are interleaved over the 16 L3 slices on 32-byte words
(home node = address bits 8:5).

The `compute_node` network interface:
- turns engine requests into VC0 flits to the home node;
- delivers VC1 flits arriving at the node to the engine;
- hands VC0 flits arriving at the node to the local L3 slice port;
- injects the slice's responses on VC1, ahead of new requests.

## Files

| file | contents |
|------|----------|
| `rtl/maco_pkg.sv` | widths, opcodes, task, memory and flit types |
| `rtl/fp_fma.sv` | parameterised floating-point fused multiply-add |
| `rtl/sa_pe.sv`, `rtl/systolic_array.sv` | PE and 4×4 array |
| `rtl/sram_buffer.sv` | A/B/C buffer |
| `rtl/mtq.sv`, `rtl/stq.sv` | master and slave task queues |
| `rtl/matlb.sv`, `rtl/dma_engine.sv`, `rtl/ade.sv` | data engine |
| `rtl/accel_controller.sv` | controller |
| `rtl/mmae.sv` | one engine |
| `rtl/noc_router.sv`, `rtl/compute_node.sv` | router and node |
| `rtl/maco.sv` | 4×4 top level |
| `tb/tb_<block>.sv` | self-checking testbench per block |
| `tb/tb_mem_model.sv`, `tb/tb_ccm_model.sv`, `tb/tb_mmu_model.sv` | memory, L3-slice and MMU stand-ins |
| `tb/tb_util_pkg.sv` | encoding of small integers as FP64/32/16 |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops on its
own. It also has a watchdog. To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/maco_pkg.sv rtl/*.sv \
    tb/tb_util_pkg.sv tb/*.sv --top-module tb_mmae
./obj_dir/Vtb_mmae
```

How the testbenches check results:
- Test data are small integers. Every product and sum of them is exact in all
  three formats, so results are compared bit for bit with an integer
  reference.
- The MMU model maps every virtual page to page + 0x100000 and can be told to
  fault on a range of pages.
- The memory models answer out of order after random delays, and apply
  random back-pressure.

`tb_maco` runs the full 16-node design at its default parameters:
- Every node runs GEMMs at the same time, in all three modes.
- One node queues two tasks and fills its MTQ.
- One node runs MOVE, INIT and STASH.
- One node takes a page fault and a shape error and recovers with MA_CLEAR.
- The test counts how often each mechanism happened and fails if any count
  is zero: array passes, B preloads, routed flits, predicted walks, mATLB hits
  and drops, STQ waiting, MTQ full, release, both exception kinds, the three
  modes, and the three data instructions.

It takes about 3 minutes with Verilator, most of it compiling.

## Where this design goes beyond or departs from the source

- **Left to software.** The register layout, the Rd layout of the query
  instructions, the exception codes and the shape rules are this design's
  own. The source names the fields but gives no encodings. Large matrices
  must be cut into tiles by software on the core, which is not part of this
  RTL.
- **Sizes this design chose.**
  - MTQ and STQ: 8 entries.
  - Buffers: three 64 KB buffers, an equal split of the 192 KB total.
  - mATLB FIFO: 8 deep.
  - DMA: up to 16 outstanding requests.
  - Router: 2 VCs with 2-flit FIFOs.
  - L3 interleave: 32-byte words.
- **Release rule.** `MA_STATE` frees only a finished entry of the same
  process. `MA_CLEAR` needs the same process.
- **Task order.** The engine runs tasks strictly one after another. The
  controller does not overlap the DMA of the next tile with the computation of
  the current one, so a tile pays its load and store time in full.
- **Dataflow.** Partial sums return to the C buffer between k-groups, as in
  the source's dataflow figure. The loop order (k-groups outer, column groups
  inner) is this design's choice.
- **Floating point.** Arithmetic is IEEE-format, with the simplifications
  given above.
- **Not built.**
  - The CPU core and its caches. Also, the processor table and the block
    diagram of the source disagree on cache sizes (48 KB vs 64 KB L1,
    512 KB vs 1 MB L2).
  - The MMU and the CCM/L3 directory with its MOESI protocol.
  - Stash-and-lock handling inside the L3.
  - DDR and I/O controllers.
  - The software that tiles DL layers.

  The ports of `maco` are where these parts connect.
- **Synthesis.** The full 16-node top level takes a long time to synthesise
  with yosys, because it holds 1,792 floating-point multiply-add units.
 
