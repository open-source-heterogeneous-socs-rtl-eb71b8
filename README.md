# A heterogeneous PULP-style cluster with a RedMulE matrix engine

This is a small compute cluster for edge AI. Programmable cores and a
fixed-function accelerator work on the same data in one shared on-chip
scratchpad, so handing work from software to hardware costs nothing more than
passing a pointer. Everything revolves around the L1 memory (the TCDM, 16
word-interleaved 32-bit banks, 64 KiB):

* the cores and the DMA each reach it through 32-bit ports and a logarithmic
  crossbar;
* the accelerator reaches it through one 288-bit port, which touches nine
  neighbouring banks in a single cycle;
* an arbiter decides, bank by bank, which of the two branches gets each bank.

The accelerator follows the HWPE pattern (hardware processing engine). It has
three parts:

* a **controller** that cores program through memory-mapped registers;
* a **streamer** that turns memory into ready/valid streams and streams back
  into memory;
* a **datapath**, here RedMulE. RedMulE is a 12 x 4 array of FP16
  fused-multiply-add units computing `C += A * B`.

A DMA moves tiles between the system memory and the TCDM. A hardware
synchronizer turns "DMA transfer finished" and "HWPE job finished" into core
events, and also provides barriers and a mutex. Each core also gets the
datapath slice of the Xpulpnn ISA extension: a small register file filled
directly by loads, feeding a multi-precision SIMD dot-product unit.

The RISC-V cores are not part of this RTL. Their data ports, peripheral ports,
event lines and Xpulpnn issue signals are ports of the top module
`pulp_cluster`, and a testbench plays their part.

## Block map

```
            core data ports (NC x 32b)     DMA (4 x 32b)
                       \                    /
                  hci_log_xbar (round robin per bank)
                                 |  narrow
   redmule --288b--> hci_router -+- hci_arbiter --> 16 x tcdm_bank
     (hwpe_ctrl, hwpe_streamer,     wide
      redmule_engine)
   core peripheral ports --> periph_xbar --> hwpe_ctrl | cluster_dma | hw_sync
   per core: nn_rf --> xpulpnn_dotp
```

| module | role |
|---|---|
| `pulp_cluster_pkg` | shared structs, register maps, event numbers |
| `tcdm_bank` | one 1024 x 32 bank, byte enables, 1-cycle read |
| `hci_log_xbar` | narrow branch: NM initiators to NB banks |
| `hci_router` | wide branch: one NW-word access spread over NW banks |
| `hci_arbiter` | per-bank choice between the branches, starvation guard |
| `hwpe_ctrl` | register file, two job contexts, acquire/trigger, events |
| `hwpe_streamer` | sources, sink, address generators, multiplexer, FIFO |
| `hwpe_addr_gen`, `hwpe_source`, `hwpe_sink`, `hci_ooo_mux`, `hci_fifo`, `sync_fifo` | streamer parts |
| `redmule`, `redmule_engine`, `redmule_ce`, `fp16_fma` | the matrix engine |
| `cluster_dma` | queued 1-D copies, 64-bit system port, 4 TCDM ports |
| `hw_sync` | event unit, barrier, mutex |
| `periph_xbar` | configuration accesses to the three targets |
| `nn_rf`, `xpulpnn_dotp` | Xpulpnn datapath slice per core |

## The memory protocol

Every TCDM-side port uses the same handshake:

1. The initiator raises `req` with `addr`, `wen`, `wdata` and `be`, and holds
   them until `gnt`.
2. Exactly one cycle after the grant, `rvalid` pulses, carrying `rdata` for a
   read. Writes are acknowledged the same way, so an initiator can count its
   accesses in flight.

Addresses are byte addresses. Word `w` of the TCDM lives in bank `w mod 16`,
row `w / 16`. The configuration ports (`periph_req_t`) use the same handshake.
Their targets answer one cycle after the grant.

## Interconnect: two branches and an arbiter

The **crossbar** keeps a round-robin pointer per bank. In each cycle, every
bank grants one of the initiators that want it, provided the arbiter leaves
the bank to the narrow branch. It reports the banks it wants
(`bank_want_o`).

The **router** maps a wide access at word address `w` onto banks `w .. w+8`
(mod 16). The row moves to the next one where the range wraps past bank 15. A
wide access is all-or-nothing: it is granted only in a cycle in which it owns
all nine banks. Read data come back in word order.

The **arbiter** gives the wide branch priority, because the accelerator is
the one that needs bandwidth. A counter measures how many cycles in a row the
wide branch has blocked a narrow request. When the counter reaches
`MAX_STALL` (8), the narrow branch gets the conflicting banks for one cycle,
and the wide access waits that cycle. `hci_starve_o` pulses in that cycle.
Cores therefore slow the accelerator down, but they never lock it out, and it
never locks them out.

## The HWPE controller

Each core configures the HWPE through its peripheral port at offsets
`0x000-0x3FF`. Word offsets are:

| word | name | access |
|---|---|---|
| 0 | TRIGGER | write: commit the programmed job |
| 1 | ACQUIRE | read: job ID, or `0xFFFFFFFF` if no context is free |
| 2 | FINISHED | read: number of completed jobs |
| 3 | STATUS | `{locked, committed[1:0], running, any}` |
| 4 | RUNNING_JOB | ID of the job running or next to run |
| 5 | SOFT_CLEAR | write: drop all jobs, clear streamer and engine |
| 16..23 | job registers | RedMulE: A, B, C address, M, K, N |

There are two register contexts:

1. A core acquires the free context, writes the job registers into it and
   triggers.
2. While that job runs, a core can acquire, program and trigger the other
   context.
3. When the running job ends (`evt_eoc`), the controller starts the queued
   job on the next cycle, with no core involvement.

This job queue is what keeps the engine busy in the tiled execution flow
below.

## The streamer

RedMulE uses three sources (A, B and C, where C is read so that `C += A*B`
accumulates in place) and one sink (the result).

* **Address generators.** Each stream has an address generator walking a
  four-level loop nest. Each level has a count and a signed stride, and the
  address is `base + sum(idx_d * stride_d)`. It is computed incrementally,
  without multipliers.
* **Sources.** A source issues reads only while its FIFO has room for every
  read in flight, which is a credit scheme. This makes it tolerant of any
  memory latency.
* **Sink.** The sink writes each beat it receives. It reports done only when
  the last write has been acknowledged.
* **Out-of-order multiplexer.** The four streams' requests are interleaved on
  the single port, request by request, in round-robin order. An ID FIFO
  remembers which stream each response belongs to. Responses come back in
  request order, so the head of that FIFO names the owner of each `rvalid`.
* **HCI FIFO queue.** A two-entry request queue sits between the streamer and
  the router, so short periods in which the arbiter favours the cores do not
  ripple back into the streams.

## RedMulE: how the array computes

This is the part of the design that takes the most care.

**Array and roles.** The array has M = 12 rows and N = 4 columns of computing
elements (CEs). Each CE is an FP16 fused multiply-add with a 4-stage pipeline
(LAT = 4) and accepts a new operation every cycle.

* **A is stationary.** CE(i, j) holds one element of A.
* **B is broadcast.** All 12 CEs of column j use the same element of B in a
  given cycle.
* **C is systolic.** Partial sums of C travel along each row. The output of
  CE(i, j) is the addend of CE(i, j+1). The output of the last CE of a row
  loops back to the first CE of that row. A multiplexer at the row input
  chooses between this loop-back and the C buffer, which holds the C tile
  read from memory.

**Why a tile is 12 x 16.** A row holds N*LAT = 16 partial sums in flight:
four CEs, four pipeline stages each. The array therefore works on a tile of
M = 12 rows by W = 16 output columns. The inner dimension K is cut into K/4
chunks of four. In chunk c, column j of the array multiplies by
`A[i][4c + j]`.

**Timing of one chunk.** Column j works on output column k at local cycle
`u = c*W + k + j*LAT`; each column lags its left neighbour by exactly one CE
latency. At that cycle, CE(i, j) computes

    C[i][k] += A[i][4c + j] * B[4c + j][k]

and the partial sum it produces is the one CE(i, j+1) needs four cycles
later. A partial sum leaving column 3 at the end of chunk c re-enters column 0
at the start of chunk c+1, just in time, because a chunk lasts exactly W = 16
cycles. Each CE latches its new A element at `k = 0` of its chunk. Each
column latches the 16 values of its B row at the same moment, in a per-column
register, because the columns are skewed in time.

**Phases of a tile.**

* **LOADC:** M beats of C (16 FP16 values each) fill the C buffer.
* **COMPUTE:** `(K/4 + 1) * 16` cycles. The extra 16 cycles drain the skew.
  Finished values leave the last column into the output buffer.
* **STOREC:** M beats of results go to the sink.

Without stalls, a job of `mt x nt` tiles takes `mt*nt*(2M + (K/N + 1)*W) + 1`
cycles. The engine testbench checks this number exactly.

**Feeding the array.** While it computes, two loaders fill the A and B chunk
buffers for the next chunk:

* the A chunk buffer takes 12 beats, one per row, and uses 4 values of each;
* the B chunk buffer takes 4 beats and uses 16 values of each.

Both buffers are double-buffered. If the next chunk is not complete when
column 0 needs it, the whole array freezes for that cycle (`stall_o`); every
CE has a pipeline enable for this. Freezing the whole array keeps the skewed
schedule intact, so a stall costs exactly one cycle and never a wrong result.

**Job registers and memory layout.** Matrices are row-major FP16 in the TCDM,
4-byte aligned. Element e of a 288-bit beat is bits `[16e +: 16]`; a beat
carries 18 values, of which 16 (or 4) are used. M must be a multiple of 12,
K a multiple of 4 and even, and N a multiple of 16. The wrapper derives the
stream patterns from the registers, visiting tiles row block by row block:

* **A:** `A + 2*((r*12 + i)*K + 4c)`, one beat per (row block, column block,
  chunk, row)
* **B:** `B + 2*((4c + j)*N + 16t)`, one beat per (row block, column block,
  chunk, B row)
* **C in and out:** `C + 2*((r*12 + i)*N + 16t)`

A job ends when the engine has produced its last row and the sink has had its
last write acknowledged. The EOC event therefore means the result is in
memory.

**Arithmetic.** `fp16_fma` forms the exact product and sum on a wide
fixed-point grid. It rounds once, to nearest even. It flushes results and
inputs below the normal range to zero. NaN operands, `inf*0` and `inf-inf`
give the quiet NaN `0x7E00`.

## DMA, synchronizer, peripheral map

The cores' peripheral space is split by address bits `[11:10]`: HWPE at
`0x000`, DMA at `0x400`, synchronizer at `0x800`. The peripheral crossbar
arbitrates round robin per target. It tells the target which core it serves,
which the synchronizer needs for its per-core registers.

**DMA** (word offsets):

| word | name | meaning |
|---|---|---|
| 0 | EXT_ADDR | system-side address |
| 1 | TCDM_ADDR | TCDM address |
| 2 | LEN | length in bytes, a multiple of 8 |
| 3 | CMD | write: start, bit 0 = direction (1 = TCDM to system). Read: the ID the next command gets. |
| 4 | STATUS | commands queued or running |
| 5 | DONE_ID | ID of the last command that finished |

* Commands queue up to four deep and run in order.
* Each completed command pulses the end-of-transfer (EOT) event.
* Data move in 64-bit beats. Each beat is split into a low and a high word,
  each with its own FIFO and TCDM port: ports 0 and 1 write for copy-in,
  ports 2 and 3 read for copy-out. The two halves advance independently.
* The system side is a request/grant port with in-order responses and any
  latency.

**Synchronizer** (word offsets):

| word | name | meaning |
|---|---|---|
| 0 | EVT_MASK | per core |
| 1 | EVT_BUFFER | per core; read pending events, write 1s to clear |
| 2 | BARRIER | write: arrive |
| 3 | BAR_MASK | cores that take part in the barrier |
| 4 | MUTEX | read: try-lock, 0 = acquired; write: release |
| 5 | SW_EVT | write a core mask |

* Event bits are: 0 DMA EOT, 1 HWPE EOC, 2 barrier, 3 software.
* `core_evt_o[c]` is high while core c has a pending, unmasked event. A core
  waits on this line, as with a wait-for-event instruction.

## Xpulpnn slice

Each core gets a 6-entry **NN-RF**. When the core's load is flagged as an
NN-RF load (`xnn_load_i`), the load data arriving on its TCDM response are
written into `xnn_load_reg_i`. The data do not pass through the core's
general-purpose registers. A read of the register being written returns the
new value (bypass).

The **dot-product unit** treats two 32-bit operands as lanes of 16 x 2, 8 x 4,
4 x 8 or 2 x 16 bits (`xnn_prec_i`). Each operand can be signed or unsigned.
The unit adds the sum of the lane products to a 32-bit accumulator in one
cycle. Operand A is an NN-RF register or a general-purpose value
(`xnn_a_from_gp_i`). Operand B is always an NN-RF register.

## Running a tiled kernel

The intended flow (double-buffered tiles, all hardware-assisted):

1. Copy tile i+1 into the TCDM with the DMA, while tile i computes.
2. Acquire the HWPE, write tile i+1's job and trigger it after the copy-in's
   EOT. The job waits in the controller's queue.
3. When tile i's EOC arrives, the queued job has already started. Copy tile
   i's result out with the DMA.

The end-to-end testbench `tb_pulp_cluster` follows this pattern at the
default configuration. It:

* copies A, B and C in with the DMA and waits for EOT;
* queues two RedMulE jobs, so C ends as `C0 + 2AB` on a 12 x 24 x 16 GEMM;
* has four cores hammer the banks the engine uses, forcing both array stalls
  and the starvation guard;
* runs a barrier among all cores, takes the mutex, and runs NN-RF loads and
  dot products;
* copies the result out and compares it bit for bit.

It counts each mechanism (stall, starvation, EOT, EOC, barrier, job queue,
mutex, NN-RF load, dot product) and fails if any of them never happened.

## Verification and simulation

Every block has a self-checking testbench `tb/tb_<module>.sv` that compares
against values computed independently. Each ends with a `TB_RESULT` line and
has a watchdog. Most run at reduced parameters. For example, `tb_redmule` uses
a 2 x 2 array and checks exact FP16 results of two queued jobs. The FP16
reference conversions are in `tb/fp16_ref.svh`. To run one:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_redmule \
      -y rtl -y tb +libext+.sv -Irtl -Itb rtl/pulp_cluster_pkg.sv tb/tb_redmule.sv -o sim
    obj_dir/sim

`tb_pulp_cluster` instantiates the top with every parameter at its default and
finishes in well under a minute.

## How this departs from what the design is based on

* **Number formats.** RedMulE supports FP16 only. The original engine also
  handles BFloat16 and the two FP8 formats (E4M3, E5M2); those conversion
  paths are not described in enough detail to rebuild.
* **HWPE.** The cluster carries RedMulE. The second accelerator of the
  original work (N-EUREKA, for quantized convolutions) is shown only as a
  block diagram, and it is not built. Its evaluated Transformer workload would
  run its GEMMs here on RedMulE in FP16.
* **Not included:**
  * the cores, their FPUs and the hierarchical instruction cache;
  * the controller's micro-loop engine (uLoop);
  * the AXI system interconnect. The DMA's system side is a single 64-bit
    request/grant port instead of AXI links.
* **Sizes.** The TCDM is at the low end of the usual range (16 banks, 64
  KiB), and the wide port is 288 bits (nine words).
* **Choices of this design.** Register maps, the arbitration policies,
  starvation threshold, FIFO depths, the two-context queue depth, the tile
  schedule and buffering of the array, the event encoding and the
  NN-RF size are this design's own. The module headers say so where each
  appears.
