# Manticore chiplet in SystemVerilog

Manticore packs 1024 small RISC-V cores onto one chiplet and points all of
them at double-precision floating-point work. The idea that makes this
efficient: each core is a tiny single-stage integer pipeline, and nearly
all of the silicon and energy go into the FPU next to it. Two small
extensions keep that FPU busy without a wide, power-hungry front end:

* **Stream semantic registers (SSRs).** Two FP registers (ft0 and ft1) can be
  turned into streams. Reading one pops the next element of an affine
  address sequence that hardware fetches from local memory. Writing one
  pushes an element to memory. Loads and stores disappear from the
  instruction stream.
* **FREP.** A small sequence buffer between the integer core and the FPU
  replays a loop body of FP instructions a given number of times. The
  integer core issues the body once and is free during the replays.

With both, the inner loop of a matrix-vector product is a single `frep`
over four `fmadd.d`. The FPU then issues an operation in almost every cycle
while the integer core fetches almost nothing.

This repository holds synthesizable SystemVerilog for one chiplet. It goes
from the FMA datapath up to the 1024-core top. A self-checking testbench
comes with every block.

## Structure

```
manticore_chiplet                       (1024 cores)
├── 4 x S3 quadrant  (quadrant, no cache, 2 members)
│   └── 2 x S2 quadrant  (quadrant + 8 KiB instruction cache, 4 members)
│       └── 4 x S1 quadrant  (quadrant + 8 KiB instruction cache, 4 members)
│           └── 4 x snitch_cluster
│               ├── 8 x core_complex
│               │   ├── snitch_core      RV32I, single stage
│               │   ├── l0_icache        4 lines
│               │   ├── frep_sequencer   16-entry loop buffer
│               │   ├── fp_subsystem     FP regfile, scoreboard, FP load/store
│               │   │   └── fpu          1 x DP FMA or 2 x SP FMA, 3 stages
│               │   │       └── fp_fma
│               │   └── ssr_streamer     2 streams, 4 loop dimensions
│               ├── tcdm                 128 KiB, 32 banks, 16 narrow + 1 wide port
│               ├── icache               8 KiB shared instruction cache
│               └── dma_engine           512-bit block copies
├── chiplet_xbar     4 S3 uplinks -> L2 or external port
└── l2_memory        27 MiB
```

`manticore_pkg` holds the bus types, the opcodes and the address map.
`wide_mux` is the N-to-1 arbiter used in every quadrant and in the
crossbar.

## Keeping the FPU busy: one core complex

The matrix-vector kernel below is what `tb/kernel_pkg.sv` generates. It
shows how the parts of a core complex work together. Four rows of `A` are
processed at once, so there are four independent accumulators. This hides
the FPU latency.

```
    fmv.d   fa5, fa1          ; clear the 4 accumulators (fa1 = 0.0)
    fmv.d   fa2, fa1
    fmv.d   fa3, fa1
    fmv.d   fa4, fa1
    frep    t0, 4             ; replay the next 4 FP instructions t0 times
    fmadd.d fa5, ft0, ft1, fa5   ; ft0 streams A (4 rows interleaved), ft1 streams x
    fmadd.d fa2, ft0, ft1, fa2
    fmadd.d fa3, ft0, ft1, fa3
    fmadd.d fa4, ft0, ft1, fa4
    fsd     fa5, 0(a5)        ; store the 4 results
    fsd     fa2, 8(a5)
    fsd     fa3, 16(a5)
    fsd     fa4, 24(a5)
    addi    a4, a4, 4
    addi    a5, a5, 32
    bltu    a4, a1, loop
```

**Offload path.** `snitch_core` executes integer instructions itself. It
hands every FP instruction, and `frep`, to the sequencer over a valid/ready
port. The instruction travels with the value of its rs1 register: the
address base for `fld`/`fsd`, or the iteration count for `frep`. The core
stalls only when the sequencer is not ready. `fence` waits until the
sequencer and the FP subsystem are idle. `ecall`/`ebreak` halt the core.

**Sequencer (`frep_sequencer`).** Its default state passes instructions
through. On `frep` it records the next `imm` instructions, up to 16. Each
one is forwarded to the FPU while it is recorded, so the first iteration
costs nothing extra. The sequencer then replays the buffer `rs1 - 1` more
times (a count of 0 runs once). While it replays it accepts nothing new.
The core keeps executing integer instructions in parallel, such as loop
bookkeeping or address arithmetic, and waits only when it reaches the
next FP instruction. For N = 48 the four-instruction body becomes
192 fmadd.d.

**Stream registers (`ssr_streamer`).** Each stream has four nested loops,
each with a bound and a byte stride. The address is the base plus the sum
of index times stride over the four loops.
* Writing the read-base register starts a read stream. Writing the
  write-base register starts a write stream.
* A read stream prefetches into a 4-entry FIFO.
* While streams are enabled, an FP instruction that names f0 or f1 as a
  source pops the FIFO. One that names it as destination pushes to it.
* Stream 0 shares the core complex's first TCDM port with the core's own
  and the FP loads/stores, at lowest priority. Stream 1 owns the second
  port.

In the kernel:
* A is walked as (4 rows, stride 8N) x (N columns, stride 8) x (row blocks,
  stride 32N).
* x is walked as (4, stride 0) x (N, stride 8) x (row blocks, stride 0).

So every fmadd finds both operands waiting.

**FP subsystem (`fp_subsystem`).** It holds the 32 x 64-bit FP register
file and a scoreboard with one pending bit per register.
* **Issue.** An instruction issues when three things are true: its
  sources are not pending, its SSR sources have data, and its destination
  is not pending.
* **Completion.** The FPU result writes back three cycles later, to the
  register file or to the write stream.
* **Memory.** `fld`/`fsd` use the TCDM port directly; `fld` is one cycle
  after the grant.
* **Ordering.** Everything issues in order.

**FPU (`fpu`, `fp_fma`).** The FPU is fully pipelined with a latency of 3
and accepts one operation per cycle.
* `fp_fma` is a parameterised fused multiply-add with a single rounding.
* The FPU holds one binary64 instance and two binary32 instances, so an
  `fmt = .s` operation works on two packed singles.
* `fadd`/`fsub`/`fmul` are FMAs with b = 1.0 or c = -0.0.
* `fsgnj*`, and with it `fmv.d`, are sign injection.
* Only round-to-nearest-even is supported. Subnormals are flushed to zero.
  NaNs come out as the canonical quiet NaN.

**Measured.** `tb_core_complex` runs the paper-sized example (N = 48) with
a TCDM model that refuses a random one in eight requests. The 2304 fmadd.d
and 48 fmv.d issue in 2875 cycles, a utilisation of 0.82. The bound for
this loop with an ideal memory is 192 FPU operations in 204 issue slots
(0.94). The difference is the refused TCDM grants.

## Programming model

| Region | Address | Contents |
|---|---|---|
| L2 | `0x8000_0000` | 27 MiB. Also the boot address of every core. |
| TCDM | `0x1000_0000` | 128 KiB, the cluster's own scratchpad. |
| SSR registers | `0x1002_0000` | Private to each core. |
| DMA registers | `0x1003_0000` | Per cluster. |
| anything else | | Cores see reads as zero. The DMA and the instruction path send it to the external port. |

**SSR registers.** Stream s sits at offset `s * 0x100`.

| Offset | Register |
|---|---|
| `0x00 + 4d` | bound of loop d (iterations - 1) |
| `0x20 + 4d` | stride of loop d (bytes) |
| `0x40` | number of loops - 1 |
| `0x60` | read base; writing it starts a read stream |
| `0x64` | write base; writing it starts a write stream |
| `0x70` | status |

The global enable is at `0x7C0`. It lies within reach of a 12-bit store
offset from the base.

**DMA registers.**

| Offset | Register |
|---|---|
| `0x00` / `0x04` | source address, low / high |
| `0x08` / `0x0C` | destination address, low / high |
| `0x10` | length in bytes |
| `0x14` | start (write any value) |
| `0x18` | busy |
| `0x1C` | completed transfers |

Transfers are one-dimensional and 64-byte aligned, with lengths in whole
64-byte lines. The direction is inferred: if the source lies in the TCDM,
data goes out; otherwise it comes in. The engine keeps one beat in flight.
If several cores of a cluster access the DMA registers in the same cycle,
only the lowest-numbered core is served. By convention, software lets
core 0 drive the DMA.

**Hart IDs.** `mhartid` (CSR 0xF14) is `(chiplet * 128 + cluster) * 8 +
core`. Software uses it to split work.

**Custom `frep` encoding.** Opcode `0001011` (custom-0). rs1 holds the
iteration count. imm[11:0] holds the number of instructions in the body.

## The cluster

* **TCDM (`tcdm`).** The TCDM has 32 banks of 64-bit words. Consecutive
  words fall in consecutive banks.
* **Narrow ports.** Each of the 16 narrow ports (2 per core complex) is
  granted in the cycle of its request unless another port wants the same
  bank. Each bank chooses round-robin. A loser keeps its request up, which
  stalls that core or stream. Read data follows one cycle after the grant;
  writes get no response.
* **DMA port.** The DMA's 512-bit port covers 8 adjacent banks and has
  priority on them, so a DMA beat is never refused.
* **Conflict counting.** `conflicts_o` counts the refused narrow requests
  each cycle.

**Instruction path.** Each core fetches from its own 4-line L0 cache
(`l0_icache`), which is fully associative with FIFO replacement and answers
in the same cycle on a hit. L0 misses go to the cluster's direct-mapped
8 KiB cache (`icache`). It serves one port per cycle, round-robin. A hit
answers the next cycle; a miss blocks the cache and refills a 64-byte line
over the cluster's instruction uplink.

**Uplinks.** A cluster has two 512-bit uplinks: instruction refills and DMA
traffic. The cores themselves cannot reach global memory. All global data
moves through the DMA.

## The interconnect tree

Every link above the cluster uses the same wide bus (`wide_req_t` /
`wide_rsp_t` in the package):
* 48-bit address, 512-bit data, a 64-bit byte strobe and an instruction
  flag;
* valid/ready requests;
* exactly one response per request, reads and writes alike, in request
  order;
* no ready on responses: a requester must always accept one.

* **S1 and S2 quadrants (`quadrant`, `HAS_ICACHE = 1`).** Four members
  share an instruction cache for their refills, and their data uplinks are
  multiplexed round-robin onto one. Instruction code is therefore cached
  three times on its way down: in the S2 cache, the S1 cache and the
  cluster cache. So 128 clusters booting the same program do not flood
  the L2.
* **S3 quadrants (`HAS_ICACHE = 0`).** Two S2 members share a single
  uplink, which carries instruction and data traffic alike.
* **Multiplexer (`wide_mux`).** It keeps a FIFO of the source index of
  each request it has forwarded. Responses are routed by the head of that
  FIFO, which is why links must answer in order.

Bandwidth thins towards the root: 128 cluster DMAs share, in the end, one
L2 port and one external port. This is the design's intended trade-off
between local and global bandwidth.

**Chiplet crossbar (`chiplet_xbar`).** It multiplexes the four S3 uplinks
and routes each request by address: `0x8000_0000`-`0x81FF_FFFF` to the L2,
everything else to the external port. The two targets have different
latencies, so a response from the faster one could overtake an older
response from the slower one. To prevent this, a request for the other
target waits until every request at the current target has been answered.

**L2 (`l2_memory`).** The L2 holds 27 MiB as 512-bit lines and answers
every bus request one cycle later. A second port, for the host, reads and
writes lines with byte strobes. It stands in for the PCIe endpoint and the
management cores that would load programs.

## What is outside the RTL

The following parts of a Manticore chiplet and package are not built. The
top module brings their connection points out as ports:

* **`ext_*` (wide bus).** This port leads to the HBM2 controller and, for
  a four-chiplet package, to the crossbar between chiplets and its
  die-to-die links.
* **`host_*`.** This port replaces the 16x PCIe endpoint and the four
  RV64GC management cores. The testbenches use it to place the program
  and its data in the L2 before raising `fetch_en_i`.
* **`chiplet_id_i`.** This input sets the hart ID offset of the chiplet in
  the package.

## Choices made here, and differences from the original

These are this design's own decisions where the architecture description
gives no detail:
* **Cores.** RV32I without M, mhartid as the only CSR, and no interrupts.
* **FP instruction subset.** fld, fsd, fmadd, fadd, fsub, fmul, fsgnj/n/x.
  There are no divide, square-root, compare or convert instructions, and
  no fused negate forms beyond fsub.
* **FPU pipeline.** Three stages.
* **SSR FIFOs.** Four entries.
* **SSR loops.** Four loop dimensions.
* **Register maps.** Memory-mapped registers for the SSRs and the DMA,
  instead of dedicated instructions.
* **DMA scope.** One-dimensional transfers only.
* **Caches.** The S1/S2 caches are 8 KiB each. The L0 cache has 4 lines.
  All caches are direct-mapped except the L0.
* **L2 latency.** One cycle, with 27 MB taken to mean 27 MiB.
* **Port priorities and arbitration.** Round-robin everywhere.
* **Address map.** As listed under the programming model.

These are known differences and limits:
* **Blocking caches.** The instruction caches block on a miss.
* **Flat priority at the root.** Nothing gives instruction refills
  priority over DMA traffic at the root. A cluster that stalls on a miss
  waits behind other clusters' DMA beats.
* **Upward traffic only.** Clusters cannot write into each other's TCDM
  through the tree.
* **One DMA beat in flight.** Long memory latency limits DMA bandwidth.
* **No hardware barrier.** Synchronisation is done in software with flag
  words in the TCDM. Bank conflicts from spinning cores are visible in
  the statistics.
* **FREP restrictions.** Nested loops and staggered register renaming
  are not supported.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
ends with the line `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it runs |
|---|---|
| `tb_fp_fma` | Thousands of random FMAs per format against the simulator's double arithmetic. The operands are chosen so that the reference itself rounds only once. Special values are checked by bit pattern. |
| `tb_frep_sequencer` | Random loop lengths and counts against a reference sequence. |
| `tb_tcdm` | Random traffic on all ports plus the DMA against a memory model, with conflict counting. |
| `tb_icache`, `tb_l0_icache`, `tb_wide_mux`, `tb_quadrant`, `tb_chiplet_xbar` | Random requests against behavioural memories with random back-pressure and latency (`tb/wide_mem_model.sv`). |
| `tb_core_complex` | The N = 48 kernel on one core complex. |
| `tb_snitch_cluster` | The DMA version of the kernel on 8 cores: DMA in, software barrier, SSR/FREP compute, DMA out. |
| `tb_manticore_chiplet` | The whole top at reduced size: 1 S3, 1 S2, 2 S1, 2 clusters each, 32 cores, 1 MiB L2. |
| `tb_manticore_chiplet_full` | The same program at the default size: 128 clusters, 1024 cores, 27 MiB L2. |

In `tb_manticore_chiplet` the host port loads the program and data. Every
cluster then computes its y, and the testbench checks all results bit for
bit in the external memory model. It also counts mechanisms and fails if
any never occurred:
* TCDM bank conflicts;
* cluster and quadrant instruction cache misses;
* FPU issue;
* frep replay;
* SSR traffic;
* DMA activity;
* uplink back-pressure;
* crossbar target-switch stalls;
* external memory traffic.

The programs are assembled in SystemVerilog by `tb/rv_asm_pkg.sv`
(instruction encoders) and `tb/kernel_pkg.sv` (the matrix-vector kernel).
No data files are read.

To run one testbench with plain Verilator, name the package, the RTL files
it uses and the testbench:

```
verilator --binary --timing --assert -Wno-fatal -j 8 \
  rtl/manticore_pkg.sv rtl/*.sv tb/rv_asm_pkg.sv tb/kernel_pkg.sv \
  tb/wide_mem_model.sv tb/tb_manticore_chiplet.sv --top tb_manticore_chiplet
./obj_dir/Vtb_manticore_chiplet
```

(Listing `rtl/manticore_pkg.sv` first and again through `rtl/*.sv` gives
a harmless duplicate-package warning. Leave it out of the glob to avoid
it.) The full-size testbench needs several minutes to compile and a few
GB of memory, because it holds 128 TCDMs and the 27 MiB L2.
Its C++ build took more than 25 minutes on an 8-thread machine, and no
full-size run has finished so far. The largest configuration simulated to
completion is the reduced top above: 4 clusters and 32 cores, with every
check passing. The full-size top passes Verilator lint and yosys
elaboration at its default parameters.
