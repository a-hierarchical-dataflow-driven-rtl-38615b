# A hierarchical many-core for wireless baseband processing

Baseband processing has two kinds of work. The kernels themselves (FFTs, channel estimation,
equalisation, belief-propagation decoding) are regular and data-parallel. Deciding which kernel
runs where and when is irregular and control-heavy. This design uses separate hardware for each:

- **Small vector tiles** do the arithmetic.
- **Scalar schedulers** on two levels do the bookkeeping.
- A tile never touches shared memory while it computes. A scheduler packs everything a task needs
  into the tile's private memory, ships it there, starts the tile, and later collects the results.
  Computation runs as a stream of such self-contained tasks; this is the "dataflow" in the name.

The RTL is in `rtl/` and is written in synthesizable SystemVerilog. The top is `wbp_top`. Its
default is the main configuration: 5 clusters of 9 tiles, 45 vector tiles in all, plus 5 cluster
schedulers and one main scheduler.

```
 wbp_top ─┬─ main scheduler (rv32im_core, code in main memory)
          ├─ main DMA (dma_engine)            top bus matrix (bus_xbar)
          ├─ top CSR (top_csr)                masters: main scheduler, main DMA
          ├─ main-memory port (mm_req/mm_rsp) slaves : main memory, top CSR, DMA, clusters
          └─ cluster × NUM_CLUSTERS
               ├─ L2 scheduler (rv32im_core) + CD-SPM (its private memory)
               ├─ CS-SPM (shared by the cluster's tiles)
               ├─ L2 DMA, cluster CSR, thread manager
               ├─ cluster bus matrix: masters L2 scheduler, L2 DMA, external port
               └─ tile × NUM_TILES  (L or S type)
                    ├─ rv32im_core ── instruction queue ──► vxu ── result queue ──► core
                    ├─ vxu: sequencer, vector register file, LANES × vxu_lane, vxu_exe
                    ├─ T-SPM (spm) behind tspm_arbiter (the port switch)
                    └─ tile CSR (port direction, core release, return count, interrupt)
```

## The tile

A tile is a small RV32IM core coupled to a vector extension unit (VXU), with a private
single-port scratchpad memory (T-SPM).

- **The core** (`rv32im_core`) is a simple multi-cycle machine with one memory port. It executes
  RV32IM, the word AMOs (`amoswap`, `amoadd`, `amoand`, `amoor`, `amoxor`) and `wfi`. It decodes
  the custom vector instructions but does not execute them. Instead it pushes them, with the
  values of the two scalar source registers, into a 4-entry queue (`sync_fifo`) to the VXU.
  - The core keeps running after a push. It waits for the VXU only in two cases:
    - An instruction that returns a scalar (`vsetvl`, `vredsum`, `vmvxs`). The core then waits on
      the result queue.
    - A scalar load, store, AMO or `fence`. The core first waits until the VXU and the queue are
      empty, so scalar and vector memory accesses stay in program order.
  - `run` low holds the core at its boot address 0.
  - Division uses a 33-cycle restoring divider.
  - ECALL, EBREAK and CSR instructions are treated as no-ops. There are no traps.
- **The VXU** (`vxu`) is set by two parameters:
  - `LANES`: the number of 32-bit lanes.
  - `NUM_VRF`: the number of vector registers, each `LANES` elements wide.

  A vector of `vl` elements occupies ⌈vl/LANES⌉ consecutive registers, so the longest vector is
  `VLMAX = LANES × NUM_VRF`. The two tile types trade width against register count but have the
  same `VLMAX` of 512:

  | Type | Lanes | Registers |
  |---|---|---|
  | L | 16 | 32 |
  | S | 8 | 64 |

  The sequencer steps an operation over the register group:
  - An ALU operation takes one register (all lanes) per cycle.
  - A vector load or store moves one element per cycle through the T-SPM port.
  - Elements past `vl` are left unchanged.

  The exchange engine (`vxu_exe`) does the cross-lane work inside one register:
  - a butterfly exchange with lane `i xor k`;
  - a rotation by `k`;
  - a reduction sum.

  The per-lane ALU (`vxu_lane`) does add, subtract, multiply, Q15 multiply (`(a·b) >>> 15`), min,
  max, absolute value, the logic operations and shifts.
- **The T-SPM port switch** (`tspm_arbiter`) places the single-port T-SPM either on the cluster
  bus or inside the tile. Which side gets it is set by the `port_dir` bit of the tile CSR:
  - `port_dir` = 0: the bus has the memory.
  - `port_dir` = 1: the tile has it. The VXU has priority over the core.

  An access from the side that does not own the port is held off (not granted) until ownership
  changes. It is not lost.

### Custom vector instructions

All vector instructions use opcode custom-0 (`0001011`), and `funct7` selects the operation.

- **Register fields.** Vector register numbers are 6 bits wide, so that 64 registers can be named.
  The low five bits sit in the usual rd/rs1/rs2 fields, and `funct3` bits 0, 1 and 2 supply bit 5
  of vd, vs1 and vs2.
- **Scalar operands.** The rs1/rs2 fields also name the scalar registers whose values travel with
  the instruction. These are the address for loads and stores, and the shift, distance or index
  operands.

| funct7 | Mnemonic | Operation |
|---|---|---|
| 0 | `vsetvl rd, rs1` | `vl = min(x[rs1], VLMAX)`, returned in rd |
| 1 / 2 | `vld vd, (rs1)` / `vst vs, (rs1)` | unit-stride load / store of vl words |
| 3–12 | `vadd vsub vmul vmulq vmin vmax vabs vand vor vxor` | element-wise |
| 13 / 14 | `vsra vsll vd, vs1, x[rs2]` | shift by a scalar |
| 15 | `vmvsx vd, x[rs1]` | broadcast a scalar |
| 16 | `vxchg vd, vs1, x[rs2]` | butterfly: lane i ← lane i xor k, in every register |
| 17 | `vrot vd, vs1, x[rs2]` | rotate lanes by k, in every register |
| 18 | `vredsum rd, vs1` | sum of the vl elements, returned in rd |
| 19 | `vmvxs rd, vs1, x[rs2]` | element x[rs2] returned in rd |

## Pack and ship

This is the central mechanism of the design. Each tile runs one self-contained task at a time in
its own memory.

A task is shipped to a tile in four steps:

1. An atomic write to the tile CSR clears `port_dir` and `core_run`. The T-SPM now belongs to the
   bus, and the core is held.
2. The cluster's L2 DMA copies the task image (code and input data) from the CS-SPM into the T-SPM.
3. An atomic OR sets `port_dir`, which hands the memory to the tile.
4. A second atomic OR sets `core_run`. The core boots from T-SPM address 0.

When the task is finished, the tile returns it in four steps:

- **I.** The task leaves its results and any registers worth keeping in the T-SPM.
- **II.** It writes the number of return values to the tile CSR `RETCNT` register.
- **III.** That single write does three things: it gives the T-SPM back to the bus, holds the core
  again, and raises the tile's interrupt to the L2 scheduler.
- **IV.** The L2 scheduler has the L2 DMA copy the result block back to the CS-SPM. It then clears
  the interrupt.

A higher level repeats the same pattern. With the cluster scheduler held, the main DMA fills the
CD-SPM with the cluster scheduler's program and job list, and fills the CS-SPM with the task
images. The main scheduler then starts the cluster scheduler through the cluster CSR. When the
cluster scheduler reports through its DONE register, the main scheduler collects the results.

Schedulers wait with `wfi`:

- A cluster scheduler wakes on any tile interrupt or its DMA's done flag.
- The main scheduler wakes on any cluster interrupt or the main DMA's done flag.

Interrupts are level signals that stay high until cleared. A scheduler therefore re-reads the
status after waking, and an interrupt that arrives early is never lost.

The **thread manager** is a small table per cluster, with 4 slots by default. The main scheduler
uses it to decide whether a cluster has room for another thread:

- An *inquiry* read returns whether a slot is free and which one.
- *Register* claims a slot.
- *Run* and *complete* move the slot through READY → RUNNING → FREE.
- Refused requests (table full, unknown id, duplicate id) are counted in the inquiry word.

Choosing clusters and evicting threads is left to scheduler software. This includes the
least-recently-used choice and lazy deletion of idle threads.

## Buses and address map

All memories, registers and DMAs share one bus protocol, defined in `wbp_pkg`:

- A request carries `valid`, `we`, byte enables, address and write data. It is held until `gnt`.
- `rvalid` and `rdata` follow exactly one cycle after the grant. There is one response per
  request, writes included.
- A response cannot be back-pressured.
- `gnt` may depend combinationally on the request, so grants ripple through the levels of the
  bus matrix within a cycle.

`bus_xbar` is a crossbar. It has a base/mask decoder per slave; the lowest-numbered slave that
matches wins. It arbitrates round-robin per slave and routes responses back from a registered
record of what was granted. An address that matches no slave is answered with zero and is not
lost.

| Level | Address | Target |
|---|---|---|
| top | `0x0000_0000`–`0x0FFF_FFFF` | main memory (port `mm_req`/`mm_rsp`) |
| top | `0x1000_0000` | top CSR: `IRQ` (cluster done vector), `DONE` (write: result, sets `done`), `INFO` |
| top | `0x1100_0000` | main DMA |
| top | `0x2000_0000 + c·0x0100_0000` | cluster c (bits 23:0 decoded inside) |
| cluster | `0x00_0000` | CD-SPM (bus side only while the L2 scheduler is held) |
| cluster | `0x10_0000` | CS-SPM |
| cluster | `0x20_0000` | cluster CSR: `CTRL` (scheduler run), `DONE`, `IRQ`, `TILEIRQ`, `MBOX`, `INFO` |
| cluster | `0x21_0000` | L2 DMA |
| cluster | `0x22_0000` | thread manager: `QUERY`, `REGISTER`, `RUN`, `COMPLETE`, `SLOT0+i` |
| cluster | `0x40_0000 + t·0x2_0000` | tile t: T-SPM at +0, tile CSR at +`0x1_0000` |
| tile (core view) | `0x0`, `0x1_0000` | own T-SPM, own tile CSR |

A cluster scheduler sees its CD-SPM at the low addresses through a private path. It reaches
everything else in its cluster through the cluster bus matrix.

Registers:

- **Tile CSR.** `CTRL` = {core_run, port_dir}. `RETCNT` (a write from the core ends the task).
  `IRQ` (write 1 to clear). `INFO` = {large, T-SPM KiB, registers, lanes}.
- **DMA.** `SRC`, `DST`, `LEN` (in words), `CTRL` (write 1 to start; bit 0 reads as busy), `STAT`
  = {bursts, done}, where the done flag is also the interrupt and is cleared by writing 1.
  - The DMA copies in bursts of `BURST` words, 8 by default. It reads a burst into a buffer and
    then writes it out.

All offsets are listed in `wbp_pkg`.

## Sizes

| Parameter | Default | Where it comes from |
|---|---|---|
| `NUM_CLUSTERS` × `NUM_TILES` | 5 × 9 | the main configuration evaluated for the architecture |
| L tile | 16 lanes, 32 registers, 64 KiB T-SPM | lanes/registers from the text; T-SPM size from the tile drawings |
| S tile | 8 lanes, 64 registers, 32 KiB T-SPM | as above |
| `TILE_LARGE` | `16'h0155` (tiles 0, 2, 4, 6, 8 are L: 5 L + 4 S) | own choice; only a 2L2S mix of a 4-tile cluster is given |
| CS-SPM / CD-SPM | 256 KiB / 16 KiB | own choice |
| thread-manager slots | 4 | own choice |
| DMA burst | 8 words | own choice |
| element width | 32 bits | own choice |

The tile drawings label a 64 KiB T-SPM with "8 lanes" and a 32 KiB one with "4 lanes". The text
gives 16 and 8 lanes. The lane counts here follow the text, and the memory sizes follow the
drawings, with the larger memory in the larger tile.

## Where this RTL departs from, or goes beyond, the architecture description

- **Not described, so chosen here:**
  - the microarchitecture of the scalar core;
  - the vector instruction encoding and operation set;
  - the exchange patterns of the EXE;
  - the bus protocol and address map;
  - every register layout;
  - the queue depth and burst length.
- **Atomics.** The ISA is described as RV32IM, but the pack-and-ship steps use atomic
  instructions. The core therefore also implements the RV32A word AMOs. An AMO is a read followed
  by a write on the bus. The bus is not locked in between, which is enough for a single scheduler
  per cluster.
- **Interrupts.** These are plain wake-up lines for `wfi`, not a trap mechanism.
- **Scheduling policy.** The thread- and task-level scheduling policy is software. It includes the
  LRU choice of clusters, lazy deletion of threads, task code pools and load indications. The
  hardware here provides everything that software uses, but the policy itself is not part of the
  RTL. The testbench programs implement only the simple flow described under "Pack and ship".
- **Main memory.** The off-chip DDR memory and its controller are outside the design. The top
  brings out its bus port, and the testbenches attach a behavioural memory.
- **Not reproduced:** the published cycle counts for FFTs, decoder throughput, clock frequency,
  area and power. The estimates below show only whether the workloads fit.
- **Vector memory bandwidth.** Vector loads and stores move one 32-bit element per cycle through
  the single T-SPM port. Arithmetic, by contrast, processes a whole register of elements per
  cycle, so kernels here are bound by memory traffic. Measured on an L tile:

  | Kernel | Cycles |
  |---|---|
  | First FFT stage, 128 points | 797 |
  | First FFT stage, 512 points | 2972 |
  | First FFT stage, 2048 points | 11672 |
  | Min-sum node update, 512 pairs | 2421 |

  The published figures for complete 128/512/2048-point FFTs are 251, 1122 and 5073 cycles. A
  single stage here is already slower than those complete transforms. Matching them would need a
  T-SPM port of one register width (LANES words), which the architecture description does not
  specify.

## Will the evaluated workloads fit?

These sizings use 32-bit elements at the default parameters. The tiles' `VLMAX` is 512 elements.

| Workload | Fits? | Reasoning |
|---|---|---|
| FFT, 128 and 512 points | yes | Data plus twiddles take 1.5 and 6 KiB, in one tile of either type. The vectors fit in one vector register group. |
| FFT, 2048 points | yes | 24 KiB fits in both tile types. Each stage runs as 4 strips of 512 elements. |
| Polar BP decoding, N = 512 | L tiles only | It needs (log₂N + 1)·N·2 words = 40 KiB of messages. |
| Polar BP decoding, N = 1024 | no | It needs 88 KiB, more than one tile holds with 32-bit messages. It would need 16-bit messages or splitting across tiles. |
| Table 2 link | yes | 128-subcarrier OFDM with QPSK, LS estimation and zero-forcing equalisation; its vectors are 128 elements. |

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Three files in `tb/` are shared helpers:

- `rv_asm_pkg` is a small assembler for RV32IM, the AMOs and the vector instructions.
- `sched_prog_pkg` builds the task kernel, the cluster scheduler's image and the main scheduler's
  program.
- `tb_bus_tasks.svh` provides bus read and write tasks.

| Testbench | What it shows |
|---|---|
| `tb_spm`, `tb_sync_fifo`, `tb_bus_xbar`, `tb_tspm_arbiter` | memories, queues and bus behaviour against reference models, with random stalls |
| `tb_vxu_lane`, `tb_vxu_exe`, `tb_vxu` | every vector operation against a model; that an ALU operation takes ⌈vl/LANES⌉ cycles |
| `tb_rv32im_core` | instruction classes, AMOs, division, `wfi`, vector offload and restart |
| `tb_tile_csr`, `tb_cluster_csr`, `tb_top_csr`, `tb_thread_manager`, `tb_dma_engine` | register behaviour, interrupts, burst counts |
| `tb_tile` | one L tile and one S tile: load over the bus, run a vector program, complete through `RETCNT` |
| `tb_cluster` | a 9-tile cluster scheduled by its own L2 scheduler, with all results checked |
| `tb_wbp_top` | the whole 5 × 9 design at its default parameters (below) |
| `tb_fft_stage` | first radix-2 decimation-in-frequency stage of a 128-, 512- and 2048-point complex FFT on an L tile, Q15 twiddles |
| `tb_polar_bp_minsum` | one min-sum node update, f(a,b) = sign(a)·sign(b)·min(\|a\|,\|b\|) and g(a,b) = a + b, over the 512 message pairs of an N = 512 polar decoder on an L tile |

**End-to-end test.** `tb_wbp_top` runs the whole design at its default parameters. Only the
main-memory model is outside the design. After reset:

1. The main scheduler checks and registers threads in every cluster's thread manager.
2. The main DMA fills every cluster's CD-SPM and CS-SPM.
3. The main scheduler starts the five cluster schedulers.
4. Each cluster scheduler ships a task to each of its 9 tiles and collects the results.
5. The main scheduler gathers everything back into main memory.

This takes about 43 000 cycles. The test checks all 45 × 37 result words. It also counts that each
mechanism took place the expected number of times:

- AMOs;
- L2 and main DMA copies;
- port switches and tile interrupts;
- cluster interrupts;
- thread registrations;
- vector instructions;
- WFI wake-ups at both scheduler levels;
- tiles computing at the same time.

Any mechanism that never happened counts as a failure.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/wbp_pkg.sv tb/rv_asm_pkg.sv \
    tb/sched_prog_pkg.sv rtl/*.sv tb/tb_wbp_top.sv --top-module tb_wbp_top -Mdir build -o sim
./build/sim
```

The remaining lint warnings are of three kinds:

- Unused bits of the shared bus structs.
- Unused multiplier halves.
- A reset signal that is used both as an asynchronous reset and in assertion disable conditions.

None of them indicates a circuit problem.
