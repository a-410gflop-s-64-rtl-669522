# HeartStream shared-L1 cluster: memory system, systolic queues and Tile-shared arithmetic

HeartStream is a cluster of 64 small RISC-V cores built for software-defined
baseband processing (B5G/6G uplink: FFTs, beamforming, channel estimation,
MIMO detection). It is meant to be programmed like one big multicore, not as
a chain of fixed accelerators. Two ideas carry it:

1. **All 64 cores share one flat, word-interleaved L1 scratchpad.** There are
   256 banks of 1 KiB each (256 KiB in all). Any core reaches any word in
   1, 3 or 5 cycles, depending on how far away the bank is.
2. **Cores can be wired into a systolic array in software.** Each core has
   *queue-linked registers* (QLRs). Once configured, a QLR turns reads or
   writes of an ordinary register into pops from, or pushes to, a stream. The
   stream goes directly to a neighbouring core in the same Tile, or through a
   hardware queue held in an L1 bank. A systolic matrix multiply or FFT then
   passes its operands core to core, with no loads, stores or
   synchronisation in the inner loop.

This RTL builds the parts of the cluster that define these two ideas:

- the bank controllers with their hardware queues;
- the Tile, Group and cluster interconnect, with the paper's latencies;
- the QLR units;
- the Tile-shared floating-point divide/square-root unit;
- the per-core integer unit (IPU) with SIMD and complex operations.

The RISC-V cores are not included. Neither are their floating-point
subsystem, instruction caches, DMA, AXI/L2 side and peripherals. Each core's
port is a top-level port of `heartstream_cluster`, so a testbench (or a core
model) plays the cores.

## Hierarchy and address map

```
heartstream_cluster          4 Groups + registered links between Groups
└── group  (x4)              4 Tiles + 4x4 crossbars
    └── tile (x4)            4 core ports, 16 banks, QLRs, DIV-SQRT, IPUs
        ├── l1_bank (x16)    1 KiB bank + memory controller + bank queue
        ├── qlr     (x4)     one per core: 4 QLRs
        ├── ipu     (x4)     one per core
        ├── fp_divsqrt       one per Tile, shared by its 4 cores
        └── xbar, rr_arbiter, pipe_reg   (helpers)
```

Words are interleaved so that consecutive words fall on consecutive banks
across the whole cluster. Sequential data therefore spreads over all 256
banks.

| address bits | meaning |
|---|---|
| [1:0]   | byte in word |
| [5:2]   | bank within the Tile (16) |
| [7:6]   | Tile within the Group (4) |
| [9:8]   | Group (4) |
| [17:10] | row within the bank (256 words) |

Each core has a 6-bit id, `{group, tile, core}`. Every request carries that
id and a 3-bit tag so its response can find its way back. Tag 0 is the
core's load/store port; tags 1 to 4 are its QLRs 0 to 3.

## The three distances: 1, 3 and 5 cycles

The paper gives the access latency as "1 to 5 cycles". This design gets
there as follows; the testbenches check all three numbers.

- **Own Tile, 1 cycle.** The request crosses the Tile's combinational request
  crossbar and is accepted by the bank in the same cycle. The bank answers
  from its output register, so the response is at the core in the next cycle.
- **Another Tile of the same Group, 3 cycles.** Each remote request output
  and each remote response output of a Tile goes through a register
  (`pipe_reg`, a 2-entry buffer that keeps full throughput). The request
  loses one cycle on the way out and the response one on the way back.
- **Another Group, 5 cycles.** Each link between Groups adds one more
  register in each direction.

The paper does not say where its pipeline registers are. This placement is
the simplest one that reproduces its numbers.

**Remote ports.** A Tile has four remote request outputs and four remote
response inputs, plus four of each in the opposite direction. Port k carries
traffic to Group (own + k) mod 4, so port 0 serves the other Tiles of the
own Group. Incoming requests on port k therefore come from Group (own − k)
mod 4. A response to a core of another Group leaves on port
(own − requester) mod 4, which is the port on which its request arrived.

Inside a Group, each direction k has one 4×4 request crossbar and one 4×4
response crossbar. These join the four Tiles' port-k outputs to the target
Tiles' port-k inputs. The crossbars for k = 1..3 reach the other Groups over
the registered links.

**Arbitration.** Every crossbar output has a round-robin arbiter. The
pointer moves only when a grant is used. A request held back by a full
downstream buffer therefore keeps its grant, and its payload never changes
while it waits. Each core's load/store unit and its QLR unit share the
core's crossbar input through another 2-input round-robin arbiter.

**Bank conflicts.** Two requests for the same bank in the same cycle are
served one after the other. The loser stays valid until accepted, so its
latency grows by the waiting time.

## Bank queues

Besides load and store, every bank controller runs a small hardware FIFO for
QLR streams that cross Tiles (the paper's "queue in L1").

- **Storage.** The FIFO uses the top `QueueDepth` = 4 words of the bank.
  Head, tail and fill level are registers in the controller.
- **Operations.** A push (`OP_QPUSH`) appends a word. A pop (`OP_QPOP`)
  returns the oldest one. Any address that selects the bank selects its
  queue.
- **Full or empty.** A push to a full queue, or a pop from an empty one,
  changes nothing and is answered with `ok = 0`. The QLR that sent it simply
  retries. This makes flow control across the cluster work without credits.
  The cost is extra traffic while a producer is far ahead of its consumer.

The paper gives neither the queue size nor its full/empty behaviour. Both
are choices of this design.

## Queue-linked registers

Each core has `NumQlr` = 4 QLRs. Software configures each one once,
through the `qlr_cfg_*` port, with a `qlr_cfg_t` record:

| field | meaning |
|---|---|
| `mode` | `QLR_OFF`, `QLR_MEM` (queue in a bank) or `QLR_DIRECT` (link to a core of the same Tile) |
| `push` | 1 = the core writes the register (producer), 0 = the core reads it (consumer) |
| `addr` | address of the bank whose queue is used (`QLR_MEM`) |
| `src_core`, `src_qlr` | for a direct pop: which core of the Tile and which of its QLRs feeds it |
| `count` | number of elements, after which the QLR switches itself off; 0 = endless |

How a QLR works in each direction:

- **Pop-QLR.** It prefetches into a `QlrDepth`-entry FIFO. In memory mode it
  keeps up to `QlrDepth` pops in flight, never more than the FIFO has room
  for. A refused pop (empty queue) is dropped and issued again. The core's
  read (`qlr_pop_*`) takes the oldest word, and stalls while none is there.
- **Push-QLR.** It collects the core's writes (`qlr_push_*`) in its FIFO. It
  sends them one at a time, retrying each until the queue accepts it, so
  words can never overtake each other.
- **Direct mode.** In `QLR_DIRECT` the Tile connects a push-QLR's FIFO
  output straight to the pop-QLR that names it (`src_core`, `src_qlr`). No
  memory access is involved.

The configuration fields, the counts and the retry scheme are this design's
own. The paper fixes only the principle:

- configuration once at program start;
- fully hardware-managed streaming after that;
- direct links inside a Tile;
- memory-mapped queues across Tiles.

## Tile-shared divide / square root

`fp_divsqrt` computes IEEE-754 binary32 `a/b` (op 0) or `sqrt(a)` (op 1).
It is shared by the four cores of a Tile.

- **Arbitration.** A round-robin arbiter accepts one request whenever the
  unit is idle.
- **Algorithm.** The unit works one bit per cycle: restoring division, or
  digit-by-digit square root, on the 24-bit significands. It then rounds
  once, to nearest even.
- **Timing.** A division takes **29 cycles** from acceptance to result; a
  square root takes **28**. The unit is busy for that whole time.
- **Result.** The result is on a shared 32-bit bus (`ds_rsp_result_o`, one
  per Tile), with a valid pulse on the requesting core's `ds_rsp_valid_o`.
- **Special cases.** Subnormals are flushed to zero. Invalid operations
  return `0x7fc00000`; division by zero gives a signed infinity.

The paper only says that such a unit exists, one per Tile, to speed up
matrix inversion. Every detail above is a choice of this design.

## Integer unit

The `ipu` holds one registered result; a new operation can start every
cycle. `result` is valid one cycle after `in_valid`.

| op | result |
|---|---|
| `MUL` | a·b (low 32 bits) |
| `MAC` | c + a·b |
| `ADD2` / `SUB2` | per-16-bit-half add / subtract |
| `DOTP2` | c + a.lo·b.lo + a.hi·b.hi (signed) |
| `CMUL` | complex a·b |
| `CMAC` | c + complex a·b |
| `ADD3` | a + b + c (three-term addition) |

Complex numbers are two signed Q1.15 halves: the real part in [15:0] and the
imaginary part in [31:16]. Products are shifted right by 15 and truncated.

## Parameters

Shared constants live in `hs_pkg`. All defaults are the chip's sizes where
the paper gives them.

| constant | default | origin |
|---|---|---|
| `NumGroups`, `NumTilesPerGroup`, `NumCoresPerTile` | 4, 4, 4 | paper |
| `NumBanksPerTile`, `BankWords` | 16, 256 (1 KiB) | paper |
| `NumRemotePorts` | 4 | paper (block diagram) |
| `NumQlr`, `QlrDepth` | 4, 4 | this design |
| `QueueDepth` (words per bank queue) | 4 | this design |

The address-field helpers in `hs_pkg` derive their widths from these
constants. However, the address split above assumes power-of-two sizes.

## Where this RTL departs from the paper, or goes beyond it

- **Not built:**
  - the cores;
  - the FP subsystem, with its FP16/FP8, widening dot-product and
    complex-float instructions;
  - the L0 and L1 instruction caches;
  - the 256-bit AXI ports, L2, DMA, boot ROM, serial link, JTAG, UART and
    FLL.

  The paper names these but does not describe their insides. Without a core
  there is also no load-post-increment addressing. Of the integer
  instructions, the IPU builds a representative set; of the floating-point
  ones, only divide and square root are built.
- **Divide/square root formats.** `fp_divsqrt` handles binary32 only. The
  formats the paper's unit supports are not given.
- **Latency model.** The cycle counts (1/3/5) match the paper's. Clock-level
  details, such as where the registers sit and the round-robin policy, are
  assumptions. Queue flow control by refusal and retry is an assumption too.
- **Bandwidth.** The paper quotes 204.8 GB/s of L1 bandwidth, which is
  64 cores × 4 bytes × 800 MHz. The design matches that: every core can
  have one request accepted per cycle.
- **Streams from plain memory.** In the paper's systolic matrix-multiply
  sketch, the cores at the edge of the array fetch operands from L1 and
  forward them. Here those cores use ordinary loads followed by pushes into
  a QLR. There is no QLR mode that itself walks through a matrix in memory.
- **Remote inputs of a Tile.** The Tile drawing shows one incoming request
  bundle and one outgoing response bundle. This RTL has one of each per
  direction (four in all), merged by the Tile's request crossbar. The
  registers sit on the Tile outputs, not on its inputs. The cycle counts
  are the same either way.
- **Workload sizes.** Only memory footprint is checked against the paper's
  workloads, since no program can run without cores. The largest one
  (conv2d/dotp at about 192 KiB) fits the 256 KiB L1. A full 14-symbol PUSCH
  slot does not fit and depends on the DMA, which is not built.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog.
With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/hs_pkg.sv \
          tb/tb_cluster.sv --top-module tb_cluster -Mdir obj -o sim -j 8
./obj/sim
```

| testbench | what it shows |
|---|---|
| `tb_l1_bank` | loads and stores with byte enables; queue order; full/empty refusal; 1-cycle response |
| `tb_xbar` | random traffic with back-pressure: no loss, no duplication, per-input order, round-robin fairness |
| `tb_qlr` | memory and direct streams, retries on full/empty queues, bounded streams switching off |
| `tb_fp_divsqrt` | random and special-case division and square root against a reference; 29/28-cycle latency; sharing among 4 cores |
| `tb_ipu` | every operation against a reference; 1-cycle latency |
| `tb_tile` | local 1-cycle accesses, remote port routing, a direct QLR stream, DIV-SQRT and IPU through the Tile |
| `tb_group` | 1-cycle and 3-cycle accesses across the Group's Tiles; traffic to and from other Groups |
| `tb_cluster` | the whole cluster at its default size |
| `tb_systolic_matmul` | workload: a 2×4 systolic array of cores multiplying int32 and complex16 matrices through QLR streams |

`tb_cluster` runs all 64 cores at the default sizes. It checks:

- random loads and stores against a reference model;
- the 1/3/5-cycle latencies;
- bank conflicts;
- queue retries;
- a systolic producer/consumer chain through memory queues and direct links;
- DIV-SQRT contention and IPU use.

It counts each of these events and fails if any of them never happened.

`tb_systolic_matmul` follows the systolic matrix multiply on the full
cluster. The array has 2 × 4 cores. Its left half sits in Tile 0 and its
right half in Tile 1, so the A operands cross between Tiles through bank
queues in another Group. The B operands move down through direct links.

- **Inner loop.** Each core pops its operands, forwards them and
  accumulates with the IPU (`MAC` for int32, `CMAC` for complex16). There
  are no loads in the inner loop except at the array's edge.
- **Timing.** With K = 16 the product takes 169 cycles in either number
  format. The time is set by the testbench's own per-word handshakes, which
  stand in for the cores' instruction timing. It is not a prediction of the
  chip's run time.
