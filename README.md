# Dalorex in SystemVerilog: a data-local task machine for graph kernels

Irregular, memory-bound kernels such as graph traversals and sparse
matrix-vector products spend most of their time waiting for data that sits
far from the core that asked for it. Dalorex turns that around: the data
arrays are cut into equal chunks, each chunk lives in the scratchpad of one
tile, and a program is split into short tasks at every point where it would
touch another array element. A task never loads remote data. Instead, its
last action is to send a message, the invocation of the next task, to the
tile that owns the element it needs. All communication therefore happens
as small fixed-length messages on a network-on-chip, and every memory access
is local.

This repository holds RTL of such a chip: a grid of identical tiles on a 2D
torus, each with a scratchpad SRAM, a processing unit (PU), a task
scheduling unit (TSU) and a five-port router. The default size is a 16x16
grid with 4 MiB (2^20 32-bit words) of SRAM per tile. The processing unit
is a fixed-function sequencer for single-source shortest paths (SSSP),
which also covers BFS when all edge weights are 1. It is not a programmable
core.

## How a program runs: SSSP as four tasks

The graph is held in CSR form: `ptr` (the first edge of each vertex),
`edge_idx` (the target of each edge), `edge_values` (its weight), `dist` and
a frontier bitmap. Vertex arrays are split into chunks of `2^17` entries and
edge arrays into chunks of `2^18` entries. Chunk `t` of every array lives on
tile `t`, where `t = y * 16 + x`.

| Task | Reads from | Work done | Sends to |
|------|------------|-----------|----------|
| T1 | IQ1 (vertex id) | reads `ptr[v]`, `ptr[v+1]`, `dist[v]` | CQ1: `{edge begin, local edge end, dist}`, one message per edge chunk and per at most OQT2 edges |
| T2 | IQ2 (3 words) | for each local edge, reads target and weight | CQ2: `{target vertex, dist + weight}` |
| T3 | IQ3 (2 words) | if the new distance is smaller, stores it and sets the vertex's frontier bit; the first bit set in a 32-vertex block queues that block | IQ4: block id |
| T4 | IQ4 (block id) | pushes every set vertex of the block into IQ1 and clears the bits | IQ1 (local) |

CQ1 and CQ2 are *channel queues*. Their contents leave the tile as network
messages. Channel 0 carries T2 invocations, which are 3 flits long and
arrive in IQ2 of the tile that owns the first edge. Channel 1 carries T3
invocations, which are 2 flits long and arrive in IQ3 of the tile that owns
the vertex. The run ends when every queue, buffer and PU on the chip is
empty. The staged idle tree then raises `done_irq`.

Two rules keep this from deadlocking:

- **Invocation only with room.** A task is only started when its input
  queue holds a whole invocation and its output queue has room for
  everything the task may produce (`oq_need`).
- **Early exit.** T1 and T4 produce a variable amount of output. They stop
  early and leave their input entry in place when their output queue fills.
  T1 keeps its progress through the vertex's edge range in a register, so
  the next invocation of T1 resumes there.

## The tile

```
           N  S  E  W  (links, per channel: valid/ch/data out, free slots back)
            \ |  | /
          +----------+   T port   +-------+  port B  +------------+
          |  router  |<---------->|  TSU  |<-------->| scratchpad |
          +----------+            +-------+          |  2R / 2W   |
                                     |  task, queue  +------------+
                                     |  addresses         ^ port A
                                  +------+                |
                                  |  PU  |----------------+
                                  +------+
```

* **Queues** are circular buffers in the scratchpad. The TSU holds the base,
  length, head, tail and count of each of the six queues. The PU reads and
  writes queue entries itself at the head and tail addresses that the TSU
  exports, and pulses `push` or `pop`. The TSU moves words between the
  scratchpad and the network through its own port.
* **Scheduler** (`dalorex_scheduler`). It chooses among the ready tasks by
  queue occupancy:
  - First, a task whose input queue is at least 3/4 full (*high* priority).
  - Next, a task whose output queue is at most 1/4 full (*medium* priority).
  - Otherwise, the ready tasks take turns round-robin.

  This drains queues that are about to overflow and feeds the network when
  it is starved.
* **Head encoder and decoder.** When a channel queue sends a message, its
  first word is a global array index. The encoder divides it by the chunk
  size of that channel to get the destination tile, and puts the tile number
  in the top 8 bits of the head flit, above the local index. The receiving
  tile's decoder clears those bits, so the task sees a local index.
* **Clock gating.** The PU's state only advances while the TSU's
  `pu_clk_en` is high, which is while a task is being handed over or is
  running. The enable is a plain synchronous enable. An implementation
  would drive a clock-gating cell with it.

Host access uses port B of the scratchpad, and the host has priority there.
Configuration registers are written with `host_cfg_we`, and the register
number is `host_addr[7:0]` (see `dalorex_pkg`). Writing register
`0x10 + q` pushes a word into queue q. This is how the host starts a run.

## The network

`dalorex_router` is a wormhole router with one FIFO per input port and per
logical channel (8 flits deep).

- **Routing.** A head goes X first, then Y, taking the shorter way round
  each ring (a tie goes East or South).
- **Locking.** The head locks the pair (output, channel) until the
  message's fixed number of flits has passed. Flits of different messages
  on one channel therefore never interleave. The two channels share each
  link and take turns.
- **Arbitration.** Inputs competing for one output channel are served
  round-robin.
- **Credits.** Every link carries back the number of free slots in the
  receiving FIFO for each channel.
- **Bubble rule.** A message that is already travelling along a ring needs
  one free slot to move on. A message that *enters* a ring, either by
  injection or by turning from X to Y, needs room for two whole messages.
  This keeps a bubble in every ring, so a torus ring cannot fill completely
  and deadlock.
- **Latency.** A head is allocated and forwarded in the same cycle, so each
  hop takes one cycle.

## Where this RTL departs from the design it follows

* **Fixed PU.** The PU runs only the SSSP tasks above. The original
  processing unit is a small in-order core running task code from the
  scratchpad. Its instruction set is not specified, so other kernels
  (PageRank, WCC, SPMV) cannot run here.
- **Network buffers.** Each input channel has a fixed buffer. This replaces
  a shared per-direction buffer pool whose split between channels is set by
  software.
* **Ruche links.** There are none. They are only used for grids larger than
  32x32.
* **Arbitration details.** The priority thresholds (3/4 and 1/4), the
  tie-breaking rules, the bubble rule, the position of the tile field in the
  head flit, and the host interface are choices of this design.
* **Chunking.** Arrays are distributed in contiguous chunks (index divided
  by the chunk size), following the task code. The alternative reading,
  distribution by low-order index bits, is not used.
* **OQT2.** The default is 512, so that one T2 invocation's worst-case
  output (2 x 512 words) fits in the 1024-entry CQ2.
* **SRAM size.** Each tile has 4 MiB of SRAM. One comparison elsewhere uses
  4.2 MB per tile instead.
* **Frontier write-back.** When T4 stops early, it writes the bits it did
  not yet push back into the bitmap.
* **Local end index.** T1 sends its local end index as
  `end - chunk base`. A range that ends exactly at a chunk border is
  therefore sent as the chunk size, not 0.

## Files

| File | Block |
|------|-------|
| `rtl/dalorex_pkg.sv` | widths, queue and task numbers, configuration register map |
| `rtl/dalorex_scratchpad.sv` | two-port SRAM array |
| `rtl/dalorex_fifo.sv` | flit FIFO with a credit output |
| `rtl/dalorex_head_encoder.sv`, `rtl/dalorex_head_decoder.sv` | index to head flit and back |
| `rtl/dalorex_scheduler.sv` | occupancy-based task selection |
| `rtl/dalorex_tsu.sv` | queues, channel send and receive, scheduler, clock enable |
| `rtl/dalorex_pu.sv` | SSSP task sequencer |
| `rtl/dalorex_router.sv` | five-port torus router |
| `rtl/dalorex_tile.sv` | one tile |
| `rtl/dalorex_idle_tree.sv` | chip-wide idle detection and done interrupt |
| `rtl/dalorex_top.sv` | W x H torus of tiles with host access |

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert rtl/dalorex_pkg.sv rtl/*.sv tb/tb_dalorex_top.sv \
          --top-module tb_dalorex_top
obj_dir/Vtb_dalorex_top
```

The testbenches cover the following:

- **`tb_dalorex_top`** runs SSSP on a 4x4 chip with a random 256-vertex,
  1024-edge graph and checks every distance against Bellman-Ford. It also
  counts each of these mechanisms and fails if one never happens:
  - range splits and early exits of T1;
  - early exits of T4;
  - high and medium priority;
  - router stalls;
  - wrap-around hops;
  - gated PU cycles;
  - the done interrupt.

  A run takes about 2,500 cycles.
- **Largest size simulated.** This is the 4x4 chip with 4096-word
  scratchpads used by `tb_dalorex_top`. A Verilator model of the default
  16x16 chip with 4 MiB per tile holds 1 GiB of SRAM state, and it did not
  finish compiling in 20 minutes. The default size has therefore only been
  linted and elaborated, not simulated.
- **`tb_dalorex_tile`** runs SSSP inside one tile. It is the test of the TSU
  and the PU.
- **The remaining testbenches** test one block each against a reference
  model.

## Known limits

* **Synthesis size.** Synthesis of the full 256-tile top is very large.
  Each tile's scratchpad is a plain array and is expected to map to SRAM
  macros.
* **Reset warning.** `rst_n` is an asynchronous reset. The assertions also
  sample it with `disable iff`, and lint reports that as a signal used both
  synchronously and asynchronously. It has no effect on the logic.
* **Unused outputs.** Some outputs of the FIFO and head-codec instances are
  left open on purpose, for example `full` and `count` where only the credit
  count is needed.
