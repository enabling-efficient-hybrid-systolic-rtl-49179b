# Hybrid systolic / shared-L1 manycore cluster: Xqueue and queue-linked registers

A cluster where many small cores share one large L1 scratchpad is flexible, but
passing data from core to core costs loads, stores and synchronisation. A
systolic array passes data from neighbour to neighbour for free, but fixes the
topology in silicon. This design gets both from one piece of hardware. Every L1
bank holds a small FIFO queue that its own memory controller manages. A core
writes to a queue and another core reads from it. Because any core can reach
any bank, any two cores can be linked, so the software builds the systolic
topology it needs (chains, grids, trees) on top of an ordinary shared-memory
machine. Two mechanisms make such a link nearly free:

* **Xqueue** adds two memory operations, `q.push` and `q.pop`, executed
  atomically by the bank controller. A pop from an empty queue or a push to a
  full one does not fail. The controller holds the request back and answers it
  when the queue state allows, so the waiting is done by the hardware and
  costs no polling.
* **Queue-linked registers (QLRs)** bind four architectural registers of each
  core (`t0`..`t3`) to queues. Reading such a register consumes the next value
  popped from a queue. Writing it pushes the value to a queue. The pops and
  pushes are issued by the QLR, not by instructions, so the compute loop
  contains only arithmetic.

The RTL describes the memory side of a 256-core cluster of the MemPool kind:
64 tiles in 4 groups of 16, each tile with 4 core complexes and 16 banks.
That makes 1024 banks of 256 × 32-bit words (1 MiB) and 1024 hardware queues
of four entries. The RTL includes the bank controllers with their queue
managers, the tile and cluster interconnect, and the QLR extension of every
core. The RISC-V cores themselves, their DSP units and the instruction caches
are not included. Each core connects to the cluster through a port that
carries its load/store unit (LSU), the register fields of the instruction at
issue, and its register write-back.

## Organisation and address map

```
mempool_cluster                       256 core ports, 1024 queue status flags
 ├─ mempool_tile × 64                 4 cores, 16 banks
 │   ├─ qlr_unit × 4                  one per core: 4 × qlr + CSRs + LSU arbiter
 │   │   └─ qlr × 4                   each with 2 × stream_fifo
 │   ├─ mem_ctrl × 16                 Xqueue bank controller
 │   │   ├─ queue_manager             head/tail, parked pop/push
 │   │   └─ amo_alu
 │   ├─ spm_bank × 16                 256 × 32 bit
 │   ├─ stream_xbar 4×16              local requests (+1 input from other tiles)
 │   └─ stream_fifo …                 remote request and answer stages
 └─ stream_xbar × 2                   tile-to-tile requests and answers
```

Byte addresses are interleaved word by word across all banks:

| bits    | meaning                                                        |
|---------|----------------------------------------------------------------|
| [1:0]   | byte in the 32-bit word                                        |
| [11:2]  | bank (upper 6 bits select the tile, lower 4 the bank in it)   |
| [19:12] | row in the bank                                                |

Each bank's queue occupies rows `QueueBase`..`QueueBase+3` (rows 0–3 by
default). So a queue is named by any address of its bank. The tests use
`16*k`, which is bank 4k. Software must not use those rows as ordinary data.
The QLR control registers sit at `0x4000_0000 + 16*q + {0, 4, 8, 12}`. Every
core sees its own copy of them (details in the QLR section).

Every transaction is a `mem_req_t` (address, write data, byte enables,
operation, meta). It gets exactly one `mem_rsp_t` back, with the same `meta`:
issuing core, source inside the core (0 = the core's LSU, 1–4 = QLR 0–3) and
an 8-bit tag. Stores are acknowledged too. Answers may come back out of order,
because a parked pop is answered late. The meta field is all that is needed to
route an answer home.

## The Xqueue bank controller (`mem_ctrl`, `queue_manager`)

The controller accepts at most one request per cycle and owns one bank. Loads,
stores and atomics (the RISC-V `amo*.w` set: swap, add, xor, and, or,
min/max signed and unsigned) work as usual:

* A load or store takes one bank access and is answered the next cycle.
* An atomic reads the word and answers with the old value. In the following
  cycle it writes back the `amo_alu` result, and the controller takes no new
  request in that cycle.

`q.push` and `q.pop` travel on the same path as atomics. The queue manager
keeps the head and tail pointers in registers, so a queue operation costs one
bank access and no pointer traffic. The queue is a circular buffer of four
slots. Empty means `head == tail` and full means `tail + 1 == head`, so at
most three values are stored and one slot always stays free. That free slot is
what makes a push to a full queue non-blocking for the bank:

| situation          | what happens                                                                 |
|--------------------|------------------------------------------------------------------------------|
| pop, queue holds data | read at head, head advances, answered next cycle                          |
| pop, queue empty   | the pop is *parked* (its meta is kept). The next push writes its value, then the controller reads it back in a later cycle and answers the parked pop. |
| push, room         | write at tail, tail advances, acknowledged next cycle                        |
| push, queue full   | the operand is written into the spare slot but the tail does not move. The push is *parked* without an answer. The next pop frees a slot; then the tail advances and the parked push is acknowledged. |
| second pop while a pop is parked, or second push while a push is parked | refused (`req_ready` low). The request waits in the interconnect, which back-pressures the issuing core. |

While a request is parked, the controller keeps serving loads, stores and
atomics, and queue requests of the other kind. Each cycle it does at most one
of the following, in this order:

1. the AMO write-back;
2. serving a parked pop;
3. acknowledging a parked push;
4. a new request.

Every action that produces an answer needs the single answer register to be
empty or draining in that cycle. A parked pop's requester therefore waits at
least one cycle after the push that feeds it. The hardware cost is two
pointers, two small meta registers and a few flags per bank.

`q_empty_o` and `q_full_o` of every bank are brought out of the cluster. They
are status signals, useful for debugging and for the tests.

## Queue-linked registers (`qlr`, `qlr_unit`)

Each core has four QLRs, tied to `t0`, `t1`, `t2`, `t3` (x5, x6, x7, x28).
Each QLR is configured through four memory-mapped words that only its own core
sees. The core's LSU accesses them, and the `qlr_unit` answers them one cycle
later without going to memory:

| offset from `0x4000_0000 + 16*q` | register                                              |
|------------------|------------------------------------------------------------------------|
| 0                | queue address popped from (incoming / in-out)                          |
| 4                | queue address pushed to (outgoing / in-out forward target)             |
| 8                | mode: 0 off, 1 incoming, 2 outgoing, 3 in-out                          |
| 12               | reuse degree: how many reads each popped value serves (0 counts as 1)  |

**Incoming.** The QLR issues pops on its own and keeps up to four in flight.
It never has more pops outstanding than free places in its 4-entry FIFO, so
every answer has a place to land. When the register holds no fresh value, the
oldest FIFO entry is written into the register file through the core's
write port. An instruction that reads the register consumes one use. After
`reuse` reads, the value is stale and the next one is written. An instruction
that reads the register while it is stale is held at issue. The `qlr_stall`
signal overrides the core's scoreboard for that.

**Outgoing.** Every write-back to the register is copied from the register
file's write port into a 4-entry FIFO and pushed to the target queue. A writer
reserves its FIFO slot when it issues and fills it at write-back. If no slot
is left, the writer is held at issue, so a full downstream queue throttles the
producer instead of losing data.

**In-out.** This mode works like incoming, and every popped value is also
pushed on to the second address. A core can therefore pass a stream to its
neighbour while using it itself, which is how chains of PEs are built without
copy instructions.

**Sharing the core's resources.** The paper's premise is that the QLRs add no
memory port to the core, and this design keeps that rule:

* Their pops and pushes go through the core's single LSU port. A round-robin
  arbiter rotates between the core and the four QLRs.
* Answers are steered back by the source field.
* The register-file write port goes to the core's own write-back first. A QLR
  writes a popped value in a cycle when the core does not, lowest QLR first.
* Writing mode 0 switches a QLR off and clears its FIFOs and counters. Switch
  it off only when nothing is in flight. Answers to pops that are still in
  flight come back after the switch and are dropped.

## Interconnect and latency

Inside a tile, a combinational all-to-all crossbar (`stream_xbar`) connects
the four cores and one remote-ingress port to the 16 controllers. Each output
has a rotating round-robin arbiter. Its pointer moves every cycle the output
is requested, not only when a request is accepted. This matters because a
controller may refuse a queue request for many cycles. With a pointer that
only moved on acceptance, a refused request at the front could block the
others for good.

A request to another tile takes this path:

1. two register stages in the source tile, one per core, so no core blocks
   another;
2. a cluster-level request crossbar into the target tile's ingress port;
3. the bank;
4. the target tile's answer (egress) stage;
5. the cluster answer crossbar;
6. one ingress stage per core in the source tile.

Without contention the timing is:

* **local access:** request at cycle *t*, answer at *t + 1*;
* **remote access:** answer at *t + 5*.

This matches the one-cycle local and at-most-five-cycle remote access of the
MemPool cluster the design follows. The cluster-level network is one flat
crossbar. It gives every remote bank the same latency, while MemPool's network
is a hierarchy of tile, group and cluster crossbars. Requests and answers use
separate networks, and no FIFO on the request path is shared by several
cores, so a parked queue request cannot block an unrelated core.

## Connecting a core

Per core, `core_i[k]` (type `core_out_t`) carries:

* the LSU request: valid, op, address, data, byte enables, tag. It is taken
  when `core_o[k].req_ready` is high.
* the instruction at issue: `instr_valid`, `rs1/rs2/rd` with their `*_used`
  flags, and `issue`, high in the cycle the instruction really issues. The
  core must not raise `issue` while `core_o[k].qlr_stall` is high.
  `qlr_stall` depends only on the register fields, not on `issue`.
* the write-back: `wb_valid`, `wb_rd`, `wb_data`.

`core_o[k]` (type `core_in_t`) returns:

* LSU answers (`rsp_valid`, `rsp_rdata`, `rsp_tag`). They must be taken in
  the cycle they are offered.
* the merged register-file write port: `rf_we`, `rf_waddr`, `rf_wdata`. The
  core's register file is written from this port, not directly from its
  write-back.

Core *k* sits in tile *k / 4*.

## Parameters

| module            | parameter            | default | meaning                              |
|-------------------|----------------------|---------|--------------------------------------|
| `mempool_cluster` | `NumGroups`          | 4       | groups                               |
|                   | `TilesPerGroup`      | 16      | tiles per group                      |
|                   | `CoresPerTile`       | 4       | cores per tile                       |
|                   | `BanksPerTile`       | 16      | banks per tile                       |
|                   | `BankRows`           | 256     | 32-bit words per bank                |
|                   | `QueueBase`          | 0       | first row of each bank's queue       |
|                   | `QlrDepth`           | 4       | FIFO depth inside each QLR           |
| `mempool_pkg`     | `QueueDepth`         | 4       | slots per queue (three usable)       |
|                   | `NumQlr`             | 4       | QLRs per core                        |
|                   | `QlrCsrBase`         | 0x4000_0000 | QLR control registers            |

The number of tiles and banks must be a power of two, because the address map
uses bit fields. Some widths in the package are fixed for up to 256 cores: the
core index is 8 bits. A larger cluster needs `CoreIdWidth` raised.

## Where this RTL departs from the described architecture

* **Not included:** the Snitch cores, their DSP units, the instruction caches
  and the DMA. The cores are external (see "Connecting a core"). The tests
  drive the core ports with a behavioural model, `tb/pe_model.sv`.
* **Flat remote interconnect.** The group level is not modelled. All remote
  accesses take 5 cycles, where MemPool's group-local remote accesses are
  faster than the 5-cycle bound.
* **Design choices:**
  * the address map;
  * the QLR register layout and the 0x4000_0000 base;
  * the second address for in-out forwarding;
  * the QLR FIFO depth of four;
  * credit-counted pops and issue-time slot reservation;
  * the priority order inside the bank controller;
  * the register-stage placement;
  * acknowledging every store.
* **Queue location.** Each queue is fixed to the first four rows of its bank.
  The queue address only selects the bank. There is one queue per bank, which
  is the configuration described, and no queue size or location register.
* **QLR snooping.** A QLR finds out that its register is accessed from the
  decoded register fields at issue and from the write-back port, not from the
  register file's read ports. This way a hazard can stall the instruction
  before it reads a stale value.
* **Fixed queues.** The architecture also allows any number of queues of any
  size, at any address, when managed in software with ordinary loads, stores
  and atomics. That still works here, but only the fixed per-bank queues get
  the hardware `q.push`/`q.pop` support.
* **Not modelled:** clock gating of unused QLRs. Back-pressure from the
  register-file port to the core pipeline is also not modelled, because the
  core's write-back always wins.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`:

* `tb_spm_bank`: random reads and writes with byte enables against a model.
* `tb_amo_alu`: every atomic operation against a reference, including
  signed/unsigned corner values.
* `tb_stream_fifo`: random traffic against a queue model. It checks the
  one-cycle latency and that a full FIFO refuses input.
* `tb_stream_xbar`: random traffic with stalled outputs. It checks delivery,
  per-input order, no loss and no duplication.
* `tb_queue_manager`: random push/pop streams against a reference queue.
  Covers parking on empty and full, and refusal of a second parked request.
* `tb_mem_ctrl`: loads, stores, atomics and queue traffic interleaved. Checks
  the one-cycle answer latency and that the controller keeps serving while a
  pop is parked.
* `tb_qlr` and `tb_qlr_unit`: modes, reuse, RAW and WAW stalls, mode
  switches, the CSR path and register-file write arbitration.
* `tb_mempool_tile`: one tile, four behavioural cores in a chain. Uses
  explicit queue operations and QLRs in every mode.
* `tb_mempool_cluster`: a reduced 2 × 2-tile cluster (16 cores) end to end.
  Chains of cores stream numbered values through queues:
  1. a mover pushes with `q.push`;
  2. compute cores use incoming and outgoing QLRs;
  3. one core forwards in in-out mode;
  4. one core reuses each operand twice;
  5. a slow sink pops with `q.pop`, checks every value, stores a sum and
     counts completion with an atomic add;
  6. a probe core measures local (1-cycle) and remote (5-cycle) latency.

  The testbench counts how often each mechanism occurred and fails if one
  never did. The counted mechanisms are: RAW and WAW QLR stalls, parked pops,
  parked pushes, reuse, remote accesses and forwarding.
* `tb_mempool_cluster_full`: the same test on the cluster at its default size
  (256 cores, 1024 banks), with eight chains of 32 cores. The chains
  stream 32 values each. One run takes about 400 cycles and applies 8427
  checks. In that run, every counted mechanism occurred many times; for
  example, there were over 1000 WAW stalls and over 1800 remote accesses.

Run any of them with plain Verilator (5.x), from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mempool_pkg.sv tb/tb_mempool_cluster.sv --top-module tb_mempool_cluster
./obj_dir/Vtb_mempool_cluster +verilator+rand+reset+2
```

Variables that nothing initialises are randomised
(`+verilator+rand+reset+2`). All state the design reads is reset. The
full-size test produces a large model. Its C++ compilation takes about
12 minutes on four cores, but the simulation itself runs in seconds. The
reduced cluster test builds in a minute or two.

Each testbench was also run against a copy of its block with one deliberate
bug. Examples:

* byte enables ignored;
* signed min compared unsigned;
* a parked push lost when a pop frees its slot;
* the AMO write-back storing the operand;
* the crossbar ignoring output back-pressure;
* QLR reuse ignored;
* QLR and core writing the register file in the same cycle;
* answers steered to the wrong core;
* remote requests routed to the wrong tile.

Every testbench reports failures on its broken copy.

## Lint notes

Verilator's lint reports a few warnings that are deliberate:

* `SYNCASYNCNET`: the reset is used asynchronously by the flops and in
  `disable iff` of the assertions.
* `PINCONNECTEMPTY`: FIFO ready or count outputs are unused where credits
  already guarantee space.
* Unused upper bits of loop indices.
