# FireGuard: streaming every retired instruction of an out-of-order core to a swarm of small checker cores

Fine-grained security checks need to see nearly every instruction a program
retires. Examples are a shadow stack, an AddressSanitizer-style bounds check,
use-after-free detection and custom performance counters. Software
instrumentation makes such checks slow. FireGuard moves them off the main core
instead.

- Hardware next to a superscalar out-of-order core picks out the retired
  instructions a check cares about.
- It attaches the data the check needs: a register value, a load or store
  address, or a jump target.
- It streams the result, in program order, to a group of small in-order
  microcontrollers ("µcores"), which run the checks as ordinary software
  ("guardian kernels").

The main core only slows down when the checkers cannot keep up.

This RTL implements the path from the main core's commit stage to the
instruction port of the µcores:

```
 main core (fast clock)                                  analysis side (slow clock)
 ROB commit lanes ──► data-forwarding ──► event filter ──► allocator ──► CDC ──► fabric ──► message ──► ISAX ──► µcore
 PRF read ports  ◄──► channel            (mini-filters,   (distributor, queues (multicast    queues     interface
 LDQ/STQ/FTQ tops ──►                     reorder FIFOs,   SEs)          per    + NoC mesh)  per engine per engine
                                          arbiter)                       engine
```

The main core (a 4-wide SonicBOOM in the original system), the µcores (5-stage
Rocket cores), optional fixed-function accelerators and their caches and
memory are not part of this RTL. Their interfaces are the ports of
`fireguard_top`.

## Sizes of the default configuration

| Item | Default | Where it is set |
|---|---|---|
| Commit / filter width | 4 lanes | `LANES` |
| PRF read ports shared with the filter | 4 (port *x* serves lane *x*) | `NUM_RD_PORTS` |
| Physical registers | 128 × 64 bit (7-bit index) | `fireguard_pkg` |
| Mini-filter table | 1024 entries × {GID[1:0], DP_Sel[1:0]} | `mini_filter` |
| Reorder FIFOs | 4 × 16 entries | `FIFO_DEPTH` |
| Groups (GIDs) | 4 (GID 0 = not relevant) | `GID_W` |
| Scheduling engines (one per guardian kernel) | 4 | `NUM_SE` |
| Analysis engines | 4, on a 2 × 2 mesh | `NUM_AE`, `MESH_X` |
| Clock-crossing queues | 8 entries per engine | `CDC_DEPTH` |
| Message queues | 32-entry input, 32-entry output per engine | `MSQ_DEPTH` |
| Clocks | fast (core, 3.2 GHz in the reference system), slow (1.6 GHz) | `clk_core`, `clk_ae` |

The packet that travels from the filter to the µcores is 138 bits:

```
 137            74 73        34 33            2 1   0
 ┌────────────────┬────────────┬───────────────┬─────┐
 │ debug data(64) │  PC (40)   │ instruction32 │ GID │
 └────────────────┴────────────┴───────────────┴─────┘
```

## Two clock domains

Everything that must keep pace with the main core runs on the fast clock:

- the forwarding channel;
- the event filter;
- the allocator;
- the write side of the crossing queues.

The read side of the crossing queues runs on the slow clock, together with
the fabric, the message queues and the ISAX interfaces. So does the µcore
side.

Each analysis engine has its own `cdc_fifo`. This is a Gray-coded
asynchronous FIFO with two-flop synchronisers, so the crossing is a
handshake on pointers and never on the 138-bit data. The two domains reset
separately (`rst_core_n`, `rst_ae_n`).

## Data-forwarding channel (`dfc_channel`)

The channel adds no buffers between execute and commit. It relies on the fact
that the data a check wants is still inside the core when the instruction
retires:

- an operand or result is in the physical register file;
- a load or store address is at the top of the load or store queue;
- a jump target is at the top of the fetch-target queue.

The channel works over two cycles:

- **Cycle t (commit).** Each ROB commit lane sends its instruction word to its
  mini-filter. The channel registers the lane's PC, instruction and PRF index
  in one address register per lane.
- **Cycle t+1.** If mini-filter *x* wants register data, it raises
  `prf_sel[x]`. PRF read controller *x* is then taken away from the issue
  queue for this cycle:
  - the PRF sees the stored index;
  - the issue queue's request on that port gets `iq_stall[x]` and retries in
    the next cycle;
  - the register value comes back as the forwarded data in the same cycle.

  The other three ports are untouched, so the only cost is one delayed
  operand read on one port.

Load, store and jump addresses need no read port. The core presents the queue
tops for the instructions retired in cycle t during cycle t+1 (`ldq_top`,
`stq_top`, `ftq_top`, one per lane), and the channel passes them through.

A register is read at most one cycle after commit, so it cannot have been
freed and reused in between. This is why no buffering is needed.

## Event filter (`event_filter`, `mini_filter`, `reorder_arbiter`)

### Mini-filters

Each commit lane has its own mini-filter, so the filter checks all four
retiring instructions every cycle.

A mini-filter is a 1024-entry table. Its address is the instruction's
function code over its opcode, `{funct3, opcode[6:0]}`. For example, address
`0x003` is `lb` and `0x023` is `sb`.

Each entry holds two fields:

- a **GID**: the group of instructions this one belongs to, as the allocator
  sees it. GID 0 means "drop".
- a **DP_Sel**: which data to attach:

  | DP_Sel | Data attached |
  |---|---|
  | 0 | PRF value |
  | 1 | load address (LDQ top) |
  | 2 | store address (STQ top) |
  | 3 | jump target (FTQ top) |

The table is read synchronously at commit and answers in cycle t+1.
Configuration writes go to all lanes at once through `cfg_ft_*`. Every entry
is invalid after reset.

### Packet assembly

In cycle t+1 each lane builds the packet: the selected debug data, PC,
instruction and GID. All four lanes of a commit cycle form one *row*.
Irrelevant instructions stay in the row as invalid slots.

### Ordering

Checks such as a shadow stack depend on program order. The four packets of a
row must therefore leave one at a time, lane 0 first.

Each lane has a 16-entry FIFO, and a row is pushed into all four at once. The
arbiter's state is a lane pointer into the head row. Each cycle it:

- sends the first valid packet at or after the pointer;
- skips invalid slots without spending a cycle;
- pops the row once nothing valid is left in it.

So a valid packet costs one cycle and an invalid one costs nothing. Rows with
no valid packet at all are never pushed.

### Back-pressure

`commit_stall` rises when the FIFOs have at most one free row. One row may
already be in flight in cycle t+1, so the stall must come one row early.

This is the only way FireGuard slows the main core. It happens when the
analysis side cannot drain packets as fast as relevant instructions retire.

## Allocator (`allocator`, `scheduling_engine`)

The allocator handles one packet per cycle. It decides which analysis engines
get the packet, using two levels of bitmap.

1. **Distributor.** Each GID has an `SE_Bitmap` register naming the
   scheduling engines (SEs) interested in that group. An SE stands for one
   guardian kernel. If two kernels both want stores, the store GID's bitmap
   has two bits set.
2. **Scheduling engines.** Each activated SE picks one engine from its
   kernel's group (a member-mask register) and sets that engine's bit in its
   `AE_Bitmap`. The choice uses the previous target (`PT_reg`) and keeps the
   current one in `CT_reg` until the packet has left. The SE then moves
   `CT_reg` into `PT_reg`.

The AE bitmaps of all SEs are ORed together. A packet therefore reaches
exactly one engine of every interested kernel, which is a selective
multicast, not a broadcast.

Each SE has three scheduling policies:

| Policy | Target |
|---|---|
| fixed | lowest-numbered member whose queue has room |
| round robin | next member after the previous target that has room |
| block | the previous target as long as it has room, then the next one |

Block mode keeps a run of consecutive packets on one µcore. Checks that need
locality use it; a shadow stack is the typical case.

### Timing

- **Cycle t.** A packet is accepted only if every activated SE can find a
  member with room. The SEs register their choice.
- **From cycle t+1.** The packet waits in the single stage register with its
  engine bitmap.
- **First cycle all chosen crossing queues have room.** The packet is written
  into all of them at once (`out_wr`). Multicast copies therefore never split
  in time.

"Room" is the crossing queue's not-full flag. The allocator accepts and drops
a packet whose GID activates no SE.

## Fabric network (`fabric`, `noc_router`)

The fabric runs on the slow clock and has two channels. Both feed each
engine's input message queue through one multiplexer per engine.

- **Multicast channel.** The head of the engine's crossing queue is moved into
  its input queue when there is room. The allocator has already chosen the
  engines, so this is just a multiplexer per engine.
- **Routing channel.** Engines can send each other messages. This is used for
  pipelined kernels that hand work on, such as a shadow stack spread over
  several µcores.
  - The engines sit on a `MESH_X × (NUM_AE / MESH_X)` mesh.
  - Each `noc_router` has five ports: north, south, east, west and local.
  - Each input port that faces a neighbour has a 2-entry buffer. Ports on
    the edge of the mesh have none.
  - Routing is XY dimension order, and output arbitration is round robin.
  - A message is a 72-bit flit: destination, source and 64-bit payload.
  - At its destination, a flit enters the input queue as a packet with GID 0,
    the payload in the debug-data field and the sender's number in the PC
    field. Filtered packets never have GID 0, so a kernel can tell the two
    kinds apart.

At each engine, filtered packets have priority over routed ones in the same
cycle. The routed flit waits in its router.

## Message queues and the ISAX interface (`msg_queues`, `isax_ifc`)

Every analysis engine has a 32-entry input queue and a 32-entry output queue,
plus a few status registers. Guardian kernels use them through custom
instructions:

| Instruction | Effect |
|---|---|
| `count rd, rs1` | number of entries in the input queue (rs1 = 0) or output queue (rs1 ≠ 0) |
| `top rd, rs1` | bits [rs1+63 : rs1] of the input-queue head (bits above 137 read 0) |
| `pop rd, rs1` | same, and removes the head; the removed element is remembered |
| `recent rd, rs1` | bits [rs1+63 : rs1] of the most recently popped element |
| `push rs1` | sends rs1 to the engine named in the destination status register |
| status read / write | status register rs1 is read, or written with rs2 |

With `count` a kernel can unroll its receive loop. With `recent` it can fetch
a field it skipped, such as the PC, only when it reports an error.

Useful offsets for `top`, `pop` and `recent`:

| Offset | Returns |
|---|---|
| 74 | debug data |
| 34 | PC (low 40 bits) |
| 2 | instruction |
| 0 | GID in bits [1:0] |

Status registers (APB word addresses):

| Address | Register |
|---|---|
| 0 | engine id |
| 1 | input count |
| 2 | output count |
| 3 | push destination (read/write) |
| 4 | number of pops on an empty queue (write clears) |

### Where the instructions execute

The interface is meant for the µcore's memory-access stage. That is the first
non-speculative stage, so a destructive `pop` needs no rollback, and the
result is forwarded like a load result. Only an instruction that uses the
result immediately waits one bubble.

- **Request side.** A mini-decoder sends queue operations to the queue
  controller, which answers in the same cycle. Status operations go through
  an APB bridge: a setup cycle, then an access cycle, with `stall` held for
  one cycle.
- **Response side.** A multiplexer drives the same data to the commit-side
  result (`resp_*`) and to the execute-stage forwarding path (`fwd_*`).

The operation code is the instruction's funct3:

| funct3 | Operation |
|---|---|
| 0 | count |
| 1 | top |
| 2 | pop |
| 3 | recent |
| 4 | push |
| 5 | status read |
| 6 | status write |

Any other code retires without effect.

Edge cases:

- `pop` and `top` on an empty queue return 0, and the pop is counted.
- `push` into a full output queue stalls until there is space.

## Top level (`fireguard_top`)

`fireguard_top` wires the design together:

- the forwarding channel and event filter;
- the allocator;
- one crossing queue, message-queue block and ISAX interface per engine;
- the fabric.

It has three groups of ports:

- **Main-core ports:** commit lanes, PRF read controllers, queue tops and
  `commit_stall`.
- **µcore ports:** one ISAX request/response set per engine.
- **Configuration ports:** filter table, SE_Bitmaps, and the SE policy and
  member registers.

A few observation outputs help when debugging.

### Configuring a kernel set

1. Write the filter table, one entry per opcode/funct3 the kernels need.
2. Write `SE_Bitmap[g]` for every GID in use.
3. Give each SE its policy and member engines.

Example (used by the end-to-end test):

| Instructions | GID | Data attached |
|---|---|---|
| loads | 1 | load address |
| `add` | 1 | register value |
| stores | 2 | store address |
| `jalr` | 3 | jump target |

- SE 0 takes GIDs 1 and 2 round-robin over engines 0–1.
- SE 1 takes GIDs 2 and 3 in block mode over engines 2–3.

So every store goes to two engines.

## Where this RTL departs from the original design or fills gaps

These are choices made here. The original description leaves them open or
states them differently.

- **Filter entry and DP_Sel.** Only one data path can be chosen per
  instruction, with the DP_Sel encoding shown above.
- **PRF index.** One PRF index per instruction is kept: the register whose
  value is forwarded. The PRF read is modelled as combinational. The
  original drawing of the channel labels the PRF address "6 bits" but
  numbers 128 registers; 7 bits are used.
- **ROB buffers.** A drawn variant of the ROB with extra per-lane buffers is
  not built. The channel here is buffer-free.
- **Reorder FIFOs.** Rows with no relevant instruction are not pushed.
  Back-pressure to the core is the almost-full flag of the FIFOs; how the
  original stalls commit is not described.
- **Scheduling engines.** The member-mask register and the rule "skip members
  whose queue is full" are this design's. So is the one-stage allocator
  pipeline with all copies written in the same cycle. Each SE sets exactly
  one AE_Bitmap bit per packet. The original drawing shows one SE sending a
  packet to two engines, but its text describes a single target bit; the
  text is followed. Two copies of a packet therefore always belong to two
  different kernels.
- **Narrower filters.** The original also measures filters narrower than
  the commit width (1 or 2 lanes behind a 4-wide core). It does not describe
  how commit is throttled in that case, so this RTL always has one lane per
  commit slot.
- **Clock crossing.** It is a Gray-code asynchronous FIFO. The original only
  says "handshake-based".
- **Fabric.** The following are all this design's own:
  - mesh shape;
  - XY routing;
  - 2-entry router buffers;
  - flit format;
  - routed-packet layout;
  - multicast priority.

  `NUM_AE` must be a multiple of `MESH_X`. Partly filled meshes, such as the
  5- and 13-engine configurations of some larger systems, are not supported.
- **Message queues and ISAX.** The register map, the funct3 map, the
  empty/full behaviour and the destination register used by `push` are this
  design's own.
- **Engine count.** The default is 4 analysis engines, the main evaluated
  configuration. Setting `NUM_AE` (≤ 16) and `MESH_X` gives 6, 8, 12 or 16
  engines, and `LANES` gives wider filters.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fireguard_top \
          -y rtl -y tb +libext+.sv -Irtl rtl/fireguard_pkg.sv tb/tb_fireguard_top.sv
./obj_dir/Vtb_fireguard_top
```

Replace the top module name to run another testbench, for example
`tb_reorder_arbiter` or `tb_fabric`.

### End-to-end test

`tb_fireguard_top` runs the whole design at its default size. The core clock
is 10 ns and the analysis clock 20 ns.

**Stimulus.**

- A core model retires 4000 instructions of random mix on four lanes and
  honours `commit_stall`. It keeps a random register file behind the read
  ports, presents queue tops, and makes random issue-queue reads.
- Four µcore models run a receive loop through the ISAX ports: `count`, `top`
  at the data and PC offsets, `pop`, and sometimes `recent`.
- Engine 0 sets its push destination through a status write and pushes a
  message to engine 3 every 16 packets.

**What it checks.**

- Every relevant instruction reaches exactly one engine of each interested
  kernel, with the right GID, instruction and data.
- Each engine sees packets in commit order.
- All routed messages arrive in order.

**Mechanisms it requires.** The test fails if any of these never happens.
Counts from the default run:

| Mechanism | Count |
|---|---|
| commit stall | ≈12800 cycles |
| PRF port contention | ≈360 |
| multicast writes | ≈790 |
| allocator hold-backs | ≈11000 |
| round-robin alternation | yes |
| block-mode runs (few target switches) | yes |
| routed deliveries | 74 |
| status accesses | yes |
| `recent` uses | yes |

It finishes in a few seconds.

### Other system-level tests

- **`tb_fireguard_scale12`** repeats the end-to-end test on a larger
  configuration: an 8-wide filter with 8 PRF read ports, and 12 engines on a
  4 × 3 mesh. It sets `LANES`, `NUM_RD_PORTS`, `NUM_AE` and `MESH_X`. Routed
  messages cross the whole mesh, from engine 0 to engine 11.
- **`tb_fireguard_workloads`** runs three checking kernels at once on the
  default design, with violations injected by the core model:
  - a shadow stack on one engine. Calls forward the link register; returns
    forward the jump target.
  - an address sanitizer, round-robin over two engines. It checks load and
    store addresses against a poisoned region and reports each hit to
    engine 0 with a `push` over the mesh.
  - a load/store counter on a fourth engine.

  The test passes only if exactly the injected violations are reported and
  the counter matches the number of memory instructions.

## Files

| File | Content |
|---|---|
| `rtl/fireguard_pkg.sv` | shared constants and types: packet, filter entry, flit, opcodes, policies |
| `rtl/fg_sync_fifo.sv` | single-clock fall-through FIFO used inside several blocks |
| `rtl/dfc_channel.sv` | data-forwarding channel |
| `rtl/mini_filter.sv` | one filter look-up table |
| `rtl/reorder_arbiter.sv` | per-lane FIFOs and in-order arbiter |
| `rtl/event_filter.sv` | mini-filters, data selection, packet assembly, reorder |
| `rtl/scheduling_engine.sv` | one scheduling engine |
| `rtl/allocator.sv` | distributor, SEs, transmission stage |
| `rtl/cdc_fifo.sv` | asynchronous crossing FIFO |
| `rtl/noc_router.sv` | 5-port mesh router |
| `rtl/fabric.sv` | multicast multiplexers and router mesh |
| `rtl/msg_queues.sv` | input/output queues, queue controller, APB status registers |
| `rtl/isax_ifc.sv` | custom-instruction interface |
| `rtl/fireguard_top.sv` | complete design |
| `tb/tb_*.sv` | one testbench per module; `tb_fireguard_top`, `tb_fireguard_scale12` and `tb_fireguard_workloads` test the whole design |
