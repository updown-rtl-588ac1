# UpDown: an event-driven accelerator for irregular, memory-bound work

Graph analytics and graph mining spend most of their time chasing pointers
through DRAM. Each step is a few instructions of work followed by a long
memory wait. A cache-based core hides that latency poorly: the number of
outstanding misses caps its memory parallelism, and caches fetch whole lines
when a program wants one word. UpDown goes the other way. Each lane is a
small in-order processor. It runs many very short *thread invocations*, and
each invocation is triggered by a message (an *event*). DRAM is never loaded
directly. A thread sends a read request that names a *continuation*: which
lane, which thread and which handler should receive the data. Then it gives
up the lane. When the data comes back, it arrives as a new event. So a lane
can keep any number of requests in flight, and there is no table of
outstanding requests to fill up.

This repository is a synthesizable SystemVerilog model of one UpDown node:

```
host (CPU) port ──┐
                  │        node crossbar (round robin per output)
HBM stack ports ──┼──── 32 accelerators ──── 8 HBM stack request/response ports
(8 req, 8 rsp)    │          │
                  │     accelerator crossbar
                  │          │
                  │     64 lanes, each:
                  │       EventQ ─ operand buffer ─ thread table ─ register contexts
                  │       ISA execution ─ 64 KB scratchpad ─ network interface
```

All 32 × 64 = 2048 lanes, 128 thread contexts per lane and 64 KB of
scratchpad per lane are built at full size. The host CPU and the HBM stacks
are outside the RTL. The node brings their connections out as message ports,
and the testbenches attach a behavioural DRAM model (`tb/hbm_model.sv`).

## Messages are the only interface

Everything that moves between blocks is one `msg_t` (`rtl/updown_pkg.sv`):

| field  | meaning |
|--------|---------|
| `kind` | `MSG_EVENT`, `MSG_DRAM_RD`, `MSG_DRAM_WR`, `MSG_SPD_WR` (host store into a scratchpad), `MSG_SPD_RD` (host read of a scratchpad) |
| `dst`  | global lane number for lane-bound kinds; `16'hFFFF` means the host |
| `evw`  | event word: which handler, which thread, which lane |
| `cont` | continuation: the event word the receiver should answer with |
| `addr` | DRAM or scratchpad byte address; in a DRAM response, the address that was read |
| `nops`, `data[0..7]` | 0–8 operand words of 64 bits |

A DRAM request is a message to a stack. The stack's answer is an ordinary
`MSG_EVENT` addressed with the request's `cont`: a read carries the words it
read, and a write carries an empty acknowledgement. Nothing in the
accelerator records that a request is outstanding.

**Event word.** Bits `[15:0]` are the handler label (an instruction address).
Bits `[23:16]` are the thread id, where `8'hFF` asks for a new thread.
Bits `[27:24]` are the operand count, and bits `[47:32]` are the destination
lane. Lane `l` is lane `l mod 64` of accelerator `l / 64`.

**Routing.** An accelerator delivers lane-bound messages for its own lanes
locally. Everything else goes up to the node crossbar:
- DRAM requests go to stack `addr[8:6] mod 8`, so the stacks are interleaved
  in 64-byte blocks;
- `dst == 16'hFFFF` goes to the host;
- any other message goes to accelerator `dst / 64`.

Every accelerator reaches every stack.

## Inside a lane

### Arrival and the two queues

A message that enters a lane is split in one cycle. Its operand words are
written into a free 8-word slot of the **operand buffer** (512 words, 64
slots). Everything else is pushed into the **EventQ**, a 32-entry FIFO,
together with the slot's address. The lane accepts a message only when both have
room.

### Dispatch and the thread life cycle

When the lane is idle, the head event is dispatched in a single cycle:

- thread id `0xFF`: the **thread table** gives the lowest free context
  (Free → Active);
- any other thread id: that thread must be in Wait, and it becomes Active;
- the program counter is set to the event's label.

The handler ends with one of two instructions:
- `yield`: Active → Wait. The thread keeps its registers and waits for its
  next event.
- `yieldt`: Active → Free. The context is released.

Either one frees the event's operand words and lets the next event run. Only
one invocation runs at a time on a lane. The multithreading is a matter of
*contexts*, not pipelines.

**No free context.** With 128 contexts this is rare, but it can happen, and
the simple answer to it deadlocks. If a first event stalled at the head of
the EventQ, the replies that would let waiting threads finish could be
queued behind it. So a first event that finds every context taken moves to
a small **deferred queue**, and the EventQ keeps draining. Deferred events
run oldest first, ahead of the EventQ, as soon as a context is free. Because
of this, operands are released out of order. That is why the operand buffer
is made of slots and not a ring. A circular buffer stays blocked behind a
deferred event's words, and once it is full it refuses the very DRAM replies
that would free a context. There is one slot for every EventQ entry and one
for every deferred-queue entry, so operand space never blocks an arrival. The
`ctx_stalls` counter counts the cycles in which a first event was waiting for
a context.

The remaining limit is the deferred queue (32 entries). Suppose more than
128 + 32 first events pile up while every context waits for DRAM. Then the
EventQ stops and can fill up ahead of the replies. Software must not spawn
that far ahead of completions on one lane.

### The register namespace

A handler reads its inputs where they already are. No instructions copy
operands into registers:

| register | content |
|----------|---------|
| X0 | zero |
| X1 | event word of the running event |
| X2 | continuation of the running event (where to reply) |
| X3 | address field; for a DRAM response, the address that was read |
| X4 | this lane's global number |
| X5 | running thread id |
| X6, X7 | per-thread registers that software may write |
| X8–X15 | operand words of the running event, read from the operand buffer |
| X16–X31 | the 16 general registers of the thread |

**Register contexts** stores X6, X7 and X16–X31 for each of the 128 threads.
It has two read ports and one write port. Writes to X0–X5 and X8–X15 are
ignored.

### Instruction set and encoding

Instructions are 32 bits: `[31:26]` opcode, `[25:21]` ra, `[20:16]` rb,
`[15:11]` rc, with `[15:0]` as the immediate. As in assembly listings for
this machine, the destination comes last.

| group | instructions | semantics |
|---|---|---|
| arithmetic | `add sub and or` | `rc = ra op rb` |
| | `addi subi` | `rb = ra ± sext(imm)` |
| branch | `beq bne blt ble bgt` | compare ra with rb (signed), jump to `imm` |
| scratchpad | `movlr` | `rb = spd[ra + sext(imm)]` |
| | `movrl` | `spd[rb + sext(imm)] = ra` |
| | `bcpy` | copy `imm` bytes from `spd[ra]` to `spd[rb]` |
| | `bcpyol` | copy `imm` bytes of operands (X8…) to `spd[rb]` |
| synchronisation | `cswp` | if `spd[ra] == rb` then `spd[ra] = rc`; `rc` gets the old value |
| events | `send` | event `ra`, operands from `spd[rb]` |
| | `sendr` | event `ra`, operands from registers rb… |
| | `sendops` | event `ra`, operands forwarded from X8… |
| DRAM | `sendm` | read n words at `ra` |
| | `sendmr` | write registers rb… to `ra` |
| | `sendmops` | write X8… to `ra` |
| event words | `ev` `evi` `evii` | build an event word: (lane ra, thread rb, label) / (lane ra, new thread) / (this lane, new thread) |
| thread | `yield` `yieldt` | end the invocation |

The send instructions take the word count n (1–8) from `imm[15:13] + 1` and
the reply label from `imm[12:0]`. The message's continuation is
`{this lane, this thread, reply label}`. So the reply to a `sendm` re-invokes
the same thread at the reply label, with the data in X8–X15 and the address
in X3. Scratchpad addresses are byte addresses of 64-bit words.

`tb/updown_asm_pkg.sv` has small encoder functions (`i_r`, `i_i`, `i_s`) and
a complete example program: a master thread spawns workers on many lanes,
each worker reads 8 DRAM words, sums them, writes the sum back and reports to
the master.

### Timing

| operation | cycles |
|---|---|
| event dispatch | 1 |
| add-class, `ev*`, branch, `movrl`, `yield` | 1 |
| `sendm` with the network interface ready | 1 |
| `movlr`, `cswp` | 2 |
| `bcpy` | 2 per word |
| `bcpyol` | 1 per word |
| other sends | 1 to decode + 1 per register word (2 per scratchpad word) + 1 to hand over |

A `sendm; addi; blt` loop therefore issues one 8-word DRAM request every
3 cycles. The lane testbench checks this rate cycle by cycle.

Messages leave the lane through the **network interface**, a 4-deep message
FIFO.

### Host access

The host starts work by sending an ordinary event, usually a first event
with thread id `0xFF`, and it receives messages addressed to lane `16'hFFFF`.
It can also store into a scratchpad (`MSG_SPD_WR`: the operands are written
at `addr`) and read one (`MSG_SPD_RD`: n words at `addr` come back as an
event to the message's continuation). Both go through the EventQ and are
served between invocations. Programs are loaded through a broadcast
write port (`imem_we/imem_waddr/imem_wdata`). The port writes the same
1024-instruction memory in every lane.

### Performance counters

Every lane counts:
- events dispatched;
- threads created;
- yields and yieldts;
- context-wait cycles;
- DRAM requests;
- events sent;
- busy cycles.

The accelerator and the node sum these into their `perf` outputs.

## Interconnect

`msg_xbar` is a crossbar with one round-robin arbiter per output. It moves
one message per output per cycle. Each accelerator has a 65-port crossbar:
its 64 lanes and the link to the node. Two 4-deep queues on that link break
the combinational path between the accelerator and node crossbars. The node
crossbar has 41 inputs (32 accelerators, the host, 8 stack responses) and
41 outputs (32 accelerators, 8 stack requests, the host).

## Where this departs from the described architecture

- **Encodings and cycle counts are this design's own.** The architecture is
  defined by its mechanisms and instruction names. Bit layouts, the exact
  operand order of each instruction, and the cycles per instruction were
  chosen here. They keep the published numbers that could be checked: single-cycle
  dispatch, operands in X8–X15, the event word in X1, a DRAM response address
  in X3, 1–8 word DRAM accesses, and a 3-cycle `sendm` loop.
- **Not built:**
  - `cstr` (streaming compare-and-copy), whose semantics are not specified.
  - The lane's stream buffer for packed symbol streams, which is only named.
- **Thread creation rate** is not tuned to the "3 cycles per thread" figure.
  Here a first event costs one dispatch cycle plus its handler, and the
  sender pays for an `evi` and a send. This rate is not checked.
- **Deferred first events** and out-of-order operand release are additions.
  Without them, running out of contexts can deadlock the lane.
- **Network.** The on-chip network is not described. Two levels of crossbars
  with round robin and small queues stand in for it, and there is no
  bandwidth or latency model of the real fabric.
- **One drawing shows four accelerators attached to each stack.** The design
  follows the statement that all accelerators reach all stacks.
- **Instruction memory.** A per-lane 1024 × 32-bit instruction memory is
  assumed. Where programs live is not described.
- **Not modelled:** the host CPU, the HBM2e stacks and their controllers, and
  the SRAM macros. The scratchpad is an inferable array.
- **Graph workloads.** Triangle counting, diamond and 4-cycle counting, BFS,
  PageRank and Jaccard similarity are not provided as programs. Their data
  would live in DRAM, which is outside this RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and a watchdog ends a hung run.

| testbench | what it shows |
|---|---|
| `tb_event_queue`, `tb_net_if` | FIFO order, full/empty, back-pressure, against a queue model |
| `tb_operand_buffer` | random appends and random-order frees, against a slot model |
| `tb_thread_table` | the Free/Active/Wait life cycle, lowest-free allocation, exhaustion |
| `tb_register_contexts`, `tb_scratchpad_bank`, `tb_imem` | random accesses against arrays |
| `tb_msg_xbar` | delivery, order per source, round-robin fairness |
| `tb_updown_lane` | every instruction group: the `sendm` 3-cycle rate, many requests in flight, `bcpyol` of DRAM data into the scratchpad, `cswp` success and failure, resume by continuation, a first event waiting for a free context, host store and read |
| `tb_updown_accel` | local and up-link routing, DRAM through the link |
| `tb_updown_node` | a reduced node (2 accelerators × 4 lanes, 4 contexts, 2 stacks): 40 workers with a 200-cycle DRAM, checking totals and DRAM contents, and counting thread creation, yield, re-invocation, yieldt, deferred first events, reads, writes, requests in flight, both stacks, cross-accelerator messages and host access |
| `tb_updown_lane_full` | one lane at full default size (128 contexts, 64 KB): 150 workers each read DRAM. All 128 contexts wait at once, the last first events are deferred, and every sum is checked |
| `tb_workload_tc` | triangle counting on a reduced node (2 accelerators × 4 lanes, 8 contexts each). A random 24-vertex graph is stored in DRAM as sorted 8-word adjacency lists. One thread per vertex reads its list, then starts one thread per edge; that thread intersects two lists with scratchpad loads and returns a count. The total is checked against a count made in the testbench, and the test also checks the number of threads created and DRAM reads issued |

The whole node at its default size (2048 lanes) has not been simulated.
Verilator emits separate code for each lane instance, which comes to more
than 900 MB of C++, and that does not build in reasonable time. The largest
node simulated end to end is 2 accelerators × 4 lanes with 2 stacks
(`tb_updown_node`). The lane itself is simulated at full size.

To run a testbench with plain verilator:

```
verilator --binary --timing --assert -j 4 --top-module tb_updown_lane \
  rtl/updown_pkg.sv rtl/*.sv tb/updown_asm_pkg.sv tb/hbm_model.sv tb/tb_updown_lane.sv
./obj_dir/Vtb_updown_lane
```

The simulator is two-state. The design resets every register that is read
before it is written, and memories need no reset.

## Changing it

- **Sizes.** The parameters of `updown_node` (`NACCEL`, `LANES`, `NSTACKS`,
  `NTHREADS`, `SPD_WORDS`, `IMEM_DEPTH`) scale everything below them. The
  thread id is 8 bits, so `NTHREADS` may go up to 255 (`0xFF` is reserved),
  and the lane field allows 65535 lanes.
- **Instructions.** New instructions go into the `opcode_e` enum of
  `updown_pkg` and into the two case statements of `updown_lane`:
  - the combinational one, for single-cycle effects;
  - the sequential one, for multi-cycle states.
- **DRAM.** Replacing `hbm_model` with a real memory controller only
  requires answering each request with an event to its `cont` carrying the
  data and the request's `addr`.
