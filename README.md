# PITA: a protocol-independent transport datapath in SystemVerilog

A hardware transport (TCP, RoCE, or a protocol still being designed) has to
do the same few things whatever its rules are: take in events (packets from
the network, requests from applications, timer expiries), update per-flow
state, and then send packets, put received bytes in order and manage
timers. This design fixes the parts that do not depend on the protocol and
leaves a single programmable stage for what does:

```
 parsed events ─┐                          ┌──────── context table ───────┐
 timeouts ──────┼─► event store ─► event   │ (per-flow protocol state)    │
                │   (per-flow FIFOs)  scheduler ─► event + context ─► PLE ─┘ (user program,
                │                      ▲   ▲                          │      outside this RTL)
                │                      │   └── returned event + last bit
                │                      └────── back-pressure ◄────────┤
                │                                                     ├─► packet generator ─► packets
                │                                                     ├─► reassembly ─────► application
                └───────────────────────────── timer module ◄─────────┘
```

The programmable stage, the **protocol logic engine (PLE)**, is a pipeline
the protocol author generates from C++ with high-level synthesis. It receives
one event with its flow's context, writes back the new context, and emits
*instructions*. It is not part of this RTL: its signals are ports of the top,
and the testbenches use a small behavioural stand-in (`tb/ple_model.sv`).
Everything around it is here: the event store and scheduler, the context
table, and the three instruction-execution units. None of them knows what a
sequence number, an ACK or a queue pair is; they only obey instructions.

All widths and sizes default to the configuration the design was evaluated
with: 1024 flows, 16 events buffered per flow, 64-bit events with 4 types,
938-bit contexts, a 64-byte datapath at 250 MHz, 168-bit headers, 8-deep
per-flow instruction queues, 64 × 64 B pre-fetch and 256 × 64 B reassembly
buffers per flow.

## The one rule: one event per flow in flight

A flow's events must be processed in order, and a new event of a flow may
not enter the PLE while an earlier one is still inside it (the PLE reads the
context at its input and writes it back at its output). Everything in the
scheduler exists to enforce this while still handing the PLE one event
every cycle, as long as some flow has an eligible event.

**Event store** (`event_store.sv`). One RAM holds a ring buffer of DEPTH
events for each flow; head and tail pointer tables and per-flow counters sit
beside it. Insert and dequeue each touch a different pointer table, so one
of each can happen in the same cycle. When the scheduler dequeues an event,
the store also reports whether the flow's queue is now empty. This is the
*last-event bit*, taken from the counter it updates anyway. The bit also
counts an insertion to the same flow in the same cycle. The event leaves the
store one cycle after the dequeue request. A full flow queue refuses more
events for that flow (`in_ready` low) and does not drop them.

**Event scheduler** (`event_scheduler.sv`). It tracks eligible flows, not
events. The parts:

- *Two per-flow flags.* `active[f]` means f is queued or in the PLE.
  `arrived[f]` means an event for f came in since f was last dispatched.
- *Eligible-flow queues.* Each is FLOWS deep, so no flow is ever refused.
  The *new* queue takes a flow when its first event arrives while the flow
  is not active. The *return* queue takes a flow when its event comes back
  from the PLE and more events are waiting.
- *Returning events.* The event comes back with its last-event bit. The flow
  is queued again (*re-insertion*) if that bit is clear, or if `arrived` is
  set, or if an event arrives in that same cycle. Otherwise the flow goes
  idle. The two flags fix up a last-event bit that went stale while the
  event was inside the PLE. No counter has to follow the event through the
  pipeline, and no queue occupancy has to be read a second time.
- *Choosing.* Each cycle the scheduler picks one flow, round-robin between
  the two queues, and dequeues that flow's head event.

**Back-pressure without breaking atomicity.** Once an event has left the
scheduler, its instructions must not be lost. A packet instruction for a
flow with a full instruction queue would be lost, and the flow context would
already say it was sent. So the execution units raise back-pressure before
their buffers are full:

- per flow from the packet generator (6 of 8 queue entries used);
- globally from the reassembly unit (4 instructions waiting).

A flow picked while under back-pressure is not dispatched. It goes into a
third queue of *withheld* flows. A withheld flow at the head of that queue
whose back-pressure has cleared takes priority over the other two queues.
When only withheld flows are left, the queue rotates so that one blocked flow
does not hide another. The thresholds leave room for the single event per
flow that may still be inside the PLE, plus margin for PLE latency.

**Context table** (`context_table.sv`). This is a dual-ported RAM of one
938-bit context per flow. It is read in the dispatch cycle, so event and
context reach the PLE together, one cycle later. It is written when the PLE
writes back. If the write-back is for the flow being read in the same cycle,
the write is forwarded. A clear port initialises a flow at connection
set-up.

## Packet generation

An instruction says everything needed to build packets, and nothing is
inferred:

- the payload address and length;
- the segment size (bytes per packet);
- the first packet's header;
- an optional minimum gap between packets (pacing).

For each flow, `pkt_generator.sv` keeps:

1. an **instruction queue** of 8 entries, a ring buffer in a RAM, as in the
   event store;
2. a **pre-fetch buffer** of 64 chunks of 64 B. As soon as an instruction is
   queued, a fetch engine starts requesting its payload from external
   memory. One 64 B request per cycle is issued, round-robin over flows, and
   tagged with {flow, buffer slot}. The engine tops the buffer up as packets
   drain it. Each packet's payload is fetched as its own run of chunks
   starting at `addr + k·seg`. Every packet therefore begins on a chunk of
   its own, and the transmit side never shifts bytes. (The memory is
   assumed to return 64 bytes from any byte address, in request order.)
3. the **active instruction** state: the current header, the bytes sent,
   the earliest time of the next packet, and the chunks the next packet
   needs.

A flow is *ready* when all chunks of its next packet have landed and its
pacing time has come. A whole packet is buffered before it starts, so a
packet is sent at one 64 B beat per cycle with no holes. The constructor
serves ready flows round-robin. The next flow is chosen during the current
packet's last beat, so packets of different flows follow each other
back-to-back. After each packet, the *last-packet check* does one of two
things. If the instruction is finished, it retires it. Otherwise it
computes the next header with the **header-update module**
(`header_update.sv`).

The header-update module is configured rather than fixed. It sees the
current header, the bytes sent so far and the instruction's parameters, and
it offers two rules:

- add the segment size, or one, to a field of configurable position and
  width, for byte sequence numbers (TCP) or packet sequence numbers (RoCE);
- set an 8-bit opcode field to a *middle* or a *last* value, depending on
  whether the next packet ends the instruction (RoCE's first/middle/last
  opcodes; the first opcode comes with the instruction).

A long instruction would otherwise block its neighbours. It keeps the
constructor for at most `cfg_preempt_pkts` packets while other flows are
ready, and then is pre-empted and rescheduled. The header travels as a
168-bit side band with the first beat, and `pkt_bytes` gives the valid bytes
of each beat.

## Reassembly

Received payloads are first stored, in arrival order, in a *temporary
payload memory*, which the parser writes. Only the PLE knows where a segment
belongs in the byte stream. `reassembly.sv` executes two instructions:

- **add-data-seg** (temporary address, byte offset, length) copies a segment
  into the flow's 16 KB buffer at any byte offset;
- **flush-and-notify** (application address, X) streams the next X bytes
  from the flow's read pointer to the application and advances the pointer.
  The last beat is the notification.

Arbitrary offsets are the hard part. The buffer is a RAM of 64 B chunks. A
segment at offset `o` must land shifted by `s = o mod 64` bytes. For each
destination chunk j, the aligner takes the source chunks j and j−1 side by
side and shifts them by `s`. It does so in six stages, one per set bit of
`s` (1, 2, 4, 8, 16 and 32 bytes), and keeps one chunk's worth. The bytes
that chunk j−1 pushed over the edge thus land in chunk j.

A destination chunk covered only in part must keep its old bytes. This
holds for the first and last chunks of a segment. Such a chunk is read,
merged under a byte mask, and written back (read-modify-write). Full chunks
are written directly. The executor has two stages:

1. align the data and issue the RAM read;
2. merge and write.

Stage 2 forwards its own write back to stage 1, so two segments that meet
inside one chunk merge correctly even when they are back to back.

A segment covering N destination chunks costs N cycles after the pipeline
is primed. That is N+1 for a misaligned segment of N source chunks, and N
for an aligned one. Example:
256 B at offset 71 touches chunks 1 to 5 and takes 5 cycles, with partial
reads of chunk 1 (7 old bytes kept) and chunk 5 (57 old bytes kept). The
requests to the temporary memory run ahead of the executor under a credit
limit of 32 chunks, which hides a memory latency of up to about 30 cycles
at full rate.

Offsets and the read pointer wrap modulo the buffer size. A flush of X bytes
streams the chunks that hold the bytes from `rp` to `rp+X−1`. The first beat
says at which byte (`rp mod 64`) the data begins. Because the unit keeps no
segment state, it also never checks that the flushed bytes were ever
written: that is the PLE's job.

## Timers

Each flow has `TIMERS` timers (2 by default; how many is a protocol choice).
A timer instruction starts a timer for a duration in ticks, restarts it if
it is running, or stops it. `timer_module.sv` keeps an armed bit and a
deadline for each timer and a tick counter (1 tick = 250 cycles = 1 µs).
A scanner visits one timer per cycle. An expired timer is disarmed and
becomes a timeout event, carrying its timer index, which enters the event
store ahead of parsed events. The resolution is therefore one tick plus one
scan of all timers: 2048 cycles, about 8 µs, at the default sizes. That
suits timeouts such as retransmission, which need a few microseconds at
best. A finer scan would need a different structure, such as a timer wheel.

## Interfaces of the top (`pita_top.sv`)

The top's ports are plain signals and packed structs (`pita_pkg.sv`):

| group | signals | notes |
|---|---|---|
| parsed events in | `ev_in_valid/ready/flow/type/data` | from the (external) parser |
| to the PLE | `ple_ev_valid/flow/type/data/last`, `ple_ctx`; `ple_ready` | `ple_ready` low stalls dispatch |
| from the PLE | `ple_ctx_wr_*`, `ple_ret_valid/flow/last` | write-back and return of the event |
| instructions | `pg_instr_*` (`pg_instr_t`), `ra_instr_*` (`ra_instr_t`), `tm_instr_*` (`tm_instr_t`) | valid/ready per stream |
| payload memory | `mem_req_*`, `mem_rsp_*` | 64 B reads, in-order, tagged |
| packets out | `pkt_valid/ready/sop/eop/bytes/hdr/flow/data` | 64 B beats |
| temporary memory | `tmem_req_*`, `tmem_rsp_*` | 64 B reads, in-order |
| application out | `app_valid/ready/sop/eop/flow/addr/data/start/len` | flush-and-notify |
| configuration | `cfg_hu`, `cfg_preempt_pkts`, `cfg_timeout_type`, `ctx_init_*` | |
| statistics | `stat_dispatch/withhold/reinsert/timeout` | one-cycle pulses |

An event accepted in cycle t can be dispatched in cycle t+1. It reaches the
PLE with its context in cycle t+2. While all instruction queues have room,
every instruction is accepted in the cycle it is offered. The back-pressure
scheme above guarantees this, and assertions in the top and the testbench
check it.

## Where this RTL departs from, or adds to, the design it follows

- **Not included:**
  - the event parsers (RMT-style, programmable);
  - the PLE (a user HLS program);
  - the external and temporary memories.

  Their signals are top-level ports.
- **Added because the design leaves them open:**
  - the meaning of the two eligible-flow queues and of the two per-flow
    flags;
  - the queue of withheld flows and its priority;
  - the back-pressure thresholds;
  - the header-update rules;
  - per-packet fetches at `addr + k·seg`;
  - the minimum-gap form of pacing;
  - the scanning timer;
  - timeout priority at the event input;
  - the memory interface behaviour: 64 B from any byte address, in order.
- **Flow ids index every per-flow table directly.** Resources are
  provisioned statically for FLOWS flows, with no allocator and no
  swapping of state to DRAM. Dynamic allocation would sit in front of the
  flow-id inputs.
- **Pre-fetch buffering** is per flow (64 chunks shared by the flow's
  queued instructions) rather than a separate buffer per instruction.
- **Pipelining:** the three steps of an event-store insert or dequeue
  (pointer read, RAM access, pointer update) run in one cycle here, with
  combinationally read pointer tables. The shifter's six stages are one
  combinational stage. At 1024 flows these are wide multiplexers. A 250 MHz
  implementation would register them, which adds a cycle of latency but
  does not change the behaviour.
- **Event width:** the 2-bit event type is stored next to the 64-bit event
  data (66 bits per event).
- **Small packets and segments are faster than the evaluated prototype.**
  - Packets: the next flow is chosen during the current packet's last beat.
    Back-to-back 64 B packets from several flows therefore leave at one per
    cycle.
  - Segments: an aligned segment costs N cycles instead of N+1. In-order
    64 B and 128 B segments therefore reach full rate.
  - One flow issuing back-to-back single-packet 64 B instructions still
    gets only one packet every two cycles.

## Verification

Each unit has a self-checking testbench in `tb/` with a reference model and
a watchdog. Each ends with a `TB_RESULT checks=… failures=…` line:

| testbench | what it checks |
|---|---|
| `tb_event_store` | random inserts/dequeues against per-flow queues; last-event bit; full flows |
| `tb_event_scheduler` | order per flow, never two events of a flow in flight, back-pressure never violated, withholding and re-insertion, one dispatch per cycle in steady state |
| `tb_context_table` | read/write/clear, same-cycle forwarding |
| `tb_header_update` | both rules against a reference, wrap-around |
| `tb_pkt_generator` | every payload byte and header; one beat per cycle for long packets, for 4 interleaved flows and for back-to-back 128 B instructions; pacing gaps; pre-emption; back-pressure |
| `tb_reassembly` | byte-exact buffer model under random offsets, lengths, memory stalls and output stalls; the 256 B-at-offset-71 example's cycle count; flush data and pointers |
| `tb_timer_module` | expiry windows, restart, stop |
| `tb_pita_top` | whole datapath with 8 flows; see below |
| `tb_pita_top_full` | the same at every default size (1024 flows), traffic on flows 0, 3, 513 and 1023 |
| `tb_sched_workload` | scheduler at 1024 flows: bursts of 10 with PLE depths 3/10/100, bursts of 1 and 100 |
| `tb_pktgen_workload` | packet generator at 1024 flows: single-packet instructions, random and fixed 64–1500 B |
| `tb_reasm_workload` | reassembly at 1024 flows: streams of fixed-size segments, 64–1500 B |

The end-to-end tests drive the datapath with the behavioural PLE (a toy
protocol: send requests, data segments, deliveries with a timer, timeouts)
and behavioural memories. They check:

- the order of each flow's events;
- that every event sees the context left by its predecessor;
- every packet byte and header;
- every flushed byte;
- every timeout against its deadline;
- that no instruction is ever refused.

They also count, and require at least once, each of these: dispatch,
re-insertion, withholding under back-pressure, multi-packet instructions,
interleaving of flows, pre-emption, read-modify-write and flush.

Measured rates at the default sizes. At 250 MHz, 100 Gb/s is 50 B per
cycle.

| workload | result |
|---|---|
| scheduler, 1024 flows, bursts of 10, one event arriving per cycle | 90 % of one dispatch per cycle after 99 cycles (PLE depth 3), 149 cycles (depth 10) and 899 cycles (depth 100) |
| scheduler, bursts of 1 | full rate from the start |
| scheduler, bursts of 100 (more than the 16-entry flow buffer) | input throttled to 0.24 events per cycle |
| packets, random 64–1500 B, single-packet instructions | 60.5 B/cycle (121 Gb/s) |
| packets, fixed 64–1024 B | 64 B/cycle |
| packets, fixed 1500 B | 62.5 B/cycle |
| segments, 64–1024 B aligned | 64 B/cycle |
| segments, 1500 B, mostly unaligned | 62 B/cycle |

To run one with Verilator (the package first; `-y` finds the modules by
file name; lint warnings are not fatal):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/pita_pkg.sv tb/tb_pita_top.sv --top-module tb_pita_top
./obj_dir/Vtb_pita_top
```

The memories and per-flow tables are plain arrays, so a synthesis tool
infers RAMs for them. At the default sizes they hold:

| storage | size |
|---|---|
| event store | 1.1 Mb |
| contexts | 1 Mb |
| instruction queues | 2.4 Mb |
| pre-fetch buffers | 34 Mb |
| reassembly buffers | 134 Mb |

Coarse synthesis with yosys finishes quickly for the event store, scheduler,
context table, header update and timer units at the default sizes. The
packet generator, reassembly unit and top also synthesize at 8 flows.
At 1024 flows they take more than ten minutes, because their per-flow
state arrays are large.
