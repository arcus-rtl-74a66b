# Arcus: a per-flow traffic-shaping interface for shared accelerators

When several virtual machines share one hardware accelerator (a crypto engine,
a compressor, a hash unit), each tenant's throughput depends on what the
others send: message sizes, burstiness and the load on the PCIe link all
interfere. Scheduling accelerator time after the fact does not fix this,
because the interference happens in the traffic that reaches the accelerator.

This interface fixes the traffic instead. It sits between the VMs' DMA
buffers and the accelerators, and it, not the VM, decides when each request
is fetched from host memory. Each tenant's stream is a *flow*. Every flow gets
its own hardware token bucket, programmed by the provider's control software
over MMIO. However a VM submits work, the accelerator sees that flow at the
programmed rate: a number of bytes per second (Gbps mode) or a number of
requests per second (IOPS mode). The VM's driver is unaware of this. It
writes descriptors into a ring in its own memory and never rings a doorbell.
The interface reads the ring at the pace its shaper allows.

This repository holds synthesizable SystemVerilog for the interface's
function-call path, plus self-checking testbenches. In that path a VM hands
data to an accelerator and polls for the result. The defaults match the FPGA
prototype the design comes from: a 256-bit datapath at 250 MHz (64 Gbps),
16 flows, and token-bucket registers wide enough for every setting from
1 Gbps to 1 Tbps.

## The path of one request

```
 VM ring (host memory)                                           accelerators
      |  descriptor fetch (DMA read, batched)                         ^   |
      v                                                               |   v
 +-------------------- flow_ctx (one per flow) ------------------+    |  results
 | fetch FSM -> flow_queue -> msg_resizer -> token_bucket --------+--+ |   |
 +----------------------------------------------------------------+ | |   v
        ... 16 contexts ...                              rr_arbiter | | cmpl_writer
                                                                    v |   |
                              DMA read requests  <------------------+ |   | DMA writes
                              DMA read responses ---- tag: payload ---+   v
                                                 ---- tag: descriptor -> back to its flow
 param_regs (MMIO)  <->  slo_monitor (per-flow counters)
```

1. **Descriptor fetch.** A flow's context reads slots of the flow's ring by
   DMA, starting at its head pointer. A slot holds a new descriptor when its
   phase bit matches the lap the context expects (see below). New
   descriptors go into the flow's 16-entry queue.
2. **Resize.** The queue's head passes through the resizer. It cuts a
   message longer than the flow's `SEG_SIZE` into segments. Each segment
   carries a copy of the descriptor's header with its own address and
   length.
3. **Shape.** Each segment waits at the flow's token bucket until the bucket
   can pay for it. It then becomes a DMA read request for the payload.
4. **Arbitrate.** One round-robin arbiter shares the single DMA read-request
   channel among the 16 flows. Within a flow, a descriptor fetch goes before
   a payload fetch.
5. **Route responses.** Read-response beats carry the tag of their request.
   Descriptor beats return to their flow. Payload beats go straight out on
   the accelerator stream, with the flow number, the accelerator type and
   two end markers: end of segment and end of message.
6. **Complete.** Results come back from the accelerators tagged with their
   flow. The completion writer writes them by DMA into that flow's
   completion ring, then adds one completion record. The driver polls for
   that record.

A descriptor beat that arrives in cycle *t* can produce its payload request
in cycle *t+2*, when tokens are available. That is 8 ns of added latency. The
prototype this design follows quotes 36 ns for its shaping mechanism.

## The token bucket

`token_bucket` holds a token count and three registers:

| register | meaning |
|---|---|
| `BKT_SIZE` | capacity: the count is clamped to it after every refill |
| `REFILL` | tokens added per refill |
| `INTERVAL` | cycles between refills, counted by a free-running hardware timer |

A segment is released only when the bucket holds its whole cost. Its cost is
its byte length in Gbps mode and 1 in IOPS mode. The cost is subtracted in
the cycle the segment leaves. The bucket never goes negative, and an
assertion checks this. A refill that lands in the same cycle is added after
the spend, and the sum is then clamped.

The long-run rate is therefore

```
rate = min(REFILL, BKT_SIZE) / INTERVAL   tokens per cycle
     = min(REFILL, BKT_SIZE) * 8 * 250e6 / INTERVAL   bit/s in Gbps mode
```

`BKT_SIZE` also sets the largest burst after an idle period. The prototype
was tuned with these settings:

| target | REFILL | BKT_SIZE | INTERVAL | resulting rate |
|---|---|---|---|---|
| 1 Gbps | 1,024 | 512 | 1,000 | 512 B / 4 µs = 1.024 Gbps (the bucket caps each refill) |
| 10 Gbps | 4,096 | 4,096 | 800 | 10.24 Gbps |
| 100 Gbps | 16,384 | 65,536 | 320 | 102.4 Gbps |
| 1 Tbps | 32,768 | 1,048,576 | 64 | 1,024 Gbps |

All four rates follow only if a token is one byte. This design takes that
unit. The two highest settings fit the registers, and the bucket releases
tokens at those rates. The datapath, however, moves at most 64 Gbps, so a
flow cannot actually reach them.

Two rules matter when programming a flow:

* **A segment larger than `BKT_SIZE` never passes in Gbps mode.** Set
  `SEG_SIZE` no larger than `BKT_SIZE` for flows that may carry large
  messages.
* **IOPS mode counts segments, not messages.** Leave `SEG_SIZE` at 0 on an
  IOPS flow unless you mean to count segments.

Mode 0 is a bypass. The bucket lets everything through and spends nothing.
All flows come out of reset in bypass mode, disabled, with an empty bucket.

## Descriptor rings without doorbells

Each flow's ring holds 2^`RING_LOG2` slots of 32 bytes at `RING_LO/HI`.
Descriptors are 256 bits wide:

| bits | field |
|---|---|
| 255 | phase |
| 247:240 | accelerator type |
| 239:232 | traffic-pattern tag (carried, not used) |
| 223:192 | cookie (opaque to the hardware) |
| 95:64 | payload length in bytes |
| 63:0 | payload address |

The driver writes slot *i* of lap *k* with phase = 1 for even *k* and 0 for
odd *k*. The context starts at slot 0 expecting phase 1, and the phase it
expects flips every time its head wraps. A slot left over from the previous
lap therefore has the wrong phase and is recognised as empty, without any
shared index register. The driver learns how far the interface has read from
the `HEAD` register. Alternatively, it can count completions and never get
more than one ring ahead.

The context fetches slots in batches, in one DMA read of up to
`FETCH_MAX` = 16 slots (512 bytes). It starts a fetch only when its queue has
room for `FETCH_MIN` = 8 descriptors or is empty. A batch never crosses the
ring's end, so a phase flip can happen only at the last slot of a batch. The
first slot that is not new ends the batch: the slots after it are ignored and
read again later. If a fetch finds nothing new, the context waits `POLL_GAP`
= 64 cycles before it reads again. Only one descriptor fetch per flow is in
flight at a time.

Batching is what makes small messages work. A 64-byte flow at 20 Gbps needs
a new descriptor every 6.25 cycles. With one descriptor per DMA round trip,
such a flow would be capped at one message per round trip. This is checked
in the workload testbench.

**Back-pressure.** A flow that its shaper holds back stops draining its
queue, so it stops fetching. Its ring then fills up on the host side: the VM
sees the back-pressure as a ring that stops advancing, not as an error.
`STATUS[0]` (`q_full`) is set while the queue has less room than one batch
needs.

**Enable and disable.** Clearing `CTRL.enable` stops descriptor fetches, and
a descriptor that arrives while the flow is disabled is dropped. It also
rewinds the ring to slot 0 and phase 1, so a flow is restarted by clearing
its ring memory and setting `enable` again. Descriptors already in the queue
are still served, at the rate of the mode written along with the enable
bit.

## Sharing one DMA engine

The DMA engine, the PCIe core and the accelerators are outside this design.
`arcus_top` exposes them as valid/ready channels:

* `rd_*`: read requests, with address, byte length and a tag. The tag holds
  the descriptor-or-payload flag, the flow, the accelerator type and the
  end-of-message flag.
* `rsp_*`: read responses. The engine must return each request's beats
  contiguously and in request order, with the request's tag and `rsp_last`
  on its final beat. A request of *n* bytes returns ceil(*n*/32) beats.
* `wr_*`: one 32-byte beat per DMA write.
* `acc_tx_*` and `acc_rx_*`: the payload stream to the accelerators and the
  result stream back. Results of one message must arrive together with
  `acc_rx_last` on the last beat.

Descriptor beats are always accepted. Payload beats are accepted only when
the accelerator stream is ready. Responses come back in order, so a stalled
accelerator also delays descriptor beats that are queued behind payload.
This is head-of-line blocking that the shaper does not control, and it is the
main way flows still influence each other. It shows up when the accelerator
is close to saturation: size the shaped rates to the accelerator's real
capacity.

The arbiter gives each flow one request at a time in round-robin order. Its
pointer moves only when the DMA engine accepts a request.

## Completions

Each flow has a completion ring of 2^`CMPL_LOG2` slots of 32 bytes at
`CMPL_LO/HI`. Every result beat of a message is written to the next slot.
After the message's last beat, one more slot receives a completion record:

| bits | field |
|---|---|
| 255 | valid (always 1) |
| 247:240 | flow |
| 223:192 | per-flow sequence number, from 0 |
| 191:160 | number of result beats before this record |

The driver polls for the record, reads the beats before it, and uses the
sequence number to tell a new record from one left over from an earlier lap.
Each record takes one extra write cycle, during which the result stream is
held.

## Register map

Each register is 32 bits. Flow *f* uses byte addresses `f*0x100 + offset`;
the global registers start at `0x8000`. Reads return data one cycle after
the request. Unmapped addresses read 0, and writes to them are ignored.
Writes take effect on the next cycle, including while the flow is running.

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] enable, [2:1] mode (0 bypass, 1 Gbps, 2 IOPS) |
| 0x04 | BKT_SIZE | rw | bucket capacity (tokens) |
| 0x08 | REFILL | rw | tokens per refill |
| 0x0C | INTERVAL | rw | [15:0] cycles between refills |
| 0x10 | SEG_SIZE | rw | resize limit in bytes, 0 = off |
| 0x14/0x18 | RING_LO/HI | rw | descriptor ring base |
| 0x1C | RING_LOG2 | rw | [4:0] log2 of ring slots |
| 0x20/0x24 | CMPL_LO/HI | rw | completion ring base |
| 0x28 | CMPL_LOG2 | rw | [4:0] log2 of completion slots |
| 0x40/0x44 | BYTES_LO/HI | ro | payload bytes released by the shaper |
| 0x48/0x4C | MSGS_LO/HI | ro | segments released |
| 0x50 | WIN_BYTES | ro | bytes released in the last window |
| 0x54 | WIN_MSGS | ro | segments released in the last window |
| 0x58 | CMPLS | ro | completion records written |
| 0x5C | HEAD | ro | index of the next ring slot the interface will take |
| 0x60 | STATUS | ro | [0] queue too full to fetch |
| 0x64 | TOKENS | ro | current token count |
| 0x8000 | WINDOW | rw, global | SLO-monitor window in cycles, 0 = off |
| 0x8004 | NFLOWS | ro, global | number of flows |

## SLO monitor

Control software checks each flow against its service-level objective by
reading counters from `slo_monitor`, not by timing anything itself. Per flow,
the monitor keeps running totals of released bytes, released segments and
written completions. It also keeps a windowed sample. A global timer closes a
window every `WINDOW` cycles. At that edge, the bytes and segments of the
window just ended are latched into `WIN_BYTES`/`WIN_MSGS`, and the count for
the next window starts from zero. Reading the latched pair gives throughput
over a hardware-timed period, whatever the CPU's timing jitter.

## Parameters and cost

| parameter | default | where |
|---|---|---|
| `N_FLOWS` | 16 | `arcus_top` |
| `Q_DEPTH` | 16 descriptors | `arcus_top`, `flow_ctx` |
| `POLL_GAP` | 64 cycles | `arcus_top`, `flow_ctx` |
| `FETCH_MAX` / `FETCH_MIN` | 16 / `Q_DEPTH`/2 | `flow_ctx` |
| `DATA_W` | 256 | `arcus_pkg` |
| token and shaping registers | 32 bits (`INTERVAL` 16 bits) | `arcus_pkg` |

At the defaults, a generic yosys synthesis of the top has about 15,400
flip-flop bits and 64 Kbit of queue storage: 16 flows × 16 descriptors ×
256 bits. Each flow costs its queue, one 256-bit resizer register, a few
counters and its token bucket.

## Where this design departs from the prototype, or fills gaps

* **Where the shaper sits.** The prototype's protocol description places
  shaping at the descriptor fetch. Here the bucket gates the *payload*
  fetches, because a byte-based shaper needs each segment's length, and the
  length is only known once the descriptor has been read. Descriptor fetches
  are paced indirectly, by the bounded queue. The traffic the accelerator
  receives is shaped either way.
* **Filled-in details that the source does not specify.** These are this
  design's own choices: the ring format, the phase bit, batching and
  polling, the descriptor and completion layouts, the DMA tag, the register
  map, the counters and the window, and the completion ring.
* **Not built.** The inline paths are missing: draining a SmartNIC's
  receive buffer and shaping traffic toward NVMe controllers. They depend on
  a network stack and an NVMe interface that are not specified. The shaping
  element they would use is the same `token_bucket`.
* **Not part of the hardware.** The control-plane software that profiles
  accelerators, admits flows and picks bucket settings is not included. It
  reaches the hardware only through the register map above.
* **A fixed number of queues.** In the prototype, software may allocate
  any number of hardware queues and bind them to its own queues. Here the
  number of queues is fixed when the design is built by `N_FLOWS`, which
  defaults to 16. Each queue has its own context, bucket and queue memory.
  Software chooses which queues are in use by setting `enable`.
* **Rate ceiling.** The 100 Gbps and 1 Tbps shaper settings can be
  programmed, but one 256-bit channel at 250 MHz carries 64 Gbps.
* **Small messages and latency.** The small-message rates above assume a
  short DMA round trip. With a round trip of about 1 µs (250 cycles), one
  flow gets at most 16 descriptors per microsecond, which is 8 Gbps of
  64-byte messages.

## Verification

Each block has a self-checking testbench. Each prints
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `token_bucket_tb` | every pass decision against a cycle-accurate reference model; the four rows of the settings table within 1%; 300K IOPS; a full-bucket burst; bypass; reconfiguration without reset |
| `msg_resizer_tb` | random messages and segment sizes (including 0) under random output stalls, against a reference split: addresses, lengths, first/last flags, header copies; one segment per cycle back to back |
| `flow_queue_tb` | random push/pop against a queue model, including push-while-full-and-popping |
| `rr_arbiter_tb` | every grant against a reference scan; each flow granted once per 16 cycles when all request; an unaccepted grant keeps its turn |
| `flow_ctx_tb` | polling of an empty ring; payload requests against the descriptors; ring order across wraps; batch bounds; never more bytes than tokens; back-pressure and recovery; descriptor-to-request latency ≤ 9 cycles |
| `slo_monitor_tb` | totals and windows against a model, including events in a window's last cycle |
| `param_regs_tb` | every register written and read back, read-only and unmapped addresses, counter views |
| `cmpl_writer_tb` | every DMA write (address, data, record contents) for interleaved flows under write stalls |
| `arcus_top_tb` | all 16 flows end to end at the default parameters: result data and completion records in host memory, counters over MMIO, 10 Gbps pacing, IOPS pacing before and after a run-time change. It fails unless each of these occurs at least once: shaper stall, empty-slot poll, ring wrap, message split, queue-full back-pressure, multi-flow arbitration, accelerator back-pressure, bypass, IOPS mode, reconfiguration, monitor window |
| `workload_tb` | two tenants sharing an accelerator, measured at the DMA request port: 300K/200K IOPS sampled every 500 requests; 10/20 Gbps with 256/512-byte messages on a busy accelerator; 64-byte messages at 20 Gbps; 4 KB messages against 512 KB messages resized to 4 KB. Every rate must be within 1% |

In the workload runs, the IOPS and Gbps rates matched the programmed values
to within 0.01%. In the large-message case, the two flows were within 0.4% of
their 16 Gbps share. The testbenches use two behavioural models:
`host_dma_model` (sparse host memory behind an in-order DMA engine with
latency and random stalls) and `acc_model` (a length-preserving XOR
"cipher" with latency and random back-pressure).

Verilator is a two-state simulator. All state is reset, so the results do
not depend on initial values.

## Simulating

With Verilator 5, from the repository root (replace `arcus_top_tb` with
any testbench name):

```
verilator --binary --timing --assert -Wno-fatal --top-module arcus_top_tb \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/arcus_pkg.sv tb/arcus_top_tb.sv
./obj_dir/Varcus_top_tb
```

`arcus_top_tb` simulates about 19,000 cycles and `workload_tb` under two
million. Each finishes within seconds.

## Files

`rtl/` holds one unit per file:

* `arcus_pkg`: types, layouts and the register map
* `token_bucket`, `msg_resizer`, `flow_queue`
* `flow_ctx`: fetch, queue, resize and shape for one flow
* `rr_arbiter`, `cmpl_writer`, `slo_monitor`, `param_regs`
* `arcus_top`

`tb/` holds the testbenches and the two behavioural models. Each file opens
with a comment that describes its interface and timing, and separates what
follows the original design from what is this implementation's choice.
