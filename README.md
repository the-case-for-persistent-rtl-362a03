# A persistent CXL switch

Persistent memory attached over CXL sits behind at least one switch. A program
that needs crash consistency issues *persists*: a store, a cache-line flush and a
fence. The program may not continue until the line is durable. With an ordinary
(volatile) switch, "durable" means the write has reached the memory device and
its acknowledgment has come back, so every persist pays the full round trip
through the switch to the device.

This design makes the switch itself part of the persistent domain. It adds a
small **persistent buffer** (PB), built from non-volatile or battery-backed
cells, and a controller that owns it. A write to persistent memory (PM) stops at
the first switch. It is stored in the buffer and acknowledged to the host
straight away, then written on to PM in the background. The host's persist
latency becomes the trip to the switch and back.

Two things must stay true for this to be correct:

* **Reads see the newest data.** If the newest copy of a line is in the buffer,
  a read must get that copy and not the older one in PM.
* **Writes reach PM in order.** An older version of a line must never land on
  top of a newer one. After a crash, the buffer must still hold every line that
  PM does not yet have for certain.

There is also one performance rule: traffic that has nothing to do with
persistence (CXL.io, CXL.cache, volatile memory) must not be slowed down.

The RTL here implements the switch with its buffer, selector and controller,
plus the two operating modes:

* **PB:** every buffered line is drained to PM at once.
* **PB_RF (read forwarding):** lines are kept in the switch for as long as
  possible, so later reads can be answered there and rewrites can be merged.

## Block map

```
            ext port 0..NP-1                                ext port 0..NP-1
  in_* ──► input buffer ─┬─► R ─► VA ─► SA ─► ST ─┬─► output buffer ──► out_*
                         │                 ▲      │
                PBCS ◄───┘ (per input;     │      └─► PI buffer ──► PB controller
                  │  reads PB state)       │          (acks first)      │   ▲
                  └──── divert ────────────┘                          │   │
                                                     PO buffer ◄──────┘   │
        (PO enters the crossbar as input NP)                     PB tables┘
```

| Block | File | What it does |
|---|---|---|
| types | `rtl/pcs_pkg.sv` | packet header, opcodes, entry states, event record |
| input / output / PO buffers | `rtl/pkt_fifo.sv` | packet FIFOs |
| PI buffer | `rtl/pi_buffer.sv` | input of the controller; two classes, acknowledgments first |
| PBCS (selector) | `rtl/pbc_selector.sv` | decides, at each input-buffer head, whether a packet goes to the controller |
| switch allocator | `rtl/switch_allocator.sv` | SA stage: round robin per output; the selector's decision overrides routing |
| PB tables | `rtl/persist_buffer.sv` | tag, data+header, state+LRU tables; not cleared by reset |
| PB controller (PBC) | `rtl/pb_controller.sv` | everything the buffer does: persist, acknowledge, drain, forward, recover |
| switch (top) | `rtl/cxl_switch_pcs.sv` | ports, 4-stage pipeline, one selector per input, PI/PO, PB, PBC |

## Packets and buffer entries

A packet is one 16-byte header slot plus one 64-byte cache line (`pkt_t`, 640
bits). Link-level flits (the CXL x16, 68-byte flits) are outside this RTL: the
switch ports carry whole packets. The header (`hdr_t`) holds these fields:

* an opcode;
* the source and destination port;
* a 13-bit requester tag;
* the 64-bit address;
* 40 reserved bits.

The opcodes are:

| Opcode | Meaning |
|---|---|
| `OP_MEM_RD`, `OP_MEM_WR` | CXL.mem requests |
| `OP_CMP` | write acknowledgment; carries the line address |
| `OP_MEM_DATA` | read response |
| `OP_IO`, `OP_CACHE` | traffic the buffer ignores |

The field layout is this design's own. The paper fixes only the 16-byte size and
the fact that the header is what the buffer keeps as metadata.

Each buffer entry (PBE) has one row in each of three tables:

| Table | Per entry |
|---|---|
| Tag Address Table | 58-bit line tag: address bits 63:6 |
| Data Table | 64-byte block plus the 16-byte header of the write that filled it |
| State Table | 2-bit state plus a `$clog2(N_PBE)`-bit LRU counter (4 bits for 16 entries) |

The stored header is reused unchanged when the entry is drained, so the drain
write carries the original destination.

An entry is in one of three states:

| State | Meaning |
|---|---|
| Empty | free; whatever it holds is also in PM |
| Dirty | the newest copy exists only here |
| Drain | a write of this line is on its way to PM and not yet acknowledged |

An entry leaves Drain **only** when PM's acknowledgment arrives. This is what
makes crashes safe. Any line with a Dirty or Drain entry has its newest data in
the buffer. Any other line has its newest data in PM.

The LRU counters always hold a permutation of 0..N-1, where 0 is the most
recently used entry. Touching entry *k* sets its counter to 0 and adds one to
every counter that was below *k*'s old value. A victim is the candidate with the
largest counter. Fills, coalescing writes and forwarded reads count as uses.

## Which packets the switch diverts (PBCS)

One selector per external input looks at the packet at the head of the input
buffer, in parallel with route computation. It reads the tag and state tables.
It is purely combinational, and its one-bit decision is latched next to the
route. In the SA stage the decision beats the route, so a flagged packet is sent
to the PI buffer instead of its routed output:

| Packet | Diverted when |
|---|---|
| write request | its address is in the PM window `[PM_BASE, PM_LIMIT]` |
| read request | PM address, and the line has a Dirty **or Drain** entry |
| write acknowledgment | the line has a **Drain** entry (the controller is the one waiting for it) |
| anything else | never |

Reads of lines in Drain are diverted even though PM may already hold the data.
The drain write might still sit in the PO buffer. A read sent straight to PM
could overtake it and return stale data. Routing the read through the
controller puts it behind the drain write in PO, so the order holds by
construction. The cost is extra read latency for such reads.

Packets that come out of the controller (PO) are never examined again.
Otherwise drain writes would loop back into the buffer.

## The controller (PBC)

The controller takes one packet at a time from the head of the PI buffer, in
order. It can push one packet per cycle into the PO buffer. From PO, the
packet re-enters the crossbar and is routed normally.

**Write.**
1. If the line has a Dirty entry, the new data and header overwrite it (write
   coalescing), and the host is acknowledged.
2. Otherwise, if the line has a Drain entry, the write waits until PM
   acknowledges that drain. Only one version of a line is ever in flight, and
   the buffer never holds two live copies of a line. An assertion checks the
   second point.
3. Otherwise the LRU Empty entry is filled and becomes Dirty, and the host is
   acknowledged. The acknowledgment goes out in the same cycle as the fill.
4. If no entry is Empty, the LRU Dirty entry is drained as a victim and the
   write stalls. Only one victim is forced while no other drain is in flight.
   If every entry is in Drain, the write simply waits.

**Acknowledgment from PM.** The matching Drain entry becomes Empty. This needs
no PO slot, so it can happen in the same cycle as a drain.

**Read.** If the line has a Dirty or Drain entry, the read is answered from the
buffer (`OP_MEM_DATA` with src and dst swapped). Otherwise the original read
goes into PO and on to PM. This happens when the entry was freed and reused
after the selector looked.

**Draining** means turning a Dirty entry into Drain and putting a write built
from its header and data into PO. The LRU Dirty entry goes first. When drains
happen depends on the mode (`rf_mode`):

* PB mode (`rf_mode=0`): any Dirty entry is drained as soon as the PO slot
  allows.
* PB_RF mode (`rf_mode=1`): nothing is drained until the Dirty count reaches
  `DRAIN_HI_PCT` of the entries (80 %, that is 12 of 16). Then LRU entries are
  drained until the count falls to `PRESET_PCT` (60 %, that is 9 of 16). The
  lines left Dirty are what make read forwarding and coalescing possible. The
  price is fewer Empty entries, so stalls become more likely.

A wanted drain takes the cycle's PO slot before the head request does.

**Why acknowledgments come first in PI.** Suppose a write at the head of PI
waits for a free entry. The entry it waits for can only be freed by a PM
acknowledgment. If that acknowledgment queued behind the write, neither would
ever move. The PI buffer therefore keeps acknowledgments in their own queue and
always hands them over first. In the switch this is a second virtual channel on
the PI output, chosen in the VA stage. The output `pi_ack_bypass` shows when it
matters.

## Crash and recovery

A crash is modelled as the volatile reset `rst_n`:

* It clears every buffer, pipeline register and counter in the switch. Packets
  in flight are lost.
* It does **not** touch the PB tables. The only thing that clears them is
  `pb_format`, which is for the first power-up of a new part.

After reset, the controller proceeds in three steps:

1. For one cycle it turns every Drain entry back to Dirty, because their
   acknowledgments may have been lost.
2. It drains every Dirty entry. During this phase it serves acknowledgments but
   holds back requests.
3. Only then does it accept requests again. `recovering` is high until this
   point.

Entries that were Empty are not written again: their data is already in PM.

## The switch pipeline and its timing

Ports 0..NP-1 are external. Index NP is the controller's pair: PO on the input
side and PI on the output side. Each input has three stage registers, and each
output has one ST register:

* **R:** takes the input-buffer head, computes the output from the header's
  `dst`, and latches the selector's decision.
* **VA:** chooses the class at the target output. An acknowledgment going to PI
  uses class 1; everything else uses class 0.
* **SA:** each output grants one requesting input per cycle, round robin. A
  request counts only if the output has room in its class, after subtracting
  any packet already in its ST register.
* **ST:** writes the winner into the output buffer, the PI buffer or PO.

Timing on an idle switch, counted in clock edges from the edge at which the
switch accepts a packet to the edge at which the receiver takes the result:

| Path | Edges |
|---|---|
| through the switch, one way | 5 (four stages plus the output-buffer hand-off) |
| persist acknowledged by the switch | 10 = 2 × 5: in, to PI; the controller answers the cycle it sees the write; out through PO |
| read answered from the buffer | 10 |
| volatile persist or read to PM | 10 + device latency: 210 / 110 with a 200 / 100 cycle device, i.e. 200 / 100 ns at the assumed 1 GHz |

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N_PBE` | 16 | paper |
| `DRAIN_HI_PCT` / `PRESET_PCT` | 80 / 60 | paper |
| tag / block / header / state / counter widths | 58 / 512 / 128 / 2 / 4 bits | paper |
| `NP` (external ports) | 2 | this design |
| `IB_DEPTH`, `OB_DEPTH`, `PI_DEPTH`, `PO_DEPTH` | 4 | this design |
| `PM_BASE` .. `PM_LIMIT` | 4 GiB .. 8 GiB-1 | this design |

The paper also evaluates 8, 32 and 64 entries. Those need only a change of
`N_PBE`; the counter and index widths follow from it.

## What follows the paper and what does not

These parts follow the paper:

* the three tables and their widths;
* the three states and their meaning;
* LRU victim choice;
* the selector's rules;
* PI priority for acknowledgments;
* drain-at-once versus threshold draining at 80 % / 60 %;
* coalescing and read forwarding;
* acknowledging the host as soon as the line is in the buffer;
* never freeing an entry before PM acknowledges;
* draining everything after a crash;
* the four stage names.

These are this design's own choices, where the paper says nothing:

* the header layout and opcodes;
* address-window detection of PM addresses;
* `dst`-based routing;
* buffer depths;
* round-robin allocation;
* the two-queue PI buffer;
* single-cycle table access (the paper's 0.39 ns tag and 0.79 ns data access
  fit one cycle at 1 GHz);
* drain-first use of the PO slot;
* LRU updates on forwarded reads;
* making a write to a line in Drain wait.

Points where the RTL departs from the paper's text:

* One sentence of the paper says a victim is changed "to Dirty" before
  draining; another says draining turns Dirty into Drain. The RTL does the
  latter.
* The paper says all entries are drained after a reboot. The RTL drains only
  Dirty and Drain entries, as explained above.
* The physical link, the persistent-memory device, the host and the
  non-volatile cell technology are not part of the RTL. `tb/pm_model.sv` is a
  behavioural model of the device for simulation.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/pcs_pkg.sv tb/tb_cxl_switch_pcs.sv --top-module tb_cxl_switch_pcs -o sim
obj_dir/sim
```

The same command works for the unit tests: replace the testbench name.

| Testbench | Checks |
|---|---|
| `tb_pkt_fifo` | FIFO against a queue model under random traffic |
| `tb_pi_buffer` | ack priority, per-class order and space |
| `tb_pbc_selector` | every diversion rule, directed and random against a model |
| `tb_switch_allocator` | override, space checks and round robin against a model |
| `tb_persist_buffer` | format, fill, state ports, recover, and LRU ranks against a most-recently-used list |
| `tb_pb_controller` | controller with its tables at 4 entries: persist and drain timing, forwarding, waiting on Drain, PO back-pressure, the RF threshold burst and its LRU victim, crash recovery, and (in a second instance with the threshold out of reach) a forced victim and stall |
| `tb_cxl_switch_pcs` | the whole switch at default size, with a host driving port 0 and `pm_model` on port 1 |
| `tb_pcs_workloads` | nine switches (each a `stream_bench`) running synthetic persist/read streams side by side |

The whole-switch test covers:

* CXL.io pass-through;
* the 10-cycle persist;
* a 16-write burst that stalls a 17th write, while PM acknowledgments overtake
  it in PI and a read diverted behind it finds its entry gone;
* read forwarding, coalescing, and the 12-to-9 threshold burst in LRU order;
* a crash with Dirty entries followed by the recovery drain;
* 600 random persists, reads and CXL.io packets in both modes.

Every read is compared with a reference memory. Whenever the switch is quiet,
PM's contents are compared with that reference too. The test counts every
mechanism and fails if one never occurred.

### Synthetic workloads

`tb_pcs_workloads` cannot run real programs, because there is no CPU model.
It instead drives 2000-operation streams: half persists, half reads, from one
seeded generator.

* The *hot* stream sends 90% of accesses to 40 lines.
* The *cold* stream sends only 5% there; the rest spread over 4096 lines.

Each stream runs on three kinds of switch:

* a baseline whose PM window is empty, so nothing is buffered;
* PB mode with 16 entries;
* RF mode with 8, 16, 32 and 64 entries.

With PM at 100/200 cycles, a typical run prints:

| switch | persist (cycles) | read (cycles) | reads forwarded | writes coalesced |
|---|---|---|---|---|
| baseline, hot | 210.0 | 110.0 | 0% | 0% |
| PB 16, hot | 13.4 | 155.6 | 2.5% | 0% |
| RF 8, hot | 19.9 | 129.7 | 10.1% | 8.6% |
| RF 16, hot | 14.6 | 108.5 | 21.4% | 17.7% |
| RF 32, hot | 13.7 | 73.0 | 43.3% | 40.5% |
| RF 64, hot | 10.8 | 28.3 | 82.0% | 78.8% |
| PB 16, cold | 10.2 | 159.5 | 0% | 0% |
| RF 16, cold | 12.2 | 136.8 | 0.1% | 0.1% |

The test checks the trends, not these exact numbers:

* Buffering cuts persist latency by more than half.
* RF mode forwards reads and coalesces writes only when there is locality.
* On the hot stream, RF reads are faster than PB reads.
* Forwarding does not fall as entries are added.

PB-mode reads are slower than the baseline's. Each read has to queue at the
PM port behind the drains that the buffered persists started. Read forwarding
exists to win back exactly that cost.

To change the design, start at `pb_controller.sv`: all buffer policy is
there. Its assertions (one live copy per line, no push into a full PO) catch
most mistakes at once.
