# Spike-event transport between BrainScaleS wafer modules over Extoll: FPGA logic

A BrainScaleS wafer module carries 48 reticles of 8 HICANN neuromorphic chips.
Each reticle has its own FPGA. To build networks larger than one wafer, spike
events have to travel from the FPGA of one reticle to FPGAs on other wafers.
Here the transport is an Extoll network: a 3D torus of network chips that
route messages by a 16-bit destination address. Six reticle FPGAs share one
network chip (a concentrator node), eight per wafer.

The difficulty is the message overhead. An event is only 30 bits, and a
message carrying one event needs a header clock plus a payload clock. Events
can arrive at one per clock (210 MHz), but single-event messages can leave at
only one per two clocks. The remedy is aggregation. Events going to the same
network destination are collected into *buckets* and sent together, up to 124
events (496 bytes) per message. A bucket must not hold an event past its
deadline. There are 2^16 possible destinations but only a few buckets, so
buckets are assigned to destinations on demand. This renaming works much like
register renaming in an out-of-order processor.

This repository holds synthesizable SystemVerilog for the network
communication logic of one reticle FPGA, as described in the extended
abstract "BrainScaleS Large Scale Spike Communication using Extoll" (Thommes,
Buwen, Grübl, Müller, Brüning, Schemmel; NICE 2020). The paper describes the
architecture in a few paragraphs and three block diagrams. Much of the detail
below (widths, handshakes, message layout, release rules) is this design's own
and is marked as such. The RTL was written from that description; it is not
the authors' implementation.

## Block diagram

```
 HICANN links (8)                                                 network chip
  ──events──► event_router ──► IN-BUF ──► bucket_manager ──► extoll_tx_framer ──tx──►
              (merge, source    (sync_fifo) ┌ map_table      (header + payload)
               lookup: dest,                ├ free_list
               GUID)                        ├ bucket × 16
                                            └ flush_arbiter ×2 (evict / send)

  ◄─events── rx_distributor ◄──────────────────────────────────────────────rx──
  HICANN links (GUID lookup: multicast mask)

 host-bound data ──► rb_controller ──puts + notifications──► network chip ──► host memory ring
                    ◄── credit notifications from host ─────────────────────
```

The top module `bss_extoll_fpga` wires these together. The network chip, the
HICANN serial links and the host are outside it, and their signals are its
ports. All blocks run on one clock and use an asynchronous active-low reset.

## Event formats

| where | fields | bits |
|---|---|---|
| from a HICANN link (`hicann_event_t`) | timestamp 15, pulse address 12 | 27 |
| source table entry (`src_entry_t`) | destination 16, GUID 15 | 31 |
| input buffer (`tagged_event_t`) | destination (Dst) 16, event (Pls) 30 | 46 |
| on the network (`net_event_t`) | GUID 15, timestamp 15 | 30, in a 32-bit slot |
| network word | 4 slots, slot 0 in bits 31:0 | 128 |
| message header (`msg_header_t`) | reserved, count 7, destination 16 | 128 |

The timestamp is a deadline in system-time units. It is 15 bits and wraps, so
every comparison in the design is modular. "a at or before b" means that
`b - a` (mod 2^15) has its top bit clear. The source gives the 12-bit address,
the 15-bit timestamp, the 16-bit destination and the 30-bit event. The 15-bit
GUID is inferred: it is the width that makes GUID plus timestamp equal 30
bits. The 128-bit word is this design's choice. It was chosen to match the
FPGA's 4-lane link at 8.4 Gbit/s per lane: 33.6 Gbit/s is 160 bits per 210 MHz
clock, or 128 bits after an assumed 8b/10b-style line code.

## The bucket (`bucket.sv`)

A bucket collects the events for one destination. It is the hardest part to
follow, so here it is step by step.

*Storage.* A deserialiser gathers incoming events into groups of four. A
complete group is written as one 128-bit word into a FIFO of 64 words, which
holds two full batches of 31 words. The bucket takes one event per clock.

*Registers.* **Dest** holds the destination the bucket serves. It is loaded
when the bucket is assigned, and it is later used to clear the bucket's
map-table entry. **Threshold** is reloaded every clock with
`now + margin`. **min timestamp** is the wrap-around minimum of the
timestamps collected so far (f_min).

*Flush conditions*, ORed together:
1. deadline (f_comp): the minimum timestamp is at or before Threshold, so
   the most urgent event is due within `margin`;
2. full: 124 events collected;
3. external trigger from the bucket management (eviction).

*Overlapped flush and fill: the two counters.* `fill` counts events of the
batch being collected, and `drain` counts events of the flushed batch not yet
sent. At a flush the counters swap: `drain` takes the fill count, and `fill`
restarts at zero (the old drain counter, which was zero). New events keep
arriving behind the flushed batch in the same FIFO while it is being sent.
Any events still in the deserialiser at a flush are written as a short group,
so every batch ends on a word boundary. Each outgoing group reports
`min(4, drain)` valid events. Two rules keep this consistent:
* a new flush waits until `drain` is zero, so at most one batch is draining;
* the bucket refuses events only when `fill` has reached 124.

An event that arrives in the clock of a flush still belongs to the flushed
batch.

*Timing.* An event accepted in clock *t* is counted at *t*+1. A trigger seen
in clock *t* swaps the counters at the end of *t*, so the first group can
leave at *t*+1. When a bucket reaches 124 events it refuses input for one
clock, the clock in which the full trigger is seen.

## Bucket renaming (`bucket_manager.sv`, `map_table.sv`, `free_list.sv`)

Tagged events leave the input buffer one per clock. For each event:

1. The **map table** (2^16 entries of {valid, bucket number}, read
   combinationally) is indexed by the destination.
2. On a hit, the event goes to that bucket (a one-hot request). If the bucket
   is full and its previous batch is still waiting, the event waits (*full
   stall*).
3. On a miss, the bucket at the head of the **free list** is assigned. Its
   Dest register is loaded, the map entry is written, and the event is
   delivered, all in the same clock.
4. On a miss with no free bucket, the most urgent assigned bucket is
   **evicted** (*no-free stall*). It gets the external flush trigger and its
   map entry is cleared, so no more events join it. The event waits. Only one
   eviction is outstanding at a time. The eviction arbiter ranks buckets with
   nothing collected first, and otherwise by their minimum timestamp.

A bucket stays assigned across flushes and keeps aggregating for its
destination. It is **released** once it is idle: its last batch is sent and
nothing new has arrived. On release, its map entry is cleared through its
Dest register and its number goes back to the free list. Release has priority
within a clock. An event that would land in the bucket being released waits
one clock and then misses, so it gets a fresh bucket.

After reset the map table clears its valid bits one entry per clock. That
takes 65,536 clocks, and `ready` (port `map_ready` on the top) stays low until
it is done. No event is accepted before then.

How buckets are released and which bucket is evicted are this design's
choices. The source says only that a new address takes the next free bucket,
and that some suitable bucket is flushed when none is free.

## Sending a batch (`flush_arbiter.sv`, `extoll_tx_framer.sv`)

Buckets with a flushed batch request the output. The arbiter picks the batch
whose deadline (the batch's minimum timestamp) is nearest to or furthest past
`now`. It uses the signed modular distance, so overdue batches come first; ties
go to the lowest bucket number. The choice is frozen from the first clock the
batch is offered until its last group is taken. A multiplexer drives the
chosen bucket's groups, Dest and batch size to the framer.

The framer sends one header word {count, destination}, then the payload
words, with unused slots set to zero. `tx_sop` marks the header and `tx_eop`
marks the last word. A single-event message takes 2 clocks and a 124-event
message takes 32 clocks (3.9 events per clock). The header layout is a
placeholder: the real Extoll header format is not part of this description.

## Receiving (`rx_distributor.sv`, `dest_lut.sv`)

Received messages are unpacked one event per clock. Each GUID indexes a
32,768-entry table of 8-bit multicast masks, one bit per HICANN link. The
event is offered on every link whose bit is set and is retired when all of
them have taken it. An all-zero mask drops the event. The lookup of the next
event overlaps the delivery of the current one. The links receive {GUID,
timestamp}. How a GUID becomes a pulse address on the HICANN side is not
specified, so that translation is left to the link logic.

## Ring buffer to the host (`rb_controller.sv`)

Data for the host is written straight into a ring in host memory, with no
handshake per write. The FPGA keeps the **write address**, **Space**
(End - Start), **Filling-Level** (bytes written and not yet released) and
**Free-Space** (Space - Filling-Level). Writes go out as bursts (puts) of at
most 31 words of 16 B. A burst also ends at the ring's end (the write address
wraps to Start), when free space runs out, or when the source marks
`in_last`. The last word of a burst carries a notification with the burst's
byte count. The host notifies back how many bytes it has processed, and that
amount is added back to Free-Space. This is credit-based flow control: the
source stalls when less than one word is free. If the source pauses inside a
burst for 16 clocks, a notification-only put (`put_nodata`) closes the burst,
so the host does not wait for data that is already in its memory.

The host keeps its own pointers into the ring: where it reads, where the
last notification ended, and which entries are valid. These belong to the
driver software and are not part of this design. The whole-design test models
them with a simple consumer.

The ring controller and the two notification directions come from the
source. The burst and notification granularity, the idle close and the
alignment rule are this design's own. Start and End must be 16-byte aligned,
and End is exclusive.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| HICANN links | 8 | source |
| pulse address / timestamp / destination | 12 / 15 / 16 bits | source |
| events per message | 124 (496 B) | source |
| group size | 4 | source |
| GUID | 15 bits | inferred from the 30-bit event |
| buckets `N_BUCKETS` | 16 | chosen |
| bucket FIFO | 64 words | chosen (2 × 31) |
| input buffer `INBUF_DEPTH` | 16 | chosen |
| ring burst / idle close | 31 words / 16 clocks | chosen |

Memory at the defaults is about 1.74 Mbit: source table 1.0 Mbit, map table
0.33 Mbit, GUID table 0.26 Mbit and bucket FIFOs 0.13 Mbit. Every default above
is the size simulated by the whole-design test.

## Where this design departs from or goes beyond the source

* Deadline flush: the source flushes when the most urgent deadline is
  exceeded. Here a bucket flushes when that deadline is at or before
  `now + margin`, so the message can still arrive in time. With `margin = 0`
  it flushes when the deadline is reached, one time unit earlier than
  "exceeded".
* The number of buckets (16), the eviction choice, the release rule and the
  locked output selection are this design's. The source names a map table, a
  free list and an arbiter that picks the most urgent bucket.
* The GUID width (15 bits) is inferred, and the message header layout is a
  placeholder.
* The lookup tables are filled through simple write ports (`src_cfg_*`,
  `dst_cfg_*`). Host-to-FPGA data, which the source says other FPGA logic
  consumes directly, has no further logic here.
* Not built: the HICANN chips and their serial links, the Extoll network chip
  and torus, the concentrator nodes, the host and its PCIe interface. Their
  signals are ports of the top module.

## How far it can be trusted

Each block has a self-checking testbench in `tb/` that compares it with an
independent model. The whole-design test `tb_bss_extoll_fpga` runs the top at
its default parameters with the network looped back: 17,200 events go from
the HICANN inputs through aggregation and the network to about 74,000
deliveries on the HICANN outputs, each checked against the multicast masks.
In parallel, about 15,000 words go through the ring to a behavioural host.
With all HICANN outputs ready, 2,000 events to one destination enter the
aggregation in about 2,030 clocks. That is one per clock, minus one lost
clock per full flush, which matches the input rate the system must sustain. The
test requires every mechanism to occur: deadline, full and eviction flushes,
both stall kinds, aggregation during a drain, bucket release, multicast, ring
wrap, ring-full stall and notifications. Each testbench was also run against
a deliberately broken copy of its block and caught it.

Not verified: behaviour against a real Extoll chip or its message format,
timing closure at 210 MHz, and the HICANN link side.

Known limitations:
* The 15-bit GUID gives 32,768 identifiers. The full cortical microcircuit
  model (about 77,000 neurons) fits only if a GUID needs to be unique per
  receiving FPGA rather than network-wide.
* Only 16 destinations aggregate at once. Traffic spread over many more
  destinations causes frequent evictions and short messages. The end-to-end
  test spreads events over 30 destinations with deadlines 40–190 clocks ahead
  and averages about 2 events per message.
* The map table's asynchronous read of a 64K-entry RAM would map to
  distributed RAM or need a pipeline stage in an FPGA.

## Simulating

Every testbench is self-contained and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bss_extoll_fpga \
    -y rtl -y tb +libext+.sv rtl/bss_pkg.sv tb/tb_bss_extoll_fpga.sv
./obj_dir/Vtb_bss_extoll_fpga
```

Replace the top-module name and the file for any other testbench: `tb_bucket`,
`tb_bucket_manager`, `tb_map_table`, `tb_free_list`, `tb_flush_arbiter`,
`tb_sync_fifo`, `tb_event_router`, `tb_source_lut`, `tb_extoll_tx_framer`,
`tb_rx_distributor`, `tb_dest_lut` and `tb_rb_controller`. The whole-design
test takes a few seconds.
Lint with `verilator --lint-only -Wall -y rtl +libext+.sv rtl/bss_pkg.sv rtl/<module>.sv`.
The shared types and constants are in `rtl/bss_pkg.sv`. To change the number
of buckets, set `N_BUCKETS` on `bss_extoll_fpga`.
