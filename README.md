# Pulse-event routing between neuromorphic chips over a packet network

Mixed-signal neuromorphic chips of the BrainScaleS-2 kind (HICANN-X) hold a few hundred
neurons each. Networks that are larger than one chip need spikes ("pulse events") to cross
from one chip to another. In the system modelled here every chip sits behind its own FPGA,
and the FPGAs are joined by an EXTOLL high-performance packet network. This RTL is the
FPGA logic that carries spikes across that network:

* the **source side** looks up, for every spike a chip emits, where it has to go and by when
  it has to arrive, and packs spikes for the same destination node into network packets;
* the **destination side** unpacks the packets, keeps one ordered queue per sending node
  and feeds the events to its own chip.

One synthesizable top, `pulse_node`, contains both sides, because every FPGA can be a
sender and a receiver at once.

```
            chip events (2 per cycle)                                        events to chip
                  │                                                                 ▲
          ┌───────▼───────┐   ┌──────────┐                                  ┌───────┴──────┐
          │ event_routing │──►│ bucket 0 │──┐                           ┌──►│  merge_sort  │
          │ (lookup table)│   ├──────────┤  │  ┌─────────────┐          │   └───────▲──────┘
          │               │──►│ bucket 1 │──┼─►│ arbitration │─► tx     │     sorted_stream 0..3
          └───────────────┘   │   ...    │  │  └─────────────┘          │   (one per source node)
                              └──────────┘──┘                rx ─► event_unpacking
```

## Time and deadlines

A chip reports each spike as a 14-bit source neuron address plus an 8-bit timestamp, and
can deliver up to two spikes per 125 MHz FPGA clock cycle. A spike is useful at its target
only if it arrives in time, so the routing lookup turns the timestamp into an **arrival
deadline**: timestamp plus a modelled axonal delay for that source neuron.

Deadlines are 8-bit values on a wrapping clock. Every comparison in the design uses the
signed 8-bit difference `deadline - now` (`pulse_pkg::slack`), where `now` is the node's
8-bit system time. A negative difference means the deadline has passed. So the design can
only tell "earlier" from "later" within ±127 ticks. Axonal delays plus transport time
must stay below 128 ticks. In `pulse_node`, `now` is a free-running counter that advances
once per clock cycle from reset. Chip timestamps are taken to be in that same time base.
All nodes must leave reset in the same cycle, or otherwise be kept in step.

## Source side

### Routing table (`event_routing`)

There is one entry per source neuron (16384 entries, addressed by the 14-bit source
address). Each entry holds `{enable, bucket index, destination neuron, delay}`. The
destination neuron address can be any value: the target population does not have to use
the same addresses as the source. Both chip lanes read the table in the same cycle, so it
has two read ports and one write port. The read is registered, which gives one cycle of
latency at the full rate of two events per cycle. If an event's entry is disabled, the
event is dropped and flagged on `unmapped`.

The entry picks a **bucket**, not a network address. Each bucket is bound statically to one
destination node, through a configuration register. In this simplified scheme the number
of buckets grows with the number of destination nodes a chip talks to. Dynamic
reassignment of buckets to destinations ("bucket renaming") is not part of this design.

### Buckets: when to send a packet (`bucket`)

Sending every spike in its own packet would waste most of the link on headers. Holding
spikes back to fill large packets can make them late, and it makes the streams that meet
at the receiver burstier. The bucket balances the two with two rules. Both work on the
*pending* events, which are already in the bucket's FIFO but not yet in a closed packet:

1. **Full.** Once `EVENTS_PER_PACKET` (8) events are pending, a packet of exactly 8 is
   closed in that same cycle. Two events can arrive in one cycle. If that makes 9, the
   ninth stays pending and starts the next packet.
2. **Deadline.** The bucket tracks the earliest deadline among the pending events. Once
   that deadline is at most `cfg_flush_slack` ticks away (`slack(min_deadline, now) <=
   cfg_flush_slack`), everything pending is closed into one packet. Events that arrive in
   that same cycle start the next packet. `cfg_flush_slack` has to cover the time an
   event still needs after the flush: packet transmission, network transit, unpacking and
   queueing at the receiver. The longest an event can wait in a bucket is therefore its
   axonal delay minus the slack.

A closed packet is recorded only as its length, in a small length FIFO. The events stay in
the event FIFO, in order. The sending side emits a header word and then that many event
words. The event FIFO has 32 entries. If a lane's event finds the FIFO full, the event is
dropped and `overflow` pulses. Lane 0 is accepted before lane 1. The length FIFO cannot
overflow: each packet holds at least one event, so there are never more packets than
events.

Status pulses `flush_full`, `flush_deadline` and `overflow` report each rule when it acts.

### Packet format

The link is a 32-bit word stream with valid/ready and a `last` flag. A packet looks like
this:

| word | bits 31..16            | bits 15..0          |
|------|------------------------|---------------------|
| 0    | destination node (16)  | source node (16)    |
| 1..n | `{10'b0, neuron[13:0], deadline[7:0]}`       ||

The final word has `last` = 1. A packet carries 1 to 8 events, so 2 to 9 words. The
network routes on the 16-bit destination node address.

### Arbitration (`arbitration`)

The buckets share the node's single transmit link. The arbiter chooses among the offering
buckets in round-robin order, starting after the bucket served last. It holds that choice
until the packet's `last` word has been accepted, so packets are never interleaved. The
grant is registered as soon as a bucket is chosen, even while the link is stalled, so the
offered word stays stable. `contention` flags grants made while more than one bucket was
waiting.

## Destination side

### Unpacking (`event_unpacking`)

The header's source node is compared with the source node configured for each merge
buffer (`CFG_STREAM_SRC`, each with an enable bit). On a match, the packet's events go to
that buffer, one per cycle. A packet from an unknown or disabled source, or addressed to
another node, is read and thrown away, and `drop_packet` flags it. If the selected buffer
is full, unpacking stalls the receive link rather than losing events.

### Merge buffers (`sorted_stream`)

One FIFO (32 entries) per source node. A sender emits its events in the order of their
timestamps, so each buffer is already sorted, and its head is that stream's next event.
That holds for deadlines only if all source neurons feeding the stream use the same axonal
delay, or if their delays differ by less than the spacing of their spikes. With mixed
delays, a buffer can hold a later deadline ahead of an earlier one. The merge stage only
compares heads and does not reorder within a buffer.

### Merging (`merge_sort`)

This stage picks one buffer head per cycle for the chip. It has two modes, set by the
`TEMPORAL_MERGE` parameter:

* `TEMPORAL_MERGE = 0` (default, the configuration of the demonstrated prototype): the
  non-empty buffers are served in round-robin order. Events of different streams reach
  the chip in no particular time order.
* `TEMPORAL_MERGE = 1`: the head with the earliest deadline wins. Ties go to the lower
  buffer index. This is a merge of sorted lists over whatever is buffered right now. It
  does not wait for an empty buffer, so an event still in flight can arrive after a later
  one has already been sent.

In both modes, a head whose deadline has already passed is removed without being sent,
and `expired` flags it. Selection is combinational: one event per cycle while
`chip_out_ready` is high. The event sent to the chip carries the deadline in its
timestamp field.

## Configuration

Configuration goes through a write-only register port (`cfg_we`, `cfg_addr[16:0]`,
`cfg_wdata[31:0]`). In the real system the host writes these registers over the network.

| address            | contents                                              |
|--------------------|-------------------------------------------------------|
| `0x00000`          | own node address [15:0]                               |
| `0x00001`          | bucket flush slack [7:0]                              |
| `0x00100 + b`      | destination node of bucket `b` [15:0]                 |
| `0x00200 + s`      | merge buffer `s`: enable [16], source node [15:0]     |
| `0x10000 + neuron` | routing entry `{enable, bucket, neuron, delay}` in the low 25 bits (with 4 buckets) |

All registers reset to zero: no stream is enabled and every bucket points to node 0. The
routing table is a memory and is not cleared by reset. Write every entry that live
traffic can reach.

## Timing summary (defaults)

| path | figure |
|------|--------|
| chip → routing output | 1 cycle, 2 events/cycle sustained |
| bucket full → header on `tx` | closed in the cycle the 8th event arrives; header offered next cycle |
| packet on the link | n + 1 cycles for n events (one word per cycle) |
| sustained network throughput | 8/9 events per cycle per node at 8 events per packet |
| `rx` → merge buffer | 1 cycle for the header, then 1 event per cycle |
| merge buffer → chip | visible 1 cycle after the push, 1 event per cycle |

The input side takes two events per cycle, but the single 32-bit link carries less than one.
A node can therefore absorb bursts at the full chip rate, up to 32 events per bucket, but
cannot forward two events per cycle indefinitely.

## What comes from the source description and what is new here

Taken from the description of the system:

* the chain of blocks: routing, buckets, arbitration, network, unpacking, sorted streams,
  merge;
* the 14-bit neuron address, the 8-bit timestamp and the rate of two events per 125 MHz
  cycle;
* the deadline rule (timestamp plus axonal delay) and the remappable destination neuron;
* the bucket index from the lookup, with network addresses held statically in the buckets;
* aggregation limited by the axonal delay;
* one merge buffer per source stream;
* the 16-bit node address;
* the prototype without temporal merging.

Chosen here, because the description leaves them open:

* the numbers of buckets and merge buffers (4 each);
* the packet size (8 events) and all buffer depths (32);
* the packet and word format;
* the slack-based flush rule;
* round-robin arbitration with packet locking;
* round-robin service in the non-merging mode, and the earliest-head rule in the merging
  mode;
* dropping expired events at the merge stage;
* stalling the receive link on a full merge buffer;
* storing the delay in the routing entry;
* the register map;
* a system time that advances once per clock cycle.

Not included: the chip itself, the serial chip links, the transceivers and the EXTOLL
network (the end-to-end testbench has a behavioural network model), the host-side send
queue and ring buffer, and bucket renaming.

Known limits:

* Sustained traffic at two events per cycle overflows the buckets (see the timing
  summary).
* The ±127-tick comparison window limits delays and network latency.
* A system of 46 chips with all-to-all traffic would need about 45 buckets and 45 merge
  buffers per node. Raise `NUM_BUCKETS` and `NUM_STREAMS` for that.

## Files

| file | contents |
|------|----------|
| `rtl/pulse_pkg.sv` | types, packet helpers, status flags, register map |
| `rtl/event_routing.sv` | routing table and deadline computation |
| `rtl/bucket.sv` | event aggregation and packet sender |
| `rtl/arbitration.sv` | packet arbiter for the transmit link |
| `rtl/event_unpacking.sv` | packet splitter and stream steering |
| `rtl/sorted_stream.sv` | merge buffer FIFO |
| `rtl/merge_sort.sv` | merge stage and expiry |
| `rtl/pulse_node.sv` | top: both paths, registers, system time |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_fig2_demo.sv` | four-node feed-forward experiment, all defaults |
| `tb/tb_temporal_merge.sv` | both merge modes side by side, end to end |
| `tb/extoll_net_model.sv` | behavioural network model used by the system testbenches |

## Simulating

Every testbench checks itself. It ends by printing
`TB_RESULT checks=<n> failures=<m>`, and a watchdog stops it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pulse_pkg.sv rtl/pulse_node.sv \
          tb/extoll_net_model.sv tb/tb_pulse_node.sv --top-module tb_pulse_node -Mdir obj -o sim
obj/sim
```

For a unit test, swap in the module and its testbench (for example `rtl/bucket.sv
tb/tb_bucket.sv --top-module tb_bucket`). With `-Irtl`, Verilator finds submodules on its
own. The package file must come first.

`tb_pulse_node` runs two nodes at their default parameters through a network model with
20 cycles of latency. It has four phases:

1. Random traffic on both chips. Every event must arrive exactly once, with the remapped
   neuron and the right deadline, and before that deadline.
2. Events whose delay is too short for the trip. They must expire.
3. A burst into one bucket while the link is stalled. It must overflow.
4. A disabled merge buffer. Its packets must be discarded.

The test also counts each mechanism (flush on full, flush on deadline, arbiter contention,
unmapped event, expiry, overflow, link stall, discarded packet, two streams sharing one
chip) and fails if any of them never happened. `tb_fig2_demo` runs the feed-forward experiment the design was built for, with four
nodes:

* Nodes 1 and 2 each receive a population of 64 regularly firing neurons: each neuron
  fires once every 1500 cycles, which is 12 µs at 125 MHz.
* Half of each population goes to node 3 and half to node 4, through two buckets.
* Nodes 3 and 4 each merge two incoming streams.

Every spike must arrive once, on time and remapped. The test reports the worst latency
(about 70 cycles with a flush slack of 60 and a delay of 100).

`tb_temporal_merge` builds one receiving node with `TEMPORAL_MERGE = 1` and one with the
default, and feeds both the same two streams. Only the first may deliver them in deadline
order. The second, served round-robin, must show inversions.

The unit testbenches compare each module
against a reference model. They check cycle timing where the design promises it: routing
latency and rate, header timing after a full flush, back-to-back packets through the
arbiter. `tb_merge_sort` covers both merge modes.
