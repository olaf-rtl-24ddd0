# A queue that merges model updates while they wait

In asynchronous distributed reinforcement learning, many workers train
independently and keep sending gradient updates to a parameter server. When
their combined rate exceeds the server's link, a plain FIFO in front of the
link fills with updates that are old by the time they are delivered, and the
global model trained from them is stale. The engine described here sits in
front of that bottleneck as a bump in the wire (an FPGA NIC between switch and
server) and changes what the queue holds. **At most one unlocked update per
cluster and model segment waits in the queue.** A newer update for the same
key does not queue behind the old one. It is *summed into it* if the two
workers' rewards are comparable, *overwrites it* if its reward is clearly
better or it comes from the same worker, and is *dropped* if its reward is
clearly worse. The merged update keeps its place in line. The queue therefore
never holds more entries than there are active keys. An update is dropped for
lack of space only when the queue is full *and* nothing of its key is queued.
On the way back, the engine writes the queue's state (occupancy and number of
active keys) into every acknowledgement, so the workers can regulate how often
they send.

The RTL is SystemVerilog-2017 and synthesizable. Its stream ports are
512-bit AXI4-Stream at one beat per cycle (250 MHz, 128 Gbit/s raw, for
100 Gbit/s Ethernet). At its default size it holds 770 updates of 1500 bytes.

## Dataflow

```
 uplink   s_up ─► update_identifier ─► shesha_queue ──────────► egress_shaper ─► m_up
                  (classify, IDs,      (aggregate / replace /    (sets the
                   key)                 drop / append; FIFO out;   bottleneck
                                        bypass of other traffic)   rate)
 downlink s_dn ─► update_identifier ─► shesha_queue ACK path ──► ack_status_embed ─► m_dn
                                       (attaches queue status)   (writes status into
                                                                  ACK, tdest = cluster)
```

`olaf_engine` is the top. The two identifier instances share one
worker table, written through the `cfg_*` port by the control plane.

## Packets and lanes

A 512-bit beat is 16 lanes of 32 bits. Lane *i* is `tdata[32*i +: 32]`, and
byte 0 of the frame is `tdata[7:0]`. A model update is one frame of exactly
`BLOCKS` beats (24 beats = 1536 bytes, which holds a 1500-byte packet):

| where | content |
|---|---|
| beat 0, bytes 0..51 (lanes 0..12) | Ethernet (14 B) + IPv4 + UDP + application header = 416 bits |
| beat 0, bytes 42..43 | Segment_ID (big endian) |
| beat 0, lane 13 | mean reward of the worker's last iteration, FP32 |
| all other lanes | gradients, FP32 |
| last beat, lane 15 | aggregation count: number of worker updates summed, unsigned integer |

The identifier attaches a side-band struct `pkt_meta_t` to every packet:
`is_update`, `is_ack`, Cluster_ID, Worker_ID, Segment_ID and `key`.

* **Update.** UDP/IPv4 from a worker in the table to the parameter server's
  address `cfg_ps_ip`.
* **ACK.** From the server to a worker in the table.
* **Other traffic.** Anything else has both flags low and bypasses the
  queue.
* **Worker_ID** is a CRC-16/CCITT of the 5-tuple (source and destination IP,
  ports, protocol).
* **Cluster_ID** is the worker's multicast group from the table (for an ACK,
  the destination worker's; for any other packet 0 if its source is unknown).
* **key** is `Segment_ID ^ fold(Cluster_ID * 0x9E37)`. With one cluster the
  key equals the segment number. The tracker uses its low `log2(NKEYS)` bits.

When they are merged, header and reward lanes keep the *first* update's
values. The gradients are FP32-added, and the count lane is integer-added. The
receiver divides by the count to get the average.

## The enqueue decision

The decision is taken once per update, on its first beat, from a lookup of
the key in the cluster tracker:

| state of the key | arriving update | action |
|---|---|---|
| nothing queued, or only an update locked for departure | — | **append** in a free segment; **drop** if none is free |
| one update queued, replaceable (single, unaggregated) and from the same Worker_ID | — | **replace** (overwrite) |
| otherwise | reward within ±T of the queued one | **aggregate** (sum in place) |
| | reward higher by more than T | **replace**, now replaceable by its worker |
| | reward lower by more than T | **drop** |

T is the FP32 `cfg_reward_thresh`. With `cfg_reward_en = 0`, every match
aggregates. The same-worker rule is checked before the reward filter. After an
aggregation the entry is no longer replaceable.

## Bookkeeping: two address lists and a three-column tracker

This is the part that needs the most care.

**Segment memory.** The payload memory (`segment_memory`) is `NSEG` segments
of `BLOCKS` blocks of 512 bits. Segment *s* starts at block `s*BLOCKS`. It has
one write port and two synchronous read ports. Port A feeds departures. Port B
reads the stored beat for an aggregation.

**Address lists.** Two circular lists (`addr_list`) hold segment addresses:

* **`available_mem_addrs`** holds the free segments. Its read pointer
  (`write_ptr`) hands a segment to each appended update. Its append pointer
  (`append_available_addr`) takes a segment back once its update has left. It
  starts full with addresses `i*BLOCKS`. The storage is not cleared at reset:
  until the append pointer first wraps, positions it has not yet reached read
  as their initial value.
* **`out_mem_addrs`** holds the departure order. The append pointer
  (`append_out_addr`) adds each appended update, and the read pointer
  (`read_ptr`) gives the next update to send. Each entry also stores the key,
  so that a departure can update the tracker. An entry's position (its *queue
  index*) is stable until it departs.

Aggregating or replacing an update writes into its segment in place and does
not touch either list. That is how a merged update keeps its position.

**Cluster tracker.** Per key, `cluster_tracker` holds:

* **`cluster_status`**: three columns of queue indices;
* **`cluster_head` / `cluster_tail`**: two pointers modulo 3; head == tail
  means no update of the key is queued;
* **`replace_status`**: a flag plus the Worker_ID of the newest update, and,
  for the filter, its reward.

Why three columns? A key can have *two* queued updates for a short time. The
oldest update at the queue head is **locked** from the cycle its first beat
is read for departure: half of it may already be on the wire, so nothing may
merge into it any more. A new update of the same key is then appended as the
key's second entry, and the lookup returns the newest column (`tail-1`) as
the merge target. With pointers modulo 3, two entries (tail = head+2) and
empty (tail = head) stay distinct.

The lock test is: exactly one entry of the key, a departure in progress, and
that entry's queue index equals the head index of `out_mem_addrs`. When an
update departs, its key's head pointer advances. If that empties the key, the
replace flag is cleared. The tracker also counts the keys that have something
queued: this is the "active clusters" value sent to the workers.

## Timing in the queue

* **Intake runs at line rate**, one beat per cycle. Every segment write goes
  through `beat_aggregator`: the arriving beat is registered while port B
  reads the stored beat. The merge then takes `ADD_LAT` = 3 cycles (16
  pipelined FP32 adders plus an integer adder), and the result is written.
  Appends and replacements use the same path with the merge turned off, so
  all writes leave in order.
* **Hazard stall.** If an update must merge into, or overwrite, a segment
  whose earlier writes are still in the adder pipeline, it waits on its first
  beat (`s_up_tready` low) until they retire. `stat_hazard` counts these
  cycles.
* **Departures** are store-and-forward. A departure does not start on a
  segment that is still being written. Once started, its 24 beats are read
  one per cycle into a 4-entry output FIFO, under credit. The next departure
  starts in the cycle the last beat of the current one is read. A stream of
  queued updates therefore leaves at the full rate: 24 cycles = 96 ns per
  1500-byte update. The segment returns to the free list as its last beat is
  read.
* **Bypass.** Non-DRL packets wait in a 64-entry FIFO. They share the uplink
  output with departures by round robin per packet.
* **ACK path.** ACKs cross a register slice that captures the queue status
  (`q_status_t`) at their first beat. The status is occupancy (24 bits),
  active keys (16 bits) and a full flag.

`ack_status_embed` writes these fields into each ACK's first beat, in network
byte order:

* bytes 44..46: utilisation;
* bytes 47..48: active keys;
* byte 49: full flag;
* bytes 40..41: the UDP checksum, set to zero.

It puts the Cluster_ID on `m_dn_tdest` so the switch can multicast the ACK to
the whole cluster. The identifier and the embed stage each add one cycle.

## Setting the bottleneck

`egress_shaper` limits the uplink to `cfg_rate_num / cfg_rate_den` of the line
rate with a credit counter. Each cycle adds `rate_num` credits, and each beat
costs `rate_den`. The counter saturates at `2*rate_den`. This produces a load
factor (input rate / output rate) above 1, the condition the engine is made
for.

## Parameters and capacity

| parameter | default | meaning |
|---|---|---|
| `NSEG` | 770 | queue depth in updates (half of a 1540-packet model) |
| `BLOCKS` | 24 | 512-bit beats per update |
| `NKEYS` | 8192 | tracked keys; must cover clusters × segments |
| `NTBL` | 2048 | worker table entries (direct-mapped on the low IPv4 bits) |
| `ADD_LAT` | 3 | FP32 adder pipeline depth |
| `BYP_DEPTH` | 64 | bypass FIFO depth (beats) |

At the defaults the payload memory is 770 × 24 × 512 bit ≈ 9.5 Mbit (URAM on
an FPGA). The tracker stores 8192 × (4 × 10 + 16 + 32) bits, plus 5 flip-flops
per key.

A queue of 1540 to 3850 updates needs only `NSEG` changed. Models with more
segments than `NKEYS` (or several clusters of large models) alias in the
tracker, and `NKEYS` must then grow. The largest model considered here has
5462 segments, so 8192 keys cover one cluster of it.

## What is this design's own

The following are choices made here where the source description is silent.

* **Lane and header layout:**
  * reward in lane 13 of beat 0;
  * integer count in the last lane;
  * the header byte offsets;
  * the extra full-flag byte;
  * the zeroed UDP checksum.
* **Hash functions:** the key hash and the CRC-16 Worker_ID.
* **Worker table:** direct-mapped with a full-address tag, instead of a P4
  match-action table. Two workers whose addresses share the low 11 bits
  cannot both be entered.
* **Ordering:** same-worker replacement before the reward filter.
* **Reward drop:** dropping an update whose reward is lower by more than T,
  taken as the counterpart of the stated "higher reward replaces" rule.
* **Sum plus count:** sum plus count, not an average. One figure labels the
  operation "average", while the text describes a sum with a count, and the
  text is followed.
* **Timing details:**
  * lock from the first departure read;
  * hazard stall;
  * 3-stage adders;
  * round-robin bypass arbitration;
  * two read ports on the payload memory.
* **FP32 arithmetic:** round to nearest even, subnormals flushed to zero,
  NaN results canonical.
* **Key aliasing:** tracker keys alias when keys exceed `NKEYS`, and nothing
  detects it.
* **Worker_ID collisions:** two workers whose 5-tuples collide under CRC-16
  are treated as one worker.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Random stimulus uses
`$urandom`, and FP32 reference values come from `tb_fp_util`, an independent
bit-level implementation.

| testbench | checks |
|---|---|
| `tb_fp32_adder` | random and corner-case FP32 sums against the reference; latency |
| `tb_beat_aggregator` | lane rules (keep / FP add / integer add / pass), latency, tags |
| `tb_reward_filter` | three-way decision across and at the threshold |
| `tb_addr_list` | against a queue model, including wrap and initial contents |
| `tb_cluster_tracker` | against a per-key model: two entries, pointers mod 3, flags, active count |
| `tb_segment_memory` | both read ports, read-before-write |
| `tb_shesha_queue` | transaction model of the enqueue rules; content of every departure, counters, line-rate intake, 24-cycle departures, ACK status; every mechanism must occur |
| `tb_update_identifier` | classification and side-band of updates, ACKs and four kinds of other traffic under back-pressure |
| `tb_ack_status_embed` | status bytes, checksum, tdest, latency |
| `tb_egress_shaper` | measured rate for many ratios |
| `tb_olaf_engine` | end to end with real frames, at a small size (6 segments of 4 beats); counts each mechanism |
| `tb_olaf_engine_full` | the engine at its default size: fill 770 segments at line rate, overflow drops, aggregation, reward replacement, lock of the head, ACK status at full queue, 770 departures back to back in 18 498 cycles |

`tb_olaf_engine` counts the following mechanisms, and a mechanism that never
happens counts as a failure:

* append;
* aggregation;
* same-worker and reward replacement;
* reward drop and drop when full;
* second update behind a locked head;
* hazard stall;
* bypass;
* ACK status;
* rate shaping.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/olaf_pkg.sv \
    tb/tb_fp_util.sv tb/tb_pkt_util.sv tb/tb_olaf_engine.sv --top-module tb_olaf_engine
./obj_dir/Vtb_olaf_engine
```

Other testbenches work the same way. `tb_pkt_util.sv` is only needed by the
identifier and engine benches.
