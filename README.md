# HBRICK count-min sketch for heavy-hitter detection on a 100 Gb/s NIC

A count-min sketch estimates how many bytes each network flow has sent. It
does this in far less memory than one counter per flow. Every packet adds its
size to one counter in each of D arrays, chosen by D independent hashes of
the flow's five-tuple. The estimate for a flow is the smallest of its D
counters. Collisions can only add to a counter, so the estimate never falls
below the true size, and wider arrays (more entries W) make overestimates
rarer.

On an FPGA the arrays live in block RAM, and that limits W. Fixed-width
counters waste most of their bits. In real traffic almost every flow is small
and only a few heavy hitters need wide counters. HBRICK (Hardware-friendly
Bucketized Rank-Indexed Counters) stores the arrays with variable-width
counters:

* each entry has a narrow base counter;
* entries that outgrow it borrow extra bits from a small shared pool in their
  bucket;
* the rare entry that cannot get pool space moves to a small associative
  memory.

The pool lookup is arranged so that every access costs the same fixed number
of cycles. The sketch can therefore be pipelined to accept one packet per
clock.

This repository is a SystemVerilog implementation of that architecture. It
covers the sketch and a packet front end that runs it inline on a NIC: it
extracts the flow key, updates the sketch, and tags each packet as a heavy
hitter when its flow's estimate passes a threshold. The published design was
written in HLS and P4 and was not released. This RTL is an independent
reconstruction. Every place where it had to choose something itself is named
below, under "Where this RTL departs from, or fills in, the published design".

## Where the plugin sits

```
 Ethernet MAC --s_axis--> p4_frontend --(five-tuple, size)--> cm_sketch
   (not here)                 |        <------(estimate)-----    | D x [hash_unit -> hbrick_counter]
                              v
                    packet FIFO, tagged with hitter = estimate > threshold
                              |
                              +--m_axis--> host DMA engine (not here)
```

`hhd_plugin` is the top level. It takes frames from the MAC as a 512-bit
AXI4-Stream and passes every frame unchanged to the DMA side. Each frame
carries one sideband bit, `m_axis_tuser_hitter`. The MAC, the DMA engine and
the host software are outside this design. Their streams are the top's
ports.

## The count-min engine (`cm_sketch`)

`cm_sketch` has D = 4 rows. Row d is a `hash_unit` followed by an
`hbrick_counter` of 2^15 entries:

* the hash is an H3 function: an XOR of fixed pseudo-random rows, selected by
  the key bits that are set;
* each row has its own seed, so the rows are independent.

A request is (five-tuple, size). Every row adds the size to its entry and
returns the updated count. The engine answers with the minimum of the D
counts. So the estimate a packet receives already includes that packet.

A request with size 0 is a pure query.

All rows run in lock step at a fixed latency, and the engine has no
backpressure. After reset, `ready` is low for 2^15/8 = 4096 cycles while the
counter memories are zeroed.

| stage | cycles |
|---|---|
| hash (registered) | 1 |
| data forwarding unit | 14 |
| bucket read, update and write-back | 2 |
| minimum over rows (registered) | 1 |
| **request to estimate** | **18** |

## HBRICK buckets (`hbrick_bucket_update`, `hbrick_pkg`)

A row's 2^15 entries are grouped into 4096 buckets of K = 8 entries. Entry
`i` lives in bucket `i / 8` at position `j = i mod 8`. A bucket is one
206-bit memory word:

| field | bits | meaning |
|---|---|---|
| `v`  | 8 | dirty bit per entry: the entry was evicted to the associative memory |
| `i3` | 8 | index column 2: the entry owns an A3 slot |
| `i2` | 8 | index column 1: the entry owns an A2 slot |
| `a1` | 8 x 17 | base level A1, one 17-bit sub-counter per entry |
| `a2` | 4 x 8 | A2 pool: four 8-bit slots packed in one word |
| `a3` | 2 x 7 | A3 pool: two 7-bit slots packed in one word |

An entry's count is the concatenation `{A3 slot, A2 slot, A1 field}`, up to
32 bits. Counts below 2^17 need only A1, counts below 2^25 also need an A2
slot, and larger counts need an A3 slot too.

### Rank indexing, all levels at once

Slots are not tied to entries. The A2 slot of entry j is slot number
`popcount(i2 & ((1 << j) - 1))`: the count of entries below j that own an A2
slot. The A3 slot works the same way with `i3`.

Both index columns sit in the same word, so both ranks come from the same
read, in parallel. No level's address depends on another level's contents.
That independence keeps the cost of an access fixed, whatever the width of
the counter.

Example, with the entries of one bucket written as (A1, A2, A3):

```
entry  0: i2=1 i3=1  -> A2 slot 0, A3 slot 0
entry  1: i2=0 i3=0  -> A1 only
entry  2: i2=1 i3=1  -> A2 slot 1, A3 slot 1
entry  4: i2=1 i3=0  -> A2 slot 2
```

### Width expansion

Sometimes an update produces a count that needs a level the entry does not
own yet. The module then opens a slot at the rank position by shifting the
pool word's upper slots up by one slot width. The new entry is inserted in
rank order, so the ranks of all other entries stay valid. Packing each pool
into a single word is what turns this insertion into one shift instead of a
sequence of moves. An entry can gain A2 and A3 in the same update.

### Pool overflow and eviction

The needed pool may already be full: four entries own A2, or two own A3.
In that case the entry is **evicted**:

* its dirty bit is set;
* its A2/A3 slots are taken out of the pools, with the upper slots shifted
  down;
* its A1 field is cleared;
* its full 32-bit count is written to the row's associative memory.

From then on, every access to that entry is served by the associative memory,
and the bucket is left as it is.

If the associative memory is also full, the entry stays in its bucket and
**saturates** at the largest value its owned levels can hold. From that point
the sketch can under-count that entry. The `saturate` event flags when this
happens.

## Data forwarding unit (`dfu`)

The bucket update is a read-modify-write with a fixed latency. Several packets
of one flow arriving close together would each read a count before the
earlier update was written back. The DFU is a 14-stage shift register in
front of each row, and it consolidates such accesses:

* A new access whose entry matches an older update still in the first 13
  stages is folded in. Its size is added to that older access (the
  *carrier*), and the new access continues as a read-only access.
* Every packet still gets its own estimate, in order, at the fixed latency.
* The bucket RAM sees one write per entry per 14-cycle window.

A side effect: the carrier's estimate already includes packets up to 13
cycles younger than itself. The read-only accesses behind it see the same
total.

Only neighbouring accesses to the same *bucket* remain as a hazard (accesses
to different entries of one bucket within two cycles). `hbrick_counter`
handles it with a one-cycle write-forwarding path on the bucket RAM.

## Associative memory for evicted entries (`hbrick_assoc_mem`)

Each row has a 144-slot store of full-width counts, keyed by the 15-bit entry
index. A plain RAM indexed by key would be 2^15 words deep and almost empty.
Instead, the key is cut into 9-bit chunks, and each chunk addresses its own
512 x 144-bit index RAM. Slot s belongs to key k when bit s is set, in every
chunk RAM, at the address given by that chunk of k.

A lookup reads the chunk RAMs and ANDs the words. The one bit left names the
slot, and no bit left means a miss. Insertion takes the next free slot and
sets that bit in each chunk RAM. Slots are not reused.

Timing: a lookup in cycle t answers in t+1. The same cycle may update the
slot's value or insert the key, and the write is forwarded to a lookup
answered in t+2.

## Front end (`p4_frontend`)

On the first beat of a frame, the front end parses:

* Ethernet type 0x0800;
* IPv4 version and IHL;
* total length;
* protocol;
* source and destination address;
* the TCP/UDP ports, at offset 14 + 4·IHL.

If the frame is IPv4 TCP or UDP with its ports inside the first beat, the
front end sends (five-tuple, total length) to the sketch. Any other frame
bypasses the sketch and leaves with hitter = 0.

The frame waits in a 64-beat FIFO until its decision is known. Two 32-entry
FIFOs keep the decisions in frame order:

* the per-frame bypass bits;
* the estimate comparisons, `estimate > threshold`.

A credit counter stops new requests once 32 results are outstanding, so the
result FIFO cannot overflow. The sketch does not need backpressure.
`s_axis_tready` falls when the packet FIFO or a decision FIFO is full, or
while the sketch is still clearing.

## Interface of `hhd_plugin`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock, synchronous active-high reset |
| `threshold` | in | 32 | heavy-hitter threshold in bytes |
| `s_axis_*` | in | 512 data, 64 keep, last, valid / ready | frames from the MAC, byte 0 in `tdata[7:0]` |
| `m_axis_*` | out | same, plus `tuser_hitter` | frames to the DMA engine, hitter flag on every beat |
| `events[D]` | out | 6 x D | one-cycle pulses per row: `merge`, `expand2`, `expand3`, `evict`, `assoc_hit`, `saturate` |
| `stat_bypass`, `stat_hitter` | out | 1 | one pulse per bypassed frame, and per frame flagged as a heavy hitter |

Parameters: `D` = 4, `LOG_W` = 15, `DFU_DEPTH` = 14, `CAP` = 144 and
`DATA_W` = 512. The bucket geometry and level widths are constants in
`hbrick_pkg`.

## Sizes and memory

The memory at the defaults:

* bucket RAM: 4 × 4096 × 206 bit = 3.38 Mbit;
* index RAMs: 4 × 2 × 512 × 144 bit = 0.59 Mbit;
* value stores: 4 × 144 × 32 bit.

That is about 3.98 Mbit in total. Mapped onto 36-Kbit block RAMs of 512 × 72,
it takes about 112 of them. The published implementation reports 114 block
RAMs for this configuration. A fixed 32-bit count-min sketch of the same
W would need 4 Mbit of counters alone.

The level widths were chosen by one rule: the base level should hold the
average entry. Three million packets of about 780 bytes, spread over 2^15
entries, put about 72 KB (2^16.1) into each counter, hence 17 base bits. A
first attempt with 14 base bits made nearly every entry expand. The small A2
pools then overflowed and the associative memories filled. The design is
sensitive to this choice: the base width has to follow the total bytes per
measurement interval divided by W.

## Results on synthetic Zipf traffic

`tb_zipf_workload` runs the engine on 3 million packets per stream. Flows are
drawn from a universe of 2^19 five-tuples with Zipf exponent s, and sizes are
uniform in 64..1500 bytes. Afterwards every flow seen is queried. Average
absolute error is in bytes per flow:

| s | flows seen | average absolute error | evictions | saturations |
|---|---|---|---|---|
| 0.00 | 522 584 | 51 867 | 0 | 0 |
| 0.25 | 521 101 | 51 091 | 0 | 0 |
| 0.50 | 513 249 | 46 227 | 0 | 0 |
| 0.75 | 476 186 | 33 187 | 0 | 0 |
| 1.00 | 325 274 | 13 127 | 0 | 0 |
| 1.25 | 111 512 | 1 907 | 0 | 0 |
| 1.50 | 26 195 | 67 | 0 | 0 |

No estimate fell below the true flow size. At low skew about 16 flows share
each counter, and the error is the normal count-min collision error for that
load. These numbers depend on the flow universe and the size distribution,
both chosen here. They are not comparable with published accuracy figures
measured on other data.

## Where this RTL departs from, or fills in, the published design

* **Language.** The engine was HLS and the front end P4. Both are
  hand-written RTL here, and the front end only does what the published P4
  listing shows: extract the key, call the sketch, set a heavy-hitter field,
  forward the packet. The heavy-hitter field is a sideband bit, not a
  rewritten header.
* **Unspecified sizes.** These are choices made here:
  * bucket geometry (8 entries; 4 A2 and 2 A3 slots, copied from the
    published bucket illustration);
  * level widths (17/8/7);
  * hash family (H3);
  * packet size (the IPv4 total length);
  * FIFO depths.
* **One DFU per row, not one per bucket.** At most one access per cycle
  reaches a row, so one unit that compares full entry indices does the same
  job. Merged accesses stay in the stream as read-only accesses, so that each
  packet still gets an estimate.
* **Latency.** The published update overhead of 14 cycles is used as the DFU
  depth. A row's total latency is 16 cycles, and the engine's is 18.
* **Bucket storage.** The levels of a bucket sit side by side in one wide
  word, not in separate memories. They are still read and written together
  in one access, as the architecture requires.
* **Eviction details.** The following are not described in the publication
  and were chosen here:
  * freeing an evicted entry's slots;
  * saturating when the associative memory is full;
  * never reusing associative slots;
  * 144 slots per row (the published associative-memory drawing shows 144
    entries; the text quotes about 100 overflowed entries for real traces).
* **Reconstruction.** The published access algorithm adds the level values,
  and its update algorithm writes them with a bitwise AND. This RTL follows
  the published worked example instead: the levels hold consecutive bit
  fields of the count. The bucket index is `i / K`, as the text states. The
  algorithm listing's `i / N` (N being the number of buckets) is taken to be
  a slip.
* **Levels.** Only the three-level configuration is built. The 2-, 4- and
  5-level variants that were compared are not.
* **Not built.** The Ethernet MAC, the DMA engine and the host are vendor IP
  and software and are not designed here. The clock rate has not been
  measured.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_hbrick_bucket_update` | 16 000 random updates against a per-entry model (owned levels, dirty, pool counts); decodes every entry of every resulting bucket by rank |
| `tb_hbrick_assoc_mem` | lookups, inserts and updates against a reference table, back-to-back on shared chunk addresses, and the full condition (`CAP` = 16) |
| `tb_dfu` | carrier/merge decisions, merged totals and the exact 14-cycle latency against a history model |
| `tb_hash_unit` | indices against an independent H3 model, the 1-cycle latency, and row independence and spread |
| `tb_hbrick_counter` | one full-size row: the length of the clearing walk, exact counts and the 16-cycle latency under merges, expansions and evictions |
| `tb_cm_sketch` | the full engine: estimate = minimum of the modelled rows, and the 18-cycle latency |
| `tb_p4_frontend` | parsing (IHL 5 and 6, TCP/UDP/ICMP/ARP), frame integrity and order, flags, and stalls on both sides, with a fixed-latency stand-in for the sketch |
| `tb_hhd_plugin` | the whole plugin at full size: about 5900 frames; every estimate recomputed by a bit-level model of HBRICK (including eviction and saturation); every beat and flag checked; every mechanism required to occur |
| `tb_zipf_workload` | the table above, and that no estimate is below the truth |

Each testbench has a watchdog. To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hbrick_pkg.sv tb/tb_hhd_plugin.sv \
          --top tb_hhd_plugin -Mdir obj_hhd -o sim
./obj_hhd/sim
```

Verilator finds the other modules in `rtl/` through `-Irtl`. All the
testbenches finish within seconds, except `tb_zipf_workload`, which takes
about two minutes.

## Files

`rtl/hbrick_pkg.sv` holds the constants, the bucket struct, the five-tuple
and the event flags. The other files in `rtl/` are
`hbrick_bucket_update.sv`, `hbrick_assoc_mem.sv`, `dfu.sv`, `hash_unit.sv`,
`hbrick_counter.sv`, `cm_sketch.sv`, `p4_frontend.sv`, `sync_fifo.sv` and
`hhd_plugin.sv` (the top). Each file opens with a description of its
function, interface and timing.
