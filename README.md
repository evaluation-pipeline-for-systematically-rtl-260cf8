# Network-sketch feature extractor

An intrusion into a network rarely shows up in a single packet; it shows up
as a client whose traffic, taken over some time, looks unlike everyone
else's. Detectors that work on *flow features* (how many packets a source
sent, how large they were on average, what the smallest and largest were)
need those features computed at line rate, before the packets are gone.

This RTL computes such features in hardware with **network sketches**. Each
packet header updates a small fixed-size table indexed by a hash of one header
field; each table entry keeps running statistics of the packets that hashed
there, separately for the current time window and for a few past windows.
For every header the unit emits, a fixed number of cycles later, the
statistics of every entry that header touched. A detector (not part of this
RTL) consumes that feature vector.

The structure — a hash, a buffer of 2^HASH_W entries that keeps several
"memory stages" (time periods), and average/minimum/maximum metrics computed
from each buffer, four such columns side by side, one 50-byte header per
clock — follows a short FPGA design description (a workshop paper on an
evaluation pipeline for anomaly-detection hardware). That description gives the block
structure, the two size parameters and the throughput target, but not the
insides of any block. Everything below marked *design choice* is this
implementation's own decision.

## Data path at a glance

```
                     +-------------------- sketch_lane x 4 ---------------------+
hdr_data (400 b) --->| field select -> shift_hash -> [reg] -> sketch_buffer ->  |
hdr_valid            |                                        metric_unit (16 c) |---> feat[lane][gen]
rd_valid/rd_index -->|                                                          |     feat_idx[lane]
                     +----------------------------------------------------------+     feat_valid
window_timer --- window_tick (ages all sketches) ------------^                         feat_is_read
```

* `feature_extractor` — the top. Broadcasts each header to four lanes and
  ticks their time windows.
* `sketch_lane` — one column: field selection, hash, buffer, metrics.
* `shift_hash` — XOR-fold hash built from shifts.
* `sketch_buffer` — the sketch itself, 2^HASH_W entries × MEM_STAGES
  generations, in flip-flops.
* `metric_unit` with `pipe_divider` — average, minimum, maximum, count.
* `window_timer` — produces the window tick.
* `fe_pkg` — widths, entry and feature structs, header layout, lane fields.

## The header word and what each lane looks at

One header arrives per cycle as a 400-bit word, 50 bytes. *Design choice:*
the 50 bytes are Ethernet II (14) + IPv4 without options (20) + the first 16
bytes of the TCP or UDP header. Byte 0, the first byte on the wire, sits in
bits [7:0]; byte *i* in bits [8i+7:8i]. Multi-byte fields are read in
network (big-endian) order.

| Lane | Key field (hashed)            | Byte offset | Value aggregated        |
|------|-------------------------------|-------------|-------------------------|
| 0    | IPv4 source address           | 26, 4 bytes | IPv4 total length (16)  |
| 1    | IPv4 destination address      | 30, 4 bytes | IPv4 total length       |
| 2    | TCP/UDP source port           | 34, 2 bytes | IPv4 total length       |
| 3    | TCP/UDP destination port      | 36, 2 bytes | IPv4 total length       |

*Design choice:* the source shows four columns but does not say which fields
they use. The choice lives in `fe_pkg` (`LANE_KEY_OFF`, `LANE_KEY_BYTES`,
`LANE_VAL_OFF`); each lane takes any key of up to 4 bytes and any 16-bit value.

## The hash

The source only says its hashes are built from shifters. `shift_hash` XORs
the key with itself shifted right by HASH_W, 2·HASH_W, … bits and keeps the
low HASH_W bits. Put differently, index bit *j* is the XOR of all key bits
*i* with *i* mod HASH_W = *j*. It costs a few XOR gates and no multiplier. It
is not a strong hash: two keys that differ in a pair of bits HASH_W apart
collide. Colliding keys share an entry and their statistics merge, as in any
sketch.

## Sketch entries and generations (the part to understand first)

A lane's sketch is an array of 2^HASH_W entries. Every entry holds MEM_STAGES
*generations*. Generation 0 collects the current time window, and generation
*g* is the window that ended *g* ticks ago. The source calls these memory
stages that cover different time periods. Each generation of an entry
stores:

| field | width | meaning                                               |
|-------|-------|-------------------------------------------------------|
| count | 16    | packets recorded, saturates at 65535                  |
| sum   | 32    | sum of their values                                   |
| min   | 16    | smallest value (65535 when empty)                     |
| max   | 16    | largest value (0 when empty)                          |

That is 80 bits, and these four fields are the least needed for average,
minimum and maximum. Once count saturates, sum stops as well, so the average
stays the mean of the packets that were counted (*design choice*).

**Aging** (*design choice*): on a window tick every entry of every lane
shifts at once. Generation *g* takes the contents of *g*−1, generation 0
becomes empty and the oldest generation is dropped. A one-cycle shift of the
whole array is the reason the sketch sits in flip-flops rather than block
RAM. The source's resource table supports this reading: its flip-flop count
roughly triples from 1 to 3 stages and doubles from hash width 4 to 5.

**One cycle, one read-modify-write.** In one cycle `sketch_buffer` does:
1. aging, if the tick is high in that cycle;
2. a read of the addressed entry from the aged state;
3. for a header, adding the value to generation 0 of that entry;
4. writing the entry back and registering it as the output.

Because read and write happen in the same cycle, back-to-back headers that
hit the same entry need no forwarding or stalling. When a tick and a header
meet in the same cycle, the header lands in the fresh window.

## Features and timing

`metric_unit` turns each generation of the touched entry into a `feat_t`:

| feature | meaning                                  |
|---------|------------------------------------------|
| count   | packets in that generation               |
| avg (f1)| floor(sum / count)                       |
| min (f2)| minimum value                            |
| max (f3)| maximum value                            |

An empty generation reports all zeros. The average comes from a restoring
divider, `pipe_divider`, that finds one quotient bit per pipeline stage.
Since sum ≤ count × 65535, the quotient fits in 16 bits, so 16 stages are
enough. count, min and max travel through a delay line of the same length.
The names f1–f3 and the order average, minimum, maximum follow the source;
the count output is an addition so that a consumer can tell an empty entry
from one holding zero-valued packets.

Latency from a header (or accepted read) at the input to its features at
the output:

| stage                      | cycles |
|----------------------------|--------|
| field select + hash → reg  | 1      |
| sketch_buffer RMW → reg    | 1      |
| metric_unit                | 16     |
| **total (`LANE_LAT`)**     | **18** |

The pipeline takes one request every cycle without a bubble. The window tick
acts on the request that is in the buffer stage, the one that entered one
cycle before the tick shows on `window_tick`.

## Top-level interface (`feature_extractor`)

| port                 | dir | width            | meaning |
|----------------------|-----|------------------|---------|
| `clk`, `rst_n`       | in  | 1                | clock; synchronous active-low reset, empties all sketches |
| `cfg_window_cycles`  | in  | 32               | window length in cycles; 0 stops aging |
| `hdr_valid`, `hdr_data` | in | 1, 400        | one header per cycle; never back-pressured |
| `rd_valid`, `rd_index`  | in | 1, HASH_W     | request to dump entry `rd_index` of every lane |
| `rd_ready`           | out | 1                | read accepted this cycle (= no header this cycle) |
| `window_tick`        | out | 1                | one-cycle pulse at each window boundary |
| `feat_valid`         | out | 1                | feature vector present |
| `feat_is_read`       | out | 1                | vector answers a read, not a header |
| `feat_idx[N_LANES]`  | out | HASH_W each      | entry index per lane |
| `feat[N_LANES][MEM_STAGES]` | out | `feat_t` (64 b) | count/avg/min/max |

**Read port** (*design choice*). The source treats each sketch as an array
that a detector reads. Here, `rd_valid`/`rd_index` read a whole array out
one entry per cycle, through the same pipeline. Headers come first: a read
is accepted only in a cycle with no header (`rd_ready = !hdr_valid`), and the
requester must hold `rd_valid` until then. An assertion checks that hold
rule. A second assertion checks that all lanes stay in lock step.

**Window timer**: with period P, `window_tick` pulses every P cycles, the
first time P cycles after reset. A new period takes effect at once.

## Parameters and configurations

| parameter      | default | where it comes from |
|----------------|---------|---------------------|
| `HASH_W`       | 4       | source's main configuration (the one quoted at 430 MHz) |
| `MEM_STAGES`   | 3       | same |
| `N_LANES`      | 4       | four columns in the source's block diagram (fixed in `fe_pkg`) |
| `HDR_BYTES`    | 50      | source's throughput figure, 430 MHz × 50 B ≈ 21 GB/s |
| `VAL_W`, `CNT_W`, `SUM_W` | 16, 16, 32 | design choice |

The source reports four configurations: memory stages 1 or 3, crossed with
hash width 4 or 5. All four are reached with the two top parameters, and
`tb_table_configs` simulates all four. The defaults hold 4 lanes × 16 entries
× 3 generations × 80 bits = 15,360 bits of sketch state.

**Throughput.** The unit takes one 50-byte header per cycle. A 20 GB/s link
(the 5G target named in the source) is 400 M headers/s, so the unit keeps up
at any clock of 400 MHz or more. The source reports 430 MHz for its own
FPGA build. No clock frequency has been measured for this RTL. The longest
combinational paths are the 16-way entry multiplexer with its add/compare in
`sketch_buffer` and one subtract stage of the divider.

## Where this departs from, or goes beyond, the source

* The header layout, the lane fields, the hash function, the entry contents,
  shift-on-tick aging, the window timer and the read port are all choices
  made here. The source names the blocks but describes none of their insides.
* The source shows anomaly detectors (neural networks) after the extractor,
  and a path that passes raw packets to them. Neither is included; the
  feature outputs are where a detector would connect.
* The source mentions, among related work, sketches from which IP addresses
  can be recovered. These sketches do not store keys, so they cannot do
  that.
* The design is generic SystemVerilog. It has no FPGA primitives and has not
  been placed and routed, so the source's LUT, FF, frequency and power figures
  have not been reproduced.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
`fe_ref_pkg`. That package is a reference model written from the behaviour
described above, not from the RTL; for instance, it computes the hash bit by
bit.

| testbench              | what it covers |
|------------------------|----------------|
| `tb_shift_hash`        | widths 4 and 5, directed and random keys |
| `tb_window_timer`      | tick spacing for periods 1, 7, 13; period 0 |
| `tb_sketch_buffer`     | random updates/reads/ticks, every field of every generation, count saturation, full age-out |
| `tb_metric_unit`       | average/min/max/count against integer division, empty and extreme entries, 16-cycle latency |
| `tb_sketch_lane`       | one lane end to end, collisions, 18-cycle latency |
| `tb_feature_extractor` | whole design at default parameters. Counts each mechanism and fails if any never happened: back-to-back headers, window ticks (tick spacing included), a tick in the same cycle as a header, reads, reads stalled by headers, hash collisions, count saturation, generations aging out |
| `tb_table_configs`     | the four (stages, hash width) configurations side by side |

Simulate any of them with Verilator 5 (the `-y` options let it find each
module by file name):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fe_pkg.sv tb/fe_ref_pkg.sv tb/tb_feature_extractor.sv \
    --top-module tb_feature_extractor
./obj_dir/Vtb_feature_extractor
```

Each testbench prints `TB_RESULT checks=N failures=M` at the end. The full
design test runs about 70,000 cycles in well under a second.

## Changing it

* Other header fields: edit the `LANE_*` tables in `fe_pkg`. Keys up to 4
  bytes, values 16 bits.
* Bigger sketches or more history: set `HASH_W` and `MEM_STAGES` on
  `feature_extractor`. Flip-flop storage grows as 4 × 2^HASH_W × MEM_STAGES
  × 80 bits. Past a few hundred entries, a RAM-based buffer with lazy aging
  (a per-entry window stamp) would be the better structure; it is not
  provided.
* Wider values: `VAL_W`, `CNT_W` and `SUM_W` in `fe_pkg`. The divider
  depth, and with it the latency, follows `VAL_W`.
