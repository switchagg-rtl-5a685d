# SwitchAgg switch data plane in SystemVerilog

In-network aggregation means a switch merges key-value pairs from many
senders before they reach a reducer. That only pays off if the switch can
hold as many different keys as the job produces. This design does it with
two levels of hash table. Every key-length group has a small on-chip table
in its own **front-end processing engine (FPE)**. Behind them all sits one
**back-end processing engine (BPE)**, whose table lives in gigabytes of DRAM.

A pair that collides in an FPE is evicted into the BPE. It is not sent on
to the next hop. The FPEs therefore run at one pair per cycle, and the DRAM
latency is hidden behind the eviction path. When every child of an
aggregation tree has sent its last packet, the switch flushes both levels.
It then sends the merged pairs to the tree's parent port in ordinary
aggregation packets, and the last of them carries an end-of-task flag.

The RTL follows the switch of the SwitchAgg paper ("SwitchAgg: A Further
Step Towards In-Network Computation"). It uses the prototype's sizes:

- 4 ports with a 128-bit datapath at 200 MHz;
- keys of 1–64 bytes in 8 groups of 8 bytes each;
- 8 FPEs sharing 32 MB of on-chip table;
- one BPE over 8 GB of DRAM.

Where the paper gives only a block's function, the block here is the
simplest one that does the job. Those places are listed under
[Departures and own choices](#departures-and-own-choices).

## Packets on the wire

Each port carries a stream of beats: `beat_t = {data[127:0], sop, eop}`.
Byte *i* of a beat is `data[8i+7:8i]`. Beat 0 is the L2 header:

| bytes | field |
|---|---|
| 0–5 | destination MAC (normal packets are routed on it) |
| 6–11 | source MAC |
| 12–13 | ethertype (not interpreted) |
| 14 | packet type: 0 normal, 1 Launch, 2 Configure, 3 Aggregation, 4 Ack type 0, 5 Ack type 1 |
| 15 | reserved |

**Aggregation payload** (from beat 1):

- a 4-byte header `<TreeID, EoT, Operation, NumPairs>`;
- then NumPairs packed pairs, each `<KeyLen, ValLen=4, key bytes, 4-byte little-endian value>`.

Operations are SUM (0, wrapping), MAX (1) and MIN (2), on signed 32-bit
values.

**Configure payload**:

- byte 0 is the number of trees;
- from byte 4, one 4-byte entry per tree: `<TreeID, Children, ParentPort, reserved>`.

The switch answers each Configure packet with an Ack type 1 on the port
the Configure packet came in on.

## Block structure

```
 rx[p] ─ input FIFO ─ header_extraction ─┬─ agg ─ payload_analyzer[p] ─┐
                                         ├─ cfg ─┐                     │ pairs + group
                                         └─ norm ┼─┐                   ▼
                      stream_mux(4→1) ───────────┘ │              crossbar 4×8
                      config_unit ◄── EoT reports  │                   │
                         │  tree table, flush req  │        FIFO ─ fpe[g] (g = 0..7)
                         │  Ack                    │                   │ evictions / flush
                         │        stream_mux(4→1) ─┘              pe_scheduler
                         │        routing_table                        │
                         │             │                              bpe ── mem_ctrl ── DRAM (ports)
                         │             │                               │ evictions / flush
                         │             │                          agg_packer
                         ▼             ▼                               ▼
                      packet_forwarding: 3→1 merge, output FIFO per port ─ tx[p]
```

| module | role |
|---|---|
| `switchagg_pkg` | widths, packet/operation encodings, beat/pair/slot/bucket types, `key_group`, `key_hash` |
| `sync_fifo` | FIFO for the input, engine and output queues; counts writes and cycles found full |
| `header_extraction` | steers each packet by its type byte, one register stage |
| `stream_mux` | packet-granular round-robin N→1 merge |
| `routing_table` | exact match on destination MAC; a miss drops the packet and is counted |
| `config_unit` | tree table, memory division, Ack generation, EoT counting → flush request |
| `payload_analyzer` | cuts an aggregation payload into one zero-padded pair per cycle |
| `crossbar` | pair from any port to the FPE of its group; per-output round-robin |
| `fpe` | on-chip hash table of one group: aggregate / insert / evict, flush sweep |
| `agg_unit` | SUM/MAX/MIN of two values |
| `pe_scheduler` | round-robin choice of which FPE hands its evicted pair to the BPE |
| `bpe` | DRAM hash table for all groups; BPE-side evictions; runs the whole flush |
| `mem_ctrl` | command and response FIFOs in front of the DRAM with read credits |
| `agg_packer` | packs result pairs into aggregation packets to the parent port; EoT on the last |
| `packet_forwarding` | merges normal, aggregation and Ack packets into the output queues |
| `switchagg_top` | wires the above together |

Three things stay outside the top and are brought out as ports:

- the DRAM (command/response ports; `tb/dram_model.sv` models it, with 25-cycle reads);
- the routing-table write port, which the controller uses;
- the statistics counters.

The Ethernet MAC/PHY is replaced by the beat streams.

## The front-end engine (`fpe`)

Each FPE serves one group: keys of 8g+1 … 8g+8 bytes. A slot is
`{valid, key[8(g+1) bytes], klen, value, op}`, so the slots are just as
wide as the group's keys need. Shorter keys are zero-padded. A bucket has
`WAYS = 4` slots, and the table holds the largest power of two of buckets
that fits in `MEM_BYTES` (4 MB by default):

- 65536 buckets for group 0;
- 8192 buckets for group 7.

The FPE is a two-stage pipeline that takes one pair per cycle:

1. **Hash and read.** `key_hash` is computed, and the bucket index is the
   hash inside the tree's region (described below). The bucket is read
   from the synchronous RAM.
2. **Compare and write.** All four slots are compared in parallel.
   - On a **hit**, the slot's value goes through `agg_unit` and is written
     back.
   - On a **miss**, the pair goes into the first free slot.
   - If the bucket is **full**, the pair replaces the last slot, and the old
     occupant is sent to the BPE (an **eviction**).

A pair that follows the previous one into the same bucket would read stale
data. A **bypass** register avoids this by forwarding the bucket written in
the previous cycle. So back-to-back pairs to one key still run at full
rate.

The engine stalls only when its eviction register is still occupied,
because the scheduler has not yet taken the previous victim. The FIFO in
front of the engine absorbs these stalls. Its full counter is the
"FIFO-full times" statistic, and each FIFO's write and full counts are
outputs of the top.

After reset the engine clears one bucket per cycle, 65536 cycles at full
size, and accepts pairs only after that.

**Tree regions.** The configuration gives each tree a power-of-two share:

- `shift = ceil(log2(number of trees))`;
- `slot` = the tree's position in the Configure list.

Within its share, the bucket index is
`slot · (BUCKETS >> shift) + (hash mod (BUCKETS >> shift))`. Trees
therefore never touch each other's buckets, and flushing one tree leaves
the others' pairs in place. The engines accept no new pairs while they
sweep, so traffic of other trees waits in the queues for the duration of
the flush.

**Flush.** The engine walks the tree's buckets. It sends every valid slot
to the BPE through the same eviction path, then clears the bucket. It
reports done once its last pair has left.

## The back-end engine (`bpe`) and its flush

The BPE's DRAM is divided in three levels:

1. among trees, the same way as the FPE tables;
2. each tree's share into 8 equal group regions;
3. each group region into buckets with a power-of-two stride that holds 4
   slots of that group (64 bytes for group 0, 512 bytes for group 7).

So the address is *tree base + group base + index · stride*. One DRAM word
carries one bucket (`bucket_t`).

The BPE takes one evicted pair at a time:

1. read the bucket;
2. compare the four slots;
3. aggregate, insert, or evict the last slot;
4. write the bucket back.

With the 25-cycle DRAM model this takes 29 cycles per pair, against the
paper's 33. The BPE's own evictions go to `agg_packer`. So a key that finds
no room in either level still leaves the switch, to be merged further up
the tree.

The BPE also runs the **flush sequence** of a tree:

1. **Wait for the front end to go quiet.** The crossbar, the FPE queues,
   the FPEs and the analyzers' outputs must all be empty. Otherwise pairs
   of the tree that are still in flight would miss the flush.
2. **Flush the FPEs.** Pulse `flush_start` to all FPEs and absorb what they
   evict, until every FPE reports done and the scheduler is empty.
3. **Sweep the tree's DRAM region** with pipelined reads, one per cycle
   through `mem_ctrl`'s credits. Every valid slot goes to the packer, and
   zero is written back to buckets that held anything.
4. **Signal `flush_done`.** The packer then closes the tree's last packet
   with EoT = 1.

At 8 GB with one tree the sweep is about 4.2·10⁷ bucket reads. That is
the same order as the 3.125·10⁷ cycles the paper reports for its flush
(0.16 s at 200 MHz; the paper itself quotes about 78 ms for it).

## Configuration and end of task (`config_unit`)

`config_unit` stores, per tree:

- the number of children;
- the parent port;
- its memory slot and shift.

Each analyzer reports the EoT flag of every aggregation packet, and
several reports can arrive in one cycle. When the count for a tree reaches
its number of children, the unit raises a flush request for that tree, and
the BPE carries it out.

## Payload analyzer

Beats are appended to a 128-byte realignment buffer. Whenever the buffer
holds a whole pair, the pair is cut off the front, zero-padded to 64
bytes, tagged with its group `ceil(KeyLen/8) − 1`, and emitted, one per
cycle. A pair with key length 0 or over 64, or a value length other than
4, ends parsing of that packet and increments `pa_err_count`.

A 10 Gb/s port delivers a 22- to 70-byte pair (16–64-byte keys) every 4.4
cycles or more at 200 MHz, so one pair per cycle keeps up with line rate.

## Departures and own choices

Where the paper gives no detail, this design chose the following:

- **Byte layouts:** the L2 beat, 1-byte header fields, the Configure
  entry's extra ParentPort byte, and little-endian values. The paper keeps
  a parent port per tree but lists only TreeID and number of children in
  the Configure packet.
- **Hash function:** an XOR-rotate fold with an xorshift-multiply
  finaliser. The paper only says all engines share one hash function.
- **Buckets:** 4 slots per bucket (the number drawn in the paper's
  eviction figure); the last slot is the victim; power-of-two bucket counts
  and strides.
- **Memory division:** power-of-two shares rather than exact 1/n shares
  for trees.
- **FIFO depths, policy and table size:** FIFO depths are 16, 16 and 64
  beats; arbitration is round-robin everywhere; the routing table has 16
  entries, exact match on MAC, and drops misses.
- **Flushing:** how the FPEs are flushed, and waiting for a quiet front end
  before a flush.
- **Result packets:** sent with destination MAC 0 to the parent port, at
  most 1500 bytes or 64 pairs each.
- **Latencies:** the paper's per-stage latencies are not copied. Here:
  - header analysis 1 cycle (the paper gives 3);
  - crossbar 1 cycle (the paper gives 2);
  - FPE 2 cycles (the paper's text says two cycles, but its latency table
    gives 10 + 18 + 5);
  - BPE 29 cycles (the paper gives 33).
- **Not built:**
  - handling of Launch and Ack type 0 beyond static routing;
  - multi-stage match-action tables in the normal pipeline;
  - the Ethernet MAC/PHY, the DDR3 controller and PHY, and the controller
    software.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`, and
`tb/tb_util_pkg.sv` holds the packet builders and parsers. Every testbench
prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/switchagg_pkg.sv tb/tb_util_pkg.sv tb/tb_switchagg_top.sv \
    --top-module tb_switchagg_top
obj_dir/Vtb_switchagg_top +verilator+rand+reset+2
```

- `tb_switchagg_top` runs the whole switch with small tables: 8 buckets
  per FPE, 64 KB of DRAM and 4-deep engine queues. The controller installs
  a tree with three children. Three mappers then send 36 packets of pairs
  of every key length, and the test waits for the EoT packet. It checks
  that the per-key sums leaving the parent port equal the sums sent. It
  also requires each mechanism to have happened at least once, and prints
  how often:
  - FPE hit, insert, eviction and bypass;
  - a full engine queue (stall);
  - BPE hit, insert and eviction;
  - the flush;
  - a route miss and the Ack.
- `tb_switchagg_full` runs the switch at its default sizes (32 MB of FPE
  tables, 8 GB of DRAM): table clearing, configuration, routing and the
  aggregation of about 800 pairs, all held on chip. It leaves out the
  end-of-task flush: sweeping 8 GB of DRAM takes about 4·10⁷ cycles,
  which the simulator cannot reach in reasonable time. So the flush has
  been simulated only with the 64 KB DRAM of `tb_switchagg_top`. The
  largest DRAM flushed in simulation is the 64 KB of that test.
- `tb_switchagg_workload` runs the two workload shapes of the paper's
  evaluation at a small scale. Keys are 16–64 bytes, drawn from 3000 keys
  either uniformly or Zipf-distributed with skew 0.99, 4800 pairs each,
  as two trees in turn. The tables are reduced to 64 buckets per FPE and
  256 KB of DRAM, so the key variety overflows the on-chip tables as it
  does in the paper. The test checks that per-key sums are conserved and
  that the skewed set is reduced more. It prints the reduction ratio and
  the engine-queue write and full counts. In one run the uniform set was
  reduced by 43% and the Zipf set by 74%.
- `tb_switchagg_pkg` checks the group mapping and the hash function's
  dependence on every key byte and its spread.
- Block tests check the paper's rates where it gives them:
  - the payload analyzer sustains line rate;
  - the FPE takes one pair per cycle;
  - a BPE pair takes at most 33 cycles.

The simulator is two-state. Everything the logic reads is reset, so the
result does not depend on `+verilator+rand+reset`.
