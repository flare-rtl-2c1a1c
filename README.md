# Flare processing unit: in-network allreduce in a programmable switch

An allreduce sums (or takes the minimum or maximum of) the same array held by
many hosts and gives every host the result. In a network, each switch of a
reduction tree can do part of that work. It combines the packets its child
ports send for the same slice of the array and forwards one packet: up to its
parent, or, at the root, back down to every child. The hosts then receive a
result that has crossed the network once, not log(N) times.

This RTL is the packet-processing unit such a switch carries beside its
routing pipeline. Packets picked out by a header rule are stored, spread over
many small processing clusters, and combined there in on-chip buffers. The
unit supports three ways of combining, chosen per allreduce:

* **Single buffer**: one buffer per block, taken under a lock. It uses the
  least memory but serialises the packets of a block.
* **Multiple buffers**: B buffers per block (2 or 4), so B packets of a block
  can be combined at once. The handler that finishes the block then merges
  the buffers.
* **Tree**: one buffer per input port, combined in a fixed binary tree. The
  order of operations never depends on packet arrival order, so the result
  is reproducible bit for bit. This matters for non-associative arithmetic.

The choice comes from the data size. Above 512 KiB it is single buffer;
above 256 KiB, four buffers; above 128 KiB, two buffers; otherwise tree. Tree
is also used whenever the user asks for reproducibility.

## Terms

* **Packet**: 1 KiB of payload, i.e. 256 lanes of 32 bits, moved as 64 rows of 16 bytes.
  Its header carries an EtherType, an allreduce id (2 bits) and a block id
  (16 bits).
* **Block**: the set of packets with the same allreduce id and block id. It
  holds one packet from each child port. The block is the unit of
  aggregation.
* **Children / parent / root**: per allreduce, the ports that feed this
  switch (a bit mask), the port towards the parent switch, and whether this
  switch is the root.
* **Cluster**: a scheduler with a DMA engine, 8 handler units (HPUs), a
  block table and the aggregation buffers. There are 64 clusters by default.
* **Handler unit (HPU)**: processes one packet at a time, from the claim of
  its block through the copy or combine to, possibly, sending the result.

## Data path through the unit

```
 ports ─► flare_parser ──bypass──────────────────────────────► routing
              │ match & installed
              ▼
        flare_pkt_memory (4096 × 1 KiB slots)
              │ descriptor {port, header, slot}
              ▼
        flare_pkt_sched ── block_id mod 64 ──► cluster c queue
              ▼
 ┌───────── flare_cluster (×64) ──────────────────────────────┐
 │ flare_cluster_sched: lowest idle HPU, 64-row DMA, free slot │
 │ flare_hpu_engine ×8 ◄──► flare_block_table (1 op/cycle)     │
 │        │  ▲                                                 │
 │        ▼  │  flare_l1_workmem (64 blocks × 8 buffers × 1 KiB)│
 │ flare_out_arb: whole result packets, round robin            │
 └─────────────────────────────────────────────────────────────┘
              ▼
        flare_out_arb over the clusters (command unit) ─► result + port mask
```

Every stream is valid/ready, one 16-byte row per clock, with `sop` and `eop`
marking the first and last row. Header fields travel beside every row.

1. **Parser** (`flare_parser`). On the first row it compares the EtherType
   with up to 8 rules written by the control plane. A packet that matches
   and belongs to an installed allreduce is processed. All other packets
   leave on the bypass stream unchanged. A processed packet is dropped whole
   when the packet memory has no free slot. The decision is made on the
   first row and held for the rest of the packet.
2. **Packet memory** (`flare_pkt_memory`). It holds 4096 slots of 1 KiB. A
   scanner checks 8 slots per cycle and always keeps one free slot reserved
   for the next packet, so a packet can start without waiting. After the
   last row, a descriptor is queued. Each cluster has a read port for its
   DMA and a port to free a slot.
3. **Packet scheduler** (`flare_pkt_sched`). It implements hierarchical
   first-come-first-served scheduling: block b always goes to cluster
   b mod 64, so all packets of a block meet in one cluster's memory. Packets
   enter that cluster's queue in arrival order. A full queue stalls the
   descriptor stream; this is counted.
4. **Cluster scheduler** (`flare_cluster_sched`). It takes the oldest
   descriptor and picks the lowest-numbered idle HPU. It copies the packet
   row by row into that HPU's private packet buffer (64 cycles). Then it
   frees the L2 slot and starts the HPU.
5. **Handler** (`flare_hpu_engine`) with the **block table**
   (`flare_block_table`). See the next section.
6. **Output**. Each cluster merges its HPUs' result packets with a
   packet-level round-robin arbiter (`flare_out_arb`), which never
   interleaves packets. The same arbiter merges the clusters. Each result
   carries a port mask: all children at the root, otherwise the parent
   port.

## The handler and the block table

This is the part that takes most care. Several HPUs of a cluster may work on
packets of the same block at once. In the original proposal they are
processor cores running handler code with atomics and locks. Here the HPUs
are fixed-function state machines, and all shared per-block state lives in
the **block table**. The table serves one request per cycle, chosen round
robin among the HPUs. A request is answered combinationally in the cycle it
is granted, and its state change takes effect at the next edge, so every
operation is atomic.

The block entry is `{allreduce id, block id / 64}`: 16 entries for each of
the 4 allreduces in each cluster. Each entry has 8 buffers of 1 KiB in the
cluster's working memory. Per entry the table keeps:

| state     | bits | meaning |
|-----------|------|---------|
| `claimed` | 8    | a packet from this port has arrived for this block |
| `done`    | 8    | the packet from this port is aggregated |
| `busy`    | 8    | buffer lock |
| `used`    | 8    | the buffer holds data |
| `ready`   | 16   | tree node complete (8 leaves + 4 + 2 + 1 nodes) |

Requests: `CLAIM`, `ACQ` (lock a buffer), `REL` (unlock and mark done),
`TREE` and `FREE`.

**Claim and retransmission.** An HPU first claims its port in the entry. If
the port's bit is already set, the packet is a retransmission of data already
counted. It is discarded, and the HPU is free again within a few cycles.

**Single and multiple buffers.** The HPU asks for a lock on the lowest free
buffer among the first B (B = 1 for single buffer). The table answers
whether the buffer is still empty. In that case the packet is copied;
otherwise it is combined lane by lane into the buffer. If no buffer is free,
the HPU retries every cycle; each refusal is a "lock wait". On release the
table reports whether all children are now done. The HPU that completes the
block merges every other used buffer into its own, in ascending buffer
order, then sends that buffer as the result and frees the entry.

**Tree.** The packet of port p is first copied to buffer p. The HPU then
walks up a fixed tree over the 8 ports:

```
level 0:  B1 += B0    B3 += B2    B5 += B4    B7 += B6
level 1:  B1 += B3                B5 += B7
level 2:  B1 += B5                 (result in B1)
```

At each level the HPU asks the table whether the partner node is complete.
If it is not, the HPU marks its own node complete and stops; the partner's
HPU will continue. If the partner is complete, the table names the
operation and the HPU carries it on up. The operation is one of:

* combine: both sides hold data;
* copy: only the source side has child ports;
* none: the partner subtree has no child ports.

Subtrees that contain no child port count as complete and empty, so any set
of children works. The shape, and therefore every rounding step, is the same
whatever the arrival order. This is the reproducibility guarantee.

**Timing.** An HPU moves one row per `OP_CYCLES` clocks (default 1). So a
1 KiB copy or combine takes 64 cycles, and sending the result takes 64
cycles plus any backpressure. Block-table requests take one cycle when
granted. With the defaults, a non-final packet takes about 67 cycles from
start to idle.

## Operators and data types

`flare_reduce_alu` works on one 16-byte row, as four 32-bit lanes:

* `OP_SUM_I32`, `OP_MIN_I32`, `OP_MAX_I32`: signed 32-bit;
* `OP_SUM_I16`: two packed 16-bit sums per lane;
* `OP_SUM_I8`: four packed 8-bit sums per lane.

Sums wrap around. Packets of narrower types carry more elements (512 int16
or 1024 int8). Floating point is not provided.

## Control plane

* `rule_*` writes the EtherType matching rules.
* `cfg_*` installs or removes an allreduce (`flare_ar_config`). A write
  gives the children mask, the parent port, the root flag, the operator, the
  total data size and the reproducibility request. The algorithm and buffer
  count are derived when the entry is written (`flare_algo_select`).

## Statistics

The top exports a `stats_t` struct with these counters:

* processed, bypassed and dropped packets;
* descriptor-stream stall cycles;
* discarded retransmissions;
* lock waits;
* multi-buffer merges;
* tree combines;
* result packets.

## Where this design departs from the original proposal

* **Handler units are fixed-function engines, not RISC-V cores.** The
  original runs C handlers on cores that take about 1024 cycles per packet.
  These engines carry out the same handler steps at 16 bytes per cycle
  (64 cycles). `OP_CYCLES` slows them down to study contention. Handler code
  memories, instruction caches and the shared L2 handler memory are
  therefore absent.
* **No floating point.** The FPU is not built, so fp32/fp16 reductions, for
  which reproducibility matters most, are not available. The tree order is
  still enforced for the integer types.
* **No sparse allreduce.** Only dense blocks are handled.
* **Single ingress stream.** All ports share one 16-byte-per-cycle input
  stream that carries the input port number. Routing tables, the crossbar
  and queueing are outside the unit, reached through the bypass and result
  streams.
* **Working memory.** 512 KiB of each cluster's L1 is used for buffers
  (64 entries × 8 buffers). Packet buffers sit inside the HPUs. The L1 and
  the packet memory are modelled as arrays with combinational read ports,
  not as banked SRAM with an interconnect.
* **Static entry mapping.** Each allreduce owns 16 entries per cluster, so
  1024 blocks per allreduce (1 MiB of int32) can be in flight. An entry is
  reused when its result has left. A later block that maps to a busy entry
  would be merged into it, so hosts must keep at most 1024 blocks per
  allreduce in flight.
* **Drop policy.** When the packet memory is full, the whole packet is
  dropped at its first row. The alternative, signalling congestion, is not
  built.
* **The packet memory occupancy count includes the one slot that is always
  held ready for the next packet.**

## Files

* `rtl/flare_pkg.sv`: types, sizes and enums shared by all modules.
* `rtl/flare_switch.sv`: the top. It has 64 clusters of 8 HPUs, 4096 packet
  slots and 8 rules by default.
* The other `rtl/` files are the blocks described above, plus
  `flare_fifo.sv`, a generic queue.
* Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
  `TB_RESULT checks=N failures=M` and has a watchdog.
* `tb/flare_switch_tb_core.sv` is the end-to-end test. It installs four
  allreduces (single buffer, tree, 4 buffers, 2 buffers; sum, max and int16
  sum) and sends 6 blocks of each, plus one retransmission and foreign
  packets. Each result is checked lane by lane against a reference computed
  in the testbench, including its destination. It also floods the unit with
  the output blocked, to force drops. It fails if any of these mechanisms
  never happened: lock wait, merge, tree combine, retransmission, bypass,
  scheduler stall, drop.
  * `tb/tb_flare_switch.sv` runs it on a small unit: 2 clusters of 4 HPUs,
    64 slots, `OP_CYCLES=4`.
  * `tb/tb_flare_switch_full.sv` runs it on the unit with every parameter at
    its default. It skips the flood and stall checks, which a 64-cluster
    unit does not reach with this traffic.

## Simulating

With verilator 5 (the package first, then the testbench and the RTL):

```
verilator --binary --timing -Wno-fatal --top-module tb_flare_switch \
    rtl/flare_pkg.sv tb/tb_flare_switch.sv tb/flare_switch_tb_core.sv rtl/*.sv
./obj_dir/Vtb_flare_switch
```

Replace the top module and testbench file to run another test. The
full-size test builds and runs in well under a minute. Synthesis of the full
top is slow because 64 clusters are flattened, each with its block tables and
engines. One cluster alone synthesises in seconds.
