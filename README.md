# Flow-table lookup with range-based ternary search trees

An SDN switch has to find, for every packet, the highest-priority flow
whose match fields cover the packet header. A 15-field OpenFlow header is
356 bits wide. The source and destination addresses are matched as prefixes
and every other field exactly. This design does the lookup with no TCAM and
no hashing. Each flow is turned into a pair of key ranges, the ranges are
stored in balanced ternary search trees, and every tree level is given its
own pipeline stage with its own memory. Two headers enter per clock and two
results leave per clock, a fixed number of cycles later.

The main idea is the **range-based ternary search tree (RTST)**. A prefix
such as `10.1.0.0/16` is the interval `[10.1.0.0, 10.1.255.255]`. Within a
set of disjoint prefixes, the intervals can be sorted. A node holds two of
them, *left < right*, so one visit sorts a key into one of four cases:

| case | key vs. node | next step |
|---|---|---|
| 1 | below the left interval | go to child 3A |
| 2 | between the two intervals | go to child 3A+1 |
| 3 | above the right interval | go to child 3A+2 |
| 4 | inside the left or right interval | match, stop |

The tree is complete and stored level by level. The three children of the
node at address A of level i sit at addresses 3A, 3A+1 and 3A+2 of level
i+1. No pointers are stored, and the next address costs one shift and one
add. With LEVELS levels, a tree holds up to 3^LEVELS − 1 intervals.

## The parts

```
                 +--------------------- flow_group_pipeline (x K) ----+
pkt_hdr[0..1] -->|  SA  -> rtst_pipeline (SST)  --+                   |
                 |  rest-> rtst_pipeline (DST)  --+-> same flow? ---->|--> match_selector --> res_*
                 +----------------------------------------------------+
rtst_pipeline = LEVELS x rtst_stage
rtst_stage    = rtst_stage_mem (dual port) + rtst_write_bubble + 2 x rtst_next_addr
```

| module | role |
|---|---|
| `rtst_pkg` | default sizes, the multiplexer-select encoding, and `pow3`/`bits_for`/`max2` |
| `rtst_next_addr` | two interval comparators, a priority encoder and a 4:1 multiplexer (combinational) |
| `rtst_stage_mem` | dual-port memory of one tree level, 3^level nodes, synchronous read |
| `rtst_write_bubble` | two-entry table of pending node writes for one stage |
| `rtst_stage` | one tree level for both pipeline lines |
| `rtst_pipeline` | LEVELS stages that search one tree, two keys per clock |
| `flow_group_pipeline` | source tree and destination tree of one flow group, plus the result check |
| `match_selector` | picks the highest-priority hit among the K groups |
| `rtst_flow_lookup` | top level: K groups, the selector, and the update port |

### Flows, groups and the two trees

A search tree needs its intervals to be disjoint, but a flow table is not.
The table is therefore split into **K groups**. Inside a group, no two flows
overlap. Every group gets its own pipeline, and all K pipelines see every
header.

A flow is not one interval, though. It is a source prefix times a
destination/exact key. Each group uses two trees:

* The **source search tree (SST)** holds the source-address prefixes of the
  group's flows.
* The **destination search tree (DST)** holds the rest of each flow. That is
  the 292 exact-match bits followed by the destination prefix, one 324-bit
  key whose prefix length is 292 + the destination prefix length.

Both trees are searched at once, in lock step. Each stored interval carries
the identifier of its flow. A group reports a hit only if both trees hit and
both name the **same** flow. That is why, inside a group, the source
prefixes must be pairwise disjoint and so must the DST keys. Building groups
that meet this is the control plane's job.

### Entry and node format

Each interval (a "data field") is stored as

```
{ valid (1) | flow id (FLOW_W) | prefix length (PLEN_W) | value (KEY_W) }
```

A node is `{right entry, left entry}`. The node widths are:

| tree | entry fields (valid + flow + length + value) | node width |
|---|---|---|
| SST | 1+10+6+32 | 98 bits |
| DST | 1+10+9+324 | 688 bits |

The comparators rebuild the interval `[value & mask, value | ~mask]` from
the prefix length. An exact field is simply a full-length prefix.

A cleared valid bit deletes an entry. The entry keeps its place in the tree,
so the tree stays sorted. If a key falls inside an invalid interval, the
search ends with no hit. All other intervals are disjoint from that one, so
nothing further down could match.

The memories start all-zero. A zero entry is invalid and covers every key,
so an empty subtree also ends a search as a miss. A node with only one entry
holds that entry twice.

### One stage, cycle by cycle

The registers are at the memory read. During the cycle in which a line
enters stage i, the following happens:

1. The line's node address drives its port of the level-i memory. Line 0
   uses port A and line 1 uses port B.
2. At the clock edge, the node is read. The key, address, ready and hit bits
   are registered next to it.
3. In the following cycle, `rtst_next_addr` compares the key with both
   entries:
   * The priority encoder takes a finished search first, then a match, then
     cases 1, 2 and 3.
   * The multiplexer sends out 3A, 3A+1, 3A+2, or the flow id (the
     "next hop") once the search is done.
   * That output is the address for stage i+1.

After a match, the address bus carries the flow id, and the ready bit turns
off every later memory read for that line. A tree of LEVELS levels therefore
gives its result LEVELS cycles after the key enters. The group adds one
register and the selector adds one more. So `res_*` appears **LEVELS + 2
cycles** (8 at the defaults) after `pkt_valid && pkt_ready`, in the order
the headers came in. A table smaller than the trees can hold fills only
their upper levels, so its searches end earlier and the later stages just
forward the result: the latency stays fixed, whatever the table size.

The two lines never interact. The only thing they share in a stage is the
dual-port memory, one port each. That gives two lookups per clock.

### Priority

`match_selector` keeps, per line, the hit with the **smallest flow id**. Flow
ids are assigned in priority order, with 0 the highest. It also reports
which group won, and a `res_multi` flag that is set when more than one group
hit.

### Updating the table while it runs: write bubbles

The control plane never writes a memory directly. Every stage has a
**write bubble table**: two entries of `{node address, new node, write enable}`,
one for each memory port. An update works as follows:

1. Work out in software which nodes change:
   * **Modification** rewrites a flow id.
   * **Deletion** clears a valid bit.
   * **Insertion** reuses an invalid entry, fills a node that holds one
     entry twice, or adds a leaf under a node.
2. Load those nodes into the tables of the stages they belong to. Use
   `cfg_we`, `cfg_group`, `cfg_tree`, `cfg_stage`, `cfg_entry`, `cfg_addr`,
   `cfg_data` and `cfg_wen`. An SST node uses the low 98 bits of `cfg_data`.
3. Raise `bubble_req` for one cycle. `pkt_ready` is low in that cycle, so
   that input slot carries no header: it is the bubble.
4. As the bubble passes stage i, the enabled entries of that stage's table
   are written through both memory ports. Their write-enable bits then clear.

Headers that entered before the bubble see the old table at every level, and
headers that entered after it see the new one. A packet never sees half an
update. `upd_done` pulses when the bubble leaves the last stage. Do not
reload a table before the previous bubble has passed it; waiting for
`upd_done` is always safe.

Building the trees, splitting the table into groups, and rebuilding a
subtree when an insertion does not fit are all control-plane software and
are not part of this RTL. The testbench reference model (`tb/rtst_tb_pkg.sv`)
does all of this except subtree rebuilds. It builds a complete tree from n
sorted intervals by placing entries ⌊n/3⌋ and ⌊2n/3⌋ in the root and
recursing on the three sub-lists.

## Top-level interface

| port | width | meaning |
|---|---|---|
| `pkt_valid[2]`, `pkt_hdr[2]` | 1, 356 | two headers per clock: `[355:324]` source address, `[323:32]` exact fields, `[31:0]` destination address |
| `pkt_ready` | 1 | low while a write bubble is inserted |
| `res_valid/hit/flow/group/multi[2]` | 1/1/10/2/1 | result per line |
| `cfg_*`, `bubble_req`, `upd_done` | | update port, see above |

The parameters, with their defaults, are:

* `K_GROUPS` = 4
* `LEVELS` = 6 (728 entries per tree, 2912 flows in all)
* `HDR_W` = 356
* `SA_W` = 32
* `FLOW_W` = 10

The reset, `rst_n`, is asynchronous and active-low and clears the pipeline
flags. Memory contents are set by their initial value (all zero) and by
write bubbles.

At the defaults the design has 8 × 6 stage memories, 1,144,416 bits in all,
and about 50 k flip-flops.

## Where this departs from the published architecture

* **Number of groups.** It is not fixed there. K = 4 was chosen so that 1K
  flows fit 256 per group.
* **Tree height.** The bound given there is ⌊log₃ N⌋ levels, but two
  intervals per node need ⌈log₃(N+1)⌉. 256 flows per group need 6 levels,
  because 5 levels hold only 242.
* **Storage per flow.** It is 393 bits instead of 356. The extra bits are
  the valid bits, the prefix lengths and the flow ids, all of which are
  needed to match and to report a flow. The published memory efficiency of
  44.5 bytes per flow is therefore not reached. This design stores 49.1
  bytes per flow, plus unused node slots.
* **Valid bit.** There is one per entry, not one per node, so one of a
  node's two entries can be deleted alone.
* **Tying SST to DST.** The architecture says the destination tree is
  searched only when the source matched. Here both are searched in parallel,
  and the group hit requires the same flow id from both. How the two results
  are tied to one flow is this design's choice.
* **Comparator wiring.** The drawing of the next address generator can be
  read as comparing the right data the wrong way round. The prose ("key
  greater than the right data" selects 3A+2) was followed.
* **Header field order and priority encoding** (smallest id wins) are this
  design's choices.
* **The write bubble table** sits beside the memory it writes, rather than
  in the stage before it. The write happens in the same cycle either way.
* **Clock rate.** Not claimed. The logic per stage is one memory read plus
  two 324-bit interval comparisons.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
Each has a cycle watchdog. The testbenches that use the reference model need
`tb/rtst_tb_pkg.sv`. A run with plain Verilator, from the project root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rtst_pkg.sv tb/rtst_tb_pkg.sv rtl/*.sv tb/tb_rtst_flow_lookup.sv \
    --top-module tb_rtst_flow_lookup -o sim
./obj_dir/sim
```

| testbench | size | what it checks |
|---|---|---|
| `tb_rtst_next_addr` | default | every case, priority, invalid entries, a worked example, random nodes |
| `tb_rtst_stage_mem` | small | both ports, read latency, disabled ports, out-of-range reads |
| `tb_rtst_write_bubble` | default | load, fire, clearing of the write enables, load during a bubble |
| `tb_rtst_stage` | default | one level: both lines, memory-off after a match, bubble writes |
| `tb_rtst_pipeline` | 4 levels, 16-bit keys | lookups, latency, where each search ends, the number of reads, delete/modify/insert |
| `tb_flow_group_pipeline` | 4 levels, 48-bit rest | SST/DST pairing, cross packets, latency |
| `tb_match_selector` | default | minimum id, group, multi flag |
| `tb_rtst_table_sizes` | **full default size** | tables of 1024, 512, 256 and 128 flows loaded in turn; every lookup checked; searches end no deeper than each table's tree height |
| `tb_rtst_flow_lookup` | **full default size** | 1024 flows in 4 groups, two headers per clock, multi-group matches, live updates |

`tb_rtst_flow_lookup` checks every result against a linear scan of the
whole table as it stood when the header entered. It counts each mechanism
and fails if one never happens:

* hits and misses;
* multi-group matches;
* searches that end early or in the last stage;
* write bubbles and stalled input cycles;
* modifications, deletions, and both kinds of insertion;
* two-header cycles.

A typical run makes about 11,700 checks. Building it with Verilator takes
about a minute, and the simulation takes seconds.
