# Diba Q3 instance: RTL of a reconfigurable stream processor

Diba runs relational queries on data streams. The chip is a grid of small
switches and "topology bricks". Each brick holds a handful of processing
units. Tuples flow through the grid as 64-bit segments tagged with a stream
ID, and routing tables in the switches decide which units see which stream.
Because those tables, and the constants of the operators, are written by
instructions that travel in-band with the data, a different query can be
mapped onto the same hardware without rebuilding it.

This repository implements, in synthesizable SystemVerilog, the instance
the Diba paper evaluates: TPC-H query 3 on one column of four bricks.

```
select l_orderkey, sum(l_extendedprice*(1-l_discount)) as revenue, o_orderdate, o_shippriority
from customer, orders, lineitem
where c_mktsegment = S and c_custkey = o_custkey and l_orderkey = o_orderkey
  and o_orderdate < D1 and l_shipdate > D2
group by l_orderkey, o_orderdate, o_shippriority
order by revenue desc, o_orderdate          -- first 10 rows
```

The joins are sliding-window stream joins, as in the paper. A result
exists only if its partner tuples were still among the last W tuples of
their streams when it was formed.

## 1. Segments, streams and instructions

Every link carries one 64-bit segment per transfer, with a valid/ready
handshake. A transfer happens on a rising edge where both valid and ready
are 1. `diba_pkg` defines the segment format:

| bits    | meaning                                                |
|---------|--------------------------------------------------------|
| [63:60] | stream ID                                              |
| [59:0]  | payload (low 60 bits of a tuple, or the next 60 bits)  |

The stream IDs are:

| ID  | stream                                   | segments per tuple |
|-----|------------------------------------------|--------------------|
| 0   | processing-block instruction             | 1 |
| 1   | network instruction                      | 1 |
| 2   | LINEITEM                                 | 2 |
| 3   | CUSTOMER                                 | 1 |
| 4   | ORDERS                                   | 2 |
| 5   | END_MESSAGE (end of a batch)             | 1 |
| 6   | JOINED (output of the join)              | 2 |
| 7   | GROUPS (output of the group-by)          | 2 |
| 8   | RESULT (output of the order-by)          | 2 |
| 15  | NULL: continuation segment of a tuple    | – |

IDs 0–5 are the ones the paper prints for Q3. IDs 6–8 and 15 are this
design's choices; the paper names a NULL ID but does not give its value.

A tuple longer than 60 bits is sent as a head segment with its stream ID,
followed by continuation segments carrying the NULL ID. The widths come
from the paper's schema table and are defined as packed structs, least
significant field first:

| struct       | fields                                                        | bits |
|--------------|---------------------------------------------------------------|------|
| `lineitem_t` | orderkey 24, extendedprice 32, discount 32, shipdate 21       | 109 |
| `customer_t` | custkey 24, mktsegment 32                                     | 56  |
| `orders_t`   | orderkey 24, custkey 24, orderdate 21, shippriority 6         | 75  |
| `joined_t`   | orderkey, extendedprice, discount, orderdate, shippriority    | 115 |
| `group_t`    | orderkey, orderdate, shippriority, revenue 64                 | 115 |

Prices are integer cents and discounts integer hundredths. Revenue is
therefore computed as `price * (100 - discount)`, which keeps it exact.

**Network instruction** (stream 1):

| bits    | GSwitch-A                  | LSwitch                          |
|---------|----------------------------|----------------------------------|
| [59:52] | B-ID (target block)        | B-ID                             |
| [51:48] | stream to route            | stream to route                  |
| [47:46] | port mask {east, south}    | filter bits [47:40]              |
| [45:42] | segments per tuple         | (filter, continued)              |

In the LSwitch filter, bit k means output port k+1. Port 1 is the bypass.

**Processing-block instruction** (stream 0): B-ID in [59:52], a 52-bit
operand in [51:0]. The selections use the operand as their constant.

Block IDs in this instance:

| block                 | B-ID                   |
|-----------------------|------------------------|
| GSwitch k             | k                      |
| LSwitch of row r      | 16 + r                 |
| slot s (0–3) of row r | 32 + 4·(r−1) + s       |

The field order follows the paper's instruction figure. The bit positions
and the numbering are this design's own.

## 2. The network

**GSwitch-A** (`diba_gswitch_a`): two inputs (north, west) and two outputs
(south, east).
- Every port has a small FIFO (4 entries).
- A 16-row table gives, per stream ID, a port mask and a segment count.
- The switch arbitrates round-robin between its inputs per tuple. Once it
  has taken the head of a tuple, it stays on that input for the remaining
  segments of the tuple, so tuples never interleave. A head is sent to
  every selected output at once, so both must have room. A mask of 00
  discards the tuple.
- A network instruction that carries the switch's own B-ID rewrites one
  row and is consumed.
- After reset, streams 0 and 1 go south and all others are discarded.
  Instructions for switches further down therefore travel south, into the
  next brick.

**LSwitch** (`diba_lswitch`): one input and N outputs, one per slot.
- The table holds one filter bit per slot, and a segment is copied to every
  slot in its filter.
- A continuation segment follows the ports of its head, because this table
  has no segment count.
- Its own network instructions are consumed. Network instructions for other
  blocks are broadcast to every slot, as the paper specifies. The bypass
  slot forwards them; operators drop them.

**Collector** (`diba_collector`): merges the N slot outputs round-robin.
- After a head segment it stays on the same slot until the tuple's
  remaining segments have passed. The count comes from the stream ID.
- The paper releases the lock when a segment with a real stream ID
  appears. That rule would hang on a slot that falls silent after its last
  tuple, so this design counts segments instead.

**Bypass** (`diba_bypass`): one elastic register stage.

**Network interface** (`diba_ni_ser`, `diba_ni_des`): turns a segment into
64/LINES beats and back again. The top uses LINES = 16 on every
switch-to-brick link, so a link moves one segment every 4 cycles. The
paper proposes such pairs to save wires but does not give a width.

**Topology brick** (`diba_brick`): LSwitch → N slots → Collector. The slot
contents are a build-time parameter, `KINDS`, with 4 bits per slot from
`pu_kind_e`.

## 3. The Q3 instance (`diba_top`)

```
 in ──N[GSW1]──S── NI ── brick 1: Bypass | Sel l_shipdate> | Sel c_mktsegment= | Sel o_orderdate<
 in2──W   │E                                    │
        W[GSW2]N──────────────────────────────────┘
          │S── NI ── brick 2: Bypass | CMJoin | Bypass | Bypass
        ...                      (brick 3: GroupBy-Agg, brick 4: OrderBy)
        [GSW5]──E── out (results)
          └─S── out2
```

- GSwitch k's south output feeds brick k, through an NI pair.
- Brick k's output feeds GSwitch k+1's north input.
- The east outputs chain the switches, so `in2` is a second ("open")
  entrance.

To run Q3, a host sends the following, all on `in`:
1. GSwitch 1–4: route streams 2, 3, 4 and 5 south, with 2, 1, 2 and 1
   segments. GSwitch 3 also routes stream 6 south, GSwitch 4 stream 7, and
   GSwitch 5 routes streams 8 and 5 east.
2. LSwitch 1: LINEITEM → slot 2, CUSTOMER → slot 3, ORDERS → slot 4,
   END → bypass. These are the paper's values.
3. LSwitches 2–4: every stream the row needs → slot 2.
4. The three selection constants, as block instructions for B-IDs 33, 34
   and 35.
5. The data, then END.

Results leave on `out` as RESULT tuples in rank order, followed by END.
`pu_overflow` shows which slot is using an overflow buffer or has lost
data.

A new batch can follow at once with different constants. The join windows
keep their contents; the group-by and order-by start empty.

**Caution:** END takes the bypass of brick 1, while the data takes the
selections. If END is sent straight after the last tuple, it can overtake
tuples still inside a selection. A source must let brick 1 drain first,
which takes a few tens of cycles. The paper does not discuss this.

## 4. Hash stream join unit (`diba_hbsj`)

This is the part of the design with the most state. One unit keeps the
last W tuples of one stream and finds, for a probe key, every stored
tuple with that key. Its structures:

- **Four storage tables**: X.L0, X.L1, Y.L0 and Y.L1, each with HT rows and
  a valid bit per row. Table X is indexed by H1(key) and table Y by
  H2(key). H1 and H2 are MurmurHash3 (x86, 32-bit) of the key with two
  seeds, using the low log2(HT) bits (`diba_murmur3`, combinational).
- **Overflow buffer**: a circular FIFO of OVF entries. A tuple whose four
  candidate slots are all taken goes here.
- **Ordered window**: a circular buffer of W entries, in arrival order. For
  each stored tuple it records a 4-bit location {valid, in overflow buffer,
  table Y, lane 1} and the row.

**Store**:
1. If the window is full, the oldest entry expires first. It either clears
   a valid bit or advances the overflow FIFO's tail; overflow entries
   necessarily expire in FIFO order.
2. The tuple goes into the first free slot among X.L0, X.L1, Y.L0 and Y.L1.
3. If no slot is free, it goes into the overflow buffer.

A store costs 2 cycles, or 3 with an expiry.

**Probe**:
1. The four candidate slots are compared in one cycle.
2. The hits are returned one per cycle.
3. The whole overflow buffer is scanned, one entry per cycle, and its hits
   are returned.

A probe costs 2 + hits + overflow occupancy cycles, plus output stalls.
The scan is why a small hash table is slow: with few rows, many tuples
land in the overflow buffer, and every probe walks it.

**Memory and reset**: the tables share one memory addressed by
{table, row}. The valid bits form a second memory with a single write
port. After reset the unit clears them, one per cycle, for 4·HT cycles;
`cmd_ready` stays low during the sweep. At the default HT = 2048 this is
8192 cycles.

## 5. The three-way join pipeline (`diba_cmjoin_q3`, `diba_cmj_stage`)

The Q3 join graph is a chain: lineitem joins orders on orderkey, and
orders joins customer on custkey. The pipeline has three stages in the
order ORDERS → CUSTOMER → LINEITEM, with no path back:

| stage | windows (hash units)               | key(s)               |
|-------|------------------------------------|----------------------|
| O     | ORDERS, twice                      | o_orderkey, o_custkey |
| C     | CUSTOMER                           | c_custkey            |
| L     | LINEITEM                           | l_orderkey           |

Everything moves as work items, `cmj_item_t`: a kind (NEW, MID, FINAL or
END), the stream of the tuple that started it, and room for one tuple of
each table. New tuples and partial results share one in-order item stream.

| item            | stage O                                  | stage C                            | stage L                 |
|-----------------|------------------------------------------|------------------------------------|-------------------------|
| NEW orders      | store in both units, forward             | probe o_custkey → MID              | –                       |
| NEW customer    | probe the o_custkey unit → MID, forward  | store                              | –                       |
| NEW lineitem    | probe the o_orderkey unit → MID, forward | forward                            | store                   |
| MID (from C)    | –                                        | forward                            | probe o_orderkey → FINAL |
| MID (from O)    | –                                        | –                                  | probe o_orderkey → FINAL |
| MID (from L)    | –                                        | probe o_custkey → FINAL            | –                       |
| FINAL, END      | forward                                  | forward                            | forward                 |

Each stage handles one item at a time, so items never overtake each
other. Every result is therefore formed exactly once, by whichever of its
three tuples arrives last, against the window contents at that moment.
The stages are separated by 2-entry buffers.

FINAL items leave as JOINED tuples. END leaves behind every earlier
result, so the later operators can treat it as "batch complete".

Cost per tuple is the sum of the hash-unit costs in the stages it touches,
plus one cycle per item sent.

## 6. Group-by and order-by

**Aggregation-GroupBy** (`diba_agg_groupby`) follows the six states of the
paper's controller:
- **Reset** clears the table.
- **Idle** waits for a tuple.
- **Group Search** compares one stored key per cycle.
- **New Group** appends a group, or raises `overflow` when the table is
  full.
- **Update Group** adds the tuple's revenue to its group.
- **Emit Result** runs on END. It sends every group as a GROUPS tuple, in
  order of first appearance, then END, then returns to Reset.

A tuple whose group is k-th in the table costs k + 2 cycles.

**OrderBy** (`diba_orderby`) keeps a list of up to DEPTH rows, sorted by
revenue descending, then date ascending.
- A new row enters at the tail. It moves up one place per cycle while it
  ranks before its neighbour; this is the paper's bubble insertion. Rows
  that tie keep their arrival order.
- When the list is full, a row that ranks last is dropped; otherwise the
  last row falls off. Either case raises `overflow`.
- On END it sends the first LIMIT rows (10 by default) as RESULT tuples,
  then END, and empties the list.

## 7. Selections

`diba_selection` holds a `>`, `=` or `<` test of one field against a 52-bit
constant. A block instruction with its B-ID sets the constant.
- Tuples of its stream that pass the test are forwarded unchanged.
- All other segments are consumed.
- The `passed` and `dropped` counters give statistics.

## 8. Parameters and sizes

| parameter          | default | from |
|--------------------|---------|------|
| segment width      | 64      | the paper's example |
| N (slots per brick)| 4       | paper |
| rows               | 4       | paper |
| W (window)         | 1024    | paper (2^10) |
| HT (rows per table)| 2048    | paper (2^11) |
| OVF                | 1024    | paper (2^10) |
| GROUPS, DEPTH      | 1024    | this design |
| LIMIT              | 10      | TPC-H Q3 |
| NI_LINES           | 16      | this design |
| FIFO depths        | 2–4     | this design |

At the defaults, yosys maps every table, window and list to a memory. The
whole instance has 76 memories.

**Throughput against the paper.** For TPC-H scale factor SF, the input is
about 6.0·SF M lineitem, 1.5·SF M orders and 0.15·SF M customer tuples.
These are TPC-H's row counts, which the paper does not list. With this
segment format that is 15.15·SF M segments. At NI_LINES = 16, the brick-1
link alone needs 4 cycles per segment, about 60·SF M cycles. The paper
reports about 30·SF M, so NI_LINES = 64 (15.15·SF M cycles minimum) is
the setting to compare with. Window and table sizes do not depend on SF.

## 9. Where this design differs from the paper

- **Slots are fixed operators.** The paper's configurable OP-Block is not
  built, because its instruction set is not published. Each slot is a
  fixed operator chosen by a parameter. Only the routing tables and the
  selection constants are programmable in-band.
- **Not built:** the synchronizer blocks (no token format is given), the
  GSwitch-B variant (one input, n outputs, shared buffer), and the
  host-side decomposer, composer and query assigner.
- **Collector lock** counts segments (section 2).
- **Operator outputs use new stream IDs** 6–8, so the GSwitch 5 program
  routes stream 8 rather than streams 2–5.
- **Draining before END:** a source must wait for brick 1 to drain before
  sending END (section 3).
- **HBSJ reset sweep:** the valid bits are cleared by a 4·HT-cycle sweep
  after reset.
- **Cycle costs** of every unit are this design's own; the paper only
  gives whole-query cycle counts.

## 10. Simulation

Every testbench in `tb/` is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. To build
and run one with verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_diba_top -y rtl -y tb rtl/diba_pkg.sv tb/tb_diba_top.sv
./obj_dir/Vtb_diba_top
```

| testbench                 | what it checks |
|---------------------------|----------------|
| `tb_diba_top`             | End to end at small sizes (W = 8, HT = 4): programs the instance, runs two batches with different constants, and compares the ten result rows with a software model. The model takes its input from the tuples the join actually receives. The test also requires each mechanism to occur: input stall, output back-pressure, west-entrance traffic, overflow-buffer use, window expiry, two-segment tuples, reprogramming and END flush. |
| `tb_diba_top_full`        | The same, with every default parameter. 1500 customers make the window expire, and orders share 20 customer keys, which fills the overflow buffer. Runs in under a second. |
| `tb_diba_hbsj`            | Random stores and probes against a software window. Also checks store latency. |
| `tb_diba_gswitch_a`, `tb_diba_lswitch`, `tb_diba_collector` | Routing, per-input order and tuple contiguity under random stalls. |
| `tb_diba_selection`       | Filtering, the constant changing mid-stream, and the counters. |
| `tb_diba_agg_groupby`     | Exact sums and table overflow. |
| `tb_diba_orderby`         | Ranking, tie order and list overflow. |
| `tb_diba_ni`              | Data, and the rate of 4 cycles per segment. |
| `tb_diba_bypass`          | Data and latency. |
| `tb_diba_murmur3`         | Reference hash values. |

The join pipeline and the brick are checked through `tb_diba_top`.
