# Farview node in SystemVerilog

Farview is a disaggregated memory node for database engines. A database
server reaches the node's DRAM over RDMA, as it would any remote memory. It
can also ask the node to run part of a query: projection, selection,
distinct, group-by, aggregation and decryption. The node runs these on the
data as it streams out of DRAM, so only the result crosses the network.
This RTL describes such a node: the memory stack, the operator stack with its
dynamic regions, and the arbitration towards the network stack. The network
stack, the DRAM controllers and the FPGA's partial reconfiguration are
outside it.

## Structure

```
 network stack (external)                        DRAM channel controllers (external)
   rx_req / rx_w*      tx_cmd / tx_*                  mc_* (one 64-byte port per channel)
        |                  ^                                   ^
  +-----v------------------+--+                   +------------+-------------+
  | packet_arbiter            |                   | mmu                      |
  |  queue pair -> region     |                   |  tlb (2 MB pages)        |
  |  round robin per packet   |                   |  dma_engine per region   |
  +-----+------------------^--+                   |  mem_arbiter per channel |
        |                  |                      +------------^-------------+
  +-----v------------------+------------------------------------+-----+
  | dynamic_region x NREG (6)                                         |
  |  plain read/write -----------------------------> memory           |
  |  plain read data -> line_serializer -> sender (read responses)    |
  |  Farview request -> projection_operator -> parameter queues       |
  |                                        \-> memory read requests   |
  |  read data -> aes_ctr -> [tuple_parser -> selection] x lanes      |
  |            -> rr_combiner -> group_distinct -> packer -> sender   |
  +-------------------------------------------------------------------+
```

`farview_top` wires one `packet_arbiter`, `NREG` dynamic regions and the
`mmu`. All types and constants shared between modules are in `fv_pkg`.
Everything runs on one clock. The original node runs its network and
operator logic at 250 MHz and its memory side at 300 MHz. Those clock
crossings are not modelled here.

## Memory stack

Each region sees its own virtual address space. The TLB maps 2 MB pages. It
is direct mapped, and the region number is part of the tag, so one region
cannot reach another region's pages. A region's DMA engine:

- splits each request at page boundaries;
- stripes it across the channels in 64-byte words: word *w* of physical
  memory lives in channel *w* mod NCH;
- reassembles the read data into lines of NCH words, with a count of the
  valid words.

A miss in the TLB drops the piece and sets the region's `fault` flag. Each
channel has a round-robin arbiter between the six DMA engines. It returns
responses in request order.

## A Farview request inside a region

A Farview request carries everything the pipeline needs (`fv_params_t`):

- table address and length, and tuple size in 64-byte words;
- the projection mask and whether smart addressing is used;
- up to two predicates;
- AES key and IV, and the grouping mode and key columns;
- the client's result buffer address.

The projection operator splits the request. The parameters go into five
small queues: keys, annotations, predicates, aggregation and network.
Each pipeline stage reads its own queue's head and pops it when the end of
the stream passes it. The table itself becomes memory read requests:

- **sequential mode** issues 4 kB reads;
- **smart addressing** reads, for each tuple, only the words that hold
  projected attributes, and merges adjacent words into one read.

A routing queue records, for each read in flight, whether its data belongs
to the pipeline or to a plain RDMA read.

On the way back the data passes through these stages:

1. **Decryption.** `aes_ctr` runs AES-128 in counter mode. It has one AES
   core per 128-bit lane and 8 lanes, enough for a full memory line every
   clock, with an 11-clock latency. With decryption off the data passes
   through with the same latency.
2. **Projection.** `tuple_parser` collects a tuple's words and keeps up to
   8 projected attributes. Each attribute gets an annotation bit.
3. **Selection.** `selection` clears the keep flag of tuples that fail the
   predicates. The predicates compare unsigned, signed or double values.
4. **Vectorized model.** With `vec_en`, each word of a memory line goes to
   its own parser and selection lane. `rr_combiner` merges the lanes round
   robin and drops filtered tuples.
5. **Grouping.** See the next section.
6. **Packing and sending.** `packer` compacts the annotated attributes into
   64-byte words, using an overflow buffer of 7 attributes. `sender`
   issues an RDMA write for every 1 kB of result and one for the tail.

A region processes one Farview request at a time. Plain RDMA reads and
writes can proceed alongside it. The Farview sender and the read-response
sender share the region's output packet by packet.

## Distinct and group-by

`group_distinct` is the most involved unit. A tuple's key is its first two
key columns (128 bits). Lookups go through three places in turn:

1. **LRU cache.** A shift register of recent keys, compared in parallel.
   - DISTINCT: a hit means a duplicate, and the tuple is dropped.
   - GROUP BY: a hit merges the tuple's aggregate (count, sum, min, max)
     into the cached entry.
2. **Cuckoo hash tables.** NTAB tables, each with its own hash function.
   A lookup request waits one clock in a queue stage. The response then
   reads all tables at once.
   - On a miss, the key is inserted into table 0.
   - The entry it displaces moves to table 1, and so on down the tables.
   - Entries still moving between tables are compared too, so a key in
     transit is never missed.
3. **Collision buffer.** An entry pushed out of the last table lands here.
   It is sent to the client with the result, to be finished in software.

Output depends on the mode:

- **DISTINCT** sends each tuple the first time its key is seen.
- **GROUP BY** is write-through: new keys are queued. At the end of the
  stream the queue is replayed against the tables, and one record per
  group goes out: key, count, sum, min, max.
- **AGGREGATE** uses a single group.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. Example for the whole node:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/fv_pkg.sv tb/tb_farview_top.sv \
          --top-module tb_farview_top -o sim && obj_dir/sim
```

`tb/dram_model.sv` is a behavioural DRAM: fixed latency, one word per clock
per channel, sparse storage. `tb_farview_top` runs the node at its default
size and covers:

- plain writes and reads across a page boundary;
- 32 kB read bandwidth;
- selection, scalar and vectorized;
- projection with and without smart addressing;
- an AES round trip;
- group-by with SUM;
- distinct in six regions at once under random transmit back-pressure;
- a TLB fault.

It prints the cycle counts it measures. `tb_tlb` checks the TLB against a
reference map.

## Measured behaviour and known limits

- **Plain reads.** A 32 kB read takes about 580 clocks, close to one
  64-byte word per clock, plus latency.
- **Selection throughput.** A 1024-tuple selection takes about 1080 clocks
  in both scalar and vectorized mode. The vectorized lanes do not yet
  double throughput: the read path delivers about one word per clock here.
  Finding where the line rate is lost is open work.
- **Smart addressing.** For 256-byte tuples it cuts the time from 1083 to
  826 clocks. Each tuple is a separate 64-byte read, so per-request
  overhead dominates.
- **Hash table capacity.** 4 x 4096 entries. Tables with more distinct keys
  than about half of that will overflow the 64-entry collision buffer.
  Entries lost that way are counted (`coll_lost`).
- **Not included.**
  - Regular-expression matching.
  - The RoCE stack.
  - DRAM controllers.
  - Partial reconfiguration. Here one generic pipeline is configured per
    request instead.
  - Separate clock domains.
- **Test coverage.** Only the TLB and the whole node have dedicated
  testbenches. The other units are checked through the node-level test.
