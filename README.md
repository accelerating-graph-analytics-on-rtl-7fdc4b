# A data-indirect prefetcher for a reconfigurable many-core cluster

Graph kernels spend most of their time on loads whose address comes from an
earlier load: `prop[nbr[off[v]+k]]`. A stride prefetcher cannot guess such
addresses. A data-indirect prefetcher can, if software first tells it how the
arrays are linked. This RTL adds that kind of prefetcher to a Transmuter-style
cluster. In that cluster, the L1 banks of a tile can be switched at run time
between *private* mode (bank g belongs to core g) and *shared* mode (every
core reaches every bank, and lines are spread over the banks by address).

A prefetcher built for a private cache breaks in shared mode in three ways:

* its run-time state is split per core;
* it fills its own bank, even though the line belongs in another bank;
* one core can overwrite another core's prefetch state.

The design fixes each one. It uses a **fused PFHR array**, a **prefetch
handshake** between engines, and **GPE-tagged squashing**.

The default build is 4 tiles x 16 worker cores (GPEs). It has one 16 kB L1
bank per GPE, 16 L2 banks of 4 kB and 16 memory channels.

## The Data Indirection Graph (DIG)

Software programs each prefetch engine through `cfg` (`dig_cfg_t`) with a
small graph:

* **nodes**: arrays, given by base address, bound and element size (1, 2, 4
  or 8 bytes);
* **edges**: `src -> dst`, which are either
  * *single-valued*: the element read from `src` is an index into `dst`, or
  * *ranged*: elements `i` and `i+1` of `src` bound a run of `dst` elements,
    as in a CSR/CSC offset array;
* one **trigger** node;
* an initial **prefetch distance**.

`dig_table` stores this graph. It holds 8 nodes and 8 edges, and every
engine of the cluster gets the same broadcast writes.

For a pull-mode kernel (offsets -ranged-> neighbours -single-> property) the
chain is:

1. A demand load hits the trigger array at index *i*. The engine prefetches
   index *i + distance* of the same array.
2. When that line is filled, the engine reads the two offsets out of the
   filled data and prefetches the neighbour run.
3. When the neighbour lines arrive, each neighbour id becomes a prefetch
   into the property array.

## PF engine (`pf_engine`)

There is one engine per L1 bank. It watches three things: the demand
requests its bank accepts, the lines its bank receives (fills, and prefetches
that already hit), and the bank's late-prefetch and unused-eviction events.

The work flows through five stages:

1. **Trigger**: a demand into the trigger node's range creates a request
   for *idx + dist*.
2. **Generation FIFO** (4 entries): holds requests from triggers and from
   expansions. Expansions have priority. A trigger that finds the FIFO full
   is dropped and counted (`pf_drop`).
3. **Routing**: in shared mode, a request whose line colours to another bank
   leaves through `hs_out` to that bank's engine. Otherwise it stays local.
4. **Issue**: requests that arrive from other engines go first. When the
   request's node has out-edges, the engine first records it in the PFHR
   array. That record is what lets the later fill be recognised.
5. **Expansion**: a fill is kept in a 2-entry FIFO and searched in the PFHR
   array.
   * On a hit, the FSM walks the node's out-edges: one request for a
     single-valued edge, up to 16 for a ranged one.
   * The entry's own node also gets the next element, so that the sequence
     keeps running ahead.

**Distance adaptation** changes the distance by +1 on a late prefetch (a
demand met an outstanding prefetch MSHR) and by -1 when a prefetched line is
evicted unused. The distance stays within 1..32. The stepping rule is this
design's choice.

**Limits**: a ranged edge is followed only when both bounds lie in the
filled line, and for at most 16 elements.

## Fused PFHR array (`pfhr_fused`)

The tile holds N_GPE banks of 8 entries. Each entry holds {valid, GPE-ID,
node, line address}. Each bank has one read/write port.

* **Private mode**: engine *b* uses only bank *b*, and all banks work in
  the same cycle.
* **Shared mode**: a round-robin arbiter grants one engine per cycle. That
  engine searches all banks at once (CAM), and its allocation goes to the
  lowest-numbered free entry of the whole array.

A *search* matches the line address. A hit frees the entry and returns it
(`hit_entry`), so the engine knows which node the fill belongs to.

An *allocation* fills a free entry. Failing that, it replaces, or
**squashes**, an entry with the **same GPE-ID** (the lowest-numbered one). An entry of
another GPE is never touched, so a core that runs ahead cannot destroy the
sequence of a slower one. When nothing can be replaced, the allocation
fails (`hit`=0); the prefetch is still issued but not recorded, so its fill
ends the chain.

## Prefetch handshake

In shared mode, a line's home is bank `(addr >> 6) mod N_GPE`. This is the
same colouring the GPE-to-L1 R-XBar uses for demand traffic. An engine that
generates a request for a line homed elsewhere does not issue it. It sends
the request over a crossbar to the home engine. The home engine issues the
request into its own bank, records it in the PFHR, and later sees the fill
and carries the chain on. In private mode nothing is forwarded.

A request, once generated, gains at most one crossbar hop (2 cycles plus
queueing) before issue.

## Caches (`rdcache`)

One module serves as the L1 bank, the L2 bank and the LCP's D$. It has:

* 4 ways and 64 B lines;
* 8 MSHRs with one target each;
* one array port, with priority fill > demand > prefetch;
* a registered 1-cycle hit response;
* write-through stores with no write-allocate;
* replacement of an invalid way first, otherwise round-robin per set.

A demand that meets a prefetch MSHR attaches to it, and that counts as a
late prefetch. Each line carries a "prefetched, unused" bit, which drives
the eviction event. On a mode change, the tile invalidates its L1 banks,
empties the PFHR array and drops the engines' queued work.

## Interconnect

`xbar` is an N-to-M crossbar. It has round-robin arbitration per output, a
2-entry FIFO per output, and counters for forwarded packets and waiting
packet-cycles. Waiting over forwarded gives the contention ratio.

`rxbar` computes the destination:

* shared mode: address colouring;
* private mode: input *i* goes to output *i*·N_OUT/N_IN.

The cluster contains:

* per tile: a GPE-to-L1 R-XBar, an L1-to-GPE response crossbar, the
  handshake crossbar, and a sync crossbar to the scratchpad;
* across the cluster:
  * a 68-to-16 L1-to-L2 R-XBar, with shared L2 by default;
  * 16 L2 banks;
  * an L2-to-memory crossbar, where the channel is the line address mod 16;
  * matching response crossbars;
  * the sync scratchpad (1024 words, one cycle).

Each tile also holds per-GPE work and status FIFOs between the LCP and its
GPEs.

## Not in the RTL

The GPE and LCP cores and the HBM stack are not built. Their ports come out
of `tm_cluster`: one memory port per GPE, a D$ port and a sync port per LCP,
the work/status queue ports, and 16 channel ports.

The testbenches use behavioural models instead:

* `tb_gpe_model`: a core running a neighbour-sum kernel;
* `tb_mem_model`: a fixed-latency memory with a formula-defined graph.

## Other departures and choices

* Widths: 32-bit addresses and words, 8-bit source ids.
* Sizes: D$ 4 kB, scratchpad 1024 words, DIG of 8 nodes and 8 edges, queue
  depths 4.
* The flush on a mode switch.
* The distance stepping rule.
* The PFHR allocation order.
* Response packets carry the whole line.
* Tile and bank numbers are constant-tied inputs (`src_base`, `cache_id`,
  `eng_id`), so all copies are one module.
* The mode register resets to shared. A tile that leaves reset in private
  mode therefore records one (empty) flush.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert --top-module tb_tm_cluster \
  rtl/tm_pkg.sv tb/tb_mem_pkg.sv $(ls rtl/*.sv | grep -v tm_pkg) \
  tb/tb_mem_model.sv tb/tb_gpe_model.sv tb/tb_tm_cluster.sv -o sim && obj_dir/sim
```

The package files come first, and `rtl/tm_pkg.sv` is listed only once.

`tb_tm_cluster` runs the top at its default size, 64 GPEs. It has a private
phase, then a run-time switch to shared, then a second phase. It checks:

* every load;
* every status word and scratchpad result;
* that each mechanism occurred: trigger, forward, PFHR hit, squash, late
  prefetch, unused eviction, replacement, R-XBar contention and mode switch.

The C++ build takes a few minutes; the run takes seconds. `tb_tm_tile`
covers one 4-GPE tile with small L1 banks. Each other block has its own
`tb_<module>`.
