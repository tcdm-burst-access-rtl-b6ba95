# TCDM Burst Access for a 64-core shared-L1 vector cluster

Many vector cores share one word-interleaved L1 scratchpad (the TCDM), and
they reach it through a hierarchy of crossbars. Each vector core has K = 4 load/store
lanes. Leaving a tile, all those lanes have to share a few remote ports, and
that port contention is what limits bandwidth. The design idea is to stop
sending a unit-stride vector load as K separate 32-bit requests:

* the **Burst Sender** folds the K lane requests into one *burst* request,
  which is a start address plus a length;
* next to the banks, a **Burst Manager** splits the burst into parallel
  bank accesses;
* the Burst Manager then packs the GF bank answers into one *wide response*,
  GF × 32 bit, which crosses the interconnect as a single transfer.

With the group factor GF equal to K, a whole vector access costs one request
and one response on every shared link instead of K of each.

The RTL here builds the MP64Spatz4 cluster with GF4:

* 4 groups × 4 tiles × 4 cores, so 64 cores;
* each core has 4 vector lanes and 1 scalar port;
* each tile has 16 banks of 1 KiB, so 256 banks and 256 KiB in total.

The cores themselves are not part of this design. Their memory ports are the
ports of the top module `cluster`.

## Why port contention limits bandwidth

A core with K lanes can move K × 4 = 16 B per cycle when nothing collides.
When the accesses are random, almost all of them leave the tile, since the
own tile holds only 16 of the 256 banks. The lanes of one vector access then queue for
the same remote port, and that port carries one 32-bit word per cycle. The
average bandwidth therefore falls to about 4 B per cycle.

A burst takes one slot on the request port. Its GF-wide answer takes one slot
on the response port. With GF = K, a unit-stride access gets the full 16 B
per cycle back across a single port.

## Address map

Addresses are byte addresses. The TCDM is interleaved by word (`w = addr >> 2`):

| bits of `w` | meaning                          |
|-------------|----------------------------------|
| `[3:0]`     | bank inside the tile (16 banks)  |
| `[5:4]`     | tile inside the group            |
| `[7:6]`     | group                            |
| `[15:8]`    | row inside the bank (256 words)  |

A run of 4 consecutive words that starts on a 4-word boundary therefore lands
in 4 neighbouring banks that belong to one Burst Manager.

## Request and response formats (`tcdm_pkg`)

* `core_req_t` is what a lane or scalar port presents: address, write
  enable, write data, byte enables.
* `tcdm_req_t` is what travels on the interconnect. It is the same fields
  plus `meta`, which holds:
  * the origin (group, tile, core, lane);
  * the burst length `blen` (1 to GF);
  * one reorder-buffer tag per word.
* `tcdm_rsp_t` is the wide response. It holds GF data words and the same
  `meta`. A narrow response uses word 0 only.

Every interconnect link is a valid/ready channel that carries one of these
structs.

## Burst Sender (`burst_sender`)

There is one Burst Sender per vector core, placed on its K lanes.

A burst is formed when all four of these hold in the same cycle:

* all K lanes offer loads;
* the addresses are consecutive words;
* every lane's reorder buffer has room;
* the access is unit-stride, so the sender sees one word per lane.

A burst never crosses a GF-aligned block of words. Each lane that holds the
first word of a block (lane 0, or a lane whose word index ≡ 0 mod GF) becomes
a *head*. The head sends one request whose length reaches up to the next head.

* An aligned access gives one burst of length 4.
* An unaligned access gives two bursts, for example lengths 3 + 1 or 2 + 2.

Each burst goes out on the lane of its first word. Each head is handed over
on its own: if one head is accepted and another is stalled, the stalled lanes
are examined again in the next cycle. Anything else goes out lane by lane as
narrow requests. That covers stores, strided or gather accesses, and lanes
that are only partly valid.

Each lane has a `vlsu_rob` with 8 entries. A load reserves a slot when its
request is accepted, and the slot tags of all the words a burst covers travel
in `meta.tags`. When a wide response comes back, its words are scattered into
the reorder buffers of lanes `lane .. lane+blen-1`. Every lane then releases
its data in its own request order. If two responses in one cycle want the
same lane, the one on the lower lane goes first. Stores are posted and get no
response.

## Burst Manager (`burst_manager`)

There is one Burst Manager per GF = 4 banks, so a tile has four. On the
request side it takes up to GF inputs per cycle, one per bank port of the
local/remote crossbar. The paths through it are:

* **Burst Decoder.** Requests with `blen > 1` are bursts. They go through a
  round-robin **Arbiter** into a small fall-through **FIFO** (`fifo_ft`,
  4 deep). A burst leaves the FIFO head when every bank it needs is free.
  It then drives those banks in one cycle, each with the same row and its
  own byte enables.
* **Bypass.** Narrow requests go straight to their own bank if that bank is
  free. While a burst waits at the FIFO head, narrow requests to the banks
  it needs are held back, so a stream of narrow traffic cannot starve a burst.
* **Response slots.** Each bank's registered read data is the slot where its
  response waits. A bank takes no new read until its answer has been
  accepted downstream. Writes do not occupy the slot.
* **Response Grouper.** When all banks of a burst hold their data, the
  grouper sends one wide response on the output of the first bank. Its
  words are `data[k] = rdata[first+k]` for `k < blen`. Narrow reads answer
  on their own bank's output.

## Tile (`tile`)

A tile holds:

* 4 Burst Senders;
* 4 scalar ports, each with a small `vlsu_rob` of its own, because scalar
  loads to different distances can return out of order;
* 16 `spm_bank`s behind 4 Burst Managers;
* the interconnects, all built from `tcdm_xbar`, a valid/ready crossbar with
  a round-robin `rr_arbiter` per output:
  * **local request crossbar:** the 20 requesters and the remote inputs
    route to the 16 bank ports;
  * **remote request crossbar:** requests for other tiles go to the tile's
    remote ports, one per group;
  * **local and remote response crossbars:** answers go back to the
    requesting lane or to the remote port they arrived on.

Port 0 of a tile serves the other tiles of its own group. Port p > 0 serves
the group p steps away.

## Group and cluster (`group`, `cluster`)

A group contains 4 tiles and a request router and a response router, each a
4 × 4 crossbar per port. Link registers (`pipe_reg`, full throughput) set the
hierarchical latencies:

| access                 | round trip |
|------------------------|-----------:|
| own tile               | 1 cycle    |
| other tile, same group | 3 cycles   |
| other group            | 5 cycles   |

An intra-group hop has one register each way. An inter-group hop has one
register in the sending group and one in the receiving group, in each
direction.

`cluster` wires the four groups all to all. Link p of group G reaches group
(G+p) mod 4 and arrives there as link 4-p.

## What follows the paper and what is this design's own choice

Taken from the paper:

* the K-lane burst of a unit-stride vector load;
* one Burst Manager per GF banks, with an arbiter and a small FIFO for
  colliding bursts;
* GF-wide response data;
* reorder buffers at the lanes with their depth doubled;
* the MP64Spatz4 sizes: 4 cores and 16 banks of 1 KiB per tile, 4 groups;
* latencies of 1, 3 and 5 cycles.

Chosen here, because the paper does not say:

* the cut at GF-aligned blocks;
* the tag transport in `meta`;
* posted stores;
* the Bypass blocking rule;
* bank read registers used as response slots;
* the FIFO depth of 4;
* the base ROB depth of 4, which doubles to 8;
* the port numbering;
* the register placement on links.

Where the paper disagrees with itself, this design picks one reading:

* **Tiles per group.** The text says 16 tiles per group, but 64 cores at 4
  per tile in 4 groups leaves 4. The design uses 4.
* **L1 size.** The text says 1 KiB banks (256 KiB in total), but the figure
  labels 1 MiB. The design uses 1 KiB banks.

## Not part of this design

These blocks come from the testbed cluster, and the paper gives no insides
for them:

* the Snitch scalar cores;
* the Spatz vector units (VLSU address generation, register file, FPUs);
* the instruction cache;
* the DMA engine.

Their data-memory ports are exposed at the top instead.

## Workload sizes

The kernel sizes for MP64Spatz4 are assumed to be FP32, which matches the
stated 0.25 FLOP/B for dotp. Measured against the 256 KiB L1:

| kernel               | data held in L1 | fits in 256 KiB? |
|----------------------|-----------------|------------------|
| matmul 64×64×64      | 48 KiB          | yes              |
| fft 4×2048           | about 128 KiB   | yes              |
| dotp 65536           | 512 KiB         | no               |
| matmul 256×256×256   | 768 KiB         | no               |

The paper says all data is preloaded in L1. The two sizes that do not fit
suggest that its testbed had larger banks than the 1 KiB the text states.

## Verification

Every block has a self-checking testbench in `tb/`. Each one randomises
traffic, compares against a reference model, and counts checks and failures.

`tb_cluster` runs the full-size cluster with default parameters and mixed
traffic from all 64 cores:

* bursts, including cut bursts;
* narrow, strided and scalar loads and stores;
* local, remote-tile and remote-group targets.

It checks every loaded word against a memory model and measures the 1/3/5
cycle round trips. It also counts how often each mechanism was exercised:

* full and cut bursts;
* narrow requests;
* FIFO waits;
* bursts meeting in one manager;
* response collisions;
* ROB reordering and ROB-full stalls;
* port contention.

`tb/core_driver.sv` is the traffic generator that the tile, group and
cluster benches share.
