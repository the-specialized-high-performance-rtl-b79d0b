# A specialized on-chip and inter-chip network for molecular dynamics

A molecular-dynamics machine spends most of its time moving many small
packets: positions go out to the nodes that need them, and forces come back.
The packets are small (a few 32-bit words), their values are usually small,
positions change smoothly from one time step to the next, and software must
know exactly when every packet of a phase has arrived.  This network is built
around those facts:

* **fine-grained synchronization in memory**: every 16-byte quad of a
  processor's SRAM has an 8-bit counter that network writes increment; a
  *blocking read* waits until the counter reaches a threshold;
* **compression at the chip boundary**: payload words are re-encoded so their
  leading zero bytes need not be sent (INZ), and particle positions are sent
  as the error of a prediction both ends of a channel make identically
  (particle cache);
* **network fences** that are merged and multicast inside the routers, so that
  "all earlier packets from all these sources have arrived" costs one packet
  per link instead of one per source-destination pair;
* **low-latency routing**: a 2D mesh on the chip, split into small sub-routers,
  and a 3D torus between chips whose routing lives in a narrow strip of Edge
  Routers at the left and right edges of the chip.

The RTL here is one node's network, written in SystemVerilog 2017, with the
compute engines and the serializers left as ports.

## The chip and its two networks

A node is a 12 x 24 array of Core Tiles with an Edge Tile at each end of every
row.  A Core Tile holds two general-purpose processors (GC0, GC1), each with a
128 KB memory, a bond calculator (BC), two pairwise-interaction pipelines
(PPIM0, PPIM1) and a **Core Router**.  The Core Routers form the *Core
Network*, a U (column) by V (row) mesh.

Each Edge Tile holds three **Edge Routers**; stacked, they form a 12-row by
3-column *Edge Network* on each side.  The Edge Network connects to

* the Core Network of its row through a **Row Adapter** (column next to the
  core),
* two interaction control blocks (ICBs) through two more Row Adapters,
* an off-chip channel through a **Channel Adapter** (outermost column).

Edge row `r` serves the channel in direction `r/2` (0 Z+, 1 Z-, 2 Y+, 3 Y-,
4 X+, 5 X-) through slice `r%2`; every neighbour is reached through two
slices.  The numbers match one chip: 288 Core Routers, 72 Edge Routers, 24
Channel Adapters and 72 Row Adapters.

```
   side 0 edge network                core network                   side 1
  CA  ERTR ERTR ERTR  RA ── [CR]─[CR]─ ... ─[CR] ── RA  ERTR ERTR ERTR  CA
          (col 2 1 0)          │     │           │       (col 0 1 2)
                     ICB RA ×2 │     │           │ ICB RA ×2
                         ... 12 rows, V mesh between rows ...
```

## Packets

A flit is 192 bits: a 64-bit header and four 32-bit payload words.  All
packets here are one flit.  The header (`a3_pkg::hdr_t`) holds

| field | bits | use |
|---|---|---|
| ptype | 3 | write, counted write, counted accumulate, position, force, fence, end of time step |
| vc | 3 | virtual channel of the current link |
| resp | 1 | response class |
| dx, dy, dz | 4 each | remaining signed torus offset |
| dord | 3 | one of the six dimension orders XYZ, XZY, YXZ, YZX, ZXY, ZYX |
| slice | 1 | which of the two channels to a neighbour |
| dst_v, dst_u, dst_ep, side | 4, 5, 3, 1 | destination tile, endpoint, and the side used to enter/leave |
| addr | 13 | quad address in the destination memory |
| pid | 15 | particle id; for a fence: fence id [3:0], pattern [5:4], hop budget [9:6] |

## Core Network: the Core Router (`core_router`, `vc_router`)

A Core Router is four sub-routers of at most four ports each, all instances
of the generic `vc_router`:

* **TRTR** connects GC0, GC1 and BC and links to the URTR;
* **URTR** moves packets along U (west/east) and links to the TRTR and the
  lower VRTR;
* **VRTR_S / VRTR_N** move packets along V (south/north) and carry the two
  PPIMs.

Routing is fixed U then V.  Remote packets travel along U to the edge of the
chip named by `side`.  A sub-router has one input register and `LAT-1`
output stages, so a U hop (one URTR) is 2 cycles.  A V hop passes two VRTRs
and a link register, 2+2+1 = 5 cycles.  There are two VCs, requests and
responses.

`vc_router` is an input-queued virtual cut-through router: one queue of
`DEPTH` (8) flits per input port and VC, credit flow control per VC (a flit
is sent only against a credit; the receiver returns a credit when it pops
the flit), round-robin arbitration per output port, and at most one flit out
of each input per cycle.

## Edge Network: torus routing in three columns

Edge Routers are `vc_router` with `KIND=4`, five VCs, `LAT=3`.  A packet
carries its dimension order and slice, both chosen when it enters the Edge
Network.  Each Edge Router finds the first dimension with a nonzero offset in
that order, so the target edge row is `2*dir + slice`.  When all offsets are
zero, the target is the destination row and the Row Adapter there.  The
packet moves vertically to the target row, then sideways to the Channel
Adapter or Row Adapter.  Packets coming from a channel and continuing in the
same torus dimension stay in the outermost column.  Their input and output
channels are in adjacent rows, so the route costs a hop or two.  All other
traffic uses one of the two inner columns.

Deadlock freedom uses the request/response split.  Requests may use any of
four request VCs (0-3).  Responses use VC 4 and always route XYZ, which
treats the torus as a mesh for them.  When a request crosses a channel it
moves to the next request VC.  This is a simple stand-in for the usual
dateline rule, whose details are not given here.

## Adapters

**Row Adapter** (`row_adapter`).  Going out, it draws a dimension order
(one of six) and a slice from a free-running LFSR for each request.  This
gives oblivious, load-independent route randomization.  Responses always get
XYZ order.  Core VC 0/1 becomes edge VC 0/4.  A fence is copied onto all four
request VCs.  Coming in, the four copies are merged back into one fence.
Requests and responses are queued separately, with responses first.

**Channel Adapter** (`channel_adapter`).  Transmit path, per flit:

1. a position packet goes through the send-side particle cache;
2. the payload (or the prediction error) is INZ-encoded;
3. the offset in this channel's dimension is stepped toward zero;
4. the four fence copies are merged into one, and the fence's hop budget is
   decremented (a fence with no hops left stays on the chip).

The result is a *channel record* (`chrec_t`): kind, header, cache index,
byte count and bytes.  The receive path undoes all of this and hands flits
to the Edge Router on the right VC.  End-of-time-step packets advance the
time-step counters of both caches.

## INZ encoding (`inz_encoder`, `inz_decoder`)

Small positive and small negative words both have many identical leading
bits.  INZ turns both kinds into leading zeros and then collects the zeros
of all words at the top:

1. each word `w` becomes `{w[31] ? ~w[30:0] : w[30:0], w[31]}`, i.e.
   magnitude-like bits above the sign bit;
2. `m` is the index of the most significant nonzero word (all zero: send 0
   bytes);
3. bit `i` of word `k` (for `k <= m`) goes to bit `2 + i*(m+1) + k`, and `m`
   fills bits 1:0;
4. the byte count is the number of bytes up to the highest nonzero one.  A
   count of 16 or more sends the 16 raw bytes instead.

Example: words +103 and -53 become `0x0000_00CE` and `0x0000_0069`.  With
`m = 1`, the interleaved vector is `0x01E359`: 3 bytes instead of 8.  Both
directions are combinational (one per cycle).

## Particle cache (`particle_cache`)

Each channel has a send-side cache at one end and an identical receive-side
cache at the other.  Both see the same position packets in the same order, so
their contents never differ.  Each cache has 1024 entries, 4-way set
associative.  The set comes from the particle id's low bits and the tag from
the rest.  An entry holds the packet's static word and, for each of x, y, z:

* `D0` = last value (32 bits),
* `D1`, `D2` = first and second differences (12 bits, saturating).

The prediction is `D0 + D1 + D2`, a quadratic extrapolation once three
samples exist.  With the actual `x`, the update is `D1' = x - D0`,
`D2' = x - D0 - D1`, `D0' = x`.  On a miss, a new entry starts with
`D1 = D2 = 0`.  The packet is sent whole (kind ALLOC), and the receiver
allocates the same way with the same rule.  On a hit, the sender sends the
entry index and `x - prediction` (kind COMP).  INZ then shrinks this to a
byte or two.  Saturation never loses data: both ends predict the same value,
so the difference is always exact.

Eviction is driven by software.  Each use stamps the entry with a time-step
counter, which advances on end-of-time-step packets.  A conflicting packet
may replace an entry only if it is more than `thresh` steps old.  Otherwise
the packet goes uncompressed (kind NOALOC).

## Counted writes and blocking reads (`quad_mem`)

Each GC memory is `QUADS` = 8192 quads of 128 bits (128 KB), each with an
8-bit saturating counter.  Network requests can be:

* a write;
* a counted write (write + increment);
* a counted accumulate (four 32-bit adds + increment);
* a count-only increment (how an arriving GC fence is recorded).

The GC reads with a threshold.  If the counter is below it, the read waits
(`gc_ready` low), and network writes keep flowing until the counter gets
there.  The GC can also clear a counter.  Network requests never wait.

## Network fences

A fence is a packet of type FENCE with a fence id and a pattern number.  Per
input port (and per VC in the Edge Routers), each router keeps a fence
counter per fence id.  Software programs, per input port and pattern, an
*expected count* and an *output mask* (through `fcfg` writes addressed by
router id).  A fence reaching the head of its queue increments the counter
and disappears.  The fence that brings the counter to the expected count is
instead sent to every output in the mask (multicast, one output per cycle),
and the counter returns to zero.  A fence waits at the head of its queue, so
it never passes earlier packets on that VC.  Once it has left, everything
sent before it on every merged path has gone ahead of it.  An empty mask
absorbs the fence.  At a GC port the fence is one count-only increment of a
chosen quad, so a blocking read with the right threshold is a barrier.

Counter widths are `ceil(log2(ports+1))`.  Core sub-routers hold 14 fence
ids; Edge Routers hold 96 counters per input port (fence id x VC).

## Top level (`a3_node`)

`a3_node` wires `ROWS x COLS` Core Routers with their two `quad_mem`s, two
Edge Networks of `ROWS x 3` Edge Routers, `3*ROWS` Row Adapters and `ROWS`
Channel Adapters per side.  Defaults are the chip's: 12 x 24, 8192 quads,
1024 cache entries.  Ports carry what connects to the parts that are not
here: GC injection and memory access, BC, PPIM and ICB links, channel records
in and out, fence configuration, and compression enables.

## Testbenches

Each `tb/<block>_tb.sv` is self-checking and prints
`TB_RESULT checks=N failures=M`:

* `inz_encoder_tb` and `inz_decoder_tb`: the printed example, edge cases,
  and 2000 random payloads against a reference built bit by bit;
* `quad_mem_tb`: counted writes and adds, thresholds, a stalled read released
  by an arriving write, saturation, clear;
* `vc_router_tb`: a URTR's routes, its 2-cycle latency, credit stall and
  resume, fence absorb / merge / multicast / ordering / counter reset;
* `particle_cache_tb`: a sender and receiver pair over many time steps,
  checking exact reconstruction, hits, misses, the eviction threshold and
  the predictor arithmetic;
* `a3_node_tb`: two 4 x 4 nodes joined through their Z channels, end to end.
  It covers a local counted write released into a blocking read; a one-hop
  remote counted write through Row Adapter, both Edge Networks and both
  Channel Adapters; six time steps of positions with cache allocations, hits
  and INZ-shortened records; and a two-source fence merged in one tile and
  multicast to both GCs of the next.  It counts each of these mechanisms and
  fails if one never happens.

The largest simulated size is the 4 x 4 node of `a3_node_tb`.  The 12 x 24
top compiles, but no testbench simulates it.  To run one:

```
verilator --binary --timing -Wno-fatal --top-module a3_node_tb -y rtl rtl/a3_pkg.sv tb/a3_node_tb.sv
./obj_dir/Va3_node_tb
```

## Where this departs from the described design, and what is missing

* Only one-flit packets.  Two-flit packets, and the separation of control
  and data within a packet, are not modelled.
* Channels carry whole records rather than byte-packed frames on serial
  lanes.  The serializers, framing and lane striping are outside this RTL.
* The adapters do not limit fence injection.  The real design does, which
  is what lets 96 counters per Edge Router port suffice.
* Which core sub-router carries which endpoint, the edge-row order, queue
  depths, the VC-increment rule on channel crossings, the header layout and
  the 15-bit particle id are this design's choices.  A 15-bit id cannot tag
  a multi-million-atom system without aliasing in the cache.
* Particle-cache entries are flip-flops, not SRAM macros.
* Processors, bond calculator, pairwise pipelines, ICBs and serializers are
  not included.
