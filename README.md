# AraXL interconnect: one vector machine from many small ones

A vector processor with one lane per floating-point unit stops scaling at
about eight lanes. The trouble is not the lanes. It is the few all-to-all
networks that join them: the load-store unit's byte network that spreads
memory words over the lanes, the slide unit and the mask unit. Each of
them grows with the square of the lane count and ends up on the critical
path.

AraXL gets around this by building the machine out of **clusters**. Each
cluster is a small, complete 4-lane vector unit whose internal networks
stay small. The clusters are joined by three interfaces whose cost grows
only linearly:

| interface | job | structure |
|---|---|---|
| **REQI** (request interface) | gives every vector instruction to every cluster; cluster 0 answers the scalar core | broadcast fork with register cuts |
| **GLSU** (global load-store unit) | the single memory port; delivers to each cluster exactly the bytes of its own elements | pipelined address generation, align network and shuffle network |
| **RINGI** (ring interface) | moves data between clusters for slide-by-1 and for reductions | bidirectional 64-bit ring with multi-hop bypass |

None of these interfaces has to be fast. Vector code with long vectors
hides tens of cycles of latency, so every interface is pipelined and can
take any number of extra register cuts. The latency buys short wires and
easy timing.

This repository holds synthesizable SystemVerilog for these interfaces,
the per-cluster pieces that attach to them, and the top level `araxl`
that wires them to C clusters. The clusters themselves (lanes, vector
register file, FPUs, sequencer) and the scalar core are not included. The
testbenches stand in for them with behavioural models.

Default configuration, used by every module and by the full-size test:
L = 4 lanes per cluster, C = 16 clusters (64 lanes), VLEN = 65536 bits,
a 2048-bit memory bus (32 bits per lane) and 64-bit ring buses. No
extra cuts are added.

## Where an element lives

Everything follows from one mapping. Element *i* of a vector belongs to

    cluster (i / L) mod C,   lane i mod L

So groups of L consecutive elements go round-robin over the clusters. A
4-lane cluster sees exactly the element-to-lane mapping of a stand-alone
4-lane machine, and any mixed-width code keeps every element in its own
lane.

The memory side sees the same data as a flat byte stream. The GLSU's job
is to cut that stream so that cluster c receives, as its own in-order
byte stream, the bytes of its elements and nothing else. The stream
starts at byte 0 of the cluster's slot, whatever the memory address was.
Each cluster owns a 4·L-byte slot of the 4·L·C-byte bus. Inside the
cluster, `vlsu_lane_shuffle` only has to spread the bytes over the lanes.
No aligning is left to do there.

## GLSU

```
 broadcast --> glsu_decode --> glsu_addrgen --AR/AW--> memory
                                   | tables
 memory R --> tag --> glsu_align(load) --> glsu_shuffle(load) --> cuts --> clusters
 clusters --> tag --> cuts --> glsu_shuffle(store) --> glsu_align(store) --> W --> memory
```

**Decode.** The GLSU listens to the instruction broadcast as one more
target of the REQI. It keeps its own copy of `vl` and `vtype`, updated by
`vsetvli`, `vsetivli` and `vsetvl`. It turns each unit-stride `vle`/`vse`
of 8, 16, 32 or 64-bit elements into a request {store, address, vl,
element width}.

**Address generation.** The address is rounded down to a bus word, and
the request is split into INCR bursts of whole bus words. A burst never
holds more than 256 beats and never crosses a 4 KiB page. At the default
bus width a page is 16 beats, so long vectors become many 16-beat
bursts. For each request the generator also writes a table entry
{offset in the first word, byte count, element width}. That entry steers
the data pipelines.

**Align.** A load arrives as bus words whose first useful byte sits at
offset *off*. The align stage rotates each word right by *off*, using
log2(B) registered levels. Level *l* rotates by 2^l when bit *l* of the
offset is set. A merge register then joins the tail of one word with the
head of the next. Its output is the access packed from byte 0, with a
byte mask that marks the valid bytes. The store direction does the
inverse: it rotates left, spreads the packed data over ceil((off+n)/B)
words and turns the mask into write strobes. Latency is log2(B) + 2
cycles, which is 10 at B = 256. Throughput is one word per cycle.

**Shuffle.** Cut the packed bus word into units of L bytes and number
them. For elements of up to 4 bytes, unit index bits {r, c, u} must move
to slot {c, r, u}: c selects the cluster and r the unit inside its slot.
The number of r bits depends on the element width. This permutation is
done as a rotation of the {r, c} field, one bit per register level:

- two levels are enough;
- level 0 is active for 1- and 2-byte elements;
- level 1 is active only for 1-byte elements;
- 4-byte elements need no move at all.

A 64-bit element spans two units. One bus word then holds elements for
only half the clusters, so a final **pair stage** joins two words. Output
word t takes, for cluster c, units 8c+4t .. 8c+4t+3 of the two-word
super-word. After two beats every cluster has received 8·L bytes, one
64-bit element per lane.

The store shuffle runs the same stages in reverse order. An odd-length
64-bit store is padded to an even number of cluster beats, and the
padding beat is dropped before it reaches memory.

**Cluster side.** A load beat is offered to all clusters with one valid.
It completes when every cluster is ready, because the clusters run in
lock-step. A store beat completes when all clusters offer data while
`st_req_o` is high. `st_ew_o` and `st_parity_o` tell each cluster which
half of a two-beat window it must pack. `NUM_CUTS` register cuts sit on
the cluster-side data links in each direction. Each cut costs one cycle
each way. With 4 cuts a load-store round trip grows by 8 cycles. The
testbench measures this as 3 cycles on the load side and 5 on the store
side, because the first W beat also waits for its AW.

**Write responses.** One AXI ID is used, so bursts complete in order.
`st_done_o` pulses when the B response of a store's last burst arrives.

## Cluster-local lane shuffle

`vlsu_lane_shuffle` is combinational. Two beats of a cluster's stream
(8·L bytes) fill one 64-bit word in every lane. For byte s of beat
parity p:

    q = p·4L + s,   j = q / EW,   lane = j mod L,
    byte in lane word = ((j / L)·EW) mod 8 + q mod EW

Lane words hold their elements in plain little-endian order. This is
simpler than the base design's register-file byte layout. It is the
place to adapt if the lanes expect another layout.

## Ring

`ring_xbar` is one node per cluster. It has two 64-bit output buses, one
towards cluster c+1 ("up") and one towards cluster c−1 ("down"), and the
two matching inputs. A packet carries data, a hop count and a tag:

- a packet that arrives with hops > 1 is forwarded with hops − 1;
- a forwarded packet wins over a packet injected in the same cycle;
- a packet that arrives with hops = 1 is delivered to the local slide
  unit.

Both outputs leave through a 2-entry register slice, so each hop costs
one cycle and no path runs combinationally around the closed ring.
`ringi` closes the ring and puts `NUM_CUTS` extra cuts on every link.
Each extra cut adds one cycle per hop.

`sldu_ring` is the ring part of a cluster's slide unit. It works on
64-bit elements, one group of L elements at a time.

- **slide1down:** lane 0 goes to the previous cluster, and lane L−1
  takes the element received from the next cluster. The last cluster
  receives from cluster 0's next group, over the wrap-around link. The
  element at vl−1 takes the scalar.
- **slide1up:** the mirror image.
- **Reduction, inter-cluster stage:** each cluster brings one partial
  result from its lanes. In step s, a cluster whose lowest set index bit
  is s sends its partial 2^s hops down the ring, and leaves the tree. The
  receiver combines it. After log2(C) = 4 steps, cluster 0 holds the
  result. Packets of later steps pass other clusters through the bypass.
  Each receiver keeps one slot per step, so packets may arrive early.

## Request interface

`reqi` forks each instruction to all targets: the C clusters and the
GLSU decoder. A target that has taken the instruction is not offered it
again. The core's request completes when the last target has taken it.
Cluster 0's answer (result, error) returns to the core through the same
number of cuts. With one cut in each direction the answer arrives 2
cycles later.

## Data-cache invalidation

Vector stores bypass the scalar core's write-through data cache.
`inval_filter` therefore turns every write burst into one invalidation
per 16-byte cache line, one per cycle. It skips lines that lie inside the
previous burst's range. Two stores to neighbouring data share the bus
word at their boundary, and the second store skips all lines of that
word. The filter can hold AW while it walks a burst: a 16-beat burst of
256-byte words needs 256 cycles of invalidations. The line size is
assumed to be 16 bytes.

## Files

| file | content |
|---|---|
| `rtl/araxl_pkg.sv` | sizes, request/response/packet types |
| `rtl/araxl.sv` | top level |
| `rtl/reqi.sv` | request broadcast |
| `rtl/glsu.sv`, `glsu_decode.sv`, `glsu_addrgen.sv`, `glsu_align.sv`, `glsu_shuffle.sv` | global load-store unit |
| `rtl/vlsu_lane_shuffle.sv` | cluster-local byte-to-lane shuffle |
| `rtl/ring_xbar.sv`, `ringi.sv`, `sldu_ring.sv` | ring and its slide-unit extension |
| `rtl/inval_filter.sv` | cache-line invalidation |
| `rtl/cut_chain.sv`, `spill_reg.sv`, `fifo_v.sv` | register cuts and queues |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_fdotproduct.sv` | dot-product workload at full size |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops.

    verilator --binary --timing --assert -y rtl -y tb -Irtl \
        rtl/araxl_pkg.sv tb/tb_araxl.sv --top-module tb_araxl -o sim
    ./obj_dir/sim

`tb_araxl` runs the top at its default, full size with models of:

- the scalar core;
- 16 clusters;
- the L2 memory;
- the data-cache port.

It checks the instruction broadcast and answers, and loads and stores of
every element width: misaligned, split into several bursts, and read back
per lane. It also checks slides and reductions over the ring and the
invalidations. It counts each mechanism and fails if one never
happened. It takes well under a second.

`tb_fdotproduct` runs the data movement of a dot product of two
8192-element vectors of 64-bit values through the same models, at full
size. That is one LMUL = 8 register group. Each vector is loaded in 256
bus beats, which takes 275 cycles from the instruction to the last lane
beat. The cluster models multiply and add the elements their lanes
received. The ring then sums the 16 partial results in 23 cycles, and
the test compares the total with the dot product computed from memory.
The lanes are not modelled in floating point, so the arithmetic is
integer multiply-add modulo 2^64.

The unit testbenches also check rates and latencies:

- one bus word per cycle through the GLSU;
- exactly hops cycles per ring packet, and 2·hops with one cut per link;
- reduction within 40 cycles;
- a 2-cycle answer with one request cut;
- 8 extra cycles of load-store round trip with four GLSU cuts.

## How far it goes, and where it departs from the published design

- **Only the interfaces are built.** The lanes, register file, FPUs,
  sequencer, mask unit, cluster-local slide unit, scalar core, AXI
  crossbar and L2 are outside. The mask unit is missing because its new
  register-file mask encoding is not specified.
- **The GLSU snoops the instruction broadcast.** It does not take
  requests from the cluster load-store units.
- **Unit-stride accesses only.** There are no strided, indexed or segment
  accesses.
- **The bus is wider than AXI4 allows.** It moves 256 bytes per beat,
  beyond AXI4's 1024-bit limit, so the size field is widened to 4 bits.
  There is no width conversion, because the bus is as wide as the
  cluster side.
- **Cut placement in the GLSU is a choice.** The GLSU cuts sit on the
  cluster links only.
- **The ring part of the slide unit is limited.**
  - It handles 64-bit elements only.
  - Slides by more than one element are not done.
  - Mask layout conversions over the ring are not done.
  - Integer operators (sum, and, or, xor, min, max) stand in for
    floating-point reductions.
- **The ring has no bubble flow control.** It relies on every receiver
  draining its packets. The slide unit injects at most one packet per
  direction per step, and it always drains.
- **Two parts of the design are its own choices.** The lane byte layout
  inside a 64-bit word is plain little-endian. The invalidation filter's
  line walk and range filter are not taken from a published description.
