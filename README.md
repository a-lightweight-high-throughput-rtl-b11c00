# In-network multicast and reduction for a tile-based ML accelerator mesh

A machine-learning accelerator built from many compute tiles spends much of
its communication on two patterns. In one, a single tile sends the same data
to many tiles (multicast). In the other, many tiles send data that has to be
combined into one place (reduction). Done in software, both become chains or
trees of point-to-point transfers that use the same links many times and pay a
round-trip latency at every step.

This RTL moves both patterns into the network-on-chip. It is organised
around four ideas:

- **One request names many nodes.** A request carries one address together
  with a mask. Every set mask bit is a "don't care", so the pair names a
  whole block of tiles.
- **Routers fork and merge.** A router copies a multicast flit onto several
  outputs. It merges the flits of a reduction that arrive on several inputs
  into one flit.
- **Cheap operations are done in the router.** Merging B responses,
  AND-ing barrier bits and picking one AW request out of many take one
  cycle at every output port.
- **Floating-point work is lent from the cluster.** The FP64 additions of
  a wide data reduction are done by the FPUs of the cluster next to the
  router, over a *direct compute access* (DCA) port. The router does not
  get an adder of its own.

The network is a 2D mesh with XY routing and three physical links: `req`,
`rsp` and `wide`. Each tile speaks AXI4 write transactions (AW, W and B) at
its network interface.

## The system

`collective_noc_top` is a mesh of 5 columns by 4 rows.

- **Column 0** holds four memory tiles, m0..m3. Each has an L2 memory.
- **Columns 1..4** hold sixteen compute tiles. Each has a cluster of
  eight cores, each core with an FPU.

Coordinates are 3-bit x and 2-bit y. North is y+1.

The compute tiles sit at x = 4..7, not at x = 1..4. This padding makes the
4 × 4 compute block an *aligned* submesh:

- its width and height are powers of two;
- its origin is a multiple of them.

Only an aligned block can be named by a (coordinate, mask) pair: masking
the two low x bits of x = 4 gives {4, 5, 6, 7}. The memory tiles sit at
x = 0 and are never multicast targets.

The address map follows the same alignment. Every compute tile owns a
256 KiB window in the cluster region at `0x1000_0000`:

| address bits | meaning |
| --- | --- |
| `[17:0]` | offset inside the tile's window |
| `[19:18]` | y |
| `[21:20]` | x − 4 |

Because the tile index is a bit field of the address, an AXI address mask
turns into coordinate masks by simple bit selection. Memory tile m*y* is
the 1 MiB window at `0x8000_0000 + y·2^20`. The bases and window sizes are
choices of this design.

Memories, DMA engines and cores are not part of the RTL. Per tile, the top
exposes three groups of ports, as arrays indexed by
tile = column·4 + row:

- an AXI write *manager* port, which a DMA engine would drive;
- an AXI write *subordinate* port, which a memory would answer;
- for compute tiles, the eight core FPU request/response ports.

## Flits

Every flit carries the full header `noc_pkg::hdr_t`:

| field | meaning |
| --- | --- |
| `dst_x`, `dst_y` | destination coordinates |
| `src_x`, `src_y` | source coordinates |
| `x_mask`, `y_mask` | coordinate masks |
| `op` | collective opcode |
| `ch` | AXI channel: AW, W or B |
| `last` | last flit of the packet |

Each AXI beat is one flit: the AW is a flit, and each W beat is a flit.
The `last` bit of the final W beat closes the packet.

The meaning of the masks depends on the opcode:

| opcode | where | masks name | routed |
| --- | --- | --- | --- |
| `OpUnicast` | any link | nothing | XY to `dst` |
| `OpMulticast` | AW/W, and B of a reduction | the destination block around `dst` | XY tree |
| `OpCollectB` | B of a multicast | the block of *sources* | XY to `dst` (the initiator) |
| `OpLsbAnd` | W of a barrier | the block of sources | XY to `dst` |
| `OpSelectAw` | AW of any reduction | the block of sources | XY to `dst` |
| `OpFAdd` | W of a wide FP64 reduction | the block of sources | XY to `dst` |

The links differ in payload and in which collectives they handle:

| link | payload | handles |
| --- | --- | --- |
| `req` | 64 bits | narrow AW and W; parallel reductions (SelectAW, LsbAnd) |
| `rsp` | 2 bits (the B code) | B responses; CollectB and multicast B |
| `wide` | 512 bits | wide AW and W; the wide FAdd reduction |

A wide AW is sent on the wide link ahead of its W beats. The reason is in
"Departures from the paper" below.

## Network interface: turning AXI into collectives

`network_interface` builds only the write channels.

**Outgoing.** The manager supplies two extra fields with each AW: a mask
and an opcode, carried as AWUSER.

- `mask_translator` turns the address and mask into destination
  coordinates and coordinate masks. The header gets this node as `src`.
- A reduction's AW leaves with the `SelectAW` opcode. Its W beats carry the
  reduction opcode (`LsbAnd` or `FAdd`).
- The header is kept in a register and reused for every W beat of the
  burst.

**Incoming.** The NI takes one whole packet at a time from the req and wide
links.

- `addr_resolver` replaces the masked address bits with this node's own
  coordinates. A multicast address therefore lands in each receiver's own
  window.
- The AW header is pushed into a small response buffer.

When the local memory answers with B, the buffered header decides what B
flit leaves:

- **Multicast request.** The B becomes a `CollectB` reduction flit towards
  the initiator. Its masks equal the multicast's, so its *sources* are
  exactly the nodes that received the multicast. The routers merge these Bs
  on the way, and the initiator receives one B. The two-bit codes are
  ORed, so an error from any receiver survives.
- **Reduction request.** The B becomes a multicast to the initiators. All
  participants get their B from the single write at the destination.
- **Otherwise.** The B is a unicast back to `src`.

## Routers

A tile has three `collective_router` instances, one per link. Each has
ports N, E, S, W and Local.

**Input side.** Each input has:

1. a two-entry buffer;
2. an `xy_route_fork`, which computes the set of outputs;
3. a `stream_fork`, which hands the flit to every output in that set and
   releases it only when all of them have taken it.

For a multicast, `xy_route_fork` follows an XY tree:

- It moves east or west while the destination block lies on that side.
- In every destination column it turns north and south.
- At every destination node it goes into Local.
- It never sends a flit back out of the port it came from.

Other opcodes follow the single XY route to `dst`.

**Output side.** Each output has an `output_arbiter`. Ordinary flits go
through a round-robin `wormhole_arbiter`, which holds the output until a
packet's last flit. Flits of a lightweight reduction go to a
`reduction_arbiter`.

### Which inputs take part in a reduction

A router must know which inputs carry flits of the same reduction. It works
this out from the header alone (`noc_pkg::red_inputs`).

The sources form an aligned block. Every source follows XY routing to
`dst`, so a flit travels:

1. along its own row to the destination column;
2. then along that column.

Hence:

- **A router off the destination column** receives flits from the side
  facing away from `dst`, if its row is a source row with sources on that
  side. It also receives from Local if it is itself a source.
- **A router on the destination column** can also receive from the north
  and the south.

`reduction_sync` uses this set and one reference input. It signals
*ready* once every expected input holds a flit of the same reduction. Two
flits belong to the same reduction when these all match:

- destination;
- masks;
- masked source;
- opcode;
- channel.

### Parallel reductions without deadlock

The `reduction_arbiter` has one `reduction_sync` per input, each using its
own input as reference. A leading-zero count then picks the lowest input
whose reduction is complete.

A reduction is therefore started only when all of its flits are present.
Two reductions whose paths cross can wait side by side in the same router
without either holding a resource the other needs.

The selected reduction is computed over all its inputs in one cycle, and
all of them are consumed together:

| opcode | result |
| --- | --- |
| `CollectB` | OR of the B codes |
| `LsbAnd` | AND of bit 0 |
| `SelectAW` | the reference flit |

A barrier is `LsbAnd` over all participants plus the multicast B that
answers it.

## Wide reductions and direct compute access

This is the most involved part of the design. It spans
`reduction_controller`, `dca_unit`, `dca_slice` and `fp64_adder`.

### Diverting flits to the controller

Only the wide router of a compute tile has a controller. An input diverts
a flit to it when both of these hold:

- the opcode is `FAdd` or `SelectAW`;
- at least two inputs of this router take part.

A router with one participating input simply forwards the flit.

### Choosing and running one reduction

A leading-zero count picks the reference input, and one `reduction_sync`
waits for the other participants. The controller then stays *locked* on
that reduction until its last flit. Only one wide reduction runs per
router at a time.

When a beat of the reduction is issued:

- **AW flits** (`SelectAW`) need no arithmetic. One copy is kept and
  pushed into the header buffer.
- **Data flits** (`FAdd`) send the first two participants' data to the
  offload port as two 512-bit operands. Their header goes into the header
  buffer (`HDR_DEPTH = 8`).

Results return in order. The head of the header buffer is joined with the
result and sent, as a unicast, through a sixth input of the output
arbiters.

### More than two participants

A router on the destination column can have three to five participating
inputs. The offload unit adds only two operands, so the controller makes
several passes:

- The buffer entry remembers which participants are still missing.
- When its result returns, the result goes straight back to the offload
  port with the next missing input as the second operand.
- This feedback has priority over issuing new beats.

Three inputs cost two passes, so a beat leaves every two cycles. Two
inputs reach one beat per cycle once the header buffer hides the pipeline
latency. Both rates are checked by the controller's testbench: 16 beats
take 16 cycles with two inputs and 31 cycles with three.

### Why the controller limits its in-flight work

A feedback takes one result and issues one request in the same cycle. It
needs the offload path to accept a request while its own output is
stalled. If the controller had filled the whole path, it would wait for
itself forever.

The controller therefore counts computations in flight. It starts a new
one only while fewer than `CREDITS = 6` are outstanding, which is below the
seven items that the cluster path (cut registers plus FPU pipeline) can
hold. The end-to-end test reduces sixteen clusters into one tile. The
destination router sees five inputs and makes four passes per beat. The
test locks up without this limit and passes with it.

### The DCA port

The offload port reaches the cluster's DCA port through a cut register in
each direction. The `spill_reg` registers valid, data and ready, so no
combinational path runs between router and cluster.

Inside `dca_unit`, each 512-bit operand is cut into eight 64-bit slices.
Slice *i* goes to core *i*'s FPU (`dca_slice`):

- A round-robin arbiter shares the FPU between the core and the DCA
  request.
- A one-bit tag travels with each operation through the `FPU_LAT = 3`
  pipeline stages and steers the result back to its requester.

A fork hands out the eight slices, which may be accepted in different
cycles. A join releases the 512-bit result only when all eight slices have
theirs. Cores keep using their FPUs while the network does; only the
shared pipeline slots are contended.

`fp64_adder` is an IEEE-754 double adder:

- round to nearest even;
- subnormal inputs and results flushed to zero;
- overflow to infinity.

It stands in for the cores' real FPUs, which are not part of this RTL.

## Departures from the paper and limits

- **Wide AW on the wide link.** The source text says the req link carries
  both wide and narrow requests. Its reduction-controller diagram, however,
  handles AW requests ("AW?", "Select AW") inside the wide router. This
  design follows the diagram: a wide burst's AW travels on the wide link.
- **More than two inputs per router.** The paper limits wide reductions to
  two inputs per router and says more inputs take multiple cycles, giving
  one beat every two cycles at three inputs. The feedback scheme and the
  credit limit above are this design's way of getting that behaviour.
- **Operations.** Only FP64 addition is implemented as a wide operation.
  The SIMD formats of the cores' FPUs (for example eight-bit floats) are
  not.
- **Network interface simplifications.** The NI builds only AXI writes
  (AW, W, B). It sends one burst at a time and returns B in order without
  IDs. A narrow burst uses bits [63:0] of the W data. Read transfers (AR, R)
  of the base network are not built.
- **Choices where the paper gives no detail.** All of these are this
  design's own:
  - buffer depths (input 2, header 8, response info 4);
  - FPU latency (3);
  - the address map;
  - the OR rule for merged B codes;
  - round-robin arbitration.
- **Mesh size.** The coordinate widths (3 and 2 bits) fit the 5 × 4
  system. The 256 × 256 meshes that the paper estimates analytically would
  need wider coordinates in `noc_pkg`.
- **Not built.** Cores, DMA engines, L1 and L2 memories, and the physical
  implementation are not built. In the testbenches they are replaced by
  behavioural managers, memories and FPU users.

## Simulation

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`.
Each prints `TB_RESULT checks=… failures=…` and has a watchdog.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    --top-module tb_collective_noc_top rtl/noc_pkg.sv tb/tb_collective_noc_top.sv
./obj_dir/Vtb_collective_noc_top
```

Use the same command with another testbench name for each block.

`tb_collective_noc_top` runs the top at its default size. Compiling it
takes a few minutes; it then runs in seconds. It plays DMA engines and
memories on all twenty tiles and runs these scenarios:

1. a wide unicast and a narrow unicast to an L2 tile;
2. a 2D multicast from m0 to all sixteen clusters, with one cluster
   answering an error; the initiator must receive exactly one B carrying
   the error;
3. a 1D multicast that includes its sender;
4. two barriers, one of which fails the AND;
5. a 1D FAdd reduction along a row;
6. a 2D FAdd reduction of all sixteen clusters while the destination
   cluster's cores load their FPUs;
7. crossing multicast and unicast traffic.

It checks every memory word and every B. At the end it prints how often
each mechanism happened:

- unicast, wide and narrow;
- 1D and 2D multicast;
- collected B, including an error merge;
- LsbAnd barrier and multicast B;
- 1D and 2D FAdd;
- DCA requests;
- core FPU operations and FPU contention.

`tb_collective_workloads` runs the collective transfers at the smallest
and largest sizes of interest, 1 KiB and 32 KiB. It also runs at the
default size. A 32 KiB transfer is 512 beats. Each DMA engine issues it as
two bursts of 256 beats. The testbench checks every destination byte and
times each transfer from the first AW to the last B. It checks the
streaming rate, computed as (T(32 KiB) − T(1 KiB)) / 496 beats.
Measured results:

| Transfer | T(1 KiB) | T(32 KiB) | cycles/beat |
|---|---|---|---|
| 1D multicast, m0 → row 0 | 29 | 527 | 1.00 |
| 2D multicast, m0 → 16 clusters | 35 | 533 | 1.00 |
| 1D FAdd, row 0 → (4,0) | 42 | 540 | 1.00 |
| 2D FAdd, 16 clusters → (4,0) | 93 | 1091 | 2.01 |

The 2D reduction streams at half the 1D rate. The routers in column
x = 4 merge three inputs (Local, East, North), and the controller can
only add two at a time. A barrier of all sixteen clusters completes in 18
cycles.

The block testbenches cover, among other things:

- **Router.** Random traffic against a reference model of the XY tree.
- **Output arbiter.** Packet integrity under random back-pressure.
- **Controller.** Throughput with two and three inputs.
- **DCA unit.** Every FP64 result checked against `real` arithmetic while
  cores and the DCA compete.
- **Network interface.** Two NIs wired back to back.
