# Streaming buses and gather packets for a mesh NoC DNN accelerator

Convolution layers on an output-stationary accelerator have very lopsided
traffic. Each processing element (PE) keeps one output and needs a long
stream of input activations and filter weights: C·R·R pairs per output. It
then sends back a single 32-bit partial sum. Carried as ordinary unicast
packets over a mesh network-on-chip, the inputs flood the mesh with
repeated copies, and every partial sum costs a whole packet.

This design splits the two directions:

* **Streaming buses carry the inputs.** Every mesh row has a streaming
  unit that broadcasts activations to all nodes of the row on a dedicated
  bus. Every column has a unit that broadcasts weights down the column.
  PE (y, x) thus sees activation stream y and weight stream x at the same
  time. The mesh carries no input traffic.
* **Gather packets carry the results.** The west-most node of each row
  starts a *gather packet* that travels east along the row to the global
  buffer. Every router it passes writes its own node's partial sums into
  free slots of the packet while the packet moves through it, without
  extra cycles. A row of eight results then costs one 3-flit packet
  instead of eight 2-flit unicast packets.

The RTL is written in synthesizable SystemVerilog. It simulates with plain
Verilator, and the default parameters give the full 8×8 configuration.

## Configuration

| Item | Default | Parameter |
|---|---|---|
| Mesh | 8 × 8 (16 × 16 works too) | `ROWS`, `COLS` |
| Virtual channels | 2 per port | `NUM_VC` (package) |
| Router / link latency | 4 cycles / 1 cycle | fixed by the pipeline |
| Input buffer | 4 flits per VC | `BUF_DEPTH` |
| Flit | 128 data bits plus a 2-bit flit type | `FLIT_W` |
| Gather payload word | 32 bits | `PAYLOAD_W` |
| PEs per router | 1 (2, 4 and 8 supported) | `N_PE` |
| Gather packet | 2·N_PE + 1 flits (3/5/9/17) | `GATHER_FLITS` |
| MAC pipeline | 5 cycles | `T_MAC` |
| Operands / accumulator | 16-bit signed / 32-bit | `DATA_W`, `ACC_W` |
| Stream memory | 4608 words per row and per column | `STREAM_DEPTH` |
| Global buffer | 1024 words per row | `GB_DEPTH` |

The stream memory depth is this design's own sizing. It holds one round of
the deepest VGG-16 layer: C·R·R = 512·3·3.

## The gather packet

A gather packet has one head flit and `GATHER_FLITS-1` body/tail flits.
Each body or tail flit has four 32-bit slots. With the packet sizes above,
a packet holds exactly one payload from each of the 8 nodes of a row, for
any number of PEs per router (8·N_PE words in (2·N_PE)·4 slots).

The flit type (head/body/tail) travels on two wires beside the 128 data
bits rather than inside them. That keeps all four slots of a body flit free
for payload. The head flit's 128 bits hold, from the top:

| Field | Bits | Meaning |
|---|---|---|
| PT | 2 | packet type: unicast, multicast, gather |
| ASpace | 8 | free 32-bit slots left in the packet |
| Src | 10 | source (y, x), 5 bits each |
| Dst | 10 | destination (y, x) |
| MDst | 64 | multicast bitmap, one bit per node of an 8×8 mesh |
| Reserved | 34 | zero |

Slots fill in order. The next free slot is `capacity − ASpace`, so a
router knows from the head flit which body flit and which slot its payload
goes into. A packet that arrives at the global buffer with ASpace = a
carries `capacity − a` valid words, which are stored in that order.
Within a row, partial sums therefore arrive west to east.

`rtl/noc_pkg.sv` defines these structs (`hdr_t`, `flit_t`) and the
constants.

## How a router fills a packet

Each router (`rtl/router.sv`) is an input-buffered virtual-channel router
with five ports (N, E, S, W, local) and XY routing. It has four pipeline
stages:

| Cycle | Stage |
|---|---|
| c | head flit written into the input buffer |
| c+1 | RC: route computation |
| c+2 | VA: virtual channel allocation |
| c+3 | SA: switch allocation |
| c+4 | ST: crossbar into the output register |
| c+5 | on the next router's input buffer |

A head flit therefore crosses one hop every five cycles when the network
is idle. Body and tail flits follow one per cycle. Flow control is
credit-based, one credit per buffer slot and VC.

Two blocks inside the router handle gathering:

* **Gather Payload queue** (`rtl/gather_payload.sv`). It holds the node's
  pending payloads. Each payload is the N_PE partial sums of one round,
  with their destination. The oldest entry is offered to the router.
* **Load generator** (`rtl/gather_load_gen.sv`). It runs at RC on every
  head flit. Load is raised when all of these hold:
  * the flit is a head flit;
  * it belongs to a gather packet;
  * its ASpace ≥ the payload size;
  * its Dst equals the payload's destination.

  A gather head for the same destination with too little room raises
  *full* instead.

When Load is raised:

1. The router claims the entry.
2. It puts ASpace − N_PE into the head flit as the head flit leaves.
3. It overwrites the right slots of the body/tail flits as those flits are
   read out of the buffer at switch allocation.

The payload write sits in a stage every flit passes anyway, so gathering
adds no cycle to a packet. After the last word is written, the queue drops
the entry and pulses `uploaded`.

### When a node starts its own packet: the timeout δ

Not every payload finds a packet. Each node has a timeout `delta`, counted
from the moment its entry reaches the head of the queue:

* **No packet in time.** If no suitable packet passes within δ cycles, the
  entry is handed back to the network interface (`init_valid`, δ+1 cycles
  after the entry reached the head). The interface builds a new gather
  packet with the payload in slot 0 and ASpace = capacity − N_PE.
* **Full packet.** If a packet for the same destination passes but is
  full, the timer starts over. The node does not send at once, because a
  node further upstream has probably seen the same full packet and may
  already have started the next one. Only when δ runs out again does the
  node start its own.
* **δ = 0** turns every node into its own packet source. This is the
  repetitive-unicast-like extreme.

δ is an input per node, so it can be tuned per router:

* The west column gets δ = 0, so it always starts the packets.
* The others need a δ that grows along the row. After a full packet passes
  two neighbours, their restarted timers run out one hop apart. A new
  packet started at the first neighbour needs its injection time on top of
  that hop. With equal δ values, it would reach the second neighbour just
  after that node had given up.
* The test benches use δ = 60 + 30·x for the reduced mesh, and
  δ = 100 + 10·x at full size.

If a passing packet claims an entry in the same cycle that its timer
expires, the claim wins.

## Network interface and PEs

Each node (`rtl/node.sv`) holds a router, a network interface
(`rtl/ni.sv`) and N_PE PEs (`rtl/pe.sv`).

**Streams in.** The interface has separate queues for:

* the row bus (N_PE activations per word, one per PE);
* the column bus (one weight, shared by all PEs of the node);
* flits delivered by the router.

This is the arrangement where several PEs of one column share a router.
When both stream queues have a word and all PEs are ready, each PE gets
its activation and the shared weight. Both queues are popped together, and
each pop returns one credit to its streaming unit.

**PE.** Each PE accumulates `k_len` products in a `T_MAC`-stage pipeline
and applies ReLU when `relu_en` is set. The result is valid `T_MAC`
cycles after the last pair is accepted. A PE accepts the first pair of the
next sum while the previous sum waits in its output register, and holds
back the last pair only while that register is occupied.

**Results out.** When all PEs have a result, the interface packs the N_PE
words into one gather payload for the router's queue. A payload handed
back on timeout becomes a new gather packet: a head flit followed by
GATHER_FLITS−1 body/tail flits. These go into the router's local input on
one VC, chosen at the head flit, with credits like any upstream router.

## Streaming units and the global buffer

**Streaming units.** A streaming unit (`rtl/stream_unit.sv`) is a memory
plus an address counter. After `start`, it sends `count` words from `base`,
one per cycle. It sends only when every node on its bus has a free credit:
it keeps one counter per node, decremented on send and incremented by that
node's credit return. `stall` shows a cycle where a word was ready but some
node was full. Starting the activation and weight streams at different
times makes the leading stream stall until the other catches up.

**Global buffer.** The global buffer (`rtl/global_buffer.sv`) sits east of
the mesh, with one input port per row at x = COLS. It:

* accepts every flit at once and returns the credit in the next cycle;
* stores the valid words of each gather packet in arrival order, in a
  per-row bank;
* counts gather and unicast packets.

Each bank is split into four lanes, so the four words of one body flit
are written in one cycle with one write port per lane.

**Top level.** The top (`rtl/noc_accel.sv`) places a streaming unit on
every row and every column, the ROWS×COLS nodes, and the global buffer.
The north, south and west edges of the mesh are left unconnected. The
per-node status outputs (`node_uploaded`, `node_initiated`,
`node_saw_full`, `node_rx_valid`) are meant for monitoring.

A higher-level controller outside this design must:

* map the layer onto the mesh;
* load the stream memories;
* set `k_len`, `relu_en` and δ;
* start each round.

## One round, end to end

With 1 PE per router on the 8×8 mesh and K = 9 products per output:

1. Both streams start together and send one word per cycle.
2. Every PE has its last pair after about K + 2 cycles and its partial sum
   T_MAC cycles later.
3. The west node's packet leaves after the interface builds it and then
   crosses the eight routers of the row at five cycles per hop. Each
   router adds its payload on the way.
4. The last word of row 0 reaches the global buffer 63 cycles after the
   streams start (measured).

With several rounds streamed back to back, the gather of one round
overlaps the MACs of the next.

## Where the design departs from the source description

* **Payload fill stage.** The source description fills the payload
  during the RC and VA stages of the body flits. Here it is written when
  the flit is read at SA. Neither adds a cycle.
* **What a timeout produces.** The source is inconsistent about whether a
  timed-out node sends a gather or a unicast packet. This design always
  sends a gather packet.
* **Full packets.** A full packet makes the node wait δ again, rather than
  send at once. Sending at once makes every node downstream of a full
  packet start a packet of its own. That breaks the one-extra-packet
  behaviour the description expects when a row needs two packets.
* **Interface queues.** The interface uses separate queues for the two
  streams and for delivered flits, where the description shows one shared
  incoming queue.
* **Not built:**
  * the one-way streaming variant, where one bus carries both inputs
    through a multiplexer;
  * the repetitive-unicast baseline: unicast packets are still routed and
    counted, but no unit issues them;
  * multicast delivery.
* **Own choices** where the description is silent: all widths except the
  flit and the payload, the header bit positions, the queue depths, the
  allocator policies, XY routing, ReLU, and the memory sizes.
* **Multicast field on 16×16.** MDst is 64 bits, enough for an 8×8 mesh
  only. The rest of the design works on 16×16: coordinates have 5 bits, and
  two gather packets per row are needed with 1 PE per router.

## Verification

Every block has a self-checking test bench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| Test bench | What it checks |
|---|---|
| `tb_gather_load_gen` | Load/full/ASpace against a reference model over random headers |
| `tb_gather_payload` | hand-back exactly δ+1 cycles after reaching the head; claim, upload pulse; timer restart after a full packet; claim beats timeout |
| `tb_router` | 5-cycle hop latency; XY routing to all outputs; random traffic from all inputs with random credit return (every packet whole, in order, on one VC); payload written into the first free slot with ASpace decremented; full and foreign packets passed unchanged |
| `tb_pe` | sums and ReLU against a reference; result exactly T_MAC cycles after the last pair; back-pressure |
| `tb_stream_unit` | order and count of words; one word per cycle; stall on a missing credit |
| `tb_ni` | operand pairing; credit return; payload packing; own gather packet format |
| `tb_global_buffer` | stored words and order; packet counts; several rows finishing together |
| `tb_noc_accel` | 3×6 mesh, 2 PEs per router, 2-flit gather packets (three packets per row). Two overlapping rounds plus a ReLU round with δ = 0. Checks every partial sum against a reference and the packet count. Counts and requires a stream stall, a payload picked up in passing, a timeout start, a full packet seen, a start after a full packet, and overlap of gather and streaming |
| `tb_noc_accel_full` | default 8×8 configuration, no parameter overrides: one round, all 64 results in west-to-east order, one gather packet per row, arrival time bound |

To run one, for example the full-size test:

```
verilator --binary --timing -Wno-fatal --top tb_noc_accel_full \
    -Irtl -y rtl rtl/noc_pkg.sv tb/tb_noc_accel_full.sv
obj_dir/Vtb_noc_accel_full
```

The full-size test builds in about two minutes and simulates in under a
second. Assertions in the RTL check buffer overflow, credit ranges and the
gather handshake during simulation.
