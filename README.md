# A credit-flow-controlled virtual-channel router and 4×4 mesh NoC

This is SystemVerilog RTL for a packet-switched network-on-chip router and a
16-endpoint 2D-mesh network built from it. It follows the router template
and the mesh in Zhao and Hoe, "Using Vivado-HLS for Structural Design: a NoC
Case Study". That paper describes routers of the CONNECT family in C++ for
high-level synthesis and checks them against the CONNECT RTL. The paper is
about design methodology, so it states what each part of the router does
more often than how. Where it is silent, this RTL makes its own choices,
and each one is listed below.

The design in one paragraph: flits arrive at a router's input ports. Every
flit carries its own destination. A routing table turns that destination
into an output port the moment the flit arrives, and the flit is stored in
the buffer of its virtual channel (VC). Every cycle, a separable input-first
allocator looks at the head flit of every VC buffer. It picks at most one
flit per input and at most one per output, and the winners cross a crossbar
into registered outputs. Credit-based flow control keeps every buffer from
overflowing: a router sends a flit only when it holds a credit for the
downstream VC buffer, and it returns a credit upstream for each flit that
leaves one of its own buffers.

## Files

| file | contents |
|---|---|
| `rtl/noc_pkg.sv` | shared constants, direction codes, and the mesh geometry and routing functions run at elaboration |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/flit_buffer.sv` | one VC's FIFO; route and payload parts kept in separate arrays; head readable before pop |
| `rtl/route_table.sv` | destination → output-port lookup table |
| `rtl/sep_if_allocator.sv` | separable input-first switch allocator built from `rr_arbiter`s |
| `rtl/xbar_switch.sv` | crossbar |
| `rtl/credit_tracker.sv` | per-output, per-VC credit counters |
| `rtl/router.sv` | the router |
| `rtl/mesh_noc.sv` | top level: 4×4 mesh of routers with 16 endpoint ports |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_router_configs` |
| `tb/router_harness.sv` | traffic generator and scoreboard around one router, shared by two testbenches |

## Flits and credits

Flits and credits are packed vectors. Their widths follow the parameters:

```
flit   = { valid, vc[VC_W-1:0], dst[DEST_W-1:0], data[DATA_W-1:0] }
credit = { valid, vc[VC_W-1:0] }
VC_W = max(1, clog2(NVC))   DEST_W = clog2(number of endpoints)
```

At the defaults (2 VCs, 16 endpoints, 32-bit data) a flit is 38 bits wide
and a credit 2 bits. Every port of a router, and every endpoint port of the
mesh, is a pair of links: flits in one direction, credits in the other. A
link can carry one flit and one credit per cycle.

Each flit is routed on its own. There are no head or tail flits, and no VC
is held for the length of a packet. A flit stays on the VC its source gave
it, from end to end, so the router has no VC allocator. Flits that share a
source, a destination and a VC arrive in the order they were sent, because
they follow the same path through the same FIFOs.

## Inside the router

### Timing

The router is a two-stage pipeline:

| cycle | what happens |
|---|---|
| t | A valid flit is on `in_flit[p]`. Its output port is looked up, and the flit and port are written into buffer `vc` of input `p` at the clock edge. |
| t+1 | The flit is at the head of its buffer. If the credit counter of its output for its VC is non-zero, it requests that output. The allocator grants non-conflicting requests. Granted heads are popped and pass through the crossbar into the output registers. |
| t+2 | The flit is on `out_flit[o]`. The credit for the slot it freed is on `in_credit[p]`. |

So a flit that nothing blocks crosses a router in two cycles, and each
output can carry one flit every cycle. In the mesh, a flit that crosses
*h* links passes through *h+1* routers and arrives 2(*h*+1) cycles after
injection. Corner to corner, N0 to N15, takes 14 cycles. A credit makes a
round trip in 3 cycles from source to router, and in 2 cycles from router
to the next hop. Buffers of 4 or more flits therefore keep a link at full
rate.

### Flit buffers

Each input port has `NVC` separate buffers (`flit_buffer`). Each buffer
keeps the route part of a flit (output port and destination) and the
payload part in two arrays. The two arrays share their pointers, so
together they act as one FIFO. The head is read combinationally, so the
allocator can look at a flit before deciding to pop it. This follows the
paper, which uses a FIFO that can be read before it is dequeued and keeps
one input port's VC buffers in separate structures. Writing into a full
buffer is illegal, and an assertion catches it. Credit flow control
prevents it: a buffer can never receive more than `DEPTH` flits that have
not been returned as credits.

### Allocation: the separable input-first allocator

This is the densest part of the design (`sep_if_allocator.sv`). A VC of
input *i* makes a request when its buffer is not empty and its output has
a credit for that VC. Checking credits before allocation means no grant
is ever wasted on a flit that cannot leave.

1. **Input stage.** Each input has a round-robin arbiter over its `NVC`
   VCs. It picks one requesting VC. That VC's requested output becomes
   the input's request.
2. **Output stage.** Each output has a round-robin arbiter over the
   inputs. It picks one of the inputs whose chosen VC wants this output.

The output grants are one-hot crossbar selects. An input is popped only
if it won at some output. A flit that loses at either stage waits for the
next cycle. The arbiters' pointers behave as follows:

* An output arbiter moves past its winner every time it grants.
* An input (VC) arbiter moves only when its input wins an output. A VC
  whose choice lost at the output stage keeps its priority.

Under sustained load, each output therefore serves all competing inputs
in turn, and each input serves its VCs in turn. The paper names the
allocator type and the round-robin arbiters; the pointer policy is this
design's own.

A separable allocator does not always find the largest possible set of
connections: two inputs can both choose VCs that want the same output
while another output stays idle. The paper describes the goal as sending
as many flits as possible, but it names this allocator type, and the
allocator type is what is built.

### Crossbar and outputs

`xbar_switch` is an AND-OR multiplexer per output. An output that is not
selected carries all zeros, that is, an invalid flit. The switched flits
are registered, and each output's `credit_tracker` takes one credit for
the VC it sent on. Counters start at `DEPTH` after reset and never go
below zero or above `DEPTH`; assertions check both limits.

## The mesh (`mesh_noc`)

```
 N12   N13   N14   N15          row 3
 R12 - R13 - R14 - R15
  |     |     |     |
 R8  - R9  - R10 - R11          Rk: column k mod 4, row k div 4
  |     |     |     |           Nk is attached to port 0 of Rk
 R4  - R5  - R6  - R7
  |     |     |     |
 R0  - R1  - R2  - R3           row 0
```

Corner routers have 3 ports, edge routers 4 and interior routers 5. A
router's ports are its present directions in this order: endpoint (0),
west (1), south (2), east (3), north (4). For example, R0's ports are
endpoint, east and north, numbered 0, 1 and 2. The direction codes are
the link numbers printed in the paper's mesh figure. Which of 2 and 4 is
north is this design's reading of the figure; nothing else depends on it.

Routing is dimension-ordered: a flit first travels east or west to its
destination's column, then north or south. Each router's table is
computed at elaboration by `noc_pkg::mesh_route_table`. X-then-Y routing
on a mesh cannot deadlock, so both VCs can carry any traffic.

The 16 endpoints are outside the design. Endpoint *k* drives
`inj_flit[k]`, receives `inj_credit[k]`, receives `ej_flit[k]` and drives
`ej_credit[k]`. An endpoint starts with `DEPTH` credits per VC, and it
sends on a VC only while it holds a credit for it. When it receives flits,
it must have room for `DEPTH` flits per VC, and it returns one credit for
each flit it consumes.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `mesh_noc` | `MESH_X`, `MESH_Y` | 4, 4 | the paper's 4×4 mesh, 16 endpoints |
| `mesh_noc`, `router` | `NVC` | 2 | the paper's NoC configuration |
| `mesh_noc`, `router` | `DEPTH` | 8 | the paper's NoC configuration (flits per VC buffer) |
| `mesh_noc`, `router` | `DATA_W` | 32 | the paper's NoC configuration |
| `router` | `NPORTS` | 5 | interior mesh router |
| `router` | `NUM_DEST` | 16 | 16 endpoints |
| `router` | `ROUTE_TABLE` | destination mod `NPORTS` | own choice for a router used alone |
| `noc_pkg` | `PORT_W` | 4 | own choice: table entries allow up to 16 ports |
| `noc_pkg` | `MAX_DEST` | 64 | own choice: largest table size |

The router also works at other sizes. `tb_router_configs` runs 2-, 4-, 6-
and 8-port routers with 32- and 128-bit data, 2 and 4 VCs, and buffers of
4, 8, 16 and 32 flits. These are the axes of the paper's standalone-router
comparison. The paper's other 16-endpoint topologies (ring, double ring,
fat tree, torus, and a high-radix network of eight 9-port routers) are not
included. Building one means writing another netlist like `mesh_noc.sv`
and another route-table function; the router needs no change.

## Choices this RTL makes where the paper gives no detail

* Two pipeline stages (buffer write, then allocation and switch into an
  output register), as in the paper's two-stage switch example. The depth
  of the original router's pipeline is not stated.
* Flit and credit formats, field widths and field order.
* Single-flit packets, no VC allocation, and VCs kept end to end.
* Requests need a credit before allocation. The input arbiters advance
  only on a win.
* The routing table format, and X-then-Y routes in the mesh.
* Credits are returned registered, one cycle after the pop.
* Reset is synchronous and active low. It empties the buffers, fills the
  credit counters, and sets the arbiter pointers to 0. Buffer storage is
  not reset.
* The buffers are circular buffers with a combinational head read. The
  paper's HLS version uses a shift-register FIFO. Both can be read before
  dequeue.
* The original CONNECT RTL can pack the payload parts of one port's VC
  buffers into a single RAM. This design does not; each VC has its own
  buffer, as in the paper's own routers.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
All expected values come from models inside the testbenches, not from the
RTL.

| testbench | what it shows |
|---|---|
| `tb_rr_arbiter` | strict rotation under full load; random requests compared with a rotating-priority model |
| `tb_flit_buffer` | random push/pop against a queue model: head, empty, full and count every cycle; fills to full |
| `tb_route_table` | all 16 mesh tables × 16 destinations against X-then-Y routing computed from coordinates |
| `tb_credit_tracker` | credit runs out after exactly `DEPTH` sends; random sends and returns against a counter model |
| `tb_sep_if_allocator` | exact grants against a reference allocator; at most one grant per input and per output; fairness under full load |
| `tb_xbar_switch` | random one-to-one connections |
| `tb_router` | 2-cycle latency; one flit per cycle per output; random and hotspot traffic with slow sinks; delivery, integrity, per-(input, VC, output) order; no overflow downstream; conflicts and credit stalls occur |
| `tb_router_configs` | the same checks on eight router configurations covering every value of the size sweep |
| `tb_mesh_noc` | full-size mesh: exact latencies 2(*h*+1) for isolated flits on 8 source/destination pairs; uniform and hotspot traffic on both VCs; every flit delivered to the right endpoint, unchanged and in order; no endpoint buffer overflow. It also requires at least one allocation conflict, credit stall, full VC buffer, flit on each VC, and endpoint held back by credits |

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mesh_noc \
    -y rtl -y tb +libext+.sv rtl/noc_pkg.sv tb/tb_mesh_noc.sv -o sim
./obj_dir/sim
```

For the router testbenches, add `tb/router_harness.sv`. `tb_mesh_noc`
runs the mesh at its default parameters. It builds in well under a minute
and simulates in a fraction of a second. The RTL also parses and
elaborates with the slang front end of Yosys.

## Limits

* Agreement with CONNECT at the bit and cycle level cannot be claimed:
  the source describes the reference routers' structure, not their
  timing or encodings. What is verified is the behaviour described above.
* Only the mesh is built, not the other topologies the paper compares.
* Multi-flit packets, which would need tail bits and VC locking, are not
  modelled.
