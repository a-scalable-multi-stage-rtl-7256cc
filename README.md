# Clos-UDN: a three-stage packet switch with mesh central modules

A large data-center switch is usually built as a three-stage Clos network:
input modules spread traffic across a set of central modules, which forward
it to output modules. In the classic design every central module is a
single-hop crossbar. A crossbar needs a scheduler that picks, every time slot,
which inputs may talk to which outputs. That scheduler is centralized and
limits how large and fast the switch can grow.

This design keeps the three Clos stages. It replaces each central crossbar by
a small **unidirectional network-on-chip (UDN)**. That is a mesh of tiny
input-queued routers, and packets flow through it from West to East. Each
router decides locally: round-robin arbitration per output and credit-based
flow control. Contention for the links to the output modules is therefore
resolved as packets move through the mesh, with no central scheduler. The
meshes run faster than the line rate (the *speedup* SP), which hides most of
the extra multi-hop latency.

The RTL is parameterized. Its defaults give a 64 x 64 switch:

- 8 input modules of 8 ports each;
- 8 central meshes of 8 x 8 routers;
- 8 output modules;
- router buffers of 4 packets;
- speedup 2.

## Structure

```
 IP(i,h) ──► IM(i) ──LI(i,r)──► CM(r) = K x M router mesh ──LC(r,j)──► OM(j) ──► OP(j,h)
            NP FIFOs            row i in ... row j out               NP output buffers
            NP RR schedulers
```

| Symbol | Parameter | Meaning |
|---|---|---|
| k | `K` | input modules = output modules = mesh rows |
| n | `NP` | ports per module; also the number of central modules (m = n) |
| M | `M` | mesh depth in columns, M <= K (default square, M = K) |
| BD | `BD` | router input buffer depth in packets |
| SP | `SP` | fabric clock cycles per time slot |

Port numbering is flat. Input port IP(i,h) is index `i*NP+h`, and output
port OP(j,h) is index `j*NP+h`. A packet for destination `d` goes to output
module `d / NP` and output port `d % NP`.

| File | Block |
|---|---|
| `clos_udn_pkg.sv` | packet, header and flit types; the routing functions |
| `sync_fifo.sv` | generic FIFO (input queues, router buffers, egress buffer) |
| `rr_arbiter.sv` | round-robin arbiter |
| `input_scheduler.sv` | round-robin link pointer of one input FIFO |
| `input_module.sv` | IM(i): FIFOs and schedulers, drives the LI links |
| `ni_ingress.sv` | mesh entry: writes the routing header, keeps credits |
| `udn_router.sv` | 3-input / 3-output mesh router |
| `ni_egress.sv` | mesh exit: buffers, strips the header, drives LC at line rate |
| `udn_cm.sv` | CM(r): the router mesh with its interfaces |
| `output_buffer.sv` | output queue taking up to m writes per cycle |
| `output_module.sv` | OM(j): one output buffer per port |
| `clos_udn_top.sv` | the whole switch and the slot generator |

## The central module mesh

This is the least familiar part of the design, so it gets the most detail.

### Shape

CM(r) is a grid of `K` rows and `M` columns of `udn_router`s.

- Row `i` is fed, on its West edge, by link LI(i,r) from input module i.
- Row `j` delivers, on its East edge, link LC(r,j) to output module j.

Links are unidirectional in the horizontal direction. A router forwards
East, or to its North or South neighbour, and never West. Every router has:

- inputs West, North and South, each with a FIFO of `BD` whole packets;
- outputs East, North and South, each with a round-robin arbiter over the
  inputs that request it, and a credit counter for the buffer downstream.

Routers on the top and bottom rows leave their outer vertical ports
unconnected. The arbiters never choose those ports, because routing never
asks for them.

### Routing header

On entry, `ni_ingress` of row `ROW` computes the destination row
`d = dst / NP`, which is the output module. It then prepends a relative
header:

- `x_hops = d mod M`: East hops to take before turning;
- `y_hops = |d - ROW|`: rows to cross;
- `y_south = (d > ROW)`: the vertical direction.

Each router looks only at the header (`route_out` in the package):

1. If `x_hops > 0`, go East and decrement `x_hops`.
2. Otherwise, if `y_hops > 0`, go North or South and decrement `y_hops`.
3. Otherwise go East. The packet is in its exit row and runs East to the
   egress interface.

The header is rewritten at each hop (`route_step`). This is a modulo form of
XY routing. Turns happen in column `d mod M`, so with M < K several
destination rows share one turn column. Each packet turns at most once, from
East to vertical and back to East. There is no West link. This leaves no
cycle in the channel dependency graph, so the mesh is deadlock-free. Each
flow has a single deterministic path.

### Flow control and timing

A router moves one whole packet per output per fabric cycle
(store-and-forward). It grants an output only when the credit counter for
the buffer downstream is nonzero.

- Credits start at `BD`.
- A credit is spent on each send.
- A credit comes back as a one-cycle pulse when the downstream buffer pops.
- A returned credit can be used in the next cycle.

The ingress interface holds the credits of the first router's West buffer.
`li_ready` means one of those credits is left. The egress interface returns
one credit for every packet it sends on.

A packet on its way from LI to LC takes one fabric cycle per router column,
plus one cycle into the egress buffer. It then leaves at the next slot
boundary, if the output module has room. With no other traffic, the latency
from input line to output line is a few time slots. The exact figure is
`expected_latency` function of `tb_clos_udn_top`.

## Time slots and speedup

Input lines, output lines and the LI and LC links carry at most one packet
per **time slot**. Only the mesh routers run faster. All logic is clocked by
the fast fabric clock, and `clos_udn_top` counts `SP` cycles per slot:

- `slot_tick` is high in the last cycle of each slot;
- every line-rate action happens only in that cycle: accepting an input
  packet, dispatching on LI, sending on LC, and reading an output buffer.

So a packet crosses up to SP mesh columns per slot.

The output buffers are the other fast element. A buffer can take up to m
packets in one cycle, one from each central module. It sends one packet per
slot to its line.

## Dispatching: dynamic or static

IM(i) has one FIFO per input port. FIFO `r` takes the packets of port `r`.
Each FIFO has a round-robin **input scheduler** that chooses which central
module gets its head packet.

- **Dynamic** (`static_dispatch = 0`, the main scheme). Scheduler `r`
  starts at link `r`, and every scheduler moves one link forward every slot.
  The m schedulers of a module therefore always point at m different links,
  and each FIFO visits every central module in turn. The load spreads
  evenly over the meshes without any request-grant exchange. If the chosen
  mesh entry has no credit, the head packet waits for the next slot and
  tries the next link. Packets of one flow can take different meshes and
  arrive out of order.
- **Static** (`static_dispatch = 1`). FIFO(i,r) always uses LI(i,r). Each
  flow has one fixed path through one mesh. A mesh routes deterministically
  and every buffer is FIFO, so packets are delivered in order. This behaves
  like a two-stage switch and gives up some throughput under unbalanced
  load.

`static_dispatch` is meant to stay constant while traffic flows.

## Backpressure and buffer sizes

Nothing is dropped inside the switch. A full stage stalls the stage before
it:

| Where | Signal | Condition |
|---|---|---|
| input line | `ip_ready` | FIFO not full (only in slot_tick cycles) |
| IM to CM | `li_ready` | ingress credit left |
| inside the mesh | router credits | downstream buffer has room |
| CM to OM | `om_space` | output buffer of that port has at least m free entries; the egress interface holds its packet until then |

The output lines are assumed always ready.

## Departures from the described switch, and choices made here

- **Routing rule.** The original work names the routing (modulo XY) and says
  it is deterministic, minimal and deadlock-free. It does not spell out the
  rule. The turn-column rule above is this design's reading.
- **Router degree.** The original routers are described as degree 3 at the
  mesh edges and 4 inside. Here every router has the same three inputs and
  three outputs, and unused edge ports are tied off.
- **Module split.** The 64 x 64 switch is taken as k = n = 8 with square
  8 x 8 meshes. The original fixes N = 64, m = n and M = k, but does not
  state k and n separately.
- **Buffer depths.** Input FIFOs (16 packets), output buffers (16) and the
  egress interface buffer (BD) are this design's sizes. The original
  analysis assumes unbounded queues. With finite queues, a full input FIFO
  pushes back on its line (`ip_ready`), and output-buffer room is signalled
  back to the meshes (`om_space`).
- **Packet format.** There is no printed format. Here a packet is
  destination (8 bits), source (8 bits), sequence number (16 bits) and
  payload (32 bits), and the header uses 5-bit hop counters. Widths are in
  `clos_udn_pkg`.
- **Speedup scope.** The speedup applies only to the routers. LI and LC stay
  at one packet per slot.
- **Zero-load latency.** The zero-load latency comes out somewhat lower than
  the published simulation curves (about 10.7 slots for 64 x 64 at SP = 2).
  Those curves come from a simulator whose per-hop and per-stage costs are
  not given. Here a hop costs one fabric cycle, and the IM and OM stages
  cost one slot each.
- **Reset.** Reset is asynchronous and active low. It clears all pointers,
  counters and credits. Storage arrays are not reset.
- **Not covered.** The line cards around the switch and the ASIC
  implementation are not covered. That includes the register-based or
  ripple-through FIFO macros and the area figures.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and ends, and a watchdog stops it if it
hangs. With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Wno-fatal \
    rtl/*.sv tb/tb_udn_cm.sv --top-module tb_udn_cm
./obj_dir/Vtb_udn_cm
```

| Testbench | What it checks |
|---|---|
| `tb_sync_fifo`, `tb_rr_arbiter` | against reference models, random traffic |
| `tb_input_scheduler` | pointer start values, one step per slot, static mode |
| `tb_input_module` | FIFO order per port, links distinct and credit-respecting, dispatch rule |
| `tb_ni_ingress`, `tb_ni_egress` | header fields, credits, line-rate sending, om_space |
| `tb_udn_router` | directed routing, arbitration and credit stalls |
| `tb_output_buffer`, `tb_output_module` | multi-write ordering, port decoding, space flag |
| `tb_udn_cm` | a full mesh under random load: every packet arrives once at the right row; per-packet latency bound |
| `tb_clos_udn_top` | 4 x 4 x 4 switch end to end (see below) |
| `tb_clos_udn_full` | the same test at the default 64 x 64 size, no overrides |
| `tb_clos_udn_shallow` | the same test at 64 x 64 with shallow 8 x 2 meshes (M = 2) |

The end-to-end test drives the switch with:

1. single packets, to check the zero-load latency formula;
2. uniform Bernoulli traffic, dynamic dispatching;
3. diagonal traffic, dynamic dispatching;
4. unbalanced traffic (ω = 0.5), static dispatching, checking in-order
   delivery per flow;
5. all-to-one hot-spot traffic, static dispatching, which forces backpressure.

It checks that:

- every packet is delivered exactly once, to the right port, unchanged;
- output lines send at most one packet per slot.

It also counts the mechanisms and fails if any of them never happened:

- vertical hops in a mesh;
- credit stalls inside a router;
- refusals at a mesh entry (no LI credit);
- output-buffer room withheld (`om_space` low);
- a full input FIFO pushing back on its line;
- mesh moves between slot boundaries (the speedup at work);
- reordering under dynamic dispatching;
- use of both dispatching modes.

Parameters are changed with `-G` (e.g. `-GM=4 -GSP=4` on the top) or in the
instantiation. Keep `M <= K`. `K` and `NP` must fit the 8-bit port field,
which allows up to 256 ports.
