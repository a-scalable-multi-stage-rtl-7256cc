// clos_udn_pkg: types and constants shared by the Clos-UDN packet switch.
//
// A packet (cell) is fixed-size and moves through the switch as one wide word:
// every link in the design carries a whole packet in one transfer, so a packet
// is always fully stored in a buffer before it moves on (store-and-forward).
//
// pkt_t is the packet seen at the switch ports: destination port, source port,
// a sequence number and a payload. The field widths are this design's choice
// (the packet format is not specified): 8-bit port numbers cover switches up
// to 256 x 256, the largest size evaluated.
//
// Inside a central module (UDN mesh) the packet carries a relative routing
// header (route_t) written by the ingress network interface and rewritten by
// every router on the way: the number of East hops before the turn, the number
// of vertical hops, and the vertical direction. This follows the statement that
// packets hold relative routing information in their header which routers
// examine and modify hop by hop.
package clos_udn_pkg;

  localparam int unsigned PORT_W    = 8;   // port index width, up to 256 ports
  localparam int unsigned SEQ_W     = 16;  // per-flow sequence number
  localparam int unsigned PAYLOAD_W = 32;  // cell body
  localparam int unsigned HOP_W     = 5;   // hop counters, meshes up to 32 x 32

  typedef struct packed {
    logic [PORT_W-1:0]    dst;      // global output port, dst = j*n + h
    logic [PORT_W-1:0]    src;      // global input port,  src = i*n + h
    logic [SEQ_W-1:0]     seq;
    logic [PAYLOAD_W-1:0] payload;
  } pkt_t;

  typedef struct packed {
    logic [HOP_W-1:0] x_hops;   // East hops still to take before the turn
    logic [HOP_W-1:0] y_hops;   // vertical hops still to take
    logic             y_south;  // 1: toward higher row numbers
  } route_t;

  typedef struct packed {
    route_t rt;
    pkt_t   pkt;
  } flit_t;

  // Router port numbering. Inputs: West, North, South. Outputs: East, North, South.
  localparam int unsigned P_W = 0;   // input from the West
  localparam int unsigned P_N = 1;   // input from the North neighbour
  localparam int unsigned P_S = 2;   // input from the South neighbour
  localparam int unsigned O_E = 0;   // output to the East
  localparam int unsigned O_N = 1;   // output to the North neighbour
  localparam int unsigned O_S = 2;   // output to the South neighbour

  // Modulo XY next-hop function on the relative header.
  function automatic logic [1:0] route_out(route_t rt);
    if (rt.x_hops != '0)      return 2'(O_E);
    else if (rt.y_hops != '0) return rt.y_south ? 2'(O_S) : 2'(O_N);
    else                      return 2'(O_E);
  endfunction

  // Header rewrite a router applies when it forwards a flit.
  function automatic route_t route_step(route_t rt);
    route_t r;
    r = rt;
    if (rt.x_hops != '0)      r.x_hops = rt.x_hops - 1'b1;
    else if (rt.y_hops != '0) r.y_hops = rt.y_hops - 1'b1;
    return r;
  endfunction

endpackage
