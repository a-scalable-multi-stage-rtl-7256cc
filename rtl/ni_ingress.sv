// ni_ingress: network interface at one West ingress of a UDN central module.
//
// A packet arriving from an input module on link LI(i,r) enters row i of
// central module CM(r). This interface does two things:
//  * It computes the packet's relative routing header for the Modulo XY
//    route across the mesh. With s = ROW (this ingress row) and d = the
//    destination output module (d = dst / N_PER):
//        turn column  c = d mod M
//        x_hops       = c            East hops before turning
//        y_hops       = |d - s|      vertical hops, y_south = (d > s)
//    so a packet runs East along its row to column c, moves vertically to
//    row d, and then runs East to the mesh exit of row d. A packet with
//    d = s crosses the mesh in a straight line with no turn.
//  * It holds the credits for the West input buffer of router (ROW, 0):
//    li_ready is high while a credit is left, the same condition as "the
//    left-most router still has room in its left buffer".
//
// The routing algorithm is named Modulo XY and described as deterministic
// and minimal; the rule for the turn column (d mod M) is this design's
// choice. The interface's insides are not described beyond its name.
//
// Timing: combinational from li_* to w_*; a packet accepted in cycle t is in
// the router's West buffer after the clock edge ending cycle t.
module ni_ingress
  import clos_udn_pkg::*;
#(
  parameter int unsigned ROW   = 0,  // mesh row of this ingress (= IM index i)
  parameter int unsigned M     = 8,  // mesh depth (columns)
  parameter int unsigned N_PER = 8,  // output ports per output module (n)
  parameter int unsigned BD    = 4   // depth of the router's West buffer
) (
  input  logic  clk,
  input  logic  rst_n,
  // link from the input module
  input  logic  li_valid,
  input  pkt_t  li_pkt,
  output logic  li_ready,
  // into the West input of router (ROW, 0)
  output logic  w_valid,
  output flit_t w_flit,
  input  logic  w_credit
);
  localparam int unsigned CW = $clog2(BD + 1);

  logic [CW-1:0] credit;
  int unsigned   d;

  assign li_ready = (credit != '0);
  assign w_valid  = li_valid && li_ready;

  always_comb begin
    d                     = int'(li_pkt.dst) / N_PER;
    w_flit.pkt            = li_pkt;
    w_flit.rt.x_hops      = HOP_W'(d % M);
    w_flit.rt.y_south     = (d > ROW);
    w_flit.rt.y_hops      = (d > ROW) ? HOP_W'(d - ROW) : HOP_W'(ROW - d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credit <= CW'(BD);
    else        credit <= credit - CW'(w_valid) + CW'(w_credit);
  end

  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n) credit <= CW'(BD));
endmodule
