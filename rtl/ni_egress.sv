// ni_egress: network interface at one East egress of a UDN central module.
//
// Packets leaving the last mesh column of row j of CM(r) go to output module
// OM(j) over link LC(r,j). The interface:
//  * buffers them in a FIFO of DEPTH packets, returning a credit pulse to the
//    router each time one leaves (credit-based flow control);
//  * strips the routing header;
//  * sends at most one packet per time slot on LC (slot_tick high), because
//    the LC links run at the line rate while the mesh may run SP times
//    faster;
//  * sends only when the OM's buffer for the packet's output port
//    (h = dst mod N_PER) reports room (om_space[h]).
//
// The one-packet-per-slot LC limit follows the statement that at most one
// packet crosses an LI/LC link per time slot. The buffer, its depth and the
// per-port room check are this design's choices: the interface is named but
// not described.
//
// Timing: lc_valid is combinational from the buffer head, slot_tick and
// om_space; the packet leaves the buffer at the edge ending that cycle.
module ni_egress
  import clos_udn_pkg::*;
#(
  parameter int unsigned N_PER = 8,  // output ports per output module (n)
  parameter int unsigned DEPTH = 4   // egress buffer depth (credits granted to the router)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             slot_tick,
  // from the East output of the last router of the row
  input  logic             e_valid,
  input  flit_t            e_flit,
  output logic             e_credit,
  // link LC(r,j) to the output module
  output logic             lc_valid,
  output pkt_t             lc_pkt,
  input  logic [N_PER-1:0] om_space
);
  flit_t                      head;
  logic                       empty, full_unused;
  logic [$clog2(DEPTH+1)-1:0] count_unused;
  int unsigned                h;

  sync_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .push (e_valid),
    .wdata(e_flit),
    .pop  (lc_valid),
    .rdata(head),
    .empty(empty),
    .full (full_unused),
    .count(count_unused)
  );

  always_comb begin
    h        = int'(head.pkt.dst) % N_PER;
    lc_pkt   = head.pkt;
    lc_valid = slot_tick && !empty && om_space[h];
  end
  assign e_credit = lc_valid;

  a_header_spent: assert property (@(posedge clk) disable iff (!rst_n)
    lc_valid |-> (head.rt.x_hops == '0 && head.rt.y_hops == '0));
endmodule
