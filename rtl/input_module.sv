// input_module: first-stage input module IM(i) of the Clos-UDN switch.
//
// IM(i) has n input ports IP(i,h) and, since the switch uses m = n, one FIFO
// per input port: IP(i,h) writes FIFO(i,h). Each FIFO has its own round-robin
// input scheduler (input_scheduler) that picks, every time slot, which output
// link LI(i,r) carries the FIFO's head packet to central module CM(r). A
// head packet is sent only when the chosen CM reports room in the West buffer
// of its left-most router (li_ready, a credit held in the CM's ingress
// interface); otherwise it waits for the next slot, when its scheduler will
// point at another link. Because the schedulers' pointers are always a
// permutation, at most one FIFO drives each link.
//
// Each FIFO takes at most one packet from its port and gives at most one to
// a link per time slot, so it runs at twice the line rate and never faster.
//
// Interface: ip_* is a valid/ready port per input line, a transfer happens in
// a cycle with ip_valid and ip_ready both high; ip_ready is high only in
// slot_tick cycles while the FIFO has room (the design's choice of input
// backpressure, the FIFO size is not given). li_* is one packet link per
// central module, li_valid only in slot_tick cycles and only with li_ready.
//
// Timing: a packet written at slot t can be dispatched at slot t+1 at the
// earliest.
module input_module
  import clos_udn_pkg::*;
#(
  parameter int unsigned N          = 8,   // n = m, ports and links per module
  parameter int unsigned FIFO_DEPTH = 16   // packets per input FIFO (assumed)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         slot_tick,
  input  logic         static_dispatch,
  // input ports IP(i,h)
  input  logic [N-1:0] ip_valid,
  input  pkt_t         ip_pkt   [N],
  output logic [N-1:0] ip_ready,
  // output links LI(i,r)
  output logic [N-1:0] li_valid,
  output pkt_t         li_pkt   [N],
  input  logic [N-1:0] li_ready
);
  localparam int unsigned SW = $clog2(N);

  logic [N-1:0]  full, empty, pop;
  pkt_t          head [N];
  logic [SW-1:0] sel  [N];

  for (genvar r = 0; r < N; r++) begin : g_q
    logic [$clog2(FIFO_DEPTH+1)-1:0] count_unused;

    sync_fifo #(.T(pkt_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (ip_valid[r] && ip_ready[r]),
      .wdata(ip_pkt[r]),
      .pop  (pop[r]),
      .rdata(head[r]),
      .empty(empty[r]),
      .full (full[r]),
      .count(count_unused)
    );

    input_scheduler #(.M_LINKS(N), .INIT(r)) u_sched (
      .clk, .rst_n, .slot_tick, .static_dispatch,
      .sel(sel[r])
    );

    assign ip_ready[r] = slot_tick && !full[r];
    assign pop[r]      = slot_tick && !empty[r] && li_ready[sel[r]];
  end

  always_comb begin
    li_valid = '0;
    for (int l = 0; l < N; l++) li_pkt[l] = head[0];
    for (int r = 0; r < N; r++) begin
      if (pop[r]) begin
        li_valid[sel[r]] = 1'b1;
        li_pkt[sel[r]]   = head[r];
      end
    end
  end

  // the schedulers must never point two FIFOs at one link
  always_comb begin
    if (rst_n) begin
      for (int a = 0; a < N; a++)
        for (int b = a + 1; b < N; b++)
          a_no_link_conflict: assert (sel[a] != sel[b]);
    end
  end
endmodule
