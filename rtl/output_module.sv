// output_module: third-stage output module OM(j) of the Clos-UDN switch.
//
// OM(j) receives the m links LC(r,j), one from each central module, and has
// n output ports OP(j,h), each with its own output buffer (output_buffer).
// Every packet arriving on any link is written, in the same cycle, to the
// buffer of its port h = dst mod n; a buffer can take a packet from every
// link at once, which is the "output queues run (m+1) faster than LC links"
// of the switch overview (m writes plus one read per time slot).
//
// Interface: lc_* are the incoming links (no ready: senders first check
// om_space); om_space[h] tells every central module that buffer h has room
// for a full slot of writes; op_* is one packet per output line and slot.
//
// The module's structure is as described; buffer depth and om_space are
// this design's choices.
module output_module
  import clos_udn_pkg::*;
#(
  parameter int unsigned N        = 8,   // n, output ports
  parameter int unsigned M_IN     = 8,   // m, incoming LC links
  parameter int unsigned OB_DEPTH = 16   // packets per output buffer (assumed)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            slot_tick,
  input  logic [M_IN-1:0] lc_valid,
  input  pkt_t            lc_pkt   [M_IN],
  output logic [N-1:0]    om_space,
  output logic [N-1:0]    op_valid,
  output pkt_t            op_pkt   [N]
);
  for (genvar h = 0; h < N; h++) begin : g_op
    logic [M_IN-1:0] wr_valid;

    always_comb begin
      for (int l = 0; l < M_IN; l++)
        wr_valid[l] = lc_valid[l] && (int'(lc_pkt[l].dst) % N == h);
    end

    output_buffer #(.M_IN(M_IN), .DEPTH(OB_DEPTH)) u_ob (
      .clk, .rst_n, .slot_tick,
      .wr_valid,
      .wr_pkt  (lc_pkt),
      .space   (om_space[h]),
      .op_valid(op_valid[h]),
      .op_pkt  (op_pkt[h])
    );
  end
endmodule
