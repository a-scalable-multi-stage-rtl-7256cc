// clos_udn_top: (N x N) three-stage Clos-UDN packet switch, N = K * NP.
//
// Stage 1: K input modules IM(i) (input_module), each with NP input ports and
//          NP FIFOs, one per port, dispatching head packets to the NP central
//          modules through NP round-robin input schedulers.
// Stage 2: NP central modules CM(r) (udn_cm), each a K-row by M-column mesh
//          of mini-routers instead of a single-hop crossbar.
// Stage 3: K output modules OM(j) (output_module), each with NP output ports
//          and one output buffer per port.
// The number of central modules equals the ports per module (m = n = NP),
// the expansion factor of 1 of the described switch. Link LI(i,r) joins
// IM(i) to row i of CM(r); link LC(r,j) joins row j of CM(r) to OM(j).
//
// Time slots and speedup: one packet crosses an input line, output line, LI
// or LC link per time slot. The meshes run SP times faster: this design
// clocks everything on the fast clock and marks one cycle in SP as the slot
// boundary (slot_tick); the line-rate parts act only in those cycles.
//
// Dispatching: static_dispatch low selects the dynamic round-robin scheme
// (three-stage switch, best throughput, packets of one flow may be
// reordered). static_dispatch high ties FIFO(i,r) to LI(i,r) (the two-stage
// variant): each flow takes one fixed path and is delivered in order. The
// input is meant to be held constant while traffic flows.
//
// Defaults are the evaluated 64 x 64 configuration: K = NP = 8, square
// meshes M = K, BD = 4 packets, SP = 2. FIFO and output buffer depths are
// this design's choices (the analysis assumes unbounded queues).
//
// Ports: ip_* valid/ready per input port IP(i,h) = index i*NP+h, a transfer
// in a cycle with both high (ready only in slot_tick cycles); op_* one
// packet per output port OP(j,h) = index j*NP+h per time slot, no ready
// (the output line always takes it). slot_tick is brought out so that the
// line side knows the slot boundary.
module clos_udn_top
  import clos_udn_pkg::*;
#(
  parameter int unsigned K             = 8,   // input/output modules (k)
  parameter int unsigned NP            = 8,   // ports per module (n) = central modules (m)
  parameter int unsigned M             = 8,   // UDN mesh depth, M <= K
  parameter int unsigned BD            = 4,   // router buffer depth (packets)
  parameter int unsigned SP            = 2,   // fabric speedup
  parameter int unsigned IN_FIFO_DEPTH = 16,  // packets per input FIFO (assumed)
  parameter int unsigned OB_DEPTH      = 16   // packets per output buffer (assumed)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              static_dispatch,
  output logic              slot_tick,
  input  logic [K*NP-1:0]   ip_valid,
  input  pkt_t              ip_pkt   [K*NP],
  output logic [K*NP-1:0]   ip_ready,
  output logic [K*NP-1:0]   op_valid,
  output pkt_t              op_pkt   [K*NP]
);
  localparam int unsigned SPW = (SP > 1) ? $clog2(SP) : 1;

  // time-slot generator: slot_tick in the last fast cycle of every slot
  logic [SPW-1:0] sp_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sp_cnt <= '0;
    else        sp_cnt <= (sp_cnt == SPW'(SP - 1)) ? '0 : sp_cnt + 1'b1;
  end
  assign slot_tick = (sp_cnt == SPW'(SP - 1));

  // LI(i,r) and LC(r,j) links, indexed [source module][destination module]
  logic [NP-1:0] im_li_valid [K];
  pkt_t          im_li_pkt   [K][NP];
  logic [NP-1:0] im_li_ready [K];
  logic [K-1:0]  cm_li_valid [NP];
  pkt_t          cm_li_pkt   [NP][K];
  logic [K-1:0]  cm_li_ready [NP];
  logic [K-1:0]  cm_lc_valid [NP];
  pkt_t          cm_lc_pkt   [NP][K];
  logic [NP-1:0] om_lc_valid [K];
  pkt_t          om_lc_pkt   [K][NP];
  logic [NP-1:0] om_space    [K];

  for (genvar i = 0; i < K; i++) begin : g_link_i
    for (genvar r = 0; r < NP; r++) begin : g_link_r
      assign cm_li_valid[r][i] = im_li_valid[i][r];
      assign cm_li_pkt[r][i]   = im_li_pkt[i][r];
      assign im_li_ready[i][r] = cm_li_ready[r][i];
      assign om_lc_valid[i][r] = cm_lc_valid[r][i];
      assign om_lc_pkt[i][r]   = cm_lc_pkt[r][i];
    end
  end

  for (genvar i = 0; i < K; i++) begin : g_im
    input_module #(.N(NP), .FIFO_DEPTH(IN_FIFO_DEPTH)) u_im (
      .clk, .rst_n, .slot_tick, .static_dispatch,
      .ip_valid(ip_valid[i*NP +: NP]),
      .ip_pkt  (ip_pkt[i*NP +: NP]),
      .ip_ready(ip_ready[i*NP +: NP]),
      .li_valid(im_li_valid[i]),
      .li_pkt  (im_li_pkt[i]),
      .li_ready(im_li_ready[i])
    );
  end

  for (genvar r = 0; r < NP; r++) begin : g_cm
    udn_cm #(.K(K), .M(M), .N_PER(NP), .BD(BD)) u_cm (
      .clk, .rst_n, .slot_tick,
      .li_valid(cm_li_valid[r]),
      .li_pkt  (cm_li_pkt[r]),
      .li_ready(cm_li_ready[r]),
      .lc_valid(cm_lc_valid[r]),
      .lc_pkt  (cm_lc_pkt[r]),
      .om_space(om_space)
    );
  end

  for (genvar j = 0; j < K; j++) begin : g_om
    output_module #(.N(NP), .M_IN(NP), .OB_DEPTH(OB_DEPTH)) u_om (
      .clk, .rst_n, .slot_tick,
      .lc_valid(om_lc_valid[j]),
      .lc_pkt  (om_lc_pkt[j]),
      .om_space(om_space[j]),
      .op_valid(op_valid[j*NP +: NP]),
      .op_pkt  (op_pkt[j*NP +: NP])
    );
  end
endmodule
