// udn_cm: central module CM(r), a Unidirectional NoC (UDN) crossbar fabric.
//
// Instead of a single-hop k x k crossbar, each central module is a mesh of
// K rows by M columns of small input-queued routers (udn_router). Row i
// takes link LI(i,r) from input module IM(i) through an ingress network
// interface (ni_ingress) on the West edge; row j delivers link LC(r,j) to
// output module OM(j) through an egress network interface (ni_egress) on the
// East edge. Packets move East one column per hop and change rows by North
// and South links between vertically adjacent routers (Modulo XY routing:
// East to the turn column d mod M, vertical to row d, East to the exit).
// M = K is the square mesh of the evaluated configuration; M < K gives a
// shallower, cheaper module (M <= K).
//
// Every router decides locally with round-robin arbiters and credit-based
// flow control, so contention for the LC links is resolved inside the mesh
// as packets advance; there is no central scheduler. The mesh runs on the
// fast clock (SP cycles per time slot) while the edge links LI and LC carry
// at most one packet per time slot.
//
// Interface: li_* one packet link per input module, li_ready = room in the
// left-most router's West buffer; lc_* one link per output module;
// om_space[j] the per-port room flags of OM(j).
// Timing: at least M + 1 fast cycles from LI to the egress buffer (one per
// router column plus the egress interface), then the next slot_tick.
module udn_cm
  import clos_udn_pkg::*;
#(
  parameter int unsigned K     = 8,   // rows = input and output modules
  parameter int unsigned M     = 8,   // mesh depth (columns), M <= K
  parameter int unsigned N_PER = 8,   // output ports per output module
  parameter int unsigned BD    = 4    // router input buffer depth
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             slot_tick,
  input  logic [K-1:0]     li_valid,
  input  pkt_t             li_pkt    [K],
  output logic [K-1:0]     li_ready,
  output logic [K-1:0]     lc_valid,
  output pkt_t             lc_pkt    [K],
  input  logic [N_PER-1:0] om_space  [K]
);
  // router signals, indexed [row][column]
  logic  [2:0] r_in_valid   [K][M];
  flit_t       r_in_flit    [K][M][3];
  logic  [2:0] r_in_credit  [K][M];
  logic  [2:0] r_out_valid  [K][M];
  flit_t       r_out_flit   [K][M][3];
  logic  [2:0] r_out_credit [K][M];

  logic  [K-1:0] w_valid, e_credit;
  flit_t         w_flit [K];

  for (genvar row = 0; row < K; row++) begin : g_row
    ni_ingress #(.ROW(row), .M(M), .N_PER(N_PER), .BD(BD)) u_ni_in (
      .clk, .rst_n,
      .li_valid(li_valid[row]),
      .li_pkt  (li_pkt[row]),
      .li_ready(li_ready[row]),
      .w_valid (w_valid[row]),
      .w_flit  (w_flit[row]),
      .w_credit(r_in_credit[row][0][P_W])
    );

    for (genvar col = 0; col < M; col++) begin : g_col
      // West input: ingress interface or the router to the West
      if (col == 0) begin : g_w_edge
        assign r_in_valid[row][col][P_W] = w_valid[row];
        assign r_in_flit[row][col][P_W]  = w_flit[row];
      end else begin : g_w_link
        assign r_in_valid[row][col][P_W] = r_out_valid[row][col-1][O_E];
        assign r_in_flit[row][col][P_W]  = r_out_flit[row][col-1][O_E];
      end
      // East output credits: egress interface or the router to the East
      if (col == M - 1) begin : g_e_edge
        assign r_out_credit[row][col][O_E] = e_credit[row];
      end else begin : g_e_link
        assign r_out_credit[row][col][O_E] = r_in_credit[row][col+1][P_W];
      end
      // North side: packets from row-1 travelling South
      if (row == 0) begin : g_n_edge
        assign r_in_valid[row][col][P_N]   = 1'b0;
        assign r_in_flit[row][col][P_N]    = '0;
        assign r_out_credit[row][col][O_N] = 1'b0;
      end else begin : g_n_link
        assign r_in_valid[row][col][P_N]   = r_out_valid[row-1][col][O_S];
        assign r_in_flit[row][col][P_N]    = r_out_flit[row-1][col][O_S];
        assign r_out_credit[row][col][O_N] = r_in_credit[row-1][col][P_S];
      end
      // South side: packets from row+1 travelling North
      if (row == K - 1) begin : g_s_edge
        assign r_in_valid[row][col][P_S]   = 1'b0;
        assign r_in_flit[row][col][P_S]    = '0;
        assign r_out_credit[row][col][O_S] = 1'b0;
      end else begin : g_s_link
        assign r_in_valid[row][col][P_S]   = r_out_valid[row+1][col][O_N];
        assign r_in_flit[row][col][P_S]    = r_out_flit[row+1][col][O_N];
        assign r_out_credit[row][col][O_S] = r_in_credit[row+1][col][P_N];
      end

      udn_router #(.BD(BD), .E_CREDITS(BD)) u_router (
        .clk, .rst_n,
        .in_valid  (r_in_valid[row][col]),
        .in_flit   (r_in_flit[row][col]),
        .in_credit (r_in_credit[row][col]),
        .out_valid (r_out_valid[row][col]),
        .out_flit  (r_out_flit[row][col]),
        .out_credit(r_out_credit[row][col])
      );
    end

    ni_egress #(.N_PER(N_PER), .DEPTH(BD)) u_ni_out (
      .clk, .rst_n, .slot_tick,
      .e_valid (r_out_valid[row][M-1][O_E]),
      .e_flit  (r_out_flit[row][M-1][O_E]),
      .e_credit(e_credit[row]),
      .lc_valid(lc_valid[row]),
      .lc_pkt  (lc_pkt[row]),
      .om_space(om_space[row])
    );
  end
endmodule
