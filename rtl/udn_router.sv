// udn_router: input-queued mini-router of a UDN central module.
//
// The central modules of the switch are unidirectional meshes: packets enter
// at the West edge, always progress eastward, and may move North or South
// between rows. Each router therefore has three inputs (West, North, South)
// and three outputs (East, North, South); the top and bottom rows simply
// leave their outer vertical ports unconnected.
//
// How it works:
//  * Every input has a FIFO buffer of BD packets (BD = 4 in the evaluated
//    configuration). A packet is fully stored before it is forwarded.
//  * The head packet of each input asks for one output, given by the Modulo
//    XY rule on its relative header (clos_udn_pkg::route_out): East while
//    East hops remain before the turn, then North/South while vertical hops
//    remain, then East to the mesh exit. Each forward rewrites the header
//    (clos_udn_pkg::route_step).
//  * Each output has its own round-robin arbiter over the inputs requesting
//    it, so decisions are local to the router and up to three packets leave
//    per cycle (one per output link).
//  * Credit-based flow control: per output a credit counter starts at the
//    downstream buffer depth, is decremented by each packet sent and
//    incremented by each credit pulse returned when the downstream buffer
//    frees an entry. A request is only eligible when its output has credit.
//    in_credit[p] is this router's credit pulse back to the sender on input p.
//
// Timing: one hop per clock. A packet at the head of an input buffer at
// cycle t is written into the downstream buffer at the edge ending cycle t.
// Credits returned in cycle t are usable in cycle t+1.
//
// The mesh shape, BD, credit flow control and RR arbitration are as
// described for the design; per-output arbiters, the exact credit timing and
// the one-cycle hop are this implementation's choices.
module udn_router
  import clos_udn_pkg::*;
#(
  parameter int unsigned BD        = 4,  // depth of each input buffer
  parameter int unsigned E_CREDITS = 4   // depth of the buffer behind the East output
) (
  input  logic        clk,
  input  logic        rst_n,
  // inputs: index P_W, P_N, P_S
  input  logic [2:0]  in_valid,
  input  flit_t       in_flit   [3],
  output logic [2:0]  in_credit,
  // outputs: index O_E, O_N, O_S
  output logic [2:0]  out_valid,
  output flit_t       out_flit  [3],
  input  logic [2:0]  out_credit
);
  localparam int unsigned CW = $clog2(((BD > E_CREDITS) ? BD : E_CREDITS) + 1);

  flit_t             head   [3];
  logic  [2:0]       empty;
  logic  [2:0]       pop;
  logic  [1:0]       dir    [3];
  logic  [2:0]       req    [3];   // req[output][input]
  logic  [2:0]       gnt    [3];   // gnt[output][input]
  logic  [CW-1:0]    credit [3];

  for (genvar p = 0; p < 3; p++) begin : g_in
    logic                     full_unused;
    logic [$clog2(BD+1)-1:0]  count_unused;
    sync_fifo #(.T(flit_t), .DEPTH(BD)) u_buf (
      .clk, .rst_n,
      .push (in_valid[p]),
      .wdata(in_flit[p]),
      .pop  (pop[p]),
      .rdata(head[p]),
      .empty(empty[p]),
      .full (full_unused),
      .count(count_unused)
    );
    assign dir[p] = route_out(head[p].rt);
  end

  for (genvar q = 0; q < 3; q++) begin : g_out
    localparam int unsigned INIT = (q == O_E) ? E_CREDITS : BD;

    always_comb begin
      for (int p = 0; p < 3; p++)
        req[q][p] = !empty[p] && (dir[p] == 2'(q)) && (credit[q] != '0);
    end

    rr_arbiter #(.N(3)) u_arb (
      .clk, .rst_n,
      .req    (req[q]),
      .advance(1'b1),
      .gnt    (gnt[q])
    );

    always_comb begin
      out_valid[q] = |gnt[q];
      out_flit[q]  = head[0];
      for (int p = 0; p < 3; p++)
        if (gnt[q][p]) out_flit[q] = head[p];
      out_flit[q].rt = route_step(out_flit[q].rt);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) credit[q] <= CW'(INIT);
      else        credit[q] <= credit[q] - CW'(out_valid[q]) + CW'(out_credit[q]);
    end

    a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n) credit[q] <= CW'(INIT));
  end

  always_comb begin
    for (int p = 0; p < 3; p++)
      pop[p] = gnt[O_E][p] | gnt[O_N][p] | gnt[O_S][p];
  end
  assign in_credit = pop;
endmodule
