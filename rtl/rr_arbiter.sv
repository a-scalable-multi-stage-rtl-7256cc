// rr_arbiter: round-robin arbiter.
//
// The mesh routers resolve contention for an output link with round-robin
// arbitration (the overview figure counts (k x M) micro RR arbiters per UDN
// module, one per router; here each router holds one such arbiter per output
// port). Among the asserted requests the arbiter grants the first one at or
// after its pointer, searching upward with wrap-around. When the grant is
// used (advance high) the pointer moves to the position just after the
// winner, so a requester that was served becomes the lowest priority.
//
// Interface: req[N] in, gnt[N] one-hot (or zero) out, combinational from req
// and the pointer register. Timing: the pointer updates at the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;
  logic [IW-1:0] win;
  logic          found;

  always_comb begin
    gnt   = '0;
    win   = '0;
    found = 1'b0;
    for (int unsigned o = 0; o < N; o++) begin
      int unsigned idx;
      idx = (int'(ptr) + o) % N;
      if (!found && req[idx]) begin
        found    = 1'b1;
        win      = IW'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && found) ptr <= (win == IW'(N - 1)) ? '0 : win + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_grant_requested: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
