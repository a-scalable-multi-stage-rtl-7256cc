// input_scheduler: round-robin dispatcher of one input FIFO, FIFO(i,r).
//
// Each input module holds m of these, one per FIFO. In dynamic dispatching a
// scheduler chooses the link LI(i,sel) over which its FIFO's head packet goes
// to a central module this time slot. The pointers of the m schedulers start
// at different values (INIT = r here) and all advance by one position at the
// end of every time slot, so at any time they form a permutation of the m
// links and two FIFOs never pick the same link.
//
// In static dispatching (static_dispatch high) the scheduler is bypassed and
// FIFO(i,r) always uses LI(i,r), which keeps every flow on one fixed path
// through the switch and so delivers its packets in order.
//
// Both modes follow the described dispatching schemes; the starting values
// INIT = r and the use of one mode input for both are this design's choices.
//
// Timing: sel is combinational from the pointer register and the mode input;
// the pointer advances at the clock edge of a cycle with slot_tick high.
module input_scheduler #(
  parameter int unsigned M_LINKS = 8,  // m, links out of the input module
  parameter int unsigned INIT    = 0   // starting pointer value
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       slot_tick,
  input  logic                       static_dispatch,
  output logic [$clog2(M_LINKS)-1:0] sel
);
  localparam int unsigned W = $clog2(M_LINKS);

  logic [W-1:0] ptr;

  assign sel = static_dispatch ? W'(INIT) : ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ptr <= W'(INIT);
    else if (slot_tick) ptr <= (ptr == W'(M_LINKS - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
