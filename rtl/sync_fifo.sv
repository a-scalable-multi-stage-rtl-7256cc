// sync_fifo: synchronous first-in first-out queue of whole packets.
//
// Used for the input-module queues FIFO(i,r) and for the input buffers of the
// mesh routers (depth BD, four packets in the evaluated configuration). The
// queue is an array with read and write pointers and an occupancy counter.
// The head entry is presented combinationally on rdata whenever empty is low,
// so a consumer can look at the head, decide, and pop in the same cycle.
// A push and a pop may happen in the same cycle; a push into a full queue and
// a pop from an empty queue are protocol errors caught by assertions (the
// users guard them with credits or with the full flag).
//
// Timing: a word pushed at clock edge t is visible at rdata after edge t.
// Reset empties the queue; the storage itself is not reset.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  T                           wdata,
  input  logic                       pop,
  output T                           rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  T                mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));
  assign rdata = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
