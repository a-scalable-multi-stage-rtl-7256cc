// output_buffer: output queue of one output port OP(j,h).
//
// An output buffer can receive up to m packets in one time slot, one from
// each link LC(r,j) entering its output module, and forwards one packet per
// time slot to its output line. It is a circular buffer with M_IN write
// ports: the writers active in a cycle are ranked by link index, writer of
// rank q stores at wr_ptr + q, and wr_ptr advances by the number of writes.
//
// Flow control: space is high while at least M_IN entries are free, so that
// the buffer can absorb a full slot's worth of simultaneous writes. The
// egress interfaces of the central modules only send to this port while
// space is high. (The buffer depth and this room signal are this design's
// choices; the paper gives the m-writes / one-read rate only.)
//
// Timing: writes land at the clock edge; op_valid is high in slot_tick
// cycles while the buffer is not empty, and the head leaves at that edge.
module output_buffer
  import clos_udn_pkg::*;
#(
  parameter int unsigned M_IN  = 8,   // m, simultaneous writers
  parameter int unsigned DEPTH = 16   // packets (assumed)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            slot_tick,
  input  logic [M_IN-1:0] wr_valid,
  input  pkt_t            wr_pkt [M_IN],
  output logic            space,
  output logic            op_valid,
  output pkt_t            op_pkt
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  pkt_t          mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [CW-1:0] count;
  logic [CW-1:0] n_wr;
  logic [AW-1:0] slot [M_IN];   // target entry of each writer

  always_comb begin
    n_wr = '0;
    for (int l = 0; l < M_IN; l++) begin
      slot[l] = AW'((int'(wr_ptr) + int'(n_wr)) % DEPTH);
      if (wr_valid[l]) n_wr = n_wr + 1'b1;
    end
  end

  assign space    = (int'(count) + M_IN <= DEPTH);
  assign op_valid = slot_tick && (count != '0);
  assign op_pkt   = mem[rd_ptr];

  always_ff @(posedge clk) begin
    for (int l = 0; l < M_IN; l++)
      if (wr_valid[l]) mem[slot[l]] <= wr_pkt[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      wr_ptr <= AW'((int'(wr_ptr) + int'(n_wr)) % DEPTH);
      if (op_valid) rd_ptr <= AW'((int'(rd_ptr) + 1) % DEPTH);
      count <= count + n_wr - CW'(op_valid);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    int'(count) + int'(n_wr) <= DEPTH);
endmodule
