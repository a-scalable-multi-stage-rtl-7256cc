// tb_output_buffer: output buffer with 4 writers and 8 entries against a
// queue model. Random writes from any subset of links (only while space is
// high), packets from lower-numbered links queued first, one read per slot
// boundary. Checks op_valid, op_pkt and space every cycle.
module tb_output_buffer;
  import clos_udn_pkg::*;
  localparam int unsigned MI = 4, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick = 1'b0, space, op_valid;
  logic [MI-1:0] wr_valid = '0;
  pkt_t wr_pkt [MI];
  pkt_t op_pkt;
  int checks = 0, failures = 0;
  pkt_t q [$];

  output_buffer #(.M_IN(MI), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int l = 0; l < MI; l++) wr_pkt[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      bit exp_rd;
      @(negedge clk);
      slot_tick = n[0];
      wr_valid = (q.size() + MI <= D) ? MI'($urandom) : '0;
      for (int l = 0; l < MI; l++) wr_pkt[l] = pkt_t'({$urandom, $urandom});
      #1;
      exp_rd = slot_tick && q.size() > 0;
      checks++;
      if (op_valid != exp_rd || (exp_rd && op_pkt != q[0]) || space != (q.size() + MI <= D)) begin
        failures++;
        $display("FAIL at %0d: op_valid=%0b exp=%0b space=%0b size=%0d", n, op_valid, exp_rd, space, q.size());
      end
      if (exp_rd) void'(q.pop_front());
      for (int l = 0; l < MI; l++) if (wr_valid[l]) q.push_back(wr_pkt[l]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
