// tb_output_module: output module with 4 ports, 4 incoming links and
// 8-entry buffers. Each link carries, at random, a packet for a port whose
// room flag is high. Checks that every port emits exactly the packets for it,
// in the order a per-port model queue gives (link order within a cycle), one
// per slot boundary.
module tb_output_module;
  import clos_udn_pkg::*;
  localparam int unsigned NP = 4, MI = 4, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick = 1'b0;
  logic [MI-1:0] lc_valid = '0;
  pkt_t lc_pkt [MI];
  logic [NP-1:0] om_space, op_valid;
  pkt_t op_pkt [NP];
  int checks = 0, failures = 0;
  pkt_t q [NP][$];

  output_module #(.N(NP), .M_IN(MI), .OB_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int l = 0; l < MI; l++) lc_pkt[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      slot_tick = n[0];
      #1;
      for (int l = 0; l < MI; l++) begin
        int h;
        h = int'($urandom_range(NP - 1));
        lc_pkt[l] = pkt_t'({$urandom, $urandom});
        lc_pkt[l].dst = PORT_W'(h + NP * int'($urandom_range(3)));
        lc_valid[l] = om_space[h] && ($urandom_range(99) < 40);
      end
      #1;
      for (int h = 0; h < NP; h++) begin
        bit exp;
        exp = slot_tick && q[h].size() > 0;
        checks++;
        if (op_valid[h] != exp || (exp && op_pkt[h] != q[h][0]) || om_space[h] != (q[h].size() + MI <= D)) begin
          failures++;
          $display("FAIL at %0d port %0d", n, h);
        end
        if (exp) void'(q[h].pop_front());
      end
      for (int l = 0; l < MI; l++) if (lc_valid[l]) q[int'(lc_pkt[l].dst) % NP].push_back(lc_pkt[l]);
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
