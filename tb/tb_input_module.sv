// tb_input_module: input module with n = m = 4 and 4-packet FIFOs against a
// model of its FIFOs and round-robin pointers. Slot boundaries every second
// cycle; random arrivals and random li_ready (room in the central modules).
// Checks ip_ready, and that each link carries exactly the head packet of
// the FIFO whose scheduler points at it, in both dispatching modes.
module tb_input_module;
  import clos_udn_pkg::*;
  localparam int unsigned N = 4;
  localparam int unsigned D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick = 1'b0, static_dispatch = 1'b0;
  logic [N-1:0] ip_valid = '0, ip_ready, li_valid, li_ready = '0;
  pkt_t ip_pkt [N];
  pkt_t li_pkt [N];
  int checks = 0, failures = 0;
  pkt_t q [N][$];
  int slots = 0;

  input_module #(.N(N), .FIFO_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int p = 0; p < N; p++) ip_pkt[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      logic [N-1:0] exp_v;
      @(negedge clk);
      slot_tick = n[0];
      static_dispatch = (n >= 2000);
      li_ready = N'($urandom) | N'($urandom);
      for (int p = 0; p < N; p++) begin
        ip_valid[p] = ($urandom_range(99) < 60);
        ip_pkt[p] = pkt_t'({$urandom, $urandom});
      end
      #1;
      exp_v = '0;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (ip_ready[p] != (slot_tick && q[p].size() < D)) begin
          failures++; $display("FAIL: ip_ready[%0d]", p);
        end
      end
      for (int r = 0; r < N; r++) begin
        int l;
        l = static_dispatch ? r : (r + slots) % N;
        if (slot_tick && q[r].size() > 0 && li_ready[l]) begin
          exp_v[l] = 1'b1;
          checks++;
          if (li_pkt[l] != q[r][0]) begin failures++; $display("FAIL: link %0d data", l); end
          void'(q[r].pop_front());
        end
      end
      checks++;
      if (li_valid != exp_v) begin
        failures++; $display("FAIL: li_valid=%b exp=%b", li_valid, exp_v);
      end
      for (int p = 0; p < N; p++) if (ip_valid[p] && ip_ready[p]) q[p].push_back(ip_pkt[p]);
      if (slot_tick) slots++;
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
