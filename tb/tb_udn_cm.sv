// tb_udn_cm: one central module, a 4 x 4 mesh with two ports per output
// module, BD = 2, slot boundary every second cycle.
//  - zero-load latency: a packet from row s to row d reaches its LC link
//    after 1 + M + |d - s| cycles rounded up to the next slot boundary;
//  - random traffic from all rows with random output-module room flags:
//    every packet leaves exactly once on LC(d) for its destination module d,
//    only when that port has room, at most one per link and slot, and the
//    packets of each (row, destination) flow stay in order (the route is
//    deterministic).
module tb_udn_cm;
  import clos_udn_pkg::*;
  localparam int unsigned K = 4, M = 4, NPER = 2, BD = 2, SP = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick;
  logic [K-1:0] li_valid = '0, li_ready, lc_valid;
  pkt_t li_pkt [K];
  pkt_t lc_pkt [K];
  logic [NPER-1:0] om_space [K];
  int checks = 0, failures = 0;
  longint cycle = 0;
  int sent = 0, got = 0;
  int next_seq [K][K*NPER];
  int exp_seq [K][K*NPER];
  longint t_in [1024];
  longint lat;

  udn_cm #(.K(K), .M(M), .N_PER(NPER), .BD(BD)) dut (.*);
  always #5 clk = ~clk;
  assign slot_tick = cycle[0];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // LC monitor
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < K; j++) if (lc_valid[j]) begin
      int s, d;
      s = int'(lc_pkt[j].src);
      d = int'(lc_pkt[j].dst);
      chk(slot_tick, "LC only on slot boundary");
      chk(d / NPER == j, "delivered to the right output module");
      chk(om_space[j][d % NPER], "sent only with room");
      chk(int'(lc_pkt[j].seq) == exp_seq[s][d], "in order within a flow");
      exp_seq[s][d] = int'(lc_pkt[j].seq) + 1;
      lat = cycle - t_in[int'(lc_pkt[j].payload) % 1024];
      got++;
    end
  end

  task automatic send(int s, int d);
    li_valid[s] = 1'b1;
    li_pkt[s] = '0;
    li_pkt[s].src = PORT_W'(s);
    li_pkt[s].dst = PORT_W'(d);
    li_pkt[s].seq = SEQ_W'(next_seq[s][d]);
    li_pkt[s].payload = PAYLOAD_W'(sent);
    t_in[sent % 1024] = cycle;
    next_seq[s][d]++;
    sent++;
  endtask

  initial begin
    for (int a = 0; a < K; a++) begin
      li_pkt[a] = '0;
      om_space[a] = '1;
      for (int b = 0; b < K * NPER; b++) begin next_seq[a][b] = 0; exp_seq[a][b] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // zero-load latency for a few (s, d) pairs
    for (int c = 0; c < 4; c++) begin
      int s, d, hops;
      longint exp;
      s = c;
      d = (c * 3 + 1) % K;
      @(negedge clk);
      while (!slot_tick) @(negedge clk);
      send(s, d * NPER);
      @(negedge clk);
      li_valid = '0;
      repeat (20) @(negedge clk);
      hops = M + ((d > s) ? d - s : s - d);
      exp = hops + 1;
      if ((exp % SP) != 0) exp++;  // the packet entered on a slot-boundary cycle
      chk(lat == exp, $sformatf("latency %0d->%0d: %0d, expected %0d", s, d, lat, exp));
    end
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int j = 0; j < K; j++) om_space[j] = NPER'($urandom) | NPER'($urandom);
      li_valid = '0;
      if (slot_tick) begin
        for (int s = 0; s < K; s++)
          if (li_ready[s] && $urandom_range(99) < 70) send(s, int'($urandom_range(K * NPER - 1)));
      end
    end
    @(negedge clk);
    li_valid = '0;
    for (int j = 0; j < K; j++) om_space[j] = '1;
    repeat (200) @(negedge clk);
    chk(got == sent, $sformatf("all delivered: %0d of %0d", got, sent));
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
