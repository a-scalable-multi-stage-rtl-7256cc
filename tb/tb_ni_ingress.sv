// tb_ni_ingress: ingress interface of row 2 in a 6-row, 4-column mesh with
// two ports per output module. Checks the Modulo XY header for every
// destination (turn column d mod M, |d - s| vertical hops, direction), and
// the credit rule: li_ready falls after BD packets without returned credits
// and rises again when a credit comes back.
module tb_ni_ingress;
  import clos_udn_pkg::*;
  localparam int unsigned ROW = 2, M = 4, NPER = 2, BD = 2, K = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic li_valid = 1'b0, li_ready, w_valid, w_credit = 1'b0;
  pkt_t li_pkt = '0;
  flit_t w_flit;
  int checks = 0, failures = 0;

  ni_ingress #(.ROW(ROW), .M(M), .N_PER(NPER), .BD(BD)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // header for every destination port, with a credit returned each cycle
    for (int dst = 0; dst < K * NPER; dst++) begin
      int d;
      @(negedge clk);
      d = dst / NPER;
      li_valid = 1'b1;
      w_credit = 1'b0;
      li_pkt.dst = PORT_W'(dst);
      li_pkt.payload = PAYLOAD_W'(dst * 7);
      #1;
      chk(w_valid && li_ready, "accept");
      chk(int'(w_flit.rt.x_hops) == d % M, "turn column");
      chk(int'(w_flit.rt.y_hops) == ((d > ROW) ? d - ROW : ROW - d), "vertical hops");
      chk(w_flit.rt.y_south == (d > ROW), "direction");
      chk(w_flit.pkt == li_pkt, "payload kept");
      @(negedge clk);
      li_valid = 1'b0;
      w_credit = 1'b1;   // router frees the entry
      #1;
    end
    @(negedge clk);
    w_credit = 1'b0;
    // credits run out after BD packets
    for (int n = 0; n < BD + 2; n++) begin
      @(negedge clk);
      li_valid = 1'b1;
      #1;
      chk(li_ready == (n < BD), "credit exhaustion");
      chk(w_valid == (n < BD), "no write without credit");
    end
    @(negedge clk);
    li_valid = 1'b0;
    w_credit = 1'b1;
    @(negedge clk);
    w_credit = 1'b0;
    #1;
    chk(li_ready, "credit returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
