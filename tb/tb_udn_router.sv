// tb_udn_router: directed tests of the mesh router (BD = 2, 2 East credits).
//  - next-hop choice and header rewrite for East, South, North and the
//    final East run after the turn;
//  - one hop per cycle: a packet written in cycle t leaves in cycle t+1;
//  - two inputs competing for East are served alternately (round robin);
//  - two packets to different outputs leave in the same cycle;
//  - credit stall: with East credits used up nothing more leaves East
//    until a credit is returned;
//  - in_credit pulses once per packet leaving an input buffer.
module tb_udn_router;
  import clos_udn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] in_valid = '0, in_credit, out_valid, out_credit = '0;
  flit_t in_flit [3];
  flit_t out_flit [3];
  int checks = 0, failures = 0;
  int credits_seen = 0;

  udn_router #(.BD(2), .E_CREDITS(2)) dut (.*);
  always #5 clk = ~clk;

  function automatic flit_t mk(int x, int y, bit south, int id);
    flit_t f;
    f = '0;
    f.rt.x_hops = HOP_W'(x);
    f.rt.y_hops = HOP_W'(y);
    f.rt.y_south = south;
    f.pkt.payload = PAYLOAD_W'(id);
    return f;
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write one packet into input p during the next cycle
  task automatic put(int p, flit_t f);
    @(negedge clk);
    in_valid = '0;
    in_valid[p] = 1'b1;
    in_flit[p] = f;
    @(negedge clk);
    in_valid = '0;
  endtask

  always @(posedge clk) if (rst_n) credits_seen += $countones(in_credit);

  initial begin
    for (int p = 0; p < 3; p++) in_flit[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // East with x_hops counting down; visible one cycle after the write
    put(P_W, mk(2, 1, 1'b1, 1));
    #1;
    chk(out_valid == 3'b001, "east chosen");
    chk(out_flit[O_E].rt.x_hops == 1 && out_flit[O_E].rt.y_hops == 1, "x decremented");
    chk(out_flit[O_E].pkt.payload == 1, "payload");
    out_credit[O_E] = 1'b1; @(negedge clk); out_credit = '0;

    // turn South
    put(P_W, mk(0, 2, 1'b1, 2));
    #1;
    chk(out_valid == 3'b100, "south chosen");
    chk(out_flit[O_S].rt.y_hops == 1, "y decremented");
    out_credit[O_S] = 1'b1; @(negedge clk); out_credit = '0;

    // continue North, from the South input
    put(P_S, mk(0, 1, 1'b0, 3));
    #1;
    chk(out_valid == 3'b010, "north chosen");
    chk(out_flit[O_N].rt.y_hops == 0, "y reaches zero");
    out_credit[O_N] = 1'b1; @(negedge clk); out_credit = '0;

    // after the vertical part the packet runs East
    put(P_N, mk(0, 0, 1'b0, 4));
    #1;
    chk(out_valid == 3'b001, "east after turn");
    out_credit[O_E] = 1'b1; @(negedge clk); out_credit = '0;

    // two packets to different outputs in one cycle
    @(negedge clk);
    in_valid = 3'b011;
    in_flit[P_W] = mk(1, 0, 1'b0, 5);
    in_flit[P_N] = mk(0, 1, 1'b1, 6);
    @(negedge clk);
    in_valid = '0;
    #1;
    chk(out_valid == 3'b101, "parallel east and south");
    out_credit = 3'b101; @(negedge clk); out_credit = '0;

    // round robin: W and N both hold two packets for East
    @(negedge clk);
    in_valid = 3'b011;
    in_flit[P_W] = mk(0, 0, 1'b0, 10);
    in_flit[P_N] = mk(0, 0, 1'b0, 20);
    @(negedge clk);
    in_flit[P_W] = mk(0, 0, 1'b0, 11);
    in_flit[P_N] = mk(0, 0, 1'b0, 21);
    #1;
    begin
      int first;
      first = int'(out_flit[O_E].pkt.payload);
      chk(out_valid[O_E], "east busy");
      @(negedge clk);
      in_valid = '0;
      #1;
      chk(out_valid[O_E] && ((first < 20) != (out_flit[O_E].pkt.payload < 20)), "alternating inputs");
      @(negedge clk);
      #1;
      chk(!out_valid[O_E], "credits used up: stall");
      @(negedge clk);
      out_credit[O_E] = 1'b1;
      #1;
      chk(!out_valid[O_E], "returned credit usable next cycle");
      @(negedge clk);
      out_credit[O_E] = 1'b1;
      #1;
      chk(out_valid[O_E], "credit restores flow");
      @(negedge clk);
      out_credit[O_E] = 1'b1;
      #1;
      chk(out_valid[O_E], "last packet");
      @(negedge clk);
      out_credit[O_E] = 1'b0;
      #1;
      chk(out_valid == '0, "empty");
    end
    repeat (2) @(negedge clk);
    chk(credits_seen == 10, "one credit pulse per forwarded packet");
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
