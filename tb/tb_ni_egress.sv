// tb_ni_egress: egress interface with four ports per output module and a
// 2-packet buffer. Random arrivals within the credits it grants, random
// slot boundaries and random room flags. Checks against a queue model:
// a packet leaves only on a slot boundary and only if its port has room,
// in arrival order, with e_credit returned for each packet that leaves.
module tb_ni_egress;
  import clos_udn_pkg::*;
  localparam int unsigned NPER = 4, D = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick = 1'b0, e_valid = 1'b0, e_credit, lc_valid;
  flit_t e_flit = '0;
  pkt_t lc_pkt;
  logic [NPER-1:0] om_space = '0;
  int checks = 0, failures = 0;
  flit_t q [$];

  ni_egress #(.N_PER(NPER), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      bit exp;
      @(negedge clk);
      slot_tick = ($urandom_range(1) == 0);
      om_space = NPER'($urandom);
      e_valid = (q.size() < D) && ($urandom_range(99) < 60);
      e_flit = '0;
      e_flit.pkt = pkt_t'({$urandom, $urandom});
      #1;
      exp = slot_tick && q.size() > 0 && om_space[int'(q[0].pkt.dst) % NPER];
      checks++;
      if (lc_valid != exp || e_credit != exp || (exp && lc_pkt != q[0].pkt)) begin
        failures++;
        $display("FAIL at %0d: lc_valid=%0b exp=%0b", n, lc_valid, exp);
      end
      if (exp) void'(q.pop_front());
      if (e_valid) q.push_back(e_flit);
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
