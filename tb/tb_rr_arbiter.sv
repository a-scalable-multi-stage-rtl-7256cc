// tb_rr_arbiter: checks rr_arbiter against a reference round-robin model:
// the grant goes to the first request at or after the pointer, and the
// pointer moves just past the winner. Random request vectors.
module tb_rr_arbiter;
  localparam int unsigned N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req = '0, gnt;
  logic advance = 1'b1;
  int checks = 0, failures = 0;
  int ptr = 0;

  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      logic [N-1:0] exp;
      int win;
      @(negedge clk);
      req = N'($urandom);
      #1;
      exp = '0;
      win = -1;
      for (int o = 0; o < N; o++)
        if (win < 0 && req[(ptr + o) % N]) win = (ptr + o) % N;
      if (win >= 0) exp[win] = 1'b1;
      checks++;
      if (gnt != exp) begin
        failures++;
        $display("FAIL: req=%b ptr=%0d gnt=%b exp=%b", req, ptr, gnt, exp);
      end
      if (win >= 0) ptr = (win + 1) % N;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
