// tb_sync_fifo: randomized check of sync_fifo against a queue model.
// Pushes and pops at random (never into a full or out of an empty queue),
// and compares head data, count, empty and full with the model every cycle.
module tb_sync_fifo;
  localparam int unsigned DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic [7:0] wdata = '0, rdata;
  logic empty, full;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [7:0] q [$];

  sync_fifo #(.T(logic [7:0]), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      push  = ($urandom_range(99) < 55) && (q.size() < DEPTH);
      pop   = ($urandom_range(99) < 45) && (q.size() > 0);
      wdata = 8'($urandom);
      #1;
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size() ||
          (q.size() > 0 && rdata != q[0])) begin
        failures++;
        $display("FAIL at %0d: count=%0d model=%0d rdata=%h", n, count, q.size(), rdata);
      end
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(wdata);
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
