// tb_input_scheduler: the selected link must be (INIT + slots elapsed) mod m
// in dynamic mode, advancing only on slot boundaries, and INIT in static mode.
module tb_input_scheduler;
  localparam int unsigned ML = 4;
  localparam int unsigned INIT = 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_tick = 1'b0, static_dispatch = 1'b0;
  logic [1:0] sel;
  int checks = 0, failures = 0;
  int slots = 0;

  input_scheduler #(.M_LINKS(ML), .INIT(INIT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      slot_tick = ($urandom_range(2) == 0);
      static_dispatch = (n > 300) && (n < 400);
      #1;
      checks++;
      if (int'(sel) != (static_dispatch ? INIT : (INIT + slots) % ML)) begin
        failures++;
        $display("FAIL: sel=%0d slots=%0d static=%0b", sel, slots, static_dispatch);
      end
      if (slot_tick) slots++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
