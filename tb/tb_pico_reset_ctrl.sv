// tb_pico_reset_ctrl: self-checking test of the start-by-interrupt reset.
//
// Checks that the core reset stays asserted after system reset for a long
// idle stretch, is released exactly one clock edge after the start
// interrupt, stays released through later start interrupts, counts them, and
// is asserted again by the next system reset.
module tb_pico_reset_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic core_resetn;
  logic [7:0] cnt;

  pico_reset_ctrl dut (.clk(clk), .rst_n(rst_n), .start_int(start), .core_resetn(core_resetn), .start_count(cnt));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 check(!core_resetn, "held in reset during system reset");
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin @(posedge clk); #1 check(!core_resetn, "held in reset before start"); end
    check(cnt == 0, "no start counted");
    start = 1;
    #1 check(!core_resetn, "release waits for the clock edge");
    @(posedge clk); #1 start = 0;
    check(core_resetn, "released one edge after start");
    check(cnt == 1, "one start counted");
    for (int i = 0; i < 20; i++) begin @(posedge clk); #1 check(core_resetn, "stays released"); end
    start = 1; @(posedge clk); #1 start = 0;
    check(core_resetn && cnt == 2, "second start counted, still running");
    rst_n = 0; #1 check(!core_resetn && cnt == 0, "system reset re-asserts core reset");
    @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    #1 check(!core_resetn, "held again until next start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
