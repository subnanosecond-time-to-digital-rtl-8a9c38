// coarse_counter_tb: the coarse counter must start at 0 after reset, step
// by one on every clock and wrap from 2^14-1 to 0, i.e. once every 16384
// cycles of 2.27 ns (37.2 us with the 3-bit fine count, the stated dynamic
// range). The expected value is kept by the testbench as an integer modulo
// 16384. A second reset in mid-count must bring it back to 0.
module coarse_counter_tb;
  timeunit 1ps; timeprecision 1ps;

  logic        clk = 1'b0;
  logic        rst = 1'b1;
  logic [13:0] count;
  int checks = 0, failures = 0, wraps = 0;
  int expected;

  coarse_counter dut (.clk(clk), .rst(rst), .count(count));

  always #1136 clk = ~clk;

  task automatic check(int e);
    checks++;
    if (int'(count) != e) begin
      failures++;
      if (failures < 10) $display("t=%0t count=%0d expected %0d", $time, count, e);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 check(0);
    @(negedge clk) rst = 1'b0;
    expected = 0;
    for (int i = 0; i < 40000; i++) begin
      @(posedge clk); #1;
      if (expected == 16383) wraps++;
      expected = (expected + 1) % 16384;
      check(expected);
      if (i == 35000) begin
        @(negedge clk) rst = 1'b1;
        @(posedge clk); #1 check(0);
        @(negedge clk) rst = 1'b0;
        expected = 0;
      end
    end
    checks++;
    if (wraps != 2) begin
      failures++;
      $display("saw %0d wraps, expected 2", wraps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
