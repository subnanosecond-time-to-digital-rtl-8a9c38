// output_buffer_tb: checks the single-clock output buffer.
//
// Part 1 fills it without reads: almost_full must rise when DEPTH-1 words
// are in, full at DEPTH, level must count every word and a further write
// must be ignored; the words must then read back in order. Part 2 runs
// random writes and reads (each on half of the cycles, writes held off
// while full) against a queue model, checking data, rd_valid and level on
// every cycle. A word written at one edge must be readable at the next.
module output_buffer_tb;
  timeunit 1ps; timeprecision 1ps;

  localparam int W = 21;
  localparam int DEPTH = 1024;

  logic         clk = 1'b0, rst = 1'b1;
  logic         wr_en = 1'b0, rd_en = 1'b0;
  logic [W-1:0] wr_data = '0;
  logic         full, almost_full, rd_valid;
  logic [W-1:0] rd_data;
  logic [10:0]  level;

  int checks = 0, failures = 0;
  logic [W-1:0] sb[$];

  output_buffer #(.WIDTH(W), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst(rst), .wr_en(wr_en), .wr_data(wr_data), .full(full),
    .almost_full(almost_full), .rd_en(rd_en), .rd_valid(rd_valid), .rd_data(rd_data),
    .level(level)
  );

  always #4544 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("t=%0t %s", $time, msg);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // ---- part 1 ----
    for (int i = 0; i < DEPTH + 1; i++) begin
      wr_en = 1'b1; wr_data = W'(i * 3 + 1);
      @(negedge clk);
      checks++;
      if (int'(level) != ((i + 1 > DEPTH) ? DEPTH : i + 1)) fail($sformatf("level %0d after %0d writes", level, i + 1));
      checks++;
      if (almost_full !== (i + 1 >= DEPTH - 1)) fail("almost_full wrong");
      checks++;
      if (full !== (i + 1 >= DEPTH)) fail("full wrong");
      if (i == 0) begin
        checks++;
        if (!rd_valid || rd_data !== W'(1)) fail("first word not visible after one edge");
      end
    end
    wr_en = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (!rd_valid || rd_data !== W'(i * 3 + 1)) fail($sformatf("word %0d = %0h", i, rd_data));
      rd_en = 1'b1;
      @(negedge clk);
    end
    rd_en = 1'b0;
    checks++;
    if (rd_valid || level != 0) fail("not empty after draining");
    // ---- part 2 ----
    for (int i = 0; i < 20000; i++) begin
      wr_en   = ($urandom_range(0, 1) == 1) && !full;
      wr_data = W'($urandom);
      rd_en   = ($urandom_range(0, 1) == 1);
      if (rd_en && rd_valid) begin
        checks++;
        if (sb.size() == 0 || rd_data !== sb[0]) fail("data mismatch");
      end
      @(posedge clk);
      if (rd_en && sb.size() > 0) void'(sb.pop_front());
      if (wr_en) sb.push_back(wr_data);
      @(negedge clk);
      checks++;
      if (int'(level) != sb.size() || rd_valid !== (sb.size() > 0)) fail("level/rd_valid mismatch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
