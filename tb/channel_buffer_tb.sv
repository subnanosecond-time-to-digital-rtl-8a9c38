// channel_buffer_tb: checks the dual-clock channel buffer with 440 MHz
// writes and 110 MHz reads (unrelated phases).
//
// Part 1 writes DEPTH+6 words back to back with no reads: exactly the last
// 6 must be refused and flagged on overflow, the first DEPTH must then read
// back in order and the buffer must report empty. Part 2 writes random data
// on 15 % of the write cycles and reads on 70 % of the read cycles, below
// the read rate so nothing is lost, and compares every read word with a
// queue of what was written. It also checks that a word written into an
// empty buffer appears at the read side within 5 read clock cycles.
module channel_buffer_tb;
  timeunit 1ps; timeprecision 1ps;

  localparam int W = 18;
  localparam int DEPTH = 1024;

  logic         wr_clk = 1'b0, rd_clk = 1'b0;
  logic         wr_rst = 1'b1, rd_rst = 1'b1;
  logic         wr_en = 1'b0, rd_en = 1'b0;
  logic [W-1:0] wr_data = '0;
  logic         overflow, rd_valid;
  logic [W-1:0] rd_data;

  int checks = 0, failures = 0, n_ovf = 0;
  logic [W-1:0] sb[$];
  bit           wdone = 1'b0;

  channel_buffer #(.WIDTH(W), .DEPTH(DEPTH)) dut (
    .wr_clk(wr_clk), .wr_rst(wr_rst), .wr_en(wr_en), .wr_data(wr_data), .overflow(overflow),
    .rd_clk(rd_clk), .rd_rst(rd_rst), .rd_en(rd_en), .rd_valid(rd_valid), .rd_data(rd_data)
  );

  always #1136 wr_clk = ~wr_clk;
  initial begin #777; forever #4544 rd_clk = ~rd_clk; end

  always @(posedge wr_clk) if (!wr_rst && overflow) n_ovf++;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("t=%0t %s", $time, msg);
  endtask

  initial begin
    repeat (5) @(posedge rd_clk);
    @(negedge wr_clk) wr_rst = 1'b0;
    @(negedge rd_clk) rd_rst = 1'b0;
    // ---- part 1: fill past full ----
    for (int i = 0; i < DEPTH + 6; i++) begin
      @(negedge wr_clk);
      wr_en = 1'b1; wr_data = W'(i * 37 + 5);
    end
    @(negedge wr_clk) wr_en = 1'b0;
    repeat (3) @(negedge wr_clk);
    checks++;
    if (n_ovf != 6) fail($sformatf("overflow pulses %0d, expected 6", n_ovf));
    repeat (4) @(negedge rd_clk);
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (!rd_valid) fail("empty too early");
      else if (rd_data !== W'(i * 37 + 5)) fail($sformatf("word %0d = %0h", i, rd_data));
      rd_en = 1'b1;
      @(negedge rd_clk);
      rd_en = 1'b0;
    end
    repeat (3) @(negedge rd_clk);
    checks++;
    if (rd_valid) fail("not empty after draining");
    // ---- latency ----
    @(negedge wr_clk) begin wr_en = 1'b1; wr_data = 18'h2a5a5; end
    @(negedge wr_clk) wr_en = 1'b0;
    begin
      int n = 0;
      while (!rd_valid && n < 10) begin @(negedge rd_clk); n++; end
      checks++;
      if (n > 5 || rd_data !== 18'h2a5a5) fail($sformatf("latency %0d read cycles", n));
      rd_en = 1'b1; @(negedge rd_clk); rd_en = 1'b0;
    end
    // ---- part 2: random traffic ----
    fork
      begin
        for (int i = 0; i < 30000; i++) begin
          @(negedge wr_clk);
          wr_en = ($urandom_range(0, 99) < 15);
          wr_data = W'($urandom);
          if (wr_en) sb.push_back(wr_data);
        end
        @(negedge wr_clk) wr_en = 1'b0;
        wdone = 1'b1;
      end
      begin
        int reads = 0;
        while (!wdone || sb.size() > 0 || rd_valid) begin
          @(negedge rd_clk);
          rd_en = ($urandom_range(0, 99) < 70);
          if (rd_en && rd_valid) begin
            checks++;
            if (sb.size() == 0) fail("read with nothing written");
            else if (rd_data !== sb.pop_front()) fail("data mismatch in random traffic");
            reads++;
          end
        end
        rd_en = 1'b0;
        checks++;
        if (reads < 4000) fail($sformatf("only %0d reads", reads));
      end
    join
    checks++;
    if (n_ovf != 6) fail("overflow during random traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
