// channel_scanner_tb: checks the scanner with eight model channel buffers.
//
// Each channel is a queue of random 18-bit records presented show-ahead.
// Records arrive at random (sometimes in bursts on all channels), and the
// output-buffer full input is asserted on a random 20 % of cycles. The
// testbench keeps its own round-robin pointer: on every cycle that is not
// blocked it expects the first non-empty channel after the one served last
// to be popped, and the following cycle an output word {channel id, that
// channel's oldest record}. With full asserted nothing may be popped or
// written. At the end every record must have come out exactly once, and
// every channel must have been served.
module channel_scanner_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  localparam int NCH = 8;

  logic           clk = 1'b0, rst = 1'b1;
  logic [NCH-1:0] ch_valid, ch_rd;
  hit_t           ch_data [NCH];
  logic           out_full = 1'b0, out_wr;
  logic [2+HIT_W:0] out_data;

  int checks = 0, failures = 0;
  hit_t q [NCH][$];
  int   served [NCH];
  int   pushed = 0, popped = 0;

  channel_scanner #(.NCH(NCH)) dut (
    .clk(clk), .rst(rst), .ch_valid(ch_valid), .ch_data(ch_data), .ch_rd(ch_rd),
    .out_full(out_full), .out_wr(out_wr), .out_data(out_data)
  );

  always #4544 clk = ~clk;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      ch_valid[c] = (q[c].size() > 0);
      ch_data[c]  = (q[c].size() > 0) ? q[c][0] : hit_t'('0);
    end
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("t=%0t %s", $time, msg);
  endtask

  initial begin
    int  last;
    bit  exp_wr;
    logic [2+HIT_W:0] exp_word;
    last = NCH - 1;
    exp_wr = 1'b0;
    exp_word = '0;
    foreach (served[c]) served[c] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 20000; i++) begin
      // new records
      for (int c = 0; c < NCH; c++)
        if ($urandom_range(0, 99) < ((i % 2000 < 100) ? 60 : 8)) begin
          q[c].push_back(hit_t'($urandom));
          pushed++;
        end
      out_full = ($urandom_range(0, 99) < 20);
      #1;
      // expected choice this cycle
      begin
        int sel;
        sel = -1;
        for (int k = 1; k <= NCH; k++) begin
          int c;
          c = (last + k) % NCH;
          if (sel < 0 && q[c].size() > 0) sel = c;
        end
        for (int c = 0; c < NCH; c++) begin
          checks++;
          if (ch_rd[c] !== (!out_full && sel == c)) fail($sformatf("ch_rd=%b, expected channel %0d full=%0b", ch_rd, sel, out_full));
        end
        @(posedge clk);
        #1;
        // word written for the previous decision
        checks++;
        if (out_wr !== (!out_full && sel >= 0)) fail("out_wr wrong");
        if (!out_full && sel >= 0) begin
          exp_word = {3'(sel), q[sel].pop_front()};
          checks++;
          if (out_data !== exp_word) fail($sformatf("word %h expected %h", out_data, exp_word));
          served[sel]++;
          popped++;
          last = sel;
        end
      end
      @(negedge clk);
    end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (served[c] == 0) fail($sformatf("channel %0d never served", c));
    end
    checks++;
    if (pushed - popped != q[0].size() + q[1].size() + q[2].size() + q[3].size() +
                           q[4].size() + q[5].size() + q[6].size() + q[7].size())
      fail("record count mismatch");
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
