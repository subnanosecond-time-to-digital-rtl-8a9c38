// tdc_256_tb: the 256-channel extension of the TDC, the largest channel
// count its authors built firmware for. Same RTL with NCH = 256, so the
// channel identifier grows to 8 bits and the output word to 26 bits.
//
// Each channel gets three pulses of 3 to 30 ns, at random times spread
// over 40 us, with edges 20..264 ps away from the 284 ps sampling grid.
// Every record must carry the right channel number, edge kind and bin
// (coarse*8 + fine = n + C mod 2^17, one C for all channels); at the end
// every edge must have come out and nothing may be flagged lost or
// overflowing. The peak input rate stays below the 110 M words/s readout.
module tdc_256_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  localparam int     NCH  = 256;
  localparam int     STEP = 284;
  localparam longint TREF = 32 * STEP;
  localparam longint ORIGIN = 1000;

  logic                clk_ref = 1'b0;
  logic [3:0]          clk_q;
  logic                clk440, clk110, locked;
  logic                arst = 1'b1;
  logic [NCH-1:0]      din = '0;
  logic                rd_en = 1'b1, rd_valid;
  logic [25:0]         rd_data;
  logic [NCH-1:0][2:0] lost;
  logic [NCH-1:0]      overflow;
  logic [10:0]         out_level;

  mmcm_model #(.MULT(8)) u_mmcm (
    .clk_ref(clk_ref), .clk_q(clk_q), .clk_half(clk440), .clk_ref_out(clk110), .locked(locked)
  );

  tdc_top #(.NCH(NCH)) dut (
    .clk_q(clk_q), .clk440(clk440), .clk110(clk110), .arst(arst), .din(din),
    .rd_en(rd_en), .rd_valid(rd_valid), .rd_data(rd_data),
    .lost(lost), .overflow(overflow), .out_level(out_level)
  );

  initial begin
    #(ORIGIN);
    forever begin
      clk_ref = 1'b1; #(TREF / 2);
      clk_ref = 1'b0; #(TREF / 2);
    end
  end

  int checks = 0, failures = 0, n_flag = 0, n_words = 0;
  longint exp_n [NCH][$];
  bit     exp_l [NCH][$];
  longint C = 0;
  bit     have_c = 1'b0;
  bit     seen [NCH];

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("t=%0t %s", $time, msg);
  endtask

  always @(posedge clk440) begin
    if (!dut.rst440)
      for (int c = 0; c < NCH; c++) if (lost[c] != 0 || overflow[c]) n_flag++;
  end

  always @(posedge clk110) begin
    if (rd_en && rd_valid && !arst) begin
      int c;
      hit_t h;
      longint v, en;
      bit el;
      c = int'(rd_data[25:18]);
      h = hit_t'(rd_data[17:0]);
      v = longint'({h.coarse, h.fine});
      n_words++;
      seen[c] = 1'b1;
      checks++;
      if (exp_n[c].size() == 0) fail($sformatf("unexpected record on channel %0d", c));
      else begin
        en = exp_n[c].pop_front();
        el = exp_l[c].pop_front();
        if (!have_c) begin C = (v - en) & 64'h1ffff; have_c = 1'b1; end
        if (((en + C) & 64'h1ffff) != v || el != (h.edge_id == EDGE_LEADING))
          fail($sformatf("channel %0d: record %p, expected bin %0d", c, h, (en + C) & 64'h1ffff));
      end
    end
  end

  task automatic pulses(int c, longint n0);
    longint n, t;
    n = n0;
    for (int p = 0; p < 3; p++) begin
      for (int e = 0; e < 2; e++) begin
        n += (e == 0) ? longint'($urandom_range(200, 45000)) : longint'($urandom_range(11, 105));
        t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
        #(t - longint'($time));
        din[c] = ~din[c];
        exp_n[c].push_back(n + 1);
        exp_l[c].push_back(din[c]);
      end
    end
  endtask

  initial begin
    longint n0;
    wait (locked);
    repeat (20) @(posedge clk_q[0]);
    @(negedge clk110) arst = 1'b0;
    repeat (10) @(posedge clk110);
    n0 = (longint'($time) - ORIGIN) / STEP + 20;
    for (int c = 0; c < NCH; c++) begin
      automatic int cc = c;
      fork pulses(cc, n0); join_none
    end
    #45us;
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (exp_n[c].size() != 0 || !seen[c]) fail($sformatf("channel %0d: %0d edges missing", c, exp_n[c].size()));
    end
    checks++;
    if (n_flag != 0) fail("lost or overflow flagged");
    $display("%0d words from %0d channels", n_words, NCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
