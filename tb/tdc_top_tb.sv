// tdc_top_tb: end-to-end test of the eight-channel TDC at its default sizes.
//
// The clock model derives the 880 MHz quad phase clocks, 440 MHz and 110 MHz
// from a 9088 ps reference (110.04 MHz), so one bin is exactly 284 ps and
// the sampling instants are 1000 + n*284 ps. Every channel gets its own
// random pulse train whose edges sit 20..264 ps away from those instants;
// an edge between instants n-1 and n must be reported as bin n, i.e. as
// coarse*8 + fine = n + C modulo 2^17, with one constant C (fixed by the
// first record) for all channels. The testbench logs every edge it makes
// and matches each output word, by its channel identifier, against that
// channel's log in order. An expected edge may only be missing if the
// design flagged a record as lost or as a channel buffer overflow, and the
// number missing must equal the number flagged.
//
// Phases: (A) mixed traffic on all channels, with pulses and gaps shorter
// than one 440 MHz window; (B) four edges within 1.7 ns on channel 3 (at
// least one lost); (C) readout stopped for 25 us while channel 7 runs at
// about 330 M edges/s (three times what the scanner
// can move), filling the output buffer (scanner stall) and then
// channel 7's buffer (overflow); (D) readout resumed and all drained. The
// run lasts beyond one wrap of the coarse counter (37.2 us). The smallest
// latency from an input edge to its word at the output is checked against
// 0.21 us. Each mechanism is counted and one that never occurs is a
// failure.
module tdc_top_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  localparam int     NCH  = 8;
  localparam int     STEP = 284;
  localparam longint TREF = 32 * STEP;
  localparam longint ORIGIN = 1000;

  logic             clk_ref = 1'b0;
  logic [3:0]       clk_q;
  logic             clk440, clk110, locked;
  logic             arst = 1'b1;
  logic [NCH-1:0]   din = '0;
  logic             rd_en = 1'b0;
  logic             rd_valid;
  logic [20:0]      rd_data;
  logic [NCH-1:0][2:0] lost;
  logic [NCH-1:0]   overflow;
  logic [10:0]      out_level;

  mmcm_model #(.MULT(8)) u_mmcm (
    .clk_ref(clk_ref), .clk_q(clk_q), .clk_half(clk440), .clk_ref_out(clk110), .locked(locked)
  );

  tdc_top dut (
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

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("t=%0t %s", $time, msg);
  endtask

  // ---------------- stimulus ----------------
  // expected edges per channel: bin index, leading flag, time
  longint exp_n [NCH][$];
  bit     exp_l [NCH][$];
  longint exp_t [NCH][$];

  int  mode [NCH];      // 0 off, 1 mixed, 2 fast, 3 slow
  bit  burst_req [NCH];
  bit  gen_stop = 1'b0;

  task automatic gen(int c);
    longint n, t;
    n = (longint'($time) - ORIGIN) / STEP + 2;
    forever begin
      int k;
      if (gen_stop) break;
      case (mode[c])
        0: k = 40;
        1: k = ($urandom_range(0, 9) == 0) ? int'($urandom_range(1, 7)) : int'($urandom_range(100, 2000));
        2: k = $urandom_range(9, 14);
        default: k = $urandom_range(1000, 3000);
      endcase
      if (burst_req[c]) begin
        // four edges within 1.7 ns, then quiet: however the windows fall,
        // at least one of them cannot be recorded
        burst_req[c] = 1'b0;
        for (int b = 0; b < 4; b++) begin
          n = n + ((b == 0) ? 40 : 2);
          t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
          #(t - longint'($time));
          toggle(c, n, t);
        end
        k = 60;
      end
      if (mode[c] == 1 && k < 9) begin
        // short pulse or gap: two close edges, then at least 6 ns quiet
        n = n + 30;
        t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
        #(t - longint'($time));
        toggle(c, n, t);
        n = n + k;
        t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
        #(t - longint'($time));
        toggle(c, n, t);
        k = 30;
      end
      n = n + k;
      t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
      #(t - longint'($time));
      if (mode[c] != 0) toggle(c, n, t);
    end
  endtask

  task automatic toggle(int c, longint n, longint t);
    if (gen_stop) return;
    din[c] = ~din[c];
    // the edge lies between sampling instants n and n+1: it is seen at n+1
    exp_n[c].push_back(n + 1);
    exp_l[c].push_back(din[c]);
    exp_t[c].push_back(t);
  endtask

  // ---------------- checking ----------------
  longint C = 0;
  bit     have_c = 1'b0;
  int     skipped [NCH], lost_cnt [NCH], ovf_cnt [NCH];
  longint last_v [NCH];
  longint min_lat = 64'h7fffffffffffffff;
  int     n_words = 0, n_lead = 0, n_trail = 0, n_pair = 0, n_fine0 = 0, n_wrap = 0;
  int     n_contend = 0, n_stall = 0;
  logic [COARSE_W-1:0] last_coarse [NCH];

  always @(posedge clk440) begin
    if (!dut.rst440) for (int c = 0; c < NCH; c++) begin
      lost_cnt[c] += int'(lost[c]);
      if (overflow[c]) ovf_cnt[c]++;
    end
  end

  always @(posedge clk110) begin
    if (locked && !arst) begin
      if ($countones(dut.ch_valid) >= 2) n_contend++;
      if (out_level >= 11'(1023)) n_stall++;
    end
  end

  always @(posedge clk110) begin
    if (rd_en && rd_valid && !arst) begin
      int   c;
      hit_t h;
      longint v;
      bit   matched;
      c = int'(rd_data[20:18]);
      h = hit_t'(rd_data[17:0]);
      v = longint'({h.coarse, h.fine});
      n_words++;
      if (!have_c && exp_n[c].size() > 0) begin
        C = (v - exp_n[c][0]) & 64'h1ffff;
        have_c = 1'b1;
      end
      matched = 1'b0;
      while (!matched && exp_n[c].size() > 0) begin
        longint en;
        bit     el;
        longint et;
        en = exp_n[c].pop_front();
        el = exp_l[c].pop_front();
        et = exp_t[c].pop_front();
        if (((en + C) & 64'h1ffff) == v && (el == (h.edge_id == EDGE_LEADING))) begin
          matched = 1'b1;
          if (longint'($time) - et < min_lat) min_lat = longint'($time) - et;
        end else begin
          skipped[c]++;
        end
      end
      checks++;
      if (!matched) fail($sformatf("channel %0d: record %p matches no input edge", c, h));
      if (h.edge_id == EDGE_LEADING) n_lead++; else n_trail++;
      if (h.fine == 0) n_fine0++;
      if (n_words > 1 && last_v[c] >= 0 && h.coarse == last_coarse[c] && v != last_v[c]) n_pair++;
      if (last_v[c] >= 0 && v < last_v[c]) n_wrap++;
      last_v[c] = v;
      last_coarse[c] = h.coarse;
    end
  end

  // ---------------- sequence ----------------
  initial begin
    for (int c = 0; c < NCH; c++) begin
      mode[c] = 0; burst_req[c] = 0; skipped[c] = 0; lost_cnt[c] = 0; ovf_cnt[c] = 0;
      last_v[c] = -1;
    end
    wait (locked);
    repeat (20) @(posedge clk_q[0]);
    @(negedge clk110) arst = 1'b0;
    repeat (10) @(posedge clk110);
    rd_en = 1'b1;
    for (int c = 0; c < NCH; c++) begin
      automatic int cc = c;
      fork gen(cc); join_none
    end
    // (A) mixed traffic
    for (int c = 0; c < NCH; c++) mode[c] = 1;
    #12us;
    // (B) lost record on channel 3
    burst_req[3] = 1'b1;
    #1us;
    // (C) stop the readout, channel 7 fast
    for (int c = 0; c < NCH; c++) mode[c] = 3;
    mode[7] = 2;
    rd_en = 1'b0;
    #25us;
    // (D) resume, mixed traffic until past the coarse wrap
    for (int c = 0; c < NCH; c++) mode[c] = 1;
    rd_en = 1'b1;
    #12us;
    gen_stop = 1'b1;
    // drain
    for (int i = 0; i < 100 && (rd_valid || dut.ch_valid != 0); i++) #1us;
    #1us;
    // everything must have come out
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (exp_n[c].size() != 0) fail($sformatf("channel %0d: %0d edges never reported", c, exp_n[c].size()));
      checks++;
      if (skipped[c] != lost_cnt[c] + ovf_cnt[c])
        fail($sformatf("channel %0d: %0d records missing, %0d lost + %0d overflow flagged",
                       c, skipped[c], lost_cnt[c], ovf_cnt[c]));
    end
    checks++;
    if (rd_valid) fail("output buffer not empty at the end");
    checks++;
    if (min_lat > 210000) fail($sformatf("minimum latency %0d ps above 0.21 us", min_lat));
    $display("words=%0d leading=%0d trailing=%0d same-window pairs=%0d fine0=%0d coarse wraps=%0d",
             n_words, n_lead, n_trail, n_pair, n_fine0, n_wrap);
    $display("scanner contention cycles=%0d output-buffer stall cycles=%0d lost=%0d overflow=%0d",
             n_contend, n_stall, lost_cnt[3], ovf_cnt[7]);
    $display("minimum latency %0d ps", min_lat);
    checks++;
    if (n_lead == 0 || n_trail == 0 || n_pair == 0 || n_fine0 == 0 || n_wrap == 0 ||
        n_contend == 0 || n_stall == 0 || lost_cnt[3] == 0 || ovf_cnt[7] == 0)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
