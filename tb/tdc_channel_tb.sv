// tdc_channel_tb: one channel from input pin to channel buffer read port.
//
// Clocks come from the clock model with a 9088 ps reference (284 ps bins,
// sampling instants at 1000 + n*284 ps), the coarse time from a coarse
// counter in the testbench. The input gets random pulses and gaps of
// 2.5 ns to 570 ns, and on one edge in ten a pulse or gap of 0.3 to 2 ns,
// so that both edges can fall into one 440 MHz window. Every edge placed
// between instants n-1 and n must come out, in order, as a record of the
// right kind with coarse*8 + fine = n + C (mod 2^17), C being fixed by the
// first record. Nothing may be flagged lost or overflowing at this rate.
module tdc_channel_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  localparam int     STEP = 284;
  localparam longint TREF = 32 * STEP;
  localparam longint ORIGIN = 1000;

  logic                clk_ref = 1'b0;
  logic [3:0]          clk_q;
  logic                clk440, clk110, locked;
  logic                rst440 = 1'b1, rst110 = 1'b1;
  logic                din = 1'b0;
  logic [COARSE_W-1:0] coarse;
  logic                rd_en = 1'b1, rd_valid, overflow;
  logic [2:0]          lost;
  hit_t                rd_data;

  mmcm_model #(.MULT(8)) u_mmcm (
    .clk_ref(clk_ref), .clk_q(clk_q), .clk_half(clk440), .clk_ref_out(clk110), .locked(locked)
  );

  coarse_counter u_coarse (.clk(clk440), .rst(rst440), .count(coarse));

  tdc_channel dut (
    .clk_q(clk_q), .clk440(clk440), .rst440(rst440), .clk110(clk110), .rst110(rst110),
    .din(din), .coarse(coarse), .rd_en(rd_en), .rd_valid(rd_valid), .rd_data(rd_data),
    .lost(lost), .overflow(overflow)
  );

  initial begin
    #(ORIGIN);
    forever begin
      clk_ref = 1'b1; #(TREF / 2);
      clk_ref = 1'b0; #(TREF / 2);
    end
  end

  int checks = 0, failures = 0, n_pair = 0, n_lead = 0, n_trail = 0, n_flag = 0;
  longint exp_n[$];
  bit     exp_l[$];
  longint C = 0;
  bit     have_c = 1'b0;
  logic [COARSE_W-1:0] last_coarse = '1;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("t=%0t %s", $time, msg);
  endtask

  task automatic edge_at(longint n);
    longint t;
    t = ORIGIN + n * STEP + longint'($urandom_range(20, STEP - 20));
    #(t - longint'($time));
    din = ~din;
    exp_n.push_back(n + 1);
    exp_l.push_back(din);
  endtask

  always @(posedge clk440) if (!rst440 && (lost != 0 || overflow)) n_flag++;

  always @(posedge clk110) begin
    if (!rst110 && rd_en && rd_valid) begin
      longint v, en;
      bit     el;
      v = longint'({rd_data.coarse, rd_data.fine});
      checks++;
      if (exp_n.size() == 0) fail($sformatf("unexpected record %p", rd_data));
      else begin
        en = exp_n.pop_front();
        el = exp_l.pop_front();
        if (!have_c) begin C = (v - en) & 64'h1ffff; have_c = 1'b1; end
        if (((en + C) & 64'h1ffff) != v || el != (rd_data.edge_id == EDGE_LEADING))
          fail($sformatf("record %p, expected bin %0d leading=%0b", rd_data, (en + C) & 64'h1ffff, el));
      end
      if (rd_data.coarse == last_coarse) n_pair++;
      if (rd_data.edge_id == EDGE_LEADING) n_lead++; else n_trail++;
      last_coarse = rd_data.coarse;
    end
  end

  initial begin
    longint n;
    wait (locked);
    repeat (20) @(posedge clk_q[0]);
    @(negedge clk440) rst440 = 1'b0;
    @(negedge clk110) rst110 = 1'b0;
    n = (longint'($time) - ORIGIN) / STEP + 20;
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 9) == 0) begin
        n += 30; edge_at(n);
        n += $urandom_range(1, 7); edge_at(n);
        n += 30;
      end else begin
        n += $urandom_range(9, 2000); edge_at(n);
      end
    end
    #2us;
    checks++;
    if (exp_n.size() != 0) fail($sformatf("%0d edges never reported", exp_n.size()));
    checks++;
    if (n_flag != 0) fail("lost or overflow flagged at a low rate");
    checks++;
    if (n_pair == 0 || n_lead == 0 || n_trail == 0) fail("no two records from one window");
    $display("leading=%0d trailing=%0d same-window pairs=%0d", n_lead, n_trail, n_pair);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
