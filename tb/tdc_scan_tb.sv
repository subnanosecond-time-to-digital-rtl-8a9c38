// tdc_scan_tb: the measurements of the original evaluation, repeated on the
// RTL with ideal (zero-skew) input paths.
//
// 1. Bin scan, for reference clocks of 40.01, 80.13 and 110.04 MHz (bins of
//    781, 390 and 284 ps; reference periods of 32 whole bins). One input,
//    fanned out to all eight channels, gets a leading edge at a delay d
//    after a reference edge, d stepping by 33 ps over four 880 MHz periods
//    (16 bins); each pulse is 20 ns wide and one pulse is sent every
//    24 reference periods, within the readout rate of one word per
//    reference period. Every record must give exactly the bin the testbench
//    computes, ceil(d / bin) plus a constant; from the hits per bin the
//    testbench prints the differential nonlinearity D_i and its rms, which
//    for ideal paths only reflect the 33 ps scan step.
// 2. Resolution, at 110.04 MHz: an input clock of period 200 ns, 1 us, 10 us
//    and 37 us; the difference between neighbouring leading edges, modulo
//    2^17 bins, must be within one bin of the period.
// The design is reset after every change of reference frequency, once the
// clock model has locked again.
module tdc_scan_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  localparam int NCH = 8;

  logic            clk_ref = 1'b0;
  logic [3:0]      clk_q;
  logic            clk440, clk110, locked;
  logic            arst = 1'b1;
  logic            din1 = 1'b0;
  logic            rd_en = 1'b1, rd_valid;
  logic [20:0]     rd_data;
  logic [NCH-1:0][2:0] lost;
  logic [NCH-1:0]  overflow;
  logic [10:0]     out_level;

  mmcm_model #(.MULT(8)) u_mmcm (
    .clk_ref(clk_ref), .clk_q(clk_q), .clk_half(clk440), .clk_ref_out(clk110), .locked(locked)
  );

  tdc_top dut (
    .clk_q(clk_q), .clk440(clk440), .clk110(clk110), .arst(arst), .din({NCH{din1}}),
    .rd_en(rd_en), .rd_valid(rd_valid), .rd_data(rd_data),
    .lost(lost), .overflow(overflow), .out_level(out_level)
  );

  longint tref = 9088;   // reference period, ps
  longint tref_origin = 0;
  longint ref_edges[$];  // time of every rising reference edge

  initial begin
    #1000;
    forever begin
      clk_ref = 1'b1; ref_edges.push_back(longint'($time));
      if (ref_edges.size() > 8) void'(ref_edges.pop_front());
      #(tref / 2);
      clk_ref = 1'b0; #(tref - tref / 2);
    end
  end

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("t=%0t %s", $time, msg);
  endtask

  // expected bins per channel (leading edges only are checked; trailing
  // records are consumed)
  longint exp_b [NCH][$];
  longint C [NCH];
  bit     have_c [NCH];
  int     hist [16];
  bit     collect_hist = 1'b0;
  // resolution mode
  bit     res_mode = 1'b0;
  longint res_period_bins;
  longint last_lead [NCH];
  int     res_checks = 0;
  longint res_err_max = 0;

  always @(posedge clk110) begin
    if (rd_en && rd_valid && !arst) begin
      int c;
      hit_t h;
      longint v;
      c = int'(rd_data[20:18]);
      h = hit_t'(rd_data[17:0]);
      v = longint'({h.coarse, h.fine});
      if (h.edge_id == EDGE_LEADING) begin
        if (res_mode) begin
          if (last_lead[c] >= 0) begin
            longint diff, err;
            diff = (v - last_lead[c]) & 64'h1ffff;
            err  = diff - res_period_bins;
            checks++; res_checks++;
            if (err < -1 || err > 1) fail($sformatf("ch %0d: interval %0d bins, expected %0d", c, diff, res_period_bins));
            if (err < 0) err = -err;
            if (err > res_err_max) res_err_max = err;
          end
          last_lead[c] = v;
        end else begin
          longint eb;
          checks++;
          if (exp_b[c].size() == 0) fail("unexpected leading record");
          else begin
            eb = exp_b[c].pop_front();
            if (!have_c[c]) begin C[c] = (v - eb) & 64'h1ffff; have_c[c] = 1'b1; end
            if (((eb + C[c]) & 64'h1ffff) != v)
              fail($sformatf("ch %0d: bin %0d, expected %0d", c, v, (eb + C[c]) & 64'h1ffff));
          end
        end
      end
    end
  end

  task automatic relock(longint period);
    arst = 1'b1;
    tref = period;
    // wait for the new period to be seen and locked
    repeat (4) @(posedge clk_ref);
    wait (locked);
    repeat (20) @(posedge clk_q[0]);
    @(negedge clk110) arst = 1'b0;
    repeat (10) @(posedge clk110);
    for (int c = 0; c < NCH; c++) begin have_c[c] = 1'b0; exp_b[c].delete(); last_lead[c] = -1; end
  endtask

  task automatic bin_scan(longint period);
    longint bin, d;
    int     npts;
    real    sum2, dmax;
    relock(period);
    @(posedge clk_ref);
    tref_origin = longint'($time);   // a sampling instant
    bin = period / 32;
    foreach (hist[i]) hist[i] = 0;
    npts = int'((16 * bin) / 33);
    for (int i = 0; i < npts; i++) begin
      longint tr, te, b;
      // wait for a reference edge, leaving time for the 16 records of the
      // previous pulse to be read out (one word per reference period)
      repeat (24) @(posedge clk_ref);
      tr = longint'($time);
      d  = 33 * i + 17;
      te = tr + d;
      b  = (d + bin - 1) / bin;      // bin within the reference period
      if (d % bin == 0) continue;     // never on a sampling instant
      #(d);
      din1 = 1'b1;
      for (int c = 0; c < NCH; c++) exp_b[c].push_back((te - tref_origin + bin - 1) / bin);
      hist[b % 16]++;
      #20000;
      din1 = 1'b0;
    end
    #2us;
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (exp_b[c].size() != 0) fail($sformatf("ch %0d: %0d edges not reported", c, exp_b[c].size()));
    end
    sum2 = 0.0; dmax = 0.0;
    for (int i = 1; i < 16; i++) begin
      real di;
      di = real'(hist[i]) * 33.0 / real'(bin) - 1.0;
      sum2 += di * di;
      if (di > dmax) dmax = di;
      if (-di > dmax) dmax = -di;
    end
    $display("bin %0d ps: %0d scan points, max |D_i| = %.3f, rms D = %.3f (33 ps scan granularity only)",
             bin, npts, dmax, $sqrt(sum2 / 15.0));
  endtask

  task automatic resolution(longint period_ps, int n);
    res_mode = 1'b1;
    res_period_bins = (period_ps + 142) / 284;
    for (int c = 0; c < NCH; c++) last_lead[c] = -1;
    for (int i = 0; i < n; i++) begin
      din1 = 1'b1;
      #(period_ps / 2);
      din1 = 1'b0;
      #(period_ps - period_ps / 2);
    end
    #2us;
  endtask

  initial begin
    wait (locked);
    bin_scan(24992);   // 40.01 MHz reference, 781 ps bin
    bin_scan(12480);   // 80.13 MHz reference, 390 ps bin
    bin_scan(9088);    // 110.04 MHz reference, 284 ps bin
    resolution(200000 + 37, 20);
    resolution(1000000 + 101, 6);
    resolution(10000000 + 77, 4);
    resolution(37000000 + 13, 3);
    $display("resolution: %0d intervals, largest error %0d bin", res_checks, res_err_max);
    checks++;
    if (res_checks < 8 * 25) fail("too few intervals measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
