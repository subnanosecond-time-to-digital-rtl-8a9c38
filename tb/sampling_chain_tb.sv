// sampling_chain_tb: checks the quad-phase sampling front end against the
// input waveform it was fed.
//
// The clock model runs from a 9088 ps reference, so the quarter step is
// exactly 284 ps and the sampling instants form the grid 1000 + n*284 ps.
// The input toggles at random times kept at least 20 ps away from that grid
// and every change is logged. After each rising edge tE of the 0 degree
// clock, samples[k] must equal the logged input at tE - 5T + k*T/4
// (T = 1136 ps) and prev the input at tE - 5T - T/4: the two newest aligned
// groups and the 270 degree sample before them.
module sampling_chain_tb;
  timeunit 1ps; timeprecision 1ps;

  localparam int  STEP = 284;
  localparam int  T    = 4 * STEP;
  localparam int  TREF = 32 * STEP;

  logic       clk_ref = 1'b0;
  logic [3:0] clk_q;
  logic       clk_half, clk_ref_out, locked;
  logic       din = 1'b0;
  logic [7:0] samples;
  logic       prev;

  int checks = 0, failures = 0;

  mmcm_model #(.MULT(8)) u_mmcm (
    .clk_ref(clk_ref), .clk_q(clk_q), .clk_half(clk_half),
    .clk_ref_out(clk_ref_out), .locked(locked)
  );

  sampling_chain dut (.clk_q(clk_q), .din(din), .samples(samples), .prev(prev));

  initial begin
    #1000;
    forever begin
      clk_ref = 1'b1; #(TREF / 2);
      clk_ref = 1'b0; #(TREF / 2);
    end
  end

  // input change log
  longint chg_t[$];
  bit     chg_v[$];

  function automatic bit din_at(longint t);
    bit v = 1'b0;
    foreach (chg_t[i]) if (chg_t[i] <= t) v = chg_v[i];
    return v;
  endfunction

  // random input: changes at grid + 20..264 ps, 1..12 steps apart
  initial begin
    longint n;
    n = 2;
    forever begin
      longint t;
      n = n + 1 + longint'($urandom_range(0, 11));
      t = 1000 + n * STEP + longint'($urandom_range(20, STEP - 20));
      #(t - longint'($time));
      din = ~din;
      chg_t.push_back(t);
      chg_v.push_back(din);
    end
  end

  initial begin
    longint tE;
    int transitions_seen;
    transitions_seen = 0;
    wait (locked);
    repeat (12) @(posedge clk_q[0]);
    repeat (3000) begin
      @(posedge clk_q[0]);
      tE = longint'($time);
      #1;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (samples[k] !== din_at(tE - 5 * T + k * STEP)) begin
          failures++;
          if (failures < 10)
            $display("t=%0t samples[%0d]=%0b expected %0b", $time, k, samples[k],
                     din_at(tE - 5 * T + k * STEP));
        end
      end
      checks++;
      if (prev !== din_at(tE - 5 * T - STEP)) begin
        failures++;
        if (failures < 10) $display("t=%0t prev=%0b wrong", $time, prev);
      end
      if (samples != 8'h00 && samples != 8'hff) transitions_seen++;
    end
    checks++;
    if (transitions_seen < 100) begin
      failures++;
      $display("too few windows with an edge: %0d", transitions_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
