// fine_time_tb: checks the fine time counter against a reference model.
//
// The testbench feeds a continuous sample stream (runs of 1 to 20 equal
// samples, so windows with no edge, one edge, both kinds and more than two
// edges all occur),
// eight samples per clock, with prev always the last sample of the previous
// window, plus a counting coarse time. Its model lists, per window, the
// first 0->1 and the first 1->0 position in the sequence prev, samples[0..7]
// and passes them, in time order, through a queue that may hold one record
// besides the one being sent; anything beyond, and every further edge in
// the window, is expected to be counted on lost. Each
// output record must match the model two clock edges after its window was
// presented. A directed case repeats the example of the paper's timing
// chart (pattern 0111 after all zeros, a leading edge at count 1).
module fine_time_tb;
  import tdc_pkg::*;
  timeunit 1ps; timeprecision 1ps;

  logic                clk = 1'b0;
  logic                rst = 1'b1;
  logic [7:0]          samples = '0;
  logic                prev = 1'b0;
  logic [COARSE_W-1:0] coarse = '0;
  logic                hit_valid;
  logic [2:0]          lost;
  hit_t                hit;

  int checks = 0, failures = 0;
  int n_lead = 0, n_trail = 0, n_both = 0, n_lost = 0, n_k0 = 0;

  fine_time dut (.clk(clk), .rst(rst), .samples(samples), .prev(prev), .coarse(coarse),
                 .hit_valid(hit_valid), .hit(hit), .lost(lost));

  always #1136 clk = ~clk;   // 440 MHz

  // stream generator state
  bit cur_level = 1'b0;
  int run_left  = 5;

  function automatic logic [7:0] next_window();
    logic [7:0] w;
    for (int k = 0; k < 8; k++) begin
      if (run_left == 0) begin
        cur_level = ~cur_level;
        run_left  = $urandom_range(1, 20);
      end
      w[k] = cur_level;
      run_left--;
    end
    return w;
  endfunction

  // model queue
  hit_t q[$];
  hit_t exp_out;
  bit   exp_valid;
  int   exp_lost;

  task automatic model_step(logic [7:0] s, logic p, logic [COARSE_W-1:0] c);
    logic [8:0] seq;
    int lk, tk;
    hit_t a, b;
    seq = {s, p};
    lk = -1; tk = -1;
    exp_lost = 0;
    for (int k = 0; k < 8; k++) begin
      if (seq[k] != seq[k+1]) exp_lost++;
      if (lk < 0 && seq[k] == 1'b0 && seq[k+1] == 1'b1) lk = k;
      if (tk < 0 && seq[k] == 1'b1 && seq[k+1] == 1'b0) tk = k;
    end
    a = '{edge_id: EDGE_LEADING,  coarse: c, fine: 3'(lk)};
    b = '{edge_id: EDGE_TRAILING, coarse: c, fine: 3'(tk)};
    if (lk >= 0) n_lead++;
    if (tk >= 0) n_trail++;
    if (lk == 0 || tk == 0) n_k0++;
    if (lk >= 0 && tk >= 0) begin
      n_both++;
      if (lk < tk) begin q.push_back(a); q.push_back(b); end
      else         begin q.push_back(b); q.push_back(a); end
    end else if (lk >= 0) q.push_back(a);
    else if (tk >= 0)     q.push_back(b);
    if (lk >= 0) exp_lost--;
    if (tk >= 0) exp_lost--;
    exp_valid = (q.size() > 0);
    if (exp_valid) exp_out = q.pop_front();
    if (q.size() > 1) exp_lost++;
    while (q.size() > 1) void'(q.pop_back());
  endtask

  initial begin
    logic [7:0]          s_in;
    logic                p_in;
    logic [COARSE_W-1:0] c_in;
    bit                  have;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    have = 1'b0;
    for (int i = 0; i < 20000; i++) begin
      // present window i before the rising edge
      @(negedge clk);
      prev = samples[7];
      if (i >= 96 && i <= 100) begin
        samples = 8'h00;                     // flat zeros ...
        cur_level = 1'b0; run_left = 0;
      end else if (i == 101) begin
        samples = 8'b0000_1110;              // ... then phases 0..3 = 0,1,1,1 (original timing chart)
        cur_level = 1'b1; run_left = 5;
      end else begin
        samples = next_window();
      end
      coarse = coarse + 1'b1;
      @(posedge clk);
      #1;
      // the output now belongs to window i-1
      if (have) begin
        model_step(s_in, p_in, c_in);
        checks++;
        if (hit_valid !== exp_valid || (exp_valid && hit !== exp_out) || int'(lost) != exp_lost) begin
          failures++;
          if (failures < 10)
            $display("t=%0t got v=%0b %p lost=%0d, expected v=%0b %p lost=%0d", $time,
                     hit_valid, hit, lost, exp_valid, exp_out, exp_lost);
        end
        if (i == 102) begin                  // timing-chart window: leading edge at count 1
          checks++;
          if (!(hit_valid && hit.edge_id == EDGE_LEADING && hit.fine == 3'd1)) begin
            failures++;
            $display("timing-chart example not decoded as a leading edge at 1: %p", hit);
          end
        end
        n_lost += int'(lost);
      end
      s_in = samples; p_in = prev; c_in = coarse; have = 1'b1;
    end
    $display("leading=%0d trailing=%0d both=%0d k0=%0d lost=%0d", n_lead, n_trail, n_both, n_k0, n_lost);
    checks++;
    if (n_both == 0 || n_lost == 0 || n_k0 == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
