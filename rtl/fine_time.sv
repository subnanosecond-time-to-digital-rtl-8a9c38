// fine_time: the fine time counter of one channel, clocked at 440 MHz.
//
// Every 440 MHz cycle it registers the eight quarter-period samples from the
// sampling chain (samples[0..7], oldest first) together with the sample just
// before them (prev) and the current coarse time. In the nine-bit sequence
// prev, samples[0..7] a 0->1 step is a leading edge and a 1->0 step a
// trailing edge; the fine time count is the index k (0..7) of the first
// sample that shows the new level. Hit time in bins is therefore
// coarse*8 + fine, one bin being a quarter of the 880 MHz period.
// The example of the original timing chart (0 degree sample 0, 90/180/270 degree samples 1)
// is a leading edge at fine count 1 (or 5 in the newer group).
//
// One hit record leaves per cycle. If a window holds both a leading and a
// trailing edge (a pulse or gap shorter than 2.3 ns), the earlier is sent
// at once and the later is held in a one-record pending slot and sent the
// next cycle. A record that finds the slot still taken is dropped. Only the
// first edge of each kind per window is kept (a window holding three or
// more edges needs pulses or gaps under 1 ns). 'lost' counts the edges
// dropped for either reason in that cycle.
//
// Interface: hit_valid/hit qualify one record per cycle, no back pressure
// (the channel buffer absorbs it). Latency: 2 clk cycles from the sampled
// window to hit_valid. rst is synchronous to clk and active high.
//
// From the paper: a 3-bit fine count from the sample pattern, a leading /
// trailing identifier and the 14-bit coarse time in each record, 440 MHz
// (original block diagram and timing chart). The bit numbering of the count, the pending slot
// and the one-edge-per-kind rule are this design's own choices.
module fine_time
  import tdc_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [SAMPLES-1:0]  samples,
  input  logic                prev,
  input  logic [COARSE_W-1:0] coarse,
  output logic                hit_valid,
  output hit_t                hit,
  output logic [2:0]          lost
);
  timeunit 1ps; timeprecision 1ps;

  // stage A: capture window from the 880 MHz domain
  logic [SAMPLES:0]    win_q;   // bit 0 = prev, bit k+1 = samples[k]
  logic [COARSE_W-1:0] coarse_q;
  always_ff @(posedge clk) begin
    win_q    <= {samples, prev};
    coarse_q <= coarse;
  end

  // stage B: edge search
  logic             lead_v, trail_v;
  logic [FINE_W-1:0] lead_k, trail_k;
  always_comb begin
    lead_v  = 1'b0; trail_v = 1'b0;
    lead_k  = '0;   trail_k = '0;
    for (int k = SAMPLES - 1; k >= 0; k--) begin
      if (!win_q[k] && win_q[k+1]) begin lead_v  = 1'b1; lead_k  = FINE_W'(k); end
      if (win_q[k] && !win_q[k+1]) begin trail_v = 1'b1; trail_k = FINE_W'(k); end
    end
  end

  hit_t lead_h, trail_h, first_h, second_h;
  logic [1:0] n_new;
  assign n_new = 2'(lead_v) + 2'(trail_v);
  logic [3:0] n_trans;   // level changes in the window
  logic [2:0] n_extra;   // changes beyond the first of each kind
  always_comb begin
    n_trans = 4'($countones(win_q[SAMPLES:1] ^ win_q[SAMPLES-1:0]));
    n_extra = 3'(n_trans - 4'(n_new));
    lead_h  = '{edge_id: EDGE_LEADING,  coarse: coarse_q, fine: lead_k};
    trail_h = '{edge_id: EDGE_TRAILING, coarse: coarse_q, fine: trail_k};
    if (lead_v && (!trail_v || lead_k < trail_k)) begin
      first_h = lead_h;  second_h = trail_h;
    end else begin
      first_h = trail_h; second_h = lead_h;
    end
  end

  logic pend_v;
  hit_t pend_h;
  always_ff @(posedge clk) begin
    if (rst) begin
      hit_valid <= 1'b0;
      hit       <= '0;
      pend_v    <= 1'b0;
      pend_h    <= '0;
      lost      <= '0;
    end else begin
      lost <= n_extra;
      if (pend_v) begin
        hit_valid <= 1'b1;
        hit       <= pend_h;
        pend_v    <= (n_new != 0);
        pend_h    <= first_h;
        lost      <= n_extra + 3'(n_new == 2);
      end else begin
        hit_valid <= (n_new != 0);
        hit       <= first_h;
        pend_v    <= (n_new == 2);
        pend_h    <= second_h;
      end
    end
  end
endmodule
