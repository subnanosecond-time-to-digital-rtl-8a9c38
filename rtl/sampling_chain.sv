// sampling_chain: the quad-phase sampling front end of one TDC channel.
//
// The input is fanned out to four D flip-flops, row r clocked by the 880 MHz
// clock of phase r*90 degrees, so together they sample the input every
// quarter of an 880 MHz period. Each row continues as a chain of flip-flops
// that hands the sample to the next earlier phase, one step at a time
// (270 -> 180 -> 90 -> 0 degrees), and then on along 0 degree flip-flops.
// After the fourth column the four rows hold samples of the same 880 MHz
// period; the further columns give time for metastable states to settle.
// Each row has STAGES flip-flops. The fine time counter, clocked at 440 MHz,
// reads the last two columns (two consecutive aligned groups, i.e. eight
// samples) and one extra 0 degree flip-flop behind the last 270 degree row,
// which holds the sample just before the eight.
//
// Interface: clk_q[p] is the 880 MHz clock of phase p*90 degrees; din is the
// asynchronous input. samples[k], k = 0..7, is in time order: samples[0..3]
// is the older group (phases 0..3), samples[4..7] the newer one. prev is
// the 270 degree sample taken just before samples[0]. All outputs change on
// the 0 degree clock. No reset: the chain flushes itself within STAGES+1
// cycles of the 0 degree clock.
//
// From the paper: four phase-clocked first flip-flops, the step-by-step
// alignment, six flip-flops per row and the extra flip-flop behind the last
// row (original block diagram). The choice of which columns feed the fine time counter is
// read from the wiring of that diagram and is this design's interpretation.
module sampling_chain #(
  parameter int STAGES = 6  // flip-flops per row, as published
) (
  input  logic       [3:0] clk_q,
  input  logic             din,
  output logic [7:0]       samples,
  output logic             prev
);
  timeunit 1ps; timeprecision 1ps;

  // g_row[r].g_col[s].q: row r (first flip-flop on phase r), column s
  for (genvar r = 0; r < 4; r++) begin : g_row
    for (genvar s = 0; s < STAGES; s++) begin : g_col
      // column s of row r runs on phase r-s until phase 0 is reached
      localparam int PH = (s <= r) ? (r - s) : 0;
      logic q;
      if (s == 0) begin : g_first
        always_ff @(posedge clk_q[PH]) q <= din;
      end else begin : g_next
        always_ff @(posedge clk_q[PH]) q <= g_row[r].g_col[s-1].q;
      end
    end
    assign samples[r]     = g_row[r].g_col[STAGES-1].q;  // older group
    assign samples[4 + r] = g_row[r].g_col[STAGES-2].q;  // newer group
  end

  logic extra_q;
  always_ff @(posedge clk_q[0]) extra_q <= g_row[3].g_col[STAGES-1].q;
  assign prev = extra_q;

  initial assert (STAGES >= 5) else $error("sampling_chain: STAGES must be at least 5");
endmodule
