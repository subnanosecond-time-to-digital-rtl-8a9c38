// mmcm_model: behavioural model of the FPGA clock manager, for simulation
// only (not synthesizable). It stands in for the vendor PLL/MMCM primitive
// that the TDC takes its clocks from.
//
// It measures the period of the reference clock between consecutive rising
// edges. Once two equal periods have been seen it asserts locked and, from
// every reference rising edge on, steps through 4*MULT equal quarter steps
// of the multiplied clock: clk_q[p] (MULT times the reference, phase p*90
// degrees) is high during quarter steps q with (q-p) mod 4 in {0,1};
// clk_half (MULT/2 times the reference) is high for q mod 8 < 4 and
// clk_ref_out (the reference rate) for q < 2*MULT. All rising edges of
// clk_half and clk_ref_out coincide with rising edges of clk_q[0], and every
// output is re-aligned to the reference edge each reference cycle, so
// nothing drifts. The quarter step is the reference period divided by
// 4*MULT, rounded down to whole ps; any remainder lengthens the last step.
// A change of the reference period drops locked until it has settled.
module mmcm_model #(
  parameter int MULT = 8  // 110 MHz reference -> 880 MHz
) (
  input  logic       clk_ref,
  output logic [3:0] clk_q,
  output logic       clk_half,
  output logic       clk_ref_out,
  output logic       locked
);
  timeunit 1ps; timeprecision 1ps;

  longint last_edge = -1;
  longint period    = 0;
  longint step_ps   = 0;
  int     stable    = 0;

  initial begin
    clk_q       = '0;
    clk_half    = 1'b0;
    clk_ref_out = 1'b0;
    locked      = 1'b0;
  end

  always @(posedge clk_ref) begin
    longint now, p;
    now = longint'($time);
    if (last_edge >= 0) begin
      p = now - last_edge;
      if (p == period) stable = (stable < 2) ? stable + 1 : stable;
      else             stable = 0;
      period = p;
    end
    last_edge = now;
    if (stable >= 2) begin
      step_ps = period / (4 * MULT);
      locked  = 1'b1;
      for (int q = 0; q < 4 * MULT; q++) begin
        for (int ph = 0; ph < 4; ph++) clk_q[ph] = (((q - ph + 4) % 4) < 2);
        clk_half    = ((q % 8) < 4);
        clk_ref_out = (q < 2 * MULT);
        if (q < 4 * MULT - 1) #(step_ps);
      end
    end else begin
      locked      = 1'b0;
      clk_q       = '0;
      clk_half    = 1'b0;
      clk_ref_out = 1'b0;
    end
  end
endmodule
