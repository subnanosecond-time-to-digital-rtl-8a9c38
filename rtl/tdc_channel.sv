// tdc_channel: one complete TDC channel (the dashed square of the block
// diagram): quad-phase sampling chains, fine time counter and channel
// buffer.
//
// The input is sampled every quarter period of the 880 MHz clocks; the
// fine time counter turns each 440 MHz window of eight samples into hit
// records {edge, coarse, fine} using the shared coarse time, and the records
// are queued in the channel buffer, which the 110 MHz scanner empties.
//
// Interface: clk_q are the four 880 MHz phases, clk440/rst440 and
// clk110/rst110 the two slower domains (resets synchronous to their clocks).
// The read port (rd_en, rd_valid, rd_data) is show-ahead. lost flags a
// record dropped in the fine time counter, overflow one dropped because the
// channel buffer was full; both are 440 MHz single-cycle pulses.
// Structure after the paper's block diagram; the loss flags are this
// design's additions.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int BUF_DEPTH = 1024
) (
  input  logic [3:0]          clk_q,
  input  logic                clk440,
  input  logic                rst440,
  input  logic                clk110,
  input  logic                rst110,
  input  logic                din,
  input  logic [COARSE_W-1:0] coarse,
  input  logic                rd_en,
  output logic                rd_valid,
  output hit_t                rd_data,
  output logic [2:0]          lost,
  output logic                overflow
);
  timeunit 1ps; timeprecision 1ps;

  logic [SAMPLES-1:0] samples;
  logic               prev;
  logic               hit_valid;
  hit_t               hit;

  sampling_chain u_chain (
    .clk_q   (clk_q),
    .din     (din),
    .samples (samples),
    .prev    (prev)
  );

  fine_time u_fine (
    .clk       (clk440),
    .rst       (rst440),
    .samples   (samples),
    .prev      (prev),
    .coarse    (coarse),
    .hit_valid (hit_valid),
    .hit       (hit),
    .lost      (lost)
  );

  channel_buffer #(.WIDTH(HIT_W), .DEPTH(BUF_DEPTH)) u_buf (
    .wr_clk   (clk440),
    .wr_rst   (rst440),
    .wr_en    (hit_valid),
    .wr_data  (hit),
    .overflow (overflow),
    .rd_clk   (clk110),
    .rd_rst   (rst110),
    .rd_en    (rd_en),
    .rd_valid (rd_valid),
    .rd_data  (rd_data)
  );
endmodule
