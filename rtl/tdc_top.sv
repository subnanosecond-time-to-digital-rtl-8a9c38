// tdc_top: multi-channel FPGA time-to-digital converter with sub-ns bins.
//
// Each channel samples its input with four flip-flops clocked by 880 MHz
// clocks shifted by 0, 90, 180 and 270 degrees, so the input is looked at
// every quarter period (0.28 ns with a 110 MHz reference). Flip-flop chains
// bring the four samples onto the 0 degree clock; a fine time counter at
// 440 MHz finds leading and trailing edges in each window of eight samples
// and forms 18-bit records {edge, 14-bit coarse time, 3-bit fine time}. The
// records wait in a per-channel buffer; a 110 MHz scanner moves them, with
// a channel identifier in front, into one output buffer that is read out a
// word at a time. There is no trigger: every edge is read out.
//
// Clocks (from the FPGA clock manager, outside this module): clk_q[p] is
// the 880 MHz clock of phase p*90 degrees, clk440 and clk110 are phase
// aligned with the 0 degree clock (clk440 rises on every other clk_q[0]
// edge, clk110 on every eighth). All eight times the reference frequency
// scale together, so the bin is 1/(32 f_ref).
//
// Interface: din[NCH] the asynchronous hit inputs; arst an asynchronous
// reset (hold it for at least 10 clk_q[0] cycles so the sampling chains
// flush); rd_en/rd_valid/rd_data the show-ahead read port of the output
// buffer, rd_data = {channel id, edge, coarse, fine}. lost[c] counts the edges of
// channel c dropped in the fine time counter in a 440 MHz cycle, overflow[c]
// pulses for a record dropped at a full channel buffer; out_level is the output buffer fill level.
//
// Structure, clock rates, field widths and the eight channels follow the
// paper; buffer depths, handshakes and loss flags are this design's.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int NCH        = 8,
  parameter int CH_DEPTH   = 1024,
  parameter int OUT_DEPTH  = 1024,
  parameter int ID_W       = (NCH > 1) ? $clog2(NCH) : 1,
  parameter int WORD_W     = ID_W + HIT_W
) (
  input  logic [3:0]         clk_q,
  input  logic               clk440,
  input  logic               clk110,
  input  logic               arst,
  input  logic [NCH-1:0]     din,
  input  logic               rd_en,
  output logic               rd_valid,
  output logic [WORD_W-1:0]  rd_data,
  output logic [NCH-1:0][2:0] lost,
  output logic [NCH-1:0]     overflow,
  output logic [$clog2(OUT_DEPTH):0] out_level
);
  timeunit 1ps; timeprecision 1ps;

  logic rst440, rst110;
  reset_sync u_rs440 (.clk(clk440), .arst(arst), .rst(rst440));
  reset_sync u_rs110 (.clk(clk110), .arst(arst), .rst(rst110));

  logic [COARSE_W-1:0] coarse;
  coarse_counter #(.WIDTH(COARSE_W)) u_coarse (
    .clk   (clk440),
    .rst   (rst440),
    .count (coarse)
  );

  logic [NCH-1:0] ch_valid, ch_rd;
  hit_t           ch_data [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    tdc_channel #(.BUF_DEPTH(CH_DEPTH)) u_ch (
      .clk_q    (clk_q),
      .clk440   (clk440),
      .rst440   (rst440),
      .clk110   (clk110),
      .rst110   (rst110),
      .din      (din[c]),
      .coarse   (coarse),
      .rd_en    (ch_rd[c]),
      .rd_valid (ch_valid[c]),
      .rd_data  (ch_data[c]),
      .lost     (lost[c]),
      .overflow (overflow[c])
    );
  end

  logic              out_wr, out_full, out_afull;
  logic [WORD_W-1:0] out_data;

  channel_scanner #(.NCH(NCH), .ID_W(ID_W)) u_scan (
    .clk      (clk110),
    .rst      (rst110),
    .ch_valid (ch_valid),
    .ch_data  (ch_data),
    .ch_rd    (ch_rd),
    .out_full (out_afull),
    .out_wr   (out_wr),
    .out_data (out_data)
  );

  output_buffer #(.WIDTH(WORD_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk         (clk110),
    .rst         (rst110),
    .wr_en       (out_wr),
    .wr_data     (out_data),
    .full        (out_full),
    .almost_full (out_afull),
    .rd_en       (rd_en),
    .rd_valid    (rd_valid),
    .rd_data     (rd_data),
    .level       (out_level)
  );

  // the scanner never writes into a full output buffer
  assert property (@(posedge clk110) disable iff (rst110) !(out_wr && out_full));
endmodule
