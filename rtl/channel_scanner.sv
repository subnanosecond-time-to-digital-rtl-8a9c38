// channel_scanner: moves hit records from the channel buffers into the
// common output buffer, attaching the channel identifier.
//
// Clocked at 110 MHz. Each cycle, unless the output buffer is full, it
// looks at the channels in round-robin order starting after the channel
// served last, takes the first one whose buffer holds a record, pops that
// record (show-ahead read, so data and pop are in the same cycle) and
// writes {channel id, record} to the output buffer on the next edge. At most
// one record moves per cycle, so the scanner carries 110 M records/s in all;
// a channel with data waits at most NCH-1 cycles.
//
// Interface: ch_valid/ch_data are the channels' show-ahead outputs and
// ch_rd their pops (combinational from ch_valid and out_full). out_wr /
// out_data are registered.
//
// From the paper: the channel buffers of all channels are scanned and the
// data are transferred to a buffer with a 3-bit channel identifier attached
// in the published design. The round-robin order that skips empty channels is this
// design's choice.
module channel_scanner
  import tdc_pkg::*;
#(
  parameter int NCH  = 8,
  parameter int ID_W = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [NCH-1:0]        ch_valid,
  input  hit_t                  ch_data [NCH],
  output logic [NCH-1:0]        ch_rd,
  input  logic                  out_full,
  output logic                  out_wr,
  output logic [ID_W+HIT_W-1:0] out_data
);
  timeunit 1ps; timeprecision 1ps;

  logic [ID_W-1:0] last_q;   // channel served last
  logic            found;
  logic [ID_W-1:0] sel;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = 1; i <= NCH; i++) begin
      logic [ID_W-1:0] c;
      c = ID_W'((int'(last_q) + i) % NCH);
      if (!found && ch_valid[c]) begin
        found = 1'b1;
        sel   = c;
      end
    end
  end

  always_comb begin
    ch_rd = '0;
    if (found && !out_full) ch_rd[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last_q   <= ID_W'(NCH - 1);
      out_wr   <= 1'b0;
      out_data <= '0;
    end else begin
      out_wr <= found && !out_full;
      if (found && !out_full) begin
        last_q   <= sel;
        out_data <= {sel, ch_data[sel]};
      end
    end
  end

  // exactly one channel is popped, and only one that holds data
  assert property (@(posedge clk) disable iff (rst) $onehot0(ch_rd));
  assert property (@(posedge clk) disable iff (rst) (ch_rd & ~ch_valid) == '0);
endmodule
