// channel_buffer: the per-channel hit buffer between the 440 MHz fine time
// domain and the 110 MHz readout domain.
//
// A dual-clock FIFO: a memory of DEPTH words written at wr_clk and read at
// rd_clk. Each side keeps a binary pointer one bit wider than the address
// and a Gray-coded copy of it; the Gray copy crosses to the other side
// through a two flip-flop synchroniser. Full and empty are computed on each
// side from its own pointer and the synchronised other one, so both are
// conservative. A write while full is dropped and flagged on 'overflow'.
// The read side is show-ahead: rd_valid says rd_data holds the oldest word,
// and rd_en (only honoured with rd_valid) removes it.
//
// Latency: a word written at a wr_clk edge is seen at the read side three
// to four rd_clk edges later. Resets: wr_rst and rd_rst are synchronous to
// their own clocks and must overlap.
//
// From the paper: a buffer per channel written from the fine time counter
// (440 MHz) and scanned from the 110 MHz side (block diagram). The FIFO structure,
// the 18-bit x 1024 size (one 18 kb block RAM, inferred from the memory
// counts of the 8- and 256-channel builds) and drop-on-full are this
// design's choices.
module channel_buffer #(
  parameter int WIDTH = tdc_pkg::HIT_W,
  parameter int DEPTH = 1024
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             overflow,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data
);
  timeunit 1ps; timeprecision 1ps;

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic             full;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wptr, wgray, rgray_w1, rgray_w2;  // write side
  logic [AW:0] rptr, rgray, wgray_r1, wgray_r2;  // read side
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      overflow <= wr_en && full;
      if (wr_en && !full) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wr_data;
  end

  // full: Gray pointers differ exactly in the two top bits
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // ---------------- read side ----------------
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && rd_valid) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

  assign rd_valid = (rgray != wgray_r2);
  assign rd_data  = mem[rptr[AW-1:0]];

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH)
    else $error("channel_buffer: DEPTH must be a power of two, at least 4");
endmodule
