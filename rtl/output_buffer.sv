// output_buffer: the common readout buffer of the TDC, clocked at 110 MHz.
//
// A single-clock FIFO of DEPTH words of WIDTH bits (channel identifier plus
// hit record). The scanner writes it; the data are read out one word at a
// time by the external readout (in the original system a TCP/IP processor
// sending over gigabit Ethernet). Read side show-ahead: rd_valid means
// rd_data holds the oldest word, rd_en with rd_valid removes it. almost_full
// (one slot left) stops the scanner, whose write is one cycle behind its
// decision, so nothing is lost here; a write while full is ignored.
// A word written at one edge is visible at the next.
//
// From the paper: a buffer at 110 MHz, read out one by one, no trigger
// selection, as in the published design. Depth and handshake are this design's choice.
module output_buffer #(
  parameter int WIDTH = 21,
  parameter int DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  output logic             almost_full,
  input  logic             rd_en,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH):0] level
);
  timeunit 1ps; timeprecision 1ps;

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && rd_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  assign level    = wptr - rptr;
  assign full     = (level == (AW+1)'(DEPTH));
  assign almost_full = (level >= (AW+1)'(DEPTH - 1));
  assign rd_valid = (level != '0);
  assign rd_data  = mem[rptr[AW-1:0]];

  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH)
    else $error("output_buffer: DEPTH must be a power of two");
endmodule
