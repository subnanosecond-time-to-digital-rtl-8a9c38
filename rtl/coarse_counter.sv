// coarse_counter: the coarse time counter shared by all channels.
//
// A free-running binary counter clocked at 440 MHz (every other rising edge
// of the 880 MHz 0 degree clock). With 14 bits it wraps after 16384 cycles;
// together with the 3-bit fine count this gives 2^17 bins, about 37 us at a
// 0.28 ns bin, the dynamic range stated for the design. The width follows
// the paper; the synchronous reset to zero is this design's choice.
//
// Interface: count is the current value; it steps by one on every clk edge
// after rst is released.
module coarse_counter #(
  parameter int WIDTH = tdc_pkg::COARSE_W
) (
  input  logic             clk,
  input  logic             rst,
  output logic [WIDTH-1:0] count
);
  timeunit 1ps; timeprecision 1ps;

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end
endmodule
