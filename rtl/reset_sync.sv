// reset_sync: turns an asynchronous reset into one for a given clock
// domain. Assertion is immediate, release happens on the STAGES-th rising
// clock edge after the input is released, so every flip-flop of the domain
// leaves reset on the same edge. Standard practice; the paper does not
// describe resets.
module reset_sync #(
  parameter int STAGES = 3
) (
  input  logic clk,
  input  logic arst,
  output logic rst
);
  timeunit 1ps; timeprecision 1ps;

  logic [STAGES-1:0] q;
  always_ff @(posedge clk or posedge arst) begin
    if (arst) q <= '1;
    else      q <= {q[STAGES-2:0], 1'b0};
  end
  assign rst = q[STAGES-1];
endmodule
