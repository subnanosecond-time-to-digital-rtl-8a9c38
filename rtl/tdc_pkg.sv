// tdc_pkg: widths and record formats shared by the TDC modules.
//
// A hit record is what one channel stores for one detected edge: a 14-bit
// coarse time (count of 440 MHz cycles), a 3-bit fine time (position of the
// edge among the eight quarter-period samples taken during one 440 MHz
// cycle) and one bit telling a leading from a trailing edge. That makes an
// 18-bit word. The shared output buffer adds a channel identifier in front
// of it. The field widths come from the paper; the order of the fields
// within the word is this design's choice.
package tdc_pkg;
  timeunit 1ps; timeprecision 1ps;

  localparam int COARSE_W = 14;  // coarse time counter bits
  localparam int FINE_W   = 3;   // fine time count bits
  localparam int SAMPLES  = 8;   // samples per 440 MHz cycle (2 x 880 MHz x 4 phases)

  typedef enum logic {
    EDGE_LEADING  = 1'b0,
    EDGE_TRAILING = 1'b1
  } edge_e;

  typedef struct packed {
    edge_e               edge_id;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } hit_t;

  localparam int HIT_W = $bits(hit_t);  // 18

endpackage
