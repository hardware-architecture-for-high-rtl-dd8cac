// Shared types and constants of the IIR-matrix event filter.
//
// An event travels as one 64-bit AXI4-Stream word.  The layout of that word is
// this design's own choice (only the 8-byte size is suggested as typical):
//   [31:0]  timestamp, one count per microsecond
//   [47:32] x coordinate (column)
//   [62:48] y coordinate (row)
//   [63]    polarity (carried through, not used by the filter)
// The filter state of an area is a timestamp of the same 32-bit width, as in
// the memory estimates the design is dimensioned with (32 bits per stored
// timestamp).  EVENT_WIDTH is read only by the top level's elaboration-time
// check on DATA_WIDTH, which lint tools may report as an unused constant.
package dvs_filter_pkg;

  localparam int unsigned TS_WIDTH    = 32;
  localparam int unsigned X_WIDTH     = 16;
  localparam int unsigned Y_WIDTH     = 15;
  localparam int unsigned EVENT_WIDTH = 64;

  typedef logic [TS_WIDTH-1:0] ts_t;

  typedef struct packed {
    logic               pol;
    logic [Y_WIDTH-1:0] y;
    logic [X_WIDTH-1:0] x;
    ts_t                ts;
  } event_t;

  // Pack / unpack helpers so that testbenches and RTL agree on the layout.
  function automatic event_t make_event(input logic [X_WIDTH-1:0] x,
                                        input logic [Y_WIDTH-1:0] y,
                                        input logic               pol,
                                        input ts_t                ts);
    event_t e;
    e.pol = pol;
    e.y   = y;
    e.x   = x;
    e.ts  = ts;
    return e;
  endfunction

endpackage
