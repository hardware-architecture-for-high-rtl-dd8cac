// Area coordinate of an event (the xCell and yCell units).
//
// The sensor array is cut into square areas of SCALE x SCALE pixels and one
// filter state is kept per area.  This unit maps a pixel coordinate to the
// index of its area, floor(coord / SCALE).  One instance serves the column
// (xCell) and one the row (yCell); the two results are concatenated into the
// Time Map address by the top level.
//
// When SCALE is a power of two, as in the reference configuration, the
// division is a right shift by log2(SCALE), which is how the original
// architecture does it.  For any other SCALE the unit falls back to a
// constant divider; the paper names this as the way to support arbitrary
// area sizes, the divider itself is this design's own choice.
//
// Purely combinational: the result is valid in the same cycle as the input.
// Only the low OUT_WIDTH bits of the quotient are kept; the upper bits are
// zero for every coordinate inside the sensor, so they are left unused.
module cell_coord #(
  parameter int unsigned SCALE     = 16,
  parameter int unsigned IN_WIDTH  = 16,
  parameter int unsigned OUT_WIDTH = 7
) (
  input  logic [IN_WIDTH-1:0]  coord,
  output logic [OUT_WIDTH-1:0] area
);

  localparam int unsigned SHIFT   = $clog2(SCALE);
  localparam bit          IS_POW2 = ((1 << SHIFT) == SCALE);

  logic [IN_WIDTH-1:0] quotient;

  if (IS_POW2) begin : g_shift
    assign quotient = coord >> SHIFT;
  end else begin : g_div
    assign quotient = coord / IN_WIDTH'(SCALE);
  end

  assign area = OUT_WIDTH'(quotient);

  initial begin
    assert (SCALE >= 1) else $error("cell_coord: SCALE must be at least 1");
  end

endmodule
