// Time Map: the filter-state memory, one word per area.
//
// A simple dual-port RAM with a registered output, as a block RAM is built:
// port A writes, port B reads.  A read takes two clock cycles: the address is
// sampled into the memory latch at the first edge (enabled by `en_b`), and
// the word moves into the output register at the second (enabled by
// `regce_b`).  The top level drives both enables from the EVENT OUT tready so
// that a read in flight is held during a stall; the paper names only the
// output-register enable, holding the latch as well is this design's choice.
// A write (`we_a`) lands at the clock edge.  A read of the same address at the
// same edge returns the old word; the pipeline never relies on that case
// (Recode forwards the new value instead).
// The array is cleared at configuration time, as block RAM contents are, so
// every area starts with filter state 0.  DEPTH = 2**ADDR_WIDTH because the
// address is the concatenation {yCell, xCell}.
module time_map #(
  parameter int unsigned ADDR_WIDTH = 13,
  parameter int unsigned DATA_WIDTH = 32
) (
  input  logic                  clk,
  // port A: write
  input  logic                  we_a,
  input  logic [ADDR_WIDTH-1:0] addr_a,
  input  logic [DATA_WIDTH-1:0] din_a,
  // port B: read
  input  logic                  en_b,
  input  logic                  regce_b,
  input  logic [ADDR_WIDTH-1:0] addr_b,
  output logic [DATA_WIDTH-1:0] dout_b
);

  localparam int unsigned DEPTH = 1 << ADDR_WIDTH;

  logic [DATA_WIDTH-1:0] mem [DEPTH];
  logic [DATA_WIDTH-1:0] latch_b;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we_a) mem[addr_a] <= din_a;
  end

  always_ff @(posedge clk) begin
    if (en_b) latch_b <= mem[addr_b];
  end

  always_ff @(posedge clk) begin
    if (regce_b) dout_b <= latch_b;
  end

endmodule
