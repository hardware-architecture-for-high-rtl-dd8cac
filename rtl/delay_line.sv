// Delay: a shift register of DEPTH stages, WIDTH bits wide.
//
// Used on the event path (event word to Verify), on the write address of the
// Time Map (so that the new filter state lands in the cell it was read from)
// and on the Global Update address, flags and write enable.  Every stage moves
// only when `en` is high; the whole pipeline uses the EVENT OUT tready as this
// enable, so a stall at the output freezes all stages together.  The stages
// are cleared by the active-low synchronous reset.  DEPTH = 0 is a wire.
// The paper draws the Delay blocks; their depth follows from the two-cycle
// BRAM read and the registered New Ts result.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else if (en) begin
        stage[0] <= din;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end

    assign dout = stage[DEPTH-1];
  end

endmodule
