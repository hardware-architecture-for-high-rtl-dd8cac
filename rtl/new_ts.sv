// New Ts: the IIR update of one area's filter state.
//
//   new = state * (1 - UPDATE_FACTOR) + ts * UPDATE_FACTOR
//
// with UPDATE_FACTOR = 2**-UPDATE_SHIFT, so both products are shifts:
//   new = state - (state >> UPDATE_SHIFT) + (ts >> UPDATE_SHIFT).
// Both shifts truncate.  With the reference factor 0.25 (shift 2) this gives
// 200*0.75 + 292*0.25 = 223 and 80*0.75 + 316*0.25 = 139, as in the worked
// examples of the algorithm.  The result is registered (one cycle) and the
// register moves only when `en` is high; the registered value is both the
// Time Map write data and Recode's forwarding source.
module new_ts #(
  parameter int unsigned TS_WIDTH     = 32,
  parameter int unsigned UPDATE_SHIFT = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [TS_WIDTH-1:0] state,
  input  logic [TS_WIDTH-1:0] ts,
  output logic [TS_WIDTH-1:0] new_state
);

  logic [TS_WIDTH-1:0] next_state;

  always_comb begin
    next_state = state - (state >> UPDATE_SHIFT) + (ts >> UPDATE_SHIFT);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  new_state <= '0;
    else if (en) new_state <= next_state;
  end

endmodule
