// Select Data: chooses the operands of New Ts.
//
// For an event, New Ts needs the filter state after forwarding (from Recode)
// and the event's own timestamp.  During a global update it needs the state
// as stored in the Time Map (no forwarding is needed, every area is visited
// once) and the timestamp of the last event of the packet, held by Global
// Update.  `gu_active` is the update flag delayed to the cycle in which the
// Time Map data arrive.  The paper names the two data inputs and the flag;
// carrying the timestamp through the same selector is this design's choice.
// Purely combinational.
module select_data #(
  parameter int unsigned TS_WIDTH = 32
) (
  input  logic                gu_active,
  input  logic [TS_WIDTH-1:0] recode_state,
  input  logic [TS_WIDTH-1:0] map_state,
  input  logic [TS_WIDTH-1:0] ev_ts,
  input  logic [TS_WIDTH-1:0] gu_ts,
  output logic [TS_WIDTH-1:0] state,
  output logic [TS_WIDTH-1:0] ts
);

  always_comb begin
    if (gu_active) begin
      state = map_state;
      ts    = gu_ts;
    end else begin
      state = recode_state;
      ts    = ev_ts;
    end
  end

endmodule
