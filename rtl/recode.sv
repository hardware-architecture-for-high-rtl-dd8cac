// Recode: forwarding of filter states that are not yet in the Time Map.
//
// An event reads its area's state in cycle S0 and gets it from the Time Map
// in S2; its new state is registered by New Ts in S3 and written in that
// cycle.  An event that follows within three cycles in the same area would
// therefore read a stale word: one and two cycles behind because of the read
// latency, three cycles behind because its read coincides with the write
// (a read/write collision).
//
// In S0 the incoming area address is compared with the addresses of the three
// previous accepted events; the three hit flags are carried along with the
// event for two cycles.  In S2 the output is the Time Map word, unless a flag
// is set: then it is the New Ts result of the most recent matching event
// (distance 1: the New Ts register itself, distance 2 and 3: one and two
// cycles of delay kept here).  This follows the paper's description; the
// priority to the most recent hit is implied by it.
// Every register moves only when `en` is high.  `hit` reports the flags used
// in S2, for observation.
module recode #(
  parameter int unsigned ADDR_WIDTH = 13,
  parameter int unsigned TS_WIDTH   = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  // S0: accepted event and its area
  input  logic                  valid0,
  input  logic [ADDR_WIDTH-1:0] addr0,
  // S2: word read from the Time Map
  input  logic [TS_WIDTH-1:0]   map_state,
  // New Ts register (state of the event now in S3)
  input  logic [TS_WIDTH-1:0]   new_state,
  // S2: state to use
  output logic [TS_WIDTH-1:0]   state,
  output logic [2:0]            hit
);

  logic [ADDR_WIDTH-1:0] addr_hist  [3];   // addresses of events in S1, S2, S3
  logic [2:0]            valid_hist;
  logic [2:0]            flags0, flags1, flags2;
  logic [TS_WIDTH-1:0]   state_d1, state_d2;  // New Ts results of S4, S5

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      flags0[i] = valid0 && valid_hist[i] && (addr_hist[i] == addr0);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_hist <= '0;
      flags1     <= '0;
      flags2     <= '0;
      for (int i = 0; i < 3; i++) addr_hist[i] <= '0;
      state_d1   <= '0;
      state_d2   <= '0;
    end else if (en) begin
      addr_hist[0] <= addr0;
      addr_hist[1] <= addr_hist[0];
      addr_hist[2] <= addr_hist[1];
      valid_hist   <= {valid_hist[1:0], valid0};
      flags1       <= flags0;
      flags2       <= flags1;
      state_d1     <= new_state;
      state_d2     <= state_d1;
    end
  end

  always_comb begin
    if (flags2[0])      state = new_state;
    else if (flags2[1]) state = state_d1;
    else if (flags2[2]) state = state_d2;
    else                state = map_state;
  end

  assign hit = flags2;

endmodule
