// Verify: classification of the event and the EVENT OUT register.
//
// The event (delayed to S2) is compared with its area's filter state after
// forwarding:  correct = (state + FILTER_LENGTH > ts), i.e. the event passes
// when ts - state < FILTER_LENGTH.  The sum is one bit wider so that it
// cannot wrap.  The event word, tuser and tlast are passed unchanged, with
// `correct` added; nothing is dropped, a downstream unit decides what to do
// with events marked 0 (noise).
//
// The paper's prose for this unit reads "if it is greater, the data are
// classified as noise"; its algorithm and worked example pass an event when
// the difference is below the filter length.  This unit follows the
// algorithm, which is also what the paper's figure on discarded events
// implies.
//
// The outputs are registered (S3) and held while `en` (the EVENT OUT tready)
// is low, so the interface keeps AXI4-Stream's rule that a word under
// tvalid stays until taken.
module verify #(
  parameter int unsigned DATA_WIDTH    = 64,
  parameter int unsigned USER_WIDTH    = 1,
  parameter int unsigned TS_WIDTH      = 32,
  parameter int unsigned FILTER_LENGTH = 1000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  // delayed event (S2)
  input  logic                  in_valid,
  input  logic [DATA_WIDTH-1:0] in_data,
  input  logic [USER_WIDTH-1:0] in_user,
  input  logic                  in_last,
  input  logic [TS_WIDTH-1:0]   state,
  // EVENT OUT
  output logic                  m_tvalid,
  output logic [DATA_WIDTH-1:0] m_tdata,
  output logic [USER_WIDTH-1:0] m_tuser,
  output logic                  m_tlast,
  output logic                  m_correct
);

  logic [TS_WIDTH-1:0] ts;
  logic [TS_WIDTH:0]   limit;
  logic                correct;

  always_comb begin
    ts      = in_data[TS_WIDTH-1:0];
    limit   = {1'b0, state} + (TS_WIDTH+1)'(FILTER_LENGTH);
    correct = limit > {1'b0, ts};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_tvalid  <= 1'b0;
      m_tdata   <= '0;
      m_tuser   <= '0;
      m_tlast   <= 1'b0;
      m_correct <= 1'b0;
    end else if (en) begin
      m_tvalid  <= in_valid;
      m_tdata   <= in_data;
      m_tuser   <= in_user;
      m_tlast   <= in_last;
      m_correct <= correct;
    end
  end

endmodule
