// One run of the "events discarded after a quiet spell" experiment.
//
// A 32 x 16 sensor with 16 x 16 areas (two areas, A and B), filter length
// 200 us, update factor 0.25.  Area A receives one event at ts 0 (state 0).
// If USE_GU is set, area B then receives one event per millisecond, at
// ts = 1000, 2000, ..., each closing a packet (tlast), so A is weakened by a
// global update every 1 ms.  At ts = QUIET, area A receives a burst of
// events, all with timestamp QUIET; `removed` counts how many of them are
// marked noise before the first one passes.  `expected` is the same count
// from the filtering rule iterated here in integer arithmetic.
module discard_env #(
  parameter int QUIET  = 8999,
  parameter bit USE_GU = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   removed,
  output int   expected,
  output bit   done
);
  import dvs_filter_pkg::*;

  logic        s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] s_tdata = '0;
  logic [0:0]  s_tuser = '0;
  logic        m_tvalid, m_tlast, m_correct;
  logic        m_tready = 1;
  logic [63:0] m_tdata;
  logic [0:0]  m_tuser;

  iir_matrix_filter #(
    .SENSOR_WIDTH(32), .SENSOR_HEIGHT(16), .SCALE(16),
    .UPDATE_SHIFT(2), .FILTER_LENGTH(200)
  ) dut (.*);

  // outputs of area A during the burst, in order
  bit burst_flags [$];
  bit in_burst = 0;
  always @(posedge clk)
    if (m_tvalid && m_tready && in_burst && m_tdata[47:32] == 16'd0)
      burst_flags.push_back(m_correct);

  task automatic send(input int x, input longint ts, input bit last);
    s_tvalid = 1;
    s_tdata  = 64'(make_event(16'(x), 15'd0, 1'b0, 32'(ts)));
    s_tlast  = last;
    do @(posedge clk); while (!s_tready);
    #1;
    s_tvalid = 0; s_tlast = 0;
  endtask

  initial begin
    longint s;
    removed = 0; expected = 0; done = 0;
    // expected count from the rule
    s = 0;
    if (USE_GU)
      for (int k = 1; k <= QUIET / 1000; k++) s = s - (s >> 2) + ((longint'(k) * 1000) >> 2);
    while (!(longint'(QUIET) - s < 200)) begin
      s = s - (s >> 2) + (longint'(QUIET) >> 2);
      expected++;
    end
    @(posedge rst_n);
    @(posedge clk); #1;
    send(0, 0, 1'b1);   // closes the first packet, so A is idle in every later one
    if (USE_GU)
      for (int k = 1; k <= QUIET / 1000; k++) send(16, longint'(k) * 1000, 1'b1);
    while (!s_tready) @(posedge clk);
    #1;
    repeat (5) @(posedge clk);
    #1;
    in_burst = 1;
    for (int i = 0; i < 60; i++) send(0, QUIET, 1'b0);
    repeat (6) @(posedge clk);
    removed = 0;
    while (burst_flags.size() > 0 && burst_flags[0] == 1'b0) begin
      void'(burst_flags.pop_front());
      removed++;
    end
    done = 1;
  end
endmodule
