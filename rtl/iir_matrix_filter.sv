// IIR-matrix noise filter for event-camera (DVS) data.
//
// Every SCALE x SCALE area of the sensor has one first-order IIR filter whose
// state is a running average of the timestamps of the area's events.  An
// event is marked correct when it arrives less than FILTER_LENGTH after its
// area's state; the state is then moved towards the event's timestamp by the
// factor 2**-UPDATE_SHIFT.  At the end of each packet (tlast) the states of
// areas that received no event are pulled towards the packet's last
// timestamp in the same way (global update), so that an area that was idle
// for a long time does not reject a long run of genuine events.
//
// Pipeline (one event per clock, every register enabled by m_tready):
//   S0  EVENT IN accepted; xCell/yCell give the area, {yCell,xCell} is the
//       Time Map read address; Recode compares it with the three events
//       ahead; Global Update marks the area.
//   S1  Time Map read in progress.
//   S2  Time Map word out; Recode substitutes a state still in flight;
//       Verify compares; New Ts computes the new state.
//   S3  EVENT OUT valid with `m_correct`; the new state is written back at
//       the address delayed by three cycles.
// Latency from an accepted input to the output word is 3 cycles.  Input
// tready is m_tready, except during a global update, which closes the input
// for 3 + NX*NY + 3 cycles after each tlast.  Every event is passed to
// EVENT OUT; `m_correct` = 0 marks noise.
//
// The block structure, the parameters and the handshake follow the paper.
// The event word layout (see dvs_filter_pkg), the 32-bit state width, reset
// (synchronous, active low; no Time Map write while it is asserted) and the
// exact cycle counts are this design's own choices, documented in the units.
// Recode's hit flags are left unconnected here; testbenches read them
// hierarchically to count forwarding events.  UPDATE_FACTOR is given as its base-2 logarithm, UPDATE_SHIFT
// (0.25 -> 2).  FILTER_LENGTH is in timestamp counts (microseconds).
module iir_matrix_filter #(
  parameter int unsigned DATA_WIDTH    = 64,
  parameter int unsigned USER_WIDTH    = 1,
  parameter int unsigned SCALE         = 16,
  parameter int unsigned SENSOR_HEIGHT = 720,
  parameter int unsigned SENSOR_WIDTH  = 1280,
  parameter int unsigned UPDATE_SHIFT  = 2,
  parameter int unsigned FILTER_LENGTH = 1000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // EVENT IN (AXI4-Stream)
  input  logic                  s_tvalid,
  output logic                  s_tready,
  input  logic [DATA_WIDTH-1:0] s_tdata,
  input  logic [USER_WIDTH-1:0] s_tuser,
  input  logic                  s_tlast,
  // EVENT OUT (AXI4-Stream plus the filter decision)
  output logic                  m_tvalid,
  input  logic                  m_tready,
  output logic [DATA_WIDTH-1:0] m_tdata,
  output logic [USER_WIDTH-1:0] m_tuser,
  output logic                  m_tlast,
  output logic                  m_correct
);

  import dvs_filter_pkg::*;

  localparam int unsigned NX  = (SENSOR_WIDTH  + SCALE - 1) / SCALE;
  localparam int unsigned NY  = (SENSOR_HEIGHT + SCALE - 1) / SCALE;
  localparam int unsigned XCW = (NX > 1) ? $clog2(NX) : 1;
  localparam int unsigned YCW = (NY > 1) ? $clog2(NY) : 1;
  localparam int unsigned AW  = XCW + YCW;

  // ---------------------------------------------------------------- S0
  logic            en;
  logic            accept0;
  event_t          ev0;
  logic [XCW-1:0]  xcell0;
  logic [YCW-1:0]  ycell0;
  logic [AW-1:0]   addr0;

  logic            gu_block, gu_active, gu_we;
  logic [AW-1:0]   gu_addr;
  ts_t             gu_ts;

  assign en       = m_tready;
  assign s_tready = m_tready && !gu_block;
  assign accept0  = s_tvalid && s_tready;
  assign ev0      = event_t'(s_tdata[EVENT_WIDTH-1:0]);

  cell_coord #(.SCALE(SCALE), .IN_WIDTH(X_WIDTH), .OUT_WIDTH(XCW)) u_xcell (
    .coord(ev0.x), .area(xcell0)
  );
  cell_coord #(.SCALE(SCALE), .IN_WIDTH(Y_WIDTH), .OUT_WIDTH(YCW)) u_ycell (
    .coord(ev0.y), .area(ycell0)
  );
  assign addr0 = {ycell0, xcell0};

  global_update #(
    .SCALE(SCALE), .SENSOR_WIDTH(SENSOR_WIDTH), .SENSOR_HEIGHT(SENSOR_HEIGHT)
  ) u_global_update (
    .clk, .rst_n, .en,
    .s_tvalid, .s_tready, .s_tlast, .s_event(ev0),
    .block(gu_block), .active(gu_active), .addr(gu_addr),
    .write_en(gu_we), .last_ts(gu_ts)
  );

  logic [AW-1:0] rd_addr;
  logic          rd_en_unused;

  select_addr #(.ADDR_WIDTH(AW)) u_select_rd_addr (
    .gu_active(gu_active),
    .ev_addr(addr0), .ev_en(accept0),
    .gu_addr(gu_addr), .gu_en(gu_active),
    .addr(rd_addr), .en(rd_en_unused)
  );

  // ------------------------------------------------------ delays S0 -> S2/S3
  localparam int unsigned EVW = 1 + 1 + USER_WIDTH + DATA_WIDTH;
  logic                  valid2, last2;
  logic [USER_WIDTH-1:0] user2;
  logic [DATA_WIDTH-1:0] data2;

  delay_line #(.WIDTH(EVW), .DEPTH(2)) u_delay_event (
    .clk, .rst_n, .en,
    .din ({accept0, s_tlast, s_tuser, s_tdata}),
    .dout({valid2, last2, user2, data2})
  );

  logic          valid3;
  logic [AW-1:0] addr3;

  delay_line #(.WIDTH(1 + AW), .DEPTH(3)) u_delay_wr_addr (
    .clk, .rst_n, .en,
    .din ({accept0, addr0}),
    .dout({valid3, addr3})
  );

  logic          gu_active2;
  logic          gu_active3, gu_we3;
  logic [AW-1:0] gu_addr3;

  delay_line #(.WIDTH(1), .DEPTH(2)) u_delay_gu_flag (
    .clk, .rst_n, .en,
    .din (gu_active),
    .dout(gu_active2)
  );

  delay_line #(.WIDTH(2 + AW), .DEPTH(3)) u_delay_gu (
    .clk, .rst_n, .en,
    .din ({gu_active, gu_we, gu_addr}),
    .dout({gu_active3, gu_we3, gu_addr3})
  );

  // ---------------------------------------------------------- Time Map
  logic [AW-1:0] wr_addr;
  logic          wr_en;
  ts_t           map_state2;
  ts_t           new_state3;

  select_addr #(.ADDR_WIDTH(AW)) u_select_wr_addr (
    .gu_active(gu_active3),
    .ev_addr(addr3), .ev_en(valid3),
    .gu_addr(gu_addr3), .gu_en(gu_we3),
    .addr(wr_addr), .en(wr_en)
  );

  time_map #(.ADDR_WIDTH(AW), .DATA_WIDTH(TS_WIDTH)) u_time_map (
    .clk,
    .we_a(wr_en && en && rst_n), .addr_a(wr_addr), .din_a(new_state3),
    .en_b(en), .regce_b(en), .addr_b(rd_addr), .dout_b(map_state2)
  );

  // ---------------------------------------------------------------- S2
  ts_t        state2;
  logic [2:0] fwd_hit;

  recode #(.ADDR_WIDTH(AW), .TS_WIDTH(TS_WIDTH)) u_recode (
    .clk, .rst_n, .en,
    .valid0(accept0), .addr0(addr0),
    .map_state(map_state2), .new_state(new_state3),
    .state(state2), .hit(fwd_hit)
  );

  ts_t sel_state2, sel_ts2;

  select_data #(.TS_WIDTH(TS_WIDTH)) u_select_data (
    .gu_active(gu_active2),
    .recode_state(state2), .map_state(map_state2),
    .ev_ts(data2[TS_WIDTH-1:0]), .gu_ts(gu_ts),
    .state(sel_state2), .ts(sel_ts2)
  );

  new_ts #(.TS_WIDTH(TS_WIDTH), .UPDATE_SHIFT(UPDATE_SHIFT)) u_new_ts (
    .clk, .rst_n, .en,
    .state(sel_state2), .ts(sel_ts2), .new_state(new_state3)
  );

  verify #(
    .DATA_WIDTH(DATA_WIDTH), .USER_WIDTH(USER_WIDTH),
    .TS_WIDTH(TS_WIDTH), .FILTER_LENGTH(FILTER_LENGTH)
  ) u_verify (
    .clk, .rst_n, .en,
    .in_valid(valid2), .in_data(data2), .in_user(user2), .in_last(last2),
    .state(state2),
    .m_tvalid, .m_tdata, .m_tuser, .m_tlast, .m_correct
  );

  // ------------------------------------------------------------ checks
  initial begin
    assert (DATA_WIDTH >= EVENT_WIDTH)
      else $error("iir_matrix_filter: DATA_WIDTH must hold the 64-bit event");
    assert (UPDATE_SHIFT >= 1 && UPDATE_SHIFT < TS_WIDTH)
      else $error("iir_matrix_filter: UPDATE_SHIFT out of range");
  end

  // AXI4-Stream: a word offered on EVENT OUT stays until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_correct)
                                 && $stable(m_tlast) && $stable(m_tuser)));
  // No event may be accepted while a global update holds the input closed.
  a_no_accept_in_update: assert property (@(posedge clk) disable iff (!rst_n)
    gu_block |-> !s_tready);
  // The event path and the update never share a Time Map write.
  a_no_write_mix: assert property (@(posedge clk) disable iff (!rst_n)
    !(valid3 && gu_active3));

endmodule
