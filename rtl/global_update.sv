// Global Update: periodic weakening of the filter in areas that stayed idle.
//
// While events flow, the unit watches EVENT IN: for every accepted event it
// keeps the event's timestamp (the last one is the reference time of the
// update) and sets the area's bit in the update matrix, one flip-flop per
// area.  The update is triggered by the end of a packet, an accepted event
// with tlast high, so the packet length chosen upstream sets the update
// period.  Then:
//   DRAIN  `block` goes high, which drops EVENT IN tready; the unit waits
//          DRAIN_CYCLES enabled cycles until the events in flight are written.
//   SCAN   `active` is high and one area address {yCell, xCell} is issued per
//          enabled cycle, row by row, NX*NY in all.  Along with it goes
//          `write_en`, the negated update-matrix bit: marked areas are left
//          alone, the others get state*(1-f) + last_ts*f.  The matrix is
//          cleared when the scan ends.
//   FLUSH  `active` is low again; the unit waits FLUSH_CYCLES enabled cycles
//          until the last rewritten state is in the Time Map, then releases
//          `block`.
// EVENT IN is therefore closed for DRAIN_CYCLES + NX*NY + FLUSH_CYCLES clock
// cycles per packet (3 + NX*NY + 3 with the defaults).  All of this follows
// the paper; the exact cycle of each transition and the clearing of the
// matrix at the end of the scan are this design's choices.  Every step waits
// for `en` (EVENT OUT tready), as the whole pipeline does.
// The area coordinates are computed here from the event word with
// cell_coord, as the unit takes the event stream itself.  The polarity bit
// of the event word plays no part in the update and is left unused.
module global_update #(
  parameter int unsigned SCALE         = 16,
  parameter int unsigned SENSOR_WIDTH  = 1280,
  parameter int unsigned SENSOR_HEIGHT = 720,
  parameter int unsigned DRAIN_CYCLES  = 3,
  parameter int unsigned FLUSH_CYCLES  = 3,
  localparam int unsigned NX  = (SENSOR_WIDTH  + SCALE - 1) / SCALE,
  localparam int unsigned NY  = (SENSOR_HEIGHT + SCALE - 1) / SCALE,
  localparam int unsigned XCW = (NX > 1) ? $clog2(NX) : 1,
  localparam int unsigned YCW = (NY > 1) ? $clog2(NY) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  // EVENT IN, observed
  input  logic                 s_tvalid,
  input  logic                 s_tready,
  input  logic                 s_tlast,
  input  dvs_filter_pkg::event_t s_event,
  // control
  output logic                 block,
  output logic                 active,
  output logic [YCW+XCW-1:0]   addr,
  output logic                 write_en,
  output dvs_filter_pkg::ts_t  last_ts
);

  import dvs_filter_pkg::*;

  typedef enum logic [1:0] {GU_IDLE, GU_DRAIN, GU_SCAN, GU_FLUSH} gu_state_t;

  gu_state_t       state;
  logic [2:0]      wait_cnt;
  logic [XCW-1:0]  scan_x;
  logic [YCW-1:0]  scan_y;
  logic            mark [NY][NX];
  logic [XCW-1:0]  ev_xc;
  logic [YCW-1:0]  ev_yc;
  logic            accept;

  cell_coord #(.SCALE(SCALE), .IN_WIDTH(X_WIDTH), .OUT_WIDTH(XCW)) u_xcell (
    .coord(s_event.x), .area(ev_xc)
  );
  cell_coord #(.SCALE(SCALE), .IN_WIDTH(Y_WIDTH), .OUT_WIDTH(YCW)) u_ycell (
    .coord(s_event.y), .area(ev_yc)
  );

  assign accept   = s_tvalid && s_tready;
  assign block    = (state != GU_IDLE);
  assign active   = (state == GU_SCAN);
  assign addr     = {scan_y, scan_x};
  assign write_en = active && !mark[scan_y][scan_x];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= GU_IDLE;
      wait_cnt <= '0;
      scan_x   <= '0;
      scan_y   <= '0;
      last_ts  <= '0;
      for (int yy = 0; yy < NY; yy++)
        for (int xx = 0; xx < NX; xx++) mark[yy][xx] <= 1'b0;
    end else begin
      unique case (state)
        GU_IDLE: begin
          if (accept) begin
            last_ts <= s_event.ts;
            if (32'(ev_yc) < NY && 32'(ev_xc) < NX) mark[ev_yc][ev_xc] <= 1'b1;
            if (s_tlast) begin
              state    <= GU_DRAIN;
              wait_cnt <= '0;
            end
          end
        end
        GU_DRAIN: begin
          if (en) begin
            if (32'(wait_cnt) == DRAIN_CYCLES - 1) begin
              state    <= GU_SCAN;
              wait_cnt <= '0;
              scan_x   <= '0;
              scan_y   <= '0;
            end else begin
              wait_cnt <= wait_cnt + 3'd1;
            end
          end
        end
        GU_SCAN: begin
          if (en) begin
            if (32'(scan_x) == NX - 1) begin
              scan_x <= '0;
              if (32'(scan_y) == NY - 1) begin
                scan_y <= '0;
                state  <= GU_FLUSH;
                for (int yy = 0; yy < NY; yy++)
                  for (int xx = 0; xx < NX; xx++) mark[yy][xx] <= 1'b0;
              end else begin
                scan_y <= scan_y + 1'b1;
              end
            end else begin
              scan_x <= scan_x + 1'b1;
            end
          end
        end
        GU_FLUSH: begin
          if (en) begin
            if (32'(wait_cnt) == FLUSH_CYCLES - 1) begin
              state    <= GU_IDLE;
              wait_cnt <= '0;
            end else begin
              wait_cnt <= wait_cnt + 3'd1;
            end
          end
        end
        default: state <= GU_IDLE;
      endcase
    end
  end

  initial begin
    assert (DRAIN_CYCLES >= 1 && DRAIN_CYCLES <= 8) else $error("global_update: DRAIN_CYCLES out of range");
    assert (FLUSH_CYCLES >= 1 && FLUSH_CYCLES <= 8) else $error("global_update: FLUSH_CYCLES out of range");
  end

endmodule
