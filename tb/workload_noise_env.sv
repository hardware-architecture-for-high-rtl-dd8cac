// Scenario of the noise workload for one filter configuration: a moving
// 64 x 64 pixel object emitting 2000 events/ms (tuser = 1) plus uniform
// noise (tuser = 0) at 200, 2000 and 10000 events/ms, 6 ms of warm-up and
// 4 measured ms per level, tlast on the last event of every millisecond
// (global update every 1 ms), input driven continuously, EVENT OUT always
// ready.  It owns one filter instance with 16 x 16 areas and factor 0.25.
//
// Reported per level: share of noise and of object events marked correct
// and events per clock.  Checked: every correct flag against an in-order
// reference model of the algorithm; at 200 events/ms less than 5 % of the
// noise and more than 80 % of the object events survive; more noise survives
// at 10000 events/ms than at 200; the clock count is exactly one cycle per
// event plus 3 + NX*NY + 3 cycles per update.  Raises `done` at the end.
module workload_noise_env #(
  parameter int    SW   = 1280,
  parameter int    SH   = 720,
  parameter int    FL   = 1000,
  parameter string NAME = "1280x720"
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  import dvs_filter_pkg::*;

  localparam int SC = 16, SHIFT = 2;
  localparam int NX = SW / SC, NY = SH / SC;
  localparam int MS_PER_LEVEL = 4, WARMUP_MS = 6, OBJ_RATE = 2000, OBJ = 64;


  logic        s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] s_tdata = '0;
  logic [0:0]  s_tuser = '0;
  logic        m_tvalid, m_tlast, m_correct;
  logic        m_tready = 1;
  logic [63:0] m_tdata;
  logic [0:0]  m_tuser;

  iir_matrix_filter #(
    .SENSOR_WIDTH(SW), .SENSOR_HEIGHT(SH), .SCALE(SC),
    .UPDATE_SHIFT(SHIFT), .FILTER_LENGTH(FL)
  ) dut (.*);

  // reference model
  longint ref_map  [NY][NX];
  bit     ref_mark [NY][NX];
  bit     exp_q [$];

  function automatic longint iir(input longint s, input longint t);
    return s - (s >> SHIFT) + (t >> SHIFT);
  endfunction

  // statistics of the level being run
  int n_noise, n_noise_pass, n_obj, n_obj_pass;

  always @(posedge clk) begin
    if (rst_n && s_tvalid && s_tready) begin
      event_t e;
      int xc, yc;
      longint thr;
      e = event_t'(s_tdata);
      xc = int'(e.x) / SC; yc = int'(e.y) / SC;
      thr = ref_map[yc][xc];
      exp_q.push_back((longint'(e.ts) - thr) < FL);
      ref_map[yc][xc]  = iir(thr, longint'(e.ts));
      ref_mark[yc][xc] = 1;
      if (s_tlast)
        for (int y = 0; y < NY; y++)
          for (int x = 0; x < NX; x++) begin
            if (!ref_mark[y][x]) ref_map[y][x] = iir(ref_map[y][x], longint'(e.ts));
            ref_mark[y][x] = 0;
          end
    end
    if (rst_n && m_tvalid && m_tready) begin
      bit x;
      x = exp_q.pop_front();
      checks++;
      if (m_correct != x) failures++;
      if (m_tuser[0]) begin n_obj++; if (m_correct) n_obj_pass++; end
      else begin n_noise++; if (m_correct) n_noise_pass++; end
    end
  end

  // one millisecond of events: object events and noise events merged by time
  typedef struct { int x; int y; int ts; bit obj; } ev_t;

  task automatic run_ms(input int ms, input int noise_rate, inout longint cycles, inout longint events);
    ev_t evs [$];
    int t0, ox, oy;
    t0 = ms * 1000;
    for (int i = 0; i < OBJ_RATE; i++) begin
      ev_t e;
      e.ts = t0 + $urandom_range(0, 999);
      // object position moves 40 px per ms along the diagonal
      ox = (ms * 40 + (e.ts - t0) / 25) % (SW - OBJ);
      oy = (ms * 22 + (e.ts - t0) / 45) % (SH - OBJ);
      e.x = ox + $urandom_range(0, OBJ - 1);
      e.y = oy + $urandom_range(0, OBJ - 1);
      e.obj = 1;
      evs.push_back(e);
    end
    for (int i = 0; i < noise_rate; i++) begin
      ev_t e;
      e.ts = t0 + $urandom_range(0, 999);
      e.x = $urandom_range(0, SW - 1);
      e.y = $urandom_range(0, SH - 1);
      e.obj = 0;
      evs.push_back(e);
    end
    evs.sort(e) with (e.ts);
    for (int i = 0; i < evs.size(); i++) begin
      s_tvalid = 1;
      s_tdata  = 64'(make_event(16'(evs[i].x), 15'(evs[i].y), 1'b0, 32'(evs[i].ts)));
      s_tuser  = evs[i].obj;
      s_tlast  = (i == evs.size() - 1);
      do begin @(posedge clk); cycles++; end while (!s_tready);
      #1;
    end
    events += evs.size();
    s_tvalid = 0; s_tlast = 0;
  endtask

  initial begin
    int levels [3] = '{200, 2000, 10000};
    real noise_left [3];
    longint cycles, events;
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++) begin ref_map[y][x] = 0; ref_mark[y][x] = 0; end
    checks = 0; failures = 0; done = 0;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int l = 0; l < 3; l++) begin
      // warm-up milliseconds, so that the filter states have settled
      cycles = 0; events = 0;
      for (int m = 0; m < WARMUP_MS; m++)
        run_ms(l * (MS_PER_LEVEL + WARMUP_MS) + m, levels[l], cycles, events);
      while (!s_tready) @(posedge clk);
      #1;
      repeat (4) @(posedge clk);
      #1;
      n_noise = 0; n_noise_pass = 0; n_obj = 0; n_obj_pass = 0;
      cycles = 0; events = 0;
      for (int m = 1; m <= MS_PER_LEVEL; m++)
        run_ms(l * (MS_PER_LEVEL + WARMUP_MS) + WARMUP_MS - 1 + m, levels[l], cycles, events);
      // the last update: wait until the input reopens, counting its cycles
      while (!s_tready) begin @(posedge clk); cycles++; #1; end
      repeat (4) @(posedge clk);
      #1;
      // cycles counted include the handshake cycle of each event and the
      // closed cycles after each tlast: events + MS * (3 + NX*NY + 3)
      checks++;
      if (cycles != events + MS_PER_LEVEL * (6 + NX * NY)) begin
        failures++;
        $display("FAIL %s cycles %0d for %0d events, expected %0d", NAME, cycles, events,
                 events + MS_PER_LEVEL * (6 + NX * NY));
      end
      noise_left[l] = 100.0 * n_noise_pass / n_noise;
      $display("%s, filter %0d us, noise %0d ev/ms: noise remaining %5.2f %%, object remaining %5.2f %%, %0d events in %0d cycles (%5.3f events/cycle)",
               NAME, FL, levels[l], noise_left[l], 100.0 * n_obj_pass / n_obj, events, cycles,
               real'(events) / real'(cycles));
      if (l == 0) begin
        checks++; if (noise_left[0] >= 5.0) begin failures++; $display("FAIL too much noise left"); end
        checks++; if (100.0 * n_obj_pass / n_obj <= 80.0) begin failures++; $display("FAIL too few object events left"); end
      end
    end
    checks++;
    if (!(noise_left[2] > noise_left[0])) begin failures++; $display("FAIL noise share not rising with noise level"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    done = 1;
  end
endmodule
