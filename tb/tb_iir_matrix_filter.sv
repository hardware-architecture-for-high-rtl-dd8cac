// End-to-end testbench of iir_matrix_filter.
//
// Part 1 replays the worked example of the algorithm on an 80 x 64 sensor with
// 16 x 16 areas, filter length 100 and factor 0.25: areas preset to 200,
// 160, 80 and 104; events (19,6) at 292 and (33,57) at 296 must come out
// correct and noise, their areas must hold 223 and 194; a third event at 316
// closes the packet and the global update must turn 80 into 139, 104 into 157
// and every other idle area (state 0) into 79.
//
// Part 2 runs a random stream on a 128 x 64 sensor (8 x 4 areas, filter
// length 200) against an in-order reference model of the algorithm kept
// here: per-area state, marks and the global update at every tlast.  The
// stream mixes hot areas with scattered events, gaps in tvalid, random
// EVENT OUT stalls and packets of random length.  Checked: every output word
// and its correct flag, the 3-cycle latency (counted in enabled cycles), one
// accepted event per cycle while the input is open, the input closed for
// exactly 3 + 32 + 3 enabled cycles per packet, and the whole state memory
// at the end.  Each mechanism must occur: output stall, forwarding at
// distance 1, 2 and 3, global update with both rewritten and skipped areas,
// both classification results, back-to-back acceptance.
module tb_iir_matrix_filter;
  import dvs_filter_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ================================================================ part 1
  logic        a_s_tvalid = 0, a_s_tready, a_s_tlast = 0;
  logic [63:0] a_s_tdata = '0;
  logic [0:0]  a_s_tuser = '0;
  logic        a_m_tvalid, a_m_tlast, a_m_correct;
  logic [63:0] a_m_tdata;
  logic [0:0]  a_m_tuser;

  iir_matrix_filter #(
    .SENSOR_WIDTH(80), .SENSOR_HEIGHT(64), .SCALE(16),
    .UPDATE_SHIFT(2), .FILTER_LENGTH(100)
  ) dut_a (
    .clk, .rst_n,
    .s_tvalid(a_s_tvalid), .s_tready(a_s_tready), .s_tdata(a_s_tdata),
    .s_tuser(a_s_tuser), .s_tlast(a_s_tlast),
    .m_tvalid(a_m_tvalid), .m_tready(1'b1), .m_tdata(a_m_tdata),
    .m_tuser(a_m_tuser), .m_tlast(a_m_tlast), .m_correct(a_m_correct)
  );

  logic a_correct [$];
  always @(posedge clk) if (a_m_tvalid) a_correct.push_back(a_m_correct);

  // address = {yCell[1:0], xCell[2:0]}
  function automatic int a_addr(input int xc, input int yc);
    return yc * 8 + xc;
  endfunction

  task automatic part1();
    int v;
    dut_a.u_time_map.mem[a_addr(1, 0)] = 200;
    dut_a.u_time_map.mem[a_addr(2, 3)] = 160;
    dut_a.u_time_map.mem[a_addr(3, 0)] = 80;
    dut_a.u_time_map.mem[a_addr(4, 3)] = 104;
    @(negedge clk);
    a_s_tvalid = 1; a_s_tdata = 64'(make_event(16'd19, 15'd6, 1'b1, 32'd292));
    @(negedge clk);
    a_s_tdata = 64'(make_event(16'd33, 15'd57, 1'b0, 32'd296));
    @(negedge clk);
    a_s_tdata = 64'(make_event(16'd0, 15'd20, 1'b1, 32'd316)); a_s_tlast = 1;
    @(negedge clk);
    a_s_tvalid = 0; a_s_tlast = 0;
    while (!a_s_tready) @(negedge clk);
    repeat (4) @(negedge clk);
    check(a_correct.size() == 3, "part1: three output words");
    if (a_correct.size() == 3) begin
      check(a_correct[0] == 1'b1, "part1: event 1 correct");
      check(a_correct[1] == 1'b0, "part1: event 2 noise");
      check(a_correct[2] == 1'b0, "part1: event 3 noise");
    end
    check(dut_a.u_time_map.mem[a_addr(1, 0)] == 223, "part1: area (1,0) = 223");
    check(dut_a.u_time_map.mem[a_addr(2, 3)] == 194, "part1: area (2,3) = 194");
    check(dut_a.u_time_map.mem[a_addr(3, 0)] == 139, "part1: area (3,0) = 139");
    check(dut_a.u_time_map.mem[a_addr(4, 3)] == 157, "part1: area (4,3) = 157");
    check(dut_a.u_time_map.mem[a_addr(0, 1)] == 79,  "part1: area (0,1) = 79");
    for (int yc = 0; yc < 4; yc++)
      for (int xc = 0; xc < 5; xc++) begin
        v = int'(dut_a.u_time_map.mem[a_addr(xc, yc)]);
        if (!((xc == 1 && yc == 0) || (xc == 2 && yc == 3) || (xc == 3 && yc == 0) ||
              (xc == 4 && yc == 3) || (xc == 0 && yc == 1)))
          check(v == 79, $sformatf("part1: idle area (%0d,%0d) = %0d, expected 79", xc, yc, v));
      end
  endtask

  // ================================================================ part 2
  localparam int SW = 128, SH = 64, SC = 16, FL = 200, SHIFT = 2;
  localparam int NX = SW / SC, NY = SH / SC;
  localparam int XCW = $clog2(NX), YCW = $clog2(NY);
  localparam int NEVENTS = 6000;

  logic        s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] s_tdata = '0;
  logic [0:0]  s_tuser = '0;
  logic        m_tvalid, m_tready = 1, m_tlast, m_correct;
  logic [63:0] m_tdata;
  logic [0:0]  m_tuser;

  iir_matrix_filter #(
    .SENSOR_WIDTH(SW), .SENSOR_HEIGHT(SH), .SCALE(SC),
    .UPDATE_SHIFT(SHIFT), .FILTER_LENGTH(FL)
  ) dut (.*);

  // reference model
  longint ref_map  [NY][NX];
  bit     ref_mark [NY][NX];
  typedef struct { logic [63:0] data; logic user; logic last; logic correct; longint ecnt; } exp_t;
  exp_t   exp_q [$];

  // mechanism counters
  int n_stall = 0, n_fwd [3] = '{0, 0, 0}, n_updates = 0, n_upd_write = 0, n_upd_skip = 0;
  int n_pass = 0, n_noise = 0, n_b2b = 0, n_blocked_valid = 0, n_out = 0;
  longint ecnt = 0;            // enabled (m_tready) cycles
  bit     prev_accept = 0;
  int     blocked_run = 0;

  function automatic longint iir(input longint s, input longint t);
    return s - (s >> SHIFT) + (t >> SHIFT);
  endfunction

  task automatic model_event(input logic [63:0] d, input logic u, input logic l);
    event_t e;
    int xc, yc;
    longint thr;
    exp_t x;
    e  = event_t'(d);
    xc = int'(e.x) / SC; yc = int'(e.y) / SC;
    thr = ref_map[yc][xc];
    x.data = d; x.user = u; x.last = l;
    x.correct = (longint'(e.ts) - thr) < FL;
    x.ecnt = ecnt + 3;
    exp_q.push_back(x);
    ref_map[yc][xc]  = iir(thr, longint'(e.ts));
    ref_mark[yc][xc] = 1;
    if (l) begin
      for (int y = 0; y < NY; y++)
        for (int xx = 0; xx < NX; xx++) begin
          if (!ref_mark[y][xx]) ref_map[y][xx] = iir(ref_map[y][xx], longint'(e.ts));
          ref_mark[y][xx] = 0;
        end
    end
  endtask

  // monitor at every clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      if (s_tvalid && s_tready) begin
        model_event(s_tdata, s_tuser[0], s_tlast);
        if (prev_accept) n_b2b++;
      end
      prev_accept <= s_tvalid && s_tready;
      if (m_tvalid && !m_tready) n_stall++;
      if (s_tvalid && !s_tready && m_tready) n_blocked_valid++;
      if (m_tready && dut.valid2) for (int i = 0; i < 3; i++) if (dut.u_recode.hit[i]) n_fwd[i]++;
      if (m_tready && dut.gu_active) begin
        if (dut.gu_we) n_upd_write++; else n_upd_skip++;
      end
      // input must be open exactly when no update runs and the output is ready
      checks++;
      if (s_tready != (m_tready && !dut.gu_block)) failures++;
      // length of each closed period, in enabled cycles
      if (dut.gu_block) begin
        if (m_tready) blocked_run++;
      end else if (blocked_run != 0) begin
        n_updates++;
        check(blocked_run == 3 + NX * NY + 3,
              $sformatf("input closed %0d cycles, expected %0d", blocked_run, 6 + NX * NY));
        blocked_run = 0;
      end
      if (m_tvalid && m_tready) begin
        exp_t x;
        n_out++;
        if (exp_q.size() == 0) check(0, "output word without input");
        else begin
          x = exp_q.pop_front();
          check(m_tdata == x.data && m_tuser[0] == x.user && m_tlast == x.last,
                $sformatf("output word %0d data", n_out));
          check(m_correct == x.correct,
                $sformatf("output word %0d correct=%0d expected %0d", n_out, m_correct, x.correct));
          check(ecnt == x.ecnt, $sformatf("output word %0d latency %0d", n_out, ecnt - x.ecnt + 3));
          if (x.correct) n_pass++; else n_noise++;
        end
      end
      if (m_tready) ecnt++;
    end
  end

  // stall generator: bursts of m_tready low
  initial begin
    forever begin
      @(negedge clk);
      if ($urandom_range(0, 19) == 0) begin
        m_tready = 0;
        repeat ($urandom_range(1, 4)) @(negedge clk);
        m_tready = 1;
      end
    end
  end

  task automatic part2();
    int hot_x [6], hot_y [6];
    int sent = 0, pkt_left;
    longint t = 1000;
    for (int i = 0; i < 6; i++) begin
      hot_x[i] = $urandom_range(0, NX - 1);
      hot_y[i] = $urandom_range(0, NY - 1);
    end
    pkt_left = $urandom_range(20, 400);
    while (sent < NEVENTS) begin
      int x, y, h, mode;
      // pick the next event
      mode = $urandom_range(0, 9);
      if (mode < 7) begin
        h = $urandom_range(0, 5);
        x = hot_x[h] * SC + $urandom_range(0, SC - 1);
        y = hot_y[h] * SC + $urandom_range(0, SC - 1);
      end else begin
        x = $urandom_range(0, SW - 1);
        y = $urandom_range(0, SH - 1);
      end
      if ($urandom_range(0, 399) == 0) t += $urandom_range(300, 3000);   // quiet spell
      else t += $urandom_range(0, 6);
      s_tvalid = 1;
      s_tdata  = 64'(make_event(16'(x), 15'(y), 1'($urandom), 32'(t)));
      s_tuser  = 1'($urandom);
      s_tlast  = (pkt_left == 1);
      // wait for the handshake
      do @(posedge clk); while (!(s_tvalid && s_tready));
      #1;
      sent++;
      pkt_left--;
      if (pkt_left == 0) pkt_left = $urandom_range(20, 400);
      if ($urandom_range(0, 7) == 0) begin
        s_tvalid = 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
      end
      if ($urandom_range(0, 299) == 0) begin
        // move the hot spots now and then
        for (int i = 0; i < 6; i++) begin
          hot_x[i] = $urandom_range(0, NX - 1);
          hot_y[i] = $urandom_range(0, NY - 1);
        end
      end
    end
    // close with a final packet end so the last marks are consumed
    s_tvalid = 1;
    s_tdata  = 64'(make_event(16'd0, 15'd0, 1'b0, 32'(t + 10)));
    s_tlast  = 1;
    do @(posedge clk); while (!(s_tvalid && s_tready));
    #1;
    s_tvalid = 0; s_tlast = 0;
    do @(posedge clk); while (dut.gu_block);
    repeat (10) @(posedge clk);
  endtask

  initial begin
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++) begin ref_map[y][x] = 0; ref_mark[y][x] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    part1();
    part2();
    check(exp_q.size() == 0, $sformatf("%0d words never came out", exp_q.size()));
    check(n_out == NEVENTS + 1, $sformatf("%0d words out", n_out));
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        check(longint'(dut.u_time_map.mem[{YCW'(y), XCW'(x)}]) == ref_map[y][x],
              $sformatf("final state of area (%0d,%0d): %0d expected %0d",
                        x, y, dut.u_time_map.mem[{YCW'(y), XCW'(x)}], ref_map[y][x]));
    $display("mechanisms: stalls=%0d fwd_d1=%0d fwd_d2=%0d fwd_d3=%0d updates=%0d upd_writes=%0d upd_skips=%0d",
             n_stall, n_fwd[0], n_fwd[1], n_fwd[2], n_updates, n_upd_write, n_upd_skip);
    $display("            passed=%0d noise=%0d back_to_back=%0d blocked_while_valid=%0d",
             n_pass, n_noise, n_b2b, n_blocked_valid);
    check(n_stall > 0, "no output stall happened");
    for (int i = 0; i < 3; i++) check(n_fwd[i] > 0, $sformatf("no forwarding at distance %0d", i + 1));
    check(n_updates > 1, "fewer than two global updates");
    check(n_upd_write > 0, "global update rewrote no area");
    check(n_upd_skip > 0, "global update skipped no area");
    check(n_pass > 0 && n_noise > 0, "only one classification result seen");
    check(n_b2b > 0, "no back-to-back acceptance");
    check(n_blocked_valid > 0, "input never held closed against a valid event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
