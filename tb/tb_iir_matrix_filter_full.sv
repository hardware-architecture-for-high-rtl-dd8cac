// Full-size end-to-end testbench of iir_matrix_filter, every parameter at
// its default: a 1280 x 720 sensor, 16 x 16 areas (80 x 45 = 3600 filters),
// update factor 0.25, filter length 1000 us.
//
// A random stream of 40000 events (twelve moving hot areas plus scattered
// events, gaps in tvalid, random EVENT OUT stalls, packets of 500 to 6000
// events) runs against an in-order reference model of the algorithm kept
// here.  Checked: every output word and correct flag, the 3-cycle latency,
// one event per cycle while the input is open, the input closed for exactly
// 3 + 3600 + 3 enabled cycles per packet, and all 3600 filter states at the
// end.  Each mechanism must occur at least once: output stall, forwarding at
// distance 1, 2 and 3, global update with rewritten and skipped areas, both
// classification results, back-to-back acceptance.
module tb_iir_matrix_filter_full;
  import dvs_filter_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
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

  // ================================================================ part 2
  localparam int SW = 1280, SH = 720, SC = 16, FL = 1000, SHIFT = 2;
  localparam int NX = SW / SC, NY = SH / SC;
  localparam int XCW = $clog2(NX), YCW = $clog2(NY);
  localparam int NEVENTS = 40000;

  logic        s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] s_tdata = '0;
  logic [0:0]  s_tuser = '0;
  logic        m_tvalid, m_tready = 1, m_tlast, m_correct;
  logic [63:0] m_tdata;
  logic [0:0]  m_tuser;

  // default parameters: 1280 x 720 sensor, 16 x 16 areas, factor 0.25,
  // filter length 1000
  iir_matrix_filter dut (.*);

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
    int hot_x [12], hot_y [12];
    int sent = 0, pkt_left;
    longint t = 1000;
    for (int i = 0; i < 12; i++) begin
      hot_x[i] = $urandom_range(0, NX - 1);
      hot_y[i] = $urandom_range(0, NY - 1);
    end
    pkt_left = $urandom_range(500, 6000);
    while (sent < NEVENTS) begin
      int x, y, h, mode;
      // pick the next event
      mode = $urandom_range(0, 9);
      if (mode < 7) begin
        h = $urandom_range(0, 11);
        x = hot_x[h] * SC + $urandom_range(0, SC - 1);
        y = hot_y[h] * SC + $urandom_range(0, SC - 1);
      end else begin
        x = $urandom_range(0, SW - 1);
        y = $urandom_range(0, SH - 1);
      end
      if ($urandom_range(0, 399) == 0) t += $urandom_range(300, 3000);   // quiet spell
      else t += $urandom_range(0, 10);
      s_tvalid = 1;
      s_tdata  = 64'(make_event(16'(x), 15'(y), 1'($urandom), 32'(t)));
      s_tuser  = 1'($urandom);
      s_tlast  = (pkt_left == 1);
      // wait for the handshake
      do @(posedge clk); while (!(s_tvalid && s_tready));
      #1;
      sent++;
      pkt_left--;
      if (pkt_left == 0) pkt_left = $urandom_range(500, 6000);
      if ($urandom_range(0, 7) == 0) begin
        s_tvalid = 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
      end
      if ($urandom_range(0, 299) == 0) begin
        // move the hot spots now and then
        for (int i = 0; i < 12; i++) begin
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
