// Testbench for global_update on a 64 x 48 sensor with 16 x 16 areas
// (4 x 3 areas).  Packets of random events end with tlast; the testbench
// plays the top level's part (s_tready = en && !block).  It checks that the
// input closes right after the tlast handshake and for exactly
// 3 + 12 + 3 enabled cycles, that the scan issues the 12 area addresses in
// row order with write_en = "area saw no event in this packet", that
// last_ts is the packet's last timestamp, that the marks are cleared between
// packets, and that the scan waits while en is low.
module tb_global_update;
  import dvs_filter_pkg::*;
  localparam int NX = 4, NY = 3, N = NX * NY;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  event_t s_event = '0;
  logic block, active, write_en;
  logic [3:0] addr;          // {yCell[1:0], xCell[1:0]}
  ts_t last_ts;
  logic marked [N];
  int   stall_seen = 0;

  always #5 clk = ~clk;

  assign s_tready = en && !block;

  global_update #(.SCALE(16), .SENSOR_WIDTH(64), .SENSOR_HEIGHT(48)) dut (
    .clk, .rst_n, .en, .s_tvalid, .s_tready, .s_tlast, .s_event,
    .block, .active, .addr(addr), .write_en, .last_ts
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_packet(input int nev, input bit stall);
    int blocked, idx;
    ts_t t, tl;
    for (int i = 0; i < N; i++) marked[i] = 0;
    t = ts_t'($urandom_range(0, 1000));
    for (int e = 0; e < nev; e++) begin
      int x, y;
      x = $urandom_range(0, 63);
      y = $urandom_range(0, 47);
      t = t + ts_t'($urandom_range(1, 50));
      @(negedge clk);
      s_tvalid = 1;
      s_event  = make_event(16'(x), 15'(y), 1'($urandom), t);
      s_tlast  = (e == nev - 1);
      marked[(y / 16) * NX + x / 16] = 1;
      tl = t;
    end
    @(negedge clk);
    s_tvalid = 0; s_tlast = 0;
    checks++;
    if (!block) begin failures++; $display("FAIL block not set after tlast"); end
    // count blocked enabled cycles and follow the scan
    blocked = 0; idx = 0;
    while (block) begin
      if (stall && blocked == 7 && en) begin
        en = 0;
      end else if (!en) begin
        en = 1; stall_seen++;
      end
      #1;
      if (en) begin
        if (active) begin
          int ex, ey;
          ey = idx / NX; ex = idx % NX;
          checks++;
          if (addr[3:0] != {2'(ey), 2'(ex)}) begin
            failures++; $display("FAIL scan addr %0d exp y%0d x%0d", addr, ey, ex);
          end
          checks++;
          if (write_en != !marked[idx]) begin
            failures++; $display("FAIL write_en area %0d got %0d", idx, write_en);
          end
          idx++;
        end
        blocked++;
      end
      @(negedge clk);
    end
    checks++;
    if (blocked != 3 + N + 3) begin failures++; $display("FAIL blocked %0d cycles", blocked); end
    checks++;
    if (idx != N) begin failures++; $display("FAIL scanned %0d areas", idx); end
    checks++;
    if (last_ts != tl) begin failures++; $display("FAIL last_ts %0d exp %0d", last_ts, tl); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (block || active) failures++;
    run_packet(3, 0);
    run_packet(1, 1);
    run_packet(20, 0);
    run_packet(2, 1);
    checks++;
    if (stall_seen == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
