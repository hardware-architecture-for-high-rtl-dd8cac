// Workload testbench: how many genuine events are discarded when an area
// becomes active again after a quiet spell, with filter length 200 us,
// update factor 0.25 and, where used, a global update every 1000 us.
// Reproduces the experiment behind the published curve of discarded events
// against time since the last event:
//   * without global update, after 2 s of silence: the rule in integer
//     arithmetic gives 32 (the published estimate, in real arithmetic, is
//     "at least 33"; the difference is the truncation of the shifts);
//   * with the update every 1 ms the count grows with the quiet time and
//     saturates at 11, the published saturation value, from about 8 ms on.
// Each run uses its own filter instance (discard_env).  Checked: the
// hardware count equals the rule's count in every run, the saturation value
// is 11 for quiet times of 8 ms and more, and the update lowers the count.
module tb_discarded_events;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NRUN = 7;
  int removed [NRUN], expected [NRUN];
  bit done [NRUN];
  int checks = 0, failures = 0;

  discard_env #(.QUIET(2000000), .USE_GU(0)) r0 (.clk, .rst_n, .removed(removed[0]), .expected(expected[0]), .done(done[0]));
  discard_env #(.QUIET(1999),    .USE_GU(1)) r1 (.clk, .rst_n, .removed(removed[1]), .expected(expected[1]), .done(done[1]));
  discard_env #(.QUIET(3999),    .USE_GU(1)) r2 (.clk, .rst_n, .removed(removed[2]), .expected(expected[2]), .done(done[2]));
  discard_env #(.QUIET(5999),    .USE_GU(1)) r3 (.clk, .rst_n, .removed(removed[3]), .expected(expected[3]), .done(done[3]));
  discard_env #(.QUIET(7999),    .USE_GU(1)) r4 (.clk, .rst_n, .removed(removed[4]), .expected(expected[4]), .done(done[4]));
  discard_env #(.QUIET(11999),   .USE_GU(1)) r5 (.clk, .rst_n, .removed(removed[5]), .expected(expected[5]), .done(done[5]));
  discard_env #(.QUIET(29999),   .USE_GU(1)) r6 (.clk, .rst_n, .removed(removed[6]), .expected(expected[6]), .done(done[6]));

  localparam int QUIET [NRUN] = '{2000000, 1999, 3999, 5999, 7999, 11999, 29999};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < NRUN; i++) all_done &= done[i];
    end while (!all_done);
    for (int i = 0; i < NRUN; i++) begin
      $display("quiet %0d us, %s global update: %0d events discarded (rule: %0d)",
               QUIET[i], (i == 0) ? "no" : "with", removed[i], expected[i]);
      checks++;
      if (removed[i] != expected[i]) begin failures++; $display("FAIL run %0d", i); end
      if (i >= 4) begin
        checks++;
        if (removed[i] != 11) begin failures++; $display("FAIL saturation %0d, expected 11", removed[i]); end
      end
    end
    checks++;
    if (!(removed[0] > removed[6])) begin failures++; $display("FAIL update does not lower the count"); end
    checks++;
    if (removed[0] != 32) begin failures++; $display("FAIL 2 s without update: %0d", removed[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
