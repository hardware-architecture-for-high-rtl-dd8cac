// Testbench for new_ts: the worked examples of the algorithm (factor 0.25:
// 200,292 -> 223; 160,296 -> 194; 80,316 -> 139; 104,316 -> 157), then random
// operands against state - floor(state/4) + floor(ts/4) computed here with
// division, plus a factor of 1/8.  Checks the one-cycle register and that it
// holds while `en` is low.
module tb_new_ts;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1;
  logic [31:0] state = '0, ts = '0, new_state, new_state8;

  always #5 clk = ~clk;

  new_ts #(.TS_WIDTH(32), .UPDATE_SHIFT(2)) dut  (.clk, .rst_n, .en, .state, .ts, .new_state);
  new_ts #(.TS_WIDTH(32), .UPDATE_SHIFT(3)) dut8 (.clk, .rst_n, .en, .state, .ts, .new_state(new_state8));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [31:0] s, input logic [31:0] t, input logic [31:0] exp);
    @(negedge clk);
    state = s; ts = t;
    #1;
    checks++;
    if (new_state == exp) begin failures++; $display("FAIL result before the clock edge"); end
    @(negedge clk);
    checks++;
    if (new_state != exp) begin
      failures++;
      $display("FAIL state=%0d ts=%0d got %0d exp %0d", s, t, new_state, exp);
    end
  endtask

  initial begin
    logic [63:0] s, t;
    @(negedge clk); rst_n = 1;
    apply(200, 292, 223);
    apply(160, 296, 194);
    apply(80,  316, 139);
    apply(104, 316, 157);
    for (int n = 0; n < 500; n++) begin
      s = 64'($urandom);
      t = s + 64'($urandom_range(0, 100000));
      if (t > 64'hFFFF_FFFF) t = 64'hFFFF_FFFF;
      @(negedge clk);
      state = s[31:0]; ts = t[31:0];
      @(negedge clk);
      checks++;
      if (64'(new_state) != s - s / 4 + t / 4) begin
        failures++;
        if (failures < 10) $display("FAIL rnd state=%0d ts=%0d got %0d", s, t, new_state);
      end
      checks++;
      if (64'(new_state8) != s - s / 8 + t / 8) failures++;
    end
    // hold with en low
    @(negedge clk); state = 32'd1000; ts = 32'd2000;
    @(negedge clk); en = 0; state = 32'd5; ts = 32'd9;
    repeat (3) @(negedge clk);
    checks++;
    if (new_state != 32'd1250) begin failures++; $display("FAIL hold %0d", new_state); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
