// Testbench for verify (FILTER_LENGTH = 100): the worked examples (state 200,
// ts 292 -> correct; state 160, ts 296 -> noise), the boundary
// (ts - state = 99 passes, 100 does not), random cases against the rule
// ts - state < FILTER_LENGTH, pass-through of data/user/last, the one-cycle
// output register and holding while `en` is low.
module tb_verify;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1;
  logic        in_valid = 0, in_last = 0;
  logic [63:0] in_data = '0;
  logic [0:0]  in_user = '0;
  logic [31:0] state = '0;
  logic        m_tvalid, m_tlast, m_correct;
  logic [63:0] m_tdata;
  logic [0:0]  m_tuser;

  always #5 clk = ~clk;

  verify #(.DATA_WIDTH(64), .USER_WIDTH(1), .TS_WIDTH(32), .FILTER_LENGTH(100)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [31:0] s, input logic [31:0] t, input logic exp);
    logic [63:0] d;
    d = {32'($urandom), t};
    @(negedge clk);
    in_valid = 1; in_data = d; state = s; in_last = 1'($urandom); in_user = 1'($urandom);
    @(negedge clk);
    checks++;
    if (m_correct != exp || !m_tvalid) begin
      failures++;
      $display("FAIL state=%0d ts=%0d correct=%0d exp %0d", s, t, m_correct, exp);
    end
    checks++;
    if (m_tdata != d || m_tlast != in_last || m_tuser != in_user) begin
      failures++;
      $display("FAIL pass-through");
    end
  endtask

  initial begin
    logic [31:0] s, t;
    @(negedge clk); rst_n = 1;
    checks++; if (m_tvalid) failures++;
    apply(200, 292, 1'b1);
    apply(160, 296, 1'b0);
    apply(1000, 1099, 1'b1);
    apply(1000, 1100, 1'b0);
    apply(32'hFFFF_FFF0, 32'hFFFF_FFFF, 1'b1);   // no wrap of state + length
    for (int n = 0; n < 500; n++) begin
      s = $urandom_range(0, 1000000);
      t = s + $urandom_range(0, 300);
      apply(s, t, (t - s) < 100);
    end
    // stall: output holds
    @(negedge clk); in_valid = 1; in_data = 64'd500; state = 32'd450;
    @(negedge clk); en = 0; in_valid = 0; in_data = 64'd9999; state = 32'd0;
    repeat (3) @(negedge clk);
    checks++;
    if (!m_tvalid || m_tdata != 64'd500 || !m_correct) begin failures++; $display("FAIL hold"); end
    en = 1;
    @(negedge clk);
    checks++; if (m_tvalid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
