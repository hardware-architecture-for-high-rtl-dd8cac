// Workload testbench: the three configurations the filter was evaluated
// with, each on a synthetic scene with added random noise (the original
// recordings are not part of this distribution):
//   640 x 480,  filter length  200 us  (first recording's setting)
//   1280 x 720, filter length 1000 us  (second recording's setting)
//   1280 x 720, filter length 2000 us  (third recording's setting)
// 16 x 16 areas and update factor 0.25 in all three.  The scenario and its
// checks are in workload_noise_env; the three run side by side.
module tb_workload_noise;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks [3], failures [3];
  bit done [3];

  workload_noise_env #(.SW(640),  .SH(480), .FL(200),  .NAME("640x480"))  env0 (
    .clk, .rst_n, .checks(checks[0]), .failures(failures[0]), .done(done[0]));
  workload_noise_env #(.SW(1280), .SH(720), .FL(1000), .NAME("1280x720")) env1 (
    .clk, .rst_n, .checks(checks[1]), .failures(failures[1]), .done(done[1]));
  workload_noise_env #(.SW(1280), .SH(720), .FL(2000), .NAME("1280x720")) env2 (
    .clk, .rst_n, .checks(checks[2]), .failures(failures[2]), .done(done[2]));

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2]);
    $finish;
  end
endmodule
