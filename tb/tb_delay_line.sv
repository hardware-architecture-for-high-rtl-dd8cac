// Testbench for delay_line: a 3-stage, 8-bit delay driven with random data
// and a random enable.  A queue here models the stages; after every clock
// the output must equal the value entered three enabled cycles before.
// Also checks reset clears the stages and that DEPTH=0 is a wire.
module tb_delay_line;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] din = '0, dout, dout0;
  logic [7:0] model [3];

  always #5 clk = ~clk;

  delay_line #(.WIDTH(8), .DEPTH(3)) dut  (.clk, .rst_n, .en, .din, .dout);
  delay_line #(.WIDTH(8), .DEPTH(0)) dut0 (.clk, .rst_n, .en, .din, .dout(dout0));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (dout != 8'h00) failures++;
    for (int n = 0; n < 1000; n++) begin
      en  = ($urandom_range(0, 3) != 0);
      din = 8'($urandom);
      #1; checks++; if (dout0 != din) failures++;
      @(posedge clk);
      if (en) begin
        model[2] = model[1];
        model[1] = model[0];
        model[0] = din;
      end
      #1;
      checks++;
      if (dout != model[2]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %h exp %h", n, dout, model[2]);
      end
    end
    rst_n = 0;
    @(posedge clk); #1;
    checks++; if (dout != 8'h00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
