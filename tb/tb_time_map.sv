// Testbench for time_map: 6-bit address, 32-bit words.  Checks that all words
// start at 0, that a read returns its word exactly two enabled cycles after
// the address is presented, that a stalled read (enables low) holds its word,
// and random write/read traffic against an array kept here.  A read of the
// address written at the same edge is not checked (undefined in a block RAM).
module tb_time_map;
  int checks = 0, failures = 0;
  logic        clk = 0;
  logic        we_a = 0, en_b = 1, regce_b = 1;
  logic [5:0]  addr_a = '0, addr_b = '0;
  logic [31:0] din_a = '0, dout_b;
  logic [31:0] model [64];
  logic [31:0] exp_q [$];

  always #5 clk = ~clk;

  time_map #(.ADDR_WIDTH(6), .DATA_WIDTH(32)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e1, e2;
    for (int i = 0; i < 64; i++) model[i] = '0;
    // initial contents and two-cycle latency
    for (int i = 0; i < 64; i++) begin
      addr_b = 6'(i);
      @(posedge clk);
    end
    @(posedge clk); @(posedge clk);
    // directed latency check: write 0x1234 at 5, read it, count cycles
    @(negedge clk);
    we_a = 1; addr_a = 6'd5; din_a = 32'h1234; model[5] = 32'h1234;
    @(negedge clk);
    we_a = 0; addr_b = 6'd5;
    @(negedge clk);            // one edge: latch has it, output not yet
    addr_b = 6'd6;
    checks++; if (dout_b == 32'h1234) begin failures++; $display("FAIL read too early"); end
    @(negedge clk);            // second edge: output register
    checks++; if (dout_b != 32'h1234) begin failures++; $display("FAIL latency %h", dout_b); end
    // stall: address 7 written, read presented, then enables low for 3 cycles
    we_a = 1; addr_a = 6'd7; din_a = 32'hABCD; model[7] = 32'hABCD;
    @(negedge clk);
    we_a = 0; addr_b = 6'd7;
    @(negedge clk);            // latch = mem[7]
    en_b = 0; regce_b = 0; addr_b = 6'd8;
    repeat (3) @(negedge clk);
    checks++; if (dout_b != 32'h0) begin failures++; $display("FAIL output moved in stall %h", dout_b); end
    en_b = 1; regce_b = 1;
    @(negedge clk);
    checks++; if (dout_b != 32'hABCD) begin failures++; $display("FAIL stalled read lost %h", dout_b); end
    // random traffic
    exp_q.delete();
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check the word whose address went in two edges ago
      if (exp_q.size() == 2) begin
        e1 = exp_q.pop_front();
        checks++;
        if (dout_b != e1) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %h exp %h", n, dout_b, e1);
        end
      end
      we_a   = 1'($urandom);
      addr_a = 6'($urandom);
      din_a  = $urandom;
      do addr_b = 6'($urandom); while (we_a && addr_b == addr_a);
      e2 = model[addr_b];
      exp_q.push_back(e2);
      if (we_a) model[addr_a] = din_a;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // initial contents: the first 64 reads must all be 0
  initial begin
    @(posedge clk); @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      checks++;
      if (dout_b != 32'h0) begin failures++; $display("FAIL init word %0d = %h", i, dout_b); end
    end
  end
endmodule
