// Testbench for recode.  Around the unit it builds the rest of a state loop:
// a two-cycle read-first memory, and a registered "new state" = state + 1 +
// (address), written three cycles after the read, exactly as the filter
// pipeline does.  Random events over only four areas (with random gaps and
// stalls) make consecutive events hit the same area at distances 1, 2 and 3.
// For each event the state seen in S2 must equal the value an in-order
// reference (a plain array) holds for that area.  Each hit distance must
// occur at least once.
module tb_recode;
  localparam int AW = 4;
  int checks = 0, failures = 0;
  int hits [3] = '{0, 0, 0};
  logic clk = 0, rst_n = 0, en = 0;
  logic          valid0 = 0;
  logic [AW-1:0] addr0 = '0;
  logic [31:0]   map_state, new_state, state;
  logic [2:0]    hit;

  // pipeline copies of the event
  logic          v1, v2, v3;
  logic [AW-1:0] a1, a2, a3;
  logic [31:0]   mem [16];
  logic [31:0]   latch, ref_mem [16];
  logic [31:0]   exp_q [$];

  always #5 clk = ~clk;

  recode #(.ADDR_WIDTH(AW), .TS_WIDTH(32)) dut (.*);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 0; v2 <= 0; v3 <= 0; a1 <= '0; a2 <= '0; a3 <= '0;
      new_state <= '0;
    end else if (en) begin
      v1 <= valid0; a1 <= addr0;
      v2 <= v1;     a2 <= a1;
      v3 <= v2;     a3 <= a2;
      new_state <= state + 32'd1 + 32'(a2);
      latch     <= mem[addr0];
      map_state <= latch;
      if (v3) mem[a3] <= new_state;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: the S2 state of each valid event against the reference
  always @(negedge clk) begin
    if (rst_n && en && v2) begin
      logic [31:0] e;
      e = exp_q.pop_front();
      checks++;
      if (state != e) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%0d got %0d exp %0d hit=%b", a2, state, e, hit);
      end
      for (int i = 0; i < 3; i++) if (hit[i]) hits[i]++;
    end
  end

  initial begin
    for (int i = 0; i < 16; i++) begin mem[i] = '0; ref_mem[i] = '0; end
    latch = '0; map_state = '0;
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk); #1;
      en     = ($urandom_range(0, 7) != 0);
      valid0 = en && ($urandom_range(0, 3) != 0);
      addr0  = AW'($urandom_range(0, 3));
      if (valid0) begin
        exp_q.push_back(ref_mem[addr0]);
        ref_mem[addr0] = ref_mem[addr0] + 32'd1 + 32'(addr0);
      end
    end
    @(posedge clk); #1; valid0 = 0; en = 1;
    repeat (6) @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (hits[i] == 0) begin failures++; $display("FAIL distance %0d never forwarded", i + 1); end
    end
    $display("forwarding hits: d1=%0d d2=%0d d3=%0d", hits[0], hits[1], hits[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
