// Testbench for select_data: random inputs; during an update the raw Time
// Map word and the packet's last timestamp go to New Ts, otherwise the
// forwarded state and the event's timestamp.
module tb_select_data;
  int checks = 0, failures = 0;
  logic        gu_active;
  logic [31:0] recode_state, map_state, ev_ts, gu_ts, state, ts;

  select_data #(.TS_WIDTH(32)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      gu_active    = 1'($urandom);
      recode_state = $urandom;
      map_state    = $urandom;
      ev_ts        = $urandom;
      gu_ts        = $urandom;
      #1;
      checks++;
      if (state != (gu_active ? map_state : recode_state)) failures++;
      checks++;
      if (ts != (gu_active ? gu_ts : ev_ts)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
