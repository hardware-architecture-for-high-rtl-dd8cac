// Testbench for select_addr: random inputs; with the update flag high the
// Global Update address and enable must appear, otherwise the event path's.
module tb_select_addr;
  int checks = 0, failures = 0;
  logic        gu_active, ev_en, gu_en, en;
  logic [12:0] ev_addr, gu_addr, addr;

  select_addr #(.ADDR_WIDTH(13)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      gu_active = 1'($urandom);
      ev_en     = 1'($urandom);
      gu_en     = 1'($urandom);
      ev_addr   = 13'($urandom);
      gu_addr   = 13'($urandom);
      #1;
      checks++;
      if (addr != (gu_active ? gu_addr : ev_addr)) failures++;
      checks++;
      if (en != (gu_active ? gu_en : ev_en)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
