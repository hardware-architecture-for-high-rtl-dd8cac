// Testbench for cell_coord: every column 0..1279 through a power-of-two area
// size (16, shift) and a non-power-of-two size (20, divider), compared with
// integer division done here.  Combinational, so each value is checked after
// a 1 ns settle time.
module tb_cell_coord;
  int checks = 0, failures = 0;

  logic [15:0] coord;
  logic [6:0]  area16;
  logic [6:0]  area20;

  cell_coord #(.SCALE(16), .IN_WIDTH(16), .OUT_WIDTH(7)) dut16 (.coord(coord), .area(area16));
  cell_coord #(.SCALE(20), .IN_WIDTH(16), .OUT_WIDTH(7)) dut20 (.coord(coord), .area(area20));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 1280; c++) begin
      coord = 16'(c);
      #1;
      checks++;
      if (int'(area16) != c / 16) begin
        failures++;
        $display("FAIL scale16 coord=%0d got %0d exp %0d", c, area16, c / 16);
      end
      checks++;
      if (int'(area20) != c / 20) begin
        failures++;
        $display("FAIL scale20 coord=%0d got %0d exp %0d", c, area20, c / 20);
      end
    end
    // the two coordinates of the worked example (16 x 16 areas)
    coord = 16'd33; #1; checks++; if (area16 != 7'd2) failures++;
    coord = 16'd57; #1; checks++; if (area16 != 7'd3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
