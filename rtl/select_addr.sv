// Select Addr: chooses which address (and which enable) goes to one port of
// the Time Map.
//
// While the global update is running (`gu_active` high) the address and enable
// come from the Global Update unit; otherwise they come from the event path.
// The design uses two instances: one on the read port, fed straight from
// xCell/yCell and Global Update, and one on the write port, fed through the
// Delay units.  On the write port the enable is the BRAM Port A write enable:
// during an update it is the negated mark of the area (only areas that saw no
// event are rewritten), otherwise it is the delayed tvalid & tready of
// EVENT IN.  This follows the paper; on the read port the enable output is
// informative only.  Purely combinational.
module select_addr #(
  parameter int unsigned ADDR_WIDTH = 13
) (
  input  logic                  gu_active,
  input  logic [ADDR_WIDTH-1:0] ev_addr,
  input  logic                  ev_en,
  input  logic [ADDR_WIDTH-1:0] gu_addr,
  input  logic                  gu_en,
  output logic [ADDR_WIDTH-1:0] addr,
  output logic                  en
);

  always_comb begin
    if (gu_active) begin
      addr = gu_addr;
      en   = gu_en;
    end else begin
      addr = ev_addr;
      en   = ev_en;
    end
  end

endmodule
