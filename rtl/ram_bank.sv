// ram_bank -- one bank of the on-chip RAM: LINES lines of W bits.
//
// Simple dual-port memory: one write port and one synchronous read port on
// the same clock. A read returns the line one cycle after rd_en; a read of a
// line written in the same cycle returns the old contents. Contents are not
// reset. Written as an array so that synthesis maps it onto block RAM.
// The bank size (2048 lines of 16 bytes) follows the accelerator's published
// memory layout; the port arrangement is this design's choice.
module ram_bank #(
  parameter  int unsigned LINES = 2048,
  parameter  int unsigned W     = 128,
  localparam int unsigned AW    = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
