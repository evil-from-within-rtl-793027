// trojan_shift_reg -- per-line exchange mask of the backdoor trojan.
//
// When the trojan recognises a target load instruction, this register is
// loaded with that instruction's line mask: one bit per memory line of the
// load, 1 = replace the line with one from the trojan ROM, 0 = keep it. The
// least significant bit belongs to the line currently being received and is
// presented on `bit_out`. The register shifts once per received memory line,
// so after n shifts bit_out tells about line n; zeros are shifted in, so a
// load longer than WIDTH lines has its trailing lines left alone.
//
// Interface: `load` (with `load_val`) and `shift` are sampled on the rising
// edge of clk; load has priority. bit_out is the register's bit 0 (no
// combinational path from the inputs). Active-low synchronous reset clears it.
//
// The 64-line width and the shift-per-line behaviour follow the paper's
// trojan; the bit order (line 0 in bit 0) is this design's choice.
module trojan_shift_reg #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] load_val,
  input  logic             shift,
  output logic             bit_out
);

  logic [WIDTH-1:0] q;

  always_ff @(posedge clk) begin
    if (!rst_n)     q <= '0;
    else if (load)  q <= load_val;
    else if (shift) q <= {1'b0, q[WIDTH-1:1]};
  end

  assign bit_out = q[0];

endmodule
