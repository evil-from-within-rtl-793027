// onchip_ram -- on-chip buffer of the DPU core (B4096 configuration).
//
// 34 banks of 2048 lines, 16 bytes per line (8.5 Mbit in all). A line is
// named by its bank_id and bank_addr. Banks 0..15 hold feature maps, 16..32
// weights and 33 biases; the RAM itself does not enforce the split, the
// engines that address it do. The LOAD engine writes through a one-hot bank
// enable from its write controller; the compute and STORE engines read
// through one shared read port.
//
// Interface: write -- ram_we (one bit per bank), ram_addr, ram_wdata, taken on
// the rising edge of clk. Read -- rd_en, rd_bank_id, rd_bank_addr; rd_data is
// valid one cycle later (rd_valid). A bank_id beyond the last bank reads as
// zero. Read and write of the same line in one cycle returns the old line.
//
// Geometry and region split follow the paper. The single read port and the
// read latency are this design's choices: the paper does not describe how the
// compute engines access the buffer.
module onchip_ram
  import dpu_pkg::*;
#(
  parameter int unsigned BANKS = NUM_BANKS,
  parameter int unsigned LINES = BANK_LINES
) (
  input  logic             clk,
  input  logic             rst_n,
  // write side (LOAD engine)
  input  logic [BANKS-1:0] ram_we,
  input  bank_addr_t       ram_addr,
  input  line_t            ram_wdata,
  // read side (compute / STORE engines)
  input  logic             rd_en,
  input  bank_id_t         rd_bank_id,
  input  bank_addr_t       rd_bank_addr,
  output logic             rd_valid,
  output line_t            rd_data
);

  localparam int unsigned AW = (LINES > 1) ? $clog2(LINES) : 1;

  line_t    bank_rdata [BANKS];
  bank_id_t rd_bank_q;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    ram_bank #(.LINES(LINES), .W(LINE_W)) u_bank (
      .clk   (clk),
      .we    (ram_we[b]),
      .waddr (ram_addr[AW-1:0]),
      .wdata (ram_wdata),
      .rd_en (rd_en && rd_bank_id == bank_id_t'(b)),
      .raddr (rd_bank_addr[AW-1:0]),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_valid  <= 1'b0;
      rd_bank_q <= '0;
    end else begin
      rd_valid  <= rd_en;
      if (rd_en) rd_bank_q <= rd_bank_id;
    end
  end

  always_comb begin
    rd_data = '0;
    for (int b = 0; b < BANKS; b++)
      if (rd_bank_q == bank_id_t'(b)) rd_data = bank_rdata[b];
  end

  // At most one bank is written per cycle.
  a_onehot_we: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ram_we));

endmodule
