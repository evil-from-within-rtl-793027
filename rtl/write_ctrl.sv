// write_ctrl -- write controller of the LOAD engine.
//
// Takes one memory-line write per cycle from the memory reader and forwards
// it to the on-chip RAM, one register stage later. On the way it decodes the
// 6-bit bank_id into a one-hot write enable for the 34 banks, so every bank
// of the RAM sees only its own enable. A write whose bank_id names no bank
// (34..63) is dropped and flagged on `wr_err` in the same cycle the write
// would have reached the RAM.
//
// Interface: `wr` (dpu_pkg::line_wr_t) is sampled on the rising edge of clk;
// ram_we/ram_addr/ram_wdata/wr_err are registered. Synchronous active-low
// reset clears the enables.
//
// The paper gives this block only its task (forward bank_id, bank_addr and
// data into the buffer); the register stage, the one-hot decode and the
// handling of out-of-range bank numbers are this design's choices.
module write_ctrl
  import dpu_pkg::*;
#(
  parameter int unsigned BANKS = NUM_BANKS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  line_wr_t         wr,
  output logic [BANKS-1:0] ram_we,
  output bank_addr_t       ram_addr,
  output line_t            ram_wdata,
  output logic             wr_err
);

  logic [BANKS-1:0] dec;

  always_comb begin
    dec = '0;
    for (int b = 0; b < BANKS; b++)
      if (wr.valid && wr.bank_id == bank_id_t'(b)) dec[b] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ram_we    <= '0;
      ram_addr  <= '0;
      ram_wdata <= '0;
      wr_err    <= 1'b0;
    end else begin
      ram_we    <= dec;
      ram_addr  <= wr.bank_addr;
      ram_wdata <= wr.data;
      wr_err    <= wr.valid && (dec == '0);
    end
  end

endmodule
