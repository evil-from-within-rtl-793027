// tb_backdoor_sweep -- runs backdoors of the sizes evaluated on the
// accelerator (7, 30, 40 and 100 replaced parameters) through the full-size
// DPU core.
//
// For every size k the core is reset (trojan dormant), then programmed with
// k replacement lines placed at pseudo-random, distinct positions among the
// 1024 lines of a weight block that is loaded by 16 load instructions of 64
// lines (banks 16..31, lines 0..63). One target entry is written for every
// load instruction that holds at least one of the k lines, with its mask and
// ROM base. The weight block is then loaded twice -- before programming and
// after -- and read back through the RAM read port: before programming every
// line must be the shared-memory line; after it exactly the k chosen lines
// must hold their ROM lines and the rest the shared-memory data. Both loads
// must take the same number of cycles. One parameter per line is the worst
// case for ROM use.
module tb_backdoor_sweep;
  import dpu_pkg::*;
  import tb_ddr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic inst_valid = 1'b0, inst_ready, load_done;
  load_instr_t inst = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  ddr_addr_t rd_req_addr;
  line_t rd_rsp_data;
  logic ram_rd_en = 1'b0, ram_rd_valid;
  bank_id_t ram_rd_bank_id = '0;
  bank_addr_t ram_rd_bank_addr = '0;
  line_t ram_rd_data;
  logic rom_prog_we = 1'b0, tgt_prog_we = 1'b0;
  logic [6:0] rom_prog_addr = '0;
  line_t rom_prog_data = '0;
  logic [3:0] tgt_prog_idx = '0;
  target_t tgt_prog_entry = '0;
  rd_state_e reader_state;
  logic trojan_active, line_swapped, wr_err;
  int stalls;
  int checks = 0, failures = 0;

  dpu_core dut (.*);
  ddr_model #(.LATENCY(1)) u_ddr (
    .clk, .rst_n, .bp_en(1'b0), .req_valid(rd_req_valid), .req_ready(rd_req_ready),
    .req_addr(rd_req_addr), .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .stalls(stalls));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NLD = 16, NL = 64;
  localparam ddr_addr_t BASE = 32'h2000_0000;

  int swaps = 0;
  always @(posedge clk) if (rst_n && line_swapped) swaps++;
  int cyc = 0;
  always @(posedge clk) cyc++;

  bit   chosen [NLD * NL];
  int   rom_of [NLD * NL];   // ROM line holding the replacement of a chosen line

  function automatic ddr_addr_t ld_addr(int l);
    return BASE + ddr_addr_t'(l * NL * LINE_BYTES);
  endfunction

  task automatic load_block(output int cycles);
    int t0 = cyc;
    for (int l = 0; l < NLD; l++) begin
      @(negedge clk);
      inst_valid = 1'b1;
      inst = '{ddr_addr: ld_addr(l), bank_id: bank_id_t'(FIRST_WEIGHT_BANK + l), bank_addr: '0, lines: LEN_W'(NL)};
      @(negedge clk);
      while (reader_state != RD_CFG) @(negedge clk);
      inst_valid = 1'b0;
      while (reader_state != RD_IDLE) @(negedge clk);
    end
    cycles = cyc - t0;
  endtask

  task automatic readback(bit armed, int k);
    for (int l = 0; l < NLD; l++)
      for (int i = 0; i < NL; i++) begin
        line_t e;
        int g = l * NL + i;
        e = (armed && chosen[g]) ? evil_line(rom_of[g]) : ddr_line(ld_addr(l) + ddr_addr_t'(i * LINE_BYTES));
        @(negedge clk);
        ram_rd_en = 1'b1; ram_rd_bank_id = bank_id_t'(FIRST_WEIGHT_BANK + l); ram_rd_bank_addr = bank_addr_t'(i);
        @(negedge clk);
        ram_rd_en = 1'b0;
        check(ram_rd_data == e, $sformatf("k=%0d %s: load %0d line %0d", k, armed ? "armed" : "dormant", l, i));
      end
  endtask

  task automatic run_size(int k);
    int c_dormant, c_armed, n, ptr, nt;
    // choose k distinct lines
    foreach (chosen[g]) chosen[g] = 1'b0;
    n = 0;
    while (n < k) begin
      int g = $urandom_range(0, NLD * NL - 1);
      if (!chosen[g]) begin chosen[g] = 1'b1; n++; end
    end
    // ROM lines in load order, one target per affected load
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    load_block(c_dormant);
    readback(1'b0, k);
    ptr = 0; nt = 0;
    for (int l = 0; l < NLD; l++) begin
      target_t t;
      t.valid = 1'b1; t.ddr_addr = ld_addr(l); t.line_mask = '0; t.rom_base = ROM_PTR_W'(ptr);
      for (int i = 0; i < NL; i++)
        if (chosen[l * NL + i]) begin
          t.line_mask[i] = 1'b1;
          rom_of[l * NL + i] = ptr;
          @(negedge clk); rom_prog_we = 1'b1; rom_prog_addr = 7'(ptr); rom_prog_data = evil_line(ptr);
          ptr++;
        end
      @(negedge clk); rom_prog_we = 1'b0;
      if (t.line_mask != '0) begin
        tgt_prog_we = 1'b1; tgt_prog_idx = 4'(nt); tgt_prog_entry = t; nt++;
        @(negedge clk); tgt_prog_we = 1'b0;
      end
    end
    swaps = 0;
    load_block(c_armed);
    check(swaps == k, $sformatf("k=%0d: %0d lines exchanged", k, swaps));
    check(c_armed == c_dormant, $sformatf("k=%0d: armed %0d cycles, dormant %0d", k, c_armed, c_dormant));
    readback(1'b1, k);
    $display("backdoor of %0d parameters: %0d target loads, %0d ROM lines, %0d lines exchanged, %0d cycles (dormant %0d)",
             k, nt, ptr, swaps, c_armed, c_dormant);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_size(7);
    run_size(30);
    run_size(40);
    run_size(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
