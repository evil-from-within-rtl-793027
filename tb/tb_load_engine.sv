// tb_load_engine -- self-checking test of the LOAD engine (memory reader with
// trojan + write controller) at the RAM write port.
//
// Shared memory answers three cycles after a request and drops req_ready at
// random cycles (back-pressure). Every RAM write (one-hot bank enable,
// address, data) is recorded and compared with a reference computed from the
// load instructions, the programmed targets and the ROM contents. Checks:
// exactly one enable per write, every line lands in its bank and line, lines
// marked in a target's mask carry ROM lines in order, all other lines carry
// shared-memory data, a load to a non-existent bank writes nothing and raises
// wr_err once per line, and back-pressure stalls really happened.
module tb_load_engine;
  import dpu_pkg::*;
  import tb_ddr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic inst_valid = 1'b0, inst_ready, load_done;
  load_instr_t inst = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  ddr_addr_t rd_req_addr;
  line_t rd_rsp_data;
  logic [NUM_BANKS-1:0] ram_we;
  bank_addr_t ram_addr;
  line_t ram_wdata;
  logic rom_prog_we = 1'b0, tgt_prog_we = 1'b0;
  logic [6:0] rom_prog_addr = '0;
  line_t rom_prog_data = '0;
  logic [3:0] tgt_prog_idx = '0;
  target_t tgt_prog_entry = '0;
  rd_state_e reader_state;
  logic trojan_active, line_swapped, wr_err;
  int stalls;
  int checks = 0, failures = 0;

  load_engine dut (.*);
  ddr_model #(.LATENCY(3)) u_ddr (
    .clk, .rst_n, .bp_en(1'b1), .req_valid(rd_req_valid), .req_ready(rd_req_ready),
    .req_addr(rd_req_addr), .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .stalls(stalls));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int bank; int addr; line_t data; } ram_wr_t;
  ram_wr_t got [$];
  int      errs = 0;
  always @(posedge clk) if (rst_n) begin
    if (ram_we != '0) begin
      ram_wr_t w;
      w.bank = -1;
      for (int b = 0; b < NUM_BANKS; b++) if (ram_we[b]) w.bank = (w.bank == -1) ? b : -2;
      w.addr = int'(ram_addr);
      w.data = ram_wdata;
      got.push_back(w);
    end
    if (wr_err) errs++;
  end

  target_t tgt [3];

  task automatic run_load(ddr_addr_t a, int bank, int baddr, int n, bit armed);
    int ptr = 0, ti = -1;
    got.delete();
    for (int t = 0; t < 3; t++)
      if (armed && tgt[t].valid && tgt[t].ddr_addr == a && ti < 0) begin ti = t; ptr = int'(tgt[t].rom_base); end
    @(negedge clk);
    inst_valid = 1'b1;
    inst = '{ddr_addr: a, bank_id: bank_id_t'(bank), bank_addr: bank_addr_t'(baddr), lines: LEN_W'(n)};
    @(negedge clk);
    while (!(inst_valid && reader_state == RD_CFG)) @(negedge clk);
    inst_valid = 1'b0;
    while (reader_state != RD_IDLE) @(negedge clk);
    repeat (3) @(negedge clk);
    if (bank >= NUM_BANKS) begin
      check(got.size() == 0, "no RAM write for a non-existent bank");
      return;
    end
    check(got.size() == n, $sformatf("load %h: %0d RAM writes", a, got.size()));
    for (int i = 0; i < got.size(); i++) begin
      line_t e;
      if (ti >= 0 && i < MAX_LOAD_LINES && tgt[ti].line_mask[i]) begin e = evil_line(ptr); ptr++; end
      else e = ddr_line(a + ddr_addr_t'(i * LINE_BYTES));
      check(got[i].bank == bank, $sformatf("load %h line %0d bank", a, i));
      check(got[i].addr == ((baddr + i) % BANK_LINES), $sformatf("load %h line %0d address", a, i));
      check(got[i].data == e, $sformatf("load %h line %0d data", a, i));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    tgt[0] = '{valid: 1'b1, ddr_addr: 32'h4000_0000, line_mask: 64'hF000_0000_0000_0001, rom_base: 16'd0};
    tgt[1] = '{valid: 1'b1, ddr_addr: 32'h4000_0400, line_mask: 64'h0000_0001_0000_0000, rom_base: 16'd5};
    tgt[2] = '{valid: 1'b1, ddr_addr: 32'h4000_0800, line_mask: 64'h0000_0000_0000_0000, rom_base: 16'd6};
    // dormant
    run_load(32'h4000_0000, 16, 0, 64, 1'b0);
    // program
    for (int k = 0; k < 128; k++) begin
      @(negedge clk); rom_prog_we = 1'b1; rom_prog_addr = 7'(k); rom_prog_data = evil_line(k);
    end
    for (int t = 0; t < 3; t++) begin
      @(negedge clk); rom_prog_we = 1'b0; tgt_prog_we = 1'b1; tgt_prog_idx = 4'(t); tgt_prog_entry = tgt[t];
    end
    @(negedge clk); tgt_prog_we = 1'b0;
    // armed
    run_load(32'h4000_0000, 16, 0, 64, 1'b1);
    run_load(32'h4000_0400, 17, 64, 64, 1'b1);
    run_load(32'h4000_0800, 18, 0, 64, 1'b1);   // target with an empty mask
    run_load(32'h5000_0000, 33, 2000, 48, 1'b1); // crosses the end of the bank
    run_load(32'h4000_0010, 16, 64, 63, 1'b1);   // one line off a target: untouched
    errs = 0;
    run_load(32'h6000_0000, 40, 0, 8, 1'b1);
    check(errs == 8, $sformatf("wr_err raised %0d times, expected 8", errs));
    check(stalls > 0, "data bus back-pressure occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
