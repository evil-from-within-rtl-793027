// tb_mem_reader -- self-checking test of the memory reader FSM with trojan.
//
// Shared memory is the ddr_model fixture (answers one cycle after a request,
// no back-pressure, so the cycle count is exact). The test
//   1. runs loads before the trojan is programmed: every line must be the
//      shared-memory line, at the right bank_id/bank_addr, and a load of n
//      lines must take 3n + 3 cycles (accept .. load_done inclusive);
//   2. programs ROM lines and two target entries;
//   3. re-runs the targeted loads: lines whose mask bit is set must come from
//      the ROM, in order from the target's ROM base, all others from shared
//      memory, and the cycle count must be the same as before (no added
//      latency);
//   4. runs a non-targeted load in between: unchanged;
//   5. checks the FSM visits IDLE, CFG, PARSE, SEND, DONE in that order.
module tb_mem_reader;
  import dpu_pkg::*;
  import tb_ddr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic inst_valid = 1'b0, inst_ready, load_done;
  load_instr_t inst = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  ddr_addr_t rd_req_addr;
  line_t rd_rsp_data;
  line_wr_t wr;
  logic rom_prog_we = 1'b0, tgt_prog_we = 1'b0;
  logic [6:0] rom_prog_addr = '0;
  line_t rom_prog_data = '0;
  logic [3:0] tgt_prog_idx = '0;
  target_t tgt_prog_entry = '0;
  rd_state_e state_o;
  logic trojan_active, line_swapped;
  int stalls;
  int checks = 0, failures = 0;

  mem_reader dut (.*);
  ddr_model #(.LATENCY(1)) u_ddr (
    .clk, .rst_n, .bp_en(1'b0), .req_valid(rd_req_valid), .req_ready(rd_req_ready), .req_addr(rd_req_addr),
    .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .stalls(stalls));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // capture of the write stream
  line_wr_t got [$];
  int       swaps_seen = 0;
  always @(posedge clk) if (rst_n && wr.valid) begin
    got.push_back(wr);
    if (line_swapped) swaps_seen++;
  end

  // state order monitor
  rd_state_e prev_state = RD_IDLE;
  int bad_transitions = 0;
  always @(posedge clk) begin
    if (rst_n && state_o != prev_state) begin
      unique case (prev_state)
        RD_IDLE:  if (state_o != RD_CFG) bad_transitions++;
        RD_CFG:   if (state_o != RD_PARSE) bad_transitions++;
        RD_PARSE: if (state_o != RD_SEND) bad_transitions++;
        RD_SEND:  if (state_o != RD_PARSE && state_o != RD_DONE) bad_transitions++;
        RD_DONE:  if (state_o != RD_IDLE) bad_transitions++;
        default:  bad_transitions++;
      endcase
    end
    prev_state <= state_o;
  end

  // reference targets
  target_t tgt [2];

  function automatic line_t expected(ddr_addr_t start, int i, inout int ptr, input bit armed);
    for (int t = 0; t < 2; t++)
      if (armed && tgt[t].valid && tgt[t].ddr_addr == start && i < MAX_LOAD_LINES && tgt[t].line_mask[i]) begin
        line_t l = evil_line(ptr);
        ptr++;
        return l;
      end
    return ddr_line(start + ddr_addr_t'(i * LINE_BYTES));
  endfunction

  task automatic run_load(ddr_addr_t a, int bank, int baddr, int n, bit armed, output int cycles);
    int ptr = 0;
    got.delete();
    for (int t = 0; t < 2; t++)
      if (armed && tgt[t].valid && tgt[t].ddr_addr == a) ptr = int'(tgt[t].rom_base);
    @(negedge clk);
    inst_valid = 1'b1;
    inst = '{ddr_addr: a, bank_id: bank_id_t'(bank), bank_addr: bank_addr_t'(baddr), lines: LEN_W'(n)};
    while (!inst_ready) @(negedge clk);
    cycles = 0;
    @(negedge clk); inst_valid = 1'b0; cycles++;
    while (!load_done) begin @(negedge clk); cycles++; end
    cycles++;  // the DONE cycle
    @(negedge clk);
    check(got.size() == n, $sformatf("load %h: %0d lines written", a, got.size()));
    for (int i = 0; i < got.size(); i++) begin
      line_t e = expected(a, i, ptr, armed);
      check(got[i].data == e, $sformatf("load %h line %0d data", a, i));
      check(got[i].bank_id == bank_id_t'(bank) && got[i].bank_addr == bank_addr_t'(baddr + i),
            $sformatf("load %h line %0d destination", a, i));
    end
  endtask

  initial begin
    int c_plain, c_plain2, c_armed;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    tgt[0] = '{valid: 1'b1, ddr_addr: 32'h1000_0400, line_mask: 64'h8000_0000_0000_0025, rom_base: 16'd10};
    tgt[1] = '{valid: 1'b1, ddr_addr: 32'h2000_0000, line_mask: 64'h0000_0000_0000_00F0, rom_base: 16'd40};

    // 1. dormant trojan
    run_load(32'h1000_0400, 16, 100, 64, 1'b0, c_plain);
    check(c_plain == 3 * 64 + 3, $sformatf("64-line load takes %0d cycles, expected %0d", c_plain, 3 * 64 + 3));
    run_load(32'h2000_0000, 20, 2040, 12, 1'b0, c_plain2);
    check(c_plain2 == 3 * 12 + 3, "12-line load cycle count");
    check(swaps_seen == 0, "no line exchanged before programming");

    // 2. program the trojan
    for (int k = 0; k < 128; k++) begin
      @(negedge clk); rom_prog_we = 1'b1; rom_prog_addr = 7'(k); rom_prog_data = evil_line(k);
    end
    for (int t = 0; t < 2; t++) begin
      @(negedge clk); rom_prog_we = 1'b0; tgt_prog_we = 1'b1; tgt_prog_idx = 4'(t + 3); tgt_prog_entry = tgt[t];
    end
    @(negedge clk); tgt_prog_we = 1'b0;

    // 3. targeted loads, lines exchanged, same timing
    swaps_seen = 0;
    run_load(32'h1000_0400, 16, 100, 64, 1'b1, c_armed);
    check(c_armed == c_plain, $sformatf("armed load took %0d cycles, dormant %0d", c_armed, c_plain));
    check(swaps_seen == 4, $sformatf("4 lines exchanged, saw %0d", swaps_seen));
    // 4. another load: untouched
    run_load(32'h1000_0800, 17, 0, 64, 1'b1, c_armed);
    check(c_armed == c_plain, "non-target load timing");
    check(swaps_seen == 4, "no exchange in a non-target load");
    run_load(32'h2000_0000, 20, 2040, 12, 1'b1, c_armed);
    check(c_armed == c_plain2, "second target timing");
    check(swaps_seen == 8, "second target: 4 more lines exchanged");
    // a single-line load
    run_load(32'h3000_0000, 0, 5, 1, 1'b1, c_armed);
    check(c_armed == 6, "1-line load takes 6 cycles");
    check(bad_transitions == 0, $sformatf("%0d illegal state transitions", bad_transitions));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
