// tb_dpu_core -- end-to-end test of the DPU core's load path with the
// backdoor trojan, at the default (full) sizes: 34 banks x 2048 lines,
// 128-line trojan ROM, 16 target entries.
//
// One complete layer load is run twice, as an inference would issue it:
// 4 feature-map loads (banks 0..3), 8 weight loads (banks 16..23) and one
// bias load (bank 33), each of 64 lines except the 16-line bias load.
//   Pass 1, trojan dormant (after reset, nothing programmed): the RAM must
//   hold exactly the shared-memory data.
//   Then the trojan is programmed with 30 replacement lines spread over three
//   of the weight loads (10 each), i.e. a 30-parameter backdoor with one
//   parameter per line.
//   Pass 2, trojan armed: the 30 marked lines must hold the ROM lines, every
//   other line the shared-memory data.
// Both passes are first run with an immediate data bus and timed: the armed
// pass must take exactly as many cycles as the dormant one. Pass 2 is then
// repeated with back-pressure and a 4-cycle memory latency. The RAM is read
// back through its read port after every pass. A load to a non-existent bank
// must raise wr_err. Each mechanism (dormant pass, target hit, line exchange,
// non-target load while armed, data-bus stall, bank error, timing equality)
// is counted; one that never happens is a failure.
module tb_dpu_core;
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
  int checks = 0, failures = 0;

  // shared memory: two instances of the fixture share the bus through a
  // selector, one immediate and one slow with back-pressure
  logic fast_sel = 1'b1, bp_en = 1'b0;
  logic f_ready, f_valid, s_ready, s_valid;
  line_t f_data, s_data;
  int f_stalls, s_stalls;

  dpu_core dut (.*);

  ddr_model #(.LATENCY(1)) u_fast (
    .clk, .rst_n, .bp_en(1'b0), .req_valid(rd_req_valid && fast_sel), .req_ready(f_ready),
    .req_addr(rd_req_addr), .rsp_valid(f_valid), .rsp_data(f_data), .stalls(f_stalls));
  ddr_model #(.LATENCY(4)) u_slow (
    .clk, .rst_n, .bp_en(bp_en), .req_valid(rd_req_valid && !fast_sel), .req_ready(s_ready),
    .req_addr(rd_req_addr), .rsp_valid(s_valid), .rsp_data(s_data), .stalls(s_stalls));
  assign rd_req_ready = fast_sel ? f_ready : s_ready;
  assign rd_rsp_valid = fast_sel ? f_valid : s_valid;
  assign rd_rsp_data  = fast_sel ? f_data  : s_data;

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- the layer: 13 load instructions ----------------------------------------
  localparam int NLOADS = 13;
  load_instr_t layer [NLOADS];
  initial begin
    for (int i = 0; i < 4; i++)
      layer[i] = '{ddr_addr: 32'h1000_0000 + 32'(i * 64 * LINE_BYTES), bank_id: bank_id_t'(i),
                   bank_addr: '0, lines: 7'd64};
    for (int i = 0; i < 8; i++)
      layer[4 + i] = '{ddr_addr: 32'h2000_0000 + 32'(i * 64 * LINE_BYTES),
                       bank_id: bank_id_t'(FIRST_WEIGHT_BANK + i), bank_addr: 11'd128, lines: 7'd64};
    layer[12] = '{ddr_addr: 32'h3000_0000, bank_id: bank_id_t'(FIRST_BIAS_BANK), bank_addr: '0, lines: 7'd16};
  end

  // targets: weight loads 1, 4 and 7, 10 lines each
  localparam int NT = 3;
  target_t tgt [NT];
  initial begin
    tgt[0] = '{valid: 1'b1, ddr_addr: 32'h2000_0000 + 32'(1 * 64 * LINE_BYTES),
               line_mask: 64'h0000_0000_0000_03FF, rom_base: 16'd0};
    tgt[1] = '{valid: 1'b1, ddr_addr: 32'h2000_0000 + 32'(4 * 64 * LINE_BYTES),
               line_mask: 64'h8421_0842_1084_0000, rom_base: 16'd10};
    tgt[2] = '{valid: 1'b1, ddr_addr: 32'h2000_0000 + 32'(7 * 64 * LINE_BYTES),
               line_mask: 64'hC000_0000_FF00_0000, rom_base: 16'd20};
  end

  // expected content of one loaded line
  function automatic line_t expect_line(int ld, int i, bit armed);
    ddr_addr_t a = layer[ld].ddr_addr;
    if (armed)
      for (int t = 0; t < NT; t++)
        if (tgt[t].ddr_addr == a && tgt[t].line_mask[i]) begin
          int k = int'(tgt[t].rom_base);
          for (int j = 0; j < i; j++) if (tgt[t].line_mask[j]) k++;
          return evil_line(k);
        end
    return ddr_line(a + ddr_addr_t'(i * LINE_BYTES));
  endfunction

  // ---- mechanism counters ------------------------------------------------------
  int n_dormant_pass = 0, n_target_hits = 0, n_swaps = 0, n_miss_armed = 0;
  int n_stalls = 0, n_bank_err = 0, n_timing_equal = 0;
  logic active_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (line_swapped) n_swaps++;
    if (trojan_active && !active_q) n_target_hits++;
    active_q <= trojan_active;
    if (wr_err) n_bank_err++;
  end

  task automatic issue(load_instr_t li);
    @(negedge clk);
    inst_valid = 1'b1; inst = li;
    @(negedge clk);
    while (reader_state != RD_CFG) @(negedge clk);
    inst_valid = 1'b0;
    while (reader_state != RD_IDLE) @(negedge clk);
  endtask

  task automatic run_layer(output int cycles);
    int t0;
    t0 = cyc;
    for (int l = 0; l < NLOADS; l++) issue(layer[l]);
    repeat (2) @(negedge clk);
    cycles = cyc - t0;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic readback(bit armed, string tag);
    int bad = 0;
    for (int l = 0; l < NLOADS; l++)
      for (int i = 0; i < int'(layer[l].lines); i++) begin
        @(negedge clk);
        ram_rd_en = 1'b1; ram_rd_bank_id = layer[l].bank_id;
        ram_rd_bank_addr = layer[l].bank_addr + bank_addr_t'(i);
        @(negedge clk);
        ram_rd_en = 1'b0;
        check(ram_rd_valid, "read valid");
        check(ram_rd_data == expect_line(l, i, armed), $sformatf("%s: load %0d line %0d", tag, l, i));
      end
  endtask

  initial begin
    int c_dormant, c_armed, c_slow, sw0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // pass 1: dormant
    run_layer(c_dormant);
    check(n_swaps == 0 && n_target_hits == 0, "dormant trojan stays silent");
    readback(1'b0, "dormant");
    if (n_swaps == 0) n_dormant_pass++;

    // program: ROM lines 0..29 then target entries (an unused ROM tail too)
    for (int k = 0; k < 128; k++) begin
      @(negedge clk); rom_prog_we = 1'b1; rom_prog_addr = 7'(k); rom_prog_data = evil_line(k);
    end
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); rom_prog_we = 1'b0; tgt_prog_we = 1'b1; tgt_prog_idx = 4'(2 * t + 1); tgt_prog_entry = tgt[t];
    end
    @(negedge clk); tgt_prog_we = 1'b0;

    // pass 2: armed, immediate bus, timed
    sw0 = n_swaps;
    run_layer(c_armed);
    check(n_swaps - sw0 == 30, $sformatf("30 lines exchanged, saw %0d", n_swaps - sw0));
    check(n_target_hits == 3, $sformatf("3 target loads recognised, saw %0d", n_target_hits));
    n_miss_armed = NLOADS - n_target_hits;
    check(c_armed == c_dormant, $sformatf("armed layer %0d cycles, dormant %0d", c_armed, c_dormant));
    if (c_armed == c_dormant) n_timing_equal++;
    readback(1'b1, "armed");

    // pass 2 again, slow bus with back-pressure (RAM rewritten with the same data)
    fast_sel = 1'b0; bp_en = 1'b1;
    sw0 = n_swaps;
    run_layer(c_slow);
    check(c_slow > c_armed, "slow bus takes longer");
    check(n_swaps - sw0 == 30, "30 lines exchanged under back-pressure");
    readback(1'b1, "armed, slow bus");
    n_stalls = s_stalls;

    // a load to a bank that does not exist
    issue('{ddr_addr: 32'h7000_0000, bank_id: 6'd50, bank_addr: '0, lines: 7'd4});
    repeat (2) @(negedge clk);

    $display("mechanisms: dormant_pass=%0d target_hits=%0d line_swaps=%0d non_target_loads_armed=%0d bus_stalls=%0d bank_errors=%0d equal_timing=%0d",
             n_dormant_pass, n_target_hits, n_swaps, n_miss_armed, n_stalls, n_bank_err, n_timing_equal);
    check(n_dormant_pass > 0, "mechanism: dormant pass");
    check(n_target_hits > 0, "mechanism: target hit");
    check(n_swaps > 0, "mechanism: line exchange");
    check(n_miss_armed > 0, "mechanism: non-target load while armed");
    check(n_stalls > 0, "mechanism: data-bus stall");
    check(n_bank_err == 4, "mechanism: bank error on each of 4 lines");
    check(n_timing_equal > 0, "mechanism: no added latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
