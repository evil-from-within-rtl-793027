// tb_onchip_ram -- self-checking test of the banked on-chip RAM at full size
// (34 banks x 2048 lines). Writes random lines through the one-hot bank
// enables, keeping a reference copy, and reads them back through the read
// port, checking the one-cycle read latency (rd_valid) and the data. Covers
// every bank, the first and last line of a bank, reads interleaved with
// writes to other banks, read-before-write ordering on the same line and an
// out-of-range bank number (reads zero).
module tb_onchip_ram;
  import dpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NUM_BANKS-1:0] ram_we = '0;
  bank_addr_t ram_addr = '0, rd_bank_addr = '0;
  line_t ram_wdata = '0, rd_data;
  logic rd_en = 1'b0, rd_valid;
  bank_id_t rd_bank_id = '0;
  line_t ref_mem [NUM_BANKS][BANK_LINES];
  bit    written [NUM_BANKS][BANK_LINES];
  int checks = 0, failures = 0;

  onchip_ram dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr_line(int b, int a, line_t d);
    @(negedge clk);
    ram_we = '0; ram_we[b] = 1'b1; ram_addr = bank_addr_t'(a); ram_wdata = d;
    ref_mem[b][a] = d; written[b][a] = 1'b1;
    @(negedge clk); ram_we = '0;
  endtask

  task automatic rd_check(int b, int a);
    @(negedge clk);
    rd_en = 1'b1; rd_bank_id = bank_id_t'(b); rd_bank_addr = bank_addr_t'(a);
    @(negedge clk); rd_en = 1'b0;
    check(rd_valid, "read latency one cycle");
    check(rd_data == ref_mem[b][a], $sformatf("bank %0d line %0d", b, a));
    @(negedge clk);
    check(!rd_valid, "rd_valid is a pulse");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // every bank, first and last line
    for (int b = 0; b < NUM_BANKS; b++) begin
      wr_line(b, 0, {4{$urandom}});
      wr_line(b, BANK_LINES - 1, {$urandom, $urandom, $urandom, $urandom});
    end
    for (int b = 0; b < NUM_BANKS; b++) begin
      rd_check(b, 0);
      rd_check(b, BANK_LINES - 1);
    end
    // random traffic with a write to one bank and a read of another in the same cycle
    for (int k = 0; k < 2000; k++) begin
      automatic int wb = $urandom_range(0, NUM_BANKS - 1), wa = $urandom_range(0, BANK_LINES - 1);
      automatic int rb = $urandom_range(0, NUM_BANKS - 1), ra = $urandom_range(0, BANK_LINES - 1);
      automatic line_t d = {$urandom, $urandom, $urandom, $urandom};
      line_t exp;
      if (!written[rb][ra]) begin rb = wb; ra = 0; end
      if (!written[rb][ra]) rb = 0;
      if (rb == wb && ra == wa) ra = (wa == 0) ? 1 : 0;
      if (!written[rb][ra]) begin rb = 0; ra = 0; end
      if (rb == wb && ra == wa) begin wa = (wa + 1) % BANK_LINES; end
      exp = ref_mem[rb][ra];
      @(negedge clk);
      ram_we = '0; ram_we[wb] = 1'b1; ram_addr = bank_addr_t'(wa); ram_wdata = d;
      rd_en = 1'b1; rd_bank_id = bank_id_t'(rb); rd_bank_addr = bank_addr_t'(ra);
      ref_mem[wb][wa] = d; written[wb][wa] = 1'b1;
      @(negedge clk);
      ram_we = '0; rd_en = 1'b0;
      check(rd_valid && rd_data == exp, $sformatf("mixed traffic read bank %0d line %0d", rb, ra));
    end
    // same line read and written in one cycle returns the old value
    @(negedge clk);
    ram_we = '0; ram_we[20] = 1'b1; ram_addr = '0; ram_wdata = ~ref_mem[20][0];
    rd_en = 1'b1; rd_bank_id = 6'd20; rd_bank_addr = '0;
    @(negedge clk);
    ram_we = '0; rd_en = 1'b0;
    check(rd_data == ref_mem[20][0], "read-before-write");
    ref_mem[20][0] = ~ref_mem[20][0];
    rd_check(20, 0);
    // bank 40 does not exist
    @(negedge clk); rd_en = 1'b1; rd_bank_id = 6'd40; rd_bank_addr = '0;
    @(negedge clk); rd_en = 1'b0;
    check(rd_data == '0, "out-of-range bank reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
