// tb_write_ctrl -- self-checking test of the LOAD engine's write controller.
// Drives random line writes (valid and idle cycles, bank ids 0..63) and
// checks one cycle later that exactly the addressed bank's enable is set,
// address and data are passed unchanged, no enable is set for idle cycles,
// and bank ids beyond 33 raise wr_err instead of an enable.
module tb_write_ctrl;
  import dpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  line_wr_t wr = '0;
  logic [NUM_BANKS-1:0] ram_we;
  bank_addr_t ram_addr;
  line_t ram_wdata;
  logic wr_err;
  int checks = 0, failures = 0;

  write_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2000; k++) begin
      wr.valid     = ($urandom_range(0, 3) != 0);
      wr.bank_id   = (k < 64) ? bank_id_t'(k) : bank_id_t'($urandom_range(0, 40));
      wr.bank_addr = bank_addr_t'($urandom);
      wr.data      = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      // one clock edge has passed: outputs reflect `wr`
      if (wr.valid && int'(wr.bank_id) < NUM_BANKS) begin
        logic [NUM_BANKS-1:0] exp;
        exp = '0; exp[wr.bank_id] = 1'b1;
        check(ram_we == exp, $sformatf("one-hot enable for bank %0d", wr.bank_id));
        check(ram_addr == wr.bank_addr, "address");
        check(ram_wdata == wr.data, "data");
        check(!wr_err, "no error for a valid bank");
      end else begin
        check(ram_we == '0, "no enable");
        check(wr_err == (wr.valid && int'(wr.bank_id) >= NUM_BANKS), "error flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
