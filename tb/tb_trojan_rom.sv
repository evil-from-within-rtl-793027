// tb_trojan_rom -- self-checking test of the trojan line store. Programs
// every line with a distinct pattern through the programming port, reads all
// of them back in random order (asynchronous read, checked in the same cycle
// the address is applied), then overwrites a few lines and checks that only
// those changed.
module tb_trojan_rom;
  import dpu_pkg::*;
  import tb_ddr_pkg::*;
  localparam int N = 128;
  localparam int AW = $clog2(N);
  logic clk = 1'b0, prog_we = 1'b0;
  logic [AW-1:0] prog_addr = '0, rd_addr = '0;
  line_t prog_data = '0, rd_data;
  line_t ref_mem [N];
  int checks = 0, failures = 0;

  trojan_rom dut (.*);

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
    for (int i = 0; i < N; i++) begin
      @(negedge clk); prog_we = 1'b1; prog_addr = AW'(i); prog_data = evil_line(i);
      ref_mem[i] = evil_line(i);
    end
    @(negedge clk); prog_we = 1'b0;
    for (int k = 0; k < 4 * N; k++) begin
      automatic int a = $urandom_range(0, N - 1);
      rd_addr = AW'(a); #1;
      check(rd_data == ref_mem[a], $sformatf("read line %0d", a));
      @(negedge clk);
    end
    for (int k = 0; k < 8; k++) begin
      automatic int a = $urandom_range(0, N - 1);
      @(negedge clk); prog_we = 1'b1; prog_addr = AW'(a); prog_data = ~evil_line(1000 + k);
      ref_mem[a] = ~evil_line(1000 + k);
    end
    @(negedge clk); prog_we = 1'b0;
    for (int i = 0; i < N; i++) begin
      rd_addr = AW'(i); #1;
      check(rd_data == ref_mem[i], $sformatf("after rewrite line %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
