// tb_trojan_shift_reg -- self-checking test of the trojan's line-mask shift
// register. Loads random masks, shifts them out bit by bit and compares
// bit_out with a reference shift of the loaded value (bit n of the mask must
// appear after n shifts, zeros afterwards). Also checks that load overrides
// shift, that holding neither input keeps the value and that reset clears it.
module tb_trojan_shift_reg;
  localparam int W = 64;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, shift = 1'b0, bit_out;
  logic [W-1:0] load_val = '0;
  int checks = 0, failures = 0;

  trojan_shift_reg dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] m;
    repeat (2) @(posedge clk);
    #1 check(bit_out == 1'b0, "reset value");
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      m = {$urandom, $urandom};
      if (t == 0) m = 64'h8000_0000_0000_0001;
      @(negedge clk); load = 1'b1; load_val = m;
      @(negedge clk); load = 1'b0;
      for (int n = 0; n < W + 4; n++) begin
        check(bit_out == ((n < W) ? m[n] : 1'b0), $sformatf("mask %h bit %0d", m, n));
        // hold for a cycle now and then: value must not move
        if (n % 7 == 3) begin
          @(negedge clk);
          check(bit_out == ((n < W) ? m[n] : 1'b0), "hold");
        end
        shift = 1'b1;
        @(negedge clk); shift = 1'b0;
      end
    end
    // load has priority over shift
    @(negedge clk); load = 1'b1; shift = 1'b1; load_val = 64'h2;
    @(negedge clk); load = 1'b0; shift = 1'b0;
    check(bit_out == 1'b0, "load priority bit0");
    shift = 1'b1; @(negedge clk); shift = 1'b0;
    check(bit_out == 1'b1, "load priority bit1");
    // synchronous reset
    load = 1'b1; load_val = '1; @(negedge clk); load = 1'b0;
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    check(bit_out == 1'b0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
