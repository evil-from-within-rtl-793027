// tb_trojan_addr_match -- self-checking test of the target-address table.
// After reset no address may hit (dormant trojan). Then entries are
// programmed with random addresses, masks and ROM bases; every programmed
// address must hit with its own mask and base, random other addresses must
// miss, an entry programmed invalid must not hit, two entries with the same
// address resolve to the lower index, and reset makes the table dormant again.
module tb_trojan_addr_match;
  import dpu_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0, prog_we = 1'b0, hit;
  logic [3:0] prog_idx = '0;
  target_t prog_entry = '0;
  ddr_addr_t query_addr = '0;
  logic [MAX_LOAD_LINES-1:0] line_mask;
  logic [ROM_PTR_W-1:0] rom_base;
  target_t ref_t [N];
  int checks = 0, failures = 0;

  trojan_addr_match dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit in_table(ddr_addr_t a);
    for (int i = 0; i < N; i++) if (ref_t[i].valid && ref_t[i].ddr_addr == a) return 1'b1;
    return 1'b0;
  endfunction

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
    for (int k = 0; k < 50; k++) begin
      query_addr = $urandom; #1;
      check(!hit, "dormant after reset");
      @(negedge clk);
    end
    query_addr = '0; #1; check(!hit, "dormant at address 0");
    for (int i = 0; i < N; i++) begin
      ref_t[i].valid     = (i != 5);
      ref_t[i].ddr_addr  = {$urandom} & 32'hFFFF_FFF0;
      ref_t[i].line_mask = {$urandom, $urandom};
      ref_t[i].rom_base  = ROM_PTR_W'($urandom_range(0, 127));
      @(negedge clk); prog_we = 1'b1; prog_idx = 4'(i); prog_entry = ref_t[i];
    end
    @(negedge clk); prog_we = 1'b0;
    for (int i = 0; i < N; i++) begin
      query_addr = ref_t[i].ddr_addr; #1;
      if (i == 5) check(!hit || in_table(query_addr), "invalid entry must not hit");
      else begin
        check(hit, $sformatf("entry %0d hit", i));
        check(line_mask == ref_t[i].line_mask, $sformatf("entry %0d mask", i));
        check(rom_base == ref_t[i].rom_base, $sformatf("entry %0d base", i));
      end
      @(negedge clk);
    end
    for (int k = 0; k < 200; k++) begin
      query_addr = $urandom; #1;
      check(hit == in_table(query_addr), "random query");
      @(negedge clk);
    end
    // duplicate address: entry 3 and entry 9, lower index wins
    ref_t[9].ddr_addr = ref_t[3].ddr_addr;
    @(negedge clk); prog_we = 1'b1; prog_idx = 4'd9; prog_entry = ref_t[9];
    @(negedge clk); prog_we = 1'b0;
    query_addr = ref_t[3].ddr_addr; #1;
    check(hit && line_mask == ref_t[3].line_mask && rom_base == ref_t[3].rom_base, "priority");
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      query_addr = ref_t[i].ddr_addr; #1;
      check(!hit, "dormant after second reset");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
