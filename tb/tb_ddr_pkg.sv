// tb_ddr_pkg -- test data shared by the testbenches.
//
// ddr_line(addr) is the content of the 16-byte line at byte address addr of
// the simulated shared memory: a fixed mix of the address, so that every line
// differs and a reference model can recompute it. evil_line(k) is the k-th
// replacement line programmed into the trojan ROM; it never equals a
// ddr_line because its top byte is 8'hEE, while a ddr_line's top byte is
// forced to differ from it.
package tb_ddr_pkg;
  import dpu_pkg::*;

  function automatic line_t ddr_line(ddr_addr_t addr);
    logic [31:0] a, h;
    line_t l;
    a = addr;
    h = a * 32'h9E37_79B9 + 32'h7F4A_7C15;
    l = {a ^ 32'hA5A5_0000, h, ~a, h ^ {a[15:0], a[31:16]}};
    if (l[127:120] == 8'hEE) l[127:120] = 8'h11;
    return l;
  endfunction

  function automatic line_t evil_line(int unsigned k);
    logic [31:0] v;
    v = k * 32'h0101_0107 + 32'h00C0_FFEE;
    return {8'hEE, v[23:0], v, ~v, v ^ 32'h5555_AAAA};
  endfunction

endpackage
