// ddr_model -- behavioural model of shared memory on the data bus.
//
// Answers each accepted read request (req_valid && req_ready) with the line
// tb_ddr_pkg::ddr_line(addr), LATENCY cycles after acceptance, as a
// one-cycle rsp_valid pulse. One request is outstanding at a time. While
// bp_en is high, req_ready is dropped at pseudo-random cycles; the number of
// cycles a request was held back is counted in `stalls`.
// Not synthesizable intent: a test fixture only.
module ddr_model
  import dpu_pkg::*;
  import tb_ddr_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      bp_en,
  input  logic      req_valid,
  output logic      req_ready,
  input  ddr_addr_t req_addr,
  output logic      rsp_valid,
  output line_t     rsp_data,
  output int        stalls
);

  logic        busy;
  int unsigned cnt;
  ddr_addr_t   addr_q;
  logic        ready_q;

  assign req_ready = ready_q && !busy && !rsp_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      addr_q    <= '0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      ready_q   <= 1'b1;
      stalls    <= 0;
    end else begin
      ready_q   <= bp_en ? ($urandom_range(0, 3) != 0) : 1'b1;
      rsp_valid <= 1'b0;
      if (req_valid && !req_ready) stalls <= stalls + 1;
      if (!busy && req_valid && req_ready) begin
        if (LATENCY <= 1) begin
          rsp_valid <= 1'b1;
          rsp_data  <= ddr_line(req_addr);
        end else begin
          busy   <= 1'b1;
          cnt    <= LATENCY - 1;
          addr_q <= req_addr;
        end
      end else if (busy) begin
        if (cnt <= 1) begin
          rsp_valid <= 1'b1;
          rsp_data  <= ddr_line(addr_q);
          busy      <= 1'b0;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

endmodule
