// Checks the AXI master: two clients issue random reads and writes at the
// same time against the DDR model; every read returns the last value
// written to its address, both clients make progress (round robin), and
// each access goes out as one single-beat AXI transaction.
`include "tb_common.svh"
module tb_axi_master;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mem_req_t c_req [2];
  mem_rsp_t c_rsp [2];
  axi_req_t areq; axi_rsp_t arsp;
  logic [31:0] model [int unsigned];
  int done_cnt [2];
  axi_master dut (.clk, .rst_n, .c_req, .c_rsp, .m_axi_req(areq), .m_axi_rsp(arsp));
  axi_ddr_model ddr (.clk, .rst_n, .req(areq), .rsp(arsp));
  `TB_WATCHDOG(100000)
  always @(posedge clk) if (areq.arvalid) `TB_CHECK(areq.arlen == 0 && areq.arsize == 2, "single beat read")
  task automatic client(int c, int n);
    for (int k = 0; k < n; k++) begin
      logic [31:0] a = 32'h1C00_0000 + 32'(c * 256 + 4 * $urandom_range(0, 15));
      logic w = $urandom_range(0, 1);
      logic [31:0] d = $urandom;
      @(negedge clk);
      c_req[c] = '{req: 1'b1, we: w, addr: a, wdata: d};
      @(posedge clk);
      while (!c_rsp[c].ack) @(posedge clk);
      if (w) model[a] = d;
      else `TB_CHECK(c_rsp[c].rdata == (model.exists(a) ? model[a] : 32'h0), "read returns last write")
      `TB_CHECK(!c_rsp[c].err, "no error")
      done_cnt[c]++;
      @(negedge clk);
      c_req[c] = '0;
    end
  endtask
  initial begin
    c_req[0] = '0; c_req[1] = '0; done_cnt[0] = 0; done_cnt[1] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    fork client(0, 200); client(1, 200); join
    `TB_CHECK(done_cnt[0] == 200 && done_cnt[1] == 200, "both clients served")
    `TB_CHECK(ddr.n_reads + ddr.n_writes == 400, "one AXI transaction per access")
    `TB_DONE
  end
endmodule
