// Checks the decoded trace memory: random writes, synchronous read one
// cycle after re, read data held while re is low, simultaneous read/write.
`include "tb_common.svh"
module tb_trace_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 2048;
  logic we = 0, re = 0;
  logic [10:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [D];
  trace_mem dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  `TB_WATCHDOG(20000)
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 11'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 500; k++) begin
      automatic int a = $urandom_range(0, D-1);
      @(negedge clk); re = 1; raddr = 11'(a);
      // write elsewhere at the same time
      we = 1; waddr = 11'((a + 7) % D); wdata = $urandom;
      @(posedge clk); #1;
      model[(a + 7) % D] = wdata;
      `TB_CHECK(rdata == model[a], $sformatf("read %0d", a))
      re = 0; we = 0;
      @(negedge clk);
      `TB_CHECK(rdata == model[a], "read data held")
    end
    `TB_DONE
  end
endmodule
