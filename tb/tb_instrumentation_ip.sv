// Checks the instrumentation IP: AXI4-Lite writes (the r9 stores) come out
// of the custom interface in order; the status read returns the fill
// level; a write into a full FIFO is held until the coprocessor pops.
`include "tb_common.svh"
module tb_instrumentation_ip;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t req; axil_rsp_t rsp;
  logic instr_valid, instr_pop = 0;
  logic [31:0] instr_data, rd;
  logic [31:0] sent [$];
  instrumentation_ip dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .instr_valid, .instr_data, .instr_pop);
  axil_master_bfm bfm (.clk, .req, .rsp);
  `TB_WATCHDOG(40000)
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    `TB_CHECK(!instr_valid, "empty after reset")
    for (int i = 0; i < 10; i++) begin
      automatic logic [31:0] v = 32'h7EF0_0000 + 32'(i * 4);
      bfm.write(32'h0, v); sent.push_back(v);
    end
    bfm.read(32'h0, rd);
    `TB_CHECK(rd == 10, "fill level 10")
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      `TB_CHECK(instr_valid && instr_data == sent[i], $sformatf("word %0d", i))
      instr_pop = 1; @(negedge clk); instr_pop = 0;
    end
    `TB_CHECK(!instr_valid, "drained")
    // fill to 64, then a 65th write must wait for a pop
    for (int i = 0; i < 64; i++) bfm.write(32'h0, 32'(i));
    `TB_CHECK(dut.u_fifo.full, "full at 64")
    fork
      bfm.write(32'h0, 32'hDEAD_BEEF);
      begin
        repeat (20) @(negedge clk);
        `TB_CHECK(dut.u_fifo.count == 64, "65th write held back")
        instr_pop = 1; @(negedge clk); instr_pop = 0;
      end
    join
    bfm.read(32'h0, rd);
    `TB_CHECK(rd == 64, "refilled after pop")
    for (int i = 1; i < 64; i++) begin
      `TB_CHECK(instr_data == 32'(i), "order after refill")
      instr_pop = 1; @(negedge clk); instr_pop = 0;
    end
    `TB_CHECK(instr_data == 32'hDEAD_BEEF, "held write delivered last")
    `TB_DONE
  end
endmodule
