// Checks the process mappings IP: 64 registers written over AXI4-Lite are
// read back over AXI4-Lite and over the custom index port, with the unused
// bits masked.
`include "tb_common.svh"
module tb_process_mappings_ip;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t req; axil_rsp_t rsp;
  logic [5:0] map_idx = 0;
  logic [31:0] map_data, rd;
  logic [31:0] model [64];
  process_mappings_ip dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .map_idx, .map_data);
  axil_master_bfm bfm (.clk, .req, .rsp);
  `TB_WATCHDOG(40000)
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    #1 `TB_CHECK(map_data == 0, "zero after reset")
    for (int i = 0; i < 64; i++) begin
      automatic logic [31:0] v = $urandom;
      bfm.write(32'(4 * i), v);
      model[i] = v & 32'hC00F_FFFF;
    end
    for (int i = 0; i < 64; i++) begin
      bfm.read(32'(4 * i), rd);
      `TB_CHECK(rd == model[i], $sformatf("AXI read %0d", i))
      map_idx = 6'(63 - i); #1;
      `TB_CHECK(map_data == model[63 - i], $sformatf("port read %0d", 63 - i))
    end
    `TB_DONE
  end
endmodule
