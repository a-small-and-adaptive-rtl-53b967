// Checks RFBlare PL2PS: the kernel's write() request (address, size) is
// visible to the coprocessor until acknowledged; a tag returned by the
// coprocessor is flagged to the kernel and the flag clears on reading it.
`include "tb_common.svh"
module tb_rfblare_pl2ps;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t req; axil_rsp_t rsp;
  logic req_valid, req_ack = 0, tag_we = 0;
  logic [31:0] req_addr, req_len, rd;
  tag_t tag_in = 0;
  rfblare_pl2ps dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .req_valid, .req_addr,
                     .req_len, .req_ack, .tag_we, .tag_in);
  axil_master_bfm bfm (.clk, .req, .rsp);
  `TB_WATCHDOG(40000)
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      automatic logic [31:0] a = $urandom, l = $urandom_range(1, 1000), t = $urandom;
      bfm.write(32'h0, a);
      `TB_CHECK(!req_valid, "request not valid before size")
      bfm.write(32'h4, l);
      `TB_CHECK(req_valid && req_addr == a && req_len == l, "request seen")
      bfm.read(32'h8, rd);
      `TB_CHECK(rd == 32'h2, "status: request pending, no tag")
      @(negedge clk); req_ack = 1; tag_we = 1; tag_in = t; @(negedge clk); req_ack = 0; tag_we = 0;
      `TB_CHECK(!req_valid, "request acknowledged")
      bfm.read(32'h8, rd);
      `TB_CHECK(rd == 32'h1, "status: tag waiting")
      bfm.read(32'hC, rd);
      `TB_CHECK(rd == t, "tag returned")
      bfm.read(32'h8, rd);
      `TB_CHECK(rd == 32'h0, "tag flag cleared by read")
    end
    `TB_DONE
  end
endmodule
