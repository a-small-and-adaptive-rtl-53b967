// Checks RFBlare PS2PL: three-word read() messages written by the kernel
// come out as one message (tag, address, length), in order, and a message
// is held until msg_ready. A second phase streams 200 random messages
// against a consumer that is often not ready, so the FIFO fills and the
// AXI-Lite writes are held; every message must arrive intact and in order.
`include "tb_common.svh"
module tb_rfblare_ps2pl;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axil_req_t req; axil_rsp_t rsp;
  logic msg_valid, msg_ready = 0;
  tag_t msg_tag;
  logic [31:0] msg_addr, msg_len;
  rfblare_ps2pl dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp),
                     .msg_valid, .msg_tag, .msg_addr, .msg_len, .msg_ready);
  axil_master_bfm bfm (.clk, .req, .rsp);
  `TB_WATCHDOG(40000)
  initial begin
    logic [31:0] t [5], a [5], l [5];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 5; m++) begin
      t[m] = $urandom; a[m] = $urandom; l[m] = $urandom_range(1, 4096);
      bfm.write(32'h0, t[m]); bfm.write(32'h0, a[m]);
      if (m == 0) `TB_CHECK(!msg_valid, "no message after two words")
      bfm.write(32'h0, l[m]);
    end
    for (int m = 0; m < 5; m++) begin
      repeat (4) @(negedge clk);
      `TB_CHECK(msg_valid && msg_tag == t[m] && msg_addr == a[m] && msg_len == l[m],
                $sformatf("message %0d", m))
      msg_ready = 1; @(negedge clk); msg_ready = 0;
    end
    repeat (5) @(negedge clk);
    `TB_CHECK(!msg_valid, "all messages consumed")
    begin
      logic [31:0] q [$];
      int got = 0, held = 0;
      fork
        for (int m = 0; m < 200; m++) begin
          automatic logic [31:0] tt = $urandom, aa = $urandom, ll = $urandom;
          q.push_back(tt); q.push_back(aa); q.push_back(ll);
          bfm.write(32'h0, tt); bfm.write(32'h0, aa); bfm.write(32'h0, ll);
        end
        while (got < 200) begin
          @(negedge clk);
          msg_ready = ($urandom_range(0, 7) == 0);
          if (msg_valid && msg_ready) begin
            `TB_CHECK(msg_tag == q[0] && msg_addr == q[1] && msg_len == q[2], $sformatf("stream message %0d", got))
            void'(q.pop_front()); void'(q.pop_front()); void'(q.pop_front());
            got++;
          end
          if (req.awvalid && !rsp.awready) held++;
        end
      join
      msg_ready = 0;
      `TB_CHECK(held > 0, "writes held while the FIFO is full")
    end
    `TB_DONE
  end
endmodule
