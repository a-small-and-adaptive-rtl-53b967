// Checks the PFT decoder.
// 1. The trace printed in the paper's decoded-trace figure (A-sync, I-sync
//    packets with context IDs 0x0004d242 and 0x0004d342, branch packets
//    95 04 / e5 03 / fd 03) must give the nine stored addresses printed
//    there: 00010574 00010428 00010584 000103c8 00010598 000103f8 for the
//    first thread and 00010575 00010429 00010585 for the second.
// 2. Random branch packets of 1..5 bytes, produced by an independent
//    encoder, interleaved with ignored single-byte packets and context-ID
//    packets, must decode to the encoded addresses and thread numbers.
// 3. A second instance with a 16-entry ring never drained must raise
//    overflow and drop the entries beyond 16.
`include "tb_common.svh"
module tb_pft_decoder;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic trace_valid = 0;
  logic [7:0] trace_data = 0;
  logic tm_we, tm_we_s, overflow, overflow_s;
  logic [10:0] tm_waddr;
  logic [3:0] tm_waddr_s;
  logic [31:0] tm_wdata, tm_wdata_s, wr_count, wr_count_s;
  logic [31:0] rd_count;
  logic [31:0] ctx_id [N_CTX], ctx_id_s [N_CTX];
  logic [N_CTX-1:0] ctx_valid, ctx_valid_s;
  logic [1:0] cur_thread, cur_thread_s;
  logic [31:0] got [$];
  int unsigned n_small = 0;

  pft_decoder dut (.clk, .rst_n, .trace_valid, .trace_data, .tm_we, .tm_waddr, .tm_wdata,
    .wr_count, .rd_count, .overflow, .clear_overflow(1'b0), .ctx_id, .ctx_valid, .cur_thread);
  pft_decoder #(.DEPTH(16)) dut_s (.clk, .rst_n, .trace_valid, .trace_data, .tm_we(tm_we_s),
    .tm_waddr(tm_waddr_s), .tm_wdata(tm_wdata_s), .wr_count(wr_count_s), .rd_count(32'd0),
    .overflow(overflow_s), .clear_overflow(1'b0), .ctx_id(ctx_id_s), .ctx_valid(ctx_valid_s),
    .cur_thread(cur_thread_s));

  always @(posedge clk) begin
    if (tm_we) begin
      got.push_back(tm_wdata);
      `TB_CHECK(tm_waddr == wr_count[10:0], "write address follows count")
    end
    if (tm_we_s) n_small++;
  end
  assign rd_count = wr_count;   // consumer keeps up for the main instance

  task automatic send(logic [7:0] b);
    @(negedge clk); trace_valid = 1; trace_data = b;
    @(negedge clk); trace_valid = 0;
  endtask

  // independent branch packet encoder (ARM state)
  task automatic send_branch(logic [31:0] prev, logic [31:0] a);
    int n;
    if (a[31:29] != prev[31:29])      n = 5;
    else if (a[28:22] != prev[28:22]) n = 4;
    else if (a[21:15] != prev[21:15]) n = 3;
    else if (a[14:8] != prev[14:8])   n = 2;
    else                              n = 1;
    send({n > 1, a[7:2], 1'b1});
    if (n > 1) send({n > 2, a[14:8]});
    if (n > 2) send({n > 3, a[21:15]});
    if (n > 3) send({n > 4, a[28:22]});
    if (n > 4) send({5'b00000, a[31:29]});
  endtask

  task automatic send_isync(logic [31:0] a, logic [31:0] ctx);
    send(8'h08); send(a[7:0]); send(a[15:8]); send(a[23:16]); send(a[31:24]);
    send(8'h21);
    send(ctx[7:0]); send(ctx[15:8]); send(ctx[23:16]); send(ctx[31:24]);
  endtask

  `TB_WATCHDOG(200000)

  initial begin
    logic [7:0] fig [] = '{
      8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h80, 8'h08, 8'h74, 8'h05, 8'h01, 8'h00, 8'h21, 8'h42, 8'hd2, 8'h04, 8'h00,
      8'h95, 8'h04, 8'h08, 8'h84, 8'h05, 8'h01, 8'h00, 8'h21, 8'h42, 8'hd2, 8'h04, 8'h00, 8'he5, 8'h03, 8'h08, 8'h98,
      8'h05, 8'h01, 8'h00, 8'h21, 8'h42, 8'hd2, 8'h04, 8'h00, 8'hfd, 8'h03, 8'h08, 8'h74, 8'h05, 8'h01, 8'h00, 8'h21,
      8'h42, 8'hd3, 8'h04, 8'h00, 8'h95, 8'h04, 8'h08, 8'h84, 8'h05, 8'h01, 8'h00, 8'h21, 8'h42, 8'hd3, 8'h04, 8'h00};
    logic [31:0] expv [] = '{32'h00010574, 32'h00010428, 32'h00010584, 32'h000103c8, 32'h00010598,
                             32'h000103f8, 32'h00010575, 32'h00010429, 32'h00010585};
    logic [31:0] exp_q [$];
    logic [31:0] prev;
    int thr;
    repeat (3) @(negedge clk); rst_n = 1;
    // bytes before the first A-sync are ignored
    send(8'h95); send(8'h04); send(8'h08);
    foreach (fig[i]) send(fig[i]);
    repeat (3) @(negedge clk);
    `TB_CHECK(got.size() == 9, $sformatf("figure trace gives 9 entries (got %0d)", got.size()))
    foreach (expv[i]) if (i < got.size())
      `TB_CHECK(got[i] == expv[i], $sformatf("figure entry %0d: %08h expected %08h", i, got[i], expv[i]))
    `TB_CHECK(ctx_valid == 4'b0011 && ctx_id[0] == 32'h0004d242 && ctx_id[1] == 32'h0004d342,
              "context ID registers")
    // random traffic
    got.delete();
    prev = 32'h00010584; thr = 1;
    for (int k = 0; k < 300; k++) begin
      automatic int r = $urandom_range(0, 9);
      if (r == 0) begin
        send(8'h66);                                 // ignore packet
      end else if (r == 1) begin
        thr = $urandom_range(0, 1);                  // context ID packet, known thread
        send(8'h6E); send(8'h42); send(thr ? 8'hd3 : 8'hd2); send(8'h04); send(8'h00);
      end else begin
        automatic logic [31:0] a = {$urandom} & 32'hFFFF_FFFC;
        if (r < 6) a = (prev & 32'hFFFF_C000) | (a & 32'h0000_3FFC);   // short packets
        send_branch(prev, a);
        prev = a;
        exp_q.push_back({a[31:2], 2'(thr)});
      end
    end
    repeat (3) @(negedge clk);
    `TB_CHECK(got.size() == exp_q.size(), "random: entry count")
    foreach (exp_q[i]) if (i < got.size())
      `TB_CHECK(got[i] == exp_q[i], $sformatf("random entry %0d", i))
    // a third context gets thread 2
    send_isync(32'h0002_0000, 32'h0000_0777);
    repeat (2) @(negedge clk);
    `TB_CHECK(got[$] == 32'h0002_0002 && ctx_id[2] == 32'h777, "third context is thread 2")
    `TB_CHECK(overflow_s && n_small == 16 && !overflow, "16-entry ring overflows, full one does not")
    `TB_DONE
  end
endmodule
