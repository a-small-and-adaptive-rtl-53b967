// Checks the TMC on a directed annotation program that exercises every
// annotation type of the annotation table: tag initialisation, runtime and
// compile-time Tag ALU, runtime and compile-time load/store through a GRF
// address, compound forms through the instrumentation FIFO (delivered late
// to force execute stalls), a read() message (TagTRK over a 16-byte buffer),
// TagKTR towards the kernel, compile-time CHECK and runtime TCR checks
// (violations and irq), floating-point tag registers and a TMMU miss. The
// tag memory is a bus model with random latency. Expected register and
// memory contents are worked out by hand below from the annotation table.
`include "tb_common.svh"
module tb_tmc;
  import dift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ann_valid, ann_pop, instr_valid, instr_pop, msg_valid = 0, msg_ready;
  logic [31:0] ann_data, instr_data;
  tag_t msg_tag = 0; logic [31:0] msg_addr = 0, msg_len = 0;
  logic kern_tag_we, kern_req_ack; tag_t kern_tag;
  mem_req_t mreq; mem_rsp_t mrsp;
  logic cfg_we = 0; logic [3:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic tmmu_flush = 0, tmmu_we = 0, tmmu_wpage = 0;
  logic [5:0] tmmu_widx = 0; logic [19:0] tmmu_wvpn = 0, tmmu_wppn = 0;
  logic irq, violation, tmmu_miss, idle;
  logic [31:0] viol_ann, viol_count, executed;

  logic [31:0] annq [$], instrq [$];
  logic [31:0] tagmem [int unsigned];
  int cnt = 0, n_hazard = 0, n_exstall = 0, n_memstall = 0, n_ktr = 0;
  tag_t last_ktag;
  bit instr_enable = 0;

  tmc dut (.clk, .rst_n, .ann_valid, .ann_data, .ann_pop, .instr_valid, .instr_data, .instr_pop,
    .msg_valid, .msg_tag, .msg_addr, .msg_len, .msg_ready, .kern_tag_we, .kern_tag, .kern_req_ack,
    .mem_req(mreq), .mem_rsp(mrsp), .cfg_we, .cfg_addr, .cfg_wdata, .tmmu_flush, .tmmu_we,
    .tmmu_widx, .tmmu_wvpn, .tmmu_wppn, .tmmu_wpage, .irq, .violation, .tmmu_miss, .viol_ann,
    .viol_count, .executed, .idle);

  assign ann_valid   = annq.size() != 0;
  assign ann_data    = ann_valid ? annq[0] : '0;
  assign instr_valid = instr_enable && instrq.size() != 0;
  assign instr_data  = instrq.size() != 0 ? instrq[0] : '0;
  // queues are popped just after the edge so the DUT samples the old head
  always @(posedge clk) begin
    automatic bit pa = ann_pop && ann_valid;
    automatic bit pi = instr_pop && instr_valid;
    #1;
    if (pa) void'(annq.pop_front());
    if (pi) void'(instrq.pop_front());
  end
  always @(posedge clk) begin
    if (dut.hazard) n_hazard++;
    if (dut.ex_stall) n_exstall++;
    if (dut.mem_stall) n_memstall++;
    if (kern_tag_we) begin n_ktr++; last_ktag = kern_tag; end
    if (msg_ready) msg_valid <= 1'b0;
  end

  initial mrsp = '0;
  always @(negedge clk) begin
    if (mrsp.ack) mrsp.ack = 1'b0;
    else if (mreq.req) begin
      if (cnt == 0) cnt = $urandom_range(1, 4);
      else begin
        cnt--;
        if (cnt == 0) begin
          mrsp.ack = 1'b1;
          if (mreq.we) tagmem[mreq.addr] = mreq.wdata;
          else mrsp.rdata = tagmem.exists(mreq.addr) ? tagmem[mreq.addr] : 32'h0;
        end
      end
    end
  end

  function automatic logic [31:0] tm(logic [31:0] a);
    return tagmem.exists(a) ? tagmem[a] : 32'h0;
  endfunction

  task automatic cfg(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  task automatic map(int i, logic [19:0] vpn, logic [19:0] ppn, logic page);
    @(negedge clk); tmmu_we = 1; tmmu_widx = 6'(i); tmmu_wvpn = vpn; tmmu_wppn = ppn; tmmu_wpage = page;
    @(negedge clk); tmmu_we = 0;
  endtask

  `TB_WATCHDOG(20000)

  initial begin
    logic [31:0] fail16;
    repeat (3) @(negedge clk); rst_n = 1;
    map(0, 20'h7EFFF, 20'h1C000, 1'b0);      // stack page, one tag per word
    map(1, 20'h00011, 20'h1C001, 1'b1);      // data page, one tag per page
    cfg(0, TOP_OR); cfg(1, TOP_OR); cfg(2, TOP_COPY); cfg(3, TOP_OR);
    cfg(4 + CL_BR, 32'h80);                  // TCR[branch]: bit 7 must not reach a branch
    instrq = '{32'h7EFF_F020, 32'h7EFF_F024};
    annq = '{
      enc_imm(T(1), 17'd5),                               //  1 T1 = 5
      enc_alu(OP_TAGRR, 3'd0, T(2), T(1), 7'd0),          //  2 T2 = T1
      enc_imm(T(3), 17'h30),                              //  3 T3 = 0x30
      enc_alu(OP_TAGRRR, CL_ALU, T(4), T(2), T(3)),       //  4 T4 = T2 OR T3 (TPR) = 0x35
      enc_alu(OP_TAGRRR2, TOP_AND, T(5), T(4), T(3)),     //  5 T5 = 0x30
      enc_imm(G(1), 17'h7EFF, 2'd2),                      //  6 G1 = 0x7EFF0000
      enc_imm(G(2), 17'hF010),                            //  7 G2 = 0xF010
      enc_alu(OP_TAGRRR2, TOP_OR, G(1), G(1), G(2)),      //  8 G1 = 0x7EFFF010
      enc_mem(OP_TAGMTR2, 3'd0, T(4), G(1), 10'd4),       //  9 Mem[0x7EFFF014] = 0x35
      enc_mem(OP_TAGTRM2, 3'd0, T(6), G(1), 10'd4),       // 10 T6 = 0x35
      enc_mem(OP_TAGITR, CL_LDST, T(3), T(1), 10'd0),     // 11 Mem[instr 0x7EFFF020] = T3 OR T1
      enc_mem(OP_TAGTRI2, 3'd0, T(7), 7'd0, 10'h3FC),     // 12 T7 = Mem[instr 0x7EFFF024 - 4]
      enc_imm(G(3), 17'h11ABC),                           // 13 G3 = 0x11ABC
      enc_mem(OP_TAGMR, 3'd0, T(2), G(3), 10'd0),         // 14 Mem[0x11ABC] = T2 (page tag)
      enc_alu(OP_TAGTRK, 3'd0, T(8), 7'd0, 7'd0),         // 15 T8 = read() tag, buffer tagged
      enc_alu(OP_TAGKTR, 3'd0, T(8), 7'd0, 7'd0),         // 16 kernel gets T8
      enc_alu(OP_TAGRRR2, TOP_CHECK, T(0), T(8), T(3)),   // 17 0x80 & 0x30 = 0: passes
      enc_alu(OP_TAGRRR, CL_BR, T(9), T(8), T(0)),        // 18 T9 = T8, TCR[br] hit: violation
      enc_alu(OP_TAGRRR2, TOP_CHECK, T(0), T(1), T(4)),   // 19 5 & 0x35 != 0: violation
      enc_alu(OP_TAGRR, 3'd0, S(3), T(4), 7'd0),          // 20 S3 = 0x35
      enc_mem(OP_TAGTRM, CL_FPLS, S(4), G(3), 10'd0),     // 21 S4 = Mem[0x11ABC] OR 0 = 5
      enc_mem(OP_TAGMTR2, 3'd0, T(1), G(2), 10'd0)        // 22 0xF010 unmapped: TMMU miss
    };
    fail16 = enc_alu(OP_TAGRRR2, TOP_CHECK, T(0), T(1), T(4));
    msg_tag = 32'h80; msg_addr = 32'h7EFF_F100; msg_len = 32'd16;
    repeat (30) @(negedge clk);
    instr_enable = 1;                       // instrumentation words arrive late
    msg_valid = 1;
    while (!(idle && annq.size() == 0)) @(negedge clk);
    repeat (3) @(negedge clk);
    `TB_CHECK(dut.trf[1] == 5 && dut.trf[2] == 5 && dut.trf[3] == 32'h30, "tag initialisation")
    `TB_CHECK(dut.trf[4] == 32'h35, "runtime ALU uses TPR")
    `TB_CHECK(dut.trf[5] == 32'h30, "compile-time AND")
    `TB_CHECK(dut.grf[1] == 32'h7EFF_F010, "GRF built from immediates")
    `TB_CHECK(tm(32'h1C00_0014) == 32'h35, "TagMTR2 through TMMU (word)")
    `TB_CHECK(dut.trf[6] == 32'h35, "TagTRM2 reads it back")
    `TB_CHECK(tm(32'h1C00_0020) == 32'h35, "TagITR with address tag (pointer policy)")
    `TB_CHECK(dut.trf[7] == 32'h35, "TagTRI2 offset -4")
    `TB_CHECK(tm(32'h1C00_1000) == 5, "TagMR page-granular")
    for (int w = 0; w < 4; w++)
      `TB_CHECK(tm(32'h1C00_0100 + 32'(4 * w)) == 32'h80, $sformatf("read() buffer word %0d tagged", w))
    `TB_CHECK(tm(32'h1C00_0110) == 0, "word after read() buffer untouched")
    `TB_CHECK(dut.trf[8] == 32'h80, "TagTRK destination")
    `TB_CHECK(n_ktr == 1 && last_ktag == 32'h80, "TagKTR to kernel")
    `TB_CHECK(dut.trf[9] == 32'h80, "runtime branch copy")
    `TB_CHECK(viol_count == 2 && violation && irq, "two violations, irq")
    `TB_CHECK(viol_ann == fail16, "last failing annotation recorded")
    `TB_CHECK(dut.trf_fp[3] == 32'h35 && dut.trf_fp[4] == 5, "floating-point tag registers")
    `TB_CHECK(tmmu_miss, "TMMU miss flagged")
    `TB_CHECK(executed == 22, $sformatf("22 annotations executed (%0d)", executed))
    `TB_CHECK(n_hazard > 0 && n_exstall > 0 && n_memstall > 0, "interlock, execute and memory stalls")
    cfg(8, 0);
    `TB_CHECK(!irq, "flags cleared")
    `TB_DONE
  end
endmodule
