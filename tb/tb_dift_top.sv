// End-to-end test of the whole programmable-logic design at its default
// sizes. The testbench plays the ARM side: the ELF loader fills the process
// mappings, the kernel posts a read() message (file tag 1 on a 64-byte
// buffer at 0x21000) and a write() request, the instrumented application
// stores sp and r2 through r9 (late, so the TMC waits for them), and the
// PTM trace, in PFT format, visits five basic blocks: the read() return
// site 0x10200, the two blocks of the instrumented example (0x10168 and
// 0x10188: movw/movt r0, str r0,[sp,#4], ldr r1,[r2],#4, bxls lr), the
// write() site 0x10300 and 0x10400, which moves r1 into lr and returns
// through it. A last I-sync comes from a second thread.
// The dispatcher runs a real dispatch program (MIPS code below): it fills
// the TMMU from the process mappings, sets TPR/TCR, then for each decoded
// trace entry looks up the block's annotation list in DDR and copies it to
// the annotations memory. Expected outcome, worked out from the annotation
// semantics: the buffer's tags become 1, r1 loaded from it gets tag 1, the
// kernel receives tag 1 for write(), and the branch through lr (tag 1,
// TCR[branch] = 1) raises the interrupt. Every mechanism is counted and
// must occur at least once.
`include "tb_common.svh"
module tb_dift_top;
  import dift_pkg::*;
  import mips_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trace_valid = 0; logic [7:0] trace_data = 0;
  axil_req_t instr_req, map_req, ps2pl_req, pl2ps_req;
  axil_rsp_t instr_rsp, map_rsp, ps2pl_rsp, pl2ps_rsp;
  axi_req_t  axi_req; axi_rsp_t axi_rsp;
  logic run = 0, imem_we = 0; logic [9:0] imem_waddr = 0; logic [31:0] imem_wdata = 0;
  logic irq, trace_overflow;
  logic [31:0] ctx_id [N_CTX]; logic [N_CTX-1:0] ctx_valid;
  logic [31:0] tmc_executed, tmc_viol_count, disp_retired;

  dift_top dut (.clk, .rst_n, .trace_valid, .trace_data,
    .s_instr_req(instr_req), .s_instr_rsp(instr_rsp), .s_map_req(map_req), .s_map_rsp(map_rsp),
    .s_ps2pl_req(ps2pl_req), .s_ps2pl_rsp(ps2pl_rsp), .s_pl2ps_req(pl2ps_req), .s_pl2ps_rsp(pl2ps_rsp),
    .m_axi_req(axi_req), .m_axi_rsp(axi_rsp), .run, .imem_we, .imem_waddr, .imem_wdata,
    .irq, .ctx_id, .ctx_valid, .trace_overflow, .tmc_executed, .tmc_viol_count, .disp_retired);

  axi_ddr_model ddr (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp));
  axil_master_bfm b_instr (.clk, .req(instr_req), .rsp(instr_rsp));
  axil_master_bfm b_map   (.clk, .req(map_req),   .rsp(map_rsp));
  axil_master_bfm b_ps2pl (.clk, .req(ps2pl_req), .rsp(ps2pl_rsp));
  axil_master_bfm b_pl2ps (.clk, .req(pl2ps_req), .rsp(pl2ps_rsp));

  // mechanism counters
  int n_disp_stall = 0, n_push = 0, n_hazard = 0, n_exstall = 0, n_memstall = 0;
  int n_tagwr = 0, n_tagrd = 0, n_ktr = 0, n_trk = 0, n_thread1 = 0, n_tmmu_fill = 0, n_arb = 0;
  always @(posedge clk) begin
    if (dut.u_cop.u_disp.mem_stall) n_disp_stall++;
    if (dut.u_cop.u_ann.wr_en && !dut.u_cop.u_ann.full) n_push++;
    if (dut.u_cop.u_tmc.hazard) n_hazard++;
    if (dut.u_cop.u_tmc.ex_stall) n_exstall++;
    if (dut.u_cop.u_tmc.mem_stall) n_memstall++;
    if (dut.u_cop.t_rsp.ack && dut.u_cop.t_req.we) n_tagwr++;
    if (dut.u_cop.t_rsp.ack && !dut.u_cop.t_req.we) n_tagrd++;
    if (dut.u_cop.ktag_we) n_ktr++;
    if (dut.u_cop.msg_ready) n_trk++;
    if (dut.tm_we && dut.tm_wdata[1:0] == 2'd1) n_thread1++;
    if (dut.u_cop.tmmu_we) n_tmmu_fill++;
    if (dut.u_cop.c_req[0].req && dut.u_cop.c_req[1].req) n_arb++;
  end

  task automatic send(logic [7:0] b);
    @(negedge clk); trace_valid = 1; trace_data = b;
    @(negedge clk); trace_valid = 0;
  endtask
  task automatic isync(logic [31:0] a, logic [31:0] ctx);
    send(8'h08); send(a[7:0]); send(a[15:8]); send(a[23:16]); send(a[31:24]); send(8'h21);
    send(ctx[7:0]); send(ctx[15:8]); send(ctx[23:16]); send(ctx[31:24]);
  endtask
  task automatic branch(logic [31:0] a);     // 2-byte packet: address bits [14:2]
    send({1'b1, a[7:2], 1'b1}); send({1'b0, a[14:8]});
  endtask

  // annotation lists in DDR: directory word at ANN_BASE + (block - 0x10000)
  // points (dispatcher address) to {count, annotations...}
  int unsigned blk_n = 0;
  int unsigned n_ann_total = 0;
  task automatic put_block(logic [31:0] bb, logic [31:0] anns []);
    logic [31:0] list = DDR_ANN_BASE + 32'h0001_0000 + 32'(blk_n * 32'h100);
    blk_n++;
    ddr.poke(DDR_ANN_BASE + (bb - 32'h0001_0000), 32'h8000_0000 | list);
    ddr.poke(list, 32'(anns.size()));
    foreach (anns[i]) ddr.poke(list + 32'(4 * (i + 1)), anns[i]);
    n_ann_total += anns.size();
  endtask

  `TB_WATCHDOG(60000)

  initial begin
    logic [31:0] prog [] = '{
      LUI(16, 16'h1000), LUI(17, 16'h3000), LUI(18, 16'h2000), LUI(19, 16'h9800),   // 0-3
      LUI(20, 16'h0001), LUI(8, 16'h4000), LUI(9, 16'h5000), ADDIU(10, 0, 0),       // 4-7
      ADDIU(11, 0, 64), LUI(12, 16'h0001), ORI(12, 12, 16'hC000),                   // 8-10
      LW(13, 0, 8), SRL(14, 13, 31), BEQ(14, 0, 3), SW(13, 16'h100, 9),             // 11-14 map loop
      ADDU(15, 12, 10), SW(15, 0, 9),                                               // 15-16
      ADDIU(8, 8, 4), ADDIU(9, 9, 4), ADDIU(10, 10, 1), BNE(10, 11, -10),           // 17-20
      LUI(8, 16'h6000), ADDIU(9, 0, TOP_OR), SW(9, 0, 8), SW(9, 4, 8), SW(9, 8, 8), // 21-25
      SW(9, 12, 8), ADDIU(9, 0, 1), SW(9, 16'h18, 8), ADDIU(21, 0, 0),              // 26-29
      LW(8, 0, 17), BEQ(8, 21, -2),                                                 // 30-31 poll
      ANDI(9, 21, 16'h7FF), SLL(9, 9, 2), ADDU(9, 9, 16), LW(10, 0, 9),             // 32-35
      SRL(10, 10, 2), SLL(10, 10, 2), SUBU(11, 10, 20), ADDU(11, 11, 19),           // 36-39
      LW(12, 0, 11), BEQ(12, 0, 9), LW(13, 0, 12), ADDIU(12, 12, 4),                // 40-43
      BEQ(13, 0, 6), LW(14, 0, 12), SW(14, 0, 18), ADDIU(12, 12, 4),                // 44-47 copy
      ADDIU(13, 13, -1), J(44), NOP(),                                              // 48-50
      ADDIU(21, 21, 1), SW(21, 4, 17), J(30)                                        // 51-53
    };
    logic [31:0] rd;
    int t0;

    repeat (3) @(negedge clk); rst_n = 1;
    // dispatcher program
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    // annotations produced by the static analysis for each block
    put_block(32'h0001_0200, '{enc_alu(OP_TAGTRK, 3'd0, T(5), 7'd0, 7'd0)});       // read() returns
    put_block(32'h0001_0168, '{
      enc_imm(T(0), 17'd0),                              // movw/movt r0: constant
      enc_mem(OP_TAGITR, CL_LDST, T(0), T(13), 10'd4),   // str r0,[sp,#4]
      enc_mem(OP_TAGTRI, CL_LDST, T(1), T(2), 10'd0),    // ldr r1,[r2],#4
      enc_alu(OP_TAGRRR, CL_BR, T(14), T(14), T(14))});  // bxls lr
    put_block(32'h0001_0188, '{
      enc_imm(T(3), 17'd0),                              // movw/movt r3
      enc_alu(OP_TAGRRR, CL_BR, T(14), T(14), T(14))});  // bxeq lr
    put_block(32'h0001_0300, '{enc_alu(OP_TAGKTR, 3'd0, T(1), 7'd0, 7'd0)});       // write(fd, r1)
    put_block(32'h0001_0400, '{
      enc_alu(OP_TAGRR, 3'd0, T(14), T(1), 7'd0),        // mov lr, r1
      enc_alu(OP_TAGRRR, CL_BR, T(14), T(14), T(14))});  // bx lr: tainted target
    // ELF loader: stack page (word tags), data page (word tags)
    b_map.write(32'h0, 32'h8000_0000 | 32'h7EFFF);
    b_map.write(32'h4, 32'h8000_0000 | 32'h00021);
    // kernel: read() of a file tagged 1 into 0x21000, 64 bytes; write() request
    b_ps2pl.write(32'h0, 32'h1); b_ps2pl.write(32'h0, 32'h0002_1000); b_ps2pl.write(32'h0, 32'd64);
    b_pl2ps.write(32'h0, 32'h0002_1010); b_pl2ps.write(32'h4, 32'd4);
    run = 1;
    // PTM trace
    repeat (5) send(8'h00); send(8'h80);
    isync(32'h0001_0200, 32'h0004_d242);
    branch(32'h0001_0168);
    branch(32'h0001_0188);
    branch(32'h0001_0300);
    branch(32'h0001_0400);
    isync(32'h0001_0574, 32'h0004_d342);                 // second thread, no annotations
    // instrumentation values arrive late: sp, then r2
    while (tmc_executed < 2) @(negedge clk);
    repeat (50) @(negedge clk);
    b_instr.write(32'h0, 32'h7EFF_F100);
    b_instr.write(32'h0, 32'h0002_1010);
    // kernel polls PL2PS for the write() tag
    t0 = 0;
    do begin b_pl2ps.read(32'h8, rd); t0++; end while (!rd[0] && t0 < 2000);
    b_pl2ps.read(32'hC, rd);
    `TB_CHECK(rd == 32'h1, $sformatf("write() gets tag 1 (got %0h)", rd))
    while (!irq) @(negedge clk);
    while (dut.u_cop.trace_rd_count != 32'd6 || !dut.u_cop.tmc_idle) @(negedge clk);
    repeat (5) @(negedge clk);

    for (int w = 0; w < 16; w++)
      `TB_CHECK(ddr.peek(DDR_TAG_BASE + 32'h1000 + 32'(4 * w)) == 1, $sformatf("read() buffer word %0d tagged", w))
    `TB_CHECK(ddr.peek(DDR_TAG_BASE + 32'h1040) == 0, "word past the buffer untagged")
    `TB_CHECK(dut.u_cop.u_tmc.trf[5] == 1, "TagTRK gives file tag")
    `TB_CHECK(dut.u_cop.u_tmc.trf[1] == 1, "r1 loaded from tainted buffer")
    `TB_CHECK(dut.u_cop.u_tmc.trf[14] == 1, "lr tainted by mov lr, r1")
    `TB_CHECK(irq && tmc_viol_count == 1, "exactly one violation: branch through tainted lr")
    `TB_CHECK(dut.u_cop.u_tmc.viol_ann == enc_alu(OP_TAGRRR, CL_BR, T(14), T(14), T(14)), "violating annotation")
    `TB_CHECK(tmc_executed == 32'(n_ann_total), $sformatf("all %0d annotations executed (%0d)", n_ann_total, tmc_executed))
    `TB_CHECK(ctx_valid == 4'b0011 && ctx_id[0] == 32'h0004_d242 && ctx_id[1] == 32'h0004_d342, "context IDs")
    `TB_CHECK(!trace_overflow, "no trace overflow")
    `TB_CHECK(dut.u_cop.u_tmc.u_tmmu.ent[0].valid && dut.u_cop.u_tmc.u_tmmu.ent[0].ppn == 20'h1C000 &&
              dut.u_cop.u_tmc.u_tmmu.ent[1].ppn == 20'h1C001 && !dut.u_cop.u_tmc.u_tmmu.ent[2].valid,
              "TMMU filled by dispatcher")
    `TB_CHECK(!dut.u_cop.u_tmc.tmmu_miss, "no TMMU miss")
    // mechanisms
    `TB_CHECK(n_disp_stall > 0, "dispatcher memory stall")
    `TB_CHECK(n_push == n_ann_total, "annotation pushes")
    `TB_CHECK(n_hazard > 0, "TMC interlock")
    `TB_CHECK(n_exstall > 0, "TMC waits for instrumentation")
    `TB_CHECK(n_memstall > 0, "TMC tag memory stall")
    `TB_CHECK(n_tagwr == 17 && n_tagrd == 1, $sformatf("tag memory traffic w=%0d r=%0d", n_tagwr, n_tagrd))
    `TB_CHECK(n_ktr == 1 && n_trk == 1, "kernel exchanges")
    `TB_CHECK(n_thread1 == 1, "second-thread trace entry")
    `TB_CHECK(n_tmmu_fill == 2, "TMMU fills")
    $display("mechanisms: disp_stall=%0d push=%0d hazard=%0d exstall=%0d memstall=%0d tagwr=%0d tagrd=%0d ktr=%0d trk=%0d thread1=%0d tmmu=%0d arb=%0d retired=%0d",
             n_disp_stall, n_push, n_hazard, n_exstall, n_memstall, n_tagwr, n_tagrd, n_ktr, n_trk, n_thread1, n_tmmu_fill, n_arb, disp_retired);
    `TB_DONE
  end
endmodule
