// DIFT coprocessor: the dispatcher CPU, the annotations memory, the TMC
// (with its TMMU) and the AXI master, plus the dispatcher's I/O decoder.
// The dispatcher finds the annotations of each executed basic block and
// pushes them into the annotations memory; the TMC executes them.
//
// Dispatcher address map (word accesses; own choice):
//   0x8000_0000-0xFFFF_FFFF  DDR (AXI master port 0), DDR address = addr[30:0]
//   0x1000_0000 + 4*i        decoded trace memory word i            (R)
//   0x2000_0000              push one annotation (waits while full) (W)
//   0x2000_0004              free annotation slots                  (R)
//   0x3000_0000              trace entries written by the decoder    (R)
//   0x3000_0004              trace entries consumed                  (R/W)
//   0x3000_0008              trace overflow flag; a write clears it (R/W)
//   0x3000_0010 + 4*k        context ID of thread k                 (R)
//   0x3000_0020              {ctx_valid, current thread}            (R)
//   0x4000_0000 + 4*i        process mapping register i             (R)
//   0x5000_0000 + 4*i        write TMMU entry i, ppn = wdata[19:0]  (W)
//   0x5000_0100              staged {page_granular[30], vpn[19:0]}  (W)
//   0x5000_0200              invalidate all TMMU entries            (W)
//   0x6000_0000 + 4*c        TPR[c]   0x6000_0010 + 4*c TCR[c]       (W)
//   0x6000_0020              clear violation / TMMU-miss flags      (W)
//   0x6000_0024              {idle, tmmu_miss, violation}           (R)
//   0x6000_0028              annotation that failed the last check  (R)
//   0x6000_002C              number of failed checks                (R)
//   0x7000_0000 / 0x7000_0004 pending write() buffer address / size (R)
// Local accesses acknowledge one cycle after the request.
module dift_coprocessor
  import dift_pkg::*;
#(
  parameter int unsigned TRACE_DEPTH = 2048,
  parameter int unsigned ANN_DEPTH   = 1024,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned N_TMMU      = 64,
  parameter int unsigned N_MAP       = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        imem_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] imem_waddr,
  input  logic [31:0] imem_wdata,
  // decoded trace memory read port and decoder status
  output logic        tm_re,
  output logic [$clog2(TRACE_DEPTH)-1:0] tm_raddr,
  input  logic [31:0] tm_rdata,
  input  logic [31:0] trace_wr_count,
  output logic [31:0] trace_rd_count,
  input  logic        trace_overflow,
  output logic        trace_clear_overflow,
  input  logic [31:0] ctx_id [N_CTX],
  input  logic [N_CTX-1:0] ctx_valid,
  input  logic [1:0]  cur_thread,
  // process mappings IP
  output logic [$clog2(N_MAP)-1:0] map_idx,
  input  logic [31:0] map_data,
  // instrumentation IP
  input  logic        instr_valid,
  input  logic [31:0] instr_data,
  output logic        instr_pop,
  // RFBlare PS2PL / PL2PS
  input  logic        msg_valid,
  input  tag_t        msg_tag,
  input  logic [31:0] msg_addr,
  input  logic [31:0] msg_len,
  output logic        msg_ready,
  input  logic        kreq_valid,
  input  logic [31:0] kreq_addr,
  input  logic [31:0] kreq_len,
  output logic        kreq_ack,
  output logic        ktag_we,
  output tag_t        ktag,
  // DDR
  output axi_req_t    m_axi_req,
  input  axi_rsp_t    m_axi_rsp,
  // interrupt to the ARM core and status
  output logic        irq,
  output logic [31:0] tmc_executed,
  output logic [31:0] tmc_viol_count,
  output logic [31:0] disp_retired
);
  mem_req_t d_req;
  mem_rsp_t d_rsp;
  mem_req_t c_req [2];
  mem_rsp_t c_rsp [2];
  mem_req_t t_req;
  mem_rsp_t t_rsp;

  logic        ann_full, ann_valid, ann_pop;
  logic [31:0] ann_data;
  logic [$clog2(ANN_DEPTH):0] ann_free;
  logic        tmc_violation, tmc_miss, tmc_idle;
  logic [31:0] tmc_viol_ann;

  dispatcher #(.IMEM_WORDS(IMEM_WORDS)) u_disp (
    .clk, .rst_n, .run, .imem_we, .imem_waddr, .imem_wdata,
    .dbus_req(d_req), .dbus_rsp(d_rsp), .pc_o(), .retired(disp_retired)
  );

  // ---------------- dispatcher I/O decoder ----------------
  logic        is_ddr, local_req, ack_q, go;
  logic [3:0]  region;
  logic [31:0] lrdata_q;
  logic        rd_trace_q;
  logic [31:0] lrdata;
  logic [19:0] tmmu_stage_vpn;
  logic        tmmu_stage_page;
  logic        ann_push;

  assign is_ddr    = d_req.addr[31];
  assign region    = d_req.addr[31:28];
  assign local_req = d_req.req && !is_ddr;
  assign ann_push  = local_req && d_req.we && region == 4'h2 && d_req.addr[7:0] == 8'h00;
  // a local access takes effect in the first cycle of the request
  assign go        = local_req && !ack_q && !(ann_push && ann_full);

  assign c_req[0]  = '{req: d_req.req && is_ddr, we: d_req.we,
                       addr: {1'b0, d_req.addr[30:0]}, wdata: d_req.wdata};
  assign c_req[1]  = t_req;
  assign t_rsp     = c_rsp[1];

  assign tm_re     = go && !d_req.we && region == 4'h1;
  assign tm_raddr  = d_req.addr[2 +: $clog2(TRACE_DEPTH)];
  assign map_idx   = d_req.addr[2 +: $clog2(N_MAP)];

  always_comb begin
    lrdata = '0;
    unique case (region)
      4'h2: lrdata = 32'(ann_free);
      4'h3: unique case (d_req.addr[7:0])
              8'h00: lrdata = trace_wr_count;
              8'h04: lrdata = trace_rd_count;
              8'h08: lrdata = {31'd0, trace_overflow};
              8'h10: lrdata = ctx_id[0];
              8'h14: lrdata = ctx_id[1];
              8'h18: lrdata = ctx_id[2];
              8'h1C: lrdata = ctx_id[3];
              8'h20: lrdata = {24'd0, 4'(ctx_valid), 2'd0, cur_thread};
              default: lrdata = '0;
            endcase
      4'h4: lrdata = map_data;
      4'h6: unique case (d_req.addr[7:0])
              8'h24: lrdata = {29'd0, tmc_idle, tmc_miss, tmc_violation};
              8'h28: lrdata = tmc_viol_ann;
              8'h2C: lrdata = tmc_viol_count;
              default: lrdata = '0;
            endcase
      4'h7: lrdata = d_req.addr[2] ? kreq_len : kreq_addr;
      default: lrdata = '0;
    endcase
  end

  // configuration strobes
  logic        wr_go;
  assign wr_go = go && d_req.we;
  logic        cfg_we, tmmu_we, tmmu_flush;
  logic [3:0]  cfg_addr;
  assign cfg_we     = wr_go && region == 4'h6 && d_req.addr[7:0] <= 8'h20;
  assign cfg_addr   = d_req.addr[5:2];
  assign tmmu_we    = wr_go && region == 4'h5 && d_req.addr[9:8] == 2'b00;
  assign tmmu_flush = wr_go && region == 4'h5 && d_req.addr[9:8] == 2'b10;
  assign trace_clear_overflow = wr_go && region == 4'h3 && d_req.addr[7:0] == 8'h08;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q           <= 1'b0;
      lrdata_q        <= '0;
      rd_trace_q      <= 1'b0;
      trace_rd_count  <= '0;
      tmmu_stage_vpn  <= '0;
      tmmu_stage_page <= 1'b0;
    end else begin
      ack_q      <= go;
      lrdata_q   <= lrdata;
      rd_trace_q <= tm_re;
      if (wr_go && region == 4'h3 && d_req.addr[7:0] == 8'h04) trace_rd_count <= d_req.wdata;
      if (wr_go && region == 4'h5 && d_req.addr[9:8] == 2'b01) begin
        tmmu_stage_vpn  <= d_req.wdata[19:0];
        tmmu_stage_page <= d_req.wdata[30];
      end
    end
  end

  always_comb begin
    d_rsp = c_rsp[0];
    if (!is_ddr) begin
      d_rsp.ack   = ack_q;
      d_rsp.rdata = rd_trace_q ? tm_rdata : lrdata_q;
      d_rsp.err   = 1'b0;
    end
  end

  annotation_mem #(.DEPTH(ANN_DEPTH)) u_ann (
    .clk, .rst_n, .wr_en(ann_push && go), .wr_data(d_req.wdata), .full(ann_full),
    .free(ann_free), .rd_valid(ann_valid), .rd_data(ann_data), .rd_pop(ann_pop)
  );

  tmc #(.N_TMMU(N_TMMU)) u_tmc (
    .clk, .rst_n,
    .ann_valid, .ann_data, .ann_pop,
    .instr_valid, .instr_data, .instr_pop,
    .msg_valid, .msg_tag, .msg_addr, .msg_len, .msg_ready,
    .kern_tag_we(ktag_we), .kern_tag(ktag), .kern_req_ack(kreq_ack),
    .mem_req(t_req), .mem_rsp(t_rsp),
    .cfg_we, .cfg_addr, .cfg_wdata(d_req.wdata),
    .tmmu_flush, .tmmu_we, .tmmu_widx(d_req.addr[2 +: $clog2(N_TMMU)]),
    .tmmu_wvpn(tmmu_stage_vpn), .tmmu_wppn(d_req.wdata[19:0]), .tmmu_wpage(tmmu_stage_page),
    .irq, .violation(tmc_violation), .tmmu_miss(tmc_miss), .viol_ann(tmc_viol_ann),
    .viol_count(tmc_viol_count), .executed(tmc_executed), .idle(tmc_idle)
  );

  axi_master u_axi (
    .clk, .rst_n, .c_req, .c_rsp, .m_axi_req, .m_axi_rsp
  );
endmodule
