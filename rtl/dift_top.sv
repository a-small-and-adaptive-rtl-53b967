// Programmable-logic side of the DIFT system on a Zynq-class SoC. The ARM
// core's PTM trace (one byte per cycle) enters the PFT decoder, which fills
// the decoded trace memory with basic-block addresses tagged with a thread
// number. The DIFT coprocessor follows that trace, fetches annotations from
// DDR, propagates and checks tags, and interrupts the ARM core on a policy
// violation. The ARM core talks to four AXI4-Lite IPs: instrumentation
// (register values stored through r9), process mappings (page numbers from
// the ELF loader), RFBlare PS2PL (read() tag messages) and RFBlare PL2PS
// (write() tag exchange). The AXI interconnect, the ARM core and the DDR are
// outside this module: each IP's AXI4-Lite slave port and the coprocessor's
// AXI4 master port are top-level ports. The dispatcher program is loaded
// through the imem port while run is low. Some output bits are constant by
// design: AXI burst/size/length fields of the single-beat master and the
// OKAY response codes of the AXI4-Lite slaves.
module dift_top
  import dift_pkg::*;
#(
  parameter int unsigned TRACE_DEPTH = 2048,
  parameter int unsigned ANN_DEPTH   = 1024,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned N_TMMU      = 64,
  parameter int unsigned N_MAP       = 64,
  parameter int unsigned FIFO_DEPTH  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // CoreSight trace (PTM via EMIO)
  input  logic        trace_valid,
  input  logic [7:0]  trace_data,
  // AXI4-Lite slave ports of the four IPs (from the AXI interconnect)
  input  axil_req_t   s_instr_req,
  output axil_rsp_t   s_instr_rsp,
  input  axil_req_t   s_map_req,
  output axil_rsp_t   s_map_rsp,
  input  axil_req_t   s_ps2pl_req,
  output axil_rsp_t   s_ps2pl_rsp,
  input  axil_req_t   s_pl2ps_req,
  output axil_rsp_t   s_pl2ps_rsp,
  // AXI4 master to DDR
  output axi_req_t    m_axi_req,
  input  axi_rsp_t    m_axi_rsp,
  // dispatcher program load and start
  input  logic        run,
  input  logic        imem_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] imem_waddr,
  input  logic [31:0] imem_wdata,
  // interrupt to the ARM core and status
  output logic        irq,
  output logic [31:0] ctx_id [N_CTX],
  output logic [N_CTX-1:0] ctx_valid,
  output logic        trace_overflow,
  output logic [31:0] tmc_executed,
  output logic [31:0] tmc_viol_count,
  output logic [31:0] disp_retired
);
  localparam int unsigned TAW = $clog2(TRACE_DEPTH);

  logic            tm_we, tm_re;
  logic [TAW-1:0]  tm_waddr, tm_raddr;
  logic [31:0]     tm_wdata, tm_rdata;
  logic [31:0]     wr_count, rd_count;
  logic            clear_overflow;
  logic [1:0]      cur_thread;
  logic [$clog2(N_MAP)-1:0] map_idx;
  logic [31:0]     map_data;
  logic            instr_valid, instr_pop;
  logic [31:0]     instr_data;
  logic            msg_valid, msg_ready;
  tag_t            msg_tag, ktag;
  logic [31:0]     msg_addr, msg_len;
  logic            kreq_valid, kreq_ack, ktag_we;
  logic [31:0]     kreq_addr, kreq_len;

  pft_decoder #(.DEPTH(TRACE_DEPTH)) u_pft (
    .clk, .rst_n, .trace_valid, .trace_data,
    .tm_we, .tm_waddr, .tm_wdata, .wr_count, .rd_count,
    .overflow(trace_overflow), .clear_overflow, .ctx_id, .ctx_valid, .cur_thread
  );

  trace_mem #(.DEPTH(TRACE_DEPTH)) u_tmem (
    .clk, .we(tm_we), .waddr(tm_waddr), .wdata(tm_wdata),
    .re(tm_re), .raddr(tm_raddr), .rdata(tm_rdata)
  );

  instrumentation_ip #(.DEPTH(FIFO_DEPTH)) u_instr (
    .clk, .rst_n, .s_axil_req(s_instr_req), .s_axil_rsp(s_instr_rsp),
    .instr_valid, .instr_data, .instr_pop
  );

  process_mappings_ip #(.N_MAP(N_MAP)) u_map (
    .clk, .rst_n, .s_axil_req(s_map_req), .s_axil_rsp(s_map_rsp),
    .map_idx, .map_data
  );

  rfblare_ps2pl #(.DEPTH(FIFO_DEPTH)) u_ps2pl (
    .clk, .rst_n, .s_axil_req(s_ps2pl_req), .s_axil_rsp(s_ps2pl_rsp),
    .msg_valid, .msg_tag, .msg_addr, .msg_len, .msg_ready
  );

  rfblare_pl2ps u_pl2ps (
    .clk, .rst_n, .s_axil_req(s_pl2ps_req), .s_axil_rsp(s_pl2ps_rsp),
    .req_valid(kreq_valid), .req_addr(kreq_addr), .req_len(kreq_len), .req_ack(kreq_ack),
    .tag_we(ktag_we), .tag_in(ktag)
  );

  dift_coprocessor #(
    .TRACE_DEPTH(TRACE_DEPTH), .ANN_DEPTH(ANN_DEPTH), .IMEM_WORDS(IMEM_WORDS),
    .N_TMMU(N_TMMU), .N_MAP(N_MAP)
  ) u_cop (
    .clk, .rst_n, .run, .imem_we, .imem_waddr, .imem_wdata,
    .tm_re, .tm_raddr, .tm_rdata,
    .trace_wr_count(wr_count), .trace_rd_count(rd_count),
    .trace_overflow, .trace_clear_overflow(clear_overflow),
    .ctx_id, .ctx_valid, .cur_thread,
    .map_idx, .map_data,
    .instr_valid, .instr_data, .instr_pop,
    .msg_valid, .msg_tag, .msg_addr, .msg_len, .msg_ready,
    .kreq_valid, .kreq_addr, .kreq_len, .kreq_ack, .ktag_we, .ktag,
    .m_axi_req, .m_axi_rsp,
    .irq, .tmc_executed, .tmc_viol_count, .disp_retired
  );
endmodule
