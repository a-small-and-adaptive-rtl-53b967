// Tag Management Core (TMC). A five-stage pipeline (fetch annotation,
// decode/register read, execute, tag memory access, write back/tag check)
// that executes the annotations prepared by the dispatcher and so keeps the
// tags of the ARM core's registers and memory up to date.
//
// State: TRF (16 tags of r0..r15), TRF_FP (32 tags of s0..s31), GRF (16
// general 32-bit registers, e.g. memory addresses), TPR (Tag Propagation
// Register: one Tag ALU operation per instruction class) and TCR (Tag Check
// Register: one check mask per class). The annotation set and the
// runtime/compile-time split follow the paper's annotation table (see
// dift_pkg for the encoding, which is this design's own):
//   compile-time annotations name their Tag ALU operation themselves and are
//   checked only by an explicit CHECK operation in the Tag ALU;
//   runtime annotations carry a class; the operation is TPR[class] and the
//   result is checked in write back: (result & TCR[class]) != 0 is a
//   violation.
// Memory-side annotations reach tag memory (DDR) through the TMMU and the
// mem bus. Addresses come from a GRF register plus offset (TagMR, TagMTR,
// TagTRM), from the instrumentation FIFO plus offset (TagITR/TagTRI, one
// word popped in execute), or from a read() message of the kernel (TagTRK:
// the file tag is written to every word of the buffer and to the
// destination register). TagKTR hands a tag to the kernel (PL2PS) and
// acknowledges its pending request.
// Hazards: decode stalls while a source operand is the destination of an
// older annotation still in execute or memory (interlock, no forwarding);
// register files write through. Execute stalls while the instrumentation
// FIFO is empty; the memory stage stalls for TMMU lookup (1 cycle) and for
// each bus access.
// A violation or a TMMU miss sets a sticky flag and raises irq until
// cleared through the configuration port, which also writes TPR/TCR:
//   cfg_addr 0..3: TPR[class] (3-bit op), 4..7: TCR[class], 8: clear flags.
module tmc
  import dift_pkg::*;
#(
  parameter int unsigned N_TMMU = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // annotations memory (first-word fall-through)
  input  logic        ann_valid,
  input  logic [31:0] ann_data,
  output logic        ann_pop,
  // instrumentation IP
  input  logic        instr_valid,
  input  logic [31:0] instr_data,
  output logic        instr_pop,
  // RFBlare PS2PL message (read system call)
  input  logic        msg_valid,
  input  tag_t        msg_tag,
  input  logic [31:0] msg_addr,
  input  logic [31:0] msg_len,
  output logic        msg_ready,
  // RFBlare PL2PS (write system call)
  output logic        kern_tag_we,
  output tag_t        kern_tag,
  output logic        kern_req_ack,
  // tag memory bus
  output mem_req_t    mem_req,
  input  mem_rsp_t    mem_rsp,
  // configuration (policy registers) and TMMU fill
  input  logic        cfg_we,
  input  logic [3:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        tmmu_flush,
  input  logic        tmmu_we,
  input  logic [$clog2(N_TMMU)-1:0] tmmu_widx,
  input  logic [19:0] tmmu_wvpn,
  input  logic [19:0] tmmu_wppn,
  input  logic        tmmu_wpage,
  // status
  output logic        irq,
  output logic        violation,
  output logic        tmmu_miss,
  output logic [31:0] viol_ann,
  output logic [31:0] viol_count,
  output logic [31:0] executed,
  output logic        idle
);

  // ---------------- Tag ALU ----------------
  function automatic tag_t tag_alu(tagop_e op, tag_t a, tag_t b);
    unique case (op)
      TOP_COPY:  return a;
      TOP_AND:   return a & b;
      TOP_OR:    return a | b;
      TOP_XOR:   return a ^ b;
      TOP_CLR:   return '0;
      TOP_MAX:   return (a > b) ? a : b;
      TOP_CHECK: return a & b;
      default:   return a;
    endcase
  endfunction

  // ---------------- register files ----------------
  tag_t        trf    [16];
  tag_t        trf_fp [32];
  logic [31:0] grf    [16];
  tagop_e      tpr    [N_CLASS];
  tag_t        tcr    [N_CLASS];

  typedef enum logic [1:0] {AS_NONE, AS_GRF, AS_INSTR, AS_MSG} asrc_e;

  typedef struct packed {
    logic        valid;
    logic [31:0] ir;
    opcode_e     op;
    logic        runtime;
    logic [1:0]  cls;
    tagop_e      aop;
    logic [6:0]  dst;
    logic        wr;          // writes dst
    logic [31:0] a, b;        // Tag ALU operand values
    logic [31:0] base;        // GRF address operand
    logic [31:0] imm;         // sign-extended offset
    asrc_e       asrc;
    logic        mrd, mwr;    // tag memory read / write
    logic        ktr, trk;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] ir;
    opcode_e     op;
    logic        runtime;
    logic [1:0]  cls;
    tagop_e      aop;
    logic [6:0]  dst;
    logic        wr;
    logic [31:0] res;         // ALU result, or the tag to store
    logic [31:0] b;           // second ALU operand for loads
    logic [31:0] va;          // virtual address
    logic        mrd, mwr, ktr, trk;
    logic        chk_fail;    // compile-time CHECK result
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] ir;
    logic        runtime;
    logic [1:0]  cls;
    logic [6:0]  dst;
    logic        wr;
    logic [31:0] res;
    logic        chk_fail;
  } memwb_t;

  logic        ifid_valid;
  logic [31:0] ifid_ir;
  idex_t       idex, idex_n;
  exmem_t      exmem;
  memwb_t      memwb;

  // operand read with write-through from write back
  function automatic logic [31:0] rd_reg(logic [6:0] r);
    logic [31:0] v;
    unique case (r[6:5])
      RF_TRF:  v = 32'(trf[r[3:0]]);
      RF_FP:   v = 32'(trf_fp[r[4:0]]);
      RF_GRF:  v = grf[r[3:0]];
      default: v = '0;
    endcase
    if (memwb.valid && memwb.wr && memwb.dst == r) v = memwb.res;
    return v;
  endfunction

  // ---------------- decode ----------------
  opcode_e    dop;
  logic [6:0] fa, fb, fc;
  logic       use_a, use_b, use_c;
  assign dop = opcode_e'(ifid_ir[31:27]);
  assign fa  = ifid_ir[23:17];
  assign fb  = ifid_ir[16:10];
  assign fc  = ifid_ir[9:3];

  always_comb begin
    idex_n         = '0;
    idex_n.valid   = ifid_valid;
    idex_n.ir      = ifid_ir;
    idex_n.op      = dop;
    idex_n.cls     = ifid_ir[25:24];
    idex_n.aop     = tagop_e'(ifid_ir[26:24]);
    idex_n.dst     = fa;
    idex_n.a       = rd_reg(fa);
    idex_n.b       = rd_reg(fb);
    idex_n.base    = rd_reg(fb);
    idex_n.imm     = {{22{ifid_ir[9]}}, ifid_ir[9:0]};
    use_a = 1'b0; use_b = 1'b0; use_c = 1'b0;
    unique case (dop)
      OP_TAGRIMM: begin idex_n.wr = 1'b1; idex_n.a = {15'd0, ifid_ir[16:0]} << {ifid_ir[25:24], 3'b000}; idex_n.aop = TOP_COPY; end
      OP_TAGRR:   begin idex_n.wr = 1'b1; idex_n.a = rd_reg(fb); idex_n.aop = TOP_COPY; use_b = 1'b1; end
      OP_TAGMR:   begin idex_n.mwr = 1'b1; idex_n.asrc = AS_GRF; idex_n.imm = '0; idex_n.aop = TOP_COPY;
                        use_a = 1'b1; use_b = 1'b1; end
      OP_TAGRRR, OP_TAGRRR2: begin
                        idex_n.runtime = (dop == OP_TAGRRR);
                        idex_n.a = rd_reg(fb); idex_n.b = rd_reg(fc);
                        use_b = 1'b1; use_c = 1'b1;
                        idex_n.wr = 1'b1;
                      end
      OP_TAGMTR, OP_TAGMTR2: begin
                        idex_n.runtime = (dop == OP_TAGMTR);
                        idex_n.mwr = 1'b1; idex_n.asrc = AS_GRF; use_a = 1'b1; use_b = 1'b1;
                      end
      OP_TAGTRM, OP_TAGTRM2: begin
                        idex_n.runtime = (dop == OP_TAGTRM);
                        idex_n.mrd = 1'b1; idex_n.wr = 1'b1; idex_n.asrc = AS_GRF; use_b = 1'b1;
                      end
      OP_TAGITR, OP_TAGITR2: begin
                        idex_n.runtime = (dop == OP_TAGITR);
                        idex_n.mwr = 1'b1; idex_n.asrc = AS_INSTR; use_a = 1'b1;
                        use_b = (dop == OP_TAGITR);
                      end
      OP_TAGTRI, OP_TAGTRI2: begin
                        idex_n.runtime = (dop == OP_TAGTRI);
                        idex_n.mrd = 1'b1; idex_n.wr = 1'b1; idex_n.asrc = AS_INSTR;
                        use_b = (dop == OP_TAGTRI);
                      end
      OP_TAGKTR:  begin idex_n.ktr = 1'b1; use_a = 1'b1; end
      OP_TAGTRK:  begin idex_n.trk = 1'b1; idex_n.wr = 1'b1; idex_n.asrc = AS_MSG; end
      default:    ;
    endcase
    // compile-time load/store forms copy; runtime ones take TPR[class]
    if (dop inside {OP_TAGMTR2, OP_TAGTRM2, OP_TAGITR2, OP_TAGTRI2, OP_TAGTRK, OP_TAGKTR})
      idex_n.aop = TOP_COPY;
    if (idex_n.runtime) idex_n.aop = tpr[ifid_ir[25:24]];
    // forms without an address-tag operand combine with 0
    if (dop inside {OP_TAGMTR, OP_TAGTRM, OP_TAGITR2, OP_TAGTRI2}) idex_n.b = '0;
    if (idex_n.aop == TOP_CHECK) idex_n.wr = 1'b0;
    if (!ifid_valid) idex_n = '0;
  end

  // interlock
  logic hazard;
  function automatic logic pending(logic [6:0] r);
    return (idex.valid && idex.wr && idex.dst == r) ||
           (exmem.valid && exmem.wr && exmem.dst == r);
  endfunction
  assign hazard = ifid_valid && ((use_a && pending(fa)) || (use_b && pending(fb)) ||
                                 (use_c && pending(fc)));

  // ---------------- execute ----------------
  logic        ex_stall;
  logic [31:0] ex_va;
  assign ex_stall  = idex.valid && idex.asrc == AS_INSTR && !instr_valid;
  assign ex_va     = (idex.asrc == AS_INSTR) ? instr_data + idex.imm : idex.base + idex.imm;

  // ---------------- memory (TMMU + tag memory) ----------------
  typedef enum logic [1:0] {M_LOOK, M_REQ} mstate_e;
  mstate_e     mst;
  logic [31:0] m_tag_addr;
  logic [31:0] trk_off;        // byte offset inside the read() buffer
  logic        mem_done, mem_stall, mem_op;
  logic [31:0] look_va;
  logic        hit;
  logic [31:0] tag_addr;
  logic        miss_now;
  logic [31:0] mem_res;

  assign mem_op  = exmem.valid && (exmem.mrd || exmem.mwr || exmem.trk);
  assign look_va = exmem.trk ? msg_addr + trk_off : exmem.va;

  tmmu #(.N_ENTRY(N_TMMU)) u_tmmu (
    .clk, .rst_n, .flush(tmmu_flush), .we(tmmu_we), .widx(tmmu_widx),
    .wvpn(tmmu_wvpn), .wppn(tmmu_wppn), .wpage(tmmu_wpage),
    .va(look_va), .hit, .tag_addr
  );

  always_comb begin
    mem_done = 1'b0;
    miss_now = 1'b0;
    mem_req  = '0;
    if (mem_op) begin
      unique case (mst)
        M_LOOK: begin
          if (exmem.trk) begin
            if (msg_valid && trk_off >= msg_len) mem_done = 1'b1;
            else if (msg_valid && !hit)          miss_now = 1'b1;
          end else if (!hit) begin
            miss_now = 1'b1;
            mem_done = 1'b1;                   // access skipped
          end
        end
        default: begin
          mem_req.req   = 1'b1;
          mem_req.we    = exmem.mwr || exmem.trk;
          mem_req.addr  = m_tag_addr;
          mem_req.wdata = exmem.trk ? 32'(msg_tag) : exmem.res;
          if (mem_rsp.ack && !(exmem.trk && trk_off + 32'd4 < msg_len)) mem_done = 1'b1;
        end
      endcase
    end
  end
  assign mem_stall = mem_op && !mem_done;
  assign msg_ready = exmem.valid && exmem.trk && mem_done;

  always_comb begin
    mem_res = exmem.res;
    if (exmem.mrd) mem_res = (mst == M_REQ) ? 32'(tag_alu(exmem.aop, tag_t'(mem_rsp.rdata), tag_t'(exmem.b))) : '0;
    if (exmem.trk) mem_res = 32'(msg_tag);
  end

  // stage advance conditions
  logic adv_mem, adv_ex, adv_id;
  assign adv_mem = !mem_stall;
  assign adv_ex  = adv_mem && !ex_stall;
  assign adv_id  = adv_ex && !hazard;

  assign ann_pop      = adv_id && ann_valid;
  assign instr_pop    = adv_ex && idex.valid && idex.asrc == AS_INSTR;
  assign kern_tag_we  = adv_mem && exmem.valid && exmem.ktr;
  assign kern_tag     = tag_t'(exmem.res);
  assign kern_req_ack = kern_tag_we;

  // ---------------- write back / tag check ----------------
  logic wb_fail;
  assign wb_fail = memwb.valid &&
                   (memwb.chk_fail || (memwb.runtime && ((tag_t'(memwb.res) & tcr[memwb.cls]) != '0)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ifid_valid <= 1'b0;
      ifid_ir    <= '0;
      idex       <= '0;
      exmem      <= '0;
      memwb      <= '0;
      mst        <= M_LOOK;
      m_tag_addr <= '0;
      trk_off    <= '0;
      violation  <= 1'b0;
      tmmu_miss  <= 1'b0;
      viol_ann   <= '0;
      viol_count <= '0;
      executed   <= '0;
      for (int i = 0; i < 16; i++) trf[i] <= '0;
      for (int i = 0; i < 32; i++) trf_fp[i] <= '0;
      for (int i = 0; i < 16; i++) grf[i] <= '0;
      for (int i = 0; i < N_CLASS; i++) begin
        tpr[i] <= TOP_OR;
        tcr[i] <= '0;
      end
    end else begin
      // configuration
      if (cfg_we) begin
        if (cfg_addr < 4'd4)      tpr[cfg_addr[1:0]] <= tagop_e'(cfg_wdata[2:0]);
        else if (cfg_addr < 4'd8) tcr[cfg_addr[1:0]] <= tag_t'(cfg_wdata);
        else if (cfg_addr == 4'd8) begin
          violation <= 1'b0;
          tmmu_miss <= 1'b0;
        end
      end

      // write back
      if (memwb.valid) begin
        executed <= executed + 1'b1;
        if (memwb.wr) begin
          unique case (memwb.dst[6:5])
            RF_TRF:  trf[memwb.dst[3:0]]    <= tag_t'(memwb.res);
            RF_FP:   trf_fp[memwb.dst[4:0]] <= tag_t'(memwb.res);
            RF_GRF:  grf[memwb.dst[3:0]]    <= memwb.res;
            default: ;
          endcase
        end
        if (wb_fail) begin
          violation  <= 1'b1;
          viol_ann   <= memwb.ir;
          viol_count <= viol_count + 1'b1;
        end
      end
      if (miss_now) tmmu_miss <= 1'b1;

      // memory stage state
      if (mem_op) begin
        unique case (mst)
          M_LOOK: begin
            if (exmem.trk) begin
              if (msg_valid && !mem_done) begin
                if (hit) begin
                  m_tag_addr <= tag_addr;
                  mst        <= M_REQ;
                end else begin
                  trk_off    <= trk_off + 32'd4;     // word skipped
                end
              end
            end else if (hit) begin
              m_tag_addr <= tag_addr;
              mst        <= M_REQ;
            end
          end
          default: if (mem_rsp.ack) begin
            mst     <= M_LOOK;
            trk_off <= trk_off + 32'd4;
          end
        endcase
      end
      if (mem_done) trk_off <= '0;

      // pipeline registers
      if (adv_mem) begin
        memwb.valid    <= exmem.valid;
        memwb.ir       <= exmem.ir;
        memwb.runtime  <= exmem.runtime;
        memwb.cls      <= exmem.cls;
        memwb.dst      <= exmem.dst;
        memwb.wr       <= exmem.wr;
        memwb.res      <= mem_res;
        memwb.chk_fail <= exmem.chk_fail;
      end else begin
        memwb <= '0;
      end

      if (adv_ex) begin
        exmem.valid    <= idex.valid;
        exmem.ir       <= idex.ir;
        exmem.op       <= idex.op;
        exmem.runtime  <= idex.runtime;
        exmem.cls      <= idex.cls;
        exmem.aop      <= idex.aop;
        exmem.dst      <= idex.dst;
        exmem.wr       <= idex.wr;
        exmem.res      <= 32'(tag_alu(idex.aop, tag_t'(idex.a), tag_t'(idex.b)));
        exmem.b        <= idex.b;
        exmem.va       <= ex_va;
        exmem.mrd      <= idex.mrd;
        exmem.mwr      <= idex.mwr;
        exmem.ktr      <= idex.ktr;
        exmem.trk      <= idex.trk;
        exmem.chk_fail <= idex.valid && idex.aop == TOP_CHECK &&
                          (tag_alu(TOP_CHECK, tag_t'(idex.a), tag_t'(idex.b)) != '0);
      end else if (adv_mem) begin
        exmem <= '0;
      end

      if (adv_id) begin
        idex <= idex_n;
      end else if (adv_ex) begin
        idex <= '0;
      end

      if (adv_id) begin
        ifid_valid <= ann_valid;
        ifid_ir    <= ann_data;
      end
    end
  end

  assign irq  = violation || tmmu_miss;
  assign idle = !ifid_valid && !idex.valid && !exmem.valid && !memwb.valid && !ann_valid;
endmodule
