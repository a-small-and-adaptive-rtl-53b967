// Dispatcher: a small five-stage pipelined 32-bit MIPS-style CPU (fetch,
// decode/register read, execute, memory access, write back) that runs the
// dispatch program: it reads decoded basic-block addresses from the decoded
// trace memory, looks up the annotations of each block in the tag
// annotations section of DDR, and copies them into the annotations memory
// for the TMC. It also initialises the other units (TMMU, policy registers).
// All of that is software; this module is only the CPU.
//
// Instruction set (MIPS-I encodings): ADDU SUBU AND OR XOR NOR SLT SLTU SLL
// SRL SRA JR, ADDIU SLTI SLTIU ANDI ORI XORI LUI LW SW BEQ BNE, J JAL.
// There are no branch delay slots: branches and jumps are resolved in
// execute and the two younger instructions are squashed (2-cycle penalty).
// Data hazards are handled by interlock: decode stalls while a source
// register is the destination of an instruction in execute or memory; the
// register file writes through, so write back needs no stall. Other opcodes
// execute as no-operations.
//
// Interfaces. imem_*: write port of the 1024-word instruction memory (the
// program is loaded while run is low; run low also holds the PC at 0 and
// empties the pipeline). dbus: word-wide data bus; a load or store holds
// req in the memory stage until ack (which may come one or more cycles
// later and lasts one cycle), stalling the whole pipeline.
//
// Follows the paper: a classical five-stage pipelined MIPS CPU. Own choices:
// the instruction subset, no delay slots, interlocks instead of forwarding,
// instruction memory size, bus handshake.
// The handshake assertions sample rst_n in 'disable iff', while the flops
// use it as an asynchronous reset; lint reports that mix, and it is intended.
module dispatcher
  import dift_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        imem_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] imem_waddr,
  input  logic [31:0] imem_wdata,
  output mem_req_t    dbus_req,
  input  mem_rsp_t    dbus_rsp,
  output logic [31:0] pc_o,
  output logic [31:0] retired
);
  localparam int unsigned IW = $clog2(IMEM_WORDS);

  typedef enum logic [3:0] {
    A_ADD, A_SUB, A_AND, A_OR, A_XOR, A_NOR, A_SLT, A_SLTU,
    A_SLL, A_SRL, A_SRA, A_LUI
  } aluop_e;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] a, b;       // operand values
    logic [31:0] st;         // store data
    logic [4:0]  rd;         // destination (0: none)
    aluop_e      aop;
    logic        ld, sw;
    logic        beq, bne, jmp, jr, link;
    logic [31:0] target;     // branch / jump target
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] res;
    logic [31:0] st;
    logic [4:0]  rd;
    logic        ld, sw;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] res;
    logic [4:0]  rd;
  } memwb_t;

  logic [31:0] imem [IMEM_WORDS];
  logic [31:0] rf   [32];

  logic [31:0] pc;
  logic        ifid_valid;
  logic [31:0] ifid_pc, ifid_ir;
  idex_t       idex, idex_n;
  exmem_t      exmem;
  memwb_t      memwb;

  logic        mem_stall, hazard, redirect;
  logic [31:0] redirect_pc;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_waddr] <= imem_wdata;
  end

  // ---------------- decode ----------------
  logic [5:0]  opc, fn;
  logic [4:0]  rs, rt, rdf, sh;
  logic [15:0] imm;
  logic [31:0] rsv, rtv, simm, zimm;
  logic        use_rs, use_rt;

  assign opc  = ifid_ir[31:26];
  assign rs   = ifid_ir[25:21];
  assign rt   = ifid_ir[20:16];
  assign rdf  = ifid_ir[15:11];
  assign sh   = ifid_ir[10:6];
  assign fn   = ifid_ir[5:0];
  assign imm  = ifid_ir[15:0];
  assign simm = {{16{imm[15]}}, imm};
  assign zimm = {16'h0, imm};

  // register read with write-through from write back
  assign rsv = (rs == 5'd0) ? 32'd0 : (memwb.valid && memwb.rd == rs) ? memwb.res : rf[rs];
  assign rtv = (rt == 5'd0) ? 32'd0 : (memwb.valid && memwb.rd == rt) ? memwb.res : rf[rt];

  always_comb begin
    idex_n        = '0;
    idex_n.valid  = ifid_valid;
    idex_n.pc     = ifid_pc;
    idex_n.a      = rsv;
    idex_n.b      = rtv;
    idex_n.st     = rtv;
    idex_n.aop    = A_ADD;
    idex_n.target = ifid_pc + 32'd4 + {simm[29:0], 2'b00};
    use_rs = 1'b0;
    use_rt = 1'b0;
    unique case (opc)
      6'h00: begin
        idex_n.rd = rdf;
        use_rs = 1'b1; use_rt = 1'b1;
        unique case (fn)
          6'h21: idex_n.aop = A_ADD;
          6'h23: idex_n.aop = A_SUB;
          6'h24: idex_n.aop = A_AND;
          6'h25: idex_n.aop = A_OR;
          6'h26: idex_n.aop = A_XOR;
          6'h27: idex_n.aop = A_NOR;
          6'h2A: idex_n.aop = A_SLT;
          6'h2B: idex_n.aop = A_SLTU;
          6'h00, 6'h02, 6'h03: begin
            idex_n.aop = (fn == 6'h00) ? A_SLL : (fn == 6'h02) ? A_SRL : A_SRA;
            idex_n.a   = {27'd0, sh};
            use_rs     = 1'b0;
          end
          6'h08: begin
            idex_n.jr = 1'b1; idex_n.rd = 5'd0; use_rt = 1'b0;
          end
          default: begin
            idex_n.rd = 5'd0; use_rs = 1'b0; use_rt = 1'b0;
          end
        endcase
      end
      6'h09, 6'h0A, 6'h0B, 6'h0C, 6'h0D, 6'h0E, 6'h0F: begin
        idex_n.rd = rt;
        use_rs    = (opc != 6'h0F);
        idex_n.b  = (opc >= 6'h0C) ? zimm : simm;
        unique case (opc)
          6'h09:   idex_n.aop = A_ADD;
          6'h0A:   idex_n.aop = A_SLT;
          6'h0B:   idex_n.aop = A_SLTU;
          6'h0C:   idex_n.aop = A_AND;
          6'h0D:   idex_n.aop = A_OR;
          6'h0E:   idex_n.aop = A_XOR;
          default: idex_n.aop = A_LUI;
        endcase
      end
      6'h23: begin   // LW
        idex_n.rd = rt; idex_n.ld = 1'b1; idex_n.b = simm; use_rs = 1'b1;
      end
      6'h2B: begin   // SW
        idex_n.sw = 1'b1; idex_n.b = simm; use_rs = 1'b1; use_rt = 1'b1;
      end
      6'h04, 6'h05: begin
        idex_n.beq = (opc == 6'h04);
        idex_n.bne = (opc == 6'h05);
        use_rs = 1'b1; use_rt = 1'b1;
      end
      6'h02, 6'h03: begin
        idex_n.jmp    = 1'b1;
        idex_n.target = {ifid_pc[31:28], ifid_ir[25:0], 2'b00};
        if (opc == 6'h03) begin
          idex_n.link = 1'b1; idex_n.rd = 5'd31;
        end
      end
      default: ;
    endcase
    if (!ifid_valid) idex_n = '0;
  end

  // interlock: a source is written by an older instruction not yet in WB
  always_comb begin
    hazard = 1'b0;
    if (ifid_valid) begin
      if (use_rs && rs != 5'd0 &&
          ((idex.valid && idex.rd == rs) || (exmem.valid && exmem.rd == rs))) hazard = 1'b1;
      if (use_rt && rt != 5'd0 &&
          ((idex.valid && idex.rd == rt) || (exmem.valid && exmem.rd == rt))) hazard = 1'b1;
    end
  end

  // ---------------- execute ----------------
  logic [31:0] alu_y;
  always_comb begin
    unique case (idex.aop)
      A_ADD:   alu_y = idex.a + idex.b;
      A_SUB:   alu_y = idex.a - idex.b;
      A_AND:   alu_y = idex.a & idex.b;
      A_OR:    alu_y = idex.a | idex.b;
      A_XOR:   alu_y = idex.a ^ idex.b;
      A_NOR:   alu_y = ~(idex.a | idex.b);
      A_SLT:   alu_y = {31'd0, $signed(idex.a) < $signed(idex.b)};
      A_SLTU:  alu_y = {31'd0, idex.a < idex.b};
      A_SLL:   alu_y = idex.b << idex.a[4:0];
      A_SRL:   alu_y = idex.b >> idex.a[4:0];
      A_SRA:   alu_y = $unsigned($signed(idex.b) >>> idex.a[4:0]);
      default: alu_y = {idex.b[15:0], 16'h0};
    endcase
    if (idex.link) alu_y = idex.pc + 32'd4;
  end

  always_comb begin
    redirect    = 1'b0;
    redirect_pc = idex.target;
    if (idex.valid) begin
      if (idex.beq && idex.a == idex.b) redirect = 1'b1;
      if (idex.bne && idex.a != idex.b) redirect = 1'b1;
      if (idex.jmp) redirect = 1'b1;
      if (idex.jr) begin
        redirect    = 1'b1;
        redirect_pc = idex.a;
      end
    end
  end

  // ---------------- memory ----------------
  assign dbus_req.req   = exmem.valid && (exmem.ld || exmem.sw);
  assign dbus_req.we    = exmem.sw;
  assign dbus_req.addr  = exmem.res;
  assign dbus_req.wdata = exmem.st;
  assign mem_stall      = dbus_req.req && !dbus_rsp.ack;

  // ---------------- pipeline registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc         <= '0;
      ifid_valid <= 1'b0;
      ifid_pc    <= '0;
      ifid_ir    <= '0;
      idex       <= '0;
      exmem      <= '0;
      memwb      <= '0;
      retired    <= '0;
      for (int i = 0; i < 32; i++) rf[i] <= '0;
    end else if (!run) begin
      pc         <= '0;
      ifid_valid <= 1'b0;
      idex       <= '0;
      exmem      <= '0;
      memwb      <= '0;
    end else begin
      // write back
      if (memwb.valid && memwb.rd != 5'd0) rf[memwb.rd] <= memwb.res;
      if (memwb.valid) retired <= retired + 1'b1;

      if (mem_stall) begin
        memwb <= '0;
      end else begin
        memwb.valid <= exmem.valid;
        memwb.rd    <= exmem.rd;
        memwb.res   <= exmem.ld ? dbus_rsp.rdata : exmem.res;

        exmem.valid <= idex.valid;
        exmem.res   <= alu_y;
        exmem.st    <= idex.st;
        exmem.rd    <= idex.rd;
        exmem.ld    <= idex.ld;
        exmem.sw    <= idex.sw;

        if (redirect) begin
          pc         <= redirect_pc;
          ifid_valid <= 1'b0;
          idex       <= '0;
        end else if (hazard) begin
          idex       <= '0;
        end else begin
          idex       <= idex_n;
          ifid_valid <= 1'b1;
          ifid_pc    <= pc;
          ifid_ir    <= imem[pc[IW+1:2]];
          pc         <= pc + 32'd4;
        end
      end
    end
  end

  assign pc_o = pc;

  // bus rule: a request is held stable until it is acknowledged
`ifndef SYNTHESIS
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n || !run)
      dbus_req.req && !dbus_rsp.ack |=> dbus_req.req && $stable(dbus_req.addr) && $stable(dbus_req.we));
`endif
endmodule
