// Shared types and constants of the DIFT (dynamic information flow tracking)
// coprocessor: AXI4 / AXI4-Lite request and response bundles, the annotation
// (TMC instruction) encoding, tag-register operand encoding, security-policy
// classes and Tag ALU operations, and the default memory map.
//
// The annotation set (opcode names and their actions) follows the paper's
// annotation table. The bit-level encoding, the operand encoding, the class
// and operation numbering and the address map are this design's own choices.
package dift_pkg;

  // ------------------------------------------------------------------
  // Tags: up to 32 bits wide
  // ------------------------------------------------------------------
  localparam int unsigned TAG_W = 32;
  typedef logic [TAG_W-1:0] tag_t;

  // ------------------------------------------------------------------
  // AXI4-Lite (32-bit) bundles, master -> slave and slave -> master
  // ------------------------------------------------------------------
  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  // ------------------------------------------------------------------
  // AXI4 master bundles (single-beat bursts only: LEN = 0, SIZE = 4 bytes)
  // ------------------------------------------------------------------
  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic [7:0]  awlen;
    logic [2:0]  awsize;
    logic [1:0]  awburst;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wlast;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic [7:0]  arlen;
    logic [2:0]  arsize;
    logic [1:0]  arburst;
    logic        rready;
  } axi_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rlast;
  } axi_rsp_t;

  // Simple word-wide memory request used inside the coprocessor
  // (a request is held until ack; rdata is valid with ack).
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] rdata;
    logic        err;
  } mem_rsp_t;

  // ------------------------------------------------------------------
  // DDR layout (Fig. 1 sizes: 384 MB CPU, 64 MB annotations, 64 MB tags)
  // ------------------------------------------------------------------
  localparam logic [31:0] DDR_CPU_BASE = 32'h0000_0000;
  localparam logic [31:0] DDR_ANN_BASE = 32'h1800_0000;
  localparam logic [31:0] DDR_TAG_BASE = 32'h1C00_0000;

  // ------------------------------------------------------------------
  // Annotation (TMC instruction) encoding, 32 bits
  //   [31:27] opcode
  //   [26:24] class (runtime annotations) or Tag ALU op (compile-time)
  //   [23:17] operand A  (destination, or stored tag)
  //   [16:10] operand B
  //   [9:3]   operand C            (ALU forms)
  //   [9:0]   signed byte offset   (load/store and compound forms)
  //   [16:0]  immediate            (TagRImm; [25:24] = byte shift)
  // ------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_NOP     = 5'd0,
    OP_TAGRIMM = 5'd1,   // A = imm << 8*sh
    OP_TAGRR   = 5'd2,   // A = B
    OP_TAGMR   = 5'd3,   // Mem[B(GRF)] = A
    OP_TAGRRR  = 5'd4,   // A = B op(TPR[class]) C
    OP_TAGRRR2 = 5'd5,   // A = B op C
    OP_TAGMTR  = 5'd6,   // Mem[B(GRF)+off] = op(TPR[class]) (A, 0)
    OP_TAGTRM  = 5'd7,   // A = op(TPR[class]) (Mem[B(GRF)+off], 0)
    OP_TAGMTR2 = 5'd8,   // Mem[B(GRF)+off] = A
    OP_TAGTRM2 = 5'd9,   // A = Mem[B(GRF)+off]
    OP_TAGITR  = 5'd10,  // Mem[TMMU(instr+off)] = op(TPR[class]) (A, B)
    OP_TAGTRI  = 5'd11,  // A = op(TPR[class]) (Mem[TMMU(instr+off)], B)
    OP_TAGITR2 = 5'd12,  // Mem[TMMU(instr+off)] = A
    OP_TAGTRI2 = 5'd13,  // A = Mem[TMMU(instr+off)]
    OP_TAGKTR  = 5'd14,  // PL2PS <= A
    OP_TAGTRK  = 5'd15   // A = tag of PS2PL message; tag memory of its buffer = A
  } opcode_e;

  // Classes of ARM instructions used by runtime annotations (TPR/TCR index)
  typedef enum logic [2:0] {
    CL_ALU   = 3'd0,
    CL_LDST  = 3'd1,
    CL_BR    = 3'd2,
    CL_FPLS  = 3'd3
  } iclass_e;
  localparam int unsigned N_CLASS = 4;

  // Tag ALU operations
  typedef enum logic [2:0] {
    TOP_COPY  = 3'd0,   // A
    TOP_AND   = 3'd1,
    TOP_OR    = 3'd2,
    TOP_XOR   = 3'd3,
    TOP_CLR   = 3'd4,   // 0
    TOP_MAX   = 3'd5,   // unsigned maximum (lattice join of ordered levels)
    TOP_CHECK = 3'd6    // no write; violation when (A & B) != 0
  } tagop_e;

  // Register operand: [6:5] register file, [4:0] index
  typedef enum logic [1:0] {
    RF_TRF   = 2'd0,    // tags of r0..r15
    RF_FP    = 2'd1,    // tags of s0..s31
    RF_GRF   = 2'd2     // general registers
  } rfsel_e;

  function automatic logic [31:0] enc_alu(opcode_e op, logic [2:0] f,
                                          logic [6:0] a, logic [6:0] b, logic [6:0] c);
    return {op, f, a, b, c, 3'b000};
  endfunction

  function automatic logic [31:0] enc_mem(opcode_e op, logic [2:0] f,
                                          logic [6:0] a, logic [6:0] b, logic [9:0] off);
    return {op, f, a, b, off};
  endfunction

  // TagRImm: A = imm << (8 * sh)
  function automatic logic [31:0] enc_imm(logic [6:0] a, logic [16:0] imm, logic [1:0] sh = 2'd0);
    return {OP_TAGRIMM, 1'b0, sh, a, imm};
  endfunction

  function automatic logic [6:0] T(int unsigned i);   // TRF operand
    return {RF_TRF, 5'(i)};
  endfunction
  function automatic logic [6:0] S(int unsigned i);   // TRF_FP operand
    return {RF_FP, 5'(i)};
  endfunction
  function automatic logic [6:0] G(int unsigned i);   // GRF operand
    return {RF_GRF, 5'(i)};
  endfunction

  // ------------------------------------------------------------------
  // Thread number carried in bits [1:0] of a decoded trace entry
  // ------------------------------------------------------------------
  localparam int unsigned N_CTX = 4;

endpackage
