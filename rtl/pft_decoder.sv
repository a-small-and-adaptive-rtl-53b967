// PFT decoder. Consumes the CoreSight PTM trace, one byte per cycle
// (trace_valid/trace_data), in the Program Flow Trace protocol with
// branch broadcasting and 4-byte context IDs, and writes one decoded entry
// per basic block into the decoded trace memory:
//   entry[31:2] = start address of the basic block (ARM state, word aligned)
//   entry[1:0]  = thread number, taken from the context ID.
// Packets handled:
//   A-sync  : five or more 0x00 bytes then 0x80; the decoder ignores all
//             bytes until the first A-sync.
//   I-sync  : 0x08, four address bytes (LSB first, bit 0 = Thumb, ignored),
//             an information byte, four context-ID bytes (LSB first).
//             Emits an entry at the full address.
//   Branch  : header with bit 0 set. Byte 0 bits [6:1] give address [7:2],
//             bytes 1..3 bits [6:0] give [14:8], [21:15], [28:22], byte 4
//             bits [2:0] give [31:29]; bit 7 of a byte means another follows.
//             Bytes after byte 4 (exception information) are skipped.
//             Unsent upper bits keep their previous value. Emits an entry.
//   Context : 0x6E and four context-ID bytes.
//   Others  : single-byte packets, ignored (atoms, ignore, ...).
// Thread numbers are assigned to context IDs in order of first appearance;
// the N_CTX context IDs are kept in registers (ctx_id/ctx_valid) so that an
// interrupt routine can find the TID of the offending thread. The entry
// written is the address with its two always-zero bits replaced by the
// thread number, so thread 0 entries look like plain addresses.
// The memory is used as a ring of DEPTH words: wr_count counts all entries
// written; the consumer reports how many it has taken (rd_count). An entry
// that would overwrite unread data is dropped and overflow is set (sticky
// until clear_overflow).
// Follows the paper: the decoded-trace format and thread bits (the decoded
// trace figure), context ID in I-sync. The packet formats are those of the
// public PFT specification as far as the decoded-trace figure confirms them
// (it shows I-sync 08 74 05 01 00 21 42 d2 04 00 and branch 95 04 -> 0x10428);
// exception bytes, timestamps and cycle counts are not decoded (own choice).
module pft_decoder
  import dift_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trace_valid,
  input  logic [7:0]               trace_data,
  // decoded trace memory write port
  output logic                     tm_we,
  output logic [$clog2(DEPTH)-1:0] tm_waddr,
  output logic [31:0]              tm_wdata,
  // ring pointers
  output logic [31:0]              wr_count,
  input  logic [31:0]              rd_count,
  output logic                     overflow,
  input  logic                     clear_overflow,
  // context IDs of the threads seen so far
  output logic [31:0]              ctx_id    [N_CTX],
  output logic [N_CTX-1:0]         ctx_valid,
  output logic [1:0]               cur_thread
);
  typedef enum logic [2:0] {
    S_UNSYNC, S_HDR, S_ISYNC, S_BRANCH, S_EXC, S_CTX
  } state_e;

  state_e      state;
  logic [2:0]  zeros;      // consecutive 0x00 bytes seen (saturates at 5)
  logic [3:0]  idx;        // byte index inside the packet
  logic [31:0] addr_q;     // last decoded address
  logic [31:0] new_addr;
  logic [31:0] ctx_sh;     // context ID being assembled
  logic        emit;
  logic [31:0] emit_addr;
  logic        ctx_done;
  logic [31:0] ctx_new;
  logic [1:0]  cur_thread_n;

  // byte-wise address update of a branch packet
  always_comb begin
    new_addr = addr_q;
    unique case ((state == S_HDR) ? 4'd0 : idx)
      4'd0:    new_addr[7:2]   = trace_data[6:1];
      4'd1:    new_addr[14:8]  = trace_data[6:0];
      4'd2:    new_addr[21:15] = trace_data[6:0];
      4'd3:    new_addr[28:22] = trace_data[6:0];
      default: new_addr[31:29] = trace_data[2:0];
    endcase
    new_addr[1:0] = 2'b00;
  end

  // thread lookup / allocation for a completed context ID
  logic [1:0]  match_idx, free_idx;
  logic        match, has_free;
  always_comb begin
    match = 1'b0; match_idx = '0; has_free = 1'b0; free_idx = '0;
    for (int i = N_CTX-1; i >= 0; i--) begin
      if (ctx_valid[i] && ctx_id[i] == ctx_new) begin
        match = 1'b1; match_idx = 2'(i);
      end
      if (!ctx_valid[i]) begin
        has_free = 1'b1; free_idx = 2'(i);
      end
    end
  end

  // ring occupancy
  logic [31:0] used;
  assign used     = wr_count - rd_count;
  assign tm_we    = emit && (used < 32'(DEPTH));
  assign tm_waddr = wr_count[$clog2(DEPTH)-1:0];
  assign tm_wdata = {emit_addr[31:2], cur_thread_n};

  always_comb begin
    cur_thread_n = cur_thread;
    if (ctx_done) cur_thread_n = match ? match_idx : (has_free ? free_idx : cur_thread);
  end

  always_comb begin
    emit      = 1'b0;
    emit_addr = new_addr;
    ctx_done  = 1'b0;
    ctx_new   = {trace_data, ctx_sh[31:8]};
    if (trace_valid) begin
      unique case (state)
        S_ISYNC:  if (idx == 4'd8) begin
                    emit = 1'b1; ctx_done = 1'b1; emit_addr = addr_q;
                  end
        S_CTX:    if (idx == 4'd3) ctx_done = 1'b1;
        S_BRANCH: if (!trace_data[7] || idx == 4'd4) emit = 1'b1;
        default:  ;
      endcase
      // a branch packet of one byte completes in the header state
      if (state == S_HDR && trace_data[0] && !trace_data[7]) emit = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_UNSYNC;
      zeros      <= '0;
      idx        <= '0;
      addr_q     <= '0;
      ctx_sh     <= '0;
      wr_count   <= '0;
      overflow   <= 1'b0;
      cur_thread <= '0;
      ctx_valid  <= '0;
      for (int i = 0; i < N_CTX; i++) ctx_id[i] <= '0;
    end else begin
      if (clear_overflow) overflow <= 1'b0;
      if (tm_we) wr_count <= wr_count + 1'b1;
      else if (emit) overflow <= 1'b1;
      if (ctx_done) begin
        cur_thread <= cur_thread_n;
        if (!match && has_free) begin
          ctx_valid[free_idx] <= 1'b1;
          ctx_id[free_idx]    <= ctx_new;
        end
      end
      if (trace_valid) begin
        // A-sync detection runs in every state
        if (trace_data == 8'h00) zeros <= (zeros == 3'd5) ? zeros : zeros + 1'b1;
        else                     zeros <= '0;
        unique case (state)
          S_UNSYNC: if (trace_data == 8'h80 && zeros == 3'd5) state <= S_HDR;
          S_HDR: begin
            idx <= 4'd1;
            if (trace_data == 8'h08) begin
              state <= S_ISYNC;
              idx   <= 4'd0;
            end else if (trace_data == 8'h6E) begin
              state <= S_CTX;
              idx   <= 4'd0;
            end else if (trace_data[0]) begin
              addr_q <= new_addr;             // byte 0 of the packet
              if (trace_data[7]) state <= S_BRANCH;
            end
            // 0x00 (A-sync), 0x80 (end of A-sync) and other single-byte
            // packets leave the decoder in S_HDR
          end
          S_ISYNC: begin
            idx <= idx + 1'b1;
            unique case (idx)
              4'd0: addr_q[7:0]   <= {trace_data[7:1], 1'b0};
              4'd1: addr_q[15:8]  <= trace_data;
              4'd2: addr_q[23:16] <= trace_data;
              4'd3: addr_q[31:24] <= trace_data;
              default: ;
            endcase
            if (idx >= 4'd5) ctx_sh <= ctx_new;
            if (idx == 4'd8) state <= S_HDR;
          end
          S_CTX: begin
            idx    <= idx + 1'b1;
            ctx_sh <= ctx_new;
            if (idx == 4'd3) state <= S_HDR;
          end
          S_BRANCH: begin
            addr_q <= new_addr;
            idx    <= idx + 1'b1;
            if (idx == 4'd4)        state <= trace_data[7] ? S_EXC : S_HDR;
            else if (!trace_data[7]) state <= S_HDR;
          end
          S_EXC:   if (!trace_data[7]) state <= S_HDR;
          default: state <= S_UNSYNC;
        endcase
      end
    end
  end
endmodule
