// Encoders for the dispatcher's MIPS-I instruction subset, used by
// testbenches to build dispatcher programs.
package mips_asm_pkg;
  function automatic logic [31:0] r3(logic [5:0] fn, int rd, int rs, int rt);
    return {6'h00, 5'(rs), 5'(rt), 5'(rd), 5'd0, fn};
  endfunction
  function automatic logic [31:0] i2(logic [5:0] op, int rt, int rs, int imm);
    return {op, 5'(rs), 5'(rt), 16'(imm)};
  endfunction
  function automatic logic [31:0] ADDU(int rd, int rs, int rt); return r3(6'h21, rd, rs, rt); endfunction
  function automatic logic [31:0] SUBU(int rd, int rs, int rt); return r3(6'h23, rd, rs, rt); endfunction
  function automatic logic [31:0] AND_(int rd, int rs, int rt); return r3(6'h24, rd, rs, rt); endfunction
  function automatic logic [31:0] OR_ (int rd, int rs, int rt); return r3(6'h25, rd, rs, rt); endfunction
  function automatic logic [31:0] XOR_(int rd, int rs, int rt); return r3(6'h26, rd, rs, rt); endfunction
  function automatic logic [31:0] SLT (int rd, int rs, int rt); return r3(6'h2A, rd, rs, rt); endfunction
  function automatic logic [31:0] SLTU(int rd, int rs, int rt); return r3(6'h2B, rd, rs, rt); endfunction
  function automatic logic [31:0] SLL(int rd, int rt, int sh); return {11'd0, 5'(rt), 5'(rd), 5'(sh), 6'h00}; endfunction
  function automatic logic [31:0] SRL(int rd, int rt, int sh); return {11'd0, 5'(rt), 5'(rd), 5'(sh), 6'h02}; endfunction
  function automatic logic [31:0] SRA(int rd, int rt, int sh); return {11'd0, 5'(rt), 5'(rd), 5'(sh), 6'h03}; endfunction
  function automatic logic [31:0] JR(int rs); return {6'h00, 5'(rs), 15'd0, 6'h08}; endfunction
  function automatic logic [31:0] ADDIU(int rt, int rs, int imm); return i2(6'h09, rt, rs, imm); endfunction
  function automatic logic [31:0] SLTI (int rt, int rs, int imm); return i2(6'h0A, rt, rs, imm); endfunction
  function automatic logic [31:0] ANDI (int rt, int rs, int imm); return i2(6'h0C, rt, rs, imm); endfunction
  function automatic logic [31:0] ORI  (int rt, int rs, int imm); return i2(6'h0D, rt, rs, imm); endfunction
  function automatic logic [31:0] XORI (int rt, int rs, int imm); return i2(6'h0E, rt, rs, imm); endfunction
  function automatic logic [31:0] LUI  (int rt, int imm);         return i2(6'h0F, rt, 0, imm); endfunction
  function automatic logic [31:0] LW   (int rt, int off, int rs); return i2(6'h23, rt, rs, off); endfunction
  function automatic logic [31:0] SW   (int rt, int off, int rs); return i2(6'h2B, rt, rs, off); endfunction
  // branch offsets are in instructions, relative to the next instruction
  function automatic logic [31:0] BEQ(int rs, int rt, int off); return i2(6'h04, rt, rs, off); endfunction
  function automatic logic [31:0] BNE(int rs, int rt, int off); return i2(6'h05, rt, rs, off); endfunction
  function automatic logic [31:0] J  (int word_addr); return {6'h02, 26'(word_addr)}; endfunction
  function automatic logic [31:0] JAL(int word_addr); return {6'h03, 26'(word_addr)}; endfunction
  function automatic logic [31:0] NOP(); return 32'h0; endfunction
endpackage
