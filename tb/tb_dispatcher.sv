// Checks the dispatcher CPU on a program with back-to-back dependences
// (interlocks), a counted loop (taken and untaken branches), load-use,
// JAL/JR, shifts and compares, against a data bus that acknowledges after a
// random 1..3 cycles. The values stored by the program are compared with
// values computed here. Also checks that run low holds the CPU.
`include "tb_common.svh"
module tb_dispatcher;
  import dift_pkg::*;
  import mips_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run = 0, imem_we = 0;
  logic [9:0] imem_waddr = 0;
  logic [31:0] imem_wdata = 0, retired, pc;
  mem_req_t dreq;
  mem_rsp_t drsp;
  logic [31:0] dmem [256];
  int cnt = 0;

  dispatcher dut (.clk, .rst_n, .run, .imem_we, .imem_waddr, .imem_wdata,
                  .dbus_req(dreq), .dbus_rsp(drsp), .pc_o(pc), .retired);

  initial drsp = '0;
  always @(negedge clk) begin
    if (drsp.ack) drsp.ack = 1'b0;
    else if (dreq.req) begin
      if (cnt == 0) cnt = $urandom_range(1, 3);
      else begin
        cnt--;
        if (cnt == 0) begin
          drsp.ack = 1'b1;
          if (dreq.we) dmem[dreq.addr[9:2]] = dreq.wdata;
          else drsp.rdata = dmem[dreq.addr[9:2]];
        end
      end
    end
  end

  `TB_WATCHDOG(20000)

  initial begin
    logic [31:0] prog [] = '{
      LUI(1, 16'h1234),          // 0
      ORI(1, 1, 16'h5678),       // 1
      ADDIU(2, 0, 100),          // 2
      ADDIU(3, 0, 0),            // 3
      ADDIU(4, 0, 0),            // 4
      ADDU(3, 3, 4),             // 5 loop: sum += i
      ADDIU(4, 4, 1),            // 6
      BNE(4, 2, -3),             // 7
      SW(3, 0, 0),               // 8  [0x00] = 4950
      SW(1, 4, 0),               // 9  [0x04] = 0x12345678
      LW(5, 16'h100, 0),         // 10
      ADDU(6, 5, 1),             // 11 load-use
      SW(6, 8, 0),               // 12 [0x08]
      JAL(24),                   // 13
      SW(31, 12, 0),             // 14 [0x0C] = 56
      SUBU(7, 0, 2),             // 15 r7 = -100
      SRA(8, 7, 2),              // 16 -25
      SRL(9, 7, 28),             // 17 0xF
      SLT(10, 7, 0),             // 18 1
      SLTU(11, 7, 0),            // 19 0
      SW(8, 16, 0),              // 20
      SW(9, 20, 0),              // 21
      J(28),                     // 22
      ADDIU(12, 0, 999),         // 23 skipped
      ADDIU(12, 0, 77),          // 24 subroutine
      JR(31),                    // 25
      ADDIU(12, 0, 555),         // 26 squashed behind JR
      NOP(),                     // 27
      XOR_(13, 10, 11),          // 28 1
      SLL(13, 13, 4),            // 29 16
      OR_(13, 13, 12),           // 30 16|77 = 93
      SW(13, 24, 0),             // 31
      ADDIU(14, 0, 1),           // 32
      BEQ(14, 0, 2),             // 33 not taken
      SW(14, 252, 0),            // 34 done marker
      J(35)                      // 35 spin
    };
    foreach (dmem[i]) dmem[i] = 0;
    dmem[16'h100 >> 2] = 32'hCAFE_BABE;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    repeat (10) @(negedge clk);
    `TB_CHECK(pc == 0 && retired == 0 && !dreq.req, "held while run is low")
    run = 1;
    while (dmem[63] != 1) @(negedge clk);
    `TB_CHECK(dmem[0] == 32'd4950, "loop sum")
    `TB_CHECK(dmem[1] == 32'h1234_5678, "lui/ori")
    `TB_CHECK(dmem[2] == 32'hCAFE_BABE + 32'h1234_5678, "load-use")
    `TB_CHECK(dmem[3] == 32'd56, "jal link")
    `TB_CHECK(dmem[4] == 32'hFFFF_FFE7, "sra")
    `TB_CHECK(dmem[5] == 32'h0000_000F, "srl")
    `TB_CHECK(dmem[6] == 32'd93, "slt/sltu/xor/sll/or and squashed instructions")
    `TB_CHECK(dut.rf[12] == 32'd77, "jump shadows squashed")
    // instructions retired before the marker store (which is still in the
    // memory stage when its data lands): 0-4 (5), loop 100 x 3, 8-13 (6),
    // 24-25 (2), 14-22 (9), 28-33 (6)
    `TB_CHECK(retired == 32'(5 + 300 + 6 + 2 + 9 + 6), $sformatf("retired count %0d", retired))
    `TB_DONE
  end
endmodule
