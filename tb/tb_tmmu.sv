// Checks the TMMU: fills all 64 entries with random distinct virtual pages,
// word- and page-granular, then compares lookups (hits, misses, tag
// addresses) with a reference model; checks flush.
`include "tb_common.svh"
module tb_tmmu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush = 0, we = 0, wpage = 0, hit;
  logic [5:0] widx = 0;
  logic [19:0] wvpn = 0, wppn = 0;
  logic [31:0] va = 0, tag_addr;
  logic [19:0] vpn_m [64], ppn_m [64];
  logic        pg_m [64];
  tmmu dut (.clk, .rst_n, .flush, .we, .widx, .wvpn, .wppn, .wpage, .va, .hit, .tag_addr);
  `TB_WATCHDOG(20000)
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    va = 32'h0001_0000; #1;
    `TB_CHECK(!hit, "miss after reset")
    for (int i = 0; i < 64; i++) begin
      vpn_m[i] = 20'h00010 + 20'(i * 3);
      ppn_m[i] = 20'h1C000 + 20'(i);
      pg_m[i]  = (i % 5 == 4);
      @(negedge clk); we = 1; widx = 6'(i); wvpn = vpn_m[i]; wppn = ppn_m[i]; wpage = pg_m[i];
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2000; k++) begin
      automatic int e = $urandom_range(0, 63);
      logic [31:0] exp;
      automatic logic [11:0] off = 12'($urandom);
      if ($urandom_range(0, 3) == 0) begin
        va = {vpn_m[e] + 20'd1, off};     // vpn+1 is never mapped (stride 3)
        #1 `TB_CHECK(!hit, "unmapped page misses")
      end else begin
        va = {vpn_m[e], off};
        exp = pg_m[e] ? {ppn_m[e], 12'h0} : {ppn_m[e], off[11:2], 2'b00};
        #1 `TB_CHECK(hit && tag_addr == exp, $sformatf("lookup entry %0d", e))
      end
      @(negedge clk);
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    va = {vpn_m[5], 12'h10}; #1;
    `TB_CHECK(!hit, "miss after flush")
    `TB_DONE
  end
endmodule
