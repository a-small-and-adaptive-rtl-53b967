// Checks the annotations memory as a FIFO against a queue model with random
// push/pop, including filling it completely (full, free = 0) and draining.
`include "tb_common.svh"
module tb_annotation_mem;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 1024;
  logic wr_en = 0, rd_pop = 0, full, rd_valid;
  logic [31:0] wr_data = 0, rd_data;
  logic [10:0] free;
  logic [31:0] q [$];
  annotation_mem dut (.clk, .rst_n, .wr_en, .wr_data, .full, .free, .rd_valid, .rd_data, .rd_pop);
  `TB_WATCHDOG(50000)
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    `TB_CHECK(free == D && !rd_valid, "empty after reset")
    // fill
    for (int i = 0; i < D + 5; i++) begin
      @(negedge clk); wr_en = 1; wr_data = $urandom;
      if (q.size() < D) q.push_back(wr_data);
    end
    @(negedge clk); wr_en = 0;
    `TB_CHECK(full && free == 0, "full")
    `TB_CHECK(rd_data == q[0], "head after fill")
    // random traffic
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      `TB_CHECK(rd_valid == (q.size() != 0), "valid")
      `TB_CHECK(free == 11'(D - q.size()), $sformatf("free %0d vs %0d", free, D - q.size()))
      if (q.size() != 0) `TB_CHECK(rd_data == q[0], "data")
      wr_en = ($urandom_range(0, 1) == 1); wr_data = $urandom;
      rd_pop = ($urandom_range(0, 2) != 0);
      begin
        bit was_full;
        was_full = (q.size() == D);
        @(posedge clk);
        if (rd_pop && q.size() != 0) void'(q.pop_front());
        if (wr_en && !was_full) q.push_back(wr_data);
      end
    end
    `TB_DONE
  end
endmodule
