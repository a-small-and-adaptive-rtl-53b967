// Instrumentation IP. The instrumented application keeps r9 pointed at this
// IP and, before each memory instruction, stores the address register's value
// through r9 ("str sp,[r9]"). Every AXI4-Lite write is pushed, as a 32-bit
// word, into a FIFO; the TMC pops the words in program order with its
// TagITR/TagTRI annotations (custom interface: valid / data / pop).
// A write into a full FIFO is held on the AXI bus (awready/wready low), which
// is what keeps the ARM core from running too far ahead of the coprocessor.
// Reading any address returns the FIFO fill level.
// Follows the paper: role of the IP and r9 stores. Own choices: FIFO depth 64
// (sized from the IP's register count in the area table), back-pressure,
// status register.
module instrumentation_ip
  import dift_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_axil_req,
  output axil_rsp_t   s_axil_rsp,
  // custom interface to the coprocessor
  output logic        instr_valid,
  output logic [31:0] instr_data,
  input  logic        instr_pop
);
  logic        wr_en, rd_en, full, empty;
  logic [5:0]  wr_addr, rd_addr;
  logic [31:0] wr_data;
  logic [3:0]  wr_strb;
  logic [$clog2(DEPTH):0] count;

  axil_slave_port #(.ADDR_W(6)) u_port (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_ready(!full), .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr, .rd_data(32'(count))
  );

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(wr_en), .din(wr_data), .pop(instr_pop),
    .dout(instr_data), .full, .empty, .count
  );

  assign instr_valid = !empty;
endmodule
