// RFBlare PS2PL IP: kernel-to-coprocessor FIFO for read system calls.
// For each read() the modified kernel writes three words through AXI4-Lite:
// the file's tag, the virtual address of the user buffer and the number of
// bytes read (any address in the IP window; order tag, address, length).
// The words queue in a FIFO; on the coprocessor side the IP gathers three
// consecutive words into one message (msg_valid / msg_tag / msg_addr /
// msg_len) that the TMC consumes with msg_ready (TagTRK annotation).
// A write into a full FIFO is held on the bus (synchronisation with the
// kernel). Reading address 0 returns the FIFO fill level.
// Follows the paper: the three values and their direction. Own choices: word
// order, FIFO depth 64 (from the IP's register count), message assembly.
module rfblare_ps2pl
  import dift_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_axil_req,
  output axil_rsp_t   s_axil_rsp,
  output logic        msg_valid,
  output tag_t        msg_tag,
  output logic [31:0] msg_addr,
  output logic [31:0] msg_len,
  input  logic        msg_ready
);
  logic        wr_en, rd_en, full, empty, pop;
  logic [5:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, dout;
  logic [3:0]  wr_strb;
  logic [$clog2(DEPTH):0] count;
  logic [1:0]  nwords;          // words gathered so far (0..3)

  axil_slave_port #(.ADDR_W(6)) u_port (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_ready(!full), .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr, .rd_data(32'(count))
  );

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(wr_en), .din(wr_data), .pop,
    .dout, .full, .empty, .count
  );

  assign pop       = !empty && (nwords != 2'd3);
  assign msg_valid = (nwords == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nwords   <= '0;
      msg_tag  <= '0;
      msg_addr <= '0;
      msg_len  <= '0;
    end else if (msg_valid) begin
      if (msg_ready) nwords <= '0;
    end else if (pop) begin
      unique case (nwords)
        2'd0:    msg_tag  <= tag_t'(dout);
        2'd1:    msg_addr <= dout;
        default: msg_len  <= dout;
      endcase
      nwords <= nwords + 1'b1;
    end
  end
endmodule
