// RFBlare PL2PS IP: exchange registers for write system calls.
// The kernel writes the buffer address (offset 0x0) and size (offset 0x4) of
// a write(); these are visible to the coprocessor as req_valid/req_addr/
// req_len until it acknowledges them with req_ack. The coprocessor returns a
// tag with tag_we/tag_in (TagKTR annotation); the kernel polls offset 0x8
// (bit 0: a tag is waiting, bit 1: a request is pending) and reads the tag at
// offset 0xC, which clears the waiting flag. A new tag overwrites an unread
// one. Follows the paper: direction of the exchange and the values carried.
// Own choices: register offsets, polling flags.
module rfblare_pl2ps
  import dift_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_axil_req,
  output axil_rsp_t   s_axil_rsp,
  output logic        req_valid,
  output logic [31:0] req_addr,
  output logic [31:0] req_len,
  input  logic        req_ack,
  input  logic        tag_we,
  input  tag_t        tag_in
);
  logic        wr_en, rd_en;
  logic [1:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;
  tag_t        tag_q;
  logic        tag_valid;

  axil_slave_port #(.ADDR_W(2)) u_port (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_ready(1'b1), .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr, .rd_data
  );

  always_comb begin
    unique case (rd_addr)
      2'd0:    rd_data = req_addr;
      2'd1:    rd_data = req_len;
      2'd2:    rd_data = {30'd0, req_valid, tag_valid};
      default: rd_data = 32'(tag_q);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req_addr  <= '0;
      req_len   <= '0;
      tag_q     <= '0;
      tag_valid <= 1'b0;
    end else begin
      if (wr_en && wr_addr == 2'd0) req_addr <= wr_data;
      if (wr_en && wr_addr == 2'd1) begin
        req_len   <= wr_data;
        req_valid <= 1'b1;
      end else if (req_ack) begin
        req_valid <= 1'b0;
      end
      if (tag_we) begin
        tag_q     <= tag_in;
        tag_valid <= 1'b1;
      end else if (rd_en && rd_addr == 2'd3) begin
        tag_valid <= 1'b0;
      end
    end
  end
endmodule
