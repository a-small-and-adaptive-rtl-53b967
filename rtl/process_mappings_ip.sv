// Process mappings IP: 64 registers written by the kernel's ELF loader with
// the virtual page numbers of the segments of the process being started.
// Register i (AXI4-Lite offset 4*i) holds {valid[31], page_granular[30],
// 10'b0, vpn[19:0]}; the CPU can read them back. The coprocessor reads
// register map_idx combinationally (custom interface) when it fills the
// TMMU. Follows the paper: 64 registers of virtual page numbers. Own
// choices: 4 KiB pages, the valid and granularity bits.
module process_mappings_ip
  import dift_pkg::*;
#(
  parameter int unsigned N_MAP = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_axil_req,
  output axil_rsp_t   s_axil_rsp,
  input  logic [$clog2(N_MAP)-1:0] map_idx,
  output logic [31:0] map_data
);
  localparam int unsigned IW = $clog2(N_MAP);
  logic        wr_en, rd_en;
  logic [IW-1:0] wr_addr, rd_addr;
  logic [31:0] wr_data;
  logic [3:0]  wr_strb;
  logic [31:0] regs [N_MAP];

  axil_slave_port #(.ADDR_W(IW)) u_port (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_ready(1'b1), .wr_en, .wr_addr, .wr_data, .wr_strb,
    .rd_en, .rd_addr, .rd_data(regs[rd_addr])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MAP; i++) regs[i] <= '0;
    end else if (wr_en) begin
      regs[wr_addr] <= wr_data & 32'hC00F_FFFF;
    end
  end

  assign map_data = regs[map_idx];
endmodule
