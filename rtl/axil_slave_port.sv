// AXI4-Lite slave front end shared by the four processor-facing IPs.
// It turns AXI4-Lite transactions into single-cycle register strobes:
// a write is accepted when AW and W are both valid, no response is
// pending and the IP raises wr_ready (back-pressure, e.g. a full FIFO), giving one wr_en pulse with wr_addr/wr_data/wr_strb; a read is
// accepted when AR is valid and no read data is pending, giving one rd_en
// pulse with rd_addr, and the rd_data presented in that same cycle is
// returned on R in the following cycles. Responses are always OKAY.
// Only addr[ADDR_LSB+:ADDR_W] is decoded (word index inside the IP window).
// The handshake assertions sample rst_n in 'disable iff', while the flops
// use it as an asynchronous reset; lint reports that mix, and it is intended.
module axil_slave_port
  import dift_pkg::*;
#(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_req,
  output axil_rsp_t         s_rsp,
  input  logic              wr_ready,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [31:0]       wr_data,
  output logic [3:0]        wr_strb,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [31:0]       rd_data
);
  logic        bvalid_q, rvalid_q;
  logic [31:0] rdata_q;

  assign wr_en   = s_req.awvalid && s_req.wvalid && !bvalid_q && wr_ready;
  assign wr_addr = s_req.awaddr[2 +: ADDR_W];
  assign wr_data = s_req.wdata;
  assign wr_strb = s_req.wstrb;
  assign rd_en   = s_req.arvalid && !rvalid_q;
  assign rd_addr = s_req.araddr[2 +: ADDR_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (wr_en)                          bvalid_q <= 1'b1;
      else if (bvalid_q && s_req.bready)  bvalid_q <= 1'b0;
      if (rd_en) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
      end else if (rvalid_q && s_req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    s_rsp         = '0;
    s_rsp.awready = wr_en;
    s_rsp.wready  = wr_en;
    s_rsp.bvalid  = bvalid_q;
    s_rsp.bresp   = 2'b00;
    s_rsp.arready = rd_en;
    s_rsp.rvalid  = rvalid_q;
    s_rsp.rdata   = rdata_q;
    s_rsp.rresp   = 2'b00;
  end

  // AXI rule: once valid, a response stays valid until accepted
`ifndef SYNTHESIS
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  bvalid_q && !s_req.bready |=> bvalid_q);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  rvalid_q && !s_req.rready |=> rvalid_q && $stable(rdata_q));
`endif
endmodule
