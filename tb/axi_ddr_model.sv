// Behavioural model of the DDR seen through the Zynq high-performance AXI
// port: an AXI4 slave over a sparse word memory (associative array), with a
// few cycles of latency on every channel. Only single-beat accesses are
// modelled. poke/peek give the testbench direct access; reads of words never
// written return 0. Counts reads and writes.
module axi_ddr_model
  import dift_pkg::*;
#(
  parameter int unsigned LATENCY = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req,
  output axi_rsp_t rsp
);
  logic [31:0] mem [int unsigned];
  int unsigned n_reads = 0, n_writes = 0;

  function automatic void poke(input logic [31:0] addr, input logic [31:0] data);
    mem[addr >> 2] = data;
  endfunction
  function automatic logic [31:0] peek(input logic [31:0] addr);
    if (mem.exists(addr >> 2)) return mem[addr >> 2];
    return '0;
  endfunction

  logic [31:0] awaddr_q;
  logic        aw_got, w_got;
  logic [31:0] wdata_q;
  int          wcnt, rcnt;
  logic        rpend;
  logic [31:0] raddr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0; aw_got <= 0; w_got <= 0; wcnt <= 0; rcnt <= 0; rpend <= 0;
      awaddr_q <= '0; wdata_q <= '0; raddr_q <= '0;
    end else begin
      rsp.awready <= 1'b0; rsp.wready <= 1'b0; rsp.arready <= 1'b0;
      // write address / data
      if (req.awvalid && !aw_got && !rsp.awready) begin
        rsp.awready <= 1'b1; awaddr_q <= req.awaddr; aw_got <= 1'b1;
      end
      if (req.wvalid && !w_got && !rsp.wready) begin
        rsp.wready <= 1'b1; wdata_q <= req.wdata; w_got <= 1'b1;
      end
      if (aw_got && w_got && !rsp.bvalid) begin
        if (wcnt == LATENCY) begin
          mem[awaddr_q >> 2] = wdata_q;
          n_writes++;
          rsp.bvalid <= 1'b1; rsp.bresp <= 2'b00;
          wcnt <= 0;
        end else wcnt <= wcnt + 1;
      end
      if (rsp.bvalid && req.bready) begin
        rsp.bvalid <= 1'b0; aw_got <= 1'b0; w_got <= 1'b0;
      end
      // read
      if (req.arvalid && !rpend && !rsp.arready && !rsp.rvalid) begin
        rsp.arready <= 1'b1; raddr_q <= req.araddr; rpend <= 1'b1;
      end
      if (rpend && !rsp.rvalid) begin
        if (rcnt == LATENCY) begin
          rsp.rvalid <= 1'b1; rsp.rdata <= peek(raddr_q); rsp.rresp <= 2'b00; rsp.rlast <= 1'b1;
          n_reads++;
          rcnt <= 0;
        end else rcnt <= rcnt + 1;
      end
      if (rsp.rvalid && req.rready) begin
        rsp.rvalid <= 1'b0; rpend <= 1'b0;
      end
    end
  end
endmodule
