// Testbench AXI4-Lite master: drives one slave port and offers blocking
// write/read tasks (called hierarchically). Address and data phases of a
// write are presented together; each task waits for the response.
module axil_master_bfm
  import dift_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    req.awvalid = 1'b1; req.awaddr = addr;
    req.wvalid  = 1'b1; req.wdata  = data; req.wstrb = 4'hF;
    req.bready  = 1'b1;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    @(negedge clk);
    req.awvalid = 1'b0; req.wvalid = 1'b0;
    while (!rsp.bvalid) @(negedge clk);
    @(negedge clk);
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    req.arvalid = 1'b1; req.araddr = addr; req.rready = 1'b1;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 1'b0;
    while (!rsp.rvalid) @(negedge clk);
    data = rsp.rdata;
    @(negedge clk);
    req.rready = 1'b0;
  endtask
endmodule
