// Decoded trace memory: simple dual-port RAM (one write port, one read port,
// one clock) between the PFT decoder, which writes decoded basic-block
// addresses, and the dispatcher, which reads them. The read is synchronous:
// rdata holds word raddr one cycle after re. Default depth 2048 x 32 bits,
// i.e. the two 36 Kbit block RAMs listed for it in the area table (own
// reading of that figure; the paper gives no depth).
module trace_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
