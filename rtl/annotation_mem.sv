// Annotations memory: local buffer in which the dispatcher stores the
// annotations of the executed basic blocks, in execution order, and from
// which the TMC fetches them. It is a circular buffer: the dispatcher pushes
// (wr_en, stalled by the caller while full), the TMC reads the oldest word
// (rd_valid/rd_data, first-word fall-through) and removes it with rd_pop.
// free reports the number of empty slots, used by the dispatcher software to
// pace itself. Depth 1024 words (one block RAM) is this design's choice.
module annotation_mem #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [31:0]            wr_data,
  output logic                   full,
  output logic [$clog2(DEPTH):0] free,
  output logic                   rd_valid,
  output logic [31:0]            rd_data,
  input  logic                   rd_pop
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [31:0]  mem [DEPTH];
  logic [AW:0]  wp, rp;        // one extra wrap bit
  logic [AW:0]  used;

  assign used     = wp - rp;
  assign full     = (used == (AW+1)'(DEPTH));
  assign free     = (AW+1)'(DEPTH) - used;
  assign rd_valid = (used != '0);
  assign rd_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full)    wp <= wp + 1'b1;
      if (rd_pop && rd_valid) rp <= rp + 1'b1;
    end
  end
endmodule
