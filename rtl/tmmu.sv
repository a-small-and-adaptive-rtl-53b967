// Tag Memory Management Unit. Fully associative array of N_ENTRY entries,
// each mapping a virtual page number of the monitored process to the
// physical page number that holds the tags of that page. A lookup is
// combinational: all entries are compared with va[31:12] in parallel and the
// matching entry forms the tag address. Two granularities per entry:
// word-granular entries give one 32-bit tag per 32-bit word
// (tag address = {ppn, va[11:2], 2'b00}); page-granular entries give one tag
// for the whole page (tag address = {ppn, 12'h000}). miss is raised when no
// valid entry matches. Entries are written one at a time (we, widx) and all
// are invalidated by flush. Follows the paper: 64-entry associative array of
// virtual/physical page number pairs. Own choices: 4 KiB pages, the
// granularity bit, priority to the lowest matching index.
module tmmu #(
  parameter int unsigned N_ENTRY = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  input  logic                       we,
  input  logic [$clog2(N_ENTRY)-1:0] widx,
  input  logic [19:0]                wvpn,
  input  logic [19:0]                wppn,
  input  logic                       wpage,     // 1: page-granular entry
  input  logic [31:0]                va,
  output logic                       hit,
  output logic [31:0]                tag_addr
);
  typedef struct packed {
    logic        valid;
    logic        page;
    logic [19:0] vpn;
    logic [19:0] ppn;
  } entry_t;

  entry_t ent [N_ENTRY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ENTRY; i++) ent[i] <= '0;
    end else if (flush) begin
      for (int i = 0; i < N_ENTRY; i++) ent[i].valid <= 1'b0;
    end else if (we) begin
      ent[widx] <= '{valid: 1'b1, page: wpage, vpn: wvpn, ppn: wppn};
    end
  end

  always_comb begin
    hit      = 1'b0;
    tag_addr = '0;
    for (int i = N_ENTRY-1; i >= 0; i--) begin
      if (ent[i].valid && ent[i].vpn == va[31:12]) begin
        hit      = 1'b1;
        tag_addr = ent[i].page ? {ent[i].ppn, 12'h000}
                               : {ent[i].ppn, va[11:2], 2'b00};
      end
    end
  end
endmodule
