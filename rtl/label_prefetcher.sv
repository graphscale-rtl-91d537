// label_prefetcher: prefetch phase of a graph core. On start it reads
// num_lines lines of the vertex label array, starting at base_line (the
// partition's sub-interval), through its own sequential reader, and writes
// line n into row n of all LINE_WORDS scratch pad banks at once: word b of
// the line goes to bank b, so label offset o = 16*n + b lands in bank o % 16,
// row o / 16, which is the striping the crossbar assumes. One line per cycle
// when memory keeps up. done is high when idle.
// Function from the paper; the reuse of the sequential reader is this
// design's choice.
module label_prefetcher
  import gs_pkg::*;
#(
  parameter int unsigned RW = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_line,
  input  logic [ADDR_W-1:0] num_lines,
  output logic              done,
  output logic              req_valid,
  output logic [ADDR_W-1:0] req_line,
  input  logic              req_ready,
  input  logic              resp_valid,
  input  logic [LINE_W-1:0] resp_data,
  output logic [LINE_WORDS-1:0] sp_we,
  output logic [RW-1:0]     sp_wrow [LINE_WORDS],
  output word_t             sp_wdata [LINE_WORDS]
);
  logic busy, lv, ll;
  logic [LINE_W-1:0] ld;
  logic [RW-1:0] row;

  seq_reader u_rd (
    .clk, .rst_n, .start, .base_line, .num_lines, .busy,
    .req_valid, .req_line, .req_ready, .resp_valid, .resp_data,
    .out_valid(lv), .out_data(ld), .out_last(ll), .out_ready(1'b1));

  assign done = !busy && !start;
  always_comb begin
    sp_we = {LINE_WORDS{lv}};
    for (int b = 0; b < LINE_WORDS; b++) begin
      sp_wrow[b]  = row;
      sp_wdata[b] = ld[b*WORD_W +: WORD_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     row <= '0;
    else if (start) row <= '0;
    else if (lv)    row <= ll ? '0 : RW'(row + 1'b1);
  end
endmodule
