// dst_builder: turns the sequentially read neighbours array of the current
// partition into lines of LINE_WORDS (= e) neighbour identifiers with a
// valid mask, ready to enter the two level crossbar. Lane k of line L holds
// neighbour index j = 16*L + k; lanes with j >= num_edges are masked off, so
// only the last line can be partial. The partitioner stores each neighbours
// array line-aligned. Registered output, valid/ready; out_last marks the
// final line. The paper gives the function; the masking is this design's.
module dst_builder
  import gs_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  word_t             num_edges,
  input  logic              in_valid,
  input  logic [LINE_W-1:0] in_data,
  output logic              in_ready,
  output logic              out_valid,
  output word_t             out_nbr [LINE_WORDS],
  output lmask_t            out_mask,
  output logic              out_last,
  input  logic              out_ready
);
  word_t m, jbase;
  logic fire;
  assign in_ready = (!out_valid || out_ready) && !start;
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0; jbase <= '0; out_valid <= 1'b0; out_mask <= '0; out_last <= 1'b0;
      for (int k = 0; k < LINE_WORDS; k++) out_nbr[k] <= '0;
    end else if (start) begin
      m <= num_edges; jbase <= '0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_last  <= (jbase + LINE_WORDS) >= m;
        for (int k = 0; k < LINE_WORDS; k++) begin
          out_nbr[k]  <= in_data[k*WORD_W +: WORD_W];
          out_mask[k] <= (jbase + k) < m;
        end
        jbase <= jbase + LINE_WORDS;
      end
    end
  end
endmodule
