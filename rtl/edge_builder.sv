// edge_builder: joins source vertices and neighbour labels into edges.
// Inputs are the source groups of the source builder (V sources with index,
// label, left bound l and right bound r) and the in-order label lines from
// the crossbar (LINE_WORDS labels and a mask). The builder counts lines, so
// lane k of line L has neighbour index j = 16*L + k. Each cycle it pairs
// every still-unconsumed valid lane with the source of the current group for
// which l <= j < r and outputs those edges (at most e edges, all from at most
// V sources). If lanes remain whose j lies beyond the group's last right
// bound, the group is retired and the line is kept with those lanes marked
// consumed; otherwise the line is retired. Once all num_edges neighbours are
// consumed the remaining groups (vertices without in-edges) are retired
// without output. done rises after the last group has been retired.
// Output: per lane valid, source index, source label and neighbour label,
// registered, advanced by out_ready (the accumulator's enable).
// The pairing rule is the paper's; the group/line retirement scheme is this
// design's own.
module edge_builder
  import gs_pkg::*;
#(
  parameter int unsigned V = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  word_t             num_edges,
  output logic              done,
  // source groups
  input  logic              src_valid,
  input  logic [V-1:0]      src_vmask,
  input  word_t             src_idx   [V],
  input  word_t             src_label [V],
  input  word_t             src_lb    [V],
  input  word_t             src_rb    [V],
  input  logic              src_last,
  output logic              src_ready,
  // neighbour label lines
  input  logic              dst_valid,
  input  word_t             dst_label [LINE_WORDS],
  input  lmask_t            dst_mask,
  output logic              dst_ready,
  // edges
  output lmask_t            out_valid,
  output word_t             out_sidx   [LINE_WORDS],
  output word_t             out_slabel [LINE_WORDS],
  output word_t             out_dlabel [LINE_WORDS],
  input  logic              out_ready
);
  word_t m, jbase;
  lmask_t consumed, cand, remain;
  word_t r_last;
  logic lines_done, active, both, fire;
  logic [$clog2(V)-1:0] which [LINE_WORDS];

  assign lines_done = (jbase >= m);

  always_comb begin
    r_last = '0;
    for (int k = 0; k < V; k++) if (src_vmask[k]) r_last = src_rb[k];
    for (int k = 0; k < LINE_WORDS; k++) begin
      automatic word_t j = jbase + k;
      cand[k]   = dst_mask[k] && !consumed[k] && (j < r_last);
      remain[k] = dst_mask[k] && !consumed[k] && !(j < r_last);
      which[k]  = '0;
      for (int s = V-1; s >= 0; s--)
        if (src_vmask[s] && (src_lb[s] <= j) && (j < src_rb[s])) which[k] = ($clog2(V))'(s);
    end
  end

  assign both = src_valid && (lines_done || dst_valid);
  assign fire = active && both && out_ready;
  // retire the group when neighbours remain beyond it or none are left
  assign src_ready = fire && (lines_done || (remain != '0));
  assign dst_ready = fire && !lines_done && (remain == '0);
  assign done      = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0; jbase <= '0; consumed <= '0; active <= 1'b0; out_valid <= '0;
      for (int k = 0; k < LINE_WORDS; k++) begin
        out_sidx[k] <= '0; out_slabel[k] <= '0; out_dlabel[k] <= '0;
      end
    end else if (start) begin
      m <= num_edges; jbase <= '0; consumed <= '0; active <= 1'b1; out_valid <= '0;
    end else if (out_ready) begin
      out_valid <= '0;
      if (fire) begin
        if (!lines_done) begin
          out_valid <= cand;
          for (int k = 0; k < LINE_WORDS; k++) begin
            out_sidx[k]   <= src_idx[which[k]];
            out_slabel[k] <= src_label[which[k]];
            out_dlabel[k] <= dst_label[k];
          end
          if (remain == '0) begin
            consumed <= '0;
            jbase    <= jbase + LINE_WORDS;
          end else begin
            consumed <= consumed | cand;
          end
        end
        if (src_ready && src_last) active <= 1'b0;
      end
    end
  end
endmodule
