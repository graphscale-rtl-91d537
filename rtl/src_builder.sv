// src_builder: zips the sequentially read vertex label and pointer lines of
// the current partition into groups of V source vertices per cycle. Each
// source carries its local vertex index (counted on the fly), its label, and
// the inclusive left / exclusive right bound of its neighbours, P[i] and
// P[i+1] of the inverse-CSR pointers array.
// A line holds LINE_WORDS words, so one label line yields LINE_WORDS/V
// groups. The right bound of the last vertex of a line's final group is the
// first pointer of the next pointer line, so the builder keeps two pointer
// lines (current and look-ahead). The pointer array has num_vertices+1
// entries; the look-ahead line is needed only when it exists.
// Interface: start pulse with num_vertices; label and pointer line streams
// (valid/ready); output group (valid/ready, registered) with a per-source
// valid mask (the last group may be partial) and out_last on the final group.
// The zipping follows the paper; the look-ahead scheme is this design's own.
module src_builder
  import gs_pkg::*;
#(
  parameter int unsigned V = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  word_t             num_vertices,
  input  logic              lab_valid,
  input  logic [LINE_W-1:0] lab_data,
  output logic              lab_ready,
  input  logic              ptr_valid,
  input  logic [LINE_W-1:0] ptr_data,
  output logic              ptr_ready,
  output logic              out_valid,
  output logic [V-1:0]      out_vmask,
  output word_t             out_idx   [V],
  output word_t             out_label [V],
  output word_t             out_lb    [V],
  output word_t             out_rb    [V],
  output logic              out_last,
  input  logic              out_ready
);
  localparam int unsigned G  = LINE_WORDS / V;
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1;

  word_t n, gbase;              // vertices, first vertex of the next group
  logic [LINE_W-1:0] p0, p1;
  logic p0v, p1v, active;
  logic [GW-1:0] h;             // group within the line
  logic need_next, last_grp, can_emit, fire, load_out, lab_pop;

  assign need_next = (int'(h) == G-1) && ((gbase + V) <= n);
  assign last_grp  = (gbase + V) >= n;
  assign load_out  = !out_valid || out_ready;
  assign can_emit  = active && lab_valid && p0v && (!need_next || p1v);
  assign fire      = can_emit && load_out;
  assign lab_pop   = fire && ((int'(h) == G-1) || last_grp);
  assign lab_ready = lab_pop;
  assign ptr_ready = active && (!p0v || !p1v) && !fire;

  function automatic word_t wsel(input logic [LINE_W-1:0] l, input int unsigned k);
    return l[k*WORD_W +: WORD_W];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n <= '0; gbase <= '0; p0v <= 1'b0; p1v <= 1'b0; h <= '0; active <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; out_vmask <= '0;
      p0 <= '0; p1 <= '0;
      for (int k = 0; k < V; k++) begin
        out_idx[k] <= '0; out_label[k] <= '0; out_lb[k] <= '0; out_rb[k] <= '0;
      end
    end else if (start) begin
      n <= num_vertices; gbase <= '0; p0v <= 1'b0; p1v <= 1'b0; h <= '0;
      active <= (num_vertices != 0); out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (ptr_valid && ptr_ready) begin
        if (!p0v) begin p0 <= ptr_data; p0v <= 1'b1; end
        else      begin p1 <= ptr_data; p1v <= 1'b1; end
      end
      if (fire) begin
        out_valid <= 1'b1;
        out_last  <= last_grp;
        for (int k = 0; k < V; k++) begin
          automatic int unsigned w = int'(h) * V + k;
          out_vmask[k] <= (gbase + k) < n;
          out_idx[k]   <= gbase + k;
          out_label[k] <= wsel(lab_data, w);
          out_lb[k]    <= wsel(p0, w);
          out_rb[k]    <= (w + 1 < LINE_WORDS) ? wsel(p0, w + 1) : wsel(p1, 0);
        end
        gbase <= gbase + V;
        h     <= (int'(h) == G-1) ? '0 : GW'(h + 1'b1);
        if (last_grp) begin
          p0v <= 1'b0; p1v <= 1'b0; active <= 1'b0;
        end else if (int'(h) == G-1) begin
          p0 <= p1; p0v <= p1v; p1v <= 1'b0;
        end
      end
    end
  end
endmodule
