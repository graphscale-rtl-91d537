// accumulator: turns the edges of a graph core into at most one label update
// per source vertex, in four pipelined steps.
//  Update:    map UDF per edge. BFS: candidate = neighbour label + 1
//             (saturating at the "unvisited" value); WCC: candidate =
//             neighbour label. The pair is flagged as an update when the
//             candidate is smaller than the source vertex's current label.
//  Prefix:    prefix_adder reduces (minimum) the pairs of equal source id.
//  SelectMSO: V selectors; selector I takes the most significant occurrence
//             (the right-most lane of a run of equal ids, lane 0's run being
//             folded into the last lane when the ids wrap around) whose id
//             satisfies id % V == I.
//  Sequential: V sequential operators reduce the selected pairs of
//             successive cycles for the same id; a pair is released when a
//             different id reaches that operator, or on flush, and only if
//             it carries an update flag.
// Interface: edges in (lane valid, source index, source label, neighbour
// label); en advances every stage (stall from the buffered writer); flush
// releases all held pairs; upd_* is the registered update vector, valid for
// one enabled cycle. empty is high when no pair is in flight between the
// stages, idle when in addition no pair is held by a sequential operator.
// Latency: 1 (update) + log2(e)+1 (prefix) + 1 (select) + 1 (sequential).
// The four steps follow the paper; pipeline registers between them are
// this design's choice. The edges of one cycle come from V consecutive
// sources, so no two selected pairs share a selector.
module accumulator
  import gs_pkg::*;
#(
  parameter int unsigned V    = 8,
  parameter algo_e       ALGO = ALG_BFS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         flush,
  input  lmask_t       in_valid,
  input  word_t        in_sidx   [LINE_WORDS],
  input  word_t        in_slabel [LINE_WORDS],
  input  word_t        in_dlabel [LINE_WORDS],
  output logic [V-1:0] upd_valid,
  output word_t        upd_id    [V],
  output word_t        upd_label [V],
  output logic         empty,
  output logic         idle
);
  localparam int unsigned E = LINE_WORDS;
  localparam int unsigned PLAT = LANE_W + 1;

  pair_t u [E];                 // update stage output
  pair_t pa [E];                // prefix adder output
  pair_t sel [V];               // selector output
  pair_t held [V];              // sequential operators
  logic [PLAT-1:0] pv;          // occupancy of prefix adder levels
  logic uv, sv;

  function automatic word_t map_udf(input word_t dl);
    if (ALGO == ALG_BFS) return (dl == LABEL_INF) ? LABEL_INF : dl + 1'b1;
    else                 return dl;
  endfunction

  // Update stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < E; i++) u[i] <= '0;
      uv <= 1'b0;
    end else if (en) begin
      uv <= (in_valid != '0);
      for (int i = 0; i < E; i++) begin
        automatic word_t c = map_udf(in_dlabel[i]);
        u[i].v     <= in_valid[i];
        u[i].id    <= in_sidx[i];
        u[i].label <= c;
        u[i].upd   <= in_valid[i] && (c < in_slabel[i]);
        u[i].same  <= 1'b0;
      end
    end
  end

  prefix_adder u_prefix (.clk, .rst_n, .en, .in(u), .out(pa));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else if (en) pv <= {pv[PLAT-2:0], uv};
  end

  // SelectMSO
  lmask_t mso;
  always_comb begin
    for (int i = 0; i < E; i++) begin
      automatic logic run_end = (i == E-1) || !pa[i+((i == E-1) ? 0 : 1)].v ||
                                (pa[i+((i == E-1) ? 0 : 1)].id != pa[i].id);
      automatic logic wrapped = (i != E-1) && pa[i].same && pa[E-1].v &&
                                !pa[E-1].same && (pa[i].id == pa[E-1].id);
      mso[i] = pa[i].v && run_end && !wrapped;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < V; s++) sel[s] <= '0;
      sv <= 1'b0;
    end else if (en) begin
      sv <= pv[PLAT-1];
      for (int s = 0; s < V; s++) begin
        automatic pair_t pick = '0;
        for (int i = E-1; i >= 0; i--)
          if (mso[i] && (pa[i].id % V) == s) pick = pa[i];
        sel[s] <= pick;
      end
    end
  end

  // Sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < V; s++) begin
        held[s] <= '0; upd_id[s] <= '0; upd_label[s] <= '0;
      end
      upd_valid <= '0;
    end else if (en) begin
      for (int s = 0; s < V; s++) begin
        upd_valid[s] <= 1'b0;
        if (sel[s].v && held[s].v && sel[s].id == held[s].id) begin
          held[s].label <= (sel[s].label < held[s].label) ? sel[s].label : held[s].label;
          held[s].upd   <= sel[s].upd | held[s].upd;
        end else if (sel[s].v || flush) begin
          upd_valid[s] <= held[s].v && held[s].upd;
          upd_id[s]    <= held[s].id;
          upd_label[s] <= held[s].label;
          held[s]      <= flush ? '0 : sel[s];
        end
      end
    end
  end

  always_comb begin
    empty = !uv && (pv == '0) && !sv && (upd_valid == '0);
    idle  = empty;
    for (int s = 0; s < V; s++) if (held[s].v) idle = 1'b0;
  end
endmodule
