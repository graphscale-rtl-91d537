// prefix_adder: parallel vertex-update accumulator of the graph core
// (segmented prefix reduction over LINE_WORDS (= e) identifier/label pairs).
// Levels 0 .. log2(e)-1 form a Ladner-Fischer (Sklansky) prefix network: at
// level k, every lane i with bit k set is a right-reduce PE fed by lane
// (i with bits k..0 cleared) - 1; all other lanes are plain registers. A
// right-reduce PE combines the two pairs only if their source identifiers
// are equal and every pair in between carries the same identifier (the
// merged signal, kept per lane as "same"); otherwise it passes the right
// pair on. After these levels lane i holds the reduction of the run of
// equal identifiers that ends at lane i.
// A mirrored suffix sub-accumulator (left-reduce PEs) computes in the same
// levels the reduction of the run that starts at lane 0. In the final level
// (level log2(e)) a left-reduce PE folds it into the last lane when the last
// lane carries the same identifier as lane 0 but the line holds more than
// one identifier: the identifiers of one cycle can wrap around from the last
// lane to the first.
// Reduce operator: minimum of the labels, as used by BFS and WCC; the "upd"
// flags are OR-ed. Latency log2(e)+1 cycles, one line per cycle; en stalls
// all levels. out[i].same tells whether lanes 0..i share one identifier.
// Structure, level count and the wrap-around step follow the paper (Fig. 5);
// computing the whole mirrored network and using only its lane 0 is this
// design's simplification (unused PEs are removed by synthesis).
module prefix_adder
  import gs_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  pair_t in  [LINE_WORDS],
  output pair_t out [LINE_WORDS]
);
  localparam int unsigned E = LINE_WORDS;
  localparam int unsigned L = LANE_W;

  pair_t pr [L][E];   // prefix levels
  pair_t sf [L][E];   // suffix levels

  function automatic pair_t rreduce(input pair_t l, input pair_t r);
    pair_t o = r;
    if (r.same && l.v && r.v && l.id == r.id) begin
      o.label = (l.label < r.label) ? l.label : r.label;
      o.upd   = l.upd | r.upd;
      o.same  = l.same;
    end else begin
      o.same  = 1'b0;
    end
    return o;
  endfunction

  function automatic pair_t lreduce(input pair_t l, input pair_t r);
    pair_t o = l;
    if (l.same && l.v && r.v && l.id == r.id) begin
      o.label = (l.label < r.label) ? l.label : r.label;
      o.upd   = l.upd | r.upd;
      o.same  = r.same;
    end else begin
      o.same  = 1'b0;
    end
    return o;
  endfunction

  function automatic pair_t seed(input pair_t x);
    pair_t o = x;
    o.same = x.v;
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++)
        for (int i = 0; i < E; i++) begin pr[k][i] <= '0; sf[k][i] <= '0; end
      for (int i = 0; i < E; i++) out[i] <= '0;
    end else if (en) begin
      for (int k = 0; k < L; k++) begin
        for (int i = 0; i < E; i++) begin
          automatic pair_t a  = (k == 0) ? seed(in[i]) : pr[(k == 0) ? 0 : k-1][i];
          automatic pair_t b  = (k == 0) ? seed(in[i]) : sf[(k == 0) ? 0 : k-1][i];
          automatic int    pl = (((i >> k) << k) - 1);
          automatic int    ps = (((i >> k) | 1) << k);
          automatic pair_t pa = (k == 0) ? seed(in[(pl < 0) ? 0 : pl]) : pr[(k == 0) ? 0 : k-1][(pl < 0) ? 0 : pl];
          automatic pair_t pb = (k == 0) ? seed(in[(ps >= E) ? E-1 : ps]) : sf[(k == 0) ? 0 : k-1][(ps >= E) ? E-1 : ps];
          pr[k][i] <= (((i >> k) & 1) != 0) ? rreduce(pa, a) : a;
          sf[k][i] <= (((i >> k) & 1) != 0) ? b : lreduce(b, pb);
        end
      end
      // wrap-around level
      for (int i = 0; i < E; i++) out[i] <= pr[L-1][i];
      if (!pr[L-1][E-1].same && sf[L-1][0].v && pr[L-1][E-1].v &&
          sf[L-1][0].id == pr[L-1][E-1].id) begin
        out[E-1].label <= (sf[L-1][0].label < pr[L-1][E-1].label) ? sf[L-1][0].label
                                                                 : pr[L-1][E-1].label;
        out[E-1].upd   <= sf[L-1][0].upd | pr[L-1][E-1].upd;
      end
    end
  end
endmodule
