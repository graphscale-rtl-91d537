// tb_accumulator: streams the edges of 300 random source vertices (BFS
// semantics) through the accumulator the way the edge builder produces them:
// ascending source order, edges of one vertex possibly spread over several
// cycles, at most V consecutive sources per cycle, idle lanes between the runs of two sources (a run of one source is
// contiguous within a cycle, as the edge builder guarantees) and
// random stall cycles (en low). After a final flush, every source whose
// best candidate (minimum neighbour label + 1) is below its own label must
// have produced exactly one update carrying that candidate, and no other
// source may produce an update.
module tb_accumulator;
  import gs_pkg::*;
  localparam int V = 8, NS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, flush = 0, empty, idle;
  lmask_t in_valid;
  word_t in_sidx [16], in_slabel [16], in_dlabel [16];
  logic [V-1:0] upd_valid;
  word_t upd_id [V], upd_label [V];
  int checks = 0, failures = 0;
  word_t slab [NS], best [NS];
  int got [NS];

  accumulator #(.V(V), .ALGO(ALG_BFS)) dut (.*);

  always @(posedge clk) if (rst_n && en) begin
    for (int k = 0; k < V; k++) if (upd_valid[k]) begin
      checks++;
      if (upd_id[k] >= NS || upd_id[k] % V != k) begin failures++; $display("bad id %0d on selector %0d", upd_id[k], k); end
      else begin
        got[upd_id[k]]++;
        if (upd_label[k] != best[upd_id[k]] || !(best[upd_id[k]] < slab[upd_id[k]])) begin
          failures++; $display("id %0d label %0d expected %0d (own %0d)", upd_id[k], upd_label[k], best[upd_id[k]], slab[upd_id[k]]);
        end
      end
    end
  end

  initial begin
    automatic int v = 0, left, lane;
    en = 1; in_valid = '0;
    for (int i = 0; i < 16; i++) begin in_sidx[i] = 0; in_slabel[i] = 0; in_dlabel[i] = 0; end
    for (int s = 0; s < NS; s++) begin
      slab[s] = ($urandom % 5 == 0) ? LABEL_INF : $urandom % 40; best[s] = LABEL_INF; got[s] = 0;
    end
    repeat (3) @(posedge clk); rst_n <= 1;
    left = $urandom % 20;
    while (v < NS) begin
      automatic int first = v;
      in_valid = '0; lane = 0;
      while (lane < 16 && v < NS && v - first < V) begin
        if (left == 0) begin
          v++; left = ($urandom % 3 == 0) ? 0 : $urandom % 24;
          if ($urandom % 4 == 0) lane++;
          continue;
        end
        begin
          automatic word_t d = ($urandom % 7 == 0) ? LABEL_INF : $urandom % 45;
          automatic word_t c = (d == LABEL_INF) ? LABEL_INF : d + 1;
          in_valid[lane] = 1; in_sidx[lane] = v; in_slabel[lane] = slab[v]; in_dlabel[lane] = d;
          if (c < best[v]) best[v] = c;
          left--;
        end
        lane++;
      end
      do begin
        en = ($urandom % 4 != 0);
        @(posedge clk);
      end while (!en);
      #1;
    end
    in_valid = '0; en = 1;
    repeat (12) @(posedge clk);
    flush = 1; @(posedge clk); flush = 0;
    wait (idle); repeat (3) @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (got[s] != ((best[s] < slab[s]) ? 1 : 0)) begin
        failures++; $display("source %0d: %0d updates (best %0d own %0d)", s, got[s], best[s], slab[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
