// tb_edge_builder: builds a random inverse-CSR partition (including vertices
// without neighbours, vertices with more than 16 neighbours and trailing
// vertices without neighbours), feeds the source groups and label lines with
// random gaps and stalls, and collects the emitted edges. Checks that every
// (source, neighbour) pair is emitted exactly once and in neighbour order,
// with the right source label, that each cycle's edges come from at most V
// sources, and that done rises at the end.
module tb_edge_builder;
  import gs_pkg::*;
  localparam int V = 8, NV = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, src_valid, src_last, src_ready, dst_valid, dst_ready, out_ready;
  word_t num_edges;
  logic [V-1:0] src_vmask;
  word_t src_idx [V], src_label [V], src_lb [V], src_rb [V];
  word_t dst_label [16];
  lmask_t dst_mask, out_valid;
  word_t out_sidx [16], out_slabel [16], out_dlabel [16];
  int checks = 0, failures = 0;
  word_t ptr [NV+1], slab [NV];
  int owner [4096];
  int gi, li, ne, next_j;

  edge_builder #(.V(V)) dut (.*);

  always_comb begin
    for (int k = 0; k < V; k++) begin
      automatic int v = gi * V + k;
      src_vmask[k] = v < NV;
      src_idx[k] = v; src_label[k] = slab[v < NV ? v : 0];
      src_lb[k] = ptr[v < NV ? v : 0]; src_rb[k] = ptr[v < NV ? v + 1 : 0];
    end
    src_last = (gi + 1) * V >= NV;
    for (int w = 0; w < 16; w++) begin
      dst_label[w] = 32'h7000_0000 + li * 16 + w;
      dst_mask[w] = li * 16 + w < ne;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (src_valid && src_ready) gi++;
    if (dst_valid && dst_ready) li++;
    if (out_ready && out_valid != '0) begin
      automatic int srcs [$];
      for (int w = 0; w < 16; w++) if (out_valid[w]) begin
        automatic int j = out_dlabel[w] - 32'h7000_0000;
        checks++;
        if (j != next_j || out_sidx[w] != owner[j] || out_slabel[w] != slab[owner[j]]) begin
          failures++; $display("edge j=%0d exp j=%0d src %0d exp %0d", j, next_j, out_sidx[w], owner[j]);
        end
        next_j = j + 1;
        if (!(out_sidx[w] inside {srcs})) srcs.push_back(out_sidx[w]);
      end
      checks++;
      if (srcs.size() > V) failures++;
    end
    src_valid <= (gi + ((src_valid && src_ready) ? 1 : 0)) * V < NV && ($urandom % 4 != 0);
    dst_valid <= (li + ((dst_valid && dst_ready) ? 1 : 0)) * 16 < ne && ($urandom % 4 != 0);
    out_ready <= ($urandom % 4 != 0);
  end

  initial begin
    src_valid = 0; dst_valid = 0; out_ready = 0; gi = 0; li = 0; next_j = 0;
    ptr[0] = 0;
    for (int v = 0; v < NV; v++) begin
      automatic int d = (v % 37 == 5) ? 40 : ((v > NV - 10) ? 0 : $urandom % 6);
      slab[v] = $urandom;
      ptr[v+1] = ptr[v] + d;
      for (int j = ptr[v]; j < ptr[v+1]; j++) owner[j] = v;
    end
    ne = ptr[NV];
    num_edges = ne;
    repeat (3) @(posedge clk); rst_n <= 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    wait (done);
    repeat (3) @(posedge clk);
    checks++;
    if (next_j != ne) begin failures++; $display("emitted %0d of %0d edges", next_j, ne); end
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
