// tb_graphscale_top: end-to-end test of the GraphScale processor at reduced
// size (2 cores, 256 labels of scratch pad per core, 4 reorder slots, memory
// channels with random stalls). A host-side partitioner written in the
// testbench builds the two-dimensional partitioning of a random graph
// (intervals per core, sub-intervals per meta-partition, neighbour indices
// rewritten to {core, offset}), loads the channel models, runs BFS three
// times with different options (two meta-partitions with immediate updates;
// one meta-partition with immediate updates and prefetch skipping; two
// meta-partitions without immediate updates) and compares every vertex label
// with a breadth-first search computed by the testbench. It also counts how
// often each mechanism of the design occurred and fails if one never did.
module tb_graphscale_top;
  import gs_pkg::*;
  localparam int unsigned P     = 2;
  localparam int unsigned NI    = 240;     // vertices per core interval
  localparam int unsigned N     = P * NI;
  localparam int unsigned NE    = 2600;     // edges
  localparam int unsigned LINES = 1024;  // lines per channel model
  localparam int unsigned CW    = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned ROOT  = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we = 1'b0;
  logic [15:0] cfg_addr = '0;
  word_t cfg_wdata = '0;
  logic start = 1'b0, done;
  word_t iterations;
  logic [P-1:0] mem_rd_valid, mem_rd_ready, mem_resp_valid, mem_wr_valid, mem_wr_ready;
  rd_req_t  mem_rd_req [P];
  rd_resp_t mem_resp [P];
  wr_req_t  mem_wr_req [P];

  graphscale_top #(.P(P), .SPAD_TOTAL(512), .SLOTS(4), .BS_DEPTH(2)) dut (.*);

  int checks = 0, failures = 0;
  word_t img [P][LINES*16];
  event copy_in, copy_out;

  for (genvar q = 0; q < P; q++) begin : g_mem
    mem_channel_model #(.LINES(LINES), .LAT(6 + q), .STALL_PCT(15), .SEED(q + 7)) u_mem (
      .clk, .rst_n, .rd_valid(mem_rd_valid[q]), .rd_req(mem_rd_req[q]), .rd_ready(mem_rd_ready[q]),
      .resp_valid(mem_resp_valid[q]), .resp(mem_resp[q]),
      .wr_valid(mem_wr_valid[q]), .wr_req(mem_wr_req[q]), .wr_ready(mem_wr_ready[q]));
    always @(copy_in)
      for (int l = 0; l < LINES; l++)
        for (int w = 0; w < 16; w++) u_mem.mem[l][w*32 +: 32] = img[q][l*16 + w];
    always @(copy_out)
      for (int l = 0; l < LINES; l++)
        for (int w = 0; w < 16; w++) img[q][l*16 + w] = u_mem.mem[l][w*32 +: 32];
  end

  // ---------------- mechanism counters ----------------
  longint n_bank_conflict = 0, n_xbar_backpressure = 0, n_remote = 0, n_overflow = 0;
  longint n_imm_update = 0, n_pf_skip = 0, n_seq_merge = 0, n_wr_linechange = 0;
  longint n_mem_stall = 0, n_meta_switch = 0;
  logic pf_flag = 1'b0;

  always @(posedge clk) if (rst_n) begin
    for (int q = 0; q < P; q++) begin
      if (dut.xq_valid[q] && !dut.xq_ready[q]) n_xbar_backpressure++;
      if (mem_rd_valid[q] && !mem_rd_ready[q]) n_mem_stall++;
      if (dut.xq_valid[q] && dut.xq_ready[q]) begin
        automatic int cnt [16] = '{default: 0};
        automatic bit dup = 0;
        for (int k = 0; k < 16; k++) if (dut.xq_mask[q][k]) begin
          cnt[dut.xq_nbr[q][k][3:0]]++;
          if (cnt[dut.xq_nbr[q][k][3:0]] > 1) dup = 1;
          if (P > 1 && int'(dut.xq_nbr[q][k][31 -: CW]) != q) n_remote++;
        end
        if (dup) n_bank_conflict++;
      end
    end
    if (dut.cmd_prefetch != '0) begin
      pf_flag <= 1'b1;
      if (dut.u_proc.k != 0) n_meta_switch++;
    end
    if (dut.cmd_process != '0) begin
      if (!pf_flag) n_pf_skip++;
      pf_flag <= 1'b0;
    end
  end

  for (genvar q = 0; q < P; q++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_core[q].u_core.pf_we == '0 && dut.g_core[q].u_core.sp_we != '0) n_imm_update++;
      if (dut.g_core[q].u_core.u_wr.emit && dut.g_core[q].u_core.u_wr.conflict) n_wr_linechange++;
      if (dut.g_core[q].u_core.acc_en)
        for (int s = 0; s < 8; s++)
          if (dut.g_core[q].u_core.u_acc.sel[s].v && dut.g_core[q].u_core.u_acc.held[s].v &&
              dut.g_core[q].u_core.u_acc.sel[s].id == dut.g_core[q].u_core.u_acc.held[s].id)
            n_seq_merge++;
    end
    for (genvar b = 0; b < 16; b++) begin : g_b
      always @(posedge clk) if (rst_n && dut.g_core[q].u_core.u_spad.g_bank[b].ovf_v) n_overflow++;
    end
  end

  // ---------------- graph, partitioner, reference ----------------
  int unsigned esrc [NE];
  int unsigned edst [NE];
  word_t ref_lab [N];
  int unsigned depth;

  task automatic make_graph();
    int unsigned s = 32'd12345;
    for (int i = 0; i < NE; i++) begin
      s = s * 1103515245 + 12345; esrc[i] = (s >> 8) % N;
      s = s * 1103515245 + 12345;
      // a few hub vertices receive many in-edges (edges spanning several lines)
      edst[i] = ((s >> 20) % 8 == 0) ? ((s >> 8) % 4) * 37 % N : (s >> 8) % N;
    end
    for (int v = 0; v < N; v++) ref_lab[v] = LABEL_INF;
    ref_lab[ROOT] = 0;
    depth = 0;
    for (int it = 0; it < N; it++) begin
      automatic bit ch = 0;
      for (int i = 0; i < NE; i++)
        if (ref_lab[esrc[i]] != LABEL_INF && ref_lab[esrc[i]] + 1 < ref_lab[edst[i]]) begin
          ref_lab[edst[i]] = ref_lab[esrc[i]] + 1; ch = 1;
        end
      if (!ch) break;
    end
    for (int v = 0; v < N; v++) if (ref_lab[v] != LABEL_INF && ref_lab[v] > depth) depth = ref_lab[v];
  endtask

  task automatic cfg(input int unsigned a, input word_t d);
    @(posedge clk); cfg_we <= 1'b1; cfg_addr <= 16'(a); cfg_wdata <= d;
    @(posedge clk); cfg_we <= 1'b0;
  endtask

  task automatic run(input int unsigned l, input int unsigned S, input int unsigned flags);
    int unsigned lab_lines = (NI + 15) / 16;
    for (int q = 0; q < P; q++) begin
      automatic int unsigned cur = lab_lines * 16;
      for (int i = 0; i < LINES*16; i++) img[q][i] = 0;
      for (int v = 0; v < NI; v++) img[q][v] = ((q*NI + v) == ROOT) ? 0 : LABEL_INF;
      for (int k = 0; k < int'(l); k++) begin
        automatic int unsigned pl = cur / 16, nl, ne = 0;
        cur += ((NI + 1 + 15) / 16) * 16;
        nl = cur / 16;
        for (int v = 0; v < NI; v++) begin
          img[q][pl*16 + v] = ne;
          for (int i = 0; i < NE; i++)
            if (edst[i] == q*NI + v && ((esrc[i] % NI) / S) == k) begin
              automatic int unsigned sq = esrc[i] / NI, off = esrc[i] % NI - k*S;
              img[q][nl*16 + ne] = (P > 1) ? ((sq << (32 - CW)) | off) : off;
              ne++;
            end
        end
        img[q][pl*16 + NI] = ne;
        cur += ((ne + 15) / 16) * 16;
        if (cur > LINES*16) $fatal(1, "channel model too small");
        cfg(16'h3000 + 64*k + 4*q + 0, pl);
        cfg(16'h3000 + 64*k + 4*q + 1, nl);
        cfg(16'h3000 + 64*k + 4*q + 2, ne);
      end
      cfg(16'h1000 + 2*q, 0);
      cfg(16'h1000 + 2*q + 1, NI);
    end
    for (int k = 0; k < int'(l); k++) begin
      cfg(16'h2000 + 16*k, k*S);
      cfg(16'h2000 + 16*k + 1, (NI - k*S < S) ? NI - k*S : S);
    end
    cfg(16'h0000, l);
    cfg(16'h0001, 1000);
    cfg(16'h0002, flags);
    ->copy_in;
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    @(posedge clk);
    wait (done);
    @(posedge clk);
    ->copy_out;
    @(posedge clk);
    begin
      automatic int bad = 0;
      for (int g = 0; g < int'(N); g++) begin
        checks++;
        if (img[g / NI][g % NI] != ref_lab[g]) begin
          failures++; bad++;
          if (bad < 6) $display("label mismatch run l=%0d flags=%0d: v%0d got %0d exp %0d",
                                l, flags, g, img[g / NI][g % NI], ref_lab[g]);
        end
      end
      checks++;
      if (iterations == 0 || iterations > depth + 2) begin
        failures++;
        $display("iterations %0d outside 1..%0d", iterations, depth + 2);
      end
      $display("run l=%0d S=%0d flags=%0d: %0d iterations (BFS depth %0d), mismatches %0d at %0t",
               l, S, flags, iterations, depth, bad, $time);
    end
  endtask

  task automatic need(input string name, input longint n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", name); end
  endtask

  initial begin
    make_graph();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    run(2, 128, 1);
    run(1, 240, 3);
    run(2, 128, 0);
    need("bank conflict in a line", n_bank_conflict);
    need("crossbar backpressure", n_xbar_backpressure);
    need("request to another core", n_remote);
    need("scratch pad overflow reg", n_overflow);
    need("immediate update", n_imm_update);
    need("prefetch skipped", n_pf_skip);
    need("sequential merge", n_seq_merge);
    need("writer line change", n_wr_linechange);
    need("memory stall", n_mem_stall);
    need("next meta-partition", n_meta_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
