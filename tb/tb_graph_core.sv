// tb_graph_core: one graph core with a single-core crossbar and a
// behavioural memory channel (10% stalls). The testbench writes a random
// 96-vertex graph in inverse-CSR form (labels at line 0, pointers at line 16,
// neighbours at line 32) with BFS labels, then commands a prefetch and a
// processing phase, twice:
//  pass 1, immediate updates off: the label array must equal exactly one
//    synchronous relaxation step new[v] = min(old[v], min_u old[u] + 1);
//  pass 2, immediate updates on: every label must be at most one relaxation
//    step of pass 1's result and at least the true BFS distance.
// Also checks that busy falls, that upd_pulse appeared exactly when labels
// changed, and that no memory word outside the label array was written.
module tb_graph_core;
  import gs_pkg::*;
  localparam int NV = 96, NE = 500, LINES = 128, D = 256;
  localparam int ANN_W = 1 + 2 + LANE_W;
  localparam int RW = $clog2(D) - LANE_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  core_cfg_t cfg;
  logic imm_updates = 0, cmd_prefetch = 0, cmd_process = 0, busy, upd_pulse;
  logic mem_rd_valid, mem_rd_ready, mem_resp_valid, mem_wr_valid, mem_wr_ready;
  rd_req_t mem_rd_req;
  rd_resp_t mem_resp;
  wr_req_t mem_wr_req;
  logic xq_valid, xq_ready, xr_valid, xr_ready;
  word_t xq_nbr [1][16], xr_label [1][16];
  lmask_t xq_mask [1], xr_mask [1];
  logic [15:0] sp_rd_valid [1], sp_rd_ready [1], sp_resp_valid [1], sp_resp_ready [1];
  logic [RW-1:0] sp_rd_row [1][16];
  logic [ANN_W-1:0] sp_rd_ann [1][16], sp_resp_ann [1][16];
  word_t sp_resp_label [1][16];
  int checks = 0, failures = 0, pulses = 0;
  word_t lab [NV], step [NV], bfsd [NV];
  int ptr [NV+1], nbr [NE];

  graph_core #(.V(8), .SPAD_DEPTH(D), .ANN_W(ANN_W), .ALGO(ALG_BFS)) dut (
    .clk, .rst_n, .cfg, .imm_updates, .cmd_prefetch, .cmd_process, .busy, .upd_pulse,
    .mem_rd_valid, .mem_rd_req, .mem_rd_ready, .mem_resp_valid, .mem_resp,
    .mem_wr_valid, .mem_wr_req, .mem_wr_ready,
    .xb_req_valid(xq_valid), .xb_req_nbr(xq_nbr[0]), .xb_req_mask(xq_mask[0]), .xb_req_ready(xq_ready),
    .xb_resp_valid(xr_valid), .xb_resp_label(xr_label[0]), .xb_resp_mask(xr_mask[0]), .xb_resp_ready(xr_ready),
    .sp_rd_valid(sp_rd_valid[0]), .sp_rd_row(sp_rd_row[0]), .sp_rd_ann(sp_rd_ann[0]), .sp_rd_ready(sp_rd_ready[0]),
    .sp_resp_valid(sp_resp_valid[0]), .sp_resp_label(sp_resp_label[0]), .sp_resp_ann(sp_resp_ann[0]),
    .sp_resp_ready(sp_resp_ready[0]));

  two_level_crossbar #(.P(1), .SPAD_DEPTH(D), .SLOTS(4), .BS_DEPTH(2)) u_xbar (
    .clk, .rst_n,
    .in_valid(xq_valid), .in_nbr(xq_nbr), .in_mask(xq_mask), .in_ready(xq_ready),
    .out_valid(xr_valid), .out_label(xr_label), .out_mask(xr_mask), .out_ready(xr_ready),
    .sp_rd_valid, .sp_rd_row, .sp_rd_ann, .sp_rd_ready,
    .sp_resp_valid, .sp_resp_label, .sp_resp_ann, .sp_resp_ready);

  mem_channel_model #(.LINES(LINES), .LAT(7), .STALL_PCT(10), .SEED(3)) u_mem (
    .clk, .rst_n, .rd_valid(mem_rd_valid), .rd_req(mem_rd_req), .rd_ready(mem_rd_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp),
    .wr_valid(mem_wr_valid), .wr_req(mem_wr_req), .wr_ready(mem_wr_ready));

  always @(posedge clk) if (rst_n) begin
    if (upd_pulse) pulses++;
    if (mem_wr_valid && mem_wr_ready) begin
      checks++;
      if (mem_wr_req.line >= (NV + 15) / 16) begin failures++; $display("write to line %0d", mem_wr_req.line); end
    end
  end

  function automatic word_t get(input int i);
    return u_mem.mem[i / 16][(i % 16) * 32 +: 32];
  endfunction
  task automatic put(input int i, input word_t d);
    u_mem.mem[i / 16][(i % 16) * 32 +: 32] = d;
  endtask

  task automatic relax(input word_t a [NV], output word_t r [NV]);
    for (int v = 0; v < NV; v++) begin
      r[v] = a[v];
      for (int j = ptr[v]; j < ptr[v+1]; j++)
        if (a[nbr[j]] != LABEL_INF && a[nbr[j]] + 1 < r[v]) r[v] = a[nbr[j]] + 1;
    end
  endtask

  task automatic pass(input bit imm);
    imm_updates = imm; pulses = 0;
    @(negedge clk); cmd_prefetch = 1; @(negedge clk); cmd_prefetch = 0;
    wait (!busy);
    @(negedge clk); cmd_process = 1; @(negedge clk); cmd_process = 0;
    wait (!busy);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    automatic int e = 0;
    automatic word_t cur [NV], nxt [NV];
    for (int l = 0; l < LINES; l++) u_mem.mem[l] = '0;
    ptr[0] = 0;
    for (int v = 0; v < NV; v++) begin
      automatic int d = (v == 40) ? 30 : $urandom % 9;
      if (e + d > NE) d = NE - e;
      for (int j = 0; j < d; j++) nbr[e + j] = $urandom % NV;
      e += d; ptr[v+1] = e;
      lab[v] = (v == 3) ? 0 : LABEL_INF;
    end
    for (int v = 0; v < NV; v++) put(v, lab[v]);
    for (int v = 0; v <= NV; v++) put(16 * 16 + v, ptr[v]);
    for (int j = 0; j < NE; j++) put(32 * 16 + j, nbr[j]);
    cfg = '{labels_line: 0, ptr_line: 16, nbr_line: 32, num_vertices: NV, num_edges: e,
            sub_base: 0, sub_size: NV};
    // reference fixpoint
    cur = lab;
    for (int it = 0; it < NV; it++) begin relax(cur, nxt); cur = nxt; end
    bfsd = cur;
    repeat (3) @(posedge clk); rst_n <= 1;

    pass(0);
    relax(lab, step);
    begin
      automatic bit changed = 0;
      for (int v = 0; v < NV; v++) begin
        checks++;
        if (get(v) != step[v]) begin failures++; $display("pass 1 vertex %0d label %0d expected %0d", v, get(v), step[v]); end
        if (step[v] != lab[v]) changed = 1;
      end
      checks++;
      if ((pulses > 0) != changed) begin failures++; $display("update pulses %0d, labels changed %0d", pulses, changed); end
    end
    for (int v = 0; v < NV; v++) lab[v] = get(v);

    pass(1);
    relax(lab, step);
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (get(v) > step[v] || get(v) < bfsd[v]) begin
        failures++; $display("pass 2 vertex %0d label %0d (step %0d, distance %0d)", v, get(v), step[v], bfsd[v]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
