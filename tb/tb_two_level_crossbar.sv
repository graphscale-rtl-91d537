// tb_two_level_crossbar: two cores, two 256-label scratch pads preloaded
// through their write ports with label(core, offset) = core*65536 + offset +
// 0x00a00000. Each core sends 300 lines of random neighbour indices (random
// masks, frequent bank conflicts and remote requests) with random gaps and
// random output backpressure. Every returned line must come back to its
// own core, in order, with the same mask and the right label in every valid
// lane.
module tb_two_level_crossbar;
  import gs_pkg::*;
  localparam int P = 2, D = 256, SLOTS = 4, NL = 300;
  localparam int RW = $clog2(D) - LANE_W, ANN_W = 1 + $clog2(SLOTS) + LANE_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [P-1:0] in_valid, in_ready, out_valid, out_ready;
  word_t in_nbr [P][16], out_label [P][16];
  lmask_t in_mask [P], out_mask [P];
  logic [15:0] sp_rd_valid [P], sp_rd_ready [P], sp_resp_valid [P], sp_resp_ready [P];
  logic [RW-1:0] sp_rd_row [P][16];
  logic [ANN_W-1:0] sp_rd_ann [P][16], sp_resp_ann [P][16];
  word_t sp_resp_label [P][16];
  logic [15:0] we;
  logic [RW-1:0] wrow [16];
  word_t wdata [P][16];
  int checks = 0, failures = 0;
  int sent [P], recv [P];
  bit go = 0;
  typedef struct packed { lmask_t m; logic [16*32-1:0] n; } line_t;
  line_t expq [P][$];

  two_level_crossbar #(.P(P), .SPAD_DEPTH(D), .SLOTS(SLOTS), .BS_DEPTH(2)) dut (.*);

  for (genvar c = 0; c < P; c++) begin : g_sp
    label_scratch_pad #(.DEPTH(D), .ANN_W(ANN_W)) u_sp (
      .clk, .rst_n, .rd_valid(sp_rd_valid[c]), .rd_row(sp_rd_row[c]), .rd_ann(sp_rd_ann[c]),
      .rd_ready(sp_rd_ready[c]), .resp_valid(sp_resp_valid[c]), .resp_label(sp_resp_label[c]),
      .resp_ann(sp_resp_ann[c]), .resp_ready(sp_resp_ready[c]),
      .we, .wrow, .wdata(wdata[c]));
  end

  function automatic word_t lab_of(input word_t nbr);
    return 32'h00a0_0000 + (nbr[31] ? 65536 : 0) + (nbr % D);
  endfunction

  function automatic line_t new_line();
    line_t l;
    automatic int hot = $urandom % 16;
    l.m = ($urandom % 3 == 0) ? 16'hffff : 16'($urandom);
    for (int w = 0; w < 16; w++) begin
      automatic word_t n = $urandom % D;
      if ($urandom % 3 == 0) n = (n & ~32'hf) | hot;      // bank conflicts
      if ($urandom % 2 == 0) n |= 32'h8000_0000;          // other core
      l.n[w*32 +: 32] = n;
    end
    return l;
  endfunction

  line_t cur [P];
  always_comb for (int c = 0; c < P; c++) begin
    in_mask[c] = cur[c].m;
    for (int w = 0; w < 16; w++) in_nbr[c][w] = cur[c].n[w*32 +: 32];
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < P; c++) begin
      if (in_valid[c] && in_ready[c]) begin
        expq[c].push_back(cur[c]); sent[c]++;
        cur[c] <= new_line();
      end
      if (out_valid[c] && out_ready[c]) begin
        automatic line_t e = expq[c].pop_front();
        recv[c]++;
        checks++;
        if (out_mask[c] != e.m) begin failures++; $display("core %0d line %0d mask %h expected %h", c, recv[c], out_mask[c], e.m); end
        for (int w = 0; w < 16; w++) if (e.m[w]) begin
          checks++;
          if (out_label[c][w] != lab_of(e.n[w*32 +: 32])) begin
            failures++;
            if (failures < 8) $display("core %0d line %0d lane %0d label %h expected %h", c, recv[c], w, out_label[c][w], lab_of(e.n[w*32 +: 32]));
          end
        end
      end
      in_valid[c] <= (sent[c] + ((in_valid[c] && in_ready[c]) ? 1 : 0) < NL) && go && ($urandom % 5 != 0);
      out_ready[c] <= ($urandom % 4 != 0);
    end
  end

  initial begin
    in_valid = '0; out_ready = '0; we = '0;
    for (int c = 0; c < P; c++) begin sent[c] = 0; recv[c] = 0; cur[c] = new_line(); end
    for (int b = 0; b < 16; b++) wrow[b] = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int r = 0; r < D / 16; r++) begin
      @(negedge clk);
      we = '1;
      for (int b = 0; b < 16; b++) begin
        wrow[b] = r;
        for (int c = 0; c < P; c++) wdata[c][b] = 32'h00a0_0000 + c * 65536 + r * 16 + b;
      end
    end
    @(negedge clk); we = '0; go = 1;
    wait (recv[0] == NL && recv[1] == NL);
    repeat (5) @(posedge clk);
    for (int c = 0; c < P; c++) begin
      checks++;
      if (expq[c].size() != 0 || out_valid[c]) begin failures++; $display("core %0d: extra or missing lines", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("watchdog expired (received %0d/%0d)", recv[0], recv[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
