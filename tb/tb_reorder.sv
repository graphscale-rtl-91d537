// tb_reorder: admits lines with random masks into a 4-slot reorder stage and
// returns their labels lane by lane in a scrambled order (at most one write
// per lane and cycle, lines overtaking each other). Checks that lines leave
// in admission order with the right labels and mask, that admission stops
// exactly when 4 lines are in flight, and that a line leaves in the cycle
// after its last label arrives when the consumer is ready.
module tb_reorder;
  import gs_pkg::*;
  localparam int SLOTS = 4, LINESN = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic admit, admit_ready, out_valid, out_ready;
  lmask_t admit_mask, out_mask;
  logic [1:0] admit_tag;
  logic [15:0] wr_valid;
  logic [1:0] wr_tag [16];
  word_t wr_label [16];
  word_t out_label [16];
  int checks = 0, failures = 0, nadm = 0, nout = 0, full_seen = 0;
  lmask_t masks [LINESN];
  lmask_t todo [SLOTS];
  int lineof [SLOTS];

  reorder #(.SLOTS(SLOTS)) dut (.*);

  initial for (int i = 0; i < LINESN; i++) masks[i] = lmask_t'($urandom) | lmask_t'(1 << (i % 16));

  always_comb begin
    admit = rst_n && nadm < LINESN;
    admit_mask = masks[nadm < LINESN ? nadm : 0];
  end

  // scramble: each lane picks a random pending line among the slots
  always_comb begin
    for (int l = 0; l < 16; l++) begin
      wr_valid[l] = 1'b0; wr_tag[l] = '0; wr_label[l] = '0;
    end
  end
  logic [15:0] wv; logic [1:0] wt [16]; word_t wl [16];
  assign wr_valid = wv;
  always_comb for (int l = 0; l < 16; l++) begin wr_tag[l] = wt[l]; wr_label[l] = wl[l]; end

  always @(posedge clk) if (rst_n) begin
    if (admit && admit_ready) begin
      checks++;
      if (admit_tag != 2'(nadm)) begin failures++; $display("tag %0d for line %0d", admit_tag, nadm); end
      todo[nadm % SLOTS] = masks[nadm];
      lineof[nadm % SLOTS] = nadm;
      nadm++;
    end
    if (!admit_ready) begin
      full_seen++;
      checks++;
      if (nadm - nout != SLOTS) begin failures++; $display("backpressure with %0d in flight", nadm - nout); end
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_mask != masks[nout]) failures++;
      for (int l = 0; l < 16; l++) if (out_mask[l]) begin
        checks++;
        if (out_label[l] != word_t'(nout * 16 + l)) begin
          failures++; $display("line %0d lane %0d: %0d", nout, l, out_label[l]);
        end
      end
      nout++;
    end
    out_ready <= ($urandom % 5 != 0);
    for (int l = 0; l < 16; l++) begin
      automatic int s0 = $urandom % SLOTS;
      wv[l] <= 1'b0;
      for (int d = 0; d < SLOTS; d++) begin
        automatic int s = (s0 + d) % SLOTS;
        if (!wv[l] && todo[s][l] && ($urandom % 2 == 0)) begin
          wv[l] <= 1'b1; wt[l] <= 2'(s); wl[l] <= word_t'(lineof[s] * 16 + l);
          todo[s][l] = 1'b0;
          break;
        end
      end
    end
  end

  initial begin
    wv = '0; out_ready = 0;
    for (int s = 0; s < SLOTS; s++) todo[s] = '0;
    repeat (3) @(posedge clk); rst_n <= 1;
    wait (nout == LINESN);
    checks++;
    if (full_seen == 0) begin failures++; $display("backpressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
