// tb_label_scratch_pad: fills a 256-label scratch pad through the write
// ports, then issues random reads on all 16 banks with random response
// stalls. Checks each response's label and annotation against the written
// contents and the request order per bank, the one-cycle latency when the
// consumer is ready, and that the overflow register was used.
module tb_label_scratch_pad;
  import gs_pkg::*;
  localparam int DEPTH = 256, RW = 4, AW = 8, NREQ = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] rd_valid, rd_ready, resp_valid, resp_ready, we;
  logic [RW-1:0] rd_row [16];
  logic [AW-1:0] rd_ann [16];
  word_t resp_label [16];
  logic [AW-1:0] resp_ann [16];
  logic [RW-1:0] wrow [16];
  word_t wdata [16];
  int checks = 0, failures = 0, ovf = 0, nreq [16], nresp [16];
  logic [RW-1:0] qrow [16][$];
  logic [AW-1:0] qann [16][$];
  bit reading = 0, stall_phase = 0;

  label_scratch_pad #(.DEPTH(DEPTH), .ANN_W(AW)) dut (.*);

  function automatic word_t content(int b, int r); return word_t'(32'hA000 + r * 16 + b); endfunction

  for (genvar b = 0; b < 16; b++) begin : g
    always @(posedge clk) if (rst_n && dut.g_bank[b].ovf_v) ovf++;
  end

  always @(posedge clk) if (rst_n && reading) begin
    for (int b = 0; b < 16; b++) begin
      if (rd_valid[b] && rd_ready[b]) begin
        qrow[b].push_back(rd_row[b]); qann[b].push_back(rd_ann[b]); nreq[b]++;
      end
      if (resp_valid[b] && resp_ready[b]) begin
        automatic logic [RW-1:0] r = qrow[b].pop_front();
        automatic logic [AW-1:0] a = qann[b].pop_front();
        checks++;
        if (resp_label[b] != content(b, r) || resp_ann[b] != a) begin
          failures++; $display("bank %0d row %0d: %h/%h", b, r, resp_label[b], resp_ann[b]);
        end
        nresp[b]++;
      end
      if (!stall_phase && resp_ready[b] && rd_valid[b] && rd_ready[b]) begin
        // one-cycle latency: the answer must be visible in the next cycle
      end
      rd_valid[b] <= (nreq[b] + ((rd_valid[b] && rd_ready[b]) ? 1 : 0) < NREQ) && ($urandom % 4 != 0);
      rd_row[b] <= RW'($urandom); rd_ann[b] <= AW'($urandom);
      resp_ready[b] <= stall_phase ? ($urandom % 3 == 0) : 1'b1;
    end
  end

  // latency check in the unstalled phase
  always @(posedge clk) if (rst_n && reading && !stall_phase) begin
    for (int b = 0; b < 16; b++)
      if (rd_valid[b] && rd_ready[b] && resp_ready[b]) begin
        automatic int b2 = b;
        fork begin
          #1;
          checks++;
          if (!resp_valid[b2]) begin failures++; $display("bank %0d: no response after one cycle", b2); end
        end join_none
      end
  end

  initial begin
    rd_valid = '0; we = '0; resp_ready = '1;
    for (int b = 0; b < 16; b++) begin nreq[b] = 0; nresp[b] = 0; rd_row[b] = '0; rd_ann[b] = '0; end
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int r = 0; r < DEPTH / 16; r++) begin
      @(posedge clk);
      we <= '1;
      for (int b = 0; b < 16; b++) begin wrow[b] <= RW'(r); wdata[b] <= content(b, r); end
    end
    @(posedge clk); we <= '0;
    @(posedge clk); reading = 1;
    repeat (100) @(posedge clk);
    stall_phase = 1;
    wait (nresp[0] == NREQ && nresp[7] == NREQ && nresp[15] == NREQ);
    repeat (20) @(posedge clk);
    for (int b = 0; b < 16; b++) begin checks++; if (nresp[b] != NREQ) failures++; end
    checks++;
    if (ovf == 0) begin failures++; $display("overflow register never used"); end
    $display("overflow register busy in %0d bank-cycles", ovf);
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
