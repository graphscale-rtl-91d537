// tb_label_prefetcher: prefetches two sub-intervals (37 lines, then 5 lines
// starting elsewhere) from a behavioural memory channel with 30% stalls and
// checks that line n of each interval is written to row n of all 16 banks
// with the right words, that the rows arrive in order and are all written,
// and that done returns once the interval is complete.
module tb_label_prefetcher;
  import gs_pkg::*;
  localparam int RW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, req_valid, req_ready, resp_valid, wr_ready;
  logic [ADDR_W-1:0] base_line, num_lines, req_line;
  logic [LINE_W-1:0] resp_data;
  logic [LINE_WORDS-1:0] sp_we;
  logic [RW-1:0] sp_wrow [LINE_WORDS];
  word_t sp_wdata [LINE_WORDS];
  rd_req_t mreq;
  rd_resp_t mresp;
  int checks = 0, failures = 0, nrow = 0;

  label_prefetcher #(.RW(RW)) dut (.*);
  assign mreq.line = req_line;
  assign mreq.client = '0;
  assign resp_data = mresp.data;
  mem_channel_model #(.LINES(256), .LAT(6), .STALL_PCT(30), .SEED(7)) u_mem (
    .clk, .rst_n, .rd_valid(req_valid), .rd_req(mreq), .rd_ready(req_ready),
    .resp_valid, .resp(mresp), .wr_valid(1'b0), .wr_req('0), .wr_ready);

  always @(posedge clk) if (rst_n && sp_we != '0) begin
    checks++;
    if (sp_we != '1) begin failures++; $display("partial row write %h", sp_we); end
    for (int b = 0; b < 16; b++) begin
      checks++;
      if (sp_wrow[b] != nrow || sp_wdata[b] != 32'(((base_line + nrow) << 4) + b)) begin
        failures++; $display("bank %0d row %0d data %h (expected row %0d)", b, sp_wrow[b], sp_wdata[b], nrow);
      end
    end
    nrow++;
  end

  task automatic run(input int base, input int n);
    base_line = base; num_lines = n; nrow = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk); wait (done); repeat (10) @(posedge clk);
    checks++;
    if (nrow != n) begin failures++; $display("%0d rows written, expected %0d", nrow, n); end
  endtask

  initial begin
    for (int l = 0; l < 256; l++)
      for (int w = 0; w < 16; w++) u_mem.mem[l][w*32 +: 32] = (l << 4) + w;
    repeat (3) @(posedge clk); rst_n <= 1;
    run(20, 37);
    run(100, 5);
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
