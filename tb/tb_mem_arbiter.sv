// tb_mem_arbiter: four sequential readers share one channel model with
// random stalls through the arbiter, each reading its own region. Checks
// that every reader receives exactly its own lines in order (response
// routing by client tag) and that all four make progress.
module tb_mem_arbiter;
  import gs_pkg::*;
  localparam int N = 4, NL = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [N-1:0] cl_req_valid, cl_req_ready, cl_resp_valid, busy, ov, ol;
  logic [ADDR_W-1:0] cl_req_line [N];
  logic [LINE_W-1:0] cl_resp_data;
  logic [LINE_W-1:0] od [N];
  logic ch_rd_valid, ch_rd_ready, ch_resp_valid;
  rd_req_t ch_rd_req; rd_resp_t ch_resp;
  int checks = 0, failures = 0, got [N];

  mem_arbiter #(.N(N)) dut (.*);
  mem_channel_model #(.LINES(512), .LAT(7), .STALL_PCT(20)) mem (
    .clk, .rst_n, .rd_valid(ch_rd_valid), .rd_req(ch_rd_req), .rd_ready(ch_rd_ready),
    .resp_valid(ch_resp_valid), .resp(ch_resp), .wr_valid(1'b0), .wr_req('0), .wr_ready());

  for (genvar c = 0; c < N; c++) begin : g_cl
    seq_reader u_rd (.clk, .rst_n, .start, .base_line(ADDR_W'(c * 100)), .num_lines(ADDR_W'(NL)),
      .busy(busy[c]), .req_valid(cl_req_valid[c]), .req_line(cl_req_line[c]), .req_ready(cl_req_ready[c]),
      .resp_valid(cl_resp_valid[c]), .resp_data(cl_resp_data),
      .out_valid(ov[c]), .out_data(od[c]), .out_last(ol[c]), .out_ready(1'b1));
    always @(posedge clk) if (rst_n && ov[c]) begin
      checks++;
      if (od[c][31:0] != 32'(c * 100 + got[c])) begin
        failures++; $display("client %0d line %0d got %0d", c, got[c], od[c][31:0]);
      end
      got[c]++;
    end
  end

  initial begin
    for (int l = 0; l < 512; l++) begin mem.mem[l] = '0; mem.mem[l][31:0] = l; end
    for (int c = 0; c < N; c++) got[c] = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (got[0] == NL && got[1] == NL && got[2] == NL && got[3] == NL);
    repeat (20) @(posedge clk);
    for (int c = 0; c < N; c++) begin checks++; if (got[c] != NL) failures++; end
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
