// tb_seq_reader: reads 100 lines starting at line 37 from a channel model
// with random request stalls and a randomly stalled consumer, then a second
// run of 5 lines. Checks that the lines arrive complete, in order, with
// out_last on the final one, that busy falls afterwards, and that with a
// ready consumer and no memory stalls the reader streams one line per cycle
// after the memory latency.
module tb_seq_reader;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, req_valid, req_ready, resp_valid, out_valid, out_last, out_ready;
  logic [ADDR_W-1:0] base_line, num_lines, req_line;
  logic [LINE_W-1:0] resp_data, out_data;
  rd_req_t rq; rd_resp_t rs;
  int checks = 0, failures = 0, got = 0;
  int unsigned exp_base;

  seq_reader #(.DEPTH(8)) dut (.*);
  assign rq.line = req_line; assign rq.client = '0;
  assign resp_data = rs.data;
  mem_channel_model #(.LINES(256), .LAT(5), .STALL_PCT(0)) mem (
    .clk, .rst_n, .rd_valid(req_valid), .rd_req(rq), .rd_ready(req_ready),
    .resp_valid, .resp(rs), .wr_valid(1'b0), .wr_req('0), .wr_ready());

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_data[31:0] != 32'(exp_base + got) || out_data[511:480] != ~32'(exp_base + got) ||
          out_last != (got + 1 == int'(num_lines))) begin
        failures++; $display("line %0d: %h last=%b", got, out_data[31:0], out_last);
      end
      got++;
    end
  end

  task automatic do_run(input int b, input int n, input bit rnd);
    int t0;
    exp_base = b; got = 0;
    @(posedge clk); start <= 1; base_line <= b; num_lines <= n;
    @(posedge clk); start <= 0;
    t0 = $time;
    while (got < n) begin
      @(posedge clk);
      out_ready <= rnd ? ($urandom % 3 != 0) : 1'b1;
    end
    @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after the run"); end
    if (!rnd) begin
      checks++;
      // latency ~ LAT + a few cycles, then one line per cycle
      if (($time - t0) / 10 > n + 16) begin failures++; $display("run took %0d cycles", ($time - t0) / 10); end
    end
  endtask

  initial begin
    out_ready = 0;
    for (int l = 0; l < 256; l++) begin
      mem.mem[l] = '0; mem.mem[l][31:0] = l; mem.mem[l][511:480] = ~32'(l);
    end
    repeat (3) @(posedge clk); rst_n <= 1;
    do_run(10, 40, 0);
    do_run(37, 100, 1);
    do_run(200, 5, 1);
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
