// tb_dst_builder: streams neighbour lines for 3 edge counts with random gaps
// and consumer stalls; checks each lane's neighbour index, the valid mask of
// the partial last line and out_last.
module tb_dst_builder;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, in_valid, in_ready, out_valid, out_last, out_ready;
  word_t num_edges, out_nbr [16];
  logic [LINE_W-1:0] in_data;
  lmask_t out_mask;
  int checks = 0, failures = 0, li, lo, nl, m;

  dst_builder dut (.*);
  always_comb for (int w = 0; w < 16; w++) in_data[w*32 +: 32] = 32'h5000 + li * 16 + w;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) li++;
    if (out_valid && out_ready) begin
      for (int w = 0; w < 16; w++) begin
        checks++;
        if (out_mask[w] != (lo * 16 + w < m) || out_nbr[w] != 32'h5000 + lo * 16 + w) begin failures++; if (failures < 4) $display("lo=%0d w=%0d m=%b nbr=%h", lo, w, out_mask[w], out_nbr[w]); end
      end
      checks++;
      if (out_last != (lo + 1 == nl)) failures++;
      lo++;
    end
    in_valid <= (li + ((in_valid && in_ready) ? 1 : 0) < nl) && ($urandom % 3 != 0);
    out_ready <= ($urandom % 3 != 0);
  end

  task automatic run(input int ne);
    m = ne; nl = (ne + 15) / 16; li = 0; lo = 0;
    @(posedge clk); start <= 1; num_edges <= ne;
    @(posedge clk); start <= 0;
    wait (lo == nl);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; nl = 0; li = 0; lo = 0; m = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    run(100); run(16); run(7);
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
