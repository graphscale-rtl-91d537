// tb_buffered_writer: sends 400 update vectors (ascending, distinct vertex
// ids spread over one to three lines, random lane gaps) with random memory
// backpressure, then holds flush until the writer is idle. Checks that the memory image equals the last
// label written to each vertex, that no other word is touched, that every
// write stays inside the label array, and that consecutive writes of one
// run of updates to the same line are merged (fewer writes than lines
// touched would need without combining).
module tb_buffered_writer;
  import gs_pkg::*;
  localparam int V = 8, NW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [ADDR_W-1:0] labels_line = 100;
  logic flush = 0, idle, in_ready, wr_valid, wr_ready;
  logic [V-1:0] in_valid;
  word_t in_id [V], in_label [V];
  wr_req_t wr_req;
  int checks = 0, failures = 0, writes = 0, updates = 0;
  word_t img [NW], ref_img [NW];

  buffered_writer #(.V(V)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      writes++;
      checks++;
      if (wr_req.line < labels_line || wr_req.line >= labels_line + NW / 16) begin
        failures++; $display("write outside the label array: line %0d", wr_req.line);
      end else
        for (int w = 0; w < 16; w++) if (wr_req.mask[w]) img[(wr_req.line - labels_line) * 16 + w] = wr_req.data[w*32 +: 32];
    end
    wr_ready <= ($urandom % 3 != 0);
  end

  initial begin
    wr_ready = 0; in_valid = '0;
    for (int k = 0; k < V; k++) begin in_id[k] = 0; in_label[k] = 0; end
    for (int i = 0; i < NW; i++) begin img[i] = 32'hdead_0000 + i; ref_img[i] = img[i]; end
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int n = 0; n < 400; n++) begin
      automatic int id = (n * 5 + $urandom % 6) % (NW - 48);
      for (int k = 0; k < V; k++) begin
        in_valid[k] = ($urandom % 3 != 0);
        id += 1 + (($urandom % 4 == 0) ? $urandom % 5 : 0);
        in_id[k] = id; in_label[k] = $urandom;
      end
      #1;
      forever begin
        automatic bit r = in_ready;
        @(posedge clk);
        if (r) break;
        #1;
      end
      for (int k = 0; k < V; k++) if (in_valid[k]) begin ref_img[in_id[k]] = in_label[k]; updates++; end
      #1;
      in_valid = '0;
      if ($urandom % 3 == 0) @(posedge clk);
      #1;
    end
    in_valid = '0;
    @(posedge clk); flush = 1;
    @(posedge clk);
    wait (idle && !wr_valid); flush = 0; repeat (3) @(posedge clk);
    for (int i = 0; i < NW; i++) begin
      checks++;
      if (img[i] != ref_img[i]) begin failures++; if (failures < 6) $display("word %0d = %h expected %h", i, img[i], ref_img[i]); end
    end
    checks++;
    if (writes * 2 > updates) begin failures++; $display("no write combining: %0d writes for %0d updates", writes, updates); end
    $display("%0d updates in %0d line writes", updates, writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
