// tb_src_builder: feeds label and pointer lines for partitions of several
// sizes (multiples of 16, of 8 and odd) with random stream gaps and a
// randomly stalled consumer. Checks every source's index, label, left and
// right bound and the valid mask of the last group against the arrays, and
// out_last.
module tb_src_builder;
  import gs_pkg::*;
  localparam int V = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, lab_valid, lab_ready, ptr_valid, ptr_ready, out_valid, out_last, out_ready;
  word_t num_vertices;
  logic [LINE_W-1:0] lab_data, ptr_data;
  logic [V-1:0] out_vmask;
  word_t out_idx [V], out_label [V], out_lb [V], out_rb [V];
  int checks = 0, failures = 0;
  word_t lab [256], ptr [257];
  int li, pi, nl, np, gi, n;

  src_builder #(.V(V)) dut (.*);

  always_comb begin
    for (int w = 0; w < 16; w++) begin
      lab_data[w*32 +: 32] = lab[(li*16 + w) % 256];
      ptr_data[w*32 +: 32] = ptr[(pi*16 + w) % 257];
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (lab_valid && lab_ready) li++;
    if (ptr_valid && ptr_ready) pi++;
    if (out_valid && out_ready) begin
      for (int k = 0; k < V; k++) begin
        automatic int v = gi * V + k;
        checks++;
        if (out_vmask[k] != (v < n)) begin failures++; $display("mask v%0d", v); end
        if (v < n && (out_idx[k] != v || out_label[k] != lab[v] || out_lb[k] != ptr[v] || out_rb[k] != ptr[v+1])) begin
          failures++; $display("v%0d: %0d %0d %0d %0d", v, out_idx[k], out_label[k], out_lb[k], out_rb[k]);
        end
      end
      checks++;
      if (out_last != ((gi + 1) * V >= n)) failures++;
      gi++;
    end
    lab_valid <= (li + ((lab_valid && lab_ready) ? 1 : 0) < nl) && ($urandom % 4 != 0);
    ptr_valid <= (pi + ((ptr_valid && ptr_ready) ? 1 : 0) < np) && ($urandom % 4 != 0);
    out_ready <= ($urandom % 3 != 0);
  end

  task automatic run(input int nv);
    n = nv; li = 0; pi = 0; gi = 0; nl = (nv + 15) / 16; np = (nv + 1 + 15) / 16;
    ptr[0] = $urandom % 5;
    for (int v = 0; v < nv; v++) begin lab[v] = $urandom; ptr[v+1] = ptr[v] + $urandom % 20; end
    @(posedge clk); start <= 1; num_vertices <= nv;
    @(posedge clk); start <= 0;
    wait (gi == (nv + V - 1) / V);
    repeat (5) @(posedge clk);
    checks++;
    if (li != nl || pi != np) begin failures++; $display("lines consumed %0d/%0d %0d/%0d", li, nl, pi, np); end
  endtask

  initial begin
    lab_valid = 0; ptr_valid = 0; out_ready = 0; nl = 0; np = 0; li = 0; pi = 0; gi = 0; n = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    run(64); run(40); run(37); run(15); run(16); run(200);
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
