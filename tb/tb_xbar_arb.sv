// tb_xbar_arb: four inputs each offer a numbered sequence of words with
// random gaps while the output is randomly stalled. Checks that every word
// arrives exactly once, in order per input, that data is stable under stall,
// and that the round-robin grant serves a waiting input within N grants.
module tb_xbar_arb;
  localparam int N = 4, W = 16, PER = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] iv, ir;
  logic [W-1:0] id [N];
  logic ov, ordy;
  logic [W-1:0] od;
  int checks = 0, failures = 0;
  int sent [N], recv [N], wait_cnt [N];

  xbar_arb #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid(iv), .in_data(id), .in_ready(ir),
                                .out_valid(ov), .out_data(od), .out_ready(ordy));

  always_comb for (int i = 0; i < N; i++) id[i] = W'(i * 4096 + sent[i]);

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (iv[i] && ir[i]) begin sent[i]++; wait_cnt[i] = 0; end
      else if (iv[i] && ir != '0) begin
        wait_cnt[i]++;
        checks++;
        if (wait_cnt[i] > N) begin failures++; $display("input %0d starved", i); end
      end
    end
    if (ov && ordy) begin
      automatic int s = od / 4096, q = od % 4096;
      checks++;
      if (q != recv[s]) begin failures++; $display("input %0d: got %0d exp %0d", s, q, recv[s]); end
      recv[s]++;
    end
    for (int i = 0; i < N; i++) if (!(iv[i] && !ir[i])) iv[i] <= (sent[i] + ((iv[i] && ir[i]) ? 1 : 0) < PER) && ($urandom % 3 != 0);
    ordy <= ($urandom % 4 != 0);
  end

  initial begin
    iv = '0; ordy = 0;
    for (int i = 0; i < N; i++) begin sent[i] = 0; recv[i] = 0; wait_cnt[i] = 0; end
    repeat (3) @(posedge clk); rst_n <= 1;
    wait (recv[0] == PER && recv[1] == PER && recv[2] == PER && recv[3] == PER);
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) begin checks++; if (recv[i] != PER) failures++; end
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
