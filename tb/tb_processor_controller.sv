// tb_processor_controller: two modelled graph cores (busy for a random
// number of cycles after each command, reporting label updates during the
// first UPD iterations) under three runs: three meta-partitions without
// optimisations until convergence; one meta-partition with immediate
// updates and prefetch skipping; and a run stopped by the iteration limit.
// Checks the command sequence (all cores prefetch, then all process, for
// every meta-partition of every iteration, prefetch left out when skipping),
// that no command is issued while a core is busy, the per-core parameters
// presented with each process command, the iteration count and done.
module tb_processor_controller;
  import gs_pkg::*;
  localparam int P = 2, MM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0, start = 0, done, imm_updates;
  logic [15:0] cfg_addr;
  word_t cfg_wdata, iterations;
  core_cfg_t core_cfg [P];
  logic [P-1:0] cmd_prefetch, cmd_process, core_busy, core_upd;
  int checks = 0, failures = 0;
  int left [P];
  int cur_iter, upd_iters, curk;
  string log;
  bit in_proc = 0;

  processor_controller #(.P(P), .MAX_META(MM)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (cmd_prefetch != '0 || cmd_process != '0) begin
      checks++;
      if (core_busy != (cmd_prefetch | cmd_process) || (cmd_prefetch != '0 && cmd_prefetch != '1) ||
          (cmd_process != '0 && cmd_process != '1)) begin
        failures++; $display("command while busy or not to all cores");
      end
      if (cmd_prefetch != '0) log = {log, $sformatf("F%0d", curk)};
      if (cmd_process != '0) begin
        log = {log, $sformatf("P%0d", curk)};
        for (int q = 0; q < P; q++) begin
          checks++;
          if (core_cfg[q].ptr_line != 100 * curk + q || core_cfg[q].nbr_line != 200 * curk + q ||
              core_cfg[q].num_edges != 300 * curk + q || core_cfg[q].sub_base != 16 * curk ||
              core_cfg[q].sub_size != 10 + curk || core_cfg[q].labels_line != 50 + q ||
              core_cfg[q].num_vertices != 60 + q) begin
            failures++; $display("core %0d wrong parameters for meta-partition %0d", q, curk);
          end
        end
      end
    end
    if (cmd_process != '0) in_proc <= 1;
    else if (cmd_prefetch != '0) in_proc <= 0;
    for (int q = 0; q < P; q++) begin
      if (cmd_prefetch[q] || cmd_process[q]) left[q] <= 1 + $urandom % 8;
      else if (left[q] > 0) left[q] <= left[q] - 1;
    end
  end
  always_comb for (int q = 0; q < P; q++) begin
    core_busy[q] = cmd_prefetch[q] || cmd_process[q] || left[q] > 0;
    core_upd[q]  = left[q] == 1 && q == 1 && in_proc && cur_iter < upd_iters;
  end
  always @(posedge clk) begin
    curk = int'(dut.k);
    cur_iter = int'(iterations);
  end

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int l, input int mi, input int fl, input int ui, input int exp_it, input string exp_log);
    wr(0, l); wr(1, mi); wr(2, fl);
    upd_iters = ui; log = "";
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); repeat (3) @(posedge clk);
    checks++;
    if (iterations != exp_it || imm_updates != fl[0]) begin failures++; $display("iterations %0d expected %0d", iterations, exp_it); end
    checks++;
    if (log != exp_log) begin failures++; $display("sequence %s\n expected %s", log, exp_log); end
  endtask

  initial begin
    for (int q = 0; q < P; q++) left[q] = 0;
    cur_iter = 0; upd_iters = 0; curk = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int q = 0; q < P; q++) begin wr(16'h1000 + 2*q, 50 + q); wr(16'h1001 + 2*q, 60 + q); end
    for (int k = 0; k < MM; k++) begin
      wr(16'h2000 + 16*k, 16 * k); wr(16'h2001 + 16*k, 10 + k);
      for (int q = 0; q < P; q++) begin
        wr(16'h3000 + 64*k + 4*q, 100*k + q); wr(16'h3001 + 64*k + 4*q, 200*k + q); wr(16'h3002 + 64*k + 4*q, 300*k + q);
      end
    end
    run(3, 10, 0, 2, 3, "F0P0F1P1F2P2F0P0F1P1F2P2F0P0F1P1F2P2");
    run(1, 10, 3, 3, 4, "F0P0P0P0P0");
    run(2, 2, 1, 9, 2, "F0P0F1P1F0P0F1P1");
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
