// tb_core_controller: drives the controller with a scripted environment and
// checks the address conversion (line bases and counts, including values
// that are not multiples of 16) and the phase sequence: a prefetch command
// starts the prefetcher and ends when it is done; a process command starts
// the readers, waits for the edge builder, for an empty accumulator, pulses
// the accumulator flush for one enabled cycle (held while en is low), waits
// for an idle accumulator, then holds the writer flush until the writer is
// idle. busy must stay high throughout and fall only at the end.
module tb_core_controller;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  core_cfg_t cfg;
  logic cmd_prefetch = 0, cmd_process = 0, busy, pf_start, pf_done, proc_start;
  logic [ADDR_W-1:0] pf_base, pf_lines, lab_base, lab_lines, ptr_base, ptr_lines, nbr_base, nbr_lines;
  logic eb_done, acc_empty, acc_idle, acc_en, acc_flush, wr_idle, wr_flush;
  int checks = 0, failures = 0;

  core_controller dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cycles(input int n, input bit want_busy);
    repeat (n) begin @(posedge clk); #1; chk(busy == want_busy, "busy"); end
  endtask

  initial begin
    pf_done = 1; eb_done = 1; acc_empty = 1; acc_idle = 1; acc_en = 1; wr_idle = 1;
    cfg = '{labels_line: 1000, ptr_line: 2000, nbr_line: 3000, num_vertices: 33,
            num_edges: 161, sub_base: 48, sub_size: 17};
    repeat (3) @(posedge clk); rst_n <= 1; #1;
    chk(pf_base == 1003 && pf_lines == 2, "prefetch range");
    chk(lab_base == 1000 && lab_lines == 3, "label range");
    chk(ptr_base == 2000 && ptr_lines == 3, "pointer range");
    chk(nbr_base == 3000 && nbr_lines == 11, "neighbour range");
    chk(!busy, "idle after reset");
    // prefetch phase
    @(posedge clk); #1 cmd_prefetch = 1; #1 chk(pf_start && busy && !proc_start, "prefetch start");
    @(posedge clk); #1 cmd_prefetch = 0; pf_done = 0;
    cycles(5, 1);
    pf_done = 1; @(posedge clk); #1; chk(!busy, "prefetch done");
    // process phase
    cmd_process = 1; #1 chk(proc_start && busy && !pf_start, "process start");
    @(posedge clk); #1 cmd_process = 0; eb_done = 0; acc_empty = 0; acc_idle = 0; wr_idle = 0;
    cycles(4, 1);
    eb_done = 1; cycles(3, 1);
    chk(!acc_flush, "no flush before empty");
    acc_empty = 1; acc_en = 0; @(posedge clk); #1;
    chk(acc_flush, "accumulator flush");
    cycles(2, 1); chk(acc_flush, "flush held while stalled");
    acc_en = 1; @(posedge clk); #1; chk(!acc_flush, "flush one enabled cycle");
    cycles(3, 1); chk(!wr_flush, "writer flush waits for idle accumulator");
    acc_idle = 1; @(posedge clk); #1; chk(wr_flush, "writer flush");
    cycles(3, 1); chk(wr_flush, "writer flush held");
    wr_idle = 1; @(posedge clk); #1; chk(!busy && !wr_flush, "process done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
