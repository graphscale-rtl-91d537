// tb_prefix_adder: first the example of the paper's prefix-adder figure
// (ids 4,4,4,1,2,2,3,4 with labels 2,1,4,5,3,4,0,2, each pair doubled to fill
// 16 lanes), then random lines with few distinct ids, some invalid lanes
// and wrap-around between the last and the first lane. Each lane's output
// must be the minimum over the run of equal ids ending at that lane; the last
// lane must in addition include the first run when it has the same id and
// the line holds more than one id. Latency log2(16)+1 = 5 cycles.
module tb_prefix_adder;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 1;
  pair_t in [16];
  pair_t out [16];
  int checks = 0, failures = 0;
  typedef pair_t [15:0] pline_t;
  pline_t hist [$];
  pline_t cur;
  int cyc = 0;

  prefix_adder dut (.*);

  word_t lab [16];
  logic upd [16];
  function automatic void expect_line(input pline_t x);
    for (int i = 0; i < 16; i++) begin
      lab[i] = x[i].label; upd[i] = x[i].upd;
      for (int j = i - 1; j >= 0; j--) begin
        if (!x[j].v || !x[i].v || x[j].id != x[i].id) break;
        if (x[j].label < lab[i]) lab[i] = x[j].label;
        upd[i] |= x[j].upd;
      end
    end
    begin
      automatic bit allsame = 1;
      for (int i = 0; i < 16; i++) if (!x[i].v || x[i].id != x[0].id) allsame = 0;
      if (!allsame && x[0].v && x[15].v && x[0].id == x[15].id)
        for (int j = 0; j < 16; j++) begin
          if (!x[j].v || x[j].id != x[0].id) break;
          if (x[j].label < lab[15]) lab[15] = x[j].label;
          upd[15] |= x[j].upd;
        end
    end
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int i = 0; i < 16; i++) cur[i] = in[i];
    hist.push_back(cur);
    if (hist.size() >= 6) begin
      automatic pline_t x = hist.pop_front();
      expect_line(x);
      for (int i = 0; i < 16; i++) if (x[i].v) begin
        checks++;
        if (out[i].label != lab[i] || out[i].upd != upd[i] || out[i].id != x[i].id) begin
          failures++;
          if (failures < 5) $display("lane %0d: (%0d,%0d) expected (%0d,%0d)", i, out[i].id, out[i].label, x[i].id, lab[i]);
        end
      end
    end
  end

  task automatic drive(input pair_t x [16]);
    in = x;
    @(posedge clk);
  endtask

  initial begin
    automatic int fid [8] = '{4, 4, 4, 1, 2, 2, 3, 4};
    automatic int flab [8] = '{2, 1, 4, 5, 3, 4, 0, 2};
    automatic pair_t x [16];
    for (int i = 0; i < 16; i++) in[i] = '0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int i = 0; i < 16; i++) begin
      x[i] = '0; x[i].v = 1; x[i].id = fid[i / 2]; x[i].label = flab[i / 2]; x[i].upd = (i == 5);
    end
    drive(x);
    for (int n = 0; n < 400; n++) begin
      automatic int base = $urandom % 4;
      for (int i = 0; i < 16; i++) begin
        x[i] = '0;
        x[i].v = ($urandom % 10 != 0);
        x[i].id = base + (i * ($urandom % 3 + 1)) / 8;
        x[i].label = $urandom % 50;
        x[i].upd = ($urandom % 4 == 0);
      end
      if (n % 3 == 0) x[15].id = x[0].id;
      drive(x);
    end
    for (int i = 0; i < 16; i++) x[i] = '0;
    repeat (6) drive(x);
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
