// tb_bank_shuffle: sends random neighbour lines (random masks, indices with a
// skewed bank distribution so that lines hit one bank several times) into
// the bank shuffle while bank outputs are randomly stalled. Checks that every
// valid lane leaves exactly once, on bank (index % 16), with its lane and
// tag, lowest lane first within a line and bank, and that a line with k
// neighbours for one bank needs k cycles on that bank (the stall).
module tb_bank_shuffle;
  import gs_pkg::*;
  localparam int LN = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  word_t in_nbr [16];
  lmask_t in_mask;
  logic [4:0] in_tag;
  logic [15:0] out_valid, out_ready;
  word_t out_nbr [16];
  logic [4:0] out_tag [16];
  logic [3:0] out_lane [16];
  int checks = 0, failures = 0, nin = 0, expected = 0, got = 0, multi = 0;
  word_t nbrs [LN][16];
  lmask_t msk [LN];
  int last_lane [16];
  int last_line [16];

  bank_shuffle #(.TW(5), .DEPTH(4)) dut (.*);

  initial for (int i = 0; i < LN; i++) begin
    msk[i] = lmask_t'($urandom);
    for (int k = 0; k < 16; k++) begin
      nbrs[i][k] = ($urandom % 2) ? word_t'(($urandom % 4) * 16 * 3 + k % 3) : word_t'($urandom);
      if (msk[i][k]) expected++;
    end
  end

  always_comb begin
    in_valid = rst_n && nin < LN;
    in_nbr = nbrs[nin < LN ? nin : 0];
    in_mask = msk[nin < LN ? nin : 0];
    in_tag = 5'(nin);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) nin++;
    for (int b = 0; b < 16; b++) if (out_valid[b] && out_ready[b]) begin
      automatic int ln = last_line[b], lane = out_lane[b];
      got++;
      checks++;
      if (out_nbr[b][3:0] != 4'(b)) begin failures++; $display("bank %0d got index %0h", b, out_nbr[b]); end
      // find the line this belongs to: lines leave each bank in order
      while (ln < LN && !(msk[ln][lane] && nbrs[ln][lane][3:0] == 4'(b) && out_tag[b] == 5'(ln)
                          && (ln != last_line[b] || lane > last_lane[b]))) ln++;
      checks++;
      if (ln >= LN || nbrs[ln][lane] != out_nbr[b]) begin
        failures++; $display("bank %0d: unexpected lane %0d tag %0d", b, lane, out_tag[b]);
      end else begin
        if (ln == last_line[b]) multi++;
        last_line[b] = ln; last_lane[b] = lane;
      end
    end
    for (int b = 0; b < 16; b++) out_ready[b] <= ($urandom % 4 != 0);
  end

  initial begin
    out_ready = '0;
    for (int b = 0; b < 16; b++) begin last_line[b] = 0; last_lane[b] = -1; end
    repeat (3) @(posedge clk); rst_n <= 1;
    wait (got == expected);
    repeat (10) @(posedge clk);
    checks++;
    if (got != expected) failures++;
    checks++;
    if (multi == 0) begin failures++; $display("no bank received two lanes of one line"); end
    $display("lanes %0d, same-line repeats on a bank %0d", got, multi);
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
