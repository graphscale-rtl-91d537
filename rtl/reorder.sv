// reorder: last stage of the two level crossbar for one graph core; restores
// the original line order of the vertex labels.
// It has SLOTS reorder slots, each one line of LINE_WORDS labels plus one
// valid bit per lane. When a line enters the crossbar its valid mask is
// pushed into a FIFO (admit). Labels come back out of order, one per lane
// and cycle at most, carrying the line's tag (line number modulo SLOTS),
// which addresses the slot. A pointer names the line to be output next; when
// the valid bits of that slot equal the mask at the FIFO head, the line is
// output, the slot's valid bits are cleared, the FIFO is popped and the
// pointer advances, wrapping from SLOTS-1 to 0.
// Backpressure: admit_ready drops when the FIFO holds SLOTS lines, which
// stops new lines from entering the crossbar; as all lines in flight then
// own distinct slots, the stages in between never need to stall on it.
// The mechanism follows the paper. The per-lane slot memories are register
// arrays here; their read is combinational.
module reorder
  import gs_pkg::*;
#(
  parameter int unsigned SLOTS = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                  admit,
  input  lmask_t                admit_mask,
  output logic                  admit_ready,
  output logic [$clog2(SLOTS)-1:0] admit_tag,
  input  logic [LINE_WORDS-1:0] wr_valid,
  input  logic [$clog2(SLOTS)-1:0] wr_tag [LINE_WORDS],
  input  word_t                 wr_label [LINE_WORDS],
  output logic                  out_valid,
  output word_t                 out_label [LINE_WORDS],
  output lmask_t                out_mask,
  input  logic                  out_ready
);
  localparam int unsigned TW = $clog2(SLOTS);
  logic [TW-1:0] ptr, wtag;
  lmask_t slot_v [SLOTS];
  word_t  slot_l [LINE_WORDS][SLOTS];
  lmask_t fhead;
  logic fempty, ffull, pop;
  logic [TW:0] fcount;

  gs_fifo #(.WIDTH(LINE_WORDS), .DEPTH(SLOTS)) u_mask (
    .clk, .rst_n, .clr(1'b0), .push(admit && admit_ready), .din(admit_mask), .pop,
    .dout(fhead), .full(ffull), .empty(fempty), .count(fcount));

  assign admit_ready = !ffull;
  assign admit_tag   = wtag;
  assign out_valid   = !fempty && (slot_v[ptr] == fhead);
  assign out_mask    = fhead;
  assign pop         = out_valid && out_ready;
  always_comb for (int k = 0; k < LINE_WORDS; k++) out_label[k] = slot_l[k][ptr];

  always_ff @(posedge clk) begin
    for (int k = 0; k < LINE_WORDS; k++)
      if (wr_valid[k]) slot_l[k][wr_tag[k]] <= wr_label[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; wtag <= '0;
      for (int s = 0; s < SLOTS; s++) slot_v[s] <= '0;
    end else begin
      if (admit && admit_ready) wtag <= TW'(wtag + 1'b1);
      if (pop) begin
        slot_v[ptr] <= '0;
        ptr <= TW'(ptr + 1'b1);
      end
      for (int k = 0; k < LINE_WORDS; k++)
        if (wr_valid[k]) slot_v[wr_tag[k]][k] <= 1'b1;
    end
  end

  a_no_double_write: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid[0] |-> !slot_v[wr_tag[0]][0]);
endmodule
