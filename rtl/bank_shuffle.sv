// bank_shuffle: first level of the two level crossbar for one graph core.
// Each incoming line of LINE_WORDS neighbour indices (with valid mask and the
// line's reorder tag) is split by the low log2(e) bits of each index: bank
// shuffler b receives the lanes whose index falls in scratch pad bank b.
// The e bank shufflers are decoupled: each owns a FIFO of DEPTH lines and
// emits one neighbour per cycle, lowest lane first, annotated with the line
// tag and its original lane. Several neighbours of one line that hit the
// same bank therefore leave in successive cycles (a stall for that bank
// only), while the other banks can already serve later lines.
// A line is accepted (in_ready) when every bank FIFO has room. Outputs are
// valid/ready per bank, combinational from the FIFO heads.
// The mechanism follows the paper; the FIFO depth is this design's choice.
module bank_shuffle
  import gs_pkg::*;
#(
  parameter int unsigned TW    = 5,
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  word_t             in_nbr [LINE_WORDS],
  input  lmask_t            in_mask,
  input  logic [TW-1:0]     in_tag,
  output logic              in_ready,
  output logic [LINE_WORDS-1:0] out_valid,
  output word_t             out_nbr  [LINE_WORDS],
  output logic [TW-1:0]     out_tag  [LINE_WORDS],
  output logic [LANE_W-1:0] out_lane [LINE_WORDS],
  input  logic [LINE_WORDS-1:0] out_ready
);
  localparam int unsigned FW = LINE_W + LINE_WORDS + TW;
  logic [LINE_WORDS-1:0] full, empty, push, pop;
  logic [FW-1:0] din [LINE_WORDS];
  logic [FW-1:0] dout [LINE_WORDS];
  lmask_t done [LINE_WORDS];
  lmask_t bmask [LINE_WORDS];

  assign in_ready = (full == '0);

  always_comb begin
    for (int b = 0; b < LINE_WORDS; b++) begin
      bmask[b] = '0;
      for (int k = 0; k < LINE_WORDS; k++)
        bmask[b][k] = in_mask[k] && (in_nbr[k][LANE_W-1:0] == LANE_W'(b));
    end
  end

  for (genvar b = 0; b < LINE_WORDS; b++) begin : g_bank
    logic [LINE_W-1:0] hl;
    lmask_t hm, eff;
    logic [TW-1:0] ht;
    logic [LANE_W-1:0] sel;
    logic last_one;
    logic [$clog2(DEPTH):0] cnt;

    always_comb begin
      din[b] = '0;
      for (int k = 0; k < LINE_WORDS; k++) din[b][k*WORD_W +: WORD_W] = in_nbr[k];
      din[b][LINE_W +: LINE_WORDS] = bmask[b];
      din[b][LINE_W + LINE_WORDS +: TW] = in_tag;
    end
    assign push[b] = in_valid && in_ready && (bmask[b] != '0);

    gs_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n, .clr(1'b0), .push(push[b]), .din(din[b]), .pop(pop[b]),
      .dout(dout[b]), .full(full[b]), .empty(empty[b]), .count(cnt));

    assign hl  = dout[b][LINE_W-1:0];
    assign hm  = dout[b][LINE_W +: LINE_WORDS];
    assign ht  = dout[b][LINE_W + LINE_WORDS +: TW];
    assign eff = hm & ~done[b];

    always_comb begin
      sel = '0;
      for (int k = LINE_WORDS-1; k >= 0; k--) if (eff[k]) sel = LANE_W'(k);
    end
    assign last_one      = ((eff & (eff - 1'b1)) == '0);
    assign out_valid[b]  = !empty[b];
    assign out_nbr[b]    = hl[sel*WORD_W +: WORD_W];
    assign out_tag[b]    = ht;
    assign out_lane[b]   = sel;
    assign pop[b]        = out_valid[b] && out_ready[b] && last_one;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) done[b] <= '0;
      else if (out_valid[b] && out_ready[b]) done[b] <= last_one ? '0 : (done[b] | (lmask_t'(1) << sel));
    end
  end
endmodule
