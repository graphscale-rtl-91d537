// two_level_crossbar: routes the neighbour requests of all P graph cores to
// the label scratch pads that hold the labels and returns the labels to the
// requesting core in the original order.
// Neighbour index format (written by the host partitioner): the top
// log2(P) bits of the 32-bit index name the graph core whose scratch pad
// holds the label, the low log2(SPAD_DEPTH) bits are the label's offset in
// that scratch pad, and the low log2(e) bits of the offset select the bank.
// Flow per cycle and core: (1) bank shuffle puts each valid neighbour of a
// line into its bank lane; (2) P*e core shufflers, one per (target core,
// bank), each with P inputs, forward the request to bank b of the target
// core's scratch pad, annotated with source core, line tag and lane;
// (3) the scratch pads (outside this module) answer one cycle later with the
// annotation; (4) P*e core unshufflers bring each label back to its source
// core, still in its bank lane; (5) e bank unshufflers per core move each
// label to the lane it came from; (6) the reorder stage restores line order.
// A line enters only when the bank shuffler and the reorder stage both have
// room (in_ready); out_* is the in-order line of labels with its mask.
// Structure and stage order follow the paper's two level crossbar; the
// round-robin shufflers, buffer depths and index layout are this design's.
module two_level_crossbar
  import gs_pkg::*;
#(
  parameter int unsigned P          = 4,
  parameter int unsigned SPAD_DEPTH = 524288,
  parameter int unsigned SLOTS      = 32,
  parameter int unsigned BS_DEPTH   = 4,
  // derived
  localparam int unsigned CW    = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned TW    = $clog2(SLOTS),
  localparam int unsigned OW    = $clog2(SPAD_DEPTH),
  localparam int unsigned RW    = OW - LANE_W,
  localparam int unsigned ANN_W = CW + TW + LANE_W
) (
  input  logic clk,
  input  logic rst_n,
  // from the destination builders
  input  logic [P-1:0]          in_valid,
  input  word_t                 in_nbr  [P][LINE_WORDS],
  input  lmask_t                in_mask [P],
  output logic [P-1:0]          in_ready,
  // to the edge builders
  output logic [P-1:0]          out_valid,
  output word_t                 out_label [P][LINE_WORDS],
  output lmask_t                out_mask  [P],
  input  logic [P-1:0]          out_ready,
  // scratch pad read ports of each core
  output logic [LINE_WORDS-1:0] sp_rd_valid [P],
  output logic [RW-1:0]         sp_rd_row   [P][LINE_WORDS],
  output logic [ANN_W-1:0]      sp_rd_ann   [P][LINE_WORDS],
  input  logic [LINE_WORDS-1:0] sp_rd_ready [P],
  input  logic [LINE_WORDS-1:0] sp_resp_valid [P],
  input  word_t                 sp_resp_label [P][LINE_WORDS],
  input  logic [ANN_W-1:0]      sp_resp_ann   [P][LINE_WORDS],
  output logic [LINE_WORDS-1:0] sp_resp_ready [P]
);
  localparam int unsigned E = LINE_WORDS;

  // bank shuffle outputs
  logic [E-1:0]      bs_valid [P];
  word_t             bs_nbr   [P][E];
  logic [TW-1:0]     bs_tag   [P][E];
  logic [LANE_W-1:0] bs_lane  [P][E];
  logic [E-1:0]      bs_ready [P];
  // core shuffle grants: [target core][bank] -> per source core
  logic [P-1:0]      cs_gnt   [P][E];
  // core unshuffle outputs and grants
  logic              cu_valid [P][E];
  logic [WORD_W+TW+LANE_W-1:0] cu_data [P][E];
  logic [P-1:0]      cu_gnt   [P][E];   // [source core][bank] -> per scratch pad core
  logic [E-1:0]      bu_gnt   [P][E];   // [source core][lane] -> per bank
  // bank unshuffle outputs
  logic              bu_valid [P][E];
  logic [WORD_W+TW-1:0] bu_data [P][E];

  function automatic logic [CW-1:0] core_of(input word_t nbr);
    return (P > 1) ? nbr[WORD_W-1 -: CW] : '0;
  endfunction

  for (genvar s = 0; s < P; s++) begin : g_src
    logic [TW-1:0] tag;
    logic rd_admit, bs_in_ready;
    lmask_t m;
    logic [TW-1:0] bs_tag_w [E];
    word_t         bs_lab_w [E];

    reorder #(.SLOTS(SLOTS)) u_reorder (
      .clk, .rst_n,
      .admit(in_valid[s] && bs_in_ready), .admit_mask(in_mask[s]),
      .admit_ready(rd_admit), .admit_tag(tag),
      .wr_valid(m), .wr_tag(bs_tag_w), .wr_label(bs_lab_w),
      .out_valid(out_valid[s]), .out_label(out_label[s]), .out_mask(out_mask[s]),
      .out_ready(out_ready[s]));
    for (genvar l = 0; l < E; l++) begin : g_wr
      assign m[l]        = bu_valid[s][l];
      assign bs_lab_w[l] = bu_data[s][l][TW +: WORD_W];
      assign bs_tag_w[l] = bu_data[s][l][TW-1:0];
    end

    bank_shuffle #(.TW(TW), .DEPTH(BS_DEPTH)) u_bs (
      .clk, .rst_n,
      .in_valid(in_valid[s] && rd_admit), .in_nbr(in_nbr[s]), .in_mask(in_mask[s]),
      .in_tag(tag), .in_ready(bs_in_ready),
      .out_valid(bs_valid[s]), .out_nbr(bs_nbr[s]), .out_tag(bs_tag[s]),
      .out_lane(bs_lane[s]), .out_ready(bs_ready[s]));

    assign in_ready[s] = bs_in_ready && rd_admit;

    for (genvar b = 0; b < E; b++) begin : g_bsr
      always_comb begin
        bs_ready[s][b] = 1'b0;
        for (int c = 0; c < P; c++) bs_ready[s][b] |= cs_gnt[c][b][s];
      end
    end
  end

  // core shufflers: one per (target core c, bank b), inputs = source cores
  for (genvar c = 0; c < P; c++) begin : g_cs_core
    for (genvar b = 0; b < E; b++) begin : g_cs_bank
      logic [P-1:0] iv;
      logic [RW+ANN_W-1:0] id [P];
      logic [RW+ANN_W-1:0] od;
      for (genvar s = 0; s < P; s++) begin : g_in
        assign iv[s] = bs_valid[s][b] && (core_of(bs_nbr[s][b]) == CW'(c));
        assign id[s] = {bs_nbr[s][b][OW-1:LANE_W], CW'(s), bs_tag[s][b], bs_lane[s][b]};
      end
      xbar_arb #(.N(P), .W(RW + ANN_W)) u_arb (
        .clk, .rst_n, .in_valid(iv), .in_data(id), .in_ready(cs_gnt[c][b]),
        .out_valid(sp_rd_valid[c][b]), .out_data(od), .out_ready(sp_rd_ready[c][b]));
      assign sp_rd_row[c][b] = od[ANN_W +: RW];
      assign sp_rd_ann[c][b] = od[ANN_W-1:0];
    end
  end

  // core unshufflers: one per (source core s, bank b), inputs = scratch pads
  for (genvar s = 0; s < P; s++) begin : g_cu_core
    for (genvar b = 0; b < E; b++) begin : g_cu_bank
      logic [P-1:0] iv;
      logic [WORD_W+TW+LANE_W-1:0] id [P];
      logic ordy;
      for (genvar c = 0; c < P; c++) begin : g_in
        assign iv[c] = sp_resp_valid[c][b] && (sp_resp_ann[c][b][TW+LANE_W +: CW] == CW'(s));
        assign id[c] = {sp_resp_label[c][b], sp_resp_ann[c][b][TW+LANE_W-1:0]};
      end
      xbar_arb #(.N(P), .W(WORD_W + TW + LANE_W)) u_arb (
        .clk, .rst_n, .in_valid(iv), .in_data(id), .in_ready(cu_gnt[s][b]),
        .out_valid(cu_valid[s][b]), .out_data(cu_data[s][b]), .out_ready(ordy));
      always_comb begin
        ordy = 1'b0;
        for (int l = 0; l < E; l++) ordy |= bu_gnt[s][l][b];
      end
    end
  end

  for (genvar c = 0; c < P; c++) begin : g_sp_rdy
    for (genvar b = 0; b < E; b++) begin : g_b
      always_comb begin
        sp_resp_ready[c][b] = 1'b0;
        for (int s = 0; s < P; s++) sp_resp_ready[c][b] |= cu_gnt[s][b][c];
      end
    end
  end

  // bank unshufflers: one per (source core s, lane l), inputs = banks
  for (genvar s = 0; s < P; s++) begin : g_bu_core
    for (genvar l = 0; l < E; l++) begin : g_bu_lane
      logic [E-1:0] iv;
      logic [WORD_W+TW-1:0] id [E];
      for (genvar b = 0; b < E; b++) begin : g_in
        assign iv[b] = cu_valid[s][b] && (cu_data[s][b][LANE_W-1:0] == LANE_W'(l));
        assign id[b] = cu_data[s][b][LANE_W +: WORD_W + TW];
      end
      xbar_arb #(.N(E), .W(WORD_W + TW)) u_arb (
        .clk, .rst_n, .in_valid(iv), .in_data(id), .in_ready(bu_gnt[s][l]),
        .out_valid(bu_valid[s][l]), .out_data(bu_data[s][l]), .out_ready(1'b1));
    end
  end
endmodule
