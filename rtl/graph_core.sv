// graph_core: one GraphScale graph core, attached to one memory channel.
// Prefetch phase: the label prefetcher copies the partition's label
// sub-interval into the label scratch pad. Processing phase: sequential
// readers stream the core's vertex labels, the partition's pointers and its
// neighbours; the source builder zips labels and pointers into V source
// vertices per cycle; the destination builder sends e neighbour indices per
// cycle into the two level crossbar (outside the core), which returns their
// labels in order; the edge builder pairs them with their source vertex; the
// accumulator reduces the edges to at most one update per vertex; updates go
// to the buffered writer (to memory) and, with immediate updates enabled and
// when the vertex lies in the prefetched sub-interval, straight into the
// scratch pad so later edges of the same iteration see them. The core
// controller sequences this and flushes the pipeline before reporting ready.
// Ports: the partition parameters and two commands from the processor
// controller; one memory channel (tagged in-order reads, masked line
// writes); the crossbar request/response line ports; the scratch pad read
// ports, which the crossbar drives. upd_pulse is high in every cycle in
// which the core emits at least one label update (convergence detection).
// Block structure follows the paper's graph core; the port protocols are
// this design's own.
module graph_core
  import gs_pkg::*;
#(
  parameter int unsigned V          = 8,
  parameter int unsigned SPAD_DEPTH = 524288,
  parameter int unsigned ANN_W      = 11,
  parameter algo_e       ALGO       = ALG_BFS,
  localparam int unsigned RW        = $clog2(SPAD_DEPTH) - LANE_W
) (
  input  logic clk,
  input  logic rst_n,
  // processor controller
  input  core_cfg_t cfg,
  input  logic      imm_updates,
  input  logic      cmd_prefetch,
  input  logic      cmd_process,
  output logic      busy,
  output logic      upd_pulse,
  // memory channel
  output logic      mem_rd_valid,
  output rd_req_t   mem_rd_req,
  input  logic      mem_rd_ready,
  input  logic      mem_resp_valid,
  input  rd_resp_t  mem_resp,
  output logic      mem_wr_valid,
  output wr_req_t   mem_wr_req,
  input  logic      mem_wr_ready,
  // neighbour lines into the crossbar
  output logic      xb_req_valid,
  output word_t     xb_req_nbr [LINE_WORDS],
  output lmask_t    xb_req_mask,
  input  logic      xb_req_ready,
  // label lines back from the crossbar
  input  logic      xb_resp_valid,
  input  word_t     xb_resp_label [LINE_WORDS],
  input  lmask_t    xb_resp_mask,
  output logic      xb_resp_ready,
  // scratch pad read ports (driven by the crossbar)
  input  logic [LINE_WORDS-1:0] sp_rd_valid,
  input  logic [RW-1:0]         sp_rd_row [LINE_WORDS],
  input  logic [ANN_W-1:0]      sp_rd_ann [LINE_WORDS],
  output logic [LINE_WORDS-1:0] sp_rd_ready,
  output logic [LINE_WORDS-1:0] sp_resp_valid,
  output word_t                 sp_resp_label [LINE_WORDS],
  output logic [ANN_W-1:0]      sp_resp_ann [LINE_WORDS],
  input  logic [LINE_WORDS-1:0] sp_resp_ready
);
  localparam int unsigned NCL = 4;  // read clients: labels, pointers, neighbours, prefetch

  // controller
  logic pf_start, pf_done, proc_start, eb_done, acc_empty, acc_idle, acc_en, acc_flush, wr_idle, wr_flush;
  logic [ADDR_W-1:0] pf_base, pf_lines, lab_base, lab_lines, ptr_base, ptr_lines, nbr_base, nbr_lines;

  core_controller u_ctrl (
    .clk, .rst_n, .cfg, .cmd_prefetch, .cmd_process, .busy,
    .pf_start, .pf_base, .pf_lines, .pf_done,
    .proc_start, .lab_base, .lab_lines, .ptr_base, .ptr_lines, .nbr_base, .nbr_lines,
    .eb_done, .acc_empty, .acc_idle, .acc_en, .acc_flush, .wr_idle, .wr_flush);

  // memory read clients
  logic [NCL-1:0] cl_req_valid, cl_req_ready, cl_resp_valid;
  logic [ADDR_W-1:0] cl_req_line [NCL];
  logic [LINE_W-1:0] cl_resp_data;

  mem_arbiter #(.N(NCL)) u_arb (
    .clk, .rst_n, .cl_req_valid, .cl_req_line, .cl_req_ready, .cl_resp_valid, .cl_resp_data,
    .ch_rd_valid(mem_rd_valid), .ch_rd_req(mem_rd_req), .ch_rd_ready(mem_rd_ready),
    .ch_resp_valid(mem_resp_valid), .ch_resp(mem_resp));

  logic lab_v, lab_l, lab_r, ptr_v, ptr_l, ptr_r, nbr_v, nbr_l, nbr_r;
  logic [LINE_W-1:0] lab_d, ptr_d, nbr_d;
  logic lab_busy, ptr_busy, nbr_busy;

  seq_reader u_rd_lab (
    .clk, .rst_n, .start(proc_start), .base_line(lab_base), .num_lines(lab_lines), .busy(lab_busy),
    .req_valid(cl_req_valid[0]), .req_line(cl_req_line[0]), .req_ready(cl_req_ready[0]),
    .resp_valid(cl_resp_valid[0]), .resp_data(cl_resp_data),
    .out_valid(lab_v), .out_data(lab_d), .out_last(lab_l), .out_ready(lab_r));
  seq_reader u_rd_ptr (
    .clk, .rst_n, .start(proc_start), .base_line(ptr_base), .num_lines(ptr_lines), .busy(ptr_busy),
    .req_valid(cl_req_valid[1]), .req_line(cl_req_line[1]), .req_ready(cl_req_ready[1]),
    .resp_valid(cl_resp_valid[1]), .resp_data(cl_resp_data),
    .out_valid(ptr_v), .out_data(ptr_d), .out_last(ptr_l), .out_ready(ptr_r));
  seq_reader u_rd_nbr (
    .clk, .rst_n, .start(proc_start), .base_line(nbr_base), .num_lines(nbr_lines), .busy(nbr_busy),
    .req_valid(cl_req_valid[2]), .req_line(cl_req_line[2]), .req_ready(cl_req_ready[2]),
    .resp_valid(cl_resp_valid[2]), .resp_data(cl_resp_data),
    .out_valid(nbr_v), .out_data(nbr_d), .out_last(nbr_l), .out_ready(nbr_r));

  // prefetcher and scratch pad
  logic [LINE_WORDS-1:0] pf_we, sp_we;
  logic [RW-1:0] pf_wrow [LINE_WORDS];
  logic [RW-1:0] sp_wrow [LINE_WORDS];
  word_t pf_wdata [LINE_WORDS];
  word_t sp_wdata [LINE_WORDS];

  label_prefetcher #(.RW(RW)) u_pf (
    .clk, .rst_n, .start(pf_start), .base_line(pf_base), .num_lines(pf_lines), .done(pf_done),
    .req_valid(cl_req_valid[3]), .req_line(cl_req_line[3]), .req_ready(cl_req_ready[3]),
    .resp_valid(cl_resp_valid[3]), .resp_data(cl_resp_data),
    .sp_we(pf_we), .sp_wrow(pf_wrow), .sp_wdata(pf_wdata));

  label_scratch_pad #(.DEPTH(SPAD_DEPTH), .ANN_W(ANN_W)) u_spad (
    .clk, .rst_n,
    .rd_valid(sp_rd_valid), .rd_row(sp_rd_row), .rd_ann(sp_rd_ann), .rd_ready(sp_rd_ready),
    .resp_valid(sp_resp_valid), .resp_label(sp_resp_label), .resp_ann(sp_resp_ann),
    .resp_ready(sp_resp_ready),
    .we(sp_we), .wrow(sp_wrow), .wdata(sp_wdata));

  // builders
  logic sb_v, sb_last, sb_r;
  logic [V-1:0] sb_m;
  word_t sb_idx [V];
  word_t sb_lab [V];
  word_t sb_lb [V];
  word_t sb_rb [V];
  logic db_last;

  src_builder #(.V(V)) u_src (
    .clk, .rst_n, .start(proc_start), .num_vertices(cfg.num_vertices),
    .lab_valid(lab_v), .lab_data(lab_d), .lab_ready(lab_r),
    .ptr_valid(ptr_v), .ptr_data(ptr_d), .ptr_ready(ptr_r),
    .out_valid(sb_v), .out_vmask(sb_m), .out_idx(sb_idx), .out_label(sb_lab),
    .out_lb(sb_lb), .out_rb(sb_rb), .out_last(sb_last), .out_ready(sb_r));

  dst_builder u_dst (
    .clk, .rst_n, .start(proc_start), .num_edges(cfg.num_edges),
    .in_valid(nbr_v), .in_data(nbr_d), .in_ready(nbr_r),
    .out_valid(xb_req_valid), .out_nbr(xb_req_nbr), .out_mask(xb_req_mask),
    .out_last(db_last), .out_ready(xb_req_ready));

  lmask_t e_v;
  word_t e_sidx [LINE_WORDS];
  word_t e_slab [LINE_WORDS];
  word_t e_dlab [LINE_WORDS];

  edge_builder #(.V(V)) u_edge (
    .clk, .rst_n, .start(proc_start), .num_edges(cfg.num_edges), .done(eb_done),
    .src_valid(sb_v), .src_vmask(sb_m), .src_idx(sb_idx), .src_label(sb_lab),
    .src_lb(sb_lb), .src_rb(sb_rb), .src_last(sb_last), .src_ready(sb_r),
    .dst_valid(xb_resp_valid), .dst_label(xb_resp_label), .dst_mask(xb_resp_mask),
    .dst_ready(xb_resp_ready),
    .out_valid(e_v), .out_sidx(e_sidx), .out_slabel(e_slab), .out_dlabel(e_dlab),
    .out_ready(acc_en));

  logic [V-1:0] u_v;
  word_t u_id [V];
  word_t u_lab [V];

  accumulator #(.V(V), .ALGO(ALGO)) u_acc (
    .clk, .rst_n, .en(acc_en), .flush(acc_flush),
    .in_valid(e_v), .in_sidx(e_sidx), .in_slabel(e_slab), .in_dlabel(e_dlab),
    .upd_valid(u_v), .upd_id(u_id), .upd_label(u_lab), .empty(acc_empty), .idle(acc_idle));

  buffered_writer #(.V(V)) u_wr (
    .clk, .rst_n, .labels_line(cfg.labels_line), .flush(wr_flush), .idle(wr_idle),
    .in_valid(u_v), .in_id(u_id), .in_label(u_lab), .in_ready(acc_en),
    .wr_valid(mem_wr_valid), .wr_req(mem_wr_req), .wr_ready(mem_wr_ready));

  assign upd_pulse = acc_en && (u_v != '0);

  // scratch pad write port: prefetch lines, or immediate updates in the sub-interval
  always_comb begin
    for (int b = 0; b < LINE_WORDS; b++) begin
      sp_we[b] = pf_we[b]; sp_wrow[b] = pf_wrow[b]; sp_wdata[b] = pf_wdata[b];
    end
    if (pf_we == '0 && imm_updates && acc_en) begin
      for (int k = 0; k < V; k++) begin
        automatic word_t off = u_id[k] - cfg.sub_base;
        if (u_v[k] && (u_id[k] >= cfg.sub_base) && (off < cfg.sub_size)) begin
          sp_we[off[LANE_W-1:0]]    = 1'b1;
          sp_wrow[off[LANE_W-1:0]]  = off[LANE_W +: RW];
          sp_wdata[off[LANE_W-1:0]] = u_lab[k];
        end
      end
    end
  end
endmodule
