// graphscale_top: a GraphScale graph processor with P graph cores, each on
// its own memory channel, joined by the two level crossbar and run by the
// processor controller.
// The scratch pad budget SPAD_TOTAL (vertex labels) is shared: every core
// holds SPAD_TOTAL/P labels in LINE_WORDS banks. V source vertices and e = 16
// edges per cycle and core; the reorder stage has SLOTS slots.
// Ports: the host control port of the processor controller (register writes,
// start pulse, done level, iteration count) and, per core, one memory channel
// (tagged in-order line reads without response backpressure, masked line
// writes); the memory controllers, host and PCIe shell are outside.
// Defaults are the evaluated configuration: 4 channels, 2^21 labels of
// scratch pad, 16 banks, 8 vertex pipelines, reorder depth 32, 32-bit
// labels, BFS. ALGO = ALG_WCC selects the WCC map function.
module graphscale_top
  import gs_pkg::*;
#(
  parameter int unsigned P          = 4,
  parameter int unsigned SPAD_TOTAL = 2097152,
  parameter int unsigned V          = 8,
  parameter int unsigned SLOTS      = 32,
  parameter int unsigned BS_DEPTH   = 4,
  parameter int unsigned MAX_META   = 16,
  parameter algo_e       ALGO       = ALG_BFS
) (
  input  logic        clk,
  input  logic        rst_n,
  // host control
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  word_t       cfg_wdata,
  input  logic        start,
  output logic        done,
  output word_t       iterations,
  // memory channels
  output logic [P-1:0] mem_rd_valid,
  output rd_req_t      mem_rd_req [P],
  input  logic [P-1:0] mem_rd_ready,
  input  logic [P-1:0] mem_resp_valid,
  input  rd_resp_t     mem_resp [P],
  output logic [P-1:0] mem_wr_valid,
  output wr_req_t      mem_wr_req [P],
  input  logic [P-1:0] mem_wr_ready
);
  localparam int unsigned SPAD_DEPTH = SPAD_TOTAL / P;
  localparam int unsigned CW    = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned TW    = $clog2(SLOTS);
  localparam int unsigned ANN_W = CW + TW + LANE_W;
  localparam int unsigned RW    = $clog2(SPAD_DEPTH) - LANE_W;

  core_cfg_t core_cfg [P];
  logic imm_updates;
  logic [P-1:0] cmd_prefetch, cmd_process, core_busy, core_upd;

  processor_controller #(.P(P), .MAX_META(MAX_META)) u_proc (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .done, .iterations,
    .core_cfg, .imm_updates, .cmd_prefetch, .cmd_process, .core_busy, .core_upd);

  logic [P-1:0] xq_valid, xq_ready, xr_valid, xr_ready;
  word_t  xq_nbr [P][LINE_WORDS];
  lmask_t xq_mask [P];
  word_t  xr_label [P][LINE_WORDS];
  lmask_t xr_mask [P];
  logic [LINE_WORDS-1:0] sp_rd_valid [P];
  logic [RW-1:0]         sp_rd_row   [P][LINE_WORDS];
  logic [ANN_W-1:0]      sp_rd_ann   [P][LINE_WORDS];
  logic [LINE_WORDS-1:0] sp_rd_ready [P];
  logic [LINE_WORDS-1:0] sp_resp_valid [P];
  word_t                 sp_resp_label [P][LINE_WORDS];
  logic [ANN_W-1:0]      sp_resp_ann   [P][LINE_WORDS];
  logic [LINE_WORDS-1:0] sp_resp_ready [P];

  two_level_crossbar #(.P(P), .SPAD_DEPTH(SPAD_DEPTH), .SLOTS(SLOTS), .BS_DEPTH(BS_DEPTH)) u_xbar (
    .clk, .rst_n,
    .in_valid(xq_valid), .in_nbr(xq_nbr), .in_mask(xq_mask), .in_ready(xq_ready),
    .out_valid(xr_valid), .out_label(xr_label), .out_mask(xr_mask), .out_ready(xr_ready),
    .sp_rd_valid, .sp_rd_row, .sp_rd_ann, .sp_rd_ready,
    .sp_resp_valid, .sp_resp_label, .sp_resp_ann, .sp_resp_ready);

  for (genvar q = 0; q < P; q++) begin : g_core
    graph_core #(.V(V), .SPAD_DEPTH(SPAD_DEPTH), .ANN_W(ANN_W), .ALGO(ALGO)) u_core (
      .clk, .rst_n,
      .cfg(core_cfg[q]), .imm_updates, .cmd_prefetch(cmd_prefetch[q]),
      .cmd_process(cmd_process[q]), .busy(core_busy[q]), .upd_pulse(core_upd[q]),
      .mem_rd_valid(mem_rd_valid[q]), .mem_rd_req(mem_rd_req[q]), .mem_rd_ready(mem_rd_ready[q]),
      .mem_resp_valid(mem_resp_valid[q]), .mem_resp(mem_resp[q]),
      .mem_wr_valid(mem_wr_valid[q]), .mem_wr_req(mem_wr_req[q]), .mem_wr_ready(mem_wr_ready[q]),
      .xb_req_valid(xq_valid[q]), .xb_req_nbr(xq_nbr[q]), .xb_req_mask(xq_mask[q]),
      .xb_req_ready(xq_ready[q]),
      .xb_resp_valid(xr_valid[q]), .xb_resp_label(xr_label[q]), .xb_resp_mask(xr_mask[q]),
      .xb_resp_ready(xr_ready[q]),
      .sp_rd_valid(sp_rd_valid[q]), .sp_rd_row(sp_rd_row[q]), .sp_rd_ann(sp_rd_ann[q]),
      .sp_rd_ready(sp_rd_ready[q]), .sp_resp_valid(sp_resp_valid[q]),
      .sp_resp_label(sp_resp_label[q]), .sp_resp_ann(sp_resp_ann[q]),
      .sp_resp_ready(sp_resp_ready[q]));
  end
endmodule
