// core_controller: orchestrates one graph core for one meta-partition.
// Address conversion: from the partition parameters (core_cfg_t, in vertex
// and word units, arrays line-aligned) it derives the first line and line
// count of every array: labels ceil(N/16) lines, pointers ceil((N+1)/16),
// neighbours ceil(M/16), and for the prefetch the sub-interval's lines
// labels_line + sub_base/16, ceil(sub_size/16).
// State machine: IDLE -> PREFETCH (on cmd_prefetch, until the prefetcher is
// done) -> IDLE; IDLE -> PROCESS (on cmd_process: start the three readers
// and the builders, until the edge builder has retired every source group)
// -> DRAIN (until no pair is in flight in the accumulator) -> FLUSH_ACC
// (one enabled cycle that releases the pairs held by the sequential
// operators) -> WAIT_ACC (until the accumulator is idle) -> FLUSH_WR
// (write out the buffered line, until the writer is idle) -> IDLE. busy is low only in IDLE, which is the core's ready signal
// to the processor controller. The processor controller issues the two
// commands separately because all cores must finish prefetching before any
// core's requests may reach another core's scratch pad.
// Phases, address conversion and flushing follow the paper; the separate
// commands and state encoding are this design's own.
module core_controller
  import gs_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  core_cfg_t         cfg,
  input  logic              cmd_prefetch,
  input  logic              cmd_process,
  output logic              busy,
  // prefetcher
  output logic              pf_start,
  output logic [ADDR_W-1:0] pf_base,
  output logic [ADDR_W-1:0] pf_lines,
  input  logic              pf_done,
  // processing datapath
  output logic              proc_start,
  output logic [ADDR_W-1:0] lab_base, lab_lines,
  output logic [ADDR_W-1:0] ptr_base, ptr_lines,
  output logic [ADDR_W-1:0] nbr_base, nbr_lines,
  input  logic              eb_done,
  input  logic              acc_empty,
  input  logic              acc_idle,
  input  logic              acc_en,
  output logic              acc_flush,
  input  logic              wr_idle,
  output logic              wr_flush
);
  typedef enum logic [2:0] { S_IDLE, S_PREFETCH, S_PROCESS, S_DRAIN, S_FLUSH_ACC,
                             S_WAIT_ACC, S_FLUSH_WR } state_e;
  state_e state;
  logic first;                 // first cycle of a phase: its start pulse is in flight

  function automatic logic [ADDR_W-1:0] lines_of(input word_t words);
    return ADDR_W'((64'(words) + LINE_WORDS - 1) / LINE_WORDS);
  endfunction

  assign pf_base   = cfg.labels_line + ADDR_W'(cfg.sub_base / LINE_WORDS);
  assign pf_lines  = lines_of(cfg.sub_size);
  assign lab_base  = cfg.labels_line;
  assign lab_lines = lines_of(cfg.num_vertices);
  assign ptr_base  = cfg.ptr_line;
  assign ptr_lines = lines_of(cfg.num_vertices + 1'b1);
  assign nbr_base  = cfg.nbr_line;
  assign nbr_lines = lines_of(cfg.num_edges);

  assign pf_start   = (state == S_IDLE) && cmd_prefetch;
  assign proc_start = (state == S_IDLE) && cmd_process && !cmd_prefetch;
  assign busy       = (state != S_IDLE) || cmd_prefetch || cmd_process;
  assign acc_flush  = (state == S_FLUSH_ACC);
  assign wr_flush   = (state == S_FLUSH_WR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; first <= 1'b0;
    end else begin
      first <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (pf_start)        begin state <= S_PREFETCH; first <= 1'b1; end
          else if (proc_start) begin state <= S_PROCESS;  first <= 1'b1; end
        end
        S_PREFETCH:  if (!first && pf_done) state <= S_IDLE;
        S_PROCESS:   if (!first && eb_done) state <= S_DRAIN;
        S_DRAIN:     if (acc_empty) state <= S_FLUSH_ACC;
        S_FLUSH_ACC: if (acc_en) state <= S_WAIT_ACC;
        S_WAIT_ACC:  if (acc_idle) state <= S_FLUSH_WR;
        S_FLUSH_WR:  if (wr_idle) state <= S_IDLE;
        default:     state <= S_IDLE;
      endcase
    end
  end

  a_one_command: assert property (@(posedge clk) disable iff (!rst_n) !(cmd_prefetch && cmd_process));
endmodule
