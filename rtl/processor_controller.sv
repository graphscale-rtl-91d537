// processor_controller: governs a GraphScale processor of P graph cores.
// Metadata store: the host writes the execution parameters through a simple
// register port (cfg_we/cfg_addr/cfg_wdata) before starting:
//   0x0000 number of meta-partitions l      0x0001 iteration limit
//   0x0002 flags: bit 0 immediate updates, bit 1 prefetch skipping
//   0x1000 + 2q + {0,1}        core q: label array line, vertices |I_q|
//   0x2000 + 16k + {0,1}       meta-partition k: sub-interval base, size
//   0x3000 + 64k + 4q + {0,1,2} partition (k,q): pointer line, neighbour
//                               line, neighbour count
// Partition control: for each meta-partition k all cores first prefetch
// their sub-interval (cmd_prefetch), and only when every core is ready again
// all cores process their partition (cmd_process), in lock step.
// Iteration control: after the last meta-partition the iteration counter
// advances; execution stops when an iteration produced no label update
// (convergence, as for BFS and WCC) or the iteration limit is reached.
// Prefetch skipping: with a single meta-partition and immediate updates, the
// scratch pads already hold the current labels after the first iteration,
// so the prefetch phase is skipped.
// start is a pulse; done stays high from completion until the next start;
// iterations reports the executed iteration count.
// The controller's role, the store and both optimisations follow the paper;
// the register map and the state encoding are this design's own.
module processor_controller
  import gs_pkg::*;
#(
  parameter int unsigned P        = 4,
  parameter int unsigned MAX_META = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  word_t       cfg_wdata,
  input  logic        start,
  output logic        done,
  output word_t       iterations,
  // to the graph cores
  output core_cfg_t   core_cfg [P],
  output logic        imm_updates,
  output logic [P-1:0] cmd_prefetch,
  output logic [P-1:0] cmd_process,
  input  logic [P-1:0] core_busy,
  input  logic [P-1:0] core_upd
);
  localparam int unsigned KW = $clog2(MAX_META);

  // metadata store
  word_t num_meta, max_iter;
  logic [1:0] flags;
  word_t lab_line [P];
  word_t nverts [P];
  word_t sub_base [MAX_META];
  word_t sub_size [MAX_META];
  word_t p_ptr [MAX_META][P];
  word_t p_nbr [MAX_META][P];
  word_t p_ne  [MAX_META][P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_meta <= 32'd1; max_iter <= 32'd1; flags <= '0;
    end else if (cfg_we) begin
      unique case (cfg_addr[15:12])
        4'h0: case (cfg_addr[1:0])
                2'd0: num_meta <= cfg_wdata;
                2'd1: max_iter <= cfg_wdata;
                2'd2: flags    <= cfg_wdata[1:0];
                default: ;
              endcase
        4'h1: if (int'(cfg_addr[11:1]) < P) begin
                if (cfg_addr[0]) nverts[cfg_addr[11:1]] <= cfg_wdata;
                else             lab_line[cfg_addr[11:1]] <= cfg_wdata;
              end
        4'h2: if (int'(cfg_addr[11:4]) < MAX_META) begin
                if (cfg_addr[0]) sub_size[cfg_addr[11:4]] <= cfg_wdata;
                else             sub_base[cfg_addr[11:4]] <= cfg_wdata;
              end
        4'h3: if (int'(cfg_addr[11:6]) < MAX_META && int'(cfg_addr[5:2]) < P) begin
                case (cfg_addr[1:0])
                  2'd0: p_ptr[cfg_addr[11:6]][cfg_addr[5:2]] <= cfg_wdata;
                  2'd1: p_nbr[cfg_addr[11:6]][cfg_addr[5:2]] <= cfg_wdata;
                  2'd2: p_ne [cfg_addr[11:6]][cfg_addr[5:2]] <= cfg_wdata;
                  default: ;
                endcase
              end
        default: ;
      endcase
    end
  end

  typedef enum logic [2:0] { S_IDLE, S_PF_ISSUE, S_PF_WAIT, S_PROC_ISSUE, S_PROC_WAIT,
                             S_NEXT, S_DONE } state_e;
  state_e state;
  logic [KW-1:0] k;
  logic upd_seen, skip;

  assign imm_updates = flags[0];
  assign skip = flags[1] && flags[0] && (num_meta == 32'd1) && (iterations != '0);
  assign done = (state == S_DONE);

  always_comb begin
    for (int q = 0; q < P; q++) begin
      core_cfg[q].labels_line  = lab_line[q];
      core_cfg[q].num_vertices = nverts[q];
      core_cfg[q].ptr_line     = p_ptr[k][q];
      core_cfg[q].nbr_line     = p_nbr[k][q];
      core_cfg[q].num_edges    = p_ne[k][q];
      core_cfg[q].sub_base     = sub_base[k];
      core_cfg[q].sub_size     = sub_size[k];
    end
    cmd_prefetch = (state == S_PF_ISSUE && !skip) ? '1 : '0;
    cmd_process  = (state == S_PROC_ISSUE) ? '1 : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; iterations <= '0; upd_seen <= 1'b0;
    end else begin
      if (core_upd != '0) upd_seen <= 1'b1;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_PF_ISSUE; k <= '0; iterations <= '0; upd_seen <= 1'b0;
        end
        S_PF_ISSUE:   state <= skip ? S_PROC_ISSUE : S_PF_WAIT;
        S_PF_WAIT:    if (core_busy == '0) state <= S_PROC_ISSUE;
        S_PROC_ISSUE: state <= S_PROC_WAIT;
        S_PROC_WAIT:  if (core_busy == '0) state <= S_NEXT;
        S_NEXT: begin
          if (32'(k) + 1 < num_meta) begin
            k <= KW'(k + 1'b1);
            state <= S_PF_ISSUE;
          end else begin
            iterations <= iterations + 1'b1;
            k <= '0;
            upd_seen <= 1'b0;
            if (!upd_seen || iterations + 1 >= max_iter) state <= S_DONE;
            else state <= S_PF_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
