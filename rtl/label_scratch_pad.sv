// label_scratch_pad: on-chip vertex label memory of one graph core.
// DEPTH labels are striped over LINE_WORDS (= e) banks: label offset o lives
// in bank o % e, row o / e. Each bank has one read port for crossbar
// requests and one write port (prefetcher or immediate updates).
// Read timing: a request accepted in cycle t is answered in cycle t+1, and
// its annotation (ANN_W bits: requesting core, line tag, lane) is returned
// with the label. When the response cannot leave because the consumer is
// stalled, the freshly read label spills into an overflow register; a bank
// accepts a request only while its overflow register is empty, so no
// response is ever lost. Responses are valid/ready.
// A write and a read of the same row in one cycle return the old label.
// Banking, one-cycle latency and the overflow register follow the paper;
// the exact handshake is this design's own.
module label_scratch_pad
  import gs_pkg::*;
#(
  parameter int unsigned DEPTH = 524288,
  parameter int unsigned ANN_W = 11
) (
  input  logic clk,
  input  logic rst_n,
  // read requests
  input  logic [LINE_WORDS-1:0] rd_valid,
  input  logic [$clog2(DEPTH/LINE_WORDS)-1:0] rd_row [LINE_WORDS],
  input  logic [ANN_W-1:0]      rd_ann [LINE_WORDS],
  output logic [LINE_WORDS-1:0] rd_ready,
  // read responses
  output logic [LINE_WORDS-1:0] resp_valid,
  output word_t                 resp_label [LINE_WORDS],
  output logic [ANN_W-1:0]      resp_ann [LINE_WORDS],
  input  logic [LINE_WORDS-1:0] resp_ready,
  // writes
  input  logic [LINE_WORDS-1:0] we,
  input  logic [$clog2(DEPTH/LINE_WORDS)-1:0] wrow [LINE_WORDS],
  input  word_t                 wdata [LINE_WORDS]
);
  localparam int unsigned ROWS = DEPTH / LINE_WORDS;
  localparam int unsigned RW   = $clog2(ROWS);

  for (genvar b = 0; b < LINE_WORDS; b++) begin : g_bank
    word_t mem [ROWS];
    word_t rq, ovf;
    logic [ANN_W-1:0] rq_ann, ovf_ann;
    logic rq_v, ovf_v, acc, pop;

    assign rd_ready[b]   = !ovf_v;
    assign acc           = rd_valid[b] && !ovf_v;
    assign resp_valid[b] = ovf_v || rq_v;
    assign resp_label[b] = ovf_v ? ovf : rq;
    assign resp_ann[b]   = ovf_v ? ovf_ann : rq_ann;
    assign pop           = resp_valid[b] && resp_ready[b];

    always_ff @(posedge clk) begin
      if (acc) rq <= mem[rd_row[b]];
      if (we[b]) mem[wrow[b]] <= wdata[b];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rq_v <= 1'b0; ovf_v <= 1'b0; rq_ann <= '0; ovf_ann <= '0; ovf <= '0;
      end else if (ovf_v) begin
        if (pop) ovf_v <= 1'b0;         // overflow leaves first, rq waits
      end else begin
        if (acc) begin
          rq_ann <= rd_ann[b];
          rq_v   <= 1'b1;
          if (rq_v && !pop) begin       // older response stalled: spill it
            ovf <= rq; ovf_ann <= rq_ann; ovf_v <= 1'b1;
          end
        end else if (pop) begin
          rq_v <= 1'b0;
        end
      end
    end
  end
endmodule
