// buffered_writer: write combining of label updates into cache lines.
// Up to V updates (local vertex index, new label) arrive per accepted cycle.
// The writer holds one line buffer (line address, 16 words, word mask). Each
// cycle it takes the line of the lowest pending update: if the buffer holds
// another line, the buffer is first issued as a masked line write to memory
// (the paper's "write when an update to a new cache line is encountered");
// otherwise all pending updates that fall into the buffered line are merged.
// A new update vector is accepted (in_ready) once the previous one has been
// fully merged, which may take several cycles when it spans several lines.
// flush (held high until idle) writes out a partly filled buffer; idle
// means nothing is pending.
// Memory writes: valid/ready, registered, address = labels_line + id / 16.
// The write-combining rule follows the paper; the multi-line handling and
// the handshake are this design's own.
module buffered_writer
  import gs_pkg::*;
#(
  parameter int unsigned V = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] labels_line,
  input  logic              flush,
  output logic              idle,
  input  logic [V-1:0]      in_valid,
  input  word_t             in_id    [V],
  input  word_t             in_label [V],
  output logic              in_ready,
  output logic              wr_valid,
  output wr_req_t           wr_req,
  input  logic              wr_ready
);
  logic [V-1:0] pend, take;
  word_t pid [V];
  word_t plab [V];
  logic bv;
  word_t bline;
  word_t bdata [LINE_WORDS];
  lmask_t bmask;
  word_t cur_line;
  logic have, conflict, wr_free, emit;
  logic [V-1:0] pend_next;

  assign wr_free = !wr_valid || wr_ready;

  always_comb begin
    have = 1'b0; cur_line = '0;
    for (int k = V-1; k >= 0; k--)
      if (pend[k]) begin have = 1'b1; cur_line = pid[k] >> LANE_W; end
    conflict = have && bv && (bline != cur_line);
    take = '0;
    if (have && !conflict)
      for (int k = 0; k < V; k++) take[k] = pend[k] && ((pid[k] >> LANE_W) == cur_line);
    emit = wr_free && bv && (conflict || (flush && !have));
    pend_next = pend & ~take;
  end

  assign in_ready = (pend_next == '0);
  assign idle     = !have && !bv && !wr_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; bv <= 1'b0; bline <= '0; bmask <= '0; wr_valid <= 1'b0; wr_req <= '0;
      for (int k = 0; k < V; k++) begin pid[k] <= '0; plab[k] <= '0; end
      for (int w = 0; w < LINE_WORDS; w++) bdata[w] <= '0;
    end else begin
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (emit) begin
        wr_valid     <= 1'b1;
        wr_req.line  <= labels_line + bline;
        wr_req.mask  <= bmask;
        for (int w = 0; w < LINE_WORDS; w++) wr_req.data[w*WORD_W +: WORD_W] <= bdata[w];
        bv    <= 1'b0;
        bmask <= '0;
      end
      if (take != '0) begin
        bv    <= 1'b1;
        bline <= cur_line;
        for (int k = 0; k < V; k++)
          if (take[k]) begin
            bdata[pid[k][LANE_W-1:0]] <= plab[k];
            bmask[pid[k][LANE_W-1:0]] <= 1'b1;
          end
      end
      pend <= pend_next;
      if (in_ready && in_valid != '0) begin
        pend <= in_valid;
        for (int k = 0; k < V; k++) begin pid[k] <= in_id[k]; plab[k] <= in_label[k]; end
      end
    end
  end
endmodule
