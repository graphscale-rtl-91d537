// mem_channel_model: behavioural model of one DDR4 memory channel as seen by
// a graph core (not synthesizable; the real part is the board's memory
// controller and DRAM). It holds LINES lines of 16 32-bit words. Read
// requests are accepted when rd_ready is high (randomly withheld when
// STALL_PCT > 0) and answered in request order LAT cycles later, carrying the
// requester's client tag; responses have no backpressure. Writes update the
// words selected by the mask. Testbenches access the contents through the
// mem array.
module mem_channel_model
  import gs_pkg::*;
#(
  parameter int unsigned LINES     = 4096,
  parameter int unsigned LAT       = 8,
  parameter int unsigned STALL_PCT = 0,
  parameter int unsigned SEED      = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rd_valid,
  input  rd_req_t  rd_req,
  output logic     rd_ready,
  output logic     resp_valid,
  output rd_resp_t resp,
  input  logic     wr_valid,
  input  wr_req_t  wr_req,
  output logic     wr_ready
);
  logic [LINE_W-1:0] mem [LINES];
  typedef struct { longint due; logic [ADDR_W-1:0] line; logic [CLIENT_W-1:0] client; } pend_t;
  pend_t q [$];
  longint now;
  int unsigned rs;

  initial rs = SEED;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; rd_ready <= 1'b0; wr_ready <= 1'b0; resp_valid <= 1'b0; resp <= '0;
      q.delete();
    end else begin
      now <= now + 1;
      if (rd_valid && rd_ready) q.push_back('{now + LAT, rd_req.line, rd_req.client});
      if (wr_valid && wr_ready) begin
        for (int w = 0; w < LINE_WORDS; w++)
          if (wr_req.mask[w]) mem[wr_req.line % LINES][w*WORD_W +: WORD_W] <= wr_req.data[w*WORD_W +: WORD_W];
      end
      resp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= now) begin
        resp_valid  <= 1'b1;
        resp.data   <= mem[q[0].line % LINES];
        resp.client <= q[0].client;
        void'(q.pop_front());
      end
      rs = rs * 1103515245 + 12345;
      rd_ready <= (STALL_PCT == 0) || (((rs >> 16) % 100) >= STALL_PCT);
      wr_ready <= (STALL_PCT == 0) || (((rs >> 8) % 100) >= STALL_PCT);
    end
  end
endmodule
