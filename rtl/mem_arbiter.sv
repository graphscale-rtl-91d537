// mem_arbiter: joins the read clients of one graph core (label, pointer and
// neighbour readers and the label prefetcher) onto the read port of the
// core's single memory channel.
// A round-robin arbiter forwards one client request per cycle, tagged with
// the client number; a response is steered back by that tag combinationally
// (responses have no backpressure: each client reserves room before asking).
// The buffered writer has the channel's write port to itself and does not
// pass through here. The paper draws a shared bus from the readers,
// prefetcher and writer to the channel; the arbitration policy and the tag
// scheme are choices of this implementation.
module mem_arbiter
  import gs_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // clients
  input  logic [N-1:0]      cl_req_valid,
  input  logic [ADDR_W-1:0] cl_req_line [N],
  output logic [N-1:0]      cl_req_ready,
  output logic [N-1:0]      cl_resp_valid,
  output logic [LINE_W-1:0] cl_resp_data,
  // channel
  output logic              ch_rd_valid,
  output rd_req_t           ch_rd_req,
  input  logic              ch_rd_ready,
  input  logic              ch_resp_valid,
  input  rd_resp_t          ch_resp
);
  logic [$clog2(N)-1:0] rr, gsel;
  logic found;

  always_comb begin
    found = 1'b0;
    gsel  = rr;
    for (int k = 0; k < N; k++) begin
      automatic int unsigned idx = (int'(rr) + k) % N;
      if (!found && cl_req_valid[idx]) begin
        found = 1'b1;
        gsel  = ($clog2(N))'(idx);
      end
    end
  end

  assign ch_rd_valid       = found;
  assign ch_rd_req.line    = cl_req_line[gsel];
  assign ch_rd_req.client  = CLIENT_W'(gsel);

  always_comb begin
    cl_req_ready = '0;
    if (found) cl_req_ready[gsel] = ch_rd_ready;
    cl_resp_valid = '0;
    if (ch_resp_valid) cl_resp_valid[ch_resp.client[$clog2(N)-1:0]] = 1'b1;
  end
  assign cl_resp_data = ch_resp.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (found && ch_rd_ready) rr <= ($clog2(N))'((int'(gsel) + 1) % N);
  end

  a_resp_client: assert property (@(posedge clk) disable iff (!rst_n)
                   ch_resp_valid |-> int'(ch_resp.client) < N);
endmodule
