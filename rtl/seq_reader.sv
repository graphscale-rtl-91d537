// seq_reader: sequential array reader of a graph core (vertex labels,
// pointers, neighbours, and the label prefetcher's source).
// A start pulse loads a first line address and a line count. The reader then
// issues one read request per line, in order, on its memory client port and
// streams the returned lines out in the same order (valid/ready), marking the
// final one with out_last. It issues a request only while
// (requests in flight + lines buffered) < DEPTH, so a response can always be
// accepted: responses have no ready. The memory channel must return the
// responses of one client in request order.
// The paper only names the sequential readers; the credit scheme and buffer
// depth are choices of this implementation.
module seq_reader
  import gs_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  base_line,
  input  logic [ADDR_W-1:0]  num_lines,
  output logic               busy,
  // memory client
  output logic               req_valid,
  output logic [ADDR_W-1:0]  req_line,
  input  logic               req_ready,
  input  logic               resp_valid,
  input  logic [LINE_W-1:0]  resp_data,
  // line stream
  output logic               out_valid,
  output logic [LINE_W-1:0]  out_data,
  output logic               out_last,
  input  logic               out_ready
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;
  logic [ADDR_W-1:0] issued, delivered, total, base;
  logic [CW-1:0] inflight, fcount;
  logic fempty, ffull, pop;

  assign busy      = (delivered != total);
  assign req_valid = (issued != total) && ((inflight + fcount) < CW'(DEPTH));
  assign req_line  = base + issued;

  assign out_valid = !fempty;
  assign out_last  = (delivered + 1'b1 == total);
  assign pop       = out_valid && out_ready;

  gs_fifo #(.WIDTH(LINE_W), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .clr(start), .push(resp_valid), .din(resp_data), .pop,
    .dout(out_data), .full(ffull), .empty(fempty), .count(fcount));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued <= '0; delivered <= '0; total <= '0; base <= '0; inflight <= '0;
    end else if (start) begin
      issued <= '0; delivered <= '0; total <= num_lines; base <= base_line; inflight <= '0;
    end else begin
      if (req_valid && req_ready) issued <= issued + 1'b1;
      if (pop) delivered <= delivered + 1'b1;
      inflight <= inflight + ((req_valid && req_ready) ? 1'b1 : 1'b0) - (resp_valid ? 1'b1 : 1'b0);
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> inflight != 0);
endmodule
