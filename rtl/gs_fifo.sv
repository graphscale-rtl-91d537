// gs_fifo: synchronous first-word-fall-through FIFO used by the readers,
// the bank shufflers and the reorder stage.
// push/pop are single-cycle strobes; dout shows the oldest entry whenever
// !empty. Pushing when full or popping when empty is an error (asserted).
// count gives the fill level. The storage is a register array; DEPTH must be
// a power of two.
module gs_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (DEPTH > 1) ? AW'(wp + 1'b1) : '0;
      if (pop)  rp <= (DEPTH > 1) ? AW'(rp + 1'b1) : '0;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
