// xbar_arb: one shuffler of the two level crossbar (used for the core
// shufflers, the core unshufflers and the bank unshufflers).
// N inputs compete for one output. Each cycle a round-robin arbiter grants
// one valid input, starting after the last one granted, and the granted word
// is registered into the output stage; in_ready tells the granted input that
// its word was taken. The output register is refilled whenever it is empty
// or being emptied (out_ready), so the shuffler sustains one word per cycle.
// Because every shuffler arbitrates on its own, words bound for different
// shufflers overtake each other, as the paper intends. Round-robin order is
// this design's choice.
module xbar_arb #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  input  logic [W-1:0] in_data [N],
  output logic [N-1:0] in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;
  logic [SW-1:0] rr, gsel;
  logic found, load;

  assign load = !out_valid || out_ready;

  always_comb begin
    found = 1'b0;
    gsel  = '0;
    for (int k = 0; k < N; k++) begin
      automatic int unsigned idx = (int'(rr) + k) % N;
      if (!found && in_valid[idx]) begin
        found = 1'b1;
        gsel  = SW'(idx);
      end
    end
    in_ready = '0;
    if (found && load) in_ready[gsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; out_valid <= 1'b0; out_data <= '0;
    end else if (load) begin
      out_valid <= found;
      if (found) begin
        out_data <= in_data[gsel];
        rr <= SW'((int'(gsel) + 1) % N);
      end
    end
  end
endmodule
