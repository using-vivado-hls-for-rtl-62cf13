// rr_arbiter: round-robin arbiter, the arbiter used at both stages of the
// router's separable input-first switch allocator.
//
// The grant is combinational: of the asserted bits of req, the first one at
// or after the priority pointer (wrapping around) wins, and gnt is its
// one-hot vector. When advance is high at a clock edge and a request won, the
// pointer moves to one past the winner, so the winner becomes the lowest
// priority. The caller holds advance low when a grant was not used (an input
// that lost at the output stage keeps its turn). Reset puts the pointer at 0.
// The paper only names a round-robin arbiter; the pointer rule and the
// advance-on-use policy are this design's choices.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);

  localparam int unsigned PTR_W = (N > 1) ? $clog2(N) : 1;

  logic [PTR_W-1:0] ptr;
  logic [PTR_W-1:0] winner;
  logic             found;

  always_comb begin
    gnt    = '0;
    winner = '0;
    found  = 1'b0;
    for (int k = 0; k < N; k++) begin
      int idx;
      idx = (int'(ptr) + k) % N;
      if (!found && req[idx]) begin
        gnt[idx] = 1'b1;
        winner   = PTR_W'(idx);
        found    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance && found) begin
      ptr <= (int'(winner) == N - 1) ? '0 : winner + PTR_W'(1);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
