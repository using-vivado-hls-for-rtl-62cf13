// xbar_switch: the router's crossbar switch.
//
// Output o carries the word of the input named by its one-hot select sel[o],
// or all zeros (an invalid flit) when sel[o] is zero. It is purely
// combinational, built as an AND-OR multiplexer per output; the allocator
// guarantees that each input is selected by at most one output. The paper
// gives the crossbar's function; its form here is this design's.
module xbar_switch #(
  parameter int unsigned NIN  = 5,
  parameter int unsigned NOUT = 5,
  parameter int unsigned W    = 38
) (
  input  logic [NIN-1:0][W-1:0]  in_word,
  input  logic [NOUT-1:0][NIN-1:0] sel,
  output logic [NOUT-1:0][W-1:0] out_word
);

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      out_word[o] = '0;
      for (int i = 0; i < NIN; i++)
        if (sel[o][i]) out_word[o] |= in_word[i];
    end
  end

endmodule
