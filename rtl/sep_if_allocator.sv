// sep_if_allocator: separable input-first switch allocator.
//
// Each cycle it looks at the head flit of every VC buffer of every input.
// req_valid[i][v] says that VC v of input i holds a head flit whose
// downstream VC has a credit; req_port[i][v] is the output port it wants.
// Stage 1: at every input a round-robin arbiter over the NVC VCs picks one
// requesting VC. Stage 2: at every output a round-robin arbiter over the NIN
// inputs picks one of the inputs whose chosen VC wants that output. The
// result is a set of non-conflicting input-to-output connections: gnt_in[o]
// is the one-hot crossbar select of output o, and gnt_vc[i] is the one-hot
// VC of input i that is dequeued. Flits that lose wait for the next cycle.
// Everything is combinational; only the arbiters' priority pointers are
// state. An input arbiter advances only when its input wins an output; an
// output arbiter advances whenever it grants.
//
// The paper names the allocator type (separable, input-first) and the
// round-robin arbiters; the pointer policy is this design's choice.
module sep_if_allocator
  import noc_pkg::*;
#(
  parameter int unsigned NIN  = 5,
  parameter int unsigned NOUT = 5,
  parameter int unsigned NVC  = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NIN-1:0][NVC-1:0]             req_valid,
  input  logic [NIN-1:0][NVC-1:0][PORT_W-1:0] req_port,
  output logic [NIN-1:0][NVC-1:0]             gnt_vc,
  output logic [NOUT-1:0][NIN-1:0]            gnt_in
);

  logic [NIN-1:0][NVC-1:0]  vc_sel;      // stage-1 winner per input
  logic [NIN-1:0]           in_req;      // input has a stage-1 winner
  logic [NIN-1:0][PORT_W-1:0] in_port;   // output wanted by that winner
  logic [NOUT-1:0][NIN-1:0] out_req;     // stage-2 requests
  logic [NIN-1:0]           in_won;

  for (genvar i = 0; i < NIN; i++) begin : g_in
    rr_arbiter #(.N(NVC)) u_vc_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (req_valid[i]),
      .advance (in_won[i]),
      .gnt     (vc_sel[i])
    );

    always_comb begin
      in_req[i]  = |req_valid[i];
      in_port[i] = '0;
      for (int v = 0; v < NVC; v++) if (vc_sel[i][v]) in_port[i] = req_port[i][v];
    end

    always_comb begin
      in_won[i] = 1'b0;
      for (int o = 0; o < NOUT; o++) in_won[i] |= gnt_in[o][i];
    end

    assign gnt_vc[i] = in_won[i] ? vc_sel[i] : '0;
  end

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < NIN; i++)
        out_req[o][i] = in_req[i] && (int'(in_port[i]) == o);
    end

    rr_arbiter #(.N(NIN)) u_port_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (out_req[o]),
      .advance (1'b1),
      .gnt     (gnt_in[o])
    );
  end

endmodule
