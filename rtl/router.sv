// router: input-queued virtual-channel router with credit flow control, the
// building block of the NoC.
//
// Structure (following the router template of the paper): every input port
// has a routing table and NVC flit buffers; an allocator matches buffer
// heads to output ports; a crossbar moves the granted flits; every output
// port keeps credit counters for the VC buffers downstream.
//
// Ports. in_flit[p] = {valid, vc, dst, data} arrives from upstream;
// in_credit[p] = {valid, vc} goes back upstream each time a flit leaves
// VC buffer vc of input p. out_flit[o] leaves towards downstream, and
// out_credit[o] = {valid, vc} comes back from downstream.
//
// Timing (two pipeline stages, the structure of the paper's two-stage switch
// example):
//   cycle t   : a valid flit on in_flit[p] has its output port looked up in
//               the routing table; flit and port are written into VC buffer
//               vc at the end of the cycle.
//   cycle t+1 : the flit is at the buffer head (read before dequeue). If its
//               downstream VC has a credit it requests its output; the
//               separable input-first allocator grants non-conflicting
//               requests, the granted heads are dequeued and pass the
//               crossbar into the output registers; the losers wait.
//   cycle t+2 : the flit is on out_flit[o], and the credit for the freed slot
//               is on in_credit[p].
// So an unblocked flit crosses a router in 2 cycles, and each output can
// carry one flit per cycle. Upstream must respect the credits: a flit sent
// to a full VC buffer is an error (asserted in flit_buffer).
//
// Flits keep their VC end to end (no VC allocation) and every flit is routed
// on its own (single-flit packets); the pipeline depth, the credit timing and
// the flit format are this design's choices where the paper is silent. Reset
// is synchronous, active low: buffers empty, credit counters full.
module router
  import noc_pkg::*;
#(
  parameter int unsigned  NPORTS      = 5,
  parameter int unsigned  NVC         = 2,
  parameter int unsigned  DEPTH       = 8,
  parameter int unsigned  DATA_W      = 32,
  parameter int unsigned  NUM_DEST    = 16,
  parameter route_table_t ROUTE_TABLE = modulo_route_table(NPORTS),
  localparam int unsigned VC_W        = (NVC > 1) ? $clog2(NVC) : 1,
  localparam int unsigned DEST_W      = (NUM_DEST > 1) ? $clog2(NUM_DEST) : 1,
  localparam int unsigned FLIT_W      = 1 + VC_W + DEST_W + DATA_W,
  localparam int unsigned CRD_W       = 1 + VC_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NPORTS-1:0][FLIT_W-1:0]  in_flit,
  output logic [NPORTS-1:0][CRD_W-1:0]   in_credit,
  output logic [NPORTS-1:0][FLIT_W-1:0]  out_flit,
  input  logic [NPORTS-1:0][CRD_W-1:0]   out_credit
);

  typedef struct packed {
    logic              valid;
    logic [VC_W-1:0]   vc;
    logic [DEST_W-1:0] dst;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Route-information portion kept in the buffers: output port and destination.
  typedef struct packed {
    logic [PORT_W-1:0] port;
    logic [DEST_W-1:0] dst;
  } route_t;

  localparam int unsigned ROUTE_W = $bits(route_t);

  flit_t [NPORTS-1:0]                   fin;
  logic  [NPORTS-1:0][PORT_W-1:0]       lookup_port;
  route_t [NPORTS-1:0][NVC-1:0]         head_route;
  logic  [NPORTS-1:0][NVC-1:0][DATA_W-1:0] head_data;
  logic  [NPORTS-1:0][NVC-1:0]          head_valid;
  logic  [NPORTS-1:0][NVC-1:0]          req_valid;
  logic  [NPORTS-1:0][NVC-1:0][PORT_W-1:0] req_port;
  logic  [NPORTS-1:0][NVC-1:0]          gnt_vc;
  logic  [NPORTS-1:0][NPORTS-1:0]       gnt_in;
  logic  [NPORTS-1:0][NVC-1:0]          has_credit;
  flit_t [NPORTS-1:0]                   sw_in;
  flit_t [NPORTS-1:0]                   sw_out;
  flit_t [NPORTS-1:0]                   out_q;
  logic  [NPORTS-1:0][CRD_W-1:0]        credit_q;

  // ---------------- input ports: routing table and VC buffers ----------------
  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    assign fin[p] = flit_t'(in_flit[p]);

    route_table #(.NUM_DEST(NUM_DEST), .TABLE(ROUTE_TABLE)) u_rt (
      .dst      (fin[p].dst),
      .out_port (lookup_port[p])
    );

    for (genvar v = 0; v < NVC; v++) begin : g_vc
      logic empty, full;
      logic [$clog2(DEPTH+1)-1:0] count;

      flit_buffer #(.DEPTH(DEPTH), .ROUTE_W(ROUTE_W), .DATA_W(DATA_W)) u_buf (
        .clk        (clk),
        .rst_n      (rst_n),
        .push       (fin[p].valid && int'(fin[p].vc) == v),
        .push_route (route_t'{port: lookup_port[p], dst: fin[p].dst}),
        .push_data  (fin[p].data),
        .pop        (gnt_vc[p][v]),
        .head_route (head_route[p][v]),
        .head_data  (head_data[p][v]),
        .empty      (empty),
        .full       (full),
        .count      (count)
      );

      assign head_valid[p][v] = !empty;
      assign req_port[p][v]   = head_route[p][v].port;
      // A head may compete only for an existing output whose VC has a credit.
      assign req_valid[p][v]  = head_valid[p][v]
                                && (int'(head_route[p][v].port) < NPORTS)
                                && has_credit[head_route[p][v].port][v];
    end

    // Flit offered to the crossbar: the head of the VC granted at this input.
    always_comb begin
      sw_in[p] = '0;
      for (int v = 0; v < NVC; v++) begin
        if (gnt_vc[p][v]) begin
          sw_in[p].valid = 1'b1;
          sw_in[p].vc    = VC_W'(v);
          sw_in[p].dst   = head_route[p][v].dst;
          sw_in[p].data  = head_data[p][v];
        end
      end
    end
  end

  // ---------------- allocation and switch ----------------
  sep_if_allocator #(.NIN(NPORTS), .NOUT(NPORTS), .NVC(NVC)) u_alloc (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_valid (req_valid),
    .req_port  (req_port),
    .gnt_vc    (gnt_vc),
    .gnt_in    (gnt_in)
  );

  xbar_switch #(.NIN(NPORTS), .NOUT(NPORTS), .W(FLIT_W)) u_xbar (
    .in_word  (sw_in),
    .sel      (gnt_in),
    .out_word (sw_out)
  );

  // ---------------- output ports: credit counters and output registers ----------------
  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    credit_tracker #(.NVC(NVC), .DEPTH(DEPTH)) u_crd (
      .clk        (clk),
      .rst_n      (rst_n),
      .send       (sw_out[o].valid),
      .send_vc    (sw_out[o].vc),
      .credit_in  (out_credit[o]),
      .has_credit (has_credit[o])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_q    <= '0;
      credit_q <= '0;
    end else begin
      out_q <= sw_out;
      for (int p = 0; p < NPORTS; p++) begin
        credit_q[p] <= '0;
        for (int v = 0; v < NVC; v++)
          if (gnt_vc[p][v]) credit_q[p] <= {1'b1, VC_W'(v)};
      end
    end
  end

  assign out_flit  = out_q;
  assign in_credit = credit_q;

endmodule
