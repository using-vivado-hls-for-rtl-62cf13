// router_harness: drives one router with random traffic and checks it.
//
// Used by tb_router (default configuration) and tb_router_configs (the router
// configurations of the size sweep). Every input port has a traffic source
// that keeps its own credit counters and sends only while it holds a credit;
// every output port has a sink that models a DEPTH-slot buffer per VC and
// returns credits after a random delay. The router's routing table is its
// default, destination mod NPORTS.
//
// Phases:
//   1. latency : one flit on an idle router must appear on its output exactly
//                two cycles after it was presented;
//   2. rate    : input p streams to output (p+1) mod NPORTS on VC 0 while the
//                sinks return credits at once; every output must deliver one
//                flit per cycle over a 32-cycle window;
//   3. random  : random destinations, VCs and gaps with slow sinks, then a
//                drain of up to 8000 cycles. Every flit must arrive on
//                output dst mod NPORTS, in
//                order per (input, VC, output), unchanged, and no sink may
//                ever hold more than DEPTH flits of one VC.
// The expected results come from the sources' own records, not from the
// router. The harness also counts allocation conflicts and credit stalls and
// fails if the random phase produced none.
module router_harness
  import noc_pkg::*;
#(
  parameter int unsigned NPORTS   = 5,
  parameter int unsigned NVC      = 2,
  parameter int unsigned DEPTH    = 8,
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned RANDOM_CYCLES = 2000
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);

  localparam int unsigned NUM_DEST = 16;
  localparam int unsigned VC_W   = (NVC > 1) ? $clog2(NVC) : 1;
  localparam int unsigned DEST_W = $clog2(NUM_DEST);
  localparam int unsigned FLIT_W = 1 + VC_W + DEST_W + DATA_W;
  localparam int unsigned CRD_W  = 1 + VC_W;

  typedef struct packed {
    logic              valid;
    logic [VC_W-1:0]   vc;
    logic [DEST_W-1:0] dst;
    logic [DATA_W-1:0] data;
  } flit_t;

  flit_t [NPORTS-1:0]                in_flit;
  logic  [NPORTS-1:0][CRD_W-1:0]     in_credit;
  flit_t [NPORTS-1:0]                out_flit;
  logic  [NPORTS-1:0][CRD_W-1:0]     out_credit;

  router #(
    .NPORTS (NPORTS),
    .NVC    (NVC),
    .DEPTH  (DEPTH),
    .DATA_W (DATA_W),
    .NUM_DEST (NUM_DEST)
  ) dut (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_flit    (in_flit),
    .in_credit  (in_credit),
    .out_flit   (out_flit),
    .out_credit (out_credit)
  );

  typedef enum int {PH_RESET, PH_LAT, PH_RATE, PH_RAND, PH_DRAIN, PH_DONE} phase_e;
  phase_e phase;
  int     cyc, ph_cyc;

  int     src_crd [NPORTS][NVC];
  int     sink_occ [NPORTS][NVC];
  int     seq [NPORTS];
  flit_t  expq [NPORTS][NPORTS][NVC][$];  // [out][in][vc]
  int     lat_sent_cyc, lat_port;
  int     rate_cnt [NPORTS];
  int     conflicts, stalls, received;

  function automatic flit_t make_flit(int p, int v, int d);
    flit_t f;
    f.valid = 1'b1;
    f.vc    = VC_W'(v);
    f.dst   = DEST_W'(d);
    f.data  = '0;
    for (int b = 0; b < DATA_W; b += 32) f.data[b +: 32] = $urandom;
    f.data[15:0]  = 16'(seq[p]);
    f.data[19:16] = 4'(p);
    seq[p]++;
    return f;
  endfunction

  function automatic int out_of(int d);
    return d % NPORTS;
  endfunction

  // Mechanism counters, observed on the allocator's inputs.
  always @(posedge clk) begin
    if (phase == PH_RAND || phase == PH_DRAIN) begin
      for (int o = 0; o < NPORTS; o++) begin
        automatic int n = 0;
        for (int i = 0; i < NPORTS; i++) if (dut.u_alloc.out_req[o][i]) n++;
        if (n > 1) conflicts++;
      end
      for (int i = 0; i < NPORTS; i++)
        for (int v = 0; v < NVC; v++)
          if (dut.head_valid[i][v] && !dut.req_valid[i][v]) stalls++;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      phase    <= PH_LAT;
      cyc      <= 0;
      ph_cyc   <= 0;
      in_flit  <= '0;
      out_credit <= '0;
      checks   = 0;
      failures = 0;
      done     <= 1'b0;
      conflicts = 0;
      stalls    = 0;
      received  = 0;
      for (int p = 0; p < NPORTS; p++) begin
        seq[p] = 0;
        rate_cnt[p] = 0;
        for (int v = 0; v < NVC; v++) begin
          src_crd[p][v]  = DEPTH;
          sink_occ[p][v] = 0;
        end
      end
    end else begin
      cyc    <= cyc + 1;
      ph_cyc <= ph_cyc + 1;

      // ---- credits returned by the router to the sources ----
      for (int p = 0; p < NPORTS; p++)
        if (in_credit[p][VC_W]) begin
          src_crd[p][int'(in_credit[p][VC_W-1:0])]++;
          if (src_crd[p][int'(in_credit[p][VC_W-1:0])] > DEPTH) begin
            failures++;
            $display("ERROR: input %0d got a credit beyond its buffer depth", p);
          end
        end

      // ---- sinks: check what the router delivered ----
      for (int o = 0; o < NPORTS; o++) begin
        if (out_flit[o].valid) begin
          automatic int v = int'(out_flit[o].vc);
          automatic int p = int'(out_flit[o].data[19:16]);
          received++;
          sink_occ[o][v]++;
          checks++;
          if (sink_occ[o][v] > DEPTH) begin
            failures++;
            $display("ERROR: output %0d overflowed the VC %0d buffer downstream", o, v);
          end
          checks++;
          if (p >= NPORTS || expq[o][p][v].size() == 0) begin
            failures++;
            $display("ERROR: unexpected flit on output %0d: %h", o, out_flit[o]);
          end else begin
            automatic flit_t e = expq[o][p][v].pop_front();
            if (e != out_flit[o]) begin
              failures++;
              $display("ERROR: output %0d got %h, expected %h", o, out_flit[o], e);
            end
          end
          if (phase == PH_LAT) begin
            checks++;
            if (o != lat_port || cyc - lat_sent_cyc != 3) begin
              failures++;
              $display("ERROR: latency flit on port %0d after %0d edges", o, cyc - lat_sent_cyc);
            end
          end
          if (phase == PH_RATE && ph_cyc >= 16 && ph_cyc < 48) rate_cnt[o]++;
        end
      end

      // ---- sinks: return credits ----
      for (int o = 0; o < NPORTS; o++) begin
        out_credit[o] <= '0;
        if ((phase == PH_RATE) || ($urandom % 100 < 45)) begin
          automatic int start = $urandom % NVC;
          for (int k = 0; k < NVC; k++) begin
            automatic int v = (start + k) % NVC;
            if (sink_occ[o][v] > 0) begin
              sink_occ[o][v]--;
              out_credit[o] <= {1'b1, VC_W'(v)};
              break;
            end
          end
        end
      end

      // ---- sources ----
      for (int p = 0; p < NPORTS; p++) in_flit[p] <= '0;
      case (phase)
        PH_LAT: begin
          if (ph_cyc == 2) begin
            automatic flit_t f = make_flit(0, NVC - 1, 3);
            lat_port     = out_of(3);
            lat_sent_cyc = cyc;
            src_crd[0][NVC-1]--;
            expq[lat_port][0][NVC-1].push_back(f);
            in_flit[0] <= f;
          end
          if (ph_cyc == 12) begin phase <= PH_RATE; ph_cyc <= 0; end
        end
        PH_RATE: begin
          if (ph_cyc < 56) begin
            for (int p = 0; p < NPORTS; p++) begin
              if (src_crd[p][0] > 0) begin
                automatic flit_t f = make_flit(p, 0, (p + 1) % NPORTS);
                src_crd[p][0]--;
                expq[out_of((p + 1) % NPORTS)][p][0].push_back(f);
                in_flit[p] <= f;
              end
            end
          end
          if (ph_cyc == 70) begin
            for (int o = 0; o < NPORTS; o++) begin
              checks++;
              if (rate_cnt[o] != 32) begin
                failures++;
                $display("ERROR: output %0d carried %0d flits in 32 cycles", o, rate_cnt[o]);
              end
            end
            phase <= PH_RAND; ph_cyc <= 0;
          end
        end
        PH_RAND: begin
          for (int p = 0; p < NPORTS; p++) begin
            if ($urandom % 100 < 60) begin
              automatic int v = $urandom % NVC;
              automatic int d = $urandom % NUM_DEST;
              // Skew traffic towards output 0 to create conflicts and back-pressure.
              if ($urandom % 3 == 0) d = 0;
              if (src_crd[p][v] > 0) begin
                automatic flit_t f = make_flit(p, v, d);
                src_crd[p][v]--;
                expq[out_of(d)][p][v].push_back(f);
                in_flit[p] <= f;
              end
            end
          end
          if (ph_cyc == RANDOM_CYCLES) begin phase <= PH_DRAIN; ph_cyc <= 0; end
        end
        PH_DRAIN: begin
          // Drain until every flit is delivered (or give up after a bound).
          automatic int outstanding = 0;
          for (int o = 0; o < NPORTS; o++)
            for (int p = 0; p < NPORTS; p++)
              for (int v = 0; v < NVC; v++) outstanding += expq[o][p][v].size();
          if ((outstanding == 0 && ph_cyc > 20) || ph_cyc == 8000) begin
            for (int o = 0; o < NPORTS; o++)
              for (int p = 0; p < NPORTS; p++)
                for (int v = 0; v < NVC; v++) begin
                  checks++;
                  if (expq[o][p][v].size() != 0) begin
                    failures++;
                    $display("ERROR: %0d flits from input %0d VC %0d never reached output %0d",
                             expq[o][p][v].size(), p, v, o);
                  end
                end
            checks++;
            if (conflicts == 0 || stalls == 0) begin
              failures++;
              $display("ERROR: no allocation conflict (%0d) or no credit stall (%0d)", conflicts, stalls);
            end
            phase <= PH_DONE;
            done  <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
