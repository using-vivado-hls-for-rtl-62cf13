// tb_mesh_noc: end-to-end test of the 4x4 mesh at its default parameters
// (16 endpoints, 2 VCs, 8-flit buffers, 32-bit data).
//
// Sixteen endpoint models surround the mesh. Each source keeps its own credit
// counters and sends only while it holds a credit; each sink models an
// 8-slot buffer per VC and returns credits after random delays.
//   1. latency : isolated flits between chosen endpoint pairs must arrive
//                exactly 2 cycles per router on the minimal X-then-Y path after
//                injection (e.g. N0 to N15 crosses 7 routers: 14 cycles);
//   2. random  : uniform random traffic on both VCs, then a hotspot phase in
//                which a third of all flits go to N0, whose sink is slow;
//   3. drain   : every injected flit must have arrived at its destination,
//                unchanged and in order per (source, destination, VC), and no
//                sink may ever hold more than 8 flits of one VC.
// Expected values come from the sources' records. The test also counts the
// mechanisms of the design and fails if one never occurred: allocation
// conflicts, heads stalled for lack of credit, full VC buffers, flits on each
// VC, and endpoints held back by the network's credits.
module tb_mesh_noc;
  import noc_pkg::*;
  localparam int MX = 4, MY = 4, NR = 16, NVC = 2, DEPTH = 8, DATA_W = 32;
  localparam int VC_W = 1, DEST_W = 4;
  localparam int FLIT_W = 1 + VC_W + DEST_W + DATA_W, CRD_W = 1 + VC_W;

  typedef struct packed {
    logic              valid;
    logic [VC_W-1:0]   vc;
    logic [DEST_W-1:0] dst;
    logic [DATA_W-1:0] data;
  } flit_t;

  logic clk = 1'b0, rst_n = 1'b0;
  flit_t [NR-1:0]            inj_flit, ej_flit;
  logic  [NR-1:0][CRD_W-1:0] inj_credit, ej_credit;

  always #5 clk = ~clk;

  mesh_noc dut (
    .clk(clk), .rst_n(rst_n),
    .inj_flit(inj_flit), .inj_credit(inj_credit),
    .ej_flit(ej_flit), .ej_credit(ej_credit)
  );

  typedef enum int {PH_LAT, PH_UNIFORM, PH_HOTSPOT, PH_DRAIN, PH_DONE} phase_e;
  phase_e phase;
  int cyc, ph_cyc;
  int checks = 0, failures = 0;
  int src_crd [NR][NVC];
  int sink_occ [NR][NVC];
  int seq [NR];
  flit_t expq [NR][NR][NVC][$];   // [dst][src][vc]
  int lat_idx, lat_sent, lat_exp;
  int lat_src [8] = '{0, 15, 5, 3, 12, 9, 6, 10};
  int lat_dst [8] = '{15, 0, 5, 12, 3, 6, 9, 1};
  int lat_checked = 0;
  int delivered = 0;

  // Mechanism counters.
  int n_conflict = 0, n_credit_stall = 0, n_full = 0, n_inj_blocked = 0;
  int n_vc [NVC];

  for (genvar y = 0; y < MY; y++) begin : g_my
    for (genvar x = 0; x < MX; x++) begin : g_mx
      localparam int NP = mesh_nports(x, y, MX, MY);
      always @(posedge clk) if (rst_n) begin
        for (int o = 0; o < NP; o++) begin
          automatic int n = 0;
          for (int i = 0; i < NP; i++) if (dut.g_row[y].g_col[x].u_router.u_alloc.out_req[o][i]) n++;
          if (n > 1) n_conflict++;
        end
        for (int i = 0; i < NP; i++)
          for (int v = 0; v < NVC; v++)
            if (dut.g_row[y].g_col[x].u_router.head_valid[i][v] &&
                !dut.g_row[y].g_col[x].u_router.req_valid[i][v]) n_credit_stall++;
      end
      for (genvar p = 0; p < NP; p++) begin : g_mp
        for (genvar v = 0; v < NVC; v++) begin : g_mv
          always @(posedge clk)
            if (rst_n && dut.g_row[y].g_col[x].u_router.g_in[p].g_vc[v].full) n_full++;
        end
      end
    end
  end

  function automatic int hops(int s, int d);
    int dx = (s % MX) - (d % MX), dy = (s / MX) - (d / MX);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  function automatic flit_t make_flit(int s, int v, int d);
    flit_t f;
    f.valid = 1'b1;
    f.vc    = VC_W'(v);
    f.dst   = DEST_W'(d);
    f.data  = $urandom;
    f.data[31:28] = 4'(s);
    f.data[15:0]  = 16'(seq[s]);
    seq[s]++;
    return f;
  endfunction

  task automatic send(int s, int v, int d);
    flit_t f = make_flit(s, v, d);
    src_crd[s][v]--;
    expq[d][s][v].push_back(f);
    inj_flit[s] <= f;
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      phase <= PH_LAT; cyc <= 0; ph_cyc <= 0;
      inj_flit <= '0; ej_credit <= '0;
      lat_idx = 0; lat_sent = -1;
      for (int v = 0; v < NVC; v++) n_vc[v] = 0;
      for (int s = 0; s < NR; s++) begin
        seq[s] = 0;
        for (int v = 0; v < NVC; v++) begin src_crd[s][v] = DEPTH; sink_occ[s][v] = 0; end
      end
    end else begin
      cyc <= cyc + 1;
      ph_cyc <= ph_cyc + 1;

      // Credits from the network to the sources.
      for (int s = 0; s < NR; s++)
        if (inj_credit[s][VC_W]) begin
          src_crd[s][int'(inj_credit[s][0])]++;
          checks++;
          if (src_crd[s][int'(inj_credit[s][0])] > DEPTH) begin
            failures++; $display("ERROR: endpoint %0d got an extra credit", s);
          end
        end

      // Sinks.
      for (int d = 0; d < NR; d++) begin
        if (ej_flit[d].valid) begin
          automatic int v = int'(ej_flit[d].vc);
          automatic int s = int'(ej_flit[d].data[31:28]);
          delivered++;
          n_vc[v]++;
          sink_occ[d][v]++;
          checks += 3;
          if (sink_occ[d][v] > DEPTH) begin
            failures++; $display("ERROR: endpoint %0d VC %0d overflowed", d, v);
          end
          if (int'(ej_flit[d].dst) != d) begin
            failures++; $display("ERROR: flit for %0d delivered to %0d", ej_flit[d].dst, d);
          end
          if (expq[d][s][v].size() == 0) begin
            failures++; $display("ERROR: unexpected flit at %0d: %h", d, ej_flit[d]);
          end else begin
            automatic flit_t e = expq[d][s][v].pop_front();
            if (e != ej_flit[d]) begin
              failures++; $display("ERROR: endpoint %0d got %h expected %h", d, ej_flit[d], e);
            end
          end
          if (phase == PH_LAT) begin
            checks++;
            lat_checked++;
            if (cyc - lat_sent != lat_exp) begin
              failures++;
              $display("ERROR: N%0d->N%0d took %0d edges, expected %0d", s, d, cyc - lat_sent, lat_exp);
            end
          end
        end
      end
      for (int d = 0; d < NR; d++) begin
        ej_credit[d] <= '0;
        // N0's sink is slow in the hotspot phase.
        if (($urandom % 100) < ((d == 0 && phase == PH_HOTSPOT) ? 20 : 70)) begin
          automatic int st = $urandom % NVC;
          for (int k = 0; k < NVC; k++) begin
            automatic int v = (st + k) % NVC;
            if (sink_occ[d][v] > 0) begin
              sink_occ[d][v]--;
              ej_credit[d] <= {1'b1, VC_W'(v)};
              break;
            end
          end
        end
      end

      // Sources.
      for (int s = 0; s < NR; s++) inj_flit[s] <= '0;
      case (phase)
        PH_LAT: begin
          if (ph_cyc % 40 == 5) begin
            if (lat_idx < 8) begin
              lat_sent = cyc;
              // 2 cycles per router on the path, + 1 for the sampling edge.
              lat_exp  = 2 * (hops(lat_src[lat_idx], lat_dst[lat_idx]) + 1) + 1;
              send(lat_src[lat_idx], lat_idx % NVC, lat_dst[lat_idx]);
              lat_idx++;
            end else begin
              checks++;
              if (lat_checked != 8) begin failures++; $display("ERROR: %0d latency flits seen", lat_checked); end
              phase <= PH_UNIFORM; ph_cyc <= 0;
            end
          end
        end
        PH_UNIFORM, PH_HOTSPOT: begin
          for (int s = 0; s < NR; s++) begin
            if (($urandom % 100) < 40) begin
              automatic int v = $urandom % NVC;
              automatic int d = $urandom % NR;
              if (phase == PH_HOTSPOT && ($urandom % 3) == 0) d = 0;
              if (src_crd[s][v] > 0) send(s, v, d);
              else n_inj_blocked++;
            end
          end
          if (phase == PH_UNIFORM && ph_cyc == 1500) begin phase <= PH_HOTSPOT; ph_cyc <= 0; end
          if (phase == PH_HOTSPOT && ph_cyc == 1500) begin phase <= PH_DRAIN; ph_cyc <= 0; end
        end
        PH_DRAIN: begin
          if (ph_cyc == 1500) begin
            for (int d = 0; d < NR; d++)
              for (int s = 0; s < NR; s++)
                for (int v = 0; v < NVC; v++) begin
                  checks++;
                  if (expq[d][s][v].size() != 0) begin
                    failures++;
                    $display("ERROR: %0d flits N%0d->N%0d VC %0d not delivered", expq[d][s][v].size(), s, d, v);
                  end
                end
            phase <= PH_DONE;
          end
        end
        default: ;
      endcase
    end
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("ERROR: mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (phase == PH_DONE);
    @(posedge clk);
    $display("mesh: delivered=%0d conflicts=%0d credit_stalls=%0d buffer_full=%0d vc0=%0d vc1=%0d inj_blocked=%0d",
             delivered, n_conflict, n_credit_stall, n_full, n_vc[0], n_vc[1], n_inj_blocked);
    need("allocation conflict", n_conflict);
    need("credit stall", n_credit_stall);
    need("full VC buffer", n_full);
    need("flit on VC 0", n_vc[0]);
    need("flit on VC 1", n_vc[1]);
    need("endpoint held back by credits", n_inj_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
