// mesh_noc: 16-endpoint NoC, a 4-by-4 two-dimensional mesh of routers.
//
// Router Rk sits at column k mod MESH_X, row k div MESH_X (R0 bottom left,
// R15 top right) and serves endpoint Nk on its port 0. Corner routers have 3
// ports, edge routers 4 and interior routers 5, as in the paper's mesh; each
// router's remaining ports face its west, south, east and north neighbours,
// in that order of local index (see noc_pkg). Every link between two
// neighbours is a flit wire in each direction plus the matching credit wire
// going back. Routing tables hold X-then-Y routes, computed at elaboration.
//
// Endpoint interface, for each endpoint k (same protocol as a router port):
//   inj_flit[k]   {valid, vc, dst, data} flit into the network
//   inj_credit[k] {valid, vc} one credit per flit the network has taken out of
//                 its VC buffer; the endpoint starts with DEPTH credits per VC
//                 and may send on VC v only while it holds a credit for v
//   ej_flit[k]    flit delivered to endpoint k
//   ej_credit[k]  {valid, vc} one credit per delivered flit the endpoint has
//                 consumed; the network assumes DEPTH slots per VC there
// A flit needs 2 cycles per router it crosses when nothing blocks it, so a
// flit crossing h links (h+1 routers) arrives 2(h+1) cycles after injection.
// Default sizes (2 VCs, 8-flit buffers, 32-bit data, 16 endpoints) are the
// NoC configuration the paper evaluates; the routing and the port numbering
// are this design's choices.
module mesh_noc
  import noc_pkg::*;
#(
  parameter int unsigned  MESH_X  = 4,
  parameter int unsigned  MESH_Y  = 4,
  parameter int unsigned  NVC     = 2,
  parameter int unsigned  DEPTH   = 8,
  parameter int unsigned  DATA_W  = 32,
  localparam int unsigned NR      = MESH_X * MESH_Y,
  localparam int unsigned VC_W    = (NVC > 1) ? $clog2(NVC) : 1,
  localparam int unsigned DEST_W  = (NR > 1) ? $clog2(NR) : 1,
  localparam int unsigned FLIT_W  = 1 + VC_W + DEST_W + DATA_W,
  localparam int unsigned CRD_W   = 1 + VC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NR-1:0][FLIT_W-1:0] inj_flit,
  output logic [NR-1:0][CRD_W-1:0]  inj_credit,
  output logic [NR-1:0][FLIT_W-1:0] ej_flit,
  input  logic [NR-1:0][CRD_W-1:0]  ej_credit
);

  // Per router, per direction code: flit into / out of the router, credit
  // into the router (for its output) and out of it (for its input).
  logic [NUM_DIRS-1:0][FLIT_W-1:0] fi [NR];
  logic [NUM_DIRS-1:0][FLIT_W-1:0] fo [NR];
  logic [NUM_DIRS-1:0][CRD_W-1:0]  ci [NR];
  logic [NUM_DIRS-1:0][CRD_W-1:0]  co [NR];

  // Neighbour of router id in direction d, and the direction pointing back.
  function automatic int nbr(int id, int d);
    case (d)
      1:       return id - 1;
      2:       return id - int'(MESH_X);
      3:       return id + 1;
      4:       return id + int'(MESH_X);
      default: return id;
    endcase
  endfunction

  function automatic int opposite(int d);
    case (d)
      1:       return 3;
      2:       return 4;
      3:       return 1;
      4:       return 2;
      default: return 0;
    endcase
  endfunction

  for (genvar y = 0; y < MESH_Y; y++) begin : g_row
    for (genvar x = 0; x < MESH_X; x++) begin : g_col
      localparam int ID = y * MESH_X + x;
      localparam int NP = mesh_nports(x, y, MESH_X, MESH_Y);
      localparam route_table_t RT = mesh_route_table(x, y, MESH_X, MESH_Y);

      logic [NP-1:0][FLIT_W-1:0] r_in_flit, r_out_flit;
      logic [NP-1:0][CRD_W-1:0]  r_in_credit, r_out_credit;

      router #(
        .NPORTS      (NP),
        .NVC         (NVC),
        .DEPTH       (DEPTH),
        .DATA_W      (DATA_W),
        .NUM_DEST    (NR),
        .ROUTE_TABLE (RT)
      ) u_router (
        .clk        (clk),
        .rst_n      (rst_n),
        .in_flit    (r_in_flit),
        .in_credit  (r_in_credit),
        .out_flit   (r_out_flit),
        .out_credit (r_out_credit)
      );

      // Map the router's local ports onto direction codes.
      for (genvar d = 0; d < NUM_DIRS; d++) begin : g_dir
        localparam int P = mesh_port_of_dir(x, y, MESH_X, MESH_Y, d);
        if (P >= 0) begin : g_present
          assign r_in_flit[P]    = fi[ID][d];
          assign r_out_credit[P] = ci[ID][d];
          assign fo[ID][d]       = r_out_flit[P];
          assign co[ID][d]       = r_in_credit[P];
          if (d == 0) begin : g_node
            assign fi[ID][d]      = inj_flit[ID];
            assign ci[ID][d]      = ej_credit[ID];
            assign ej_flit[ID]    = r_out_flit[P];
            assign inj_credit[ID] = r_in_credit[P];
          end else begin : g_link
            assign fi[ID][d] = fo[nbr(ID, d)][opposite(d)];
            assign ci[ID][d] = co[nbr(ID, d)][opposite(d)];
          end
        end else begin : g_absent
          assign fi[ID][d] = '0;
          assign ci[ID][d] = '0;
          assign fo[ID][d] = '0;
          assign co[ID][d] = '0;
        end
      end
    end
  end

endmodule
