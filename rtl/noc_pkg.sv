// noc_pkg: constants, direction codes and elaboration-time helper functions
// shared by the router and the 4x4 mesh.
//
// Flits and credits travel as packed vectors whose widths follow the module
// parameters (see router.sv):
//   flit   = {valid, vc[VC_W-1:0], dst[DEST_W-1:0], data[DATA_W-1:0]}
//   credit = {valid, vc[VC_W-1:0]}
// Every flit carries its own destination, which is the route information the
// routing tables look up.
//
// Mesh geometry. Router Rk sits at column k mod MESH_X and row k div MESH_X,
// row 0 at the bottom, and endpoint Nk hangs on Rk. The mesh figure labels the
// router-endpoint link 0, horizontal links 1 and 3 and vertical links 2 and 4;
// those numbers are used as direction codes here, with 1 = west, 3 = east,
// 2 = south and 4 = north (the north/south pairing is this design's choice).
// A router has only the directions that lead somewhere (3 ports on a corner,
// 4 on an edge, 5 inside), and its local port indices are its present
// directions taken in increasing code order, so port 0 is always the endpoint.
// Routes are dimension-ordered, X first, then Y; this routing choice is this
// design's own.
package noc_pkg;

  // Width of one routing-table entry (an output port index); allows up to 16 ports.
  localparam int unsigned PORT_W   = 4;
  // Largest destination count the elaboration-time route tables support.
  localparam int unsigned MAX_DEST = 64;

  typedef enum logic [2:0] {
    DIR_NODE  = 3'd0,
    DIR_WEST  = 3'd1,
    DIR_SOUTH = 3'd2,
    DIR_EAST  = 3'd3,
    DIR_NORTH = 3'd4
  } dir_e;

  localparam int unsigned NUM_DIRS = 5;

  typedef logic [MAX_DEST-1:0][PORT_W-1:0] route_table_t;

  // Does router (x,y) of an mx-by-my mesh have a link in direction d?
  function automatic bit mesh_has_dir(int x, int y, int mx, int my, int d);
    case (d)
      0:       return 1'b1;
      1:       return x > 0;
      2:       return y > 0;
      3:       return x < mx - 1;
      4:       return y < my - 1;
      default: return 1'b0;
    endcase
  endfunction

  // Number of ports of router (x,y).
  function automatic int mesh_nports(int x, int y, int mx, int my);
    int n = 0;
    for (int d = 0; d < NUM_DIRS; d++) if (mesh_has_dir(x, y, mx, my, d)) n++;
    return n;
  endfunction

  // Local port index of direction d at router (x,y); -1 when absent.
  function automatic int mesh_port_of_dir(int x, int y, int mx, int my, int d);
    int n = 0;
    if (!mesh_has_dir(x, y, mx, my, d)) return -1;
    for (int k = 0; k < d; k++) if (mesh_has_dir(x, y, mx, my, k)) n++;
    return n;
  endfunction

  // Direction of local port p at router (x,y).
  function automatic int mesh_dir_of_port(int x, int y, int mx, int my, int p);
    for (int d = 0; d < NUM_DIRS; d++)
      if (mesh_port_of_dir(x, y, mx, my, d) == p) return d;
    return 0;
  endfunction

  // X-then-Y direction taken at router (x,y) by a flit for endpoint dest.
  function automatic int mesh_xy_dir(int x, int y, int mx, int dest);
    int dx = dest % mx;
    int dy = dest / mx;
    if (dx > x) return int'(DIR_EAST);
    if (dx < x) return int'(DIR_WEST);
    if (dy > y) return int'(DIR_NORTH);
    if (dy < y) return int'(DIR_SOUTH);
    return int'(DIR_NODE);
  endfunction

  // Routing table of router (x,y): entry dest holds the local output port.
  function automatic route_table_t mesh_route_table(int x, int y, int mx, int my);
    route_table_t t = '0;
    for (int dest = 0; dest < mx * my && dest < MAX_DEST; dest++)
      t[dest] = PORT_W'(mesh_port_of_dir(x, y, mx, my, mesh_xy_dir(x, y, mx, dest)));
    return t;
  endfunction

  // Default table of a stand-alone router: destination d leaves on port d mod nports.
  function automatic route_table_t modulo_route_table(int nports);
    route_table_t t = '0;
    for (int dest = 0; dest < MAX_DEST; dest++) t[dest] = PORT_W'(dest % nports);
    return t;
  endfunction

endpackage
