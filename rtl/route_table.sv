// route_table: the routing table of one router input port.
//
// A flit's route information is its destination endpoint. On entry to the
// router the output port is looked up combinationally in a table that has
// one PORT_W-bit entry per destination; the table contents are the parameter
// TABLE (entry d in bits [d*PORT_W +: PORT_W]). The paper gives the lookup;
// the table format and the contents are this design's: the mesh loads
// X-then-Y routes, a stand-alone router defaults to destination mod 5.
module route_table
  import noc_pkg::*;
#(
  parameter int unsigned  NUM_DEST = 16,
  parameter route_table_t TABLE    = modulo_route_table(5)
) (
  input  logic [((NUM_DEST > 1) ? $clog2(NUM_DEST) : 1)-1:0] dst,
  output logic [PORT_W-1:0]                                  out_port
);

  assign out_port = (int'(dst) < NUM_DEST) ? TABLE[dst] : '0;

endmodule
