// tb_route_table: loads the table of each router of a 4x4 mesh and checks
// every destination against X-then-Y routing worked out here from the
// coordinates (east if the destination column is larger, west if smaller,
// else north/south by row, else the endpoint port), mapped to local port
// indices by counting the router's present directions (endpoint, west, south,
// east, north). Also checks the default table (destination mod 5).
module tb_route_table;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Reference: local index of a direction at (x,y) in a 4x4 mesh.
  function automatic int ref_port(int x, int y, int dir);
    bit has [5];
    int n = 0;
    has[0] = 1; has[1] = x > 0; has[2] = y > 0; has[3] = x < 3; has[4] = y < 3;
    for (int k = 0; k < dir; k++) if (has[k]) n++;
    return n;
  endfunction

  function automatic int ref_route(int x, int y, int d);
    int dx = d % 4, dy = d / 4;
    if (dx > x) return ref_port(x, y, 3);
    if (dx < x) return ref_port(x, y, 1);
    if (dy > y) return ref_port(x, y, 4);
    if (dy < y) return ref_port(x, y, 2);
    return 0;
  endfunction

  logic [3:0] dst;
  logic [15:0][PORT_W-1:0] port;
  logic [PORT_W-1:0] def_port;

  for (genvar r = 0; r < 16; r++) begin : g_r
    route_table #(.NUM_DEST(16), .TABLE(mesh_route_table(r % 4, r / 4, 4, 4))) u_rt (
      .dst(dst), .out_port(port[r]));
  end
  route_table #(.NUM_DEST(16)) u_def (.dst(dst), .out_port(def_port));

  initial begin
    for (int d = 0; d < 16; d++) begin
      dst = 4'(d);
      #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (int'(port[r]) != ref_route(r % 4, r / 4, d)) begin
          failures++;
          $display("ERROR: router %0d dest %0d port %0d expected %0d", r, d, port[r], ref_route(r % 4, r / 4, d));
        end
      end
      checks++;
      if (int'(def_port) != d % 5) begin
        failures++;
        $display("ERROR: default table dest %0d port %0d", d, def_port);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
