// tb_router_configs: runs the router over the configuration sweep of the
// standalone-router comparison, whose axes are in/out degree 2, 4, 6, 8;
// flit data width 32 and 128 bits; 2 and 4 VCs; flit buffer depth 4, 8, 16
// and 32. Eight routers are simulated side by side, chosen so that every
// value of every axis occurs at least once (function cfg below); the full
// cross-product of 64 is left out because it takes long to build.
// Each router gets its own router_harness, which checks latency (2 cycles),
// rate (one flit per cycle per output), delivery, ordering and flow control.
module tb_router_configs;
  localparam int NCFG = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  int   chk [NCFG];
  int   fail [NCFG];
  logic [NCFG-1:0] done;

  always #5 clk = ~clk;

  // Configuration k as {degree, data width, VCs, depth}, field f.
  function automatic int cfg(int k, int f);
    int t [NCFG][4] = '{
      '{2, 32, 2, 4},  '{2, 128, 4, 32},
      '{4, 32, 2, 8},  '{4, 128, 4, 16},
      '{6, 32, 4, 16}, '{6, 128, 2, 8},
      '{8, 32, 2, 4},  '{8, 128, 4, 32}
    };
    return t[k][f];
  endfunction

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    router_harness #(
      .NPORTS (cfg(k, 0)),
      .DATA_W (cfg(k, 1)),
      .NVC    (cfg(k, 2)),
      .DEPTH  (cfg(k, 3)),
      .RANDOM_CYCLES (1500)
    ) u_h (
      .clk(clk), .rst_n(rst_n), .checks(chk[k]), .failures(fail[k]), .done(done[k])
    );
  end

  initial begin
    int checks, failures;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (&done);
    @(posedge clk);
    checks = 0; failures = 0;
    for (int k = 0; k < NCFG; k++) begin
      checks += chk[k];
      failures += fail[k];
      $display("degree %0d, %0d-bit, %0d VCs, depth %0d: checks=%0d failures=%0d",
               cfg(k, 0), cfg(k, 1), cfg(k, 2), cfg(k, 3), chk[k], fail[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (20000) @(posedge clk);
    checks = 0; failures = 1;
    for (int k = 0; k < NCFG; k++) begin checks += chk[k]; failures += fail[k]; end
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
