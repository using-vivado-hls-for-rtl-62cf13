// tb_router: self-checking test of the router at its default configuration
// (5 ports, 2 VCs, 8-flit buffers, 32-bit data). The traffic, the checks and
// the cycle-count checks (2-cycle latency, one flit per cycle per output) are
// in router_harness.
module tb_router;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks, failures;
  logic done;

  always #5 clk = ~clk;

  router_harness #(.RANDOM_CYCLES(3000)) u_h (
    .clk(clk), .rst_n(rst_n), .checks(checks), .failures(failures), .done(done)
  );

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done);
    @(posedge clk);
    $display("router: conflicts=%0d credit_stalls=%0d flits=%0d",
             u_h.conflicts, u_h.stalls, u_h.received);
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
