// tb_flit_buffer: random pushes and pops against a queue model. Checks the
// head (route and data portions, readable before the pop), empty, full and
// the count every cycle, and that a pushed flit is at the head one cycle
// after the push into an empty buffer. Never pushes into a full buffer.
module tb_flit_buffer;
  localparam int DEPTH = 8, RW = 8, DW = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push, pop, empty, full;
  logic [RW-1:0] push_route, head_route;
  logic [DW-1:0] push_data, head_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [RW+DW-1:0] q[$];
  int checks = 0, failures = 0;
  int saw_full = 0;

  always #5 clk = ~clk;

  flit_buffer #(.DEPTH(DEPTH), .ROUTE_W(RW), .DATA_W(DW)) dut (.*);

  initial begin
    push = 0; pop = 0; push_route = '0; push_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    for (int k = 0; k < 4000; k++) begin
      // Check state.
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH) || int'(count) != q.size()) begin
        failures++;
        $display("ERROR: empty=%b full=%b count=%0d model size %0d", empty, full, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if ({head_route, head_data} !== q[0]) begin
          failures++;
          $display("ERROR: head %h expected %h", {head_route, head_data}, q[0]);
        end
      end
      if (full) saw_full++;
      // Choose the next operation; bias towards filling in the first half.
      push = !full && (($urandom % 100) < ((k % 1000) < 500 ? 70 : 35));
      pop  = !empty && (($urandom % 100) < 50);
      push_route = RW'($urandom);
      push_data  = $urandom;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back({push_route, push_data});
      #1;
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("ERROR: buffer never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
