// tb_rr_arbiter: checks the round-robin arbiter against a reference model of
// rotating priority. With every bit requesting and advance held high the
// grants must rotate 0,1,...,N-1,0; with random requests and random advance
// each grant must equal the first requester at or after the model's pointer.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req, gnt;
  logic advance;
  int checks = 0, failures = 0;
  int ptr;

  always #5 clk = ~clk;

  rr_arbiter #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .req(req), .advance(advance), .gnt(gnt));

  function automatic logic [N-1:0] model(logic [N-1:0] r, int p);
    for (int k = 0; k < N; k++)
      if (r[(p + k) % N]) return N'(1) << ((p + k) % N);
    return '0;
  endfunction

  task automatic step_check();
    logic [N-1:0] exp_g;
    #1;
    exp_g = model(req, ptr);
    checks++;
    if (gnt !== exp_g) begin
      failures++;
      $display("ERROR: req=%b ptr=%0d gnt=%b expected %b", req, ptr, gnt, exp_g);
    end
    @(posedge clk);
    if (advance && exp_g != 0)
      for (int i = 0; i < N; i++) if (exp_g[i]) ptr = (i + 1) % N;
    #1;
  endtask

  initial begin
    req = '0; advance = 1'b0; ptr = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // Full load: strict rotation.
    for (int k = 0; k < 2 * N; k++) begin
      req = '1; advance = 1'b1;
      #1;
      checks++;
      if (gnt !== (N'(1) << (k % N))) begin
        failures++;
        $display("ERROR: rotation step %0d gnt=%b", k, gnt);
      end
      @(posedge clk); #1;
    end
    ptr = 0;
    // Random requests and advance.
    for (int k = 0; k < 2000; k++) begin
      req = N'($urandom);
      advance = ($urandom % 4) != 0;
      step_check();
    end
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
