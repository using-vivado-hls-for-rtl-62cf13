// tb_sep_if_allocator: random request patterns against a reference model of
// separable input-first allocation written here (a rotating-priority pick of
// one VC per input, then a rotating-priority pick of one input per output,
// with the input pointers moving only when the input wins). Every cycle the
// VC grants and the crossbar selects must equal the model's, every output
// may drive at most one input, every input may send at most one flit, and no
// request may be granted that was not made. A first phase of heavy load must
// also see each output serve all its competing inputs in turn.
module tb_sep_if_allocator;
  import noc_pkg::*;
  localparam int NIN = 5, NOUT = 5, NVC = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NIN-1:0][NVC-1:0] req_valid, gnt_vc;
  logic [NIN-1:0][NVC-1:0][PORT_W-1:0] req_port;
  logic [NOUT-1:0][NIN-1:0] gnt_in;
  int ptr_in [NIN];
  int ptr_out [NOUT];
  int checks = 0, failures = 0, conflicts = 0;

  always #5 clk = ~clk;

  sep_if_allocator #(.NIN(NIN), .NOUT(NOUT), .NVC(NVC)) dut (.*);

  function automatic int rr_pick(logic [31:0] r, int n, int p);
    for (int k = 0; k < n; k++) if (r[(p + k) % n]) return (p + k) % n;
    return -1;
  endfunction

  task automatic cycle_check();
    int vsel [NIN];
    int win [NOUT];
    logic [NIN-1:0][NVC-1:0] exp_vc;
    logic [NOUT-1:0][NIN-1:0] exp_in;
    exp_vc = '0; exp_in = '0;
    for (int i = 0; i < NIN; i++) vsel[i] = rr_pick(32'(req_valid[i]), NVC, ptr_in[i]);
    for (int o = 0; o < NOUT; o++) begin
      logic [31:0] r = '0;
      int n = 0;
      for (int i = 0; i < NIN; i++)
        if (vsel[i] >= 0 && int'(req_port[i][vsel[i]]) == o) begin r[i] = 1'b1; n++; end
      if (n > 1) conflicts++;
      win[o] = rr_pick(r, NIN, ptr_out[o]);
      if (win[o] >= 0) begin
        exp_in[o][win[o]] = 1'b1;
        exp_vc[win[o]][vsel[win[o]]] = 1'b1;
      end
    end
    #1;
    checks++;
    if (gnt_vc !== exp_vc || gnt_in !== exp_in) begin
      failures++;
      $display("ERROR: req=%b gnt_vc=%b exp %b gnt_in=%b exp %b", req_valid, gnt_vc, exp_vc, gnt_in, exp_in);
    end
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (!$onehot0(gnt_in[o])) begin failures++; $display("ERROR: output %0d drives two inputs", o); end
    end
    for (int i = 0; i < NIN; i++) begin
      checks++;
      if (!$onehot0(gnt_vc[i]) || (gnt_vc[i] & ~req_valid[i]) != 0) begin
        failures++; $display("ERROR: input %0d bad VC grant %b", i, gnt_vc[i]);
      end
    end
    @(posedge clk);
    for (int o = 0; o < NOUT; o++)
      if (win[o] >= 0) begin
        ptr_out[o] = (win[o] + 1) % NIN;
        ptr_in[win[o]] = (vsel[win[o]] + 1) % NVC;
      end
    #1;
  endtask

  initial begin
    int served [NIN];
    req_valid = '0; req_port = '0;
    for (int i = 0; i < NIN; i++) ptr_in[i] = 0;
    for (int o = 0; o < NOUT; o++) ptr_out[o] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // Heavy load: every VC of every input wants output 2; all inputs must be served in turn.
    for (int i = 0; i < NIN; i++) served[i] = 0;
    for (int k = 0; k < NIN; k++) begin
      req_valid = '1;
      for (int i = 0; i < NIN; i++) for (int v = 0; v < NVC; v++) req_port[i][v] = 4'd2;
      #1;
      for (int i = 0; i < NIN; i++) if (gnt_in[2][i]) served[i]++;
      #1;
      cycle_check();
    end
    for (int i = 0; i < NIN; i++) begin
      checks++;
      if (served[i] != 1) begin failures++; $display("ERROR: input %0d served %0d times in %0d cycles", i, served[i], NIN); end
    end
    // Random.
    for (int k = 0; k < 3000; k++) begin
      for (int i = 0; i < NIN; i++)
        for (int v = 0; v < NVC; v++) begin
          req_valid[i][v] = ($urandom % 100) < 60;
          req_port[i][v]  = PORT_W'($urandom % NOUT);
        end
      cycle_check();
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("ERROR: no conflicts exercised"); end
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
