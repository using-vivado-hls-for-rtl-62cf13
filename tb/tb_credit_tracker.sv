// tb_credit_tracker: random sends (only while the model says a credit is
// left) and random credit returns (only for flits outstanding) against a
// counter model; has_credit must match the model every cycle. A first phase
// spends all DEPTH credits of VC 0 back to back and checks that the credit
// runs out after exactly DEPTH sends.
module tb_credit_tracker;
  localparam int NVC = 2, DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic send;
  logic [0:0] send_vc;
  logic [1:0] credit_in;
  logic [NVC-1:0] has_credit;
  int cnt [NVC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  credit_tracker #(.NVC(NVC), .DEPTH(DEPTH)) dut (.*);

  task automatic check_state();
    for (int v = 0; v < NVC; v++) begin
      checks++;
      if (has_credit[v] !== (cnt[v] > 0)) begin
        failures++;
        $display("ERROR: VC %0d has_credit=%b model count %0d", v, has_credit[v], cnt[v]);
      end
    end
  endtask

  initial begin
    send = 0; send_vc = '0; credit_in = '0;
    for (int v = 0; v < NVC; v++) cnt[v] = DEPTH;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    // Spend VC 0 completely.
    for (int k = 0; k < DEPTH; k++) begin
      check_state();
      send = 1; send_vc = 0;
      @(posedge clk); cnt[0]--; #1;
    end
    send = 0;
    check_state();
    // Random.
    for (int k = 0; k < 3000; k++) begin
      int sv, cv;
      check_state();
      sv = $urandom % NVC;
      cv = $urandom % NVC;
      send = (cnt[sv] > 0) && ($urandom % 2);
      send_vc = 1'(sv);
      credit_in = ((cnt[cv] - ((send && sv == cv) ? 1 : 0)) < DEPTH && ($urandom % 2)) ? {1'b1, 1'(cv)} : 2'b00;
      @(posedge clk);
      if (send) cnt[sv]--;
      if (credit_in[1]) cnt[cv]++;
      #1;
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
