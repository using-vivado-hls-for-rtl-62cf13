// tb_xbar_switch: random input words and random selects in which every input
// goes to at most one output; each output must carry exactly the selected
// input's word, or zero when nothing is selected.
module tb_xbar_switch;
  localparam int NIN = 5, NOUT = 5, W = 38;
  logic [NIN-1:0][W-1:0] in_word;
  logic [NOUT-1:0][NIN-1:0] sel;
  logic [NOUT-1:0][W-1:0] out_word;
  int src [NOUT];
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  xbar_switch #(.NIN(NIN), .NOUT(NOUT), .W(W)) dut (.*);

  initial begin
    for (int k = 0; k < 2000; k++) begin
      bit used [NIN];
      for (int i = 0; i < NIN; i++) begin in_word[i] = {$urandom, $urandom}; used[i] = 0; end
      sel = '0;
      for (int o = 0; o < NOUT; o++) begin
        automatic int i = $urandom % (NIN + 1);
        src[o] = -1;
        if (i < NIN && !used[i]) begin sel[o][i] = 1'b1; used[i] = 1; src[o] = i; end
      end
      #1;
      for (int o = 0; o < NOUT; o++) begin
        checks++;
        if (out_word[o] !== ((src[o] < 0) ? W'(0) : in_word[src[o]])) begin
          failures++;
          $display("ERROR: output %0d = %h, source %0d", o, out_word[o], src[o]);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
