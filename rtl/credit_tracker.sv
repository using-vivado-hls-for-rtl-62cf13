// credit_tracker: credit-based flow control state of one router output port.
//
// One counter per virtual channel holds the number of free slots in the
// matching VC buffer of the downstream router (or endpoint). Counters start
// at DEPTH after reset. A flit sent on VC v (send, send_vc) takes one credit;
// a credit message {valid, vc} from downstream gives one back; both in the
// same cycle leave the counter unchanged. has_credit[v] tells the allocator
// that a flit may be sent on VC v, so the downstream buffer can never
// overflow. The paper names credit-based flow control; the counter layout
// and the one-credit-per-cycle message format are this design's.
module credit_tracker #(
  parameter int unsigned NVC   = 2,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned VC_W = (NVC > 1) ? $clog2(NVC) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            send,
  input  logic [VC_W-1:0] send_vc,
  input  logic [VC_W:0]   credit_in,   // {valid, vc}
  output logic [NVC-1:0]  has_credit
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [CNT_W-1:0] cnt [NVC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int v = 0; v < NVC; v++) cnt[v] <= CNT_W'(DEPTH);
    end else begin
      for (int v = 0; v < NVC; v++) begin
        logic dec, inc;
        dec = send && (int'(send_vc) == v);
        inc = credit_in[VC_W] && (int'(credit_in[VC_W-1:0]) == v);
        if (dec && !inc)      cnt[v] <= cnt[v] - 1'b1;
        else if (inc && !dec) cnt[v] <= cnt[v] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int v = 0; v < NVC; v++) has_credit[v] = (cnt[v] != '0);
  end

  for (genvar v = 0; v < NVC; v++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      !(send && int'(send_vc) == v && cnt[v] == '0));
    assert property (@(posedge clk) disable iff (!rst_n)
      !(credit_in[VC_W] && int'(credit_in[VC_W-1:0]) == v && int'(cnt[v]) == DEPTH
        && !(send && int'(send_vc) == v)));
  end

endmodule
