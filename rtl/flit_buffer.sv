// flit_buffer: the FIFO flit buffer of one virtual channel of one input port.
//
// A flit is split into a route-information portion (push_route) and a data
// payload portion (push_data). The two portions are kept in two separate
// arrays that share one write pointer, one read pointer and one count, so
// they behave as a single FIFO; this split follows the paper. The head entry
// is visible on head_route/head_data before it is dequeued (read before
// dequeue), so the allocator can examine it and decide whether to pop it in
// the same cycle. The storage is a circular buffer with an asynchronous read
// of the head; that is this design's choice of storage.
//
// Timing: a push at a clock edge is visible at the head one cycle later at
// the earliest. Push and pop may happen in the same cycle. A push into a full
// buffer is an error that the credit flow control must prevent; an assertion
// flags it and the push is dropped. Reset empties the buffer (the storage
// itself is not cleared).
module flit_buffer #(
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned ROUTE_W = 8,
  parameter int unsigned DATA_W  = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [ROUTE_W-1:0]         push_route,
  input  logic [DATA_W-1:0]          push_data,
  input  logic                       pop,
  output logic [ROUTE_W-1:0]         head_route,
  output logic [DATA_W-1:0]          head_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [ROUTE_W-1:0] route_mem [DEPTH];
  logic [DATA_W-1:0]  data_mem  [DEPTH];
  logic [PTR_W-1:0]   wr_ptr, rd_ptr;
  logic               do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  assign head_route = route_mem[rd_ptr];
  assign head_data  = data_mem[rd_ptr];

  function automatic logic [PTR_W-1:0] next_ptr(logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + PTR_W'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) begin
      route_mem[wr_ptr] <= push_route;
      data_mem[wr_ptr]  <= push_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
