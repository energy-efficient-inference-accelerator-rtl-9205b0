// stream_fifo -- synchronous first-in first-out queue for the host stream.
//
// Two instances sit between the host interface and the accelerator: FIFO_IN
// carries models, stories, questions and control words towards the
// accelerator, FIFO_OUT carries answers back.  The paper names both queues
// and their place in the data flow; their depth and handshake are this
// design's own choice.
//
// Interface: push side (push, din, full), pop side (pop, dout, empty).  The
// queue is first-word-fall-through: dout shows the oldest word whenever
// empty is low, and pop removes it at the clock edge.  A push and a pop in
// the same cycle are both taken (also when full, the pop frees the place).
// Pushing while full or popping while empty is a protocol error, checked by
// assertions.  Reset is synchronous and active low.  count gives the number of words held.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  output logic                     full,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  // Handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("stream_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("stream_fifo: pop while empty");
endmodule
