// hmq_fifo: synchronous first-in first-out queue of the hardware message
// queues. The same module is used for the malloc() queue, the free() queue
// and the response queue of the support core.
//
// Storage is a DEPTH x WIDTH array addressed by a read and a write pointer;
// an occupancy counter gives full, empty and the current count. A push and a
// pop may happen in the same cycle, including when the queue is full (the
// pop frees the slot the push fills). The head entry is shown on rd_data
// whenever the queue is not empty (first-word fall-through), so a pop takes
// effect at the next clock edge and the next entry appears one cycle later.
//
// The depth of 128 entries is the paper's queue depth; the fall-through
// read and push-while-full-with-pop are this design's choices. A
// push while full (without a pop) and a pop while empty are protocol
// errors, checked by assertions. Reset empties the queue.
module hmq_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] ptr_inc(input logic [AW-1:0] p);
    if (p == AW'(DEPTH - 1)) return '0;
    return p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= ptr_inc(wr_ptr);
      if (do_pop)  rd_ptr <= ptr_inc(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("hmq_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("hmq_fifo: pop while empty");

endmodule
