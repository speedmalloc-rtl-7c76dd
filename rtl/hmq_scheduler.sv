// hmq_scheduler: chooses the next request the support core executes.
//
// The head of the malloc() queue is offered whenever that queue is not
// empty; only when it is empty is the head of the free() queue offered.
// malloc() requests come first because a main core may be waiting for
// their result, while free() is asynchronous. The offered request is looked
// up in the register buffer by its process ID, and the hit flag and the
// stored translation registers are passed on with it.
//
// Handshake: req_valid says a request is offered (req_pkt, req_sysreg_hit,
// req_sysreg). The support-core controller raises req_take in a cycle in
// which req_valid is high to accept it; the scheduler then pops the queue
// the request came from at that clock edge. All outputs are combinational
// from the queue heads, so a request can be taken in the cycle after it
// was pushed. The priority rule is the paper's; the valid/take handshake
// is this design's choice.
module hmq_scheduler
  import smalloc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // queue heads
  input  logic                 mq_empty,
  input  sig_pkt_t             mq_head,
  input  logic                 fq_empty,
  input  sig_pkt_t             fq_head,
  output logic                 mq_pop,
  output logic                 fq_pop,
  // register buffer lookup
  output logic [PID_W-1:0]     rb_rd_pid,
  input  logic                 rb_rd_hit,
  input  logic [SYSREG_W-1:0]  rb_rd_data,
  // to the support-core controller
  output logic                 req_valid,
  output sig_pkt_t             req_pkt,
  output logic                 req_sysreg_hit,
  output logic [SYSREG_W-1:0]  req_sysreg,
  input  logic                 req_take
);

  logic use_malloc;
  assign use_malloc     = !mq_empty;
  assign req_valid      = !mq_empty || !fq_empty;
  assign req_pkt        = use_malloc ? mq_head : fq_head;
  assign mq_pop         = req_take && use_malloc;
  assign fq_pop         = req_take && !use_malloc && !fq_empty;
  assign rb_rd_pid      = req_pkt.pid;
  assign req_sysreg_hit = rb_rd_hit;
  assign req_sysreg     = rb_rd_data;

  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n) req_take |-> req_valid)
    else $error("hmq_scheduler: take without a request");
  a_malloc_first: assert property (@(posedge clk) disable iff (!rst_n) fq_pop |-> mq_empty)
    else $error("hmq_scheduler: free() served while a malloc() waits");

endmodule
