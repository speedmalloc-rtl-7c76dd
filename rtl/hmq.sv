// hmq: hardware message queues of the support core.
//
// Start requests from the main cores enter per-core slots of the
// dispatcher, which sorts them by type into the malloc() queue and the
// free() queue and stores any system registers they carry in the register
// buffer. The scheduler offers the support core the head of the malloc()
// queue, or, if that is empty, the head of the free() queue, together with
// the process's registers from the register buffer. Results of finished
// malloc() calls are pushed by the support-core controller into the
// response queue; its head is popped (at most one entry per cycle) and
// sent as the end signal back towards the requesting main core.
//
// Interfaces: in_valid/in_req/credit_ret towards the signal path (start
// side, credit flow control, see hmq_dispatcher); req_* towards the
// support-core controller (see hmq_scheduler); rsp_push/rsp_pkt/rsp_full
// from the controller into the response queue; end_valid/end_pkt towards
// the signal path (valid/ready: the head is popped in a cycle in which
// end_valid and end_ready are both high); spill_mem_* towards reserved
// memory (see hmq_spill). Queue occupancies and the number of spilled
// requests are brought out for observation.
//
// The block structure, the malloc-first rule and the 128-entry queue
// depths follow the paper; the register-buffer size and the slot depth
// are this design's choices. When the free() queue is full, further frees
// overflow into a ring in reserved memory (hmq_spill) through the
// spill_mem_* port and are fetched back as the queue drains, as the paper
// suggests. The malloc() queue needs no such path: with one outstanding
// malloc per core it never holds more than NCORES entries.
module hmq
  import smalloc_pkg::*;
#(
  parameter int unsigned NCORES     = 16,
  parameter int unsigned SLOT_DEPTH = 2,
  parameter int unsigned MQ_DEPTH   = 128,
  parameter int unsigned FQ_DEPTH   = 128,
  parameter int unsigned RQ_DEPTH   = 128,
  parameter int unsigned RB_ENTRIES = 16,
  parameter int unsigned SPILL_ENTRIES = 1024,
  localparam int unsigned SPX_W = $clog2(SPILL_ENTRIES),
  localparam int unsigned SPC_W = $clog2(SPILL_ENTRIES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // start side
  input  logic [NCORES-1:0]    in_valid,
  input  start_req_t           in_req [NCORES],
  output logic [NCORES-1:0]    credit_ret,
  // next request for the support core
  output logic                 req_valid,
  output sig_pkt_t             req_pkt,
  output logic                 req_sysreg_hit,
  output logic [SYSREG_W-1:0]  req_sysreg,
  input  logic                 req_take,
  // results into the response queue
  input  logic                 rsp_push,
  input  sig_pkt_t             rsp_pkt,
  output logic                 rsp_full,
  // end side
  output logic                 end_valid,
  output sig_pkt_t             end_pkt,
  input  logic                 end_ready,
  // occupancy
  output logic [$clog2(MQ_DEPTH+1)-1:0] mq_count,
  output logic [$clog2(FQ_DEPTH+1)-1:0] fq_count,
  output logic [$clog2(RQ_DEPTH+1)-1:0] rq_count,
  // reserved-memory port of the free() queue overflow
  output logic                 spill_mem_req,
  output logic                 spill_mem_we,
  output logic [SPX_W-1:0]     spill_mem_idx,
  output logic [PKT_W-1:0]     spill_mem_wdata,
  input  logic                 spill_mem_gnt,
  input  logic                 spill_mem_rvalid,
  input  logic [PKT_W-1:0]     spill_mem_rdata,
  output logic [SPC_W-1:0]     spill_count
);

  logic       mq_push, fq_push, mq_pop, fq_pop;
  logic       mq_full, fq_full, mq_empty, fq_empty, rq_empty;
  logic       fq_in_full, fq_q_push;
  logic [PKT_W-1:0] fq_q_data;
  sig_pkt_t   q_pkt;
  logic [PKT_W-1:0] mq_head_bits, fq_head_bits, rq_head_bits;

  logic                rb_wr_en, rb_rd_hit;
  logic [PID_W-1:0]    rb_wr_pid, rb_rd_pid;
  logic [SYSREG_W-1:0] rb_wr_data, rb_rd_data;

  hmq_dispatcher #(.NCORES(NCORES), .SLOT_DEPTH(SLOT_DEPTH)) u_dispatcher (
    .clk, .rst_n,
    .in_valid, .in_req, .credit_ret,
    .mq_full, .fq_full(fq_in_full), .mq_push, .fq_push, .q_pkt,
    .rb_wr_en, .rb_wr_pid, .rb_wr_data
  );

  hmq_fifo #(.WIDTH(PKT_W), .DEPTH(MQ_DEPTH)) u_malloc_q (
    .clk, .rst_n, .push(mq_push), .wr_data(q_pkt), .pop(mq_pop),
    .rd_data(mq_head_bits), .empty(mq_empty), .full(mq_full), .count(mq_count)
  );

  hmq_spill #(.WIDTH(PKT_W), .QDEPTH(FQ_DEPTH), .SPILL_ENTRIES(SPILL_ENTRIES)) u_free_spill (
    .clk, .rst_n,
    .in_push(fq_push), .in_data(q_pkt), .in_full(fq_in_full),
    .q_push(fq_q_push), .q_data(fq_q_data), .q_count(fq_count),
    .mem_req(spill_mem_req), .mem_we(spill_mem_we), .mem_idx(spill_mem_idx),
    .mem_wdata(spill_mem_wdata), .mem_gnt(spill_mem_gnt),
    .mem_rvalid(spill_mem_rvalid), .mem_rdata(spill_mem_rdata),
    .spill_count
  );

  hmq_fifo #(.WIDTH(PKT_W), .DEPTH(FQ_DEPTH)) u_free_q (
    .clk, .rst_n, .push(fq_q_push), .wr_data(fq_q_data), .pop(fq_pop),
    .rd_data(fq_head_bits), .empty(fq_empty), .full(fq_full), .count(fq_count)
  );

  hmq_regbuf #(.ENTRIES(RB_ENTRIES)) u_regbuf (
    .clk, .rst_n,
    .wr_en(rb_wr_en), .wr_pid(rb_wr_pid), .wr_data(rb_wr_data),
    .rd_pid(rb_rd_pid), .rd_hit(rb_rd_hit), .rd_data(rb_rd_data)
  );

  hmq_scheduler u_scheduler (
    .clk, .rst_n,
    .mq_empty, .mq_head(sig_pkt_t'(mq_head_bits)),
    .fq_empty, .fq_head(sig_pkt_t'(fq_head_bits)),
    .mq_pop, .fq_pop,
    .rb_rd_pid, .rb_rd_hit, .rb_rd_data,
    .req_valid, .req_pkt, .req_sysreg_hit, .req_sysreg, .req_take
  );

  hmq_fifo #(.WIDTH(PKT_W), .DEPTH(RQ_DEPTH)) u_response_q (
    .clk, .rst_n, .push(rsp_push), .wr_data(rsp_pkt), .pop(end_ready && !rq_empty),
    .rd_data(rq_head_bits), .empty(rq_empty), .full(rsp_full), .count(rq_count)
  );

  assign end_valid = !rq_empty;
  assign end_pkt   = sig_pkt_t'(rq_head_bits);

  // the overflow path only pushes into the free() queue when it has room
  a_fq_room: assert property (@(posedge clk) disable iff (!rst_n)
                              fq_q_push |-> (!fq_full || fq_pop));

endmodule
