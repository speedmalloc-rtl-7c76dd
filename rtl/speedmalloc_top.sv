// speedmalloc_top: allocation offload from N main cores to one support core.
//
// Memory allocation calls of all main cores are executed by a single small
// support core that keeps all allocator metadata in its own cache. This
// module holds the hardware added for that:
//   * one mc_invoke per main core (mallocstart()/freestart() execution and
//     commit behaviour);
//   * sig_link, the 8-cycle direct packet path between the main cores and
//     the support core, in both directions;
//   * hmq, the support core's hardware message queues (dispatcher,
//     malloc() and free() queues, register buffer, scheduler, response
//     queue);
//   * sc_ctrl, the support-core side of mallocend()/freeend() (redirect to
//     the next pending request or stall).
// The main cores' pipelines, the support core's pipeline and caches, and
// the coherent network are outside this module: their connections are the
// ports. Per main core i: ex_*[i] from its execute stage, cm_*[i] from its
// commit stage, waiting[i]/irq_mask[i] back. For the support core: the
// handler PCs (cfg_*), stall, redirect and the current request's arguments
// (sc_*), and the retiring end instruction (sc_end_*). net_ready is the
// network accepting an end packet from the support core.
//
// Timing of one malloc with empty queues: start packet sent in the cycle
// mallocstart() executes; 8 cycles on the path; one cycle in the dispatcher
// slot; the request is taken from the malloc() queue in the next cycle and
// the support core is redirected one cycle later. After mallocend() the end
// packet leaves the response queue one cycle later and reaches the core 8
// cycles after that. The main core therefore sees the result no earlier
// than 20 cycles plus the allocator's own run time after issue.
//
// The split into these blocks and the 8-cycle path follow the paper. Its
// numbers are the defaults: 16 main cores, 128-entry queues. Frees that
// find the free() queue full overflow into reserved memory through the
// spill_mem_* port (slot index within the region; memory returns read
// data in order), as the paper suggests. The slot depth (2), register-buffer
// lines (16), PC width (64) and overflow ring size (1024) are this
// design's choices.
module speedmalloc_top
  import smalloc_pkg::*;
#(
  parameter int unsigned NCORES     = 16,
  parameter int unsigned SLOT_DEPTH = 2,
  parameter int unsigned MQ_DEPTH   = 128,
  parameter int unsigned FQ_DEPTH   = 128,
  parameter int unsigned RQ_DEPTH   = 128,
  parameter int unsigned RB_ENTRIES = 16,
  parameter int unsigned LAT        = LINK_LAT,
  parameter int unsigned PC_W       = 64,
  parameter int unsigned SPILL_ENTRIES = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // main cores
  input  logic [NCORES-1:0]    ex_valid,
  input  mc_op_e               ex_op     [NCORES],
  input  logic [PID_W-1:0]     ex_pid    [NCORES],
  input  logic [DATA_W-1:0]    ex_arg    [NCORES],
  input  logic [SYSREG_W-1:0]  ex_sysreg [NCORES],
  output logic [NCORES-1:0]    ex_ready,
  input  logic [NCORES-1:0]    cm_valid,
  input  mc_op_e               cm_op     [NCORES],
  output logic [NCORES-1:0]    cm_done,
  output logic [DATA_W-1:0]    cm_rd     [NCORES],
  output logic [NCORES-1:0]    waiting,
  output logic [NCORES-1:0]    irq_mask,
  // coherent network
  input  logic                 net_ready,
  // support core
  input  logic                 cfg_we,
  input  req_type_e            cfg_type,
  input  logic [PC_W-1:0]      cfg_pc,
  output logic                 sc_stall,
  output logic                 sc_redirect_valid,
  output logic [PC_W-1:0]      sc_redirect_pc,
  output sig_pkt_t             sc_arg_pkt,
  output logic                 sc_arg_sysreg_hit,
  output logic [SYSREG_W-1:0]  sc_arg_sysreg,
  input  logic                 sc_end_valid,
  input  req_type_e            sc_end_type,
  input  logic [DATA_W-1:0]    sc_end_rd,
  output logic                 sc_end_ready,
  // queue occupancy
  output logic [$clog2(MQ_DEPTH+1)-1:0] mq_count,
  output logic [$clog2(FQ_DEPTH+1)-1:0] fq_count,
  output logic [$clog2(RQ_DEPTH+1)-1:0] rq_count,
  // reserved memory for free() queue overflow
  output logic                 spill_mem_req,
  output logic                 spill_mem_we,
  output logic [$clog2(SPILL_ENTRIES)-1:0] spill_mem_idx,
  output logic [PKT_W-1:0]     spill_mem_wdata,
  input  logic                 spill_mem_gnt,
  input  logic                 spill_mem_rvalid,
  input  logic [PKT_W-1:0]     spill_mem_rdata,
  output logic [$clog2(SPILL_ENTRIES+1)-1:0] spill_count
);

  // main cores <-> link
  logic [NCORES-1:0] st_valid, cr_core, end_core;
  start_req_t        st_req [NCORES];
  sig_pkt_t          end_pkt_core;

  // link <-> hmq
  logic [NCORES-1:0] dl_valid, cr_hmq;
  start_req_t        dl_req [NCORES];
  logic              hmq_end_valid, hmq_end_ready;
  sig_pkt_t          hmq_end_pkt;

  // hmq <-> sc_ctrl
  logic                req_valid, req_sysreg_hit, req_take;
  sig_pkt_t            req_pkt;
  logic [SYSREG_W-1:0] req_sysreg;
  logic                rsp_push, rsp_full;
  sig_pkt_t            rsp_pkt;

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    mc_invoke #(.CORE_ID(i), .SLOT_DEPTH(SLOT_DEPTH)) u_mc (
      .clk, .rst_n,
      .ex_valid(ex_valid[i]), .ex_op(ex_op[i]), .ex_pid(ex_pid[i]),
      .ex_arg(ex_arg[i]), .ex_sysreg(ex_sysreg[i]), .ex_ready(ex_ready[i]),
      .cm_valid(cm_valid[i]), .cm_op(cm_op[i]), .cm_done(cm_done[i]),
      .cm_rd(cm_rd[i]), .waiting(waiting[i]), .irq_mask(irq_mask[i]),
      .st_valid(st_valid[i]), .st_req(st_req[i]),
      .cr_in(cr_core[i]),
      .end_valid(end_core[i]), .end_pkt(end_pkt_core)
    );
  end

  sig_link #(.NCORES(NCORES), .LAT(LAT)) u_link (
    .clk, .rst_n,
    .st_in_valid(st_valid), .st_in_req(st_req),
    .st_out_valid(dl_valid), .st_out_req(dl_req),
    .cr_in(cr_hmq), .cr_out(cr_core),
    .net_ready,
    .rsp_valid(hmq_end_valid), .rsp_pkt(hmq_end_pkt), .rsp_ready(hmq_end_ready),
    .end_valid(end_core), .end_pkt(end_pkt_core)
  );

  hmq #(
    .NCORES(NCORES), .SLOT_DEPTH(SLOT_DEPTH), .MQ_DEPTH(MQ_DEPTH),
    .FQ_DEPTH(FQ_DEPTH), .RQ_DEPTH(RQ_DEPTH), .RB_ENTRIES(RB_ENTRIES),
    .SPILL_ENTRIES(SPILL_ENTRIES)
  ) u_hmq (
    .clk, .rst_n,
    .in_valid(dl_valid), .in_req(dl_req), .credit_ret(cr_hmq),
    .req_valid, .req_pkt, .req_sysreg_hit, .req_sysreg, .req_take,
    .rsp_push, .rsp_pkt, .rsp_full,
    .end_valid(hmq_end_valid), .end_pkt(hmq_end_pkt), .end_ready(hmq_end_ready),
    .mq_count, .fq_count, .rq_count,
    .spill_mem_req, .spill_mem_we, .spill_mem_idx, .spill_mem_wdata,
    .spill_mem_gnt, .spill_mem_rvalid, .spill_mem_rdata, .spill_count
  );

  sc_ctrl #(.PC_W(PC_W)) u_sc_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_type, .cfg_pc,
    .req_valid, .req_pkt, .req_sysreg_hit, .req_sysreg, .req_take,
    .stall(sc_stall), .redirect_valid(sc_redirect_valid), .redirect_pc(sc_redirect_pc),
    .arg_pkt(sc_arg_pkt), .arg_sysreg_hit(sc_arg_sysreg_hit), .arg_sysreg(sc_arg_sysreg),
    .end_valid(sc_end_valid), .end_type(sc_end_type), .end_rd(sc_end_rd),
    .end_ready(sc_end_ready),
    .rsp_push, .rsp_pkt, .rsp_full
  );

  // one outstanding mallocstart() per core: the malloc() queue never holds
  // more than NCORES requests, so it needs no overflow path
  a_mq_bound: assert property (@(posedge clk) disable iff (!rst_n)
                               32'(mq_count) <= NCORES);

endmodule
