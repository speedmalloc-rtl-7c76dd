// hmq_dispatcher: entry stage of the support core's hardware message queues.
//
// Every main core has its own input slot (slots 0..N-1), a small FIFO that
// takes the start requests arriving from that core over the signal path.
// Each cycle the dispatcher picks one non-empty slot in round-robin order,
// starting after the slot it served last, and pushes the request into the
// malloc() queue or the free() queue according to the packet's type field.
// A slot whose head request goes to a full queue is passed over that cycle,
// so a burst of frees cannot block a malloc() from another core.
// If the request carries system registers (first request of a process),
// they are written into the register buffer in the same cycle.
//
// Flow control is credit based: a main core may have at most SLOT_DEPTH
// requests in flight towards its slot, and credit_ret[i] pulses for one
// cycle each time a request leaves slot i. A request that arrives at a full
// slot violates that protocol and is flagged by an assertion.
//
// Splitting by type follows the paper. The per-core slots, the slot depth
// and doing the round-robin among cores at this stage (the paper states
// that requests of different cores are served round-robin; the FIFO
// queues behind this stage keep that order) are this design's choices.
// Timing: a request entering a slot can be pushed into its queue at the
// next clock edge at the earliest.
module hmq_dispatcher
  import smalloc_pkg::*;
#(
  parameter int unsigned NCORES     = 16,
  parameter int unsigned SLOT_DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the signal path, one port per main core
  input  logic [NCORES-1:0]    in_valid,
  input  start_req_t           in_req [NCORES],
  output logic [NCORES-1:0]    credit_ret,
  // to the malloc() and free() queues
  input  logic                 mq_full,
  input  logic                 fq_full,
  output logic                 mq_push,
  output logic                 fq_push,
  output sig_pkt_t             q_pkt,
  // to the register buffer
  output logic                 rb_wr_en,
  output logic [PID_W-1:0]     rb_wr_pid,
  output logic [SYSREG_W-1:0]  rb_wr_data
);

  localparam int unsigned CW = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic [NCORES-1:0] slot_empty, slot_full, slot_pop, eligible;
  start_req_t        slot_head [NCORES];

  for (genvar i = 0; i < NCORES; i++) begin : g_slot
    logic [START_W-1:0] head_bits;
    hmq_fifo #(.WIDTH(START_W), .DEPTH(SLOT_DEPTH)) u_slot (
      .clk, .rst_n,
      .push   (in_valid[i]),
      .wr_data(in_req[i]),
      .pop    (slot_pop[i]),
      .rd_data(head_bits),
      .empty  (slot_empty[i]),
      .full   (slot_full[i]),
      .count  ()
    );
    assign slot_head[i] = start_req_t'(head_bits);
    assign eligible[i]  = !slot_empty[i] &&
                          ((slot_head[i].pkt.typ == REQ_MALLOC) ? !mq_full : !fq_full);

    a_slot_credit: assert property (@(posedge clk) disable iff (!rst_n)
                                    in_valid[i] |-> (!slot_full[i] || slot_pop[i]))
      else $error("hmq_dispatcher: request to a full slot (credit protocol broken)");
  end

  // Round-robin pick: first eligible slot after the last one served.
  logic [CW-1:0] last, pick;
  logic          pick_vld;

  always_comb begin
    pick_vld = 1'b0;
    pick     = '0;
    for (int unsigned k = 1; k <= NCORES; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % NCORES;
      if (!pick_vld && eligible[idx]) begin
        pick_vld = 1'b1;
        pick     = CW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        last <= CW'(NCORES - 1);
    else if (pick_vld) last <= pick;
  end

  start_req_t sel;
  assign sel = slot_head[pick];

  always_comb begin
    slot_pop = '0;
    if (pick_vld) slot_pop[pick] = 1'b1;
  end

  assign credit_ret = slot_pop;
  assign q_pkt      = sel.pkt;
  assign mq_push    = pick_vld && (sel.pkt.typ == REQ_MALLOC);
  assign fq_push    = pick_vld && (sel.pkt.typ == REQ_FREE);
  assign rb_wr_en   = pick_vld && sel.sysreg_vld;
  assign rb_wr_pid  = sel.pkt.pid;
  assign rb_wr_data = sel.sysreg;

endmodule
