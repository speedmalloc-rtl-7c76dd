// mc_invoke: main-core side of the allocation invocation interface.
//
// One instance sits in each main core and implements the two new
// instructions of the main cores:
//   * mallocstart(): when it executes, the start signal and a packet
//     {PID, requested size, type malloc, this core's ID} are sent to the
//     support core. The core keeps running independent instructions. When
//     the instruction reaches commit it checks for the end signal: if the
//     returned address has already arrived it retires at once and writes
//     it to its destination register (cm_rd); otherwise the core waits
//     (waiting = 1) and interrupts and exceptions are masked (irq_mask) so
//     the end signal cannot be missed.
//   * freestart(): sends a start packet {PID, pointer, type free, core ID}
//     when it executes and retires at commit without waiting; free() has no
//     result.
// The first request of a process also carries the process's system
// registers for the support core's register buffer; later requests of the
// same process leave them out.
//
// Interfaces: ex_* from the execute stage (valid/ready, ex_ready is low
// while no slot credit is left or while a malloc is still outstanding);
// cm_* from the commit stage (cm_done is the retire permission, cm_rd the
// malloc result, both combinational); st_valid/st_req out to the signal
// path; cr_in credits and end_valid/end_pkt in from it. Reset clears all
// state and sets the credits to SLOT_DEPTH.
//
// The start/end behaviour of the two instructions follows the paper.
// Allowing one outstanding mallocstart() per core, counting credits for
// the dispatcher slot, and resending the registers whenever the PID
// differs from the last one sent are this design's choices.
module mc_invoke
  import smalloc_pkg::*;
#(
  parameter int unsigned CORE_ID    = 0,
  parameter int unsigned SLOT_DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // execute stage
  input  logic                 ex_valid,
  input  mc_op_e               ex_op,
  input  logic [PID_W-1:0]     ex_pid,
  input  logic [DATA_W-1:0]    ex_arg,
  input  logic [SYSREG_W-1:0]  ex_sysreg,
  output logic                 ex_ready,
  // commit stage
  input  logic                 cm_valid,
  input  mc_op_e               cm_op,
  output logic                 cm_done,
  output logic [DATA_W-1:0]    cm_rd,
  output logic                 waiting,
  output logic                 irq_mask,
  // signal path
  output logic                 st_valid,
  output start_req_t           st_req,
  input  logic                 cr_in,
  input  logic                 end_valid,
  input  sig_pkt_t             end_pkt
);

  localparam int unsigned CRW = $clog2(SLOT_DEPTH + 1);

  logic [CRW-1:0]    credits;
  logic              m_out;       // a malloc has been sent and not retired
  logic              res_vld;     // its result has arrived
  logic [DATA_W-1:0] res_addr;
  logic              sent_vld;
  logic [PID_W-1:0]  sent_pid;

  logic ex_fire, cm_malloc_done;

  assign ex_ready = (credits != '0) && !((ex_op == OP_MALLOCSTART) && m_out);
  assign ex_fire  = ex_valid && ex_ready;

  always_comb begin
    st_valid              = ex_fire;
    st_req.pkt.pid        = ex_pid;
    st_req.pkt.data       = ex_arg;
    st_req.pkt.typ        = (ex_op == OP_MALLOCSTART) ? REQ_MALLOC : REQ_FREE;
    st_req.pkt.core_id    = CID_W'(CORE_ID);
    st_req.sysreg_vld     = !sent_vld || (sent_pid != ex_pid);
    st_req.sysreg         = ex_sysreg;
  end

  // Commit: freestart retires at once, mallocstart needs the end signal
  // (in a register, or arriving in this very cycle).
  logic res_now;
  assign res_now        = res_vld || end_valid;
  assign cm_malloc_done = cm_valid && (cm_op == OP_MALLOCSTART) && m_out && res_now;
  assign cm_done        = cm_valid && ((cm_op == OP_FREESTART) || cm_malloc_done);
  assign cm_rd          = res_vld ? res_addr : end_pkt.data;
  assign waiting        = cm_valid && (cm_op == OP_MALLOCSTART) && !cm_malloc_done;
  assign irq_mask       = waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits  <= CRW'(SLOT_DEPTH);
      m_out    <= 1'b0;
      res_vld  <= 1'b0;
      res_addr <= '0;
      sent_vld <= 1'b0;
      sent_pid <= '0;
    end else begin
      credits <= credits - CRW'(ex_fire) + CRW'(cr_in);
      if (ex_fire) begin
        sent_vld <= 1'b1;
        sent_pid <= ex_pid;
      end
      if (cm_malloc_done) begin
        m_out   <= 1'b0;
        res_vld <= 1'b0;
      end else begin
        if (ex_fire && ex_op == OP_MALLOCSTART) m_out <= 1'b1;
        if (end_valid) begin
          res_vld  <= 1'b1;
          res_addr <= end_pkt.data;
        end
      end
    end
  end

  a_end_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   end_valid |-> (m_out && !res_vld))
    else $error("mc_invoke: end signal without an outstanding malloc");
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                   credits <= CRW'(SLOT_DEPTH))
    else $error("mc_invoke: more credits than slot entries");

endmodule
