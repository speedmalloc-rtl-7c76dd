// sc_ctrl: support-core controller for the mallocend()/freeend() instructions.
//
// The support core runs one allocator call at a time. When it is idle its
// pipeline is stalled (stall = 1) to save energy. As soon as the scheduler
// offers a request, the controller takes it, holds its packet and the
// process's translation registers on the arg_* outputs for the whole call,
// and sends a one-cycle redirect to the entry PC of the malloc() or free()
// handler. The allocator code ends with mallocend() or freeend(). When that
// instruction retires (end_valid):
//   * mallocend() pushes an end packet {PID, returned address end_rd,
//     type malloc, main core ID} into the response queue; if the response
//     queue is full the instruction is held (end_ready = 0) until it is not;
//   * freeend() retires like a normal instruction, nothing is returned;
//   * then, if another request is pending, it is taken in the same cycle and
//     the core is redirected to its handler; otherwise the pipeline stalls.
//
// Timing: a request offered while idle is taken in that cycle; redirect_valid
// and the new arg_* values appear one cycle later. An end instruction and the
// take of the next request happen in the same cycle.
//
// The stall/redirect behaviour of the two end instructions follows the
// paper. The two handler entry PCs are held in registers written through
// the cfg_* port: the packet format carries no PC, so the PC operand of
// mallocstart()/freestart() is taken to be the same for every call of a
// type and is loaded once. Also this design's: the arg_* and redirect
// signals, and the 64-bit PC width.
module sc_ctrl
  import smalloc_pkg::*;
#(
  parameter int unsigned PC_W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // handler entry PCs
  input  logic                 cfg_we,
  input  req_type_e            cfg_type,
  input  logic [PC_W-1:0]      cfg_pc,
  // from the scheduler
  input  logic                 req_valid,
  input  sig_pkt_t             req_pkt,
  input  logic                 req_sysreg_hit,
  input  logic [SYSREG_W-1:0]  req_sysreg,
  output logic                 req_take,
  // to the support core pipeline
  output logic                 stall,
  output logic                 redirect_valid,
  output logic [PC_W-1:0]      redirect_pc,
  output sig_pkt_t             arg_pkt,
  output logic                 arg_sysreg_hit,
  output logic [SYSREG_W-1:0]  arg_sysreg,
  // end instructions retiring in the support core
  input  logic                 end_valid,
  input  req_type_e            end_type,
  input  logic [DATA_W-1:0]    end_rd,
  output logic                 end_ready,
  // into the response queue
  output logic                 rsp_push,
  output sig_pkt_t             rsp_pkt,
  input  logic                 rsp_full
);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [PC_W-1:0] malloc_pc, free_pc;

  logic end_fire;
  assign end_ready = (state == S_RUN) && !((end_type == REQ_MALLOC) && rsp_full);
  assign end_fire  = end_valid && end_ready;

  assign req_take = req_valid && ((state == S_IDLE) || end_fire);
  assign stall    = (state == S_IDLE);

  assign rsp_push = end_fire && (end_type == REQ_MALLOC);
  always_comb begin
    rsp_pkt         = arg_pkt;
    rsp_pkt.typ     = REQ_MALLOC;
    rsp_pkt.data    = end_rd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      malloc_pc <= '0;
      free_pc   <= '0;
    end else if (cfg_we) begin
      if (cfg_type == REQ_MALLOC) malloc_pc <= cfg_pc;
      else                        free_pc   <= cfg_pc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      redirect_valid <= 1'b0;
      redirect_pc    <= '0;
      arg_pkt        <= '0;
      arg_sysreg_hit <= 1'b0;
      arg_sysreg     <= '0;
    end else begin
      redirect_valid <= 1'b0;
      if (req_take) begin
        state          <= S_RUN;
        redirect_valid <= 1'b1;
        redirect_pc    <= (req_pkt.typ == REQ_MALLOC) ? malloc_pc : free_pc;
        arg_pkt        <= req_pkt;
        arg_sysreg_hit <= req_sysreg_hit;
        arg_sysreg     <= req_sysreg;
      end else if (end_fire) begin
        state          <= S_IDLE;
      end
    end
  end

  a_end_matches: assert property (@(posedge clk) disable iff (!rst_n)
                                  end_fire |-> (end_type == arg_pkt.typ))
    else $error("sc_ctrl: end instruction does not match the running request");
  a_end_running: assert property (@(posedge clk) disable iff (!rst_n)
                                  end_valid |-> (state == S_RUN))
    else $error("sc_ctrl: end instruction while idle");

endmodule
