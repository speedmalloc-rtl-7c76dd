// tb_sc_ctrl: self-checking test of the support-core controller.
//
// The testbench plays both the scheduler (a list of pending requests that
// it offers in order, with gaps so the controller goes idle) and the
// support core (after each redirect it runs for a random number of cycles
// and then retires mallocend() or freeend() matching the request, with a
// random result address). The response queue's full flag is toggled at
// random. Checked: the handler PC of each redirect, that the arguments
// are the request taken, the order of requests, that the pipeline is
// stalled exactly while nothing runs, that a pending request is taken in
// the very cycle an end instruction retires (redirect one cycle later, no
// stall in between), that only mallocend() pushes a response and with the
// right fields, and that mallocend() is held while the response queue is
// full.
//
// Interface: no ports; clock period 10, a cycle watchdog ends a hung run
// with a failure. Redirects are checked one cycle after the take, as the
// controller registers them. Stall/redirect rules follow the paper;
// request pacing and handler lengths are this test's choices.
module tb_sc_ctrl;
  import smalloc_pkg::*;
  localparam int PC_W = 64;
  localparam logic [PC_W-1:0] MPC = 64'h0000_0040_1000;
  localparam logic [PC_W-1:0] FPC = 64'h0000_0040_2000;

  logic clk = 0, rst_n = 0;
  logic cfg_we; req_type_e cfg_type; logic [PC_W-1:0] cfg_pc;
  logic req_valid, req_sysreg_hit, req_take;
  sig_pkt_t req_pkt;
  logic [SYSREG_W-1:0] req_sysreg;
  logic stall, redirect_valid, arg_sysreg_hit;
  logic [PC_W-1:0] redirect_pc;
  sig_pkt_t arg_pkt;
  logic [SYSREG_W-1:0] arg_sysreg;
  logic end_valid, end_ready;
  req_type_e end_type;
  logic [DATA_W-1:0] end_rd;
  logic rsp_push, rsp_full;
  sig_pkt_t rsp_pkt;

  int checks = 0, failures = 0;
  sig_pkt_t pend[$];
  sig_pkt_t taken[$];
  int n_back_to_back = 0, n_held = 0, n_idle = 0, n_done = 0;

  sc_ctrl #(.PC_W(PC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // scheduler model: offer head of pend
  always_comb begin
    req_valid      = pend.size() != 0;
    req_pkt        = req_valid ? pend[0] : '0;
    req_sysreg_hit = req_pkt.pid[0];
    req_sysreg     = {4{req_pkt.pid}};
  end

  // request generator
  initial begin
    @(posedge rst_n);
    repeat (5) @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      sig_pkt_t p;
      p = {$urandom(), $urandom(), $urandom()};
      p.typ = ($urandom() % 3 == 0) ? REQ_FREE : REQ_MALLOC;
      @(negedge clk);
      pend.push_back(p);
      repeat ($urandom() % 16) @(posedge clk);
    end
  end

  // bookkeeping of takes
  always @(posedge clk) if (rst_n && req_take) begin
    taken.push_back(pend[0]);
    void'(pend.pop_front());
  end

  // support core model
  initial begin
    cfg_we = 0; cfg_type = REQ_MALLOC; cfg_pc = '0;
    end_valid = 0; end_type = REQ_MALLOC; end_rd = '0; rsp_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_type = REQ_MALLOC; cfg_pc = MPC;
    @(negedge clk); cfg_type = REQ_FREE; cfg_pc = FPC;
    @(negedge clk); cfg_we = 0;
    while (n_done < 400) begin
      @(negedge clk);
      if (stall) begin
        n_idle++;
        check("idle: no redirect", !redirect_valid);
        continue;
      end
      check("redirect on start", redirect_valid);
      begin
        sig_pkt_t exp;
        exp = taken.pop_front();
        check("arg packet", arg_pkt == exp);
        check("handler pc", redirect_pc == ((exp.typ == REQ_MALLOC) ? MPC : FPC));
        check("sysreg", arg_sysreg_hit == exp.pid[0] && arg_sysreg == {4{exp.pid}});
        repeat ($urandom() % 12) begin
          @(negedge clk);
          check("running: not stalled", !stall && !redirect_valid);
        end
        end_valid = 1; end_type = exp.typ; end_rd = DATA_W'({$urandom(), $urandom()});
        rsp_full  = (exp.typ == REQ_MALLOC) && ($urandom() % 4 == 0);
        #1;
        if (rsp_full) begin
          n_held++;
          check("held while full", !end_ready && !rsp_push);
          @(negedge clk);
          rsp_full = 0; #1;
        end
        check("end accepted", end_ready);
        check("response push", rsp_push == (exp.typ == REQ_MALLOC));
        if (exp.typ == REQ_MALLOC)
          check("response packet", rsp_pkt.pid == exp.pid && rsp_pkt.core_id == exp.core_id &&
                rsp_pkt.typ == REQ_MALLOC && rsp_pkt.data == end_rd);
        check("next taken with end", req_take == (pend.size() != 0));
        if (pend.size() != 0) n_back_to_back++;
        n_done++;
      end
      @(posedge clk); #1;
      end_valid = 0;
    end
    check("saw back-to-back", n_back_to_back > 0);
    check("saw full hold", n_held > 0);
    check("saw idle stall", n_idle > 0);
    $display("back_to_back=%0d held=%0d idle_cycles=%0d", n_back_to_back, n_held, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
