// tb_hmq_dispatcher: self-checking test of the dispatcher with 16 cores.
//
// The testbench keeps its own copy of every core's input slot and of the
// round-robin pointer. Each cycle it drives random new requests into the
// slots (never more than a slot holds, as the credit protocol requires)
// and random full flags for the two queues, predicts which slot must be
// served, and checks the queue push, the packet, the register-buffer write
// and the credit return against that prediction. It also checks that
// every core is served when all slots are busy (round-robin fairness).
//
// Interface: no ports; clock period 10, a cycle watchdog ends a hung run
// with a failure. Inputs change just after each clock edge and outputs are
// compared before the next one. The 16 slots follow the paper's core count;
// the traffic pattern is this test's choice.
module tb_hmq_dispatcher;
  import smalloc_pkg::*;
  localparam int N = 16;
  localparam int SD = 2;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, credit_ret;
  start_req_t   in_req [N];
  logic mq_full, fq_full, mq_push, fq_push, rb_wr_en;
  sig_pkt_t q_pkt;
  logic [PID_W-1:0] rb_wr_pid;
  logic [SYSREG_W-1:0] rb_wr_data;

  int checks = 0, failures = 0;
  start_req_t slot_q [N][$];
  int last = N - 1;
  int served [N];

  hmq_dispatcher #(.NCORES(N), .SLOT_DEPTH(SD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic start_req_t rnd_req(int core);
    start_req_t r;
    r.pkt.pid     = $urandom() % 8;
    r.pkt.data    = DATA_W'({$urandom(), $urandom()});
    r.pkt.typ     = ($urandom() % 2 != 0) ? REQ_FREE : REQ_MALLOC;
    r.pkt.core_id = CID_W'(core);
    r.sysreg_vld  = ($urandom() % 4 == 0);
    r.sysreg      = {$urandom(), $urandom(), $urandom(), $urandom()};
    return r;
  endfunction

  initial begin
    int pick;
    in_valid = '0; mq_full = 0; fq_full = 0;
    for (int i = 0; i < N; i++) in_req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int load;
      // phases: light load, then all slots busy with no full queues
      load = (cyc < 10000) ? 20 : 90;
      #1;
      mq_full = (cyc < 10000) ? ($urandom() % 4 == 0) : 0;
      fq_full = (cyc < 10000) ? ($urandom() % 3 == 0) : 0;
      in_valid = '0;
      // predict the pick from the slot contents before this edge
      pick = -1;
      for (int k = 1; k <= N; k++) begin
        int idx;
        idx = (last + k) % N;
        if (pick < 0 && slot_q[idx].size() != 0) begin
          if (slot_q[idx][0].pkt.typ == REQ_MALLOC ? !mq_full : !fq_full) pick = idx;
        end
      end
      // new requests: respect the slot space left after this cycle's pop
      for (int i = 0; i < N; i++) begin
        int space;
        space = SD - slot_q[i].size() + ((pick == i) ? 1 : 0);
        if (space > 0 && ($urandom() % 100) < load) begin
          in_valid[i] = 1;
          in_req[i]   = rnd_req(i);
        end
      end
      #1;
      if (pick < 0) begin
        check("no push", !mq_push && !fq_push && !rb_wr_en && credit_ret == '0);
      end else begin
        start_req_t e;
        e = slot_q[pick][0];
        check("push type", mq_push == (e.pkt.typ == REQ_MALLOC) && fq_push == (e.pkt.typ == REQ_FREE));
        check("packet", q_pkt == e.pkt);
        check("regbuf write", rb_wr_en == e.sysreg_vld);
        if (e.sysreg_vld) check("regbuf data", rb_wr_pid == e.pkt.pid && rb_wr_data == e.sysreg);
        check("credit", credit_ret == (N'(1) << pick));
        if (cyc >= 10000) served[pick]++;
      end
      @(posedge clk);
      if (pick >= 0) begin
        void'(slot_q[pick].pop_front());
        last = pick;
      end
      for (int i = 0; i < N; i++) if (in_valid[i]) slot_q[i].push_back(in_req[i]);
    end
    for (int i = 0; i < N; i++) check("fair share", served[i] > 10000 / N / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
