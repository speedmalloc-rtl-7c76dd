// tb_hmq_scheduler: self-checking test of the request scheduler.
//
// The scheduler is driven with random queue heads, empty flags, register
// buffer answers and take requests. For each combination the testbench
// checks that a malloc() head is always chosen over a free() head, that a
// free() is offered only when the malloc() queue is empty, that only the
// chosen queue is popped and only on a take, and that the register buffer
// is looked up with the offered PID and its answer passed through.
//
// Interface: no ports; the block is combinational, so the test applies
// random queue states and checks the outputs after a settle delay, one
// state per clock period of 10, with a watchdog. The malloc-first rule is
// the paper's; the stimulus is this test's.
module tb_hmq_scheduler;
  import smalloc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic mq_empty, fq_empty, mq_pop, fq_pop;
  sig_pkt_t mq_head, fq_head, req_pkt;
  logic [PID_W-1:0] rb_rd_pid;
  logic rb_rd_hit, req_valid, req_sysreg_hit, req_take;
  logic [SYSREG_W-1:0] rb_rd_data, req_sysreg;

  int checks = 0, failures = 0;

  hmq_scheduler dut (.*);

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

  function automatic sig_pkt_t rnd_pkt(req_type_e t);
    sig_pkt_t p;
    p = {$urandom(), $urandom(), $urandom()};
    p.typ = t;
    return p;
  endfunction

  initial begin
    mq_empty = 1; fq_empty = 1; req_take = 0; rb_rd_hit = 0; rb_rd_data = '0;
    mq_head = '0; fq_head = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      logic exp_valid, exp_m;
      @(negedge clk);
      mq_empty   = 1'($urandom() % 2);
      fq_empty   = 1'($urandom() % 2);
      mq_head    = rnd_pkt(REQ_MALLOC);
      fq_head    = rnd_pkt(REQ_FREE);
      rb_rd_hit  = 1'($urandom() % 2);
      rb_rd_data = {$urandom(), $urandom(), $urandom(), $urandom()};
      exp_valid  = !mq_empty || !fq_empty;
      exp_m      = !mq_empty;
      req_take   = exp_valid && ($urandom() % 2 != 0);
      #1;
      check("valid", req_valid == exp_valid);
      if (exp_valid) begin
        check("malloc first", req_pkt == (exp_m ? mq_head : fq_head));
        check("lookup pid", rb_rd_pid == req_pkt.pid);
        check("sysreg pass", req_sysreg_hit == rb_rd_hit && req_sysreg == rb_rd_data);
      end
      check("malloc pop", mq_pop == (req_take && exp_m));
      check("free pop", fq_pop == (req_take && !exp_m && !fq_empty));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
