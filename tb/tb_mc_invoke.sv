// tb_mc_invoke: self-checking test of the main-core invocation unit.
//
// The testbench plays the main core's execute and commit stages and the
// signal path. The core issues a random mix of mallocstart() and
// freestart() for a few processes; the path model returns each slot
// credit and, for a malloc, the end signal with a chosen address after
// random delays, so the result sometimes arrives before the instruction
// commits and sometimes after. Checked: every start packet's fields
// (PID, size or pointer, type, core ID), that system registers go with the
// first request of a process and after every PID change only, that
// ex_ready follows the credit count and the one-outstanding-malloc rule,
// that freestart() retires at once, that mallocstart() retires in exactly
// the cycle its end signal is available with the returned address, and
// that waiting and irq_mask are high exactly while commit is blocked.
//
// Interface: no ports; clock period 10, watchdog of 200000 cycles. The
// core stages change inputs after the falling edge; the path model drives
// credits and end signals at the falling edge of the scheduled cycle. The
// instruction behaviour checked is the paper's; delays are random choices.
module tb_mc_invoke;
  import smalloc_pkg::*;
  localparam int CORE = 5;
  localparam int SD = 2;

  logic clk = 0, rst_n = 0;
  logic ex_valid, ex_ready, cm_valid, cm_done, waiting, irq_mask;
  mc_op_e ex_op, cm_op;
  logic [PID_W-1:0] ex_pid;
  logic [DATA_W-1:0] ex_arg, cm_rd;
  logic [SYSREG_W-1:0] ex_sysreg;
  logic st_valid;
  logic cr_in = 0, end_valid = 0;
  start_req_t st_req;
  sig_pkt_t end_pkt;

  int checks = 0, failures = 0;
  int cyc = 0;
  int credits = SD;
  bit m_out = 0;
  bit have_sent = 0;
  logic [PID_W-1:0] last_pid;
  // scheduled path events, by cycle
  int cr_at [int];
  logic [DATA_W-1:0] end_at [int];
  int end_cycle = -1;
  int n_early = 0, n_wait = 0;

  mc_invoke #(.CORE_ID(CORE), .SLOT_DEPTH(SD)) dut (.*);

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

  // path model: drive credits and end signals scheduled for this cycle
  always @(negedge clk) begin
    cyc++;
    cr_in     = cr_at.exists(cyc);
    end_valid = end_at.exists(cyc);
    end_pkt   = '0;
    if (end_valid) begin
      end_pkt.data    = end_at[cyc];
      end_pkt.core_id = CID_W'(CORE);
      end_pkt.typ     = REQ_MALLOC;
    end
  end
  always @(posedge clk) if (rst_n && cr_in) credits++;

  function automatic int free_slot(int from);
    int c;
    c = from;
    while (cr_at.exists(c)) c++;
    return c;
  endfunction

  initial begin
    ex_valid = 0; ex_op = OP_MALLOCSTART; ex_pid = '0; ex_arg = '0; ex_sysreg = '0;
    cm_valid = 0; cm_op = OP_MALLOCSTART;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      mc_op_e op;
      logic [DATA_W-1:0] arg, addr;
      logic [PID_W-1:0] pid;
      op  = ($urandom() % 2 != 0) ? OP_FREESTART : OP_MALLOCSTART;
      pid = (n / 200) % 3 + 100;
      arg = DATA_W'({$urandom(), $urandom()});
      // execute: wait for ex_ready, checking it against the model
      @(negedge clk); #1;
      ex_valid = 1; ex_op = op; ex_pid = pid; ex_arg = arg;
      ex_sysreg = {4{pid}};
      #1;
      while (!ex_ready) begin
        check("ex_ready low only without credit or with a malloc out",
              credits == 0 || (op == OP_MALLOCSTART && m_out));
        check("no packet while not ready", !st_valid);
        @(negedge clk); #2;
      end
      check("ready matches model", credits > 0 && !(op == OP_MALLOCSTART && m_out));
      check("start valid", st_valid);
      check("pkt pid",  st_req.pkt.pid == pid);
      check("pkt data", st_req.pkt.data == arg);
      check("pkt type", st_req.pkt.typ == ((op == OP_MALLOCSTART) ? REQ_MALLOC : REQ_FREE));
      check("pkt core", st_req.pkt.core_id == CID_W'(CORE));
      check("sysreg first", st_req.sysreg_vld == (!have_sent || last_pid != pid));
      if (st_req.sysreg_vld) check("sysreg data", st_req.sysreg == {4{pid}});
      have_sent = 1; last_pid = pid;
      credits--;
      cr_at[free_slot(cyc + 1 + $urandom() % 12)] = 1;
      if (op == OP_MALLOCSTART) begin
        m_out = 1;
        addr = DATA_W'({$urandom(), $urandom()});
        end_cycle = cyc + 1 + $urandom() % 25;
        end_at[end_cycle] = addr;
      end
      @(posedge clk); #1;
      ex_valid = 0;
      // commit after a random delay
      repeat ($urandom() % 20) @(negedge clk);
      @(negedge clk); #1;
      cm_valid = 1; cm_op = op;
      #1;
      if (op == OP_FREESTART) begin
        check("free retires at once", cm_done && !waiting && !irq_mask);
      end else begin
        if (cm_done) n_early++; else n_wait++;
        while (!cm_done) begin
          check("waiting before end", cyc < end_cycle && waiting && irq_mask);
          @(negedge clk); #2;
        end
        check("retires when end is there", cyc >= end_cycle);
        check("returned address", cm_rd == addr);
        check("not waiting at retire", !waiting && !irq_mask);
        m_out = 0;
      end
      @(posedge clk); #1;
      cm_valid = 0;
    end
    check("result before commit seen", n_early > 0);
    check("commit waited seen", n_wait > 0);
    $display("early=%0d waited=%0d", n_early, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
