// tb_hmq_fifo: self-checking test of the message-queue FIFO at its full
// depth of 128 entries.
//
// A reference queue in the testbench follows every push and pop. The test
// fills the FIFO completely (checking full and that a push while full with
// a simultaneous pop is accepted), drains it, then runs random push/pop
// traffic, comparing the head entry, empty, full and count with the
// reference every cycle.
//
// Interface: no ports; clock period 10, a cycle watchdog ends a hung run
// with a failure. Checked every cycle at the 128-entry depth of the paper;
// the random traffic is this test's choice.
module tb_hmq_fifo;
  localparam int W = 96;
  localparam int D = 128;

  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [W-1:0] wr_data, rd_data;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;

  int checks = 0, failures = 0;
  logic [W-1:0] ref_q[$];

  hmq_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

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

  task automatic compare();
    check("empty", empty == (ref_q.size() == 0));
    check("full",  full  == (ref_q.size() == D));
    check("count", int'(count) == ref_q.size());
    if (ref_q.size() != 0) check("head", rd_data == ref_q[0]);
  endtask

  // one cycle with the given controls; reference updated with the same rule
  task automatic step(logic p, logic q, logic [W-1:0] d);
    logic do_pop, do_push;
    push = p; pop = q; wr_data = d;
    do_pop  = q && ref_q.size() != 0;
    do_push = p && (ref_q.size() != D || do_pop);
    @(posedge clk); #1;
    if (do_pop)  void'(ref_q.pop_front());
    if (do_push) ref_q.push_back(d);
    compare();
  endtask

  function automatic logic [W-1:0] rnd();
    return {$urandom(), $urandom(), $urandom()};
  endfunction

  initial begin
    push = 0; pop = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    compare();
    // fill
    for (int i = 0; i < D; i++) step(1, 0, rnd());
    check("full after fill", full);
    // push and pop while full
    step(1, 1, rnd());
    check("still full", full);
    // drain
    for (int i = 0; i < D; i++) step(0, 1, '0);
    check("empty after drain", empty);
    // random traffic
    for (int i = 0; i < 20000; i++) begin
      logic p, q;
      p = (($urandom() % 100) < (((i / 2000) % 2 != 0) ? 70 : 35));
      q = (($urandom() % 100) < 50) && ref_q.size() != 0;
      if (p && ref_q.size() == D && !q) p = 0;
      step(p, q, rnd());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
