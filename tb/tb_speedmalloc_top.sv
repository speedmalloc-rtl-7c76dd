// tb_speedmalloc_top: end-to-end test of the allocation offload with all
// parameters at their defaults (16 main cores, 128-entry queues, 8-cycle
// path, 16-line register buffer).
//
// Sixteen main-core processes issue mallocstart()/freestart() through the
// top's ports; sc_core_model plays the support core and runs a
// size-class allocator. The test has three phases:
//   1. a single malloc on core 0 with everything idle: its latency from
//      issue to retire must be 20 cycles plus the handler's run time (two
//      8-cycle path traversals, dispatcher slot, queue, redirect, response
//      queue);
//   2. all cores run a random mix of mallocs (1-256 bytes) and frees of
//      their own blocks, committing each malloc after a random number of
//      independent instructions;
//   3. all cores allocate a batch of blocks and then free them all at once,
//      which floods the free() queue.
// Checks on every malloc result: the block is aligned to and lies in the
// region of the size class its size needs, and is not handed out twice
// while live. At the end every call must have been executed exactly once,
// every handler entered at the right PC, and all queues be empty.
// Each mechanism of the design is counted and must have happened at least
// once: free() queue full, malloc() served while free() requests waited,
// register buffer hit and miss, support core stalled idle and started back
// to back, main core waiting at commit and result arriving before commit,
// slot credits exhausted, more than one end packet waiting in the response
// queue, the allocator's slow path, and free() overflow into memory.
//
// Interface: no ports; speedmalloc_top is instantiated with no parameter
// override, clock period 10, watchdog on the cycle count. Core stimulus
// changes 1 time unit after the clock edge. Core count, queue depths and
// path latency are the paper's; the workload mix, sizes and the handler
// run times of 20 and 12 cycles are this test's choices.
module tb_speedmalloc_top;
  import smalloc_pkg::*;

  localparam int N          = 16;
  localparam int RUN_MALLOC = 20;
  localparam int RUN_FREE   = 12;
  localparam logic [63:0] MPC = 64'h0000_0000_0040_1000;
  localparam logic [63:0] FPC = 64'h0000_0000_0040_2000;

  logic clk = 0, rst_n = 0;
  logic [N-1:0]        ex_valid, ex_ready, cm_valid, cm_done, waiting, irq_mask;
  mc_op_e              ex_op [N];
  mc_op_e              cm_op [N];
  logic [PID_W-1:0]    ex_pid [N];
  logic [DATA_W-1:0]   ex_arg [N];
  logic [SYSREG_W-1:0] ex_sysreg [N];
  logic [DATA_W-1:0]   cm_rd [N];
  logic                net_ready;
  logic                cfg_we;
  req_type_e           cfg_type;
  logic [63:0]         cfg_pc;
  logic                sc_stall, sc_redirect_valid, sc_arg_sysreg_hit;
  logic [63:0]         sc_redirect_pc;
  sig_pkt_t            sc_arg_pkt;
  logic [SYSREG_W-1:0] sc_arg_sysreg;
  logic                sc_end_valid, sc_end_ready;
  req_type_e           sc_end_type;
  logic [DATA_W-1:0]   sc_end_rd;
  logic [7:0]          mq_count, fq_count, rq_count;
  logic                spill_mem_req, spill_mem_we, spill_mem_gnt, spill_mem_rvalid;
  logic [9:0]          spill_mem_idx;
  logic [PKT_W-1:0]    spill_mem_wdata, spill_mem_rdata;
  logic [10:0]         spill_count;

  speedmalloc_top dut (.*);

  spill_mem_model #(.WIDTH(PKT_W), .IX_W(10)) u_mem (
    .clk, .rst_n, .req(spill_mem_req), .we(spill_mem_we), .idx(spill_mem_idx),
    .wdata(spill_mem_wdata), .gnt(spill_mem_gnt), .rvalid(spill_mem_rvalid),
    .rdata(spill_mem_rdata)
  );

  sc_core_model #(.RUN_MALLOC(RUN_MALLOC), .RUN_FREE(RUN_FREE),
                  .MALLOC_PC(MPC), .FREE_PC(FPC)) u_sc (
    .clk, .rst_n,
    .stall(sc_stall), .redirect_valid(sc_redirect_valid), .redirect_pc(sc_redirect_pc),
    .arg_pkt(sc_arg_pkt), .arg_sysreg_hit(sc_arg_sysreg_hit),
    .end_valid(sc_end_valid), .end_type(sc_end_type), .end_rd(sc_end_rd),
    .end_ready(sc_end_ready)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- scoreboard
  bit live [logic [DATA_W-1:0]];
  int n_malloc_issued = 0, n_free_issued = 0, n_done_core [N];

  function automatic int size_class(logic [DATA_W-1:0] sz);
    return (sz <= 64) ? 0 : (sz <= 128) ? 1 : 2;
  endfunction

  task automatic check_block(logic [DATA_W-1:0] sz, logic [DATA_W-1:0] a);
    int c;
    logic [DATA_W-1:0] base;
    c = size_class(sz);
    base = DATA_W'(48'h1000_0000) * DATA_W'(c + 1);
    check("block in its class region", a >= base && a < base + 48'h1000_0000);
    check("block aligned to its class", (a & DATA_W'((64 << c) - 1)) == 0);
    check("block not handed out twice", !live.exists(a));
    live[a] = 1;
  endtask

  // ---------------------------------------------------------------- mechanisms
  int m_fq_full = 0, m_malloc_first = 0, m_rb_hit = 0, m_rb_miss = 0;
  int m_sc_idle = 0, m_back_to_back = 0, m_wait = 0, m_early = 0;
  int m_no_credit = 0, m_rq_multi = 0, m_spill = 0;
  logic prev_fq_nonempty = 0, prev_end_fire = 0;

  always @(posedge clk) if (rst_n) begin
    if (fq_count == 8'd128) m_fq_full++;
    if (sc_redirect_valid && sc_arg_pkt.typ == REQ_MALLOC && prev_fq_nonempty) m_malloc_first++;
    if (sc_redirect_valid) begin
      if (sc_arg_sysreg_hit) m_rb_hit++; else m_rb_miss++;
      if (prev_end_fire) m_back_to_back++;
    end
    if (sc_stall) m_sc_idle++;
    if (rq_count > 1) m_rq_multi++;
    if (spill_count != 0) m_spill++;
    for (int i = 0; i < N; i++) begin
      if (waiting[i]) m_wait++;
      if (ex_valid[i] && !ex_ready[i] && ex_op[i] == OP_FREESTART) m_no_credit++;
    end
    prev_fq_nonempty <= fq_count != 0;
    prev_end_fire    <= sc_end_valid && sc_end_ready;
  end

  // ---------------------------------------------------------------- main cores
  // PIDs: cores 0-11 own processes on distinct register-buffer lines; cores
  // 12-15 run processes that map onto the lines of cores 0-3.
  function automatic logic [PID_W-1:0] pid_of(int i);
    return (i < 12) ? PID_W'(32'h100 + i) : PID_W'(32'h110 + (i - 12));
  endfunction

  task automatic issue(int i, mc_op_e op, logic [DATA_W-1:0] arg, output longint t_fire);
    @(posedge clk); #1;
    ex_valid[i] = 1; ex_op[i] = op; ex_pid[i] = pid_of(i); ex_arg[i] = arg;
    ex_sysreg[i] = {4{pid_of(i)}};
    #1;
    while (!ex_ready[i]) begin
      @(posedge clk); #2;
    end
    t_fire = cyc;
    @(posedge clk); #1;
    ex_valid[i] = 0;
    if (op == OP_MALLOCSTART) n_malloc_issued++; else n_free_issued++;
  endtask

  task automatic do_malloc(int i, logic [DATA_W-1:0] sz, int delay,
                           output logic [DATA_W-1:0] a, output longint lat);
    longint t0;
    issue(i, OP_MALLOCSTART, sz, t0);
    repeat (delay) @(posedge clk);
    #1;
    cm_valid[i] = 1; cm_op[i] = OP_MALLOCSTART;
    #1;
    if (cm_done[i]) m_early++;
    while (!cm_done[i]) begin
      check("interrupts masked while waiting", irq_mask[i]);
      @(posedge clk); #2;
    end
    a   = cm_rd[i];
    lat = cyc - t0;
    check_block(sz, a);
    @(posedge clk); #1;
    cm_valid[i] = 0;
    n_done_core[i]++;
  endtask

  task automatic do_free(int i, logic [DATA_W-1:0] a);
    longint t0;
    check("freeing a live block", live.exists(a));
    live.delete(a);
    issue(i, OP_FREESTART, a, t0);
    cm_valid[i] = 1; cm_op[i] = OP_FREESTART;
    #1;
    check("free retires without waiting", cm_done[i] && !waiting[i]);
    @(posedge clk); #1;
    cm_valid[i] = 0;
    n_done_core[i]++;
  endtask

  task automatic core_mix(int i, int ops);
    logic [DATA_W-1:0] mine[$];
    for (int k = 0; k < ops; k++) begin
      if (mine.size() > 0 && ($urandom() % 100) < 40) begin
        int j;
        j = $urandom() % mine.size();
        do_free(i, mine[j]);
        mine.delete(j);
      end else begin
        logic [DATA_W-1:0] a;
        longint lat;
        do_malloc(i, {16'd0, 32'd1 + $urandom() % 256},
                  ($urandom() % 4 == 0) ? 300 + $urandom() % 500 : $urandom() % 40, a, lat);
        mine.push_back(a);
      end
    end
    foreach (mine[j]) do_free(i, mine[j]);
  endtask

  task automatic core_batch(int i, int n);
    logic [DATA_W-1:0] mine[$];
    for (int k = 0; k < n; k++) begin
      logic [DATA_W-1:0] a;
      longint lat;
      do_malloc(i, {16'd0, 32'd1 + $urandom() % 256}, 0, a, lat);
      mine.push_back(a);
    end
    foreach (mine[j]) do_free(i, mine[j]);
  endtask

  // ---------------------------------------------------------------- sequence
  initial begin
    ex_valid = '0; cm_valid = '0; net_ready = 1;
    cfg_we = 0; cfg_type = REQ_MALLOC; cfg_pc = '0;
    for (int i = 0; i < N; i++) begin
      ex_op[i] = OP_MALLOCSTART; cm_op[i] = OP_MALLOCSTART;
      ex_pid[i] = '0; ex_arg[i] = '0; ex_sysreg[i] = '0;
      n_done_core[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the two handler entry PCs
    @(posedge clk); #1; cfg_we = 1; cfg_type = REQ_MALLOC; cfg_pc = MPC;
    @(posedge clk); #1; cfg_type = REQ_FREE; cfg_pc = FPC;
    @(posedge clk); #1; cfg_we = 0;
    repeat (5) @(posedge clk);

    // phase 1: one isolated malloc, exact latency
    begin
      logic [DATA_W-1:0] a;
      longint lat;
      do_malloc(0, 48'd100, 0, a, lat);
      check("isolated malloc latency = 20 + handler", int'(lat) == 20 + RUN_MALLOC);
      $display("isolated malloc latency %0d cycles", lat);
      do_free(0, a);
    end

    // network back-pressure on the end path: random, plus a 300-cycle
    // stretch without grants every 2000 cycles
    fork
      forever begin
        @(posedge clk); #1;
        net_ready = ((cyc % 2000) >= 300) && (($urandom() % 100) >= 30);
      end
    join_none

    // phase 2: random mix on all cores
    for (int i = 0; i < N; i++) begin
      automatic int ii = i;
      fork core_mix(ii, 120); join_none
    end
  end

  initial begin : phase_ctl
    // wait for phase 2: every core has done its mix
    @(posedge rst_n);
    wait (n_malloc_issued > 1);
    forever begin
      @(posedge clk);
      if (all_done(120)) break;
    end
    $display("phase 2 done at cycle %0d", cyc);
    // phase 3: batch allocate, then free all at once
    for (int i = 0; i < N; i++) begin
      automatic int ii = i;
      fork core_batch(ii, 60); join_none
    end
    forever begin
      @(posedge clk);
      if (n_free_issued == n_malloc_issued && u_sc.n_free == n_free_issued &&
          u_sc.n_malloc == n_malloc_issued && mq_count == 0 && fq_count == 0 && spill_count == 0 &&
          rq_count == 0 && sc_stall) break;
    end
    repeat (20) @(posedge clk);
    finish_test();
  end

  function automatic bit all_done(int ops);
    for (int i = 0; i < N; i++) if (n_done_core[i] < ops) return 0;
    // the mix ends by freeing what is left; wait until nothing is live
    return live.size() == 0 && n_free_issued == n_malloc_issued;
  endfunction

  task automatic finish_test();
    check("every malloc executed once", u_sc.n_malloc == n_malloc_issued);
    check("every free executed once", u_sc.n_free == n_free_issued);
    check("handler PCs right", u_sc.n_bad_pc == 0);
    check("register buffer misses seen by core = misses counted",
          u_sc.n_sysreg_miss == m_rb_miss);
    check("nothing left live", live.size() == 0);
    for (int i = 0; i < N; i++) check("every core served", n_done_core[i] > 0);
    check("mechanism: free() queue full", m_fq_full > 0);
    check("mechanism: malloc() first while free() waits", m_malloc_first > 0);
    check("mechanism: register buffer hit", m_rb_hit > 0);
    check("mechanism: register buffer miss", m_rb_miss > 0);
    check("mechanism: support core stalled idle", m_sc_idle > 0);
    check("mechanism: back-to-back calls", m_back_to_back > 0);
    check("mechanism: main core waiting", m_wait > 0);
    check("mechanism: result before commit", m_early > 0);
    check("mechanism: slot credits exhausted", m_no_credit > 0);
    check("mechanism: response queue >1 entry", m_rq_multi > 0);
    check("mechanism: allocator slow path", u_sc.n_slow > 0);
    check("mechanism: free() overflow into reserved memory", m_spill > 0 && u_mem.n_writes > 0);
    check("overflow all read back", u_mem.n_reads == u_mem.n_writes && spill_count == 0);
    $display("mallocs=%0d frees=%0d cycles=%0d", n_malloc_issued, n_free_issued, cyc);
    $display("fq_full=%0d malloc_first=%0d rb_hit=%0d rb_miss=%0d sc_idle=%0d b2b=%0d",
             m_fq_full, m_malloc_first, m_rb_hit, m_rb_miss, m_sc_idle, m_back_to_back);
    $display("wait=%0d early=%0d no_credit=%0d rq_multi=%0d slow=%0d spill_writes=%0d",
             m_wait, m_early, m_no_credit, m_rq_multi, u_sc.n_slow, u_mem.n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
