// tb_workloads: allocation patterns of multi-threaded programs run through
// the full-size offload hardware at 1, 2, 4, 8 and 16 threads.
//
// speedmalloc_top is instantiated with its defaults (16 main cores) and
// sc_core_model plays the support core. Each thread runs on its own main
// core; all threads belong to one process (one PID), as in a
// multi-threaded program. Two patterns are run for every thread count:
//   * server-client (Larson-like): each thread keeps a pool of live blocks
//     and repeatedly frees a random one and allocates a new block of random
//     size (1-256 bytes) in its place;
//   * producer-consumer (Xmalloc-like): each thread allocates blocks and
//     hands them to the next thread, which frees them, so every free is of
//     a block another thread allocated.
// Checked: every returned block lies in and is aligned to its size class
// and is never handed out twice while live; every call is executed once by
// the support core with the right handler PC; all queues drain; and the
// support core's throughput bound holds (the run cannot be shorter than
// the sum of the handler run times). The cycles of each run are printed.
//
// Interface: no ports, clock period 10, watchdog on the cycle count. Core
// stimulus changes 1 time unit after a clock edge. Thread counts and the
// two patterns follow the paper's multi-threaded workloads; the operation
// counts, sizes and handler run times are this test's choices, scaled to
// what simulates in seconds.
module tb_workloads;
  import smalloc_pkg::*;

  localparam int N          = 16;
  localparam int RUN_MALLOC = 20;
  localparam int RUN_FREE   = 12;
  localparam int OPS        = 60;
  localparam int POOL       = 8;
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

  bit live [logic [DATA_W-1:0]];
  int n_malloc_issued = 0, n_free_issued = 0;
  logic [PID_W-1:0] cur_pid;
  logic [DATA_W-1:0] inbox [N][$];
  int thread_done [N];

  task automatic check_block(logic [DATA_W-1:0] sz, logic [DATA_W-1:0] a);
    int c;
    logic [DATA_W-1:0] base;
    c = (sz <= 64) ? 0 : (sz <= 128) ? 1 : 2;
    base = DATA_W'(48'h1000_0000) * DATA_W'(c + 1);
    check("block in its class region", a >= base && a < base + 48'h1000_0000);
    check("block aligned to its class", (a & DATA_W'((64 << c) - 1)) == 0);
    check("block not handed out twice", !live.exists(a));
    live[a] = 1;
  endtask

  task automatic issue(int i, mc_op_e op, logic [DATA_W-1:0] arg);
    @(posedge clk); #1;
    ex_valid[i] = 1; ex_op[i] = op; ex_pid[i] = cur_pid; ex_arg[i] = arg;
    ex_sysreg[i] = {4{cur_pid}};
    #1;
    while (!ex_ready[i]) begin
      @(posedge clk); #2;
    end
    @(posedge clk); #1;
    ex_valid[i] = 0;
    if (op == OP_MALLOCSTART) n_malloc_issued++; else n_free_issued++;
  endtask

  task automatic do_malloc(int i, output logic [DATA_W-1:0] a);
    logic [DATA_W-1:0] sz;
    sz = {16'd0, 32'd1 + $urandom() % 256};
    issue(i, OP_MALLOCSTART, sz);
    repeat ($urandom() % 8) @(posedge clk);
    #1;
    cm_valid[i] = 1; cm_op[i] = OP_MALLOCSTART;
    #1;
    while (!cm_done[i]) begin
      @(posedge clk); #2;
    end
    a = cm_rd[i];
    check_block(sz, a);
    @(posedge clk); #1;
    cm_valid[i] = 0;
  endtask

  task automatic do_free(int i, logic [DATA_W-1:0] a);
    check("freeing a live block", live.exists(a));
    live.delete(a);
    issue(i, OP_FREESTART, a);
    cm_valid[i] = 1; cm_op[i] = OP_FREESTART;
    #1;
    check("free retires without waiting", cm_done[i]);
    @(posedge clk); #1;
    cm_valid[i] = 0;
  endtask

  // server-client: a pool of live blocks, random replacement
  task automatic thread_larson(int i);
    logic [DATA_W-1:0] pool [POOL];
    for (int k = 0; k < POOL; k++) do_malloc(i, pool[k]);
    for (int k = 0; k < OPS; k++) begin
      int j;
      j = $urandom() % POOL;
      do_free(i, pool[j]);
      do_malloc(i, pool[j]);
    end
    for (int k = 0; k < POOL; k++) do_free(i, pool[k]);
    thread_done[i] = 1;
  endtask

  // producer-consumer: allocate for the next thread, free what the
  // previous thread allocated
  task automatic thread_xmalloc(int i, int t);
    int freed = 0;
    for (int k = 0; k < OPS; k++) begin
      logic [DATA_W-1:0] a;
      do_malloc(i, a);
      inbox[(i + 1) % t].push_back(a);
      if (inbox[i].size() != 0) begin
        do_free(i, inbox[i].pop_front());
        freed++;
      end
    end
    while (freed < OPS) begin
      if (inbox[i].size() != 0) begin
        do_free(i, inbox[i].pop_front());
        freed++;
      end else begin
        @(posedge clk);
      end
    end
    thread_done[i] = 1;
  endtask

  function automatic bit threads_done(int t);
    for (int i = 0; i < t; i++) if (thread_done[i] == 0) return 0;
    return 1;
  endfunction

  task automatic run(int pattern, int t);
    longint t0, cycles;
    int m0, f0, sm0, sf0, busy;
    cur_pid = PID_W'(32'h2000 + pattern * 32 + t);
    for (int i = 0; i < N; i++) thread_done[i] = 0;
    t0 = cyc; m0 = n_malloc_issued; f0 = n_free_issued;
    sm0 = u_sc.n_malloc; sf0 = u_sc.n_free;
    for (int i = 0; i < t; i++) begin
      automatic int ii = i;
      if (pattern == 0) fork thread_larson(ii); join_none
      else              fork thread_xmalloc(ii, t); join_none
    end
    while (!threads_done(t)) @(posedge clk);
    while (!(u_sc.n_malloc == n_malloc_issued && u_sc.n_free == n_free_issued &&
             mq_count == 0 && fq_count == 0 && spill_count == 0 && rq_count == 0 && sc_stall))
      @(posedge clk);
    cycles = cyc - t0;
    check("all mallocs executed", u_sc.n_malloc - sm0 == n_malloc_issued - m0);
    check("all frees executed", u_sc.n_free - sf0 == n_free_issued - f0);
    check("nothing left live", live.size() == 0);
    busy = (n_malloc_issued - m0) * RUN_MALLOC + (n_free_issued - f0) * RUN_FREE;
    check("run not shorter than the support core's work", cycles >= longint'(busy));
    $display("%s threads=%0d calls=%0d cycles=%0d",
             (pattern == 0) ? "server-client    " : "producer-consumer",
             t, (n_malloc_issued - m0) + (n_free_issued - f0), cycles);
    repeat (10) @(posedge clk);
  endtask

  initial begin
    ex_valid = '0; cm_valid = '0; net_ready = 1;
    cfg_we = 0; cfg_type = REQ_MALLOC; cfg_pc = '0; cur_pid = '0;
    for (int i = 0; i < N; i++) begin
      ex_op[i] = OP_MALLOCSTART; cm_op[i] = OP_MALLOCSTART;
      ex_pid[i] = '0; ex_arg[i] = '0; ex_sysreg[i] = '0;
      thread_done[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1; cfg_we = 1; cfg_type = REQ_MALLOC; cfg_pc = MPC;
    @(posedge clk); #1; cfg_type = REQ_FREE; cfg_pc = FPC;
    @(posedge clk); #1; cfg_we = 0;
    repeat (5) @(posedge clk);
    for (int p = 0; p < 2; p++)
      for (int t = 1; t <= N; t = t * 2)
        run(p, t);
    check("handler PCs right", u_sc.n_bad_pc == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
