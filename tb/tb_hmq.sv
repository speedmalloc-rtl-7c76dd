// tb_hmq: self-checking test of the hardware message queues (16 cores,
// 128-entry queues).
//
// The testbench drives start requests from all cores (respecting the slot
// credits returned on credit_ret) and plays the support-core controller:
// it takes offered requests at random moments and pushes results into the
// response queue. Checked against its own bookkeeping:
//   * every request comes out exactly once, unchanged, and requests of one
//     core and one type keep their order;
//   * a free() is only ever offered when no malloc() is queued;
//   * the register-buffer answer for each request is a hit with the
//     registers its process sent (each process uses its own line here);
//   * results leave the response queue in push order, only while
//     end_ready is high, and the response queue reports full after 128
//     pushes with the end side blocked;
//   * with a slow consumer and many frees, the free() queue fills up (its
//     count reaches 128) and further frees overflow into reserved memory
//     (spill_mem_model) and come back in order, without losing anything.
//
// Interface: no ports; clock period 10 time units, reset for 3 cycles;
// a watchdog of 400000 cycles. Stimulus is applied 1 time unit after each
// clock edge. The 16 cores and 128-entry queues are the paper's numbers;
// traffic mix and rates are this test's choices.
module tb_hmq;
  import smalloc_pkg::*;
  localparam int N = 16;
  localparam int SD = 2;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, credit_ret;
  start_req_t in_req [N];
  logic req_valid, req_sysreg_hit, req_take;
  sig_pkt_t req_pkt;
  logic [SYSREG_W-1:0] req_sysreg;
  logic rsp_push, rsp_full, end_valid, end_ready;
  sig_pkt_t rsp_pkt, end_pkt;
  logic [7:0] mq_count, fq_count, rq_count;
  logic spill_mem_req, spill_mem_we, spill_mem_gnt, spill_mem_rvalid;
  logic [9:0] spill_mem_idx;
  logic [PKT_W-1:0] spill_mem_wdata, spill_mem_rdata;
  logic [10:0] spill_count;

  hmq #(.NCORES(N), .SLOT_DEPTH(SD)) dut (.*);

  spill_mem_model #(.WIDTH(PKT_W), .IX_W(10)) u_mem (
    .clk, .rst_n, .req(spill_mem_req), .we(spill_mem_we), .idx(spill_mem_idx),
    .wdata(spill_mem_wdata), .gnt(spill_mem_gnt), .rvalid(spill_mem_rvalid),
    .rdata(spill_mem_rdata)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int credits [N];
  bit sent_sys [N];
  sig_pkt_t exp_q [N][2][$];   // per core, per type, in issue order
  sig_pkt_t rsp_q [$];
  int max_spill = 0;
  int n_sent = 0, n_taken = 0, max_fq = 0, n_free_pct = 50, take_pct = 50;
  bit stop_inject = 0, manual = 0;

  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (credit_ret[i]) credits[i]++;

  // injector
  initial begin
    in_valid = '0;
    for (int i = 0; i < N; i++) begin
      in_req[i] = '0; credits[i] = SD; sent_sys[i] = 0;
    end
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      in_valid = '0;
      if (stop_inject) continue;
      for (int i = 0; i < N; i++) begin
        if (credits[i] > 0 && ($urandom() % 100) < 30) begin
          start_req_t r;
          r.pkt.pid     = PID_W'(i);
          r.pkt.data    = DATA_W'({$urandom(), $urandom()});
          r.pkt.typ     = (($urandom() % 100) < n_free_pct) ? REQ_FREE : REQ_MALLOC;
          r.pkt.core_id = CID_W'(i);
          r.sysreg_vld  = !sent_sys[i];
          r.sysreg      = {4{PID_W'(i) ^ 32'hA5A5_0000}};
          sent_sys[i]   = 1;
          in_valid[i]   = 1;
          in_req[i]     = r;
          credits[i]--;
          exp_q[i][r.pkt.typ].push_back(r.pkt);
          n_sent++;
        end
      end
    end
  end

  // consumer (support-core controller)
  initial begin
    req_take = 0; rsp_push = 0; rsp_pkt = '0; end_ready = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (manual) continue;
      req_take = 0; rsp_push = 0;
      #1;
      if (req_valid) begin
        if (req_pkt.typ == REQ_FREE) check("free only when no malloc queued", mq_count == 0);
        check("sysreg hit", req_sysreg_hit);
        check("sysreg data", req_sysreg == {4{req_pkt.pid ^ 32'hA5A5_0000}});
      end
      if (req_valid && ($urandom() % 100) < take_pct) begin
        int c;
        sig_pkt_t e;
        req_take = 1;
        c = int'(req_pkt.core_id);
        check("known core", c < N && exp_q[c][req_pkt.typ].size() != 0);
        if (c < N && exp_q[c][req_pkt.typ].size() != 0) begin
          e = exp_q[c][req_pkt.typ].pop_front();
          check("packet in order and unchanged", req_pkt == e);
        end
        n_taken++;
        if (req_pkt.typ == REQ_MALLOC && !rsp_full) begin
          rsp_push = 1;
          rsp_pkt  = req_pkt;
          rsp_pkt.data = DATA_W'({$urandom(), $urandom()});
          rsp_q.push_back(rsp_pkt);
        end
      end
    end
  end

  // end side
  initial begin
    end_ready = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      end_ready = ($urandom() % 100) < 60;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (int'(fq_count) > max_fq) max_fq = int'(fq_count);
    if (32'(spill_count) > max_spill) max_spill = 32'(spill_count);
    if (end_valid && end_ready) begin
      sig_pkt_t e;
      check("end packet available", rsp_q.size() != 0);
      if (rsp_q.size() != 0) begin
        e = rsp_q.pop_front();
        check("end packet in order", end_pkt == e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // mixed traffic
    repeat (20000) @(posedge clk);
    // free flood with a slow consumer
    n_free_pct = 95; take_pct = 5;
    repeat (8000) @(posedge clk);
    check("free() queue filled", max_fq == 128);
    check("frees overflowed into reserved memory", max_spill > 0 && u_mem.n_writes > 0);
    // drain everything
    stop_inject = 1; take_pct = 100;
    repeat (12000) @(posedge clk);
    check("overflow read back", u_mem.n_reads == u_mem.n_writes && spill_count == 0);
    check("all requests served", n_taken == n_sent);
    check("queues empty", mq_count == 0 && fq_count == 0 && !req_valid);
    // response queue full: block the end side and push 128 results
    manual = 1;
    force end_ready = 0;
    repeat (2) @(posedge clk);
    rsp_push = 0; req_take = 0;
    check("response queue empty before fill", rq_count == 0);
    for (int k = 0; k < 128; k++) begin
      sig_pkt_t p;
      @(posedge clk); #3;
      p = {$urandom(), $urandom(), $urandom()};
      rsp_push = 1;
      rsp_pkt  = p;
      rsp_q.push_back(p);
    end
    @(posedge clk); #3;
    rsp_push = 0;
    #1;
    check("response queue full", rsp_full && rq_count == 128);
    release end_ready;
    repeat (1000) @(posedge clk);
    check("responses drained", rsp_q.size() == 0 && rq_count == 0);
    $display("sent=%0d taken=%0d max_fq=%0d max_spill=%0d", n_sent, n_taken, max_fq, max_spill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
