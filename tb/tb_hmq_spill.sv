// tb_hmq_spill: self-checking test of the queue overflow into reserved
// memory.
//
// hmq_spill is placed in front of a real hmq_fifo of 4 entries with a ring
// of 8 slots, answered by spill_mem_model (random grants, in-order reads
// with random latency). A producer pushes numbered entries whenever in_full
// is low; a consumer pops the FIFO at a rate that changes between phases
// (fast, stalled, slow), so the FIFO fills, the ring fills and wraps, and
// everything drains again. Checked: entries leave the FIFO exactly in push
// order with none lost or duplicated; while nothing is parked a push enters
// the FIFO in the same cycle; spill_count never exceeds ring plus write
// buffer; the ring was used, filled (back-pressure seen) and wrapped; at
// the end all is drained.
//
// Interface: no ports, clock period 10, watchdog of 200000 cycles. Inputs
// change 1 time unit after a clock edge. The overflow behaviour follows
// the paper's remark on full queues; sizes and rates are this test's.
module tb_hmq_spill;
  localparam int W  = 96;
  localparam int QD = 4;
  localparam int SE = 8;

  logic clk = 0, rst_n = 0;
  logic in_push, in_full, q_push, pop, empty, full;
  logic [W-1:0] in_data, q_data, head;
  logic [$clog2(QD+1)-1:0] q_count;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [$clog2(SE)-1:0] mem_idx;
  logic [W-1:0] mem_wdata, mem_rdata;
  logic [$clog2(SE+1)-1:0] spill_count;

  hmq_spill #(.WIDTH(W), .QDEPTH(QD), .SPILL_ENTRIES(SE)) dut (
    .clk, .rst_n, .in_push, .in_data, .in_full, .q_push, .q_data, .q_count,
    .mem_req, .mem_we, .mem_idx, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .spill_count
  );
  hmq_fifo #(.WIDTH(W), .DEPTH(QD)) u_q (
    .clk, .rst_n, .push(q_push), .wr_data(q_data), .pop, .rd_data(head),
    .empty, .full, .count(q_count)
  );
  spill_mem_model #(.WIDTH(W), .IX_W($clog2(SE))) u_mem (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .idx(mem_idx), .wdata(mem_wdata),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata)
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint n_in = 0, n_out = 0;
  int pop_pct = 50, push_pct = 60;
  bit stop_push = 0;
  int n_full_seen = 0, n_ring_full = 0;
  logic parked_before;

  // producer
  initial begin
    in_push = 0; in_data = '0;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      in_push = 0;
      #1;
      if (in_full) n_full_seen++;
      if (!stop_push && !in_full && ($urandom() % 100) < push_pct) begin
        in_push = 1;
        in_data = {32'(n_in), $urandom(), 32'(n_in) ^ 32'hDEAD_BEEF};
        n_in++;
      end
    end
  end

  // consumer
  initial begin
    pop = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      pop = !empty && (($urandom() % 100) < pop_pct);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (pop && !empty) begin
      check("entry in push order", head[95:64] == 32'(n_out) &&
                                   head[31:0] == (32'(n_out) ^ 32'hDEAD_BEEF));
      n_out++;
    end
    check("spill count bounded", 32'(spill_count) <= SE + 1);
    if (32'(spill_count) >= SE) n_ring_full++;
    // a push with nothing parked, no write waiting and room goes straight in
    if (in_push && spill_count == 0 && !dut.wb_vld && !full && !mem_rvalid)
      check("direct push enters the queue at once", q_push && q_data == in_data);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);            // balanced
    pop_pct = 0;  repeat (500) @(posedge clk);   // consumer stalled
    pop_pct = 10; repeat (4000) @(posedge clk);  // slow consumer
    pop_pct = 90; repeat (3000) @(posedge clk);  // fast consumer
    pop_pct = 3;  repeat (4000) @(posedge clk);
    stop_push = 1; pop_pct = 100;
    repeat (2000) @(posedge clk);
    check("everything came out", n_out == n_in);
    check("all drained", empty && spill_count == 0 && !mem_req);
    check("ring used", u_mem.n_writes > 0 && u_mem.n_reads == u_mem.n_writes);
    check("ring wrapped", u_mem.n_writes > 2 * SE);
    check("ring filled", n_ring_full > 0);
    check("back-pressure seen", n_full_seen > 0);
    $display("in=%0d out=%0d mem_writes=%0d ring_full=%0d in_full=%0d",
             n_in, n_out, u_mem.n_writes, n_ring_full, n_full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
