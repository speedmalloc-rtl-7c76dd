// hmq_spill: overflow of a hardware message queue into reserved memory.
//
// Sits between the dispatcher and a queue FIFO. While the FIFO has room and
// nothing is parked in memory, a pushed request goes straight into the
// FIFO in the same cycle. Once the FIFO is full, further requests are
// written into a ring of SPILL_ENTRIES slots in a reserved region of
// physical memory, and from then on every request takes that path until
// the ring is empty again, so the queue order is kept. Whenever the FIFO
// has room for more than the reads already in flight, the oldest parked
// request is read back and pushed into the FIFO when its data returns.
//
// Interface:
//   in_push/in_data/in_full   from the dispatcher; in_full is the "queue
//                             full" it sees (a push is accepted when low);
//   q_push/q_data, q_count    into the FIFO, and the FIFO's occupancy;
//   mem_req/mem_we/mem_idx/mem_wdata, mem_gnt
//                             one request at a time to the memory system,
//                             held until granted; mem_idx is the slot in the
//                             reserved region (the byte address is that
//                             region's base plus mem_idx times the slot
//                             size, mapped outside this block);
//   mem_rvalid/mem_rdata      read data, returned in request order after any
//                             number of cycles;
//   spill_count               requests parked in memory or being read back.
// Timing: the direct path adds no cycle. A parked request needs one granted
// write and one granted read plus the memory latency. Reads have priority
// for the port; a write waits in a one-entry buffer, and in_full is high
// while that buffer is occupied and the request cannot go straight in.
//
// The paper states only that requests arriving at a full queue could be
// buffered in reserved physical memory and fetched back once space is
// available. The ring, its size, the one-entry write buffer, the port
// handshake and read priority are this design's choices.
module hmq_spill #(
  parameter int unsigned WIDTH         = 96,
  parameter int unsigned QDEPTH        = 128,
  parameter int unsigned SPILL_ENTRIES = 1024,
  localparam int unsigned QC_W = $clog2(QDEPTH + 1),
  localparam int unsigned IX_W = $clog2(SPILL_ENTRIES),
  localparam int unsigned SC_W = $clog2(SPILL_ENTRIES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_push,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_full,
  output logic             q_push,
  output logic [WIDTH-1:0] q_data,
  input  logic [QC_W-1:0]  q_count,
  output logic             mem_req,
  output logic             mem_we,
  output logic [IX_W-1:0]  mem_idx,
  output logic [WIDTH-1:0] mem_wdata,
  input  logic             mem_gnt,
  input  logic             mem_rvalid,
  input  logic [WIDTH-1:0] mem_rdata,
  output logic [SC_W-1:0]  spill_count
);

  logic             wb_vld;
  logic [WIDTH-1:0] wb_data;
  logic [IX_W-1:0]  wr_ptr, rd_ptr;
  logic [SC_W-1:0]  parked;     // written, read not yet requested
  logic [QC_W-1:0]  inflight;   // reads requested, data not yet returned

  logic q_room, mem_path, direct_in, direct_wb, do_read, do_write, wb_load;

  // FIFO room left after the reads in flight have returned
  assign q_room    = (32'(q_count) + 32'(inflight)) < QDEPTH;
  // anything in memory or on its way back forces the memory path
  assign mem_path  = (parked != '0) || (inflight != '0);

  assign direct_wb = wb_vld && !mem_path && q_room;
  assign direct_in = in_push && !wb_vld && !mem_path && q_room;
  assign wb_load   = in_push && !direct_in;
  assign in_full   = wb_vld && !direct_wb;

  assign do_read   = (parked != '0) && q_room;
  assign do_write  = !do_read && wb_vld && !direct_wb &&
                     (32'(parked) + 32'(inflight) < SPILL_ENTRIES);

  assign mem_req   = do_read || do_write;
  assign mem_we    = do_write;
  assign mem_idx   = do_read ? rd_ptr : wr_ptr;
  assign mem_wdata = wb_data;

  always_comb begin
    q_push = 1'b0;
    q_data = in_data;
    if (mem_rvalid) begin
      q_push = 1'b1;
      q_data = mem_rdata;
    end else if (direct_wb) begin
      q_push = 1'b1;
      q_data = wb_data;
    end else if (direct_in) begin
      q_push = 1'b1;
      q_data = in_data;
    end
  end

  assign spill_count = SC_W'(32'(parked) + 32'(inflight) + 32'(wb_vld && !direct_wb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_vld   <= 1'b0;
      wb_data  <= '0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      parked   <= '0;
      inflight <= '0;
    end else begin
      if ((direct_wb || (do_write && mem_gnt)) && !wb_load) wb_vld <= 1'b0;
      if (wb_load) begin
        wb_vld  <= 1'b1;
        wb_data <= in_data;
      end
      if (do_write && mem_gnt) wr_ptr <= (32'(wr_ptr) == SPILL_ENTRIES - 1) ? '0 : wr_ptr + 1'b1;
      if (do_read && mem_gnt)  rd_ptr <= (32'(rd_ptr) == SPILL_ENTRIES - 1) ? '0 : rd_ptr + 1'b1;
      parked   <= parked + SC_W'(do_write && mem_gnt) - SC_W'(do_read && mem_gnt);
      inflight <= inflight + QC_W'(do_read && mem_gnt) - QC_W'(mem_rvalid);
    end
  end

  // a push is only made when in_full is low
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) in_push |-> !in_full);
  // read data only comes back for a request in flight
  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                      mem_rvalid |-> inflight != '0);

endmodule
