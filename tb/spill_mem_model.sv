// spill_mem_model: behavioural model of the reserved memory region that
// takes free() queue overflow (not synthesizable).
//
// Answers the overflow port: a request is granted in a cycle chosen at
// random (GNT_PCT percent of the cycles); a granted write stores its data at
// the slot index, a granted read returns the slot's data on rvalid after
// MIN_LAT to MIN_LAT+RAND_LAT cycles, reads returning in request order, at
// most one per cycle. Counts writes, reads and the largest number of reads
// outstanding. All signals change 1 time unit after a clock edge.
// Latencies and the grant rate are this model's choices.
module spill_mem_model #(
  parameter int unsigned WIDTH    = 96,
  parameter int unsigned IX_W     = 10,
  parameter int unsigned GNT_PCT  = 70,
  parameter int unsigned MIN_LAT  = 4,
  parameter int unsigned RAND_LAT = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req,
  input  logic             we,
  input  logic [IX_W-1:0]  idx,
  input  logic [WIDTH-1:0] wdata,
  output logic             gnt,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [logic [IX_W-1:0]];
  logic [WIDTH-1:0] rq_data [$];
  longint           rq_due  [$];
  longint           cyc = 0;
  int n_writes = 0, n_reads = 0;

  initial begin
    gnt = 0; rvalid = 0; rdata = '0;
    forever begin
      @(posedge clk);
      cyc++;
      // act on what was presented in the cycle that just ended
      if (rst_n && req && gnt) begin
        if (we) begin
          mem[idx] = wdata;
          n_writes++;
        end else begin
          longint due;
          int unsigned d;
          d   = MIN_LAT + $urandom() % (RAND_LAT + 1);
          due = cyc + longint'(d);
          if (rq_due.size() != 0 && due <= rq_due[$]) due = rq_due[$] + 1;
          rq_data.push_back(mem.exists(idx) ? mem[idx] : '0);
          rq_due.push_back(due);
          n_reads++;
        end
      end
      #1;
      gnt    = rst_n && (($urandom() % 100) < GNT_PCT);
      rvalid = 0;
      if (rq_due.size() != 0 && rq_due[0] <= cyc) begin
        rvalid = 1;
        rdata  = rq_data.pop_front();
        void'(rq_due.pop_front());
      end
    end
  end

endmodule
