// sc_core_model: behavioural model of the support core (not synthesizable).
//
// Stands in for the small in-order core that runs the allocator software.
// It follows the controller's protocol: while stall is high it does
// nothing; on redirect_valid it checks that the PC is the handler for the
// request type, "executes" the handler for RUN_MALLOC or RUN_FREE cycles
// and then retires mallocend() (with the returned address) or freeend(),
// holding the end instruction while end_ready is low.
//
// The allocator kept in the model uses segregated size classes of 64, 128
// and 256 bytes, each with a free-block list (LIFO) of block addresses,
// the metadata layout drawn for the design. When a class's list is empty
// the model carves a fresh CHUNK-byte chunk of its region into blocks (the
// mmap() slow path). Requests above 256 bytes return address 0. Frees
// push the block back on its class's list; the class is recovered from
// the address region. Counters report how many calls ran, how many took
// the slow path and how many arrived without translation registers
// (register buffer miss).
//
// Interface: the sc_* ports of speedmalloc_top (stall, redirect, arguments in;
// end instruction out). Timing: the end instruction is presented RUN cycles
// after the redirect cycle and held until end_ready. The size classes and
// the free-list layout follow the paper's metadata figure; run times, class
// sizes, regions and the chunk size are this model's choices.
module sc_core_model
  import smalloc_pkg::*;
#(
  parameter int          RUN_MALLOC = 20,
  parameter int          RUN_FREE   = 12,
  parameter int          CHUNK      = 4096,
  parameter logic [63:0] MALLOC_PC  = 64'h0000_0000_0040_1000,
  parameter logic [63:0] FREE_PC    = 64'h0000_0000_0040_2000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stall,
  input  logic              redirect_valid,
  input  logic [63:0]       redirect_pc,
  input  sig_pkt_t          arg_pkt,
  input  logic              arg_sysreg_hit,
  output logic              end_valid,
  output req_type_e         end_type,
  output logic [DATA_W-1:0] end_rd,
  input  logic              end_ready
);

  localparam logic [DATA_W-1:0] REGION [3] = '{48'h1000_0000, 48'h2000_0000, 48'h3000_0000};
  localparam int unsigned       BSIZE  [3] = '{64, 128, 256};

  logic [DATA_W-1:0] free_list [3][$];
  logic [DATA_W-1:0] carve [3];

  int n_malloc = 0, n_free = 0, n_slow = 0, n_sysreg_miss = 0, n_bad_pc = 0;

  function automatic int class_of_size(logic [DATA_W-1:0] sz);
    if (sz <= 64)  return 0;
    if (sz <= 128) return 1;
    if (sz <= 256) return 2;
    return -1;
  endfunction

  function automatic int class_of_addr(logic [DATA_W-1:0] a);
    for (int c = 0; c < 3; c++)
      if (a >= REGION[c] && a < REGION[c] + 48'h1000_0000) return c;
    return -1;
  endfunction

  function automatic logic [DATA_W-1:0] do_malloc(logic [DATA_W-1:0] sz);
    int c;
    c = class_of_size(sz);
    if (c < 0) return '0;
    if (free_list[c].size() == 0) begin
      // slow path: claim a new chunk and thread it onto the list
      n_slow++;
      for (int i = CHUNK / int'(BSIZE[c]) - 1; i >= 0; i--)
        free_list[c].push_front(carve[c] + DATA_W'(i * int'(BSIZE[c])));
      carve[c] += DATA_W'(CHUNK);
    end
    return free_list[c].pop_front();
  endfunction

  function automatic void do_free(logic [DATA_W-1:0] a);
    int c;
    c = class_of_addr(a);
    if (c >= 0) free_list[c].push_front(a);
  endfunction

  initial begin
    for (int c = 0; c < 3; c++) carve[c] = REGION[c];
    end_valid = 0; end_type = REQ_MALLOC; end_rd = '0;
    @(posedge clk); #1;
    // Each pass starts 1 time unit after a clock edge, looking at the
    // values of the current cycle.
    forever begin
      if (rst_n && !stall && redirect_valid) begin
        sig_pkt_t req;
        req = arg_pkt;
        if (!arg_sysreg_hit) n_sysreg_miss++;
        if (redirect_pc != ((req.typ == REQ_MALLOC) ? MALLOC_PC : FREE_PC)) n_bad_pc++;
        // the handler runs; its end instruction retires RUN cycles after
        // the redirect cycle
        repeat ((req.typ == REQ_MALLOC) ? RUN_MALLOC : RUN_FREE) @(posedge clk);
        #1;
        end_valid = 1;
        end_type  = req.typ;
        if (req.typ == REQ_MALLOC) begin
          end_rd = do_malloc(req.data);
          n_malloc++;
        end else begin
          end_rd = '0;
          do_free(req.data);
          n_free++;
        end
        #1;
        while (!end_ready) begin
          @(posedge clk); #2;
        end
        @(posedge clk); #1;
        end_valid = 0;
        // the next call, if one was pending, was started by the end
        // instruction and is seen on the next pass without waiting
      end else begin
        @(posedge clk); #1;
      end
    end
  end

endmodule
