// smalloc_pkg: types and constants shared by the allocation-offload blocks.
//
// The start and end signals that travel between a main core and the
// support core carry one 96-bit data packet. Its fields follow the packet
// drawing in the paper: process ID in bits 0-31, the request size (start
// signal) or the returned address (end signal) up to bit 79, the request
// type at bit 80, and the main core ID in the bits up to 95. Only the
// numerals 0, 31, 79, 80 and 95 are given for the boundaries, so the exact
// split (size in bits 32-79, a one-bit type at 80, core ID in 81-95) is this
// design's reading of them. The type encoding (0 = malloc, 1 = free) is also
// this design's choice.
//
// The system control and segment registers that a main core sends with its
// first request of a process are carried beside the packet as one opaque
// SYSREG_W-bit word; their number and width are this design's choice.
package smalloc_pkg;

  localparam int unsigned PKT_W     = 96;
  localparam int unsigned PID_W     = 32;   // bits  0..31
  localparam int unsigned DATA_W    = 48;   // bits 32..79, size or address
  localparam int unsigned CID_W     = 15;   // bits 81..95
  localparam int unsigned SYSREG_W  = 128;  // two 64-bit translation registers

  // Latency of the direct main-core <-> support-core packet path, one way.
  localparam int unsigned LINK_LAT  = 8;

  typedef enum logic {
    REQ_MALLOC = 1'b0,
    REQ_FREE   = 1'b1
  } req_type_e;

  // Packed MSB first: core_id [95:81], typ [80], data [79:32], pid [31:0].
  typedef struct packed {
    logic [CID_W-1:0]  core_id;
    req_type_e         typ;
    logic [DATA_W-1:0] data;
    logic [PID_W-1:0]  pid;
  } sig_pkt_t;

  // A start-side request as it crosses the link: packet plus the optional
  // system registers sent on the first request of a process.
  typedef struct packed {
    sig_pkt_t              pkt;
    logic                  sysreg_vld;
    logic [SYSREG_W-1:0]   sysreg;
  } start_req_t;

  localparam int unsigned START_W = $bits(start_req_t);

  // New instructions of the main cores (execute/commit side).
  typedef enum logic {
    OP_MALLOCSTART = 1'b0,
    OP_FREESTART   = 1'b1
  } mc_op_e;

endpackage
