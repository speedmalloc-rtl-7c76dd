// hmq_regbuf: register buffer of the support core.
//
// A direct-mapped cache keyed by process ID. Each line holds the system
// control and segment registers a process needs for address translation,
// so the main cores send them only with their first allocation request of
// a process instead of with every packet. The low IDX_W bits of the PID
// select the line; the remaining PID bits are kept as the tag. A line holds
// a valid bit, the tag and a SYSREG_W-bit register image.
//
// Write port: on wr_en the line of wr_pid is overwritten (a different PID
// mapping to the same line evicts the old one). Read port: combinational;
// rd_hit is set when the line of rd_pid is valid and its tag matches, and
// rd_data is the stored image. A write and a read of the same PID in one
// cycle return the old contents; the new ones are visible from the next
// cycle. Reset clears all valid bits.
//
// Direct mapping and PID indexing follow the paper; the number of lines
// (16) and the register image width are this design's choices.
module hmq_regbuf
  import smalloc_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [PID_W-1:0]    wr_pid,
  input  logic [SYSREG_W-1:0] wr_data,
  input  logic [PID_W-1:0]    rd_pid,
  output logic                rd_hit,
  output logic [SYSREG_W-1:0] rd_data
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned TAG_W = PID_W - IDX_W;

  logic [ENTRIES-1:0]  valid;
  logic [TAG_W-1:0]    tag  [ENTRIES];
  logic [SYSREG_W-1:0] data [ENTRIES];

  logic [IDX_W-1:0] wr_idx, rd_idx;
  assign wr_idx = wr_pid[IDX_W-1:0];
  assign rd_idx = rd_pid[IDX_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (wr_en) valid[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      tag[wr_idx]  <= wr_pid[PID_W-1:IDX_W];
      data[wr_idx] <= wr_data;
    end
  end

  assign rd_hit  = valid[rd_idx] && (tag[rd_idx] == rd_pid[PID_W-1:IDX_W]);
  assign rd_data = data[rd_idx];

endmodule
