// sig_link: direct signal path between the main cores and the support core.
//
// Start and end signals, with their data packets, are routed straight
// between a main core and the support core over the coherent network
// without going through the caches and without snoops. The path has a
// fixed latency of LAT cycles in each direction (8 cycles in the evaluated
// system) and is modelled as pipeline registers:
//   * start path: one LAT-stage pipe per main core, carrying the start
//     request (packet plus optional system registers) into that core's
//     dispatcher slot;
//   * credit path: one LAT-stage pipe per core returning a slot credit
//     from the dispatcher to the core;
//   * end path: one shared LAT-stage pipe from the response queue; at the
//     far end the packet's main core ID selects the core whose
//     end_valid[i] pulses; all cores see the same end_pkt.
// The end path accepts a packet in any cycle in which net_ready is high
// (rsp_ready = net_ready); net_ready stands for the network granting the
// support core a slot and comes from outside. Packets are never dropped or
// reordered; each pipe moves every cycle.
//
// The 8-cycle latency follows the paper; the pipe structure, the credit
// return and the shared end pipe are this design's choices.
module sig_link
  import smalloc_pkg::*;
#(
  parameter int unsigned NCORES = 16,
  parameter int unsigned LAT    = LINK_LAT
) (
  input  logic               clk,
  input  logic               rst_n,
  // start path
  input  logic [NCORES-1:0]  st_in_valid,
  input  start_req_t         st_in_req  [NCORES],
  output logic [NCORES-1:0]  st_out_valid,
  output start_req_t         st_out_req [NCORES],
  // credit path
  input  logic [NCORES-1:0]  cr_in,
  output logic [NCORES-1:0]  cr_out,
  // end path
  input  logic               net_ready,
  input  logic               rsp_valid,
  input  sig_pkt_t           rsp_pkt,
  output logic               rsp_ready,
  output logic [NCORES-1:0]  end_valid,
  output sig_pkt_t           end_pkt
);

  // start and credit pipes
  logic [NCORES-1:0] st_v  [LAT];
  start_req_t        st_d  [LAT][NCORES];
  logic [NCORES-1:0] cr_v  [LAT];
  // end pipe
  logic              en_v  [LAT];
  sig_pkt_t          en_d  [LAT];

  assign rsp_ready = net_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) begin
        st_v[s] <= '0;
        cr_v[s] <= '0;
        en_v[s] <= 1'b0;
      end
    end else begin
      st_v[0] <= st_in_valid;
      cr_v[0] <= cr_in;
      en_v[0] <= rsp_valid && rsp_ready;
      for (int s = 1; s < LAT; s++) begin
        st_v[s] <= st_v[s-1];
        cr_v[s] <= cr_v[s-1];
        en_v[s] <= en_v[s-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCORES; c++) st_d[0][c] <= st_in_req[c];
    en_d[0] <= rsp_pkt;
    for (int s = 1; s < LAT; s++) begin
      for (int c = 0; c < NCORES; c++) st_d[s][c] <= st_d[s-1][c];
      en_d[s] <= en_d[s-1];
    end
  end

  assign st_out_valid = st_v[LAT-1];
  assign st_out_req   = st_d[LAT-1];
  assign cr_out       = cr_v[LAT-1];
  assign end_pkt      = en_d[LAT-1];

  always_comb begin
    end_valid = '0;
    for (int c = 0; c < NCORES; c++)
      end_valid[c] = en_v[LAT-1] && (en_d[LAT-1].core_id == CID_W'(c));
  end

  a_core_id: assert property (@(posedge clk) disable iff (!rst_n)
                              (rsp_valid && rsp_ready) |-> (rsp_pkt.core_id < CID_W'(NCORES)))
    else $error("sig_link: end packet for a main core that does not exist");

endmodule
