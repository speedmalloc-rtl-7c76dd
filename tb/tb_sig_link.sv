// tb_sig_link: self-checking test of the main-core <-> support-core path.
//
// Random start requests, credits and end packets are sent into the path
// every cycle (end packets only while net_ready is high, which is toggled
// at random). Everything sent is recorded with its send cycle; the test
// checks that each item comes out exactly LAT = 8 cycles later, unchanged,
// and that an end packet raises end_valid only for the core named in its
// core ID field.
//
// Interface: no ports; clock period 10, a cycle watchdog ends a hung run
// with a failure. Runs 5000 cycles of random traffic. The 8-cycle latency
// is the paper's; the traffic is this test's choice.
module tb_sig_link;
  import smalloc_pkg::*;
  localparam int N = 16;
  localparam int LAT = 8;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] st_in_valid, st_out_valid, cr_in, cr_out, end_valid;
  start_req_t   st_in_req [N];
  start_req_t   st_out_req [N];
  logic net_ready, rsp_valid, rsp_ready;
  sig_pkt_t rsp_pkt, end_pkt;

  int checks = 0, failures = 0;
  int cyc = 0;

  // history of inputs, indexed by cycle
  localparam int CYCLES = 5000;
  logic [N-1:0] h_st_v [CYCLES];
  start_req_t   h_st_d [CYCLES][N];
  logic [N-1:0] h_cr   [CYCLES];
  logic         h_en_v [CYCLES];
  sig_pkt_t     h_en_d [CYCLES];

  sig_link #(.NCORES(N), .LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    st_in_valid = '0; cr_in = '0; net_ready = 0; rsp_valid = 0; rsp_pkt = '0;
    for (int i = 0; i < N; i++) st_in_req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < CYCLES; cyc++) begin
      @(negedge clk);
      // outputs now reflect inputs from LAT cycles ago
      if (cyc >= LAT) begin
        int c0;
        c0 = cyc - LAT;
        check("start valid", st_out_valid == h_st_v[c0]);
        for (int i = 0; i < N; i++) begin
          start_req_t expd;
          expd = h_st_d[c0][i];
          if (h_st_v[c0][i]) check("start data", st_out_req[i] == expd);
        end
        check("credit", cr_out == h_cr[c0]);
        if (h_en_v[c0]) begin
          check("end data", end_pkt == h_en_d[c0]);
          check("end target", end_valid == (N'(1) << h_en_d[c0].core_id));
        end else begin
          check("no end", end_valid == '0);
        end
      end else begin
        check("quiet after reset", st_out_valid == '0 && cr_out == '0 && end_valid == '0);
      end
      // new inputs
      net_ready   = ($urandom() % 4 != 0);
      st_in_valid = N'($urandom());
      cr_in       = N'($urandom());
      for (int i = 0; i < N; i++)
        st_in_req[i] = START_W'({$urandom(), $urandom(), $urandom(), $urandom(),
                                 $urandom(), $urandom(), $urandom(), $urandom()});
      rsp_valid = 1'($urandom() % 2);
      rsp_pkt   = {$urandom(), $urandom(), $urandom()};
      rsp_pkt.core_id = CID_W'($urandom() % N);
      #1;
      check("ready follows net", rsp_ready == net_ready);
      h_st_v[cyc] = st_in_valid;
      for (int i = 0; i < N; i++) h_st_d[cyc][i] = st_in_req[i];
      h_cr[cyc]   = cr_in;
      h_en_v[cyc] = rsp_valid && net_ready;
      h_en_d[cyc] = rsp_pkt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
