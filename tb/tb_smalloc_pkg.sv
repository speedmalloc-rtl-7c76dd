// tb_smalloc_pkg: self-checking test of the signal packet layout.
//
// Builds packets field by field from random values and checks, on the flat
// 96-bit vector, that the process ID occupies bits 0-31, the size or
// address bits 32-79, the type bit 80 and the main core ID bits 81-95, as
// printed in the paper's packet drawing; also checks the widths of the
// packet and of the start-side request, and the type encodings. Then packs
// random flat vectors and checks the fields read back.
//
// Interface: no ports; a clock of period 10 paces the checks, one per
// cycle, with a watchdog. The bit positions are the paper's; the 15-bit
// core ID, the 1-bit type and its encoding are this design's reading.
module tb_smalloc_pkg;
  import smalloc_pkg::*;

  logic clk = 0;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check("packet is 96 bits", $bits(sig_pkt_t) == 96);
    check("start request width", START_W == 96 + 1 + SYSREG_W);
    check("malloc type is 0", REQ_MALLOC == 1'b0);
    check("free type is 1", REQ_FREE == 1'b1);
    for (int n = 0; n < 2000; n++) begin
      sig_pkt_t p;
      logic [95:0] v;
      logic [31:0] pid;
      logic [47:0] data;
      logic [14:0] cid;
      logic        t;
      @(posedge clk);
      pid  = $urandom();
      data = {16'($urandom()), 32'($urandom())};
      cid  = 15'($urandom());
      t    = 1'($urandom() % 2);
      p.pid = pid; p.data = data; p.core_id = cid;
      p.typ = t ? REQ_FREE : REQ_MALLOC;
      v = p;
      check("PID in bits 0-31", v[31:0] == pid);
      check("size/address in bits 32-79", v[79:32] == data);
      check("type in bit 80", v[80] == t);
      check("core ID in bits 81-95", v[95:81] == cid);
      v = {$urandom(), $urandom(), $urandom()};
      p = sig_pkt_t'(v);
      check("fields read back", p.pid == v[31:0] && p.data == v[79:32] &&
                                p.typ == req_type_e'(v[80]) && p.core_id == v[95:81]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
