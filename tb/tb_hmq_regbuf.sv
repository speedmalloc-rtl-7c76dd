// tb_hmq_regbuf: self-checking test of the direct-mapped register buffer.
//
// A reference model keeps, per line, the PID and register image last
// written. The test checks that nothing hits after reset, that a written
// PID hits with its data from the next cycle, that a PID mapping to the
// same line evicts the previous one, that PIDs differing only in the tag
// miss, and then runs random writes and reads against the model.
//
// Interface: no ports; clock period 10, a cycle watchdog ends a hung run
// with a failure. Reads are combinational and checked in the same cycle;
// writes become visible at the next clock edge. PID indexing follows the
// paper; the PID patterns are this test's choice.
module tb_hmq_regbuf;
  import smalloc_pkg::*;
  localparam int E = 16;

  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic [PID_W-1:0] wr_pid, rd_pid;
  logic [SYSREG_W-1:0] wr_data, rd_data;
  logic rd_hit;

  int checks = 0, failures = 0;
  logic              m_vld [E];
  logic [PID_W-1:0]  m_pid [E];
  logic [SYSREG_W-1:0] m_dat [E];

  hmq_regbuf #(.ENTRIES(E)) dut (.*);

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

  task automatic write(logic [PID_W-1:0] pid, logic [SYSREG_W-1:0] d);
    wr_en = 1; wr_pid = pid; wr_data = d;
    @(posedge clk); #1;
    wr_en = 0;
    m_vld[pid % E] = 1; m_pid[pid % E] = pid; m_dat[pid % E] = d;
  endtask

  task automatic read(logic [PID_W-1:0] pid);
    logic exp_hit;
    rd_pid = pid; #1;
    exp_hit = m_vld[pid % E] && m_pid[pid % E] == pid;
    check("hit", rd_hit == exp_hit);
    if (exp_hit) check("data", rd_data == m_dat[pid % E]);
  endtask

  function automatic logic [SYSREG_W-1:0] rnd();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  initial begin
    wr_en = 0; wr_pid = '0; wr_data = '0; rd_pid = '0;
    for (int i = 0; i < E; i++) m_vld[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < E; i++) begin
      read(i);
      check("miss after reset", !rd_hit);
    end
    write(32'd5, 128'h1234);
    read(32'd5);
    check("hit after write", rd_hit && rd_data == 128'h1234);
    read(32'd5 + E);
    check("tag mismatch misses", !rd_hit);
    write(32'd5 + E, 128'h5678);
    read(32'd5);
    check("evicted", !rd_hit);
    read(32'd5 + E);
    check("new owner hits", rd_hit && rd_data == 128'h5678);
    for (int i = 0; i < 5000; i++) begin
      logic [PID_W-1:0] p;
      p = $urandom() % (4 * E);
      if ($urandom() % 3 == 0) write(p, rnd());
      else begin
        read(p);
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
