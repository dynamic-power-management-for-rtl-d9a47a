// tb_sys_timer: self-checking test of the real-time tick timer.
// Checks the tick spacing at the default period of 100000 reference cycles
// (1 ms at 10 ns), a period rewritten through a NoC write, disabling and
// re-enabling through the enable register, and the tick counter.
`timescale 1ns / 1ps
module tb_sys_timer;
  import dvfs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, tick;
  noc_pkt_t in_pkt = '0;
  logic [31:0] n_ticks;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sys_timer dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .tick, .n_ticks);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int ticks [$];
  always @(posedge clk) if (rst_n && tick) ticks.push_back(cyc);

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); in_valid = 1; in_pkt.ptype = PKT_WR; in_pkt.addr = {24'd0, a}; in_pkt.data = d;
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    wait (ticks.size() == 3);
    check(ticks[1] - ticks[0] == 100000 && ticks[2] - ticks[1] == 100000, "1 ms period at 10 ns reference");
    check($realtime > 2999990 && $realtime < 3000100, $sformatf("third tick at 3 ms (%0t)", $realtime));
    wr(8'h00, 32'd250);
    ticks.delete();
    wait (ticks.size() == 4);
    check(ticks[1] - ticks[0] == 250 && ticks[3] - ticks[2] == 250, "period rewritten to 250");
    wr(8'h04, 32'd0);
    ticks.delete();
    repeat (1000) @(negedge clk);
    check(ticks.size() == 0, "no tick while disabled");
    wr(8'h04, 32'd1);
    repeat (260) @(negedge clk);
    check(ticks.size() == 1, "ticks again after enable");
    check(n_ticks == 32'd8, $sformatf("tick counter %0d", n_ticks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
