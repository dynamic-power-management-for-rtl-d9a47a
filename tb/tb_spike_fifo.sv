// tb_spike_fifo: self-checking test of the spike FIFO against a queue
// model: random pushes and pops, fill level (the spike count l), order of
// keys, simultaneous push and pop, filling to DEPTH, the sticky overflow
// flag when a spike arrives at a full FIFO, and draining.
`timescale 1ns / 1ps
module tb_spike_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic push = 0, pop = 0, full, empty, overflow;
  logic [31:0] push_key = 0, pop_key;
  logic [4:0] count;
  int checks = 0, failures = 0;
  int q[$];

  spike_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .push_key, .pop, .pop_key, .count, .full, .empty, .overflow);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step(input bit pu, input bit po);
    @(negedge clk);
    push = pu; pop = po; push_key = $urandom;
    if (po && q.size() > 0) check(pop_key == q[0], "head key");
    @(posedge clk);
    if (po && q.size() > 0) void'(q.pop_front());
    if (pu && q.size() < DEPTH) q.push_back(push_key);
    #1;
    check(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
    check(empty == (q.size() == 0) && full == (q.size() == DEPTH), "flags");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++) step($urandom_range(0, 1) != 0, $urandom_range(0, 1) != 0);
    while (q.size() > 0) step(0, 1);
    check(!overflow, "no overflow before the FIFO was full");
    while (q.size() < DEPTH) step(1, 0);
    check(full && !overflow, "full, no overflow yet");
    step(1, 1);
    check(!overflow, "push with pop while full is accepted");
    step(1, 0);
    check(overflow, "overflow on push into full FIFO");
    while (q.size() > 0) step(0, 1);
    check(empty && overflow, "drained, overflow sticky");
    for (int i = 0; i < 200; i++) step($urandom_range(0, 2) != 0, $urandom_range(0, 2) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
