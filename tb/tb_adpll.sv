// tb_adpll: self-checking test of the ADPLL clock generator model.
// Measures the output period at the three performance-level frequencies
// (125, 333, 500 MHz -> 8.000, 3.003, 2.000 ns), checks that a frequency
// change applies within two output periods, that clk_en stops and restarts
// the clock and that the gated clock never has a pulse shorter than half a
// period (no glitch).
`timescale 1ns / 1ps
module tb_adpll;
  import dvfs_pkg::*;
  logic clk_ref = 0;
  always #5 clk_ref = !clk_ref;
  logic [FREQ_W-1:0] freq = 125;
  logic clk_en = 1, clk_core;
  int checks = 0, failures = 0;

  adpll dut (.clk_ref, .freq_mhz(freq), .clk_en, .clk_core);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  realtime t_rise, t_fall, min_high = 1e9;
  int n_edges = 0;
  always @(posedge clk_core) begin t_rise = $realtime; n_edges++; end
  always @(negedge clk_core) begin
    t_fall = $realtime;
    if (t_fall - t_rise < min_high) min_high = t_fall - t_rise;
  end

  task automatic measure(input int mhz);
    realtime a, b;
    real expect_ns;
    freq = FREQ_W'(mhz);
    repeat (3) @(posedge clk_core);
    a = $realtime;
    repeat (10) @(posedge clk_core);
    b = $realtime;
    expect_ns = 1000.0 / real'(mhz);
    check((b - a) / 10.0 > expect_ns * 0.99 && (b - a) / 10.0 < expect_ns * 1.01,
          $sformatf("period at %0d MHz: %0.3f ns", mhz, (b - a) / 10.0));
  endtask

  initial begin
    #20;
    measure(125);
    measure(333);
    measure(500);
    // frequency switch applies fast: after the change, the second period is new
    begin
      realtime a, b;
      @(posedge clk_core); freq = 125;
      @(posedge clk_core); @(posedge clk_core); a = $realtime;
      @(posedge clk_core); b = $realtime;
      check(b - a > 7.9 && b - a < 8.1, "switch to 125 MHz within two periods");
    end
    // gating
    @(negedge clk_ref); clk_en = 0;
    #20 n_edges = 0;
    #200 check(n_edges == 0, "no clock while clk_en low");
    check(clk_core == 0, "gated clock rests low");
    clk_en = 1;
    #100 check(n_edges >= 11 && n_edges <= 13, $sformatf("clock restarts (%0d edges in 100 ns)", n_edges));
    // toggle enable at odd times, look for glitches (125 MHz: high 4 ns)
    min_high = 1e9;
    for (int i = 0; i < 20; i++) begin
      #(3.7 + i) clk_en = !clk_en;
    end
    clk_en = 1;
    #50;
    check(min_high > 3.9, $sformatf("no glitch: shortest high %0.3f ns", min_high));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
