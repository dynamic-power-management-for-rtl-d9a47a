// tb_plevel_lut: self-checking test of the performance-level look-up table.
// Checks the reset contents (125, 333, 500 MHz for PL1..PL3), a rewrite of
// one entry, that the other entries keep their values, and that an
// out-of-range index reads entry 0 and is not written.
`timescale 1ns / 1ps
module tb_plevel_lut;
  import dvfs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic wr_en = 0;
  logic [PL_W-1:0] wr_idx = 0, rd_idx = 0;
  logic [FREQ_W-1:0] wr_mhz = 0, freq_mhz;
  int checks = 0, failures = 0;

  plevel_lut dut (.clk_ref(clk), .rst_n, .wr_en, .wr_idx, .wr_mhz, .rd_idx, .freq_mhz);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int idx, input int mhz);
    @(negedge clk); wr_en = 1; wr_idx = PL_W'(idx); wr_mhz = FREQ_W'(mhz);
    @(negedge clk); wr_en = 0;
  endtask

  int exp_f [4];
  initial begin
    exp_f = '{125, 333, 500, 125};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      rd_idx = PL_W'(i); #1;
      check(int'(freq_mhz) == exp_f[i], $sformatf("reset entry %0d", i));
    end
    wr(1, 10);
    wr(3, 77);
    exp_f = '{125, 10, 500, 125};
    for (int i = 0; i < 4; i++) begin
      rd_idx = PL_W'(i); #1;
      check(int'(freq_mhz) == exp_f[i], $sformatf("after write, entry %0d", i));
    end
    rd_idx = 2; #1;
    wr(2, 400);
    #1 check(int'(freq_mhz) == 400, "output follows a write to the selected entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
