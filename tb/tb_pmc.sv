// tb_pmc: self-checking test of the power management controller.
//
// Drives supply change, power shut-off, power-up, timing reconfiguration,
// LUT forwarding and a no-op command, and checks the cycle at which each
// output edge happens against the schedule computed here from the timing
// registers (an event at time t after a command accepted at cycle c0
// happens at the clock edge c0 + t + 1). Also checks that a supply change
// with the default timing completes in under 100 ns and a power-up in about
// 1 us (10 ns reference clock).
`timescale 1ns / 1ps
module tb_pmc;
  import dvfs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic cmd_valid = 0, cmd_ready;
  pmc_cmd_t cmd = '0;
  logic [PL_W-1:0] pl_idx, rail_pl, lut_widx, pl_cur;
  logic lut_we, pre_en, main_en, clk_en, iso_en, core_rst_n, busy, powered;
  logic [FREQ_W-1:0] lut_wmhz;
  logic [PRE_W-1:0] n_pre;

  pmc dut (.clk_ref(clk), .rst_n, .cmd_valid, .cmd_ready, .cmd,
           .pl_idx, .lut_we, .lut_widx, .lut_wmhz, .rail_pl, .pre_en, .n_pre,
           .main_en, .clk_en, .iso_en, .core_rst_n, .busy, .powered, .pl_cur);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // edge monitor: cycle numbers of the last edges
  int c_clk_fall, c_clk_rise, c_pre_rise, c_main_rise, c_main_fall, c_freq, c_iso_rise, c_rst_rise;
  logic clk_en_d, pre_en_d, main_en_d, iso_en_d, rst_d;
  logic [PL_W-1:0] pl_d;
  always @(posedge clk) begin
    #1;
    if (clk_en_d && !clk_en)   c_clk_fall  = cyc;
    if (!clk_en_d && clk_en)   c_clk_rise  = cyc;
    if (!pre_en_d && pre_en)   c_pre_rise  = cyc;
    if (!main_en_d && main_en) c_main_rise = cyc;
    if (main_en_d && !main_en) c_main_fall = cyc;
    if (pl_d != pl_idx)        c_freq      = cyc;
    if (!iso_en_d && iso_en)   c_iso_rise  = cyc;
    if (!rst_d && core_rst_n)  c_rst_rise  = cyc;
    clk_en_d = clk_en; pre_en_d = pre_en; main_en_d = main_en;
    pl_d = pl_idx; iso_en_d = iso_en; rst_d = core_rst_n;
  end

  // no clock while not fully connected
  always @(posedge clk) if (rst_n && clk_en && !main_en) begin
    failures++; $display("FAIL: clock enabled without supply");
  end

  int c0;
  task automatic send(input pmc_op_e op, input logic [3:0] sel, input logic [15:0] arg);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.sel = sel; cmd.arg = arg;
    @(posedge clk); #1;
    c0 = cyc;            // cycle number of the accepting edge
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_idle();
    int n = 0;
    @(posedge clk); #1;
    while (busy && n < 2000) begin @(posedge clk); #1; n++; end
  endtask

  pmc_timing_t T;

  initial begin
    T = PMC_TIMING_DEFAULT;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(powered && clk_en && main_en && !iso_en && core_rst_n && pl_idx == 0, "reset state: on at PL1");
    check(n_pre == 8'd31, "31 pre-charge switches by default");

    // ---- supply change PL1 -> PL3 ----
    send(PMC_SET_PL, 0, 16'd2);
    check(busy && !cmd_ready, "busy and not ready during sequence");
    wait_idle();
    check(c_clk_fall  == c0 + int'(T.t_off2clk) + 1, "SC: clk_en falls at t_off2clk");
    check(c_pre_rise  == c0 + int'(T.t_up2vdd) + 1, "SC: pre-charge at t_up2vdd");
    check(c_main_rise == c0 + int'(T.t_up2vdd) + int'(T.t_pre_sc) + 1, "SC: rail switched after t_pre,sc");
    check(c_freq      == c0 + int'(T.t_up2freq) + 1, "SC: frequency at t_up2freq");
    check(c_clk_rise  == c0 + int'(T.t_on2clk) + 1, "SC: clk_en rises at t_on2clk");
    check((c_clk_rise - c0) * 10 < 100, "SC completes in under 100 ns");
    check(pl_idx == 2 && rail_pl == 2 && powered && !pre_en, "SC: at PL3");

    // ---- SET_PL to the running level: nothing happens ----
    send(PMC_SET_PL, 0, 16'd2);
    @(posedge clk); #1;
    check(!busy && clk_en && pl_idx == 2, "same PL: no sequence");

    // ---- reconfigure pre-charge time and switch count, change PL3 -> PL2 ----
    send(PMC_CFG, CFG_PRE_SC, 16'd4);
    send(PMC_CFG, CFG_ON2CLK, 16'd12);
    send(PMC_CFG, CFG_NPRE, 16'd15);
    @(posedge clk); #1;
    check(n_pre == 8'd15, "CFG: switch count written");
    send(PMC_SET_PL, 0, 16'd1);
    wait_idle();
    check(c_main_rise == c0 + int'(T.t_up2vdd) + 4 + 1, "CFG: new pre-charge time used");
    check(c_clk_rise  == c0 + 12 + 1, "CFG: new t_on2clk used");
    check(pl_idx == 1 && rail_pl == 1, "at PL2");

    // ---- power shut-off ----
    send(PMC_PSO, 0, 16'd0);
    wait_idle();
    check(c_clk_fall == c0 + int'(T.t_off2clk) + 1 && c_iso_rise == c_clk_fall, "PSO: clock off and isolation");
    check(c_main_fall == c0 + int'(T.t_up2vdd) + 1, "PSO: switches open at t_up2vdd");
    check(!powered && !main_en && !pre_en && !core_rst_n && iso_en && !clk_en, "PSO: off state");

    // ---- power-up to PL1 ----
    send(PMC_SET_PL, 0, 16'd0);
    wait_idle();
    check(c_pre_rise  == c0 + int'(T.t_up2vdd) + 1, "PU: pre-charge at t_up2vdd");
    check(c_main_rise == c0 + int'(T.t_up2vdd) + int'(T.t_pre_pu) + 1, "PU: rail after t_pre,pu");
    check(c_freq      == c0 + int'(T.t_up2freq_pu) + 1, "PU: frequency at t_up2freq_pu");
    check(c_clk_rise  == c0 + int'(T.t_on2clk_pu) + 1 && c_rst_rise == c_clk_rise, "PU: clock and reset release");
    check((c_clk_rise - c0) * 10 >= 500 && (c_clk_rise - c0) * 10 <= 1000, "PU takes about 1 us");
    check(powered && !iso_en && pl_idx == 0 && rail_pl == 0, "PU: on at PL1");

    // ---- LUT write forwarding ----
    send(PMC_LUT, 4'd1, 16'd250);
    @(posedge clk); #1;
    check(lut_we == 0, "LUT write is a single-cycle pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lut_we pulse is checked at its edge
  always @(posedge clk) begin
    #1;
    if (lut_we) begin
      checks++;
      if (!(lut_widx == 2'd1 && lut_wmhz == 10'd250)) begin
        failures++; $display("FAIL: LUT write fields");
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
