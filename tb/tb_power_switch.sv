// tb_power_switch: self-checking test of the header power switch model.
// Power-up from 0 V to the 1.00 V rail with 31 pre-charge switches: checks
// the net voltage part-way (slope n_pre * 1000 / 3000 mV/ns), that it settles
// before the main switches close and that no rush event is counted. Then a
// supply change to the 0.70 V rail with no pre-charge time, which must count
// one rush event, a supply change to 0.85 V with enough pre-charge (no
// event), and a shut-off that discharges the net.
`timescale 1ns / 1ps
module tb_power_switch;
  import dvfs_pkg::*;
  logic [PL_W-1:0] rail_sel = 2;
  logic pre_en = 0, main_en = 0;
  logic [PRE_W-1:0] n_pre = 31;
  int vdd_mv, rush_count;
  logic pwr_ok;
  int checks = 0, failures = 0;

  power_switch #(.INIT_ON(0)) dut (.rail_sel, .pre_en, .n_pre, .main_en, .vdd_mv, .pwr_ok, .rush_count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (vdd %0d mV, rush %0d)", what, vdd_mv, rush_count); end
  endtask

  initial begin
    #30;   // past the model's start-up hold
    check(vdd_mv == 0 && !pwr_ok, "starts off");
    // power-up to 1.00 V
    pre_en = 1;
    #30.5;
    // 30 steps of 31*1000/3000 = 10.33 mV
    check(vdd_mv >= 300 && vdd_mv <= 320, "pre-charge slope");
    #100;
    check(vdd_mv == 1000, "settled at 1.00 V after ~97 ns");
    main_en = 1; pre_en = 0;
    #1 check(pwr_ok && rush_count == 0, "power-up without rush");
    // supply change to 0.70 V, no pre-charge time
    main_en = 0; rail_sel = 0; pre_en = 1;
    #1 main_en = 1; pre_en = 0;
    #1 check(rush_count == 1 && pwr_ok && vdd_mv == 700, "too short pre-charge counts a rush event");
    // supply change to 0.85 V with 30 ns pre-charge
    main_en = 0; rail_sel = 1; pre_en = 1;
    #30 check(vdd_mv == 850, "0.70 -> 0.85 V settles within 30 ns");
    main_en = 1; pre_en = 0;
    #1 check(rush_count == 1 && pwr_ok, "supply change without rush");
    // shut-off
    main_en = 0;
    #1 check(!pwr_ok, "not ok when switches open");
    #100 check(vdd_mv == 0, "net discharged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
