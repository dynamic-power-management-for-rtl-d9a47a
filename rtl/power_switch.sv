// power_switch: behavioural model of a PE's header PMOS power switches and
// the three on-chip supply rails they connect to. This is a behavioural
// model, not synthesizable logic: the switches and rails are analog.
//
// The PE core domain can be connected to one of three rails (0.70 V, 0.85 V,
// 1.00 V, fed by off-chip regulators) or to none (power shut-off). Before all
// switches of a new rail are closed, a small configurable number n_pre of
// pre-charge switches is connected to it, so the core net slews to the new
// voltage slowly and the rush current does not pull down the other PEs on
// that rail. The model moves the core net voltage vdd_mv towards the rail
// by n_pre * 1000 / SLEW_NS_PER_V mV every nanosecond while only the
// pre-charge switches are on (an illustrative linear slew, not a measured
// one). When main_en rises while the net is still more than SETTLE_MV away
// from the rail, the model counts a rush-current event in rush_count; the
// net then jumps to the rail voltage. pwr_ok is high while the main switches
// are on and the net is at its rail. With all switches open the net
// discharges at 10 mV/ns.
//
// Inputs come from the PMC: rail_sel (rail index, PL1..PL3 -> 0..2),
// pre_en, n_pre, main_en. For the first HOLD_NS after time zero the model
// keeps the net at its initial state and ignores these inputs, which are
// not defined before the PMC has been reset.

`timescale 1ns / 1ps
module power_switch
  import dvfs_pkg::*;
#(
  parameter int RAIL0_MV      = 700,
  parameter int RAIL1_MV      = 850,
  parameter int RAIL2_MV      = 1000,
  parameter int SLEW_NS_PER_V = 3000,
  parameter int SETTLE_MV     = 20,
  parameter int INIT_RAIL     = 0,      // rail the net starts on (-1: off)
  parameter int INIT_ON       = 1,
  parameter int HOLD_NS       = 20      // inputs ignored until the PMC is reset
) (
  input  logic [PL_W-1:0]  rail_sel,
  input  logic             pre_en,
  input  logic [PRE_W-1:0] n_pre,
  input  logic             main_en,
  output int               vdd_mv,
  output logic             pwr_ok,
  output int               rush_count
);


  real v;
  int  rush_q;

  function automatic real step();
    return real'(n_pre) * 1000.0 / real'(SLEW_NS_PER_V);
  endfunction

  function automatic int rail_mv(input logic [PL_W-1:0] r);
    case (r)
      2'd0:    return RAIL0_MV;
      2'd1:    return RAIL1_MV;
      default: return RAIL2_MV;
    endcase
  endfunction

  initial begin
    bit was_on;
    real r;
    v = 0.0;
    rush_q = 0;
    if (INIT_ON != 0) v = real'(rail_mv(PL_W'(INIT_RAIL)));
    was_on = (INIT_ON != 0);
    #(HOLD_NS);
    forever begin
      r = real'(rail_mv(rail_sel));
      if (main_en) begin
        // rush current: all switches closed on a net far from the rail
        if (!was_on && (v < r - real'(SETTLE_MV) || v > r + real'(SETTLE_MV)))
          rush_q = rush_q + 1;
        was_on = 1'b1;
        v = r;
        @(main_en or rail_sel);
      end else if (pre_en && n_pre != '0 && v != r) begin
        was_on = 1'b0;
        #1;
        r = real'(rail_mv(rail_sel));
        if (v < r) v = (v + step() > r) ? r : v + step();
        else       v = (v - step() < r) ? r : v - step();
      end else if (!pre_en && v > 0.0) begin
        was_on = 1'b0;
        #1;
        v = (v > 10.0) ? v - 10.0 : 0.0;
      end else begin
        was_on = 1'b0;
        @(main_en or pre_en or rail_sel or n_pre);
      end
    end
  end

  assign rush_count = rush_q;
  always_comb vdd_mv = int'(v);
  always_comb pwr_ok = main_en && vdd_mv >= rail_mv(rail_sel) - SETTLE_MV &&
                       vdd_mv <= rail_mv(rail_sel) + SETTLE_MV;

endmodule
